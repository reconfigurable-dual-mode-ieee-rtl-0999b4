// Testbench of freq_phase_sync with a 256-point FFT. Symbols are pairs of
// chip samples on perpendicular axes (the MSK phase walk), rotated by a
// carrier offset that lies on an FFT bin and a phase offset, plus noise.
// Expects: the FFT peak at that bin, the phase estimate equal to the true
// phase modulo pi/2 (within 2 degrees), every symbol out once and in order,
// the derotated phase steps reproducing the chips, and the first symbol out
// (N/2)log2(N) FFT clocks + N peak-search clocks + CORDIC and pipeline
// clocks (16 to 30 in all) after the N-th input.
module tb_freq_phase_sync;
  import tb_sig_pkg::*;
  localparam int L2 = 8, N = 1 << L2;
  logic clk = 0, rst_n = 0, en = 0, in_valid = 0;
  logic signed [11:0] ye_i = 0, ye_q = 0, yl_i = 0, yl_q = 0, oe_i, oe_q, ol_i, ol_q;
  logic out_valid, est_valid, overflow; logic [L2-1:0] est_bin; logic [15:0] est_theta;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  freq_phase_sync #(.LOG2_NFFT(L2)) dut (.*);
  initial begin #50000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  int o [$]; longint t_first, t_nth;
  always @(negedge clk) if (out_valid) begin
    if (o.size() == 0) t_first = $time;
    o.push_back(oe_i); o.push_back(oe_q); o.push_back(ol_i); o.push_back(ol_q);
  end
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int trial = 0; trial < 4; trial++) begin
      int kbin, nsym; real theta, fd, ph, walk; bit c [$];
      int th_err, got_ok;
      kbin  = (trial == 0) ? 0 : (trial == 1 ? 7 : (trial == 2 ? -12 : 3));
      theta = -0.7 + 0.45 * trial;                     // inside (-pi/4, pi/4) or not, any is fine mod pi/2
      fd    = real'(kbin) / (4.0 * N);                 // cycles per symbol
      nsym  = N + 200;
      @(negedge clk); en = 0; @(negedge clk); en = 1;
      o = {}; c = {}; walk = 0.0;
      for (int n = 0; n < nsym; n++) begin
        int y [4];
        for (int h = 0; h < 2; h++) begin
          bit b; b = $urandom_range(1, 0); c.push_back(b);
          walk += b ? PI / 2.0 : -PI / 2.0;
          ph = walk + theta + 2.0 * PI * fd * real'(n);
          y[2*h]   = $rtoi(900.0 * $cos(ph) + 40.0 * gauss());
          y[2*h+1] = $rtoi(900.0 * $sin(ph) + 40.0 * gauss());
        end
        @(negedge clk); in_valid = 1; ye_i = 12'(y[0]); ye_q = 12'(y[1]); yl_i = 12'(y[2]); yl_q = 12'(y[3]);
        if (n == N - 1) t_nth = $time;
        @(negedge clk); in_valid = 0;
        repeat (14) @(negedge clk);                    // one symbol per 16 clocks, as in the receiver
      end
      repeat (400) @(negedge clk);
      checks++;
      if (!est_valid || est_bin != L2'(kbin)) begin failures++; $display("trial %0d: bin %0d expected %0d", trial, $signed(est_bin), kbin); end
      th_err = (int'($signed(est_theta)) - $rtoi(theta / (2.0 * PI) * 65536.0)) % 16384;
      if (th_err > 8192) th_err -= 16384;
      if (th_err < -8192) th_err += 16384;
      checks++;
      if (th_err > 364 || th_err < -364) begin failures++; $display("trial %0d: phase error %0d/65536 turn", trial, th_err); end
      checks++;
      if (o.size() != 4 * nsym) begin failures++; $display("trial %0d: %0d symbols out of %0d", trial, o.size() / 4, nsym); end
      got_ok = 0;
      for (int k = 1; k < o.size() / 2; k++) begin
        int dq; int re0, im0, re1, im1;
        re0 = o[2*k-2]; im0 = o[2*k-1]; re1 = o[2*k]; im1 = o[2*k+1];
        // coherent check: each derotated sample must sit near an axis
        dq = ((((re1 < 0 ? -re1 : re1) >= (im1 < 0 ? -im1 : im1)) ? (re1 >= 0 ? 0 : 2) : (im1 >= 0 ? 1 : 3))
            - (((re0 < 0 ? -re0 : re0) >= (im0 < 0 ? -im0 : im0)) ? (re0 >= 0 ? 0 : 2) : (im0 >= 0 ? 1 : 3)) + 4) % 4;
        if ((dq == 1) == c[k] && (dq == 1 || dq == 3)) got_ok++;
      end
      checks++;
      if (got_ok < o.size() / 2 - 3) begin failures++; $display("trial %0d: %0d of %0d chips right after derotation", trial, got_ok, o.size() / 2 - 1); end
      checks++;
      if (t_first - t_nth < 10 * ((N / 2) * L2 + N + 16) || t_first - t_nth > 10 * ((N / 2) * L2 + N + 30)) begin
        failures++; $display("trial %0d: first output %0d clocks after the N-th input", trial, (t_first - t_nth) / 10);
      end
      $display("trial %0d: bin %0d theta err %0d, %0d chips right, latency %0d clocks", trial, $signed(est_bin), th_err, got_ok, (t_first - t_nth) / 10);
    end
    checks++; if (overflow) begin failures++; $display("FIFO overflow"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
