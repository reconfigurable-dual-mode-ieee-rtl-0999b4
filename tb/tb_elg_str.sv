// Testbench of elg_str. An MSK/O-QPSK frame with a random timing offset and
// carrier phase is filtered by matched_filter (tested on its own) and fed to
// the early-late gate. Expects: lock after training, symbols exactly 16
// samples apart once locked, the gate to have moved at least once in total,
// and, after lock, chip samples whose phase steps (sign of Im(s_k s*_{k-1}),
// independent of the carrier phase) reproduce the transmitted chips (checked at the best chip alignment).
module tb_elg_str;
  import tb_sig_pkg::*;
  logic clk = 0, rst_n = 0, en = 0, in_valid = 0;
  logic signed [7:0] a_i = 0, a_q = 0;
  logic mf_v; logic signed [11:0] mf_i, mf_q;
  logic sym_valid, locked; logic signed [11:0] ye_i, ye_q, yl_i, yl_q; logic [7:0] adjust_count;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  matched_filter u_mf (.clk, .rst_n, .en, .in_valid, .in_i(a_i), .in_q(a_q), .out_valid(mf_v), .out_i(mf_i), .out_q(mf_q));
  elg_str dut (.clk, .rst_n, .en, .in_valid(mf_v), .in_i(mf_i), .in_q(mf_q), .sym_valid, .ye_i, .ye_q, .yl_i, .yl_q, .locked, .adjust_count);
  initial begin #50000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic int quad(int re, int im);
    if ((re < 0 ? -re : re) >= (im < 0 ? -im : im)) return re >= 0 ? 0 : 2;
    return im >= 0 ? 1 : 3;
  endfunction

  int total_adj = 0;
  int mon_q [$]; int mon_t [$];
  always @(negedge clk) if (sym_valid && locked) begin
    mon_t.push_back($time); mon_q.push_back(ye_i); mon_q.push_back(ye_q); mon_q.push_back(yl_i); mon_q.push_back(yl_q);
  end
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int trial = 0; trial < 6; trial++) begin
      bit chips [$]; int syms [$]; int si [$], sq [$];
      int q [$]; int got [$]; int nsym_locked, lastt, t, best, besto;
      syms = {};
      for (int s = 0; s < 20; s++) syms.push_back($urandom_range(15, 0));
      frame_chips(syms, chips);
      msk_wave(chips, 8, 90.0, 0.0, 1.1 * trial, 3.0, urand01(), $urandom_range(15, 0), 32, si, sq);
      @(negedge clk); en = 0; @(negedge clk); en = 1;
      q = {}; nsym_locked = 0; lastt = -1; t = 0; mon_q = {}; mon_t = {};
      for (int n = 0; n < si.size(); n++) begin
        @(negedge clk); in_valid = 1; a_i = 8'(si[n]); a_q = 8'(sq[n]); t++;
        @(negedge clk); in_valid = 0;
      end
      foreach (mon_t[i]) if (i > 1) begin
        checks++;
        if (mon_t[i] - mon_t[i-1] != 320) begin failures++; $display("trial %0d: locked symbols %0d ns apart", trial, mon_t[i] - mon_t[i-1]); end
      end
      q = mon_q;
      total_adj += adjust_count;
      checks++; if (!locked) begin failures++; $display("trial %0d: not locked", trial); end
      got = {};
      // chip = sign of Im(s_k * conj(s_{k-1})) over consecutive chip samples
      for (int i = 2; i + 1 < q.size(); i += 2) got.push_back((q[i+1] * q[i-2] - q[i] * q[i-1]) > 0);
      best = 0; besto = 0;
      for (int o = 0; o < 200; o++) begin
        int ok; ok = 0;
        for (int i = 0; i < got.size() && i + o < chips.size(); i++) ok += (got[i] == chips[i + o]);
        if (ok > best) begin best = ok; besto = o; end
      end
      checks++;
      if (best < got.size() - 40) begin failures++; end
      $display("trial %0d: %0d adjustments, %0d of %0d chips right at offset %0d", trial, adjust_count, best, got.size(), besto);
    end
    checks++; if (total_adj == 0) begin failures++; $display("the gate never moved"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
