// Testbench of msk_str: an MSK frame with a known chip-boundary position,
// carrier offset and noise. Expects lock, tau at the boundary sample (+-0),
// then one chip_valid every 8 samples with zd the sample 8 earlier, and the
// detected phase step signs to reproduce the chips.
module tb_msk_str;
  import tb_sig_pkg::*;
  logic clk = 0, rst_n = 0, en = 1, in_valid = 0, chip_valid, locked;
  logic signed [7:0] in_i = 0, in_q = 0, z_i, z_q, zd_i, zd_q;
  logic [2:0] tau;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  msk_str dut (.*);
  initial begin #20000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int trial = 0; trial < 4; trial++) begin
      bit chips [$]; int syms [$]; int si [$], sq [$];
      int lead, nout, good, lastn;
      int sidx [$];
      lead = 40 + trial * 3;                   // boundary at sample lead (mod 8)
      syms = {};
      for (int s = 0; s < 12; s++) syms.push_back($urandom_range(15, 0));
      frame_chips(syms, chips);
      msk_wave(chips, 8, 90.0, 0.002, 0.7 * trial, 4.0, 0.0, lead, 16, si, sq);
      en = 0; rst_n = 0; @(negedge clk); rst_n = 1; en = 1;
      nout = 0; good = 0; lastn = -1;
      for (int n = 0; n < si.size(); n++) begin
        @(negedge clk); in_valid = 1; in_i = 8'(si[n]); in_q = 8'(sq[n]);
        @(negedge clk); in_valid = 0;
        if (chip_valid) begin
          int k; bit c;
          // chip_valid follows sample n; the boundary after chip k is at lead+8(k+1)
          checks++;
          if (z_i != 8'(si[n]) || z_q != 8'(sq[n]) || zd_i != 8'(si[n-8]) || zd_q != 8'(sq[n-8])) begin
            failures++; $display("trial %0d: samples not one chip apart at %0d", trial, n);
          end
          if (lastn >= 0 && n - lastn != 8) begin failures++; $display("chip spacing %0d", n - lastn); end
          lastn = n;
          k = (n - lead) / 8 - 1;
          c = (32'(z_q) * 32'(zd_i) - 32'(z_i) * 32'(zd_q)) > 0;
          if (k >= 0 && k < chips.size()) begin nout++; if (c == chips[k]) good++; end
        end
      end
      checks++;
      if (!locked || 32'(tau) != lead % 8) begin failures++; $display("trial %0d: locked %b tau %0d expected %0d", trial, locked, tau, lead % 8); end
      checks++;
      if (nout < chips.size() - 80 || good < nout - 2) begin failures++; $display("trial %0d: %0d chips, %0d right", trial, nout, good); end
      $display("trial %0d: tau %0d, %0d chips, %0d right", trial, tau, nout, good);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
