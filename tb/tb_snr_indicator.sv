// Testbench of snr_indicator: reference preamble windows with a known number
// of flipped chips spread over the whole window; only flips in the newest
// 128 chips count, so it expects 128-k_low and snr_good = (128-k_low >= 124).
module tb_snr_indicator;
  import tb_sig_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, snr_valid, snr_good;
  logic [255:0] pre_window = '0, ref_w;
  logic [8:0] match_count;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  snr_indicator dut (.*);
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    // bit j holds preamble chip 255-j (bit 0 newest)
    for (int j = 0; j < 256; j++) ref_w[j] = pn_chip(0, (255 - j) % 32);
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 100; n++) begin
      int k, kl; logic [255:0] w;
      k = (n < 30) ? n : $urandom_range(80, 0);
      w = ref_w; kl = 0;
      for (int e = 0; e < k; e++) begin w[e * 3 + (n % 3)] = ~w[e * 3 + (n % 3)]; if (e * 3 + (n % 3) < 128) kl++; end
      @(negedge clk); in_valid = 1; pre_window = w;
      @(negedge clk); in_valid = 0;
      checks++;
      if (!snr_valid || match_count != 9'(128 - kl) || snr_good != (128 - kl >= 124)) begin
        failures++; $display("k=%0d valid %b count %0d good %b", k, snr_valid, match_count, snr_good);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
