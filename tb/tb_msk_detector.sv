// Testbench of msk_detector: random sample pairs; expects chip = 1 exactly
// when Im(z * conj(zd)) > 0, one clock later.
module tb_msk_detector;
  logic clk = 0, rst_n = 0, en = 1, in_valid = 0, chip_valid, chip;
  logic signed [7:0] z_i = 0, z_q = 0, zd_i = 0, zd_q = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  msk_detector dut (.*);
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      int a, b, c, d; bit e;
      a = $urandom_range(254, 0) - 127; b = $urandom_range(254, 0) - 127;
      c = $urandom_range(254, 0) - 127; d = $urandom_range(254, 0) - 127;
      e = (b * c - a * d) > 0;
      @(negedge clk); in_valid = 1; z_i = 8'(a); z_q = 8'(b); zd_i = 8'(c); zd_q = 8'(d);
      @(negedge clk); in_valid = 0;
      checks++;
      if (!chip_valid || chip != e) begin failures++; $display("%0d %0d %0d %0d: got %b", a, b, c, d, chip); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
