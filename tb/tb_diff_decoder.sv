// Testbench of diff_decoder: chip samples built from a random chip stream
// (phase +-pi/2 per chip) under an unknown multiple of pi/2 rotation, small
// rotation error and noise. Expects the chips back (all but the first), two
// per symbol in time order.
module tb_diff_decoder;
  import tb_sig_pkg::*;
  logic clk = 0, rst_n = 0, en = 0, in_valid = 0, chip_valid, chip;
  logic signed [11:0] ye_i = 0, ye_q = 0, yl_i = 0, yl_q = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  diff_decoder dut (.*);
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  int got [$];
  always @(negedge clk) if (chip_valid) got.push_back(chip);
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int trial = 0; trial < 8; trial++) begin
      bit c [$]; real ph; int y [4];
      @(negedge clk); en = 0; @(negedge clk); en = 1;
      got = {}; c = {};
      ph = PI / 2.0 * $urandom_range(3, 0) + 0.3 * (urand01() - 0.5);
      for (int n = 0; n < 400; n++) begin
        for (int h = 0; h < 2; h++) begin
          bit b; b = $urandom_range(1, 0); c.push_back(b);
          ph += b ? PI / 2.0 : -PI / 2.0;
          y[2*h]   = $rtoi(1000.0 * $cos(ph) + 60.0 * gauss());
          y[2*h+1] = $rtoi(1000.0 * $sin(ph) + 60.0 * gauss());
        end
        @(negedge clk); in_valid = 1; ye_i = 12'(y[0]); ye_q = 12'(y[1]); yl_i = 12'(y[2]); yl_q = 12'(y[3]);
        @(negedge clk); in_valid = 0;
        repeat ($urandom_range(2, 0)) @(negedge clk);
      end
      repeat (3) @(negedge clk);
      checks++;
      if (got.size() != c.size()) begin failures++; $display("trial %0d: %0d chips", trial, got.size()); end
      else for (int i = 1; i < c.size(); i++) begin
        checks++;
        if (got[i] != c[i]) begin failures++; if (failures < 10) $display("trial %0d chip %0d wrong", trial, i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
