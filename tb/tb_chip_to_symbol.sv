// Testbench of chip_to_symbol: random symbols spread with the standard chip
// table, with up to 6 chips flipped; expects the symbol back, one clock after
// its 32nd chip.
module tb_chip_to_symbol;
  import tb_sig_pkg::*;
  logic clk = 0, rst_n = 0, en = 1, in_valid = 0, in_chip = 0, sym_valid;
  logic [3:0] symbol; logic [5:0] agree;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  int npulse = 0; logic [3:0] last_sym; logic [5:0] last_agree; int last_t, t_chip32;
  always @(negedge clk) if (sym_valid) begin npulse++; last_sym = symbol; last_agree = agree; last_t = $time; end
  chip_to_symbol dut (.*);
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      int s, nerr; bit c [32];
      s = (n < 16) ? n : $urandom_range(15, 0);
      nerr = (n < 16) ? 0 : $urandom_range(6, 0);
      for (int i = 0; i < 32; i++) c[i] = pn_chip(s, i);
      for (int e = 0; e < nerr; e++) c[(e * 5 + n) % 32] = ~c[(e * 5 + n) % 32];
      for (int i = 0; i < 32; i++) begin
        @(negedge clk); in_valid = 1; in_chip = c[i];
        if (i != 31 && $urandom_range(3, 0) == 0) begin @(negedge clk); in_valid = 0; end
      end
      t_chip32 = $time;
      @(negedge clk); in_valid = 0;
      @(negedge clk);
      checks++;
      if (npulse != n + 1 || last_sym != 4'(s) || last_agree != 6'(32 - nerr) || last_t != t_chip32 + 10) begin
        failures++; $display("sym %0d err %0d: pulses %0d got %0d agree %0d t %0d/%0d", s, nerr, npulse, last_sym, last_agree, last_t, t_chip32);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
