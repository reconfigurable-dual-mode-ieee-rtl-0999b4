// Testbench of symbol_to_bits: random symbols, expects four bits LSB first on
// the four clocks after each symbol.
module tb_symbol_to_bits;
  logic clk = 0, rst_n = 0, en = 1, sym_valid = 0, bit_valid, bit_out;
  logic [3:0] symbol = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  symbol_to_bits dut (.*);
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    logic [3:0] s;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    for (int n = 0; n < 200; n++) begin
      s = 4'($urandom);
      @(negedge clk); sym_valid = 1; symbol = s;
      @(negedge clk); sym_valid = 0;
      for (int b = 0; b < 4; b++) begin
        checks++;
        if (!bit_valid || bit_out !== s[b]) begin failures++; $display("sym %h bit %0d: valid %b got %b", s, b, bit_valid, bit_out); end
        @(negedge clk);
      end
      checks++; if (bit_valid) begin failures++; $display("extra bit after symbol %h", s); end
      repeat ($urandom_range(3, 0)) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
