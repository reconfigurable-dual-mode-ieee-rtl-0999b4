// Symbol-to-bit mapper (one per chain).
//
// Each 4-bit data symbol is sent out as four bits, least significant first,
// the IEEE 802.15.4 bit order (the description does not state the order).
//
// Interface: sym_valid/symbol; the bits leave on bit_valid/bit_out during the
// four clocks that follow. Symbols must be at least four clocks apart (they
// are 32 chips apart in the receiver).
module symbol_to_bits (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       en,
  input  logic       sym_valid,
  input  logic [3:0] symbol,
  output logic       bit_valid,
  output logic       bit_out
);
  logic [3:0] sh;
  logic [2:0] left;

  always_ff @(posedge clk) begin
    if (!rst_n || !en) begin
      sh <= '0; left <= '0; bit_valid <= 1'b0; bit_out <= 1'b0;
    end else begin
      bit_valid <= 1'b0;
      if (sym_valid) begin
        bit_valid <= 1'b1; bit_out <= symbol[0];
        sh <= {1'b0, symbol[3:1]}; left <= 3'd3;
      end else if (left != 0) begin
        bit_valid <= 1'b1; bit_out <= sh[0];
        sh <= {1'b0, sh[3:1]}; left <= left - 1'b1;
      end
    end
  end

  a_spacing: assert property (@(posedge clk) disable iff (!rst_n || !en) sym_valid |-> left == 0);
endmodule
