// Chip-to-symbol mapper (one per chain).
//
// Collects 32 chips (c_0 first), XORs them with each of the 16 IEEE 802.15.4
// chip sequences, counts agreeing chips and picks the symbol with the most
// agreements (15 comparisons, ties to the lower symbol). This is the XOR-and-
// compare mapping of the receiver description; the chip table is the
// standard's (see rx_pkg) and the tie rule is this design's.
//
// Interface: in_valid/in_chip, one chip per clock at most; sym_valid pulses
// with symbol and its agreement count one clock after the 32nd chip. A low
// en restarts the chip count (used between frames).
module chip_to_symbol
  import rx_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       en,
  input  logic       in_valid,
  input  logic       in_chip,
  output logic       sym_valid,
  output logic [3:0] symbol,
  output logic [5:0] agree
);
  chipword_t sh, word;
  logic [4:0] cnt;

  // Chip c_0 arrives first and ends up in bit 0 once 32 chips are in.
  assign word = {in_chip, sh[CHIPS_PER_SYM-1:1]};

  logic [3:0] best_s;
  logic [5:0] best_a, a;
  always_comb begin
    best_s = '0; best_a = '0;
    for (int s = 0; s < 16; s++) begin
      a = popcount32(~(word ^ pn_seq(4'(s))));
      if (s == 0 || a > best_a) begin best_a = a; best_s = 4'(s); end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n || !en) begin
      sh <= '0; cnt <= '0; sym_valid <= 1'b0; symbol <= '0; agree <= '0;
    end else begin
      sym_valid <= 1'b0;
      if (in_valid) begin
        sh  <= word;
        cnt <= cnt + 1'b1;
        if (&cnt) begin sym_valid <= 1'b1; symbol <= best_s; agree <= best_a; end
      end
    end
  end
endmodule
