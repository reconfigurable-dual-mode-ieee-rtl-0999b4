// QPSK chip decision and differential decoding of the O-QPSK chain.
//
// The transmitter differentially encodes the chip stream, which makes its
// half-sine O-QPSK signal identical to MSK whose frequency data are the
// original chips. After carrier correction each chip sample lies near one of
// 1, j, -1, -j; this block decides every sample to the nearest of those four
// points (the M-ary PSK decision) and emits chip 1 when the phase advanced by
// +pi/2 from the previous chip sample and 0 when it went back by pi/2 (the
// sign convention of the MSK detector). A step of 0 or pi is a decision error
// and gives 0. Being differential, the result does not depend on the pi/2
// ambiguity of the carrier phase estimate.
//
// The description draws its differential decoder after the symbol-to-bit
// mapping; this design places it on the chip stream, where the differential
// encoding that makes O-QPSK equal to MSK acts.
//
// Interface: each in_valid brings the early (ye) and late (yl) chip sample of
// one symbol; the two decoded chips leave on the next two clocks (chip_valid,
// chip), early one first. in_valid must be at least two clocks apart.
module diff_decoder #(
  parameter int W = 12
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en,
  input  logic                in_valid,
  input  logic signed [W-1:0] ye_i,
  input  logic signed [W-1:0] ye_q,
  input  logic signed [W-1:0] yl_i,
  input  logic signed [W-1:0] yl_q,
  output logic                chip_valid,
  output logic                chip
);
  // Quadrant index: 0 -> 1, 1 -> j, 2 -> -1, 3 -> -j.
  function automatic logic [1:0] quad(input logic signed [W-1:0] re, im);
    logic [W:0] ar, ai;
    ar = (W+1)'(re < 0 ? -(W+1)'(re) : (W+1)'(re));
    ai = (W+1)'(im < 0 ? -(W+1)'(im) : (W+1)'(im));
    if (ar >= ai) return (re >= 0) ? 2'd0 : 2'd2;
    else          return (im >= 0) ? 2'd1 : 2'd3;
  endfunction

  logic [1:0] q_prev, qe, ql;
  logic       second_pending, second_chip;

  assign qe = quad(ye_i, ye_q);
  assign ql = quad(yl_i, yl_q);

  always_ff @(posedge clk) begin
    if (!rst_n || !en) begin
      q_prev <= '0; second_pending <= 1'b0; second_chip <= 1'b0;
      chip_valid <= 1'b0; chip <= 1'b0;
    end else begin
      chip_valid <= 1'b0;
      if (in_valid) begin
        chip_valid     <= 1'b1;
        chip           <= (qe - q_prev) == 2'd1;
        second_pending <= 1'b1;
        second_chip    <= (ql - qe) == 2'd1;
        q_prev         <= ql;
      end else if (second_pending) begin
        chip_valid     <= 1'b1;
        chip           <= second_chip;
        second_pending <= 1'b0;
      end
    end
  end

  a_spacing: assert property (@(posedge clk) disable iff (!rst_n || !en) in_valid |=> !in_valid);
endmodule
