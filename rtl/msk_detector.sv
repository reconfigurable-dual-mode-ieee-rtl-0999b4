// Differential detector of the MSK chain.
//
// sin(phi(t) - phi(t-T)) has the sign of Im(z(t) * conj(z(t-T))), so the
// block takes the sample at the chip instant chosen by the timing recovery
// and the sample one chip earlier, and decides chip 1 when that imaginary
// part is above zero and 0 otherwise, as in the receiver description. The
// carrier phase cancels in the product and a small frequency offset only
// adds a constant angle, so no carrier recovery is needed.
//
// Interface: one decision per in_valid, registered (chip_valid one clock
// later).
module msk_detector #(
  parameter int IN_W = 8
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   en,
  input  logic                   in_valid,
  input  logic signed [IN_W-1:0] z_i,
  input  logic signed [IN_W-1:0] z_q,
  input  logic signed [IN_W-1:0] zd_i,
  input  logic signed [IN_W-1:0] zd_q,
  output logic                   chip_valid,
  output logic                   chip
);
  localparam int PW = 2 * IN_W + 1;
  logic signed [PW-1:0] im;
  assign im = PW'(z_q) * PW'(zd_i) - PW'(z_i) * PW'(zd_q);

  always_ff @(posedge clk) begin
    if (!rst_n || !en) begin
      chip_valid <= 1'b0; chip <= 1'b0;
    end else begin
      chip_valid <= in_valid;
      if (in_valid) chip <= im > 0;
    end
  end
endmodule
