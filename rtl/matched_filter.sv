// Half-sine matched filter for the I and Q rails of the O-QPSK chain.
//
// Each rail is convolved with h[n] = sin(pi*(n+0.5)/NSAMPLE), n = 0..NSAMPLE-1,
// the half-sine chip pulse sampled NSAMPLE times over its length, which is the
// filter the receiver description prescribes (the pulse is symmetric, so it is
// its own matched filter). The half-sample offset of n, the 8-bit coefficient
// quantisation (round(127*h)) and the word widths are this design's choices.
// Coefficients are computed at elaboration.
//
// Interface: one input sample per in_valid; the filtered sample, arithmetic
// shifted right by SHIFT and saturated to OUT_W bits, appears on out_* with
// out_valid one clock later. A low `en` clears the delay line (sleep).
module matched_filter #(
  parameter int NSAMPLE = 16,
  parameter int IN_W    = 8,
  parameter int OUT_W   = 12,
  parameter int SHIFT   = 6
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    en,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  in_i,
  input  logic signed [IN_W-1:0]  in_q,
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] out_i,
  output logic signed [OUT_W-1:0] out_q
);
  localparam int CW   = 8;
  localparam int ACCW = IN_W + CW + $clog2(NSAMPLE) + 1;

  function automatic logic signed [CW-1:0] coef(input int n);
    return CW'($rtoi(127.0 * $sin(3.14159265358979 * (real'(n) + 0.5) / real'(NSAMPLE)) + 0.5));
  endfunction

  logic signed [IN_W-1:0] dl_i [NSAMPLE];
  logic signed [IN_W-1:0] dl_q [NSAMPLE];
  logic signed [ACCW-1:0] acc_i, acc_q;

  function automatic logic signed [OUT_W-1:0] sat(input logic signed [ACCW-1:0] v);
    logic signed [ACCW-1:0] s;
    s = v >>> SHIFT;
    if (s > ACCW'(2**(OUT_W-1) - 1))   return OUT_W'(2**(OUT_W-1) - 1);
    if (s < -ACCW'(2**(OUT_W-1) - 1))  return OUT_W'(-(2**(OUT_W-1) - 1));
    return OUT_W'(s);
  endfunction

  // Convolution of the new sample with the NSAMPLE-1 previous ones.
  always_comb begin
    acc_i = ACCW'(in_i) * ACCW'(coef(0));
    acc_q = ACCW'(in_q) * ACCW'(coef(0));
    for (int k = 1; k < NSAMPLE; k++) begin
      acc_i += ACCW'(dl_i[k-1]) * ACCW'(coef(k));
      acc_q += ACCW'(dl_q[k-1]) * ACCW'(coef(k));
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < NSAMPLE; k++) begin dl_i[k] <= '0; dl_q[k] <= '0; end
      out_valid <= 1'b0; out_i <= '0; out_q <= '0;
    end else if (!en) begin
      for (int k = 0; k < NSAMPLE; k++) begin dl_i[k] <= '0; dl_q[k] <= '0; end
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        dl_i[0] <= in_i; dl_q[0] <= in_q;
        for (int k = 1; k < NSAMPLE; k++) begin dl_i[k] <= dl_i[k-1]; dl_q[k] <= dl_q[k-1]; end
        out_i <= sat(acc_i);
        out_q <= sat(acc_q);
      end
    end
  end
endmodule
