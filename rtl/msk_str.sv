// Symbol timing recovery of the MSK chain (squared differential estimator).
//
// For every one of the SPC sample instants i inside a chip period, the block
// forms c = (z[n,i] * conj(z[n-1,i]))^2, the square of the product of a
// sample with the sample one chip earlier, and accumulates it over L_TRAIN
// chips. At the correct instant the phase has moved by exactly +-pi/2 over the
// chip, so every c is the same negative real and the sum |v_i| is largest;
// the estimate is tau = argmax_i |v_i|, as in the receiver description. |v|
// is approximated by |re|+|im| (choice of this design).
//
// Blocks of L_TRAIN chips are repeated until one has a best |v| above
// MIN_METRIC (so idle input cannot fix the timing); tau is then held, which is
// this design's reading of "averaged over large number of samples".
//
// Interface: ADC samples on in_*; once locked, chip_valid pulses once per chip
// period, at instant tau, with the current sample z_* and the sample one chip
// earlier zd_* (registered, one clock after the sample).
module msk_str #(
  parameter int SPC        = 8,
  parameter int L_TRAIN    = 32,
  parameter int IN_W       = 8,
  parameter longint MIN_METRIC = 64'd1 << 20
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   en,
  input  logic                   in_valid,
  input  logic signed [IN_W-1:0] in_i,
  input  logic signed [IN_W-1:0] in_q,
  output logic                   chip_valid,
  output logic signed [IN_W-1:0] z_i,
  output logic signed [IN_W-1:0] z_q,
  output logic signed [IN_W-1:0] zd_i,
  output logic signed [IN_W-1:0] zd_q,
  output logic                   locked,
  output logic [$clog2(SPC)-1:0] tau
);
  localparam int PW  = 2 * IN_W + 1;       // product width
  localparam int CW  = 2 * PW + 1;         // squared product width
  localparam int AW  = CW + $clog2(L_TRAIN) + 2;
  localparam int PHW = $clog2(SPC);

  logic signed [IN_W-1:0] dl_i [SPC];
  logic signed [IN_W-1:0] dl_q [SPC];
  logic [PHW-1:0]         ph;
  logic [$clog2(L_TRAIN)-1:0] nchip;
  logic signed [AW-1:0]   acc_r [SPC];
  logic signed [AW-1:0]   acc_i [SPC];

  logic signed [PW-1:0] dr, di;
  logic signed [CW-1:0] cr, ci;
  always_comb begin
    dr = PW'(in_i) * PW'(dl_i[SPC-1]) + PW'(in_q) * PW'(dl_q[SPC-1]);
    di = PW'(in_q) * PW'(dl_i[SPC-1]) - PW'(in_i) * PW'(dl_q[SPC-1]);
    cr = CW'(dr) * CW'(dr) - CW'(di) * CW'(di);
    ci = CW'(dr) * CW'(di) * 2;
  end

  // argmax over the instants of |re|+|im|
  logic [AW:0]    best_m, m;
  logic [PHW-1:0] best_i;
  always_comb begin
    best_m = '0; best_i = '0;
    for (int i = 0; i < SPC; i++) begin
      m = (AW+1)'(acc_r[i] < 0 ? -acc_r[i] : acc_r[i]) + (AW+1)'(acc_i[i] < 0 ? -acc_i[i] : acc_i[i]);
      if (m > best_m) begin best_m = m; best_i = PHW'(i); end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n || !en) begin
      for (int k = 0; k < SPC; k++) begin
        dl_i[k] <= '0; dl_q[k] <= '0; acc_r[k] <= '0; acc_i[k] <= '0;
      end
      ph <= '0; nchip <= '0; locked <= 1'b0; tau <= '0; chip_valid <= 1'b0;
      z_i <= '0; z_q <= '0; zd_i <= '0; zd_q <= '0;
    end else begin
      chip_valid <= 1'b0;
      if (in_valid) begin
        dl_i[0] <= in_i; dl_q[0] <= in_q;
        for (int k = 1; k < SPC; k++) begin dl_i[k] <= dl_i[k-1]; dl_q[k] <= dl_q[k-1]; end
        ph <= ph + 1'b1;
        if (locked) begin
          if (ph == tau) begin
            chip_valid <= 1'b1;
            z_i <= in_i; z_q <= in_q; zd_i <= dl_i[SPC-1]; zd_q <= dl_q[SPC-1];
          end
        end else begin
          acc_r[ph] <= acc_r[ph] + AW'(cr);
          acc_i[ph] <= acc_i[ph] + AW'(ci);
          if (ph == PHW'(SPC - 1)) begin
            nchip <= nchip + 1'b1;
            if (32'(nchip) == L_TRAIN - 1) begin
              // End of a training block: the last instant's final term is
              // left out of the comparison.
              if (64'(best_m) > MIN_METRIC) begin locked <= 1'b1; tau <= best_i; end
              for (int k = 0; k < SPC; k++) begin acc_r[k] <= '0; acc_i[k] <= '0; end
            end
          end
        end
      end
    end
  end
endmodule
