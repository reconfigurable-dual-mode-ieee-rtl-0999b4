// Carrier frequency and phase synchroniser of the O-QPSK chain.
//
// Non-data-aided estimator after Rife and Boorstyn, as the receiver
// description prescribes: each aligned symbol x[n] = ye + yl is raised to the
// 4th power, which strips the QPSK modulation and leaves the tone
// exp(j*4*(2*pi*f_d*T*n + theta)); an N_fft-point radix-2 FFT of the first
// N_fft values of z[n] = x[n]^4 is searched for the bin of largest |X|^2, which
// gives 4*f_d*T = k/N_fft, and the phase of that bin gives theta. Because a
// QPSK point to the 4th power is a negative real, theta = (arg X[k] - pi)/4;
// it carries the usual pi/2 ambiguity, which the following differential
// decoder does not mind. All symbols, from the first one on, are then
// multiplied by exp(-j*(theta + 2*pi*f_d*T*n)) and passed on.
//
// Because the estimate needs the first N_fft symbols, those symbols are
// stored in a symbol FIFO of 2*N_fft entries, which keeps taking symbols while
// the FFT, the peak search and the arctangent run. Output then drains at one
// symbol every second clock until the FIFO has caught up, and after that
// follows the input. The FIFO, the scaling of z (Z_SH1, Z_SH2, saturated to ZW
// bits), the bin-resolution frequency estimate (no interpolation), and the
// 1024-entry cos/sin table for derotation are this design's choices.
//
// Latency: N_fft symbols, then (N_fft/2)*log2(N_fft) FFT clocks, N_fft peak
// search clocks and 17 CORDIC clocks before the first symbol leaves.
module freq_phase_sync #(
  parameter int LOG2_NFFT = 11,
  parameter int W         = 12,
  parameter int ZW        = 16,
  parameter int Z_SH1     = 10,
  parameter int Z_SH2     = 12
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en,
  input  logic                in_valid,
  input  logic signed [W-1:0] ye_i,
  input  logic signed [W-1:0] ye_q,
  input  logic signed [W-1:0] yl_i,
  input  logic signed [W-1:0] yl_q,
  output logic                out_valid,
  output logic signed [W-1:0] oe_i,
  output logic signed [W-1:0] oe_q,
  output logic signed [W-1:0] ol_i,
  output logic signed [W-1:0] ol_q,
  output logic                est_valid,
  output logic [LOG2_NFFT-1:0] est_bin,
  output logic [15:0]         est_theta,
  output logic                overflow
);
  localparam int N   = 1 << LOG2_NFFT;
  localparam int FD  = 2 * N;
  localparam int AW  = LOG2_NFFT + 1;
  localparam int LUT = 1024;

  typedef enum logic [2:0] {S_COLLECT, S_FFT, S_PEAK, S_ATAN, S_WAIT, S_RUN} state_t;
  state_t st;

  // ---------------- 4th power of the aligned symbol ----------------
  logic signed [W:0]        xr, xi;
  logic signed [2*W+3:0]    x2r_f, x2i_f;
  logic signed [ZW-1:0]     x2r, x2i;
  logic signed [2*ZW+1:0]   zr_f, zi_f;
  logic signed [ZW-1:0]     zr, zi;

  function automatic logic signed [ZW-1:0] satz(input logic signed [2*ZW+1:0] v);
    if (v >  (2*ZW+2)'(2**(ZW-1) - 1)) return ZW'(2**(ZW-1) - 1);
    if (v < -(2*ZW+2)'(2**(ZW-1) - 1)) return ZW'(-(2**(ZW-1) - 1));
    return ZW'(v);
  endfunction

  always_comb begin
    xr = (W+1)'(ye_i) + (W+1)'(yl_i);
    xi = (W+1)'(ye_q) + (W+1)'(yl_q);
    x2r_f = ((2*W+4)'(xr) * (2*W+4)'(xr) - (2*W+4)'(xi) * (2*W+4)'(xi)) >>> Z_SH1;
    x2i_f = ((2*W+4)'(xr) * (2*W+4)'(xi) * 2) >>> Z_SH1;
    x2r = satz((2*ZW+2)'(x2r_f));
    x2i = satz((2*ZW+2)'(x2i_f));
    zr_f = ((2*ZW+2)'(x2r) * (2*ZW+2)'(x2r) - (2*ZW+2)'(x2i) * (2*ZW+2)'(x2i)) >>> Z_SH2;
    zi_f = ((2*ZW+2)'(x2r) * (2*ZW+2)'(x2i) * 2) >>> Z_SH2;
    zr = satz(zr_f);
    zi = satz(zi_f);
  end

  // ---------------- FFT ----------------
  logic                   fft_wr, fft_start, fft_busy, fft_done;  // busy is covered by the state machine
  logic [LOG2_NFFT-1:0]   fft_rd_addr;
  logic signed [ZW-1:0]   fft_rd_re, fft_rd_im;
  logic [31:0]            n_in;

  assign fft_wr = en && st == S_COLLECT && in_valid;

  fft_r2 #(.LOG2N(LOG2_NFFT), .DW(ZW)) u_fft (
    .clk, .rst_n,
    .wr_en(fft_wr), .wr_addr(n_in[LOG2_NFFT-1:0]), .wr_re(zr), .wr_im(zi),
    .start(fft_start), .busy(fft_busy), .done(fft_done),
    .rd_addr(fft_rd_addr), .rd_re(fft_rd_re), .rd_im(fft_rd_im)
  );

  // ---------------- peak search and arctangent ----------------
  logic [2*ZW:0]          mag, best_mag;
  logic signed [ZW-1:0]   best_re, best_im;
  logic [LOG2_NFFT-1:0]   best_k;
  logic                   cor_start, cor_done;
  logic [15:0]            cor_angle;

  assign mag = (2*ZW+1)'(fft_rd_re * fft_rd_re) + (2*ZW+1)'(fft_rd_im * fft_rd_im);

  cordic_atan2 #(.DW(ZW), .ITER(16)) u_atan (
    .clk, .rst_n, .start(cor_start), .x(best_re), .y(best_im),
    .done(cor_done), .angle(cor_angle)
  );

  // ---------------- symbol FIFO ----------------
  logic signed [W-1:0] f_ei [FD];
  logic signed [W-1:0] f_eq [FD];
  logic signed [W-1:0] f_li [FD];
  logic signed [W-1:0] f_lq [FD];
  logic [AW:0]         wp, rp;
  logic [AW:0]         fill;
  assign fill = wp - rp;

  always_ff @(posedge clk) begin
    if (en && in_valid && fill != (AW+1)'(FD)) begin
      f_ei[wp[AW-1:0]] <= ye_i; f_eq[wp[AW-1:0]] <= ye_q;
      f_li[wp[AW-1:0]] <= yl_i; f_lq[wp[AW-1:0]] <= yl_q;
    end
  end

  // ---------------- derotation ----------------
  typedef logic signed [15:0] lut_t [LUT];
  function automatic lut_t gen_lut(input bit sine);
    lut_t t;
    for (int m = 0; m < LUT; m++) begin
      real a, v;
      a = 2.0 * 3.14159265358979 * real'(m) / real'(LUT);
      v = (sine ? $sin(a) : $cos(a)) * 16384.0;
      t[m] = 16'($rtoi(v >= 0.0 ? v + 0.5 : v - 0.5));
    end
    return t;
  endfunction
  localparam lut_t COS = gen_lut(1'b0);
  localparam lut_t SIN = gen_lut(1'b1);

  logic [31:0] theta32, inc32, phase;
  logic [9:0]  pidx;
  logic signed [15:0] c, s;
  logic        tick;
  assign pidx = phase[31:22];
  assign c = COS[pidx];
  assign s = SIN[pidx];

  // y * exp(-j*phi) = (yr*c + yi*s) + j(yi*c - yr*s)
  function automatic logic signed [W-1:0] rot_re(input logic signed [W-1:0] yr, yi,
                                                 input logic signed [15:0] cc, ss);
    logic signed [W+17:0] p;
    p = ((W+18)'(yr) * (W+18)'(cc) + (W+18)'(yi) * (W+18)'(ss)) >>> 14;
    if (p >  (W+18)'(2**(W-1) - 1)) return W'(2**(W-1) - 1);
    if (p < -(W+18)'(2**(W-1) - 1)) return W'(-(2**(W-1) - 1));
    return W'(p);
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n || !en) begin
      st <= S_COLLECT; n_in <= '0; wp <= '0; rp <= '0; fft_start <= 1'b0;
      fft_rd_addr <= '0; best_mag <= '0; best_re <= '0; best_im <= '0; best_k <= '0;
      cor_start <= 1'b0; theta32 <= '0; inc32 <= '0; phase <= '0; tick <= 1'b0;
      out_valid <= 1'b0; oe_i <= '0; oe_q <= '0; ol_i <= '0; ol_q <= '0;
      est_valid <= 1'b0; est_bin <= '0; est_theta <= '0; overflow <= 1'b0;
    end else begin
      fft_start <= 1'b0;
      cor_start <= 1'b0;
      out_valid <= 1'b0;
      if (in_valid) begin
        if (fill != (AW+1)'(FD)) wp <= wp + 1'b1;
        else overflow <= 1'b1;
      end
      case (st)
        S_COLLECT: if (in_valid) begin
          n_in <= n_in + 1'b1;
          if (n_in == 32'(N - 1)) begin st <= S_FFT; fft_start <= 1'b1; end
        end
        S_FFT: if (fft_done) begin
          st <= S_PEAK; fft_rd_addr <= '0; best_mag <= '0;
        end
        S_PEAK: begin
          if (mag > best_mag || fft_rd_addr == '0) begin
            best_mag <= mag; best_k <= fft_rd_addr; best_re <= fft_rd_re; best_im <= fft_rd_im;
          end
          fft_rd_addr <= fft_rd_addr + 1'b1;
          if (&fft_rd_addr) begin st <= S_ATAN; cor_start <= 1'b1; end
        end
        S_ATAN: if (cor_done) begin
          // theta = (angle - 1/2 turn) / 4, f_d*T = k / (4N) turn per symbol.
          theta32 <= 32'($signed({cor_angle - 16'h8000, 16'h0000}) >>> 2);
          inc32   <= 32'($signed({best_k, {(32-LOG2_NFFT){1'b0}}}) >>> 2);
          st <= S_WAIT;
        end
        S_WAIT: begin
          phase <= theta32;
          est_valid <= 1'b1; est_bin <= best_k; est_theta <= theta32[31:16];
          st <= S_RUN;
        end
        S_RUN: begin
          tick <= ~tick;
          if (tick && rp != wp) begin
            out_valid <= 1'b1;
            oe_i <= rot_re(f_ei[rp[AW-1:0]], f_eq[rp[AW-1:0]], c, s);
            oe_q <= rot_re(f_eq[rp[AW-1:0]], f_ei[rp[AW-1:0]], c, -s);
            ol_i <= rot_re(f_li[rp[AW-1:0]], f_lq[rp[AW-1:0]], c, s);
            ol_q <= rot_re(f_lq[rp[AW-1:0]], f_li[rp[AW-1:0]], c, -s);
            rp <= rp + 1'b1;
            phase <= phase + inc32;
          end
        end
        default: st <= S_COLLECT;
      endcase
    end
  end

  // The FIFO must never fill up: input arrives at most once per NSAMPLE clocks.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) !(en && in_valid && fill == (AW+1)'(FD)));
endmodule
