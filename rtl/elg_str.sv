// Early-late gate symbol timing recovery of the O-QPSK chain.
//
// Every pulse period (NSAMPLE matched-filter samples) the block takes a main
// sample and an early and a late one D samples before and after it. While
// training, the sampling instant moves one sample later when the late sample
// is the largest, one earlier when the early one is, and stays when the main
// sample is at least as large as both; this is the early-late gate rule of the
// receiver description. Training lasts L_TRAIN pulses, after which the
// instant is frozen. Only pulses whose main amplitude exceeds MIN_AMP count
// towards training, so idle input before a frame does not end it (a choice of
// this design).
//
// O-QPSK alignment: the Q rail lags the I rail by half a pulse. Since carrier
// correction comes later in the chain, the whole complex sample is delayed by
// NSAMPLE/2 instead of only I: ye is the sample half a pulse before the chosen
// instant and yl the sample at it. Without carrier offset, ye carries the I
// chip and yl the Q chip, which is the I delay of the description. The gate
// compares a carrier-phase-independent amplitude of (ye, yl), defined at amp()
// below; the description compares the plain MF amplitude, which works only
// without carrier offset. The gate may settle on the instant half a pulse
// away (Q chip early, I chip late); ye is still the chip sample before yl,
// which is all the differential decoder needs.
//
// Interface: in_* one MF sample per in_valid; sym_valid pulses once per pulse
// period with ye_*, yl_*. The symbol leaves D+1 samples after its main sample.
module elg_str #(
  parameter int NSAMPLE = 16,
  parameter int L_TRAIN = 32,
  parameter int D       = 3,
  parameter int W       = 12,
  parameter int MIN_AMP = 64
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en,
  input  logic                in_valid,
  input  logic signed [W-1:0] in_i,
  input  logic signed [W-1:0] in_q,
  output logic                sym_valid,
  output logic signed [W-1:0] ye_i,
  output logic signed [W-1:0] ye_q,
  output logic signed [W-1:0] yl_i,
  output logic signed [W-1:0] yl_q,
  output logic                locked,
  output logic [7:0]          adjust_count
);
  localparam int HALF  = NSAMPLE / 2;
  localparam int DEPTH = HALF + D + 1;
  localparam int PHW   = $clog2(NSAMPLE);
  localparam int MW    = 2 * W + 4;

  logic signed [W-1:0] h_i [DEPTH];
  logic signed [W-1:0] h_q [DEPTH];
  logic signed [MW-1:0] mh [2*D+1];
  logic signed [MW-1:0] mraw [HALF];
  logic [PHW-1:0]      ph;
  logic [$clog2(L_TRAIN+1)-1:0] trained;

  // Gate amplitude of the aligned symbol (u = earlier sample, v = later):
  // |Im(v*conj(u))| - |Re(v*conj(u))|. At the right instant the two chip
  // samples lie on perpendicular axes, so the product is imaginary and the
  // amplitude is largest; half-way between chips it averages zero. The gate
  // uses the sum over the two chip instants of a pulse (m_new). Unlike
  // |I|+|Q| it does not depend on the carrier phase, which is corrected only
  // later in the chain.
  function automatic logic signed [MW-1:0] amp(input logic signed [W-1:0] ui, uq, vi, vq);
    logic signed [MW-1:0] re, im;
    re = MW'(vi) * MW'(ui) + MW'(vq) * MW'(uq);
    im = MW'(vq) * MW'(ui) - MW'(vi) * MW'(uq);
    return (im < 0 ? -im : im) - (re < 0 ? -re : re);
  endfunction

  logic signed [MW-1:0] m_raw, m_new, m_e, m_m, m_l;
  always_comb begin
    // Amplitude of the aligned symbol whose later sample is the incoming one.
    m_raw = amp(h_i[HALF-1], h_q[HALF-1], in_i, in_q);
    // both chip instants of the pulse count, which halves the data-dependent
    // jitter of a single-pulse decision
    m_new = m_raw + mraw[HALF-1];
    m_l   = m_new;
    m_m   = mh[D-1];
    m_e   = mh[2*D-1];
  end

  always_ff @(posedge clk) begin
    if (!rst_n || !en) begin
      for (int k = 0; k < DEPTH; k++) begin h_i[k] <= '0; h_q[k] <= '0; end
      for (int k = 0; k < 2*D+1; k++) mh[k] <= '0;
      for (int k = 0; k < HALF; k++) mraw[k] <= '0;
      ph <= '0; trained <= '0; locked <= 1'b0; sym_valid <= 1'b0;
      ye_i <= '0; ye_q <= '0; yl_i <= '0; yl_q <= '0; adjust_count <= '0;
    end else begin
      sym_valid <= 1'b0;
      if (in_valid) begin
        h_i[0] <= in_i; h_q[0] <= in_q;
        for (int k = 1; k < DEPTH; k++) begin h_i[k] <= h_i[k-1]; h_q[k] <= h_q[k-1]; end
        mh[0] <= m_new;
        mraw[0] <= m_raw;
        for (int k = 1; k < HALF; k++) mraw[k] <= mraw[k-1];
        for (int k = 1; k < 2*D+1; k++) mh[k] <= mh[k-1];
        ph <= ph + 1'b1;
        if (ph == PHW'(NSAMPLE-1)) begin
          // Main sample is D samples back: its later half is h[D-1], earlier h[D-1+HALF].
          sym_valid <= 1'b1;
          yl_i <= h_i[D-1];        yl_q <= h_q[D-1];
          ye_i <= h_i[D-1+HALF];   ye_q <= h_q[D-1+HALF];
          if (!locked && m_m > MW'(MIN_AMP)) begin
            if (32'(trained) == L_TRAIN - 1) locked <= 1'b1;
            trained <= trained + 1'b1;
            if (!(m_m >= m_e && m_m >= m_l)) begin
              adjust_count <= adjust_count + 1'b1;
              if (m_l > m_e) ph <= ph;              // late larger: sample later
              else           ph <= ph + PHW'(2);      // early larger: sample earlier
            end
          end
        end
      end
    end
  end
endmodule
