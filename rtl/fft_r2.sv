// In-place radix-2 decimation-in-time FFT (Cooley-Tukey) over 2**LOG2N points.
//
// Used by the carrier frequency estimator. Points are loaded in natural order
// through wr_*; the block stores point n at the bit-reversed address, so that
// after the LOG2N butterfly stages the spectrum X[k] is in natural order and
// can be read back asynchronously through rd_addr. Every stage scales by 1/2,
// so the result is X[k]/N and cannot overflow. Twiddles exp(-j*2*pi*m/N),
// m < N/2, are Q1.14 words computed at elaboration.
//
// Timing: start (while idle) begins the transform; it takes N/2 butterflies
// per stage, one per clock, i.e. (N/2)*LOG2N clocks, then done pulses for one
// clock. The radix-2 algorithm follows the receiver description; the scaling
// and the one-butterfly-per-clock schedule are this design's choices.
module fft_r2 #(
  parameter int LOG2N = 11,
  parameter int DW    = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   wr_en,
  input  logic [LOG2N-1:0]       wr_addr,
  input  logic signed [DW-1:0]   wr_re,
  input  logic signed [DW-1:0]   wr_im,
  input  logic                   start,
  output logic                   busy,
  output logic                   done,
  input  logic [LOG2N-1:0]       rd_addr,
  output logic signed [DW-1:0]   rd_re,
  output logic signed [DW-1:0]   rd_im
);
  localparam int N  = 1 << LOG2N;
  localparam int TW = 16;

  typedef logic signed [TW-1:0] twtab_t [N/2];

  function automatic twtab_t gen_tw(input bit sine);
    twtab_t t;
    for (int m = 0; m < N/2; m++) begin
      real a;
      a = 2.0 * 3.14159265358979 * real'(m) / real'(N);
      t[m] = TW'($rtoi((sine ? -$sin(a) : $cos(a)) * 16384.0 + (((sine ? -$sin(a) : $cos(a)) >= 0.0) ? 0.5 : -0.5)));
    end
    return t;
  endfunction

  localparam twtab_t TW_RE = gen_tw(1'b0);
  localparam twtab_t TW_IM = gen_tw(1'b1);

  logic signed [DW-1:0] mem_re [N];
  logic signed [DW-1:0] mem_im [N];

  logic [$clog2(LOG2N+1)-1:0] stage;
  logic [LOG2N-2:0]           k;

  function automatic logic [LOG2N-1:0] bitrev(input logic [LOG2N-1:0] a);
    logic [LOG2N-1:0] r;
    for (int b = 0; b < LOG2N; b++) r[b] = a[LOG2N-1-b];
    return r;
  endfunction

  logic [LOG2N-1:0]   i0, i1, half_mask;
  logic [LOG2N-2:0]   twi;
  logic signed [DW-1:0] a_re, a_im, b_re, b_im, o0_re, o0_im, o1_re, o1_im;
  logic signed [DW+TW:0] p_re, p_im;
  logic signed [DW+1:0]  t_re, t_im;

  always_comb begin
    half_mask = LOG2N'((1 << stage) - 1);
    i0  = ((LOG2N'(k) >> stage) << (stage + 1)) | (LOG2N'(k) & half_mask);
    i1  = i0 | LOG2N'(1 << stage);
    twi = (LOG2N-1)'((LOG2N'(k) & half_mask) << (LOG2N - 1 - 32'(stage)));
    a_re = mem_re[i0]; a_im = mem_im[i0];
    b_re = mem_re[i1]; b_im = mem_im[i1];
    p_re = (DW+TW+1)'(b_re) * (DW+TW+1)'(TW_RE[twi]) - (DW+TW+1)'(b_im) * (DW+TW+1)'(TW_IM[twi]);
    p_im = (DW+TW+1)'(b_re) * (DW+TW+1)'(TW_IM[twi]) + (DW+TW+1)'(b_im) * (DW+TW+1)'(TW_RE[twi]);
    t_re = (DW+2)'(p_re >>> 14);
    t_im = (DW+2)'(p_im >>> 14);
    o0_re = DW'(((DW+2)'(a_re) + t_re) >>> 1);
    o0_im = DW'(((DW+2)'(a_im) + t_im) >>> 1);
    o1_re = DW'(((DW+2)'(a_re) - t_re) >>> 1);
    o1_im = DW'(((DW+2)'(a_im) - t_im) >>> 1);
  end

  assign rd_re = mem_re[rd_addr];
  assign rd_im = mem_im[rd_addr];

  always_ff @(posedge clk) begin
    if (busy) begin
      mem_re[i0] <= o0_re; mem_im[i0] <= o0_im;
      mem_re[i1] <= o1_re; mem_im[i1] <= o1_im;
    end else if (wr_en) begin
      mem_re[bitrev(wr_addr)] <= wr_re;
      mem_im[bitrev(wr_addr)] <= wr_im;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; stage <= '0; k <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin busy <= 1'b1; stage <= '0; k <= '0; end
      end else begin
        k <= k + 1'b1;
        if (&k) begin
          if (32'(stage) == LOG2N - 1) begin busy <= 1'b0; done <= 1'b1; end
          else stage <= stage + 1'b1;
        end
      end
    end
  end
endmodule
