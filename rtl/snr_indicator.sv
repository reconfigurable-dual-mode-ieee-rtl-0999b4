// Preamble-based SNR indicator (one per chain).
//
// Once the frame synchroniser has found the preamble, a comparator counts
// how many received preamble chips equal the reference ones. Few chip errors
// mean a good channel: the count is compared with SNR_THRESH and snr_good is
// raised when it reaches it. This follows the receiver description. Only the
// newest SNR_CHIPS preamble chips (default 128, four symbols) are compared:
// the first preamble chips are spent on timing training and never reach the
// window clean. The window length and the threshold (124 of 128, about 3 %
// chip errors) are this design's choices; the description gives neither.
//
// Interface: in_valid with pre_window (bit 0 newest chip); snr_valid,
// match_count and snr_good follow one clock later and hold until the next.
module snr_indicator
  import rx_pkg::*;
#(
  parameter int SNR_CHIPS  = 128,
  parameter int SNR_THRESH = 124
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [PRE_CHIPS-1:0] pre_window,
  output logic                 snr_valid,
  output logic [8:0]           match_count,
  output logic                 snr_good
);
  localparam logic [PRE_CHIPS-1:0] MASK = {PRE_CHIPS{1'b1}} >> (PRE_CHIPS - SNR_CHIPS);
  logic [8:0] cnt;
  assign cnt = popcount256(~(pre_window ^ PRE_REF) & MASK);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      snr_valid <= 1'b0; match_count <= '0; snr_good <= 1'b0;
    end else begin
      snr_valid <= in_valid;
      if (in_valid) begin
        match_count <= cnt;
        snr_good    <= 32'(cnt) >= SNR_THRESH;
      end
    end
  end
endmodule
