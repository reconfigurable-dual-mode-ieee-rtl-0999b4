// Preamble correlator and frame synchroniser (one per chain).
//
// The preamble of an IEEE 802.15.4 frame is eight zero symbols, i.e. 256 known
// chips. The block keeps the last PRE_CHIPS chips in a shift register and
// counts how many agree with the reference (a hard-decision real
// correlation: 2*matches - 256). Since the preamble repeats every 32 chips,
// the first window reaching SYNC_THRESH matches can be a whole symbol early,
// so after that crossing the earliest best window of the next PEAK_WIN chips
// is taken as the preamble's end. The payload, PAYLOAD_CHIPS chips starting
// right after it, is then passed on, read from the same shift register at a
// fixed delay (so no chip is lost), and frame_done pulses after its last chip.
// The block then idles until it is cleared through `en`.
//
// Correlating chips (rather than soft QPSK symbols), the threshold, the peak
// search and the fixed payload length (the description names no SFD or
// length field) are this design's choices.
//
// Interface: in_valid/in_chip, at most one chip per clock. sync pulses when
// the preamble end is decided, with pre_window (the received preamble, bit 0
// newest) and sync_matches; out_valid/out_chip carry the payload one clock
// after each input chip.
module frame_sync
  import rx_pkg::*;
#(
  parameter int SYNC_THRESH   = 200,
  parameter int PEAK_WIN      = 224,
  parameter int PAYLOAD_CHIPS = 1600
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic                 in_valid,
  input  logic                 in_chip,
  output logic                 sync,
  output logic [8:0]           sync_matches,
  output logic [PRE_CHIPS-1:0] pre_window,
  output logic                 out_valid,
  output logic                 out_chip,
  output logic                 frame_done,
  output logic                 in_frame
);
  typedef enum logic [1:0] {F_SEARCH, F_PEAK, F_PAYLOAD, F_DONE} fstate_t;
  fstate_t st;

  logic [PRE_CHIPS-1:0] win, win_n;
  logic [8:0]           match, best;
  logic [7:0]           cnt, b;
  logic [$clog2(PAYLOAD_CHIPS+1)-1:0] pcount;

  assign win_n = {win[PRE_CHIPS-2:0], in_chip};
  assign match = popcount256(~(win_n ^ PRE_REF));
  assign in_frame = (st == F_PAYLOAD);

  always_ff @(posedge clk) begin
    if (!rst_n || !en) begin
      st <= F_SEARCH; win <= '0; best <= '0; cnt <= '0; b <= '0; pcount <= '0;
      sync <= 1'b0; sync_matches <= '0; pre_window <= '0;
      out_valid <= 1'b0; out_chip <= 1'b0; frame_done <= 1'b0;
    end else begin
      sync <= 1'b0; out_valid <= 1'b0; frame_done <= 1'b0;
      if (in_valid) begin
        win <= win_n;
        case (st)
          F_SEARCH: if (32'(match) >= SYNC_THRESH) begin
            st <= F_PEAK; best <= match; b <= '0; cnt <= '0; pre_window <= win_n;
          end
          F_PEAK: begin
            cnt <= cnt + 1'b1;
            if (match > best) begin best <= match; b <= cnt + 1'b1; pre_window <= win_n; end
            if (32'(cnt) + 1 == PEAK_WIN) begin
              st <= F_PAYLOAD; sync <= 1'b1;
              sync_matches <= (match > best) ? match : best;
            end
          end
          F_PAYLOAD: begin
            out_valid <= 1'b1;
            out_chip  <= win_n[8'(PEAK_WIN) - b];
            pcount    <= pcount + 1'b1;
            if (32'(pcount) == PAYLOAD_CHIPS - 1) begin st <= F_DONE; frame_done <= 1'b1; end
          end
          default: ;
        endcase
      end
    end
  end
endmodule
