// Mode controller of the dual-mode receiver.
//
// Decides which demodulator chain gets the ADC stream. In manual mode
// (cfg_auto = 0) the chain is cfg_mode. In automatic mode the SNR indicator of
// the active chain votes once per frame: a good SNR selects the MSK chain
// (low power, low latency), a low SNR the coherent QPSK chain (fewer errors),
// as the receiver description prescribes. The change takes effect when the
// active chain has finished its frame, so a frame is never cut. The chain
// that is not selected sleeps: its enable is low, which holds it cleared and
// its input gated off. After every frame, and on every change, both enables
// drop for one clock so the chain restarts from search; this restart comes
// DONE_DELAY clocks after frame_done so the last symbol's bits get out. Automatic mode starts
// in the QPSK chain. Finishing a frame as the switch point, the restart pulse
// and the starting chain are this design's choices.
//
// Interface: plain level inputs and one-clock pulses from the chains; en_*
// and mode are registered.
module controller
  import rx_pkg::*;
#(
  parameter int DONE_DELAY = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  cfg_auto,
  input  mode_t cfg_mode,
  input  logic  snr_valid_q,
  input  logic  snr_good_q,
  input  logic  snr_valid_m,
  input  logic  snr_good_m,
  input  logic  frame_done_q,
  input  logic  frame_done_m,
  output mode_t mode,
  output logic  en_qpsk,
  output logic  en_msk,
  output logic [15:0] switch_count
);
  mode_t next_mode;
  logic  restart;
  logic  snr_valid, snr_good, frame_done, fd_late;
  logic [DONE_DELAY-1:0] fd_d;

  assign snr_valid  = (mode == MODE_QPSK) ? snr_valid_q  : snr_valid_m;
  assign snr_good   = (mode == MODE_QPSK) ? snr_good_q   : snr_good_m;
  assign frame_done = (mode == MODE_QPSK) ? frame_done_q : frame_done_m;

  // frame_done is delayed so the last symbol's bits leave the back end
  // before the restart clears it.
  assign fd_late = fd_d[DONE_DELAY-1];

  assign en_qpsk = (mode == MODE_QPSK) && !restart;
  assign en_msk  = (mode == MODE_MSK)  && !restart;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      mode <= cfg_auto ? MODE_QPSK : cfg_mode;
      next_mode <= cfg_auto ? MODE_QPSK : cfg_mode;
      restart <= 1'b1; switch_count <= '0; fd_d <= '0;
    end else begin
      restart <= 1'b0;
      fd_d <= {fd_d[DONE_DELAY-2:0], frame_done};
      if (!cfg_auto) begin
        next_mode <= cfg_mode;
        if (cfg_mode != mode) begin
          mode <= cfg_mode; restart <= 1'b1; switch_count <= switch_count + 1'b1;
        end else if (fd_late) restart <= 1'b1;
      end else begin
        if (snr_valid) next_mode <= snr_good ? MODE_MSK : MODE_QPSK;
        if (fd_late) begin
          restart <= 1'b1;
          if (next_mode != mode) begin
            mode <= next_mode; switch_count <= switch_count + 1'b1;
          end
        end
      end
    end
  end

  a_one_awake: assert property (@(posedge clk) disable iff (!rst_n) !(en_qpsk && en_msk));
endmodule
