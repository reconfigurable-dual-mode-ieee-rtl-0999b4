// Dual-mode IEEE 802.15.4 (2.4 GHz O-QPSK) digital baseband receiver.
//
// Half-sine O-QPSK of a differentially encoded chip stream is the same signal
// as MSK, so one received signal can be demodulated two ways. This top holds
// both chains and picks one per frame:
//
//   QPSK chain: matched_filter -> elg_str -> freq_phase_sync -> diff_decoder
//               -> frame_sync -> chip_to_symbol -> symbol_to_bits
//               (coherent: fewer errors, but an N_fft-symbol buffer, an FFT
//               and a long latency)
//   MSK chain:  msk_str -> msk_detector -> frame_sync -> chip_to_symbol
//               -> symbol_to_bits
//               (non-coherent differential detection: small and fast)
//
// Each chain has its own snr_indicator on the preamble it found; the
// controller routes the ADC stream to one chain (manually, or from the SNR
// vote), keeps the other asleep and muxes the output. The block structure is
// that of the receiver description; the differential decoder sits on the chip
// stream rather than after the bit mapping (see diff_decoder).
//
// Interface: one complex 8-bit ADC sample per adc_valid, NSAMPLE samples per
// half-sine pulse (2 chips), i.e. NSAMPLE/2 per chip; full scale about +-90
// suits the fixed-point scaling. Decoded payload bits (N_BITS per frame, LSB of
// each symbol first) come out on bit_valid/bit_out; frame_done marks the end
// of a frame. The clock must be at least as fast as the sample rate.
//
// Timing: the MSK chain delivers bits a few chips after they arrive; the
// QPSK chain first buffers 2^LOG2_NFFT pulses for its carrier estimate, so
// its first bits come about 55k clocks after the frame start at defaults.
//
// Lint notes: some sub-block outputs are left unconnected or unread on
// purpose (ELG adjustment count and MSK timing instant, kept for test
// observation; frame_sync's in_frame and match count, chip_to_symbol's agree
// count, the FFT busy flag, the oldest bit of the preamble window and the
// first bit of the chip shift register). They are diagnostic outputs of the
// sub-blocks, not needed by the top.
module dual_mode_rx
  import rx_pkg::*;
#(
  parameter int NSAMPLE     = 16,
  parameter int L_TRAIN     = 32,
  parameter int LOG2_NFFT   = 11,
  parameter int N_BITS      = 200,
  parameter int SYNC_THRESH = 200,
  parameter int SNR_THRESH  = 124
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              adc_valid,
  input  logic signed [7:0] adc_i,
  input  logic signed [7:0] adc_q,
  input  logic              cfg_auto,
  input  mode_t             cfg_mode,
  output mode_t             mode,
  output logic              bit_valid,
  output logic              bit_out,
  output logic              sym_valid,
  output logic [3:0]        symbol,
  output logic              frame_sync_found,
  output logic              frame_done,
  output logic              snr_valid,
  output logic              snr_good,
  output logic [8:0]        snr_matches,
  output logic              est_valid,
  output logic [LOG2_NFFT-1:0] est_bin,
  output logic [15:0]       est_theta,
  output logic [15:0]       switch_count,
  output logic              qpsk_timing_locked,
  output logic              msk_timing_locked,
  output logic              fifo_overflow
);
  localparam int W = 12;
  localparam int PAYLOAD_CHIPS = (N_BITS / 4) * CHIPS_PER_SYM;

  logic en_q, en_m;
  logic vq, vm;
  assign vq = adc_valid && en_q;
  assign vm = adc_valid && en_m;

  // ---------------- QPSK chain ----------------
  logic mf_v; logic signed [W-1:0] mf_i, mf_q;
  matched_filter #(.NSAMPLE(NSAMPLE), .IN_W(8), .OUT_W(W), .SHIFT(6)) u_mf (
    .clk, .rst_n, .en(en_q), .in_valid(vq), .in_i(adc_i), .in_q(adc_q),
    .out_valid(mf_v), .out_i(mf_i), .out_q(mf_q));

  logic st_v; logic signed [W-1:0] ye_i, ye_q, yl_i, yl_q;
  logic [7:0] elg_adj;  // adjustment count, observed by the testbench
  elg_str #(.NSAMPLE(NSAMPLE), .L_TRAIN(L_TRAIN), .D(3), .W(W)) u_elg (
    .clk, .rst_n, .en(en_q), .in_valid(mf_v), .in_i(mf_i), .in_q(mf_q),
    .sym_valid(st_v), .ye_i, .ye_q, .yl_i, .yl_q, .locked(qpsk_timing_locked), .adjust_count(elg_adj));

  logic fs_v; logic signed [W-1:0] oe_i, oe_q, ol_i, ol_q;
  freq_phase_sync #(.LOG2_NFFT(LOG2_NFFT), .W(W)) u_fps (
    .clk, .rst_n, .en(en_q), .in_valid(st_v), .ye_i, .ye_q, .yl_i, .yl_q,
    .out_valid(fs_v), .oe_i, .oe_q, .ol_i, .ol_q,
    .est_valid, .est_bin, .est_theta, .overflow(fifo_overflow));

  logic qc_v, qc;
  diff_decoder #(.W(W)) u_dd (
    .clk, .rst_n, .en(en_q), .in_valid(fs_v), .ye_i(oe_i), .ye_q(oe_q), .yl_i(ol_i), .yl_q(ol_q),
    .chip_valid(qc_v), .chip(qc));

  // ---------------- MSK chain ----------------
  logic ms_v; logic signed [7:0] z_i, z_q, zd_i, zd_q; logic [$clog2(NSAMPLE/2)-1:0] ms_tau;
  msk_str #(.SPC(NSAMPLE/2), .L_TRAIN(L_TRAIN), .IN_W(8)) u_mstr (
    .clk, .rst_n, .en(en_m), .in_valid(vm), .in_i(adc_i), .in_q(adc_q),
    .chip_valid(ms_v), .z_i, .z_q, .zd_i, .zd_q, .locked(msk_timing_locked), .tau(ms_tau));

  logic mc_v, mc;
  msk_detector #(.IN_W(8)) u_mdet (
    .clk, .rst_n, .en(en_m), .in_valid(ms_v), .z_i, .z_q, .zd_i, .zd_q,
    .chip_valid(mc_v), .chip(mc));

  // ---------------- per-chain back end ----------------
  logic [1:0]           c_v, c_chip, sync, pv, pc, fdone, inf, sv, snrv, snrg, bv, bo;
  logic [8:0]           smatch [2];
  logic [8:0]           scount [2];
  logic [PRE_CHIPS-1:0] pwin   [2];
  logic [3:0]           sym    [2];
  logic [5:0]           agree  [2];
  logic [1:0]           chain_en;

  assign c_v      = {mc_v, qc_v};
  assign c_chip   = {mc, qc};
  assign chain_en = {en_m, en_q};

  for (genvar g = 0; g < 2; g++) begin : g_back
    frame_sync #(.SYNC_THRESH(SYNC_THRESH), .PEAK_WIN(PRE_CHIPS - CHIPS_PER_SYM),
                 .PAYLOAD_CHIPS(PAYLOAD_CHIPS)) u_fs (
      .clk, .rst_n, .en(chain_en[g]), .in_valid(c_v[g]), .in_chip(c_chip[g]),
      .sync(sync[g]), .sync_matches(smatch[g]), .pre_window(pwin[g]),
      .out_valid(pv[g]), .out_chip(pc[g]), .frame_done(fdone[g]), .in_frame(inf[g]));

    snr_indicator #(.SNR_THRESH(SNR_THRESH)) u_snr (
      .clk, .rst_n, .in_valid(sync[g]), .pre_window(pwin[g]),
      .snr_valid(snrv[g]), .match_count(scount[g]), .snr_good(snrg[g]));

    chip_to_symbol u_c2s (
      .clk, .rst_n, .en(chain_en[g]), .in_valid(pv[g]), .in_chip(pc[g]),
      .sym_valid(sv[g]), .symbol(sym[g]), .agree(agree[g]));

    symbol_to_bits u_s2b (
      .clk, .rst_n, .en(chain_en[g]), .sym_valid(sv[g]), .symbol(sym[g]),
      .bit_valid(bv[g]), .bit_out(bo[g]));
  end

  // ---------------- controller and output mux ----------------
  controller u_ctrl (
    .clk, .rst_n, .cfg_auto, .cfg_mode,
    .snr_valid_q(snrv[0]), .snr_good_q(snrg[0]), .snr_valid_m(snrv[1]), .snr_good_m(snrg[1]),
    .frame_done_q(fdone[0]), .frame_done_m(fdone[1]),
    .mode, .en_qpsk(en_q), .en_msk(en_m), .switch_count);

  logic a;
  assign a = (mode == MODE_MSK);
  // The last payload bits leave symbol_to_bits a few clocks after frame_done,
  // so the output mux follows the chain that produced them.
  logic last_chain;
  always_ff @(posedge clk) begin
    if (!rst_n) last_chain <= 1'b0;
    else if (c_v[a]) last_chain <= a;
  end

  assign bit_valid        = bv[last_chain];
  assign bit_out          = bo[last_chain];
  assign sym_valid        = sv[last_chain];
  assign symbol           = sym[last_chain];
  assign frame_sync_found = sync[a];
  assign frame_done       = fdone[a];
  assign snr_valid        = snrv[a];
  assign snr_good         = snrg[a];
  assign snr_matches      = scount[a];
endmodule
