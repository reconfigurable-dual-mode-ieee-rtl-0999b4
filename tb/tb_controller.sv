// Testbench of controller: manual selection, automatic switching on the SNR
// vote at frame end, the one-clock restart after each frame, and that the two
// chains are never awake together.
module tb_controller;
  import rx_pkg::*;
  logic clk = 0, rst_n = 0, cfg_auto = 0;
  mode_t cfg_mode = MODE_QPSK, mode;
  logic snr_valid_q = 0, snr_good_q = 0, snr_valid_m = 0, snr_good_m = 0, frame_done_q = 0, frame_done_m = 0;
  logic en_qpsk, en_msk; logic [15:0] switch_count;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  controller dut (.*);
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  always @(negedge clk) if (rst_n) begin checks++; if (en_qpsk && en_msk) begin failures++; $display("both awake"); end end
  task automatic expect_state(string what, mode_t m, logic eq, logic em);
    checks++;
    if (mode != m || en_qpsk != eq || en_msk != em) begin
      failures++; $display("%s: mode %0d en_q %b en_m %b", what, mode, en_qpsk, en_msk);
    end
  endtask
  task automatic pulse_done(bit msk);
    @(negedge clk); if (msk) frame_done_m = 1; else frame_done_q = 1;
    @(negedge clk); frame_done_m = 0; frame_done_q = 0;
    repeat (8) @(negedge clk);                      // the controller's DONE_DELAY
  endtask
  task automatic vote(bit msk, bit good);
    @(negedge clk); if (msk) begin snr_valid_m = 1; snr_good_m = good; end else begin snr_valid_q = 1; snr_good_q = good; end
    @(negedge clk); snr_valid_m = 0; snr_valid_q = 0;
  endtask
  initial begin
    repeat (3) @(negedge clk); rst_n = 1; @(negedge clk); @(negedge clk);
    expect_state("manual qpsk", MODE_QPSK, 1, 0);
    cfg_mode = MODE_MSK; @(negedge clk);
    expect_state("manual switch restart", MODE_MSK, 0, 0);
    @(negedge clk); expect_state("manual msk", MODE_MSK, 0, 1);
    vote(1, 0); pulse_done(1);                      // manual: vote ignored, restart only
    expect_state("manual restart after frame", MODE_MSK, 0, 0);
    @(negedge clk);
    expect_state("manual after frame", MODE_MSK, 0, 1);
    // automatic
    cfg_auto = 1;
    vote(1, 0);                                     // MSK reports low SNR
    expect_state("auto waits for frame end", MODE_MSK, 0, 1);
    @(negedge clk); frame_done_m = 1; @(negedge clk); frame_done_m = 0;
    repeat (8) @(negedge clk);
    expect_state("auto restart", MODE_QPSK, 0, 0);
    @(negedge clk); expect_state("auto to qpsk", MODE_QPSK, 1, 0);
    vote(0, 1); pulse_done(0); @(negedge clk);
    expect_state("auto to msk", MODE_MSK, 0, 1);
    vote(1, 1); pulse_done(1); @(negedge clk);
    expect_state("auto stays msk", MODE_MSK, 0, 1);
    vote(0, 0);                                     // the sleeping chain's vote is ignored
    pulse_done(1); @(negedge clk);
    expect_state("inactive vote ignored", MODE_MSK, 0, 1);
    checks++; if (switch_count != 3) begin failures++; $display("switch_count %0d", switch_count); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
