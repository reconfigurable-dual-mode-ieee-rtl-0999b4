// Testbench of frame_sync with a 64-chip payload: random chips, then the
// preamble (with a few chip errors in some frames), then a random payload and
// more random chips. Expects one sync with the right match count, exactly the
// payload chips in order, and frame_done after the last one. With the default
// threshold the window a symbol before the preamble end already crosses it,
// so every frame also exercises the peak search; one frame's payload starts
// with symbol 0, which extends the preamble pattern by a symbol.
module tb_frame_sync;
  import tb_sig_pkg::*;
  localparam int PL = 64;
  logic clk = 0, rst_n = 0, en = 0, in_valid = 0, in_chip = 0;
  logic sync, out_valid, out_chip, frame_done, in_frame;
  logic [8:0] sync_matches; logic [255:0] pre_window;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  frame_sync #(.PAYLOAD_CHIPS(PL)) dut (.*);
  initial begin #5000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  int nsync, ndone, got [$];
  logic [8:0] m_at_sync;
  always @(negedge clk) begin
    if (sync) begin nsync++; m_at_sync = sync_matches; end
    if (out_valid) got.push_back(out_chip);
    if (frame_done) ndone++;
  end
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int f = 0; f < 6; f++) begin
      bit s [$]; bit pay [$]; int nerr, lead;
      nerr = (f % 3 == 2) ? 5 : 0;
      lead = 100 + $urandom_range(50, 0);
      s = {};
      for (int i = 0; i < lead; i++) s.push_back($urandom_range(1, 0));
      for (int i = 0; i < 256; i++) s.push_back(pn_chip(0, i % 32) ^ (i < nerr * 40 && i % 40 == 7));
      pay = {};
      for (int i = 0; i < PL; i++) begin pay.push_back($urandom_range(1, 0)); end
      if (f == 1) for (int i = 0; i < 32; i++) pay[i] = pn_chip(0, i);           // payload starts with symbol 0
      foreach (pay[i]) s.push_back(pay[i]);
      for (int i = 0; i < 300; i++) s.push_back($urandom_range(1, 0));
      @(negedge clk); en = 0; @(negedge clk); en = 1;
      nsync = 0; ndone = 0; got = {};
      foreach (s[i]) begin
        @(negedge clk); in_valid = 1; in_chip = s[i];
        if ($urandom_range(2, 0) == 0) begin @(negedge clk); in_valid = 0; end
      end
      @(negedge clk); in_valid = 0; repeat (3) @(negedge clk);
      checks++; if (nsync != 1) begin failures++; $display("frame %0d: %0d syncs", f, nsync); end
      checks++; if (m_at_sync != 9'(256 - nerr)) begin failures++; $display("frame %0d: matches %0d", f, m_at_sync); end
      checks++; if (ndone != 1) begin failures++; $display("frame %0d: %0d frame_done", f, ndone); end
      checks++;
      if (got.size() != PL) begin failures++; $display("frame %0d: %0d payload chips", f, got.size()); end
      else begin
        int bad; bad = 0;
        foreach (pay[i]) if (got[i] != pay[i]) bad++;
        if (bad) begin failures++; $display("frame %0d: %0d payload chips wrong", f, bad); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
