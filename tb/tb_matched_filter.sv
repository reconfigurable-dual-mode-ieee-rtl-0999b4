// Testbench of matched_filter: random samples; each output is compared with a
// convolution computed here from h[n] = round(127*sin(pi*(n+0.5)/16)), shifted
// right by 6 and saturated, one clock after its input.
module tb_matched_filter;
  logic clk = 0, rst_n = 0, en = 1, in_valid = 0, out_valid;
  logic signed [7:0] in_i = 0, in_q = 0;
  logic signed [11:0] out_i, out_q;
  int checks = 0, failures = 0;
  int hi [$], hq [$];
  int h [16];
  always #5 clk = ~clk;
  matched_filter dut (.*);
  initial begin #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  function automatic int expect_of(int x [$]);
    int acc, r;
    acc = 0;
    for (int k = 0; k < 16; k++) acc += ((k < x.size()) ? x[x.size() - 1 - k] : 0) * h[k];
    r = acc >>> 6;
    if (r > 2047) r = 2047;
    if (r < -2047) r = -2047;
    return r;
  endfunction
  initial begin
    for (int n = 0; n < 16; n++) h[n] = $rtoi(127.0 * $sin(3.14159265358979 * (n + 0.5) / 16.0) + 0.5);
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      int a, b;
      // mostly full-scale random, sometimes a slow sine, to reach saturation and mid range
      if (n < 1500) begin a = $urandom_range(254, 0) - 127; b = $urandom_range(254, 0) - 127; end
      else begin a = (n % 64 < 32) ? 127 : -127; b = (n % 50 < 25) ? -100 : 100; end
      hi.push_back(a); hq.push_back(b);
      @(negedge clk); in_valid = 1; in_i = 8'(a); in_q = 8'(b);
      @(negedge clk); in_valid = 0;
      checks++;
      if (!out_valid || out_i != 12'(expect_of(hi)) || out_q != 12'(expect_of(hq))) begin
        failures++;
        if (failures < 10) $display("n=%0d got %0d %0d exp %0d %0d", n, out_i, out_q, expect_of(hi), expect_of(hq));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
