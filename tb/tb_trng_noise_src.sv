// tb_trng_noise_src: self-checking test of the behavioural noise source.
// Checks that raw_valid follows en with one cycle of delay, and that the
// sampled raw stream is not degenerate: over 4000 samples the fraction of
// ones is between 35 % and 65 %, both long-run values and transitions occur,
// and the stream does not repeat with any short period (1 to 16).
`timescale 1ns/1ps
module tb_trng_noise_src;
  logic clk = 0, rst_n = 0, en = 0;
  always #10 clk = ~clk;
  logic raw_valid, raw;
  int checks = 0, failures = 0;

  trng_noise_src dut (.clk, .rst_n, .en, .raw_valid, .raw);

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit s [4000];
    int ones = 0, trans = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    check(!raw_valid, "no raw bits while disabled");
    @(negedge clk) en = 1;
    @(negedge clk);
    check(raw_valid, "raw_valid one cycle after en");
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      s[i] = raw;
      ones += raw;
      if (i > 0 && s[i] != s[i-1]) trans++;
    end
    check(ones > 1400 && ones < 2600, $sformatf("ones = %0d of 4000", ones));
    check(trans > 400, $sformatf("transitions = %0d", trans));
    for (int p = 1; p <= 16; p++) begin
      automatic int same = 0;
      for (int i = p; i < 4000; i++) same += (s[i] == s[i-p]);
      check(same < 3900, $sformatf("period %0d repeats %0d times", p, same));
    end
    @(negedge clk) en = 0;
    @(negedge clk);
    check(!raw_valid, "raw_valid drops after en");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
