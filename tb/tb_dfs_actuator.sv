// tb_dfs_actuator: self-checking test of the DFS actuator with a short MMCM
// lock time (LOCK_CYCLES = 20) and the 50 MHz reference clock.
// It checks:
//   * start-up: clk_out is low until the MMCMs lock, then runs at index 760
//     (100 MHz), with MMCM_A as master and no reconfiguration counted;
//   * a frequency change through f_in/f_set (to 50 MHz, then 130 MHz): busy
//     rises, the master flips, n_reconf counts, f_out follows and the period
//     of clk_out matches 1 / (5 MHz + 0.125 MHz * index) within 0.2 %;
//   * the latency of a change, f_set to busy low, is the lock time plus a
//     handful of cycles;
//   * clk_out keeps running during a change (no gap longer than two periods
//     of the slower clock plus three of the faster one, the hand-over time
//     of the glitch-free switch) and never shows a pulse shorter than half a
//     period of the faster clock (no glitch at the switch);
//   * random mode: with rnd = 1 reconfigurations follow one another and the
//     target index changes from the TRNG.
// Expected frequencies are computed here from the index alone.
`timescale 1ns/1ps
module tb_dfs_actuator;
  localparam int LOCK = 20;
  logic clk_ref = 0, rst_n = 0;
  always #10 clk_ref = ~clk_ref;

  logic [9:0]  f_in = 0;
  logic        f_set = 0, rnd = 0;
  logic        clk_out, is_mst, busy;
  logic [9:0]  f_out;
  logic [31:0] n_reconf;
  int checks = 0, failures = 0;

  dfs_actuator #(.LOCK_CYCLES(LOCK)) dut (.clk_ref, .rst_n, .f_in, .f_set, .rnd, .clk_out,
                                          .f_out, .is_mst, .busy, .n_reconf);

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (40000) @(posedge clk_ref);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // edge monitor on clk_out: last period, longest gap, shortest pulse
  realtime t_edge = 0, t_rise = 0, period = 0, max_gap = 0, min_pulse = 1e9;
  bit      mon = 0;
  always @(clk_out) begin
    if (mon && $realtime - t_edge < min_pulse) min_pulse = $realtime - t_edge;
    if (clk_out) begin
      period = $realtime - t_rise;
      if (mon && period > max_gap) max_gap = period;
      t_rise = $realtime;
    end
    t_edge = $realtime;
  end

  function automatic real period_ns(int idx);
    return 1000.0 / (5.0 + 0.125 * idx);
  endfunction

  task automatic check_period(int idx, string what);
    realtime sum = 0;
    @(posedge clk_out);
    for (int k = 0; k < 16; k++) begin
      @(posedge clk_out);
      sum += period;
    end
    sum = sum / 16.0;
    check(sum > period_ns(idx) * 0.998 && sum < period_ns(idx) * 1.002,
          $sformatf("%s: period %f ns, expected %f ns", what, sum, period_ns(idx)));
  endtask

  task automatic change(int idx, bit mst_before, int nrec);
    int lat = 0;
    real slow, fast;
    slow = (period_ns(idx) > period_ns(int'(f_out))) ? period_ns(idx) : period_ns(int'(f_out));
    fast = (period_ns(idx) < period_ns(int'(f_out))) ? period_ns(idx) : period_ns(int'(f_out));
    max_gap   = 0;
    min_pulse = 1e9;
    mon       = 1;
    @(negedge clk_ref) begin f_in = 10'(idx); f_set = 1; end
    @(negedge clk_ref) f_set = 0;
    lat = 1;
    check(busy, "busy after f_set");
    while (busy) begin @(negedge clk_ref); lat++; end
    check(lat >= LOCK + 4 && lat <= LOCK + 16, $sformatf("latency %0d cycles (lock %0d)", lat, LOCK));
    check(is_mst == !mst_before, "master swapped");
    check(n_reconf == 32'(nrec), $sformatf("n_reconf %0d, expected %0d", n_reconf, nrec));
    check(f_out == 10'(idx), "f_out follows f_in");
    repeat (4) @(posedge clk_out);
    check(max_gap <= 2.0 * slow + 3.0 * fast + 0.01, $sformatf("gap %f ns in clk_out (slow period %f)", max_gap, slow));
    check(min_pulse >= 0.5 * fast - 0.01,
          $sformatf("glitch: pulse %f ns", min_pulse));
    mon = 0;
    check_period(idx, $sformatf("index %0d", idx));
  endtask

  initial begin
    int n, distinct;
    logic [9:0] seen0;
    repeat (3) @(posedge clk_ref);
    rst_n = 1;
    // start-up
    check(busy, "busy at start-up");
    repeat (LOCK / 2) @(posedge clk_ref);
    check(clk_out == 0, "clk_out low before lock");
    n = 0;
    while (busy && n < 1000) begin @(posedge clk_ref); n++; end
    check(!busy && n < 1000, "start-up completes");
    check(f_out == 10'd760 && is_mst == 0 && n_reconf == 0, "start-up state");
    check_period(760, "start-up 100 MHz");

    // frequency changes through the debug path
    change(360, 0, 1);    // 50 MHz
    change(1000, 1, 2);   // 130 MHz
    change(40, 0, 3);     // 10 MHz

    // a request during a change is kept and served afterwards
    @(negedge clk_ref) begin f_in = 10'd200; f_set = 1; end
    @(negedge clk_ref) f_set = 0;
    repeat (5) @(negedge clk_ref);
    @(negedge clk_ref) begin f_in = 10'd520; f_set = 1; end
    @(negedge clk_ref) f_set = 0;
    n = 0;
    while ((busy || f_out != 10'd520) && n < 2000) begin @(negedge clk_ref); n++; end
    check(f_out == 10'd520 && n_reconf == 5, $sformatf("queued request served (n_reconf %0d)", n_reconf));
    repeat (10) @(negedge clk_ref);
    check_period(520, "queued index 520");

    // random mode
    n        = int'(n_reconf);
    seen0    = f_out;
    distinct = 0;
    @(negedge clk_ref) rnd = 1;
    for (int k = 0; k < 6; k++) begin
      @(posedge busy);
      @(negedge busy);
      if (f_out != seen0) distinct++;
      seen0 = f_out;
    end
    @(negedge clk_ref) rnd = 0;
    while (busy) @(negedge clk_ref);
    check(int'(n_reconf) >= n + 6, $sformatf("random reconfigurations %0d", int'(n_reconf) - n));
    check(distinct >= 4, $sformatf("random index changed %0d of 6 times", distinct));
    repeat (10) @(negedge clk_ref);
    check_period(int'(f_out), "after random mode");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
