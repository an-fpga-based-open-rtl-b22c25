// tb_mmcm_model: self-checking test of the behavioural MMCM.
// Programs three parameter sets and checks, for each: locked falls in the
// cycle after cfg, clk_out stays low while unlocked, locked rises exactly
// LOCK_CYCLES reference cycles after cfg, and the output period matches
// f_ref * M / (D * O) within 0.5 %.
`timescale 1ns/1ps
module tb_mmcm_model;
  import soc_pkg::*;
  localparam int LOCK = 30;
  logic clk = 0, rst_n = 0, cfg = 0;
  always #10 clk = ~clk;    // 50 MHz reference
  mmcm_params_t params = '0;
  logic clk_out, locked;
  int checks = 0, failures = 0;

  mmcm_model #(.LOCK_CYCLES(LOCK)) dut (.clk_in(clk), .rst_n, .cfg, .params, .clk_out, .locked);

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
    // {mult_x8, odiv_x8, divclk, expected period ns}
    int unsigned m8 [3] = '{96, 160, 100};
    int unsigned o8 [3] = '{96, 80, 400};
    int unsigned dv [3] = '{1, 1, 1};
    real expp [3] = '{20.0, 10.0, 80.0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    check(!locked && !clk_out, "unlocked and low after reset");
    for (int k = 0; k < 3; k++) begin
      int n = 0;
      bit high_seen = 0;
      realtime t0, t1;
      @(negedge clk);
      params = '{mult_x8: 12'(m8[k]), odiv_x8: 12'(o8[k]), divclk: 8'(dv[k])};
      cfg = 1;
      @(negedge clk);
      cfg = 0;
      params = '0;
      check(!locked, "lock lost after cfg");
      n = 1;
      while (!locked) begin
        @(posedge clk or posedge clk_out);
        if (clk_out && !locked) high_seen = 1;
        @(negedge clk);
        n++;
      end
      check(!high_seen, "output low while unlocked");
      // n counts falling edges from the cfg cycle: cfg is taken at the first
      // rising edge and lock comes LOCK rising edges after that one
      check(n == LOCK + 1, $sformatf("locked after %0d cycles, expected %0d", n, LOCK + 1));
      @(posedge clk_out); t0 = $realtime;
      repeat (10) @(posedge clk_out);
      t1 = $realtime;
      check((t1 - t0) / 10 > expp[k] * 0.995 && (t1 - t0) / 10 < expp[k] * 1.005,
            $sformatf("period %f ns expected %f", (t1 - t0) / 10, expp[k]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
