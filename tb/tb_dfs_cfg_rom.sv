// tb_dfs_cfg_rom: self-checking test of the DFS configuration table.
// For every one of the 1024 entries the parameter set read from the table
// (one cycle after the address) is turned back into a frequency,
// f = 50 MHz * (M/8) / (D * O/8), and compared with the intended target
// 5 MHz + i * 0.125 MHz (within 0.1 %). The set must also be feasible for a
// 7-series MMCM: VCO = 50 MHz * M / D in 600-1200 MHz, M in 2..64, O in
// 1..128 in 1/8 steps, D in 1..5 (phase detector at 10 MHz or more). Targets must rise by 0.125 MHz per entry,
// and the achieved frequencies must be strictly increasing.
`timescale 1ns/1ps
module tb_dfs_cfg_rom;
  import soc_pkg::*;
  logic clk = 0;
  always #10 clk = ~clk;
  logic [9:0] addr = 0;
  mmcm_params_t data;
  int checks = 0, failures = 0;

  dfs_cfg_rom dut (.clk, .addr, .data);

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
    real prev = 0.0;
    for (int i = 0; i < 1024; i++) begin
      real f, tgt, vco;
      @(negedge clk) addr = 10'(i);
      @(negedge clk);
      tgt = 5.0 + 0.125 * i;
      f   = 50.0 * (real'(data.mult_x8) / 8.0) / (real'(data.divclk) * real'(data.odiv_x8) / 8.0);
      vco = 50.0 * (real'(data.mult_x8) / 8.0) / real'(data.divclk);
      check(f > tgt * 0.999 && f < tgt * 1.001, $sformatf("entry %0d: %f MHz for %f", i, f, tgt));
      check(vco >= 600.0 && vco <= 1200.0, $sformatf("entry %0d: VCO %f", i, vco));
      check(data.mult_x8 >= 16 && data.mult_x8 <= 512 &&
            data.odiv_x8 >= 8 && data.odiv_x8 <= 1024 && data.divclk >= 1 && data.divclk <= 5, $sformatf("entry %0d: ranges", i));
      check(f > prev, $sformatf("entry %0d: not monotonic", i));
      prev = f;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
