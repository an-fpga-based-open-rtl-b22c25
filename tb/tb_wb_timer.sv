// tb_wb_timer: self-checking test of the timer.
// Checks that the current time increases by exactly one per cycle (two
// reads a known number of cycles apart), that both 64-bit registers can be
// written and read back (including a partial write with byte enables), and
// that irq rises exactly when time has become greater than the threshold:
// low while time <= threshold, high one cycle after time passes it (the
// registered 1-bit interrupt flag), and low again when the threshold is
// moved beyond the current time.
`timescale 1ns/1ps
module tb_wb_timer;
  import soc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #10 clk = ~clk;

  wb_m2s_t wb = WB_M2S_IDLE;
  wb_s2m_t wr;
  logic irq;
  int checks = 0, failures = 0;

  wb_timer dut (.clk, .rst_n, .wb_i(wb), .wb_o(wr), .irq);

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic wb_access(input logic we, input logic [31:0] a, input logic [63:0] d,
                           input logic [7:0] sel, output logic [63:0] q);
    @(negedge clk);
    wb.cyc = 1; wb.stb = 1; wb.we = we; wb.adr = a; wb.dat = d; wb.sel = sel; wb.cti = CTI_CLASSIC;
    @(posedge clk);
    @(posedge clk);
    check(wr.ack, "ack one cycle after stb");
    q = wr.dat;
    @(negedge clk);
    wb = WB_M2S_IDLE;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] q0, q1, thr;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    check(!irq, "no interrupt after reset");
    // increments once per cycle: the two reads capture 9 cycles apart
    wb_access(0, TIMER_BASE, 0, 8'hFF, q0);
    repeat (7) @(posedge clk);
    wb_access(0, TIMER_BASE, 0, 8'hFF, q1);
    check(q1 - q0 == 64'd9, $sformatf("time advanced %0d between captures 9 cycles apart", q1 - q0));
    // write / read back of both registers
    wb_access(1, TIMER_BASE + 8, 64'h1234_5678_9ABC_DEF0, 8'hFF, q0);
    wb_access(0, TIMER_BASE + 8, 0, 8'hFF, q0);
    check(q0 == 64'h1234_5678_9ABC_DEF0, "threshold read back");
    wb_access(1, TIMER_BASE + 8, 64'hFFFF_FFFF_0000_0000, 8'hF0, q0);
    wb_access(0, TIMER_BASE + 8, 0, 8'hFF, q0);
    check(q0 == 64'hFFFF_FFFF_9ABC_DEF0, "byte-enable write of threshold");
    wb_access(1, TIMER_BASE, 64'hFFFF_FFFF_0000_0000, 8'hFF, q0);
    wb_access(0, TIMER_BASE, 0, 8'hFF, q0);
    check(q0 >= 64'hFFFF_FFFF_0000_0000 && q0 < 64'hFFFF_FFFF_0000_0010, "time written");
    // interrupt timing: time set to thr-5; when the write call returns the
    // time is thr-4, so loop cycle c sees time thr-4+c. irq must first be
    // seen when time is thr+2: time > thr at thr+1, registered one cycle.
    thr = 64'd1000;
    wb_access(1, TIMER_BASE + 8, thr, 8'hFF, q0);
    wb_access(1, TIMER_BASE, thr - 5, 8'hFF, q0);
    begin
      int seen = -1;
      for (int c = 0; c < 20; c++) begin
        @(posedge clk);
        if (irq && seen < 0) seen = c;
      end
      check(seen == 6, $sformatf("irq first seen at loop cycle %0d, expected 6", seen));
    end
    check(irq, "irq stays high");
    wb_access(1, TIMER_BASE + 8, 64'd100000, 8'hFF, q0);
    repeat (2) @(posedge clk);
    check(!irq, "irq clears when threshold moves ahead");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
