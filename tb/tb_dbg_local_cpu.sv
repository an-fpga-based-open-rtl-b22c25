// tb_dbg_local_cpu: self-checking test of the CPU local debug unit.
// The testbench plays the global debug unit on the four-phase link and uses
// cpu_model (one no-op instruction per cycle, PC += 4) as the CPU.
// Scenario: after reset the CPU must be halted; register write/read through
// the debug port; a breakpoint at 0x40 and triggerpoints at 0x20 and 0x30
// are set and read back; RUN_CPU must stop with the PC exactly at 0x40 and
// 16 instructions retired (the breakpointed instruction is not executed),
// while trg rises when the PC reaches 0x20 and falls at 0x30; a single step
// retires exactly one instruction; after removing the breakpoint the CPU
// keeps running until HALT_CPU; RST_CPU brings the PC back to 0. Error
// responses are checked for FPU registers, a bad table index and a step
// while running. Every trg toggle must happen right after the PC showed a
// triggerpoint address.
`timescale 1ns/1ps
module tb_dbg_local_cpu;
  import soc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #10 clk = ~clk;
  dbg_req_t req = '0;
  dbg_rsp_t rsp;
  logic [31:0] pc, reg_wdata, reg_rdata;
  logic [63:0] cyc, ins;
  logic run, halt, crst, reg_we, trg;
  logic [4:0] reg_addr;
  wb_m2s_t ib, db;
  int checks = 0, failures = 0, ntrg = 0;

  dbg_local_cpu dut (.clk, .rst_n, .req_i(req), .rsp_o(rsp), .cpu_pc(pc), .cpu_run(run), .cpu_halt(halt),
                     .cpu_rst(crst), .pmc_cycles(cyc), .pmc_instrs(ins), .reg_addr, .reg_we, .reg_wdata,
                     .reg_rdata, .trg);
  cpu_model #(.USE_BUS(0)) cpu (.clk, .rst_n, .cpu_rst(crst), .run, .halt, .pc, .pmc_cycles(cyc),
                                .pmc_instrs(ins), .reg_addr, .reg_we, .reg_wdata, .reg_rdata,
                                .ibus_o(ib), .ibus_i(WB_S2M_IDLE), .dbus_o(db), .dbus_i(WB_S2M_IDLE));

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // trigger monitor
  logic trg_q; logic [31:0] pc_q;
  always @(posedge clk) begin
    if (rst_n && trg != trg_q) begin
      ntrg++;
      check(pc_q == 32'h20 || pc_q == 32'h30, $sformatf("trg toggled after pc %08x", pc_q));
    end
    trg_q <= trg; pc_q <= pc;
  end

  task automatic link(input logic [5:0] tok, input logic [31:0] a, d, output logic err, output logic [31:0] q);
    @(negedge clk);
    req = '{req: 1'b1, token: tok, cpu_id: 5'd0, addr: a, data: d};
    @(posedge clk);
    while (!rsp.ack) @(posedge clk);
    q = rsp.data; err = rsp.err;
    @(negedge clk);
    req.req = 1'b0;
    while (rsp.ack) @(posedge clk);
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic err;
    logic [31:0] q;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk);
    link(TK_GET_DULOCAL_STATE, 0, 0, err, q);  check(!err && q == 1, "halted after reset");
    check(pc == 0, "pc held at 0");
    link(TK_GPR_INT32_WRITE, 5, 32'hDEADBEEF, err, q);  check(!err, "gpr write");
    link(TK_GPR_INT32_READ, 5, 0, err, q);  check(!err && q == 32'hDEADBEEF, $sformatf("gpr read %08x", q));
    link(TK_GPR_FPU32_READ, 5, 0, err, q);  check(err, "no FPU registers");
    link(TK_SET_BRKPNT_CPU, 0, 32'h40, err, q);  check(!err, "set breakpoint");
    link(TK_SET_TRGPNT_CPU, 0, 32'h20, err, q);  check(!err, "set start triggerpoint");
    link(TK_SET_TRGPNT_CPU, 1, 32'h30, err, q);  check(!err, "set end triggerpoint");
    link(TK_SET_BRKPNT_CPU, 7, 32'h99, err, q);  check(err, "index beyond table");
    link(TK_GET_BRKPNT_CPU, 0, 0, err, q);  check(q == 32'h40, "get breakpoint");
    link(TK_GET_TRGPNT_CPU, 1, 0, err, q);  check(q == 32'h30, "get triggerpoint");
    link(TK_GET_NUM_BRKPNT_CPU, 0, 0, err, q);  check(q == {16'd1, 16'd4}, $sformatf("num breakpoints %08x", q));
    link(TK_GET_NUM_TRGPNT_CPU, 0, 0, err, q);  check(q == {16'd2, 16'd4}, $sformatf("num triggerpoints %08x", q));
    link(TK_RUN_CPU, 0, 0, err, q);  check(!err, "run");
    wait (halt == 1'b1 || pc > 32'h100);
    repeat (3) @(posedge clk);
    link(TK_GET_DULOCAL_STATE, 0, 0, err, q);  check(q == 1, "halted at breakpoint");
    link(TK_GET_CPU_PC, 0, 0, err, q);  check(q == 32'h40, $sformatf("pc at breakpoint %08x", q));
    link(TK_GET_LOW_INSTRCNT, 0, 0, err, q);  check(q == 16, $sformatf("instructions before breakpoint %0d", q));
    link(TK_GET_HIGH_INSTRCNT, 0, 0, err, q);  check(q == 0, "instr count high word");
    check(ntrg == 2 && trg == 1'b0, $sformatf("trigger toggled %0d times", ntrg));
    link(TK_ADVANCE_ONE_STEP, 0, 0, err, q);  check(!err, "step");
    repeat (3) @(posedge clk);
    link(TK_GET_CPU_PC, 0, 0, err, q);  check(q == 32'h44, $sformatf("pc after step %08x", q));
    link(TK_GET_LOW_INSTRCNT, 0, 0, err, q);  check(q == 17, "one instruction per step");
    link(TK_ECHO_FRONTEND, 0, 0, err, q);  check(!err, "echo acknowledged");
    link(TK_RM_BRKPNT_CPU, 0, 0, err, q);
    link(TK_GET_NUM_BRKPNT_CPU, 0, 0, err, q);  check(q == {16'd0, 16'd4}, "breakpoint removed");
    link(TK_RUN_CPU, 0, 0, err, q);
    link(TK_ADVANCE_ONE_STEP, 0, 0, err, q);  check(err, "no step while running");
    link(TK_GET_DULOCAL_STATE, 0, 0, err, q);  check(q == 0, "running");
    link(TK_HALT_CPU, 0, 0, err, q);  check(!err, "halt");
    link(TK_GET_CPU_PC, 0, 0, err, q);  check(q > 32'h60, "kept running past the removed breakpoint");
    link(TK_GET_LOW_CYCLECNT, 0, 0, err, q);  check(q > 32'd60, "cycle counter");
    link(TK_GET_HIGH_CYCLECNT, 0, 0, err, q);  check(q == 0, "cycle counter high word");
    link(TK_RST_CPU, 0, 0, err, q);  check(!err, "reset");
    repeat (3) @(posedge clk);
    link(TK_GET_CPU_PC, 0, 0, err, q);  check(q == 0, "pc after reset");
    link(TK_GET_DULOCAL_STATE, 0, 0, err, q);  check(q == 1, "halted after RST_CPU");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
