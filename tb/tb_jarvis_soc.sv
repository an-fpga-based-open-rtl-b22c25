// tb_jarvis_soc: end-to-end test of the whole SoC with every parameter at its
// default (115200-baud-class UART divider 434, 256 KiB memory, 100-cycle
// MMCM lock time), driven only the way a host PC drives it: debug messages
// over the system UART. A behavioural RV32I-subset CPU (cpu_model) is
// attached to the CPU ports and runs from the SoC memory in the DFS clock.
//
// The host side of the test:
//   1. echoes a message, loads a small program into memory with MMAP_WRITE
//      and reads part of it back;
//   2. sets two triggerpoints and a breakpoint, runs the CPU, and checks that
//      it stops at the breakpoint, that the trigger pin toggled once per
//      visit of a triggerpoint, that the program's results are in memory and
//      in the register file, and that the program's byte came out of the
//      user UART;
//   3. halts, single-steps over the breakpoint and checks the PC, the
//      register written by that instruction and the instruction counter;
//   4. resumes the CPU (which then loads from memory in a loop) and, while
//      it runs, reads the TRNG and the timer over the shared bus, arms the
//      timer compare register, and reads an unmapped address (error reply);
//   5. sets a new DFS frequency and measures the CPU clock period, then turns
//      random DFS on and off;
//   6. sends an unknown token, and resets the CPU.
// Every mechanism is counted by monitors on the SoC's ports and internal
// signals: breakpoint halt, trigger toggle, single step, user UART output,
// bus contention between CPU and debug unit, bus error, timer interrupt,
// DFS reconfiguration by command and by the TRNG, CPU reset, and rejected
// message. A mechanism that never happened counts as a failure.
`timescale 1ns/1ps
module tb_jarvis_soc;
  import soc_pkg::*;
  localparam int UDIV = 434;             // default UART divider of the SoC
  localparam real BIT_NS = UDIV * 20.0;

  // rst_n starts high and falls at 1 ns: the CPU clock does not run during
  // reset, so the CPU-domain flip-flops see their reset as an edge
  logic clk_ref = 0, rst_n = 1;
  always #10 clk_ref = ~clk_ref;

  logic sys_rx = 1, sys_tx, usr_rx = 1, usr_tx, trg;
  logic cpu_clk, cpu_rst, cpu_run, cpu_halt, cpu_irq;
  logic [31:0] cpu_pc, cpu_reg_wdata, cpu_reg_rdata;
  logic [63:0] cpu_pmc_cycles, cpu_pmc_instrs;
  logic [4:0]  cpu_reg_addr;
  logic        cpu_reg_we;
  wb_m2s_t     ibus_m, dbus_m;
  wb_s2m_t     ibus_s, dbus_s;
  int checks = 0, failures = 0;

  jarvis_soc dut (
    .clk_ref, .rst_n, .sys_rx, .sys_tx, .usr_rx, .usr_tx, .trg,
    .cpu_clk, .cpu_rst, .cpu_run, .cpu_halt, .cpu_irq, .cpu_pc,
    .cpu_pmc_cycles, .cpu_pmc_instrs, .cpu_reg_addr, .cpu_reg_we, .cpu_reg_wdata,
    .cpu_reg_rdata, .cpu_ibus_i(ibus_m), .cpu_ibus_o(ibus_s),
    .cpu_dbus_i(dbus_m), .cpu_dbus_o(dbus_s));

  cpu_model #(.USE_BUS(1'b1)) u_cpu (
    .clk(cpu_clk), .rst_n, .cpu_rst, .run(cpu_run), .halt(cpu_halt), .pc(cpu_pc),
    .pmc_cycles(cpu_pmc_cycles), .pmc_instrs(cpu_pmc_instrs), .reg_addr(cpu_reg_addr),
    .reg_we(cpu_reg_we), .reg_wdata(cpu_reg_wdata), .reg_rdata(cpu_reg_rdata),
    .ibus_o(ibus_m), .ibus_i(ibus_s), .dbus_o(dbus_m), .dbus_i(dbus_s));

  // receiver on the user UART
  logic       usr_valid;
  logic [7:0] usr_byte;
  uart_rx #(.CLK_DIV(UDIV)) u_usr_rx (.clk(clk_ref), .rst_n, .rx(usr_tx), .rx_valid(usr_valid),
                                      .rx_data(usr_byte));

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #(200ms);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism monitors ----------------
  int n_brk = 0, n_trg = 0, n_step = 0, n_usr = 0, n_cont = 0, n_berr = 0, n_irq = 0;
  int n_dfs_set = 0, n_dfs_rnd = 0, n_cpurst = 0, n_reject = 0;
  logic trg_q = 0, halt_q = 0, irq_q = 0, rst_q = 0;
  logic [31:0] nrec_q = 0;
  logic [7:0]  usr_last = 0;
  always @(posedge clk_ref) begin
    if (rst_n) begin
      if (trg != trg_q) n_trg++;
      if (dut.m_req[0].cyc && dut.m_req[1].cyc) n_cont++;
      if (dut.s_rsp[SLV_MEM].err || (dut.m_rsp[1].err)) n_berr++;
      if (usr_valid) begin n_usr++; usr_last = usr_byte; end
      if (dut.n_reconf != nrec_q) begin
        if (dut.rnd) n_dfs_rnd++; else n_dfs_set++;
      end
    end
    trg_q  = trg;
    nrec_q = dut.n_reconf;
  end
  always @(posedge cpu_clk) begin
    if (cpu_halt && !halt_q) n_brk++;
    if (cpu_irq && !irq_q) n_irq++;
    if (cpu_rst && !rst_q) n_cpurst++;
    halt_q = cpu_halt;
    irq_q  = cpu_irq;
    rst_q  = cpu_rst;
  end

  // ---------------- host side of the system UART ----------------
  task automatic send_byte(logic [7:0] b);
    sys_rx = 0; #(BIT_NS * 1ns);
    for (int i = 0; i < 8; i++) begin sys_rx = b[i]; #(BIT_NS * 1ns); end
    sys_rx = 1; #(BIT_NS * 1ns);
  endtask

  task automatic get_byte(output logic [7:0] b);
    @(negedge sys_tx);
    #(BIT_NS * 1.5ns);
    for (int i = 0; i < 8; i++) begin b[i] = sys_tx; #(BIT_NS * 1ns); end
    check(sys_tx == 1, "stop bit from the SoC");
  endtask

  // one message: returns the response COMMAND byte and, for reads, DATA
  task automatic msg(input logic [15:0] cmd, input logic [31:0] a, input logic [31:0] d,
                     output logic [7:0] rcmd, output logic [31:0] rdata);
    logic [7:0] b;
    bit wr;
    wr = token_is_write(cmd[5:0]);
    fork
      begin
        send_byte(cmd[7:0]); send_byte(cmd[15:8]);
        for (int i = 0; i < 4; i++) send_byte(a[8*i +: 8]);
        if (wr) for (int i = 0; i < 4; i++) send_byte(d[8*i +: 8]);
      end
      begin
        get_byte(rcmd);
        rdata = 0;
        if (!wr) for (int i = 0; i < 4; i++) begin get_byte(b); rdata[8*i +: 8] = b; end
      end
    join
    if (rcmd[0]) n_reject += (cmd[5:0] > 6'd28) ? 1 : 0;
  endtask

  function automatic logic [15:0] mcmd(bit w);   // memory-mapped, classic, 4 bytes
    return {2'b00, w, 3'b000, 4'hF, w ? 6'(TK_MMAP_WRITE) : 6'(TK_MMAP_READ)};
  endfunction
  function automatic logic [15:0] lcmd(dbg_token_e t);  // local, CPU 0
    return {5'b0, 5'd0, 6'(t)};
  endfunction

  task automatic mwrite(logic [31:0] a, logic [31:0] d);
    logic [7:0] r; logic [31:0] x;
    msg(mcmd(1), a, d, r, x);
    check(r == 8'h02, $sformatf("write %h: response %h", a, r));
  endtask
  task automatic mread(logic [31:0] a, output logic [31:0] d, output logic [7:0] r);
    msg(mcmd(0), a, 0, r, d);
  endtask
  task automatic lcl(dbg_token_e t, logic [31:0] a, logic [31:0] d, output logic [31:0] q);
    logic [7:0] r;
    msg(lcmd(t), a, d, r, q);
    check(r == 8'h02, $sformatf("token %0d: response %h", t, r));
  endtask

  // ---------------- RV32I encodings ----------------
  function automatic logic [31:0] i_addi(int rd, int rs1, int imm);
    return {12'(imm), 5'(rs1), 3'b000, 5'(rd), 7'h13};
  endfunction
  function automatic logic [31:0] i_lui(int rd, logic [19:0] imm);
    return {imm, 5'(rd), 7'h37};
  endfunction
  function automatic logic [31:0] i_sw(int rs2, int rs1, int imm);
    logic [11:0] o = 12'(imm);
    return {o[11:5], 5'(rs2), 5'(rs1), 3'b010, o[4:0], 7'h23};
  endfunction
  function automatic logic [31:0] i_lw(int rd, int rs1, int imm);
    return {12'(imm), 5'(rs1), 3'b010, 5'(rd), 7'h03};
  endfunction
  function automatic logic [31:0] i_bne(int rs1, int rs2, int off);
    logic [12:0] o = 13'(off);
    return {o[12], o[10:5], 5'(rs2), 5'(rs1), 3'b001, o[4:1], o[11], 7'h63};
  endfunction
  function automatic logic [31:0] i_jal(int rd, int off);
    logic [20:0] o = 21'(off);
    return {o[20], o[10:1], o[11], o[19:12], 5'(rd), 7'h6f};
  endfunction

  logic [31:0] prog [12];
  initial begin
    prog[0]  = i_lui(1, 20'h80000);     // x1 = user UART base
    prog[1]  = i_addi(2, 0, 8'h41);     // x2 = 'A'
    prog[2]  = i_addi(3, 0, 0);         // x3 = 0
    prog[3]  = i_addi(4, 0, 3);         // x4 = 3
    prog[4]  = i_addi(3, 3, 1);         // 0x10 loop: x3++          (triggerpoint)
    prog[5]  = i_sw(3, 0, 12'h100);     // mem[0x100] = x3
    prog[6]  = i_bne(3, 4, -8);         // until x3 == 3
    prog[7]  = i_sw(2, 1, 0);           // 0x1C user UART <- 'A'
    prog[8]  = i_lw(5, 0, 12'h100);     // 0x20 x5 = mem[0x100]     (triggerpoint)
    prog[9]  = i_addi(6, 0, 7);         // 0x24 x6 = 7              (breakpoint)
    prog[10] = i_lw(7, 0, 12'h100);     // 0x28 loop: x7 = mem[0x100]
    prog[11] = i_jal(0, -4);            // 0x2C
  end

  // ---------------- the test ----------------
  initial begin
    logic [31:0] q, q2, t0;
    logic [7:0]  r;
    realtime     t_a;
    int          n;
    #1 rst_n = 0;
    repeat (5) @(posedge clk_ref);
    rst_n = 1;
    #(20us);

    // 1. echo, program load, read-back
    msg(lcmd(TK_ECHO_FRONTEND), 0, 32'h1234, r, q);
    check(r == 8'h02, "echo answered");
    foreach (prog[i]) mwrite(32'(4 * i), prog[i]);
    mread(32'h0, q, r);
    check(r == 8'h02 && q == prog[0], $sformatf("read back word 0: %h", q));
    mread(32'h24, q, r);
    check(r == 8'h02 && q == prog[9], $sformatf("read back word 9: %h", q));

    // 2. trigger/breakpoints and a run
    lcl(TK_SET_TRGPNT_CPU, 0, 32'h10, q);
    lcl(TK_SET_TRGPNT_CPU, 1, 32'h20, q);
    lcl(TK_SET_BRKPNT_CPU, 0, 32'h24, q);
    lcl(TK_GET_NUM_BRKPNT_CPU, 0, 0, q);
    check(q == {16'd1, 16'd4}, $sformatf("breakpoint count %h", q));
    lcl(TK_GET_DULOCAL_STATE, 0, 0, q);
    check(q == 1, "CPU halted after reset");
    lcl(TK_RUN_CPU, 0, 0, q);
    #(100us);
    lcl(TK_GET_CPU_PC, 0, 0, q);
    check(q == 32'h24, $sformatf("stopped at breakpoint, pc %h", q));
    lcl(TK_GET_DULOCAL_STATE, 0, 0, q);
    check(q == 1 && !cpu_run, "halted at breakpoint");
    check(n_trg == 4, $sformatf("trigger toggled %0d times, expected 4", n_trg));
    check(trg == 0, "trigger back low");
    mread(32'h100, q, r);
    check(q == 3, $sformatf("mem[0x100] = %0d", q));
    lcl(TK_GPR_INT32_READ, 5, 0, q);
    check(q == 3, $sformatf("x5 = %0d", q));
    lcl(TK_GPR_INT32_READ, 3, 0, q);
    check(q == 3, $sformatf("x3 = %0d", q));
    check(n_usr == 1 && usr_last == 8'h41, "user UART sent 'A'");
    lcl(TK_GET_LOW_INSTRCNT, 0, 0, q);
    check(q == 15, $sformatf("instructions retired %0d, expected 15", q));

    // 3. single step over the breakpoint
    lcl(TK_HALT_CPU, 0, 0, q);
    lcl(TK_ADVANCE_ONE_STEP, 0, 0, q);
    #(20us);
    lcl(TK_GET_CPU_PC, 0, 0, q);
    check(q == 32'h28, $sformatf("pc after step %h", q));
    if (q == 32'h28) n_step++;
    lcl(TK_GPR_INT32_READ, 6, 0, q);
    check(q == 7, $sformatf("x6 after step = %0d", q));
    lcl(TK_GET_LOW_INSTRCNT, 0, 0, q);
    check(q == 16, $sformatf("instructions after step %0d", q));
    lcl(TK_GET_LOW_CYCLECNT, 0, 0, q);
    check(q > 16, "cycle counter runs");

    // 4. CPU and debug unit share the bus
    lcl(TK_RM_BRKPNT_CPU, 0, 0, q);
    lcl(TK_RUN_CPU, 0, 0, q);
    mread(32'h8000_1000, q, r);
    mread(32'h8000_1000, q2, r);
    check(r == 8'h02 && q != q2, $sformatf("two TRNG words differ: %h %h", q, q2));
    mread(32'h8000_2000, t0, r);
    mread(32'h8000_2000, q, r);
    check(q > t0, "timer counts");
    check(!cpu_irq, "no timer interrupt yet");
    mwrite(32'h8000_200C, 0);
    mwrite(32'h8000_2008, q + 32'd100000);
    #(1ms);
    check(cpu_irq, "timer interrupt");
    mread(32'h4000_0000, q, r);
    check(r == 8'h01, $sformatf("unmapped read: response %h", r));
    lcl(TK_GET_CPU_PC, 0, 0, q);
    check(q == 32'h28 || q == 32'h2C, $sformatf("CPU loops, pc %h", q));

    // 5. DFS: fixed frequency, then random
    lcl(TK_SET_FREQ_DFS, 0, 360, q);
    #(20us);
    lcl(TK_GET_FREQ_DFS, 0, 0, q);
    check(q == 360, $sformatf("DFS index %0d", q));
    @(posedge cpu_clk); t_a = $realtime;
    repeat (100) @(posedge cpu_clk);
    check(($realtime - t_a) / 100.0 > 19.96 && ($realtime - t_a) / 100.0 < 20.04,
          $sformatf("CPU clock period %f ns at 50 MHz", ($realtime - t_a) / 100.0));
    n = n_dfs_rnd;
    lcl(TK_RND_FREQ_DFS, 0, 1, q);
    #(100us);
    lcl(TK_RND_FREQ_DFS, 0, 0, q);
    check(n_dfs_rnd > n + 2, $sformatf("random reconfigurations %0d", n_dfs_rnd - n));

    // 6. rejected token, CPU reset
    msg(16'd40, 0, 0, r, q);
    check(r == 8'h01, "unknown token rejected");
    lcl(TK_RST_CPU, 0, 0, q);
    #(20us);
    lcl(TK_GET_CPU_PC, 0, 0, q);
    check(q == 0, $sformatf("pc after reset %h", q));
    lcl(TK_GET_DULOCAL_STATE, 0, 0, q);
    check(q == 1, "halted after CPU reset");

    // every mechanism happened
    check(n_brk > 0,     "mechanism: breakpoint halt");
    check(n_trg > 0,     "mechanism: trigger toggle");
    check(n_step > 0,    "mechanism: single step");
    check(n_usr > 0,     "mechanism: user UART output");
    check(n_cont > 0,    "mechanism: bus contention");
    check(n_berr > 0,    "mechanism: bus error");
    check(n_irq > 0,     "mechanism: timer interrupt");
    check(n_dfs_set > 0, "mechanism: DFS reconfiguration by command");
    check(n_dfs_rnd > 0, "mechanism: random DFS reconfiguration");
    check(n_cpurst > 0,  "mechanism: CPU reset");
    check(n_reject > 0,  "mechanism: rejected message");
    $display("mechanisms: brk=%0d trg=%0d step=%0d usr=%0d cont=%0d berr=%0d irq=%0d dfs=%0d rnd=%0d rst=%0d rej=%0d",
             n_brk, n_trg, n_step, n_usr, n_cont, n_berr, n_irq, n_dfs_set, n_dfs_rnd, n_cpurst, n_reject);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
