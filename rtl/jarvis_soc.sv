// jarvis_soc: top level of the side-channel research SoC.
//
// The SoC is built around a 64-bit Wishbone data bus (wb_interconnect) with
// the CPU data port and the global debug unit as masters and the main memory
// (wb_mem), user UART (wb_uart), TRNG (wb_trng) and timer (wb_timer) as
// slaves. The CPU instruction port has its own bus to the memory's second
// port (modified Harvard). The host drives the debug subsystem through the
// system UART: the global debug unit (dbg_global) reaches the slaves through
// the bus and reaches the CPU and the DFS actuator through their local debug
// units (dbg_local_cpu, dbg_local_dfs). The DFS actuator (dfs_actuator)
// generates the CPU clock from clk_ref; everything else runs on clk_ref.
// The CPU local debug unit drives the trg pin that starts and stops the
// oscilloscope acquisition.
//
// The CPU itself (an in-order five-stage RV32IM core) is not part of this
// RTL: its attachment signals are ports, all in the cpu_clk domain except
// the bus ports, which enter the clk_ref domain through wb_cdc bridges (this
// design's choice, as is the two-flop synchronisation of the timer
// interrupt). A CPU connected here must advance only while cpu_run is 1 and
// cpu_halt is 0, present its program counter on cpu_pc, give its register
// file a one-cycle-latency debug port and count cycles and retired
// instructions.
// Reset: rst_n is asynchronous everywhere. The CPU clock does not run until
// the DFS has locked after reset, so the CPU-domain flip-flops rely on the
// asynchronous assertion of rst_n, not on a clock edge.
// Synthesis note: the behavioural models inside (MMCM output oscillator,
// TRNG noise oscillator) lose their delays in synthesis and are reported as
// a combinational loop and an undriven net; they stand for an FPGA clock
// primitive and a physical entropy source, so these warnings are expected.
`timescale 1ns/1ps
module jarvis_soc
  import soc_pkg::*;
#(
  parameter int unsigned MEM_BYTES = 262144,
  parameter int unsigned UART_DIV  = 434,
  parameter int unsigned NUM_BRK   = 4,
  parameter int unsigned NUM_TRG   = 4,
  parameter int unsigned DFS_LOCK  = 100,
  parameter pp_mode_e    TRNG_PP   = PP_VN
) (
  input  logic        clk_ref,
  input  logic        rst_n,
  // system UART to the host PC
  input  logic        sys_rx,
  output logic        sys_tx,
  // user UART
  input  logic        usr_rx,
  output logic        usr_tx,
  // oscilloscope trigger
  output logic        trg,
  // CPU attachment (cpu_clk domain)
  output logic        cpu_clk,
  output logic        cpu_rst,
  output logic        cpu_run,
  output logic        cpu_halt,
  output logic        cpu_irq,
  input  logic [31:0] cpu_pc,
  input  logic [63:0] cpu_pmc_cycles,
  input  logic [63:0] cpu_pmc_instrs,
  output logic [4:0]  cpu_reg_addr,
  output logic        cpu_reg_we,
  output logic [31:0] cpu_reg_wdata,
  input  logic [31:0] cpu_reg_rdata,
  input  wb_m2s_t     cpu_ibus_i,
  output wb_s2m_t     cpu_ibus_o,
  input  wb_m2s_t     cpu_dbus_i,
  output wb_s2m_t     cpu_dbus_o
);
  localparam int unsigned FW = 10;

  // ---------------- debug subsystem ----------------
  logic       rx_valid, tx_valid, tx_ready;
  logic [7:0] rx_data, tx_data;
  dbg_req_t   cpu_req, dfs_req;
  dbg_rsp_t   cpu_rsp, dfs_rsp;
  wb_m2s_t    m_req [2];
  wb_s2m_t    m_rsp [2];
  wb_m2s_t    s_req [NUM_SLAVES];
  wb_s2m_t    s_rsp [NUM_SLAVES];

  sys_uart #(.CLK_DIV(UART_DIV)) u_sys_uart (
    .clk(clk_ref), .rst_n, .rx(sys_rx), .tx(sys_tx),
    .rx_valid, .rx_data, .tx_valid, .tx_data, .tx_ready);

  dbg_global u_dbg_global (
    .clk(clk_ref), .rst_n, .rx_valid, .rx_data, .tx_valid, .tx_data, .tx_ready,
    .wbm_o(m_req[1]), .wbm_i(m_rsp[1]),
    .cpu_req_o(cpu_req), .cpu_rsp_i(cpu_rsp), .dfs_req_o(dfs_req), .dfs_rsp_i(dfs_rsp));

  dbg_local_cpu #(.NUM_BRK(NUM_BRK), .NUM_TRG(NUM_TRG)) u_dbg_cpu (
    .clk(cpu_clk), .rst_n, .req_i(cpu_req), .rsp_o(cpu_rsp),
    .cpu_pc, .cpu_run, .cpu_halt, .cpu_rst,
    .pmc_cycles(cpu_pmc_cycles), .pmc_instrs(cpu_pmc_instrs),
    .reg_addr(cpu_reg_addr), .reg_we(cpu_reg_we), .reg_wdata(cpu_reg_wdata), .reg_rdata(cpu_reg_rdata),
    .trg);

  // ---------------- DFS ----------------
  logic [FW-1:0] f_in, f_out;
  logic          f_set, rnd, is_mst, dfs_busy;
  logic [31:0]   n_reconf;

  dbg_local_dfs #(.FW(FW)) u_dbg_dfs (
    .clk(clk_ref), .rst_n, .req_i(dfs_req), .rsp_o(dfs_rsp), .f_in, .f_set, .rnd, .f_out);

  dfs_actuator #(.FW(FW), .LOCK_CYCLES(DFS_LOCK)) u_dfs (
    .clk_ref, .rst_n, .f_in, .f_set, .rnd, .clk_out(cpu_clk), .f_out, .is_mst,
    .busy(dfs_busy), .n_reconf);

  // ---------------- buses ----------------
  wb_m2s_t ibus_s;
  wb_s2m_t ibus_r;

  wb_cdc u_cdc_i (.rst_n, .clk_m(cpu_clk), .m_i(cpu_ibus_i), .m_o(cpu_ibus_o),
                  .clk_s(clk_ref), .s_o(ibus_s), .s_i(ibus_r));
  wb_cdc u_cdc_d (.rst_n, .clk_m(cpu_clk), .m_i(cpu_dbus_i), .m_o(cpu_dbus_o),
                  .clk_s(clk_ref), .s_o(m_req[0]), .s_i(m_rsp[0]));

  wb_interconnect #(.NM(2)) u_bus (
    .clk(clk_ref), .rst_n, .m_i(m_req), .m_o(m_rsp), .s_o(s_req), .s_i(s_rsp));

  // ---------------- slaves ----------------
  logic timer_irq;

  wb_mem #(.MEM_BYTES(MEM_BYTES)) u_mem (
    .clk(clk_ref), .rst_n, .wbi_i(ibus_s), .wbi_o(ibus_r),
    .wbd_i(s_req[SLV_MEM]), .wbd_o(s_rsp[SLV_MEM]));

  wb_uart #(.CLK_DIV(UART_DIV)) u_usr_uart (
    .clk(clk_ref), .rst_n, .wb_i(s_req[SLV_UART]), .wb_o(s_rsp[SLV_UART]), .rx(usr_rx), .tx(usr_tx));

  wb_trng #(.MODE(TRNG_PP)) u_trng (
    .clk(clk_ref), .rst_n, .wb_i(s_req[SLV_TRNG]), .wb_o(s_rsp[SLV_TRNG]));

  wb_timer u_timer (
    .clk(clk_ref), .rst_n, .wb_i(s_req[SLV_TIMER]), .wb_o(s_rsp[SLV_TIMER]), .irq(timer_irq));

  sync2 u_sync_irq (.clk(cpu_clk), .rst_n, .d(timer_irq), .q(cpu_irq));
endmodule
