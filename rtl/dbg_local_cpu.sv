// dbg_local_cpu: the CPU local debug unit, the adapter between the global
// debug unit and the CPU. It runs in the CPU clock domain (the DFS output
// clock) and talks to the global unit over the four-phase req/ack link of
// soc_pkg, whose incoming req is synchronised here.
//
// CPU interface: the CPU advances only while cpu_run is 1 and cpu_halt is 0.
// cpu_run comes from the debug FSM (HALTED, RUNNING, STEPPING); cpu_halt is
// the combinational breakpoint match, so the instruction at a breakpoint
// address is not executed and the FSM moves to HALTED in the same cycle.
// STEPPING gives exactly one cycle of cpu_run. cpu_rst is a RST_CYCLES-cycle
// reset pulse. The register-file debug port (reg_addr/reg_we/reg_wdata) has a
// one-cycle read latency on reg_rdata. pmc_cycles/pmc_instrs are the CPU's
// performance counters.
//
// Breakpoint and triggerpoint tables: NUM_BRK / NUM_TRG entries, each a
// 32-bit instruction address with a valid bit, compared with cpu_pc every
// cycle. A breakpoint match halts the CPU until RUN_CPU (or a single step);
// on resuming, the breakpoint at the current PC is ignored until the PC
// moves on. A triggerpoint match does not stop the CPU: in the first cycle
// the PC shows a triggerpoint address the trg register toggles, so one pair
// of triggerpoints brackets a window of interest for the oscilloscope.
//
// Token arguments (this design's choice): SET_*PNT: ADDRESS = entry index,
// DATA = instruction address; GET_*PNT: ADDRESS = entry index, returns the
// address (0 if the entry is empty); RM_*PNT: ADDRESS = entry index;
// GET_NUM_*PNT: returns {valid entries[31:16], table size[15:0]};
// GET_DULOCAL_STATE returns 0 running, 1 halted, 2 stepping. The FPU register
// tokens return an error because the CPU of this configuration has no FPU.
// After reset the CPU is halted, waiting for the program to be loaded.
`timescale 1ns/1ps
module dbg_local_cpu
  import soc_pkg::*;
#(
  parameter int unsigned NUM_BRK    = 4,
  parameter int unsigned NUM_TRG    = 4,
  parameter int unsigned RST_CYCLES = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  dbg_req_t    req_i,
  output dbg_rsp_t    rsp_o,
  // CPU side
  input  logic [31:0] cpu_pc,
  output logic        cpu_run,
  output logic        cpu_halt,
  output logic        cpu_rst,
  input  logic [63:0] pmc_cycles,
  input  logic [63:0] pmc_instrs,
  output logic [4:0]  reg_addr,
  output logic        reg_we,
  output logic [31:0] reg_wdata,
  input  logic [31:0] reg_rdata,
  // oscilloscope trigger
  output logic        trg
);
  typedef enum logic [1:0] {RUNNING = 2'd0, HALTED = 2'd1, STEPPING = 2'd2} dstate_e;
  typedef enum logic [1:0] {L_IDLE, L_REG, L_ACK} lstate_e;

  dstate_e dstate;
  lstate_e lstate;

  logic [31:0] brk_addr [NUM_BRK];
  logic        brk_v    [NUM_BRK];
  logic [31:0] trg_addr [NUM_TRG];
  logic        trg_v    [NUM_TRG];

  logic        req_s;
  logic        mask_v;
  logic [31:0] mask_pc;
  logic [31:0] pc_prev;
  logic [$clog2(RST_CYCLES+1)-1:0] rst_cnt;

  sync2 u_sync_req (.clk, .rst_n, .d(req_i.req), .q(req_s));

  // table matches
  logic brk_hit, trg_hit;
  always_comb begin
    brk_hit = 1'b0;
    trg_hit = 1'b0;
    for (int i = 0; i < NUM_BRK; i++) if (brk_v[i] && brk_addr[i] == cpu_pc) brk_hit = 1'b1;
    for (int i = 0; i < NUM_TRG; i++) if (trg_v[i] && trg_addr[i] == cpu_pc) trg_hit = 1'b1;
  end

  assign cpu_run  = (dstate == RUNNING) || (dstate == STEPPING);
  assign cpu_halt = cpu_run && brk_hit && !(mask_v && mask_pc == cpu_pc);
  assign cpu_rst  = (rst_cnt != '0);

  function automatic logic [15:0] count_valid_brk(input logic v [NUM_BRK]);
    logic [15:0] c = '0;
    for (int i = 0; i < NUM_BRK; i++) c += 16'(v[i]);
    return c;
  endfunction
  function automatic logic [15:0] count_valid_trg(input logic v [NUM_TRG]);
    logic [15:0] c = '0;
    for (int i = 0; i < NUM_TRG; i++) c += 16'(v[i]);
    return c;
  endfunction

  wire [5:0]  tok  = req_i.token;
  wire [31:0] argi = req_i.addr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dstate    <= HALTED;
      lstate    <= L_IDLE;
      rsp_o     <= '0;
      mask_v    <= 1'b0;
      mask_pc   <= '0;
      pc_prev   <= '0;
      trg       <= 1'b0;
      rst_cnt   <= '0;
      reg_addr  <= '0;
      reg_we    <= 1'b0;
      reg_wdata <= '0;
      for (int i = 0; i < NUM_BRK; i++) begin brk_addr[i] <= '0; brk_v[i] <= 1'b0; end
      for (int i = 0; i < NUM_TRG; i++) begin trg_addr[i] <= '0; trg_v[i] <= 1'b0; end
    end else begin
      reg_we  <= 1'b0;
      pc_prev <= cpu_pc;
      if (rst_cnt != '0) rst_cnt <= rst_cnt - 1'b1;

      // triggerpoints toggle the trigger on the first cycle of a match
      if (trg_hit && cpu_pc != pc_prev) trg <= ~trg;

      // the resume mask lasts until the PC leaves the resumed address
      if (mask_v && cpu_pc != mask_pc) mask_v <= 1'b0;

      // run / halt / step
      case (dstate)
        RUNNING:  if (cpu_halt) dstate <= HALTED;
        STEPPING: dstate <= HALTED;
        default:  ;
      endcase

      // debug link
      case (lstate)
        L_IDLE: if (req_s && !rsp_o.ack) begin
          rsp_o.err  <= 1'b0;
          rsp_o.data <= '0;
          lstate     <= L_ACK;
          case (tok)
            TK_GPR_INT32_READ: begin
              reg_addr <= argi[4:0];
              lstate   <= L_REG;
            end
            TK_GPR_INT32_WRITE: begin
              reg_addr  <= argi[4:0];
              reg_wdata <= req_i.data;
              reg_we    <= 1'b1;
            end
            TK_HALT_CPU: begin
              dstate     <= HALTED;
              rsp_o.data <= cpu_pc;
            end
            TK_RUN_CPU: begin
              dstate  <= RUNNING;
              mask_v  <= 1'b1;
              mask_pc <= cpu_pc;
            end
            TK_RST_CPU: begin
              dstate  <= HALTED;
              rst_cnt <= $bits(rst_cnt)'(RST_CYCLES);
              mask_v  <= 1'b0;
            end
            TK_GET_DULOCAL_STATE: rsp_o.data <= 32'(dstate);
            TK_GET_CPU_PC:        rsp_o.data <= cpu_pc;
            TK_ADVANCE_ONE_STEP: begin
              if (dstate == HALTED) begin
                dstate  <= STEPPING;
                mask_v  <= 1'b1;
                mask_pc <= cpu_pc;
              end else begin
                rsp_o.err <= 1'b1;
              end
            end
            TK_ECHO_FRONTEND:     ;
            TK_GET_LOW_CYCLECNT:  rsp_o.data <= pmc_cycles[31:0];
            TK_GET_HIGH_CYCLECNT: rsp_o.data <= pmc_cycles[63:32];
            TK_GET_LOW_INSTRCNT:  rsp_o.data <= pmc_instrs[31:0];
            TK_GET_HIGH_INSTRCNT: rsp_o.data <= pmc_instrs[63:32];
            TK_SET_BRKPNT_CPU, TK_GET_BRKPNT_CPU, TK_RM_BRKPNT_CPU: begin
              if (argi >= 32'(NUM_BRK)) rsp_o.err <= 1'b1;
              else if (tok == TK_SET_BRKPNT_CPU) begin
                brk_addr[argi] <= req_i.data;
                brk_v[argi]    <= 1'b1;
              end else if (tok == TK_RM_BRKPNT_CPU) brk_v[argi] <= 1'b0;
              else rsp_o.data <= brk_v[argi] ? brk_addr[argi] : 32'd0;
            end
            TK_SET_TRGPNT_CPU, TK_GET_TRGPNT_CPU, TK_RM_TRGPNT_CPU: begin
              if (argi >= 32'(NUM_TRG)) rsp_o.err <= 1'b1;
              else if (tok == TK_SET_TRGPNT_CPU) begin
                trg_addr[argi] <= req_i.data;
                trg_v[argi]    <= 1'b1;
              end else if (tok == TK_RM_TRGPNT_CPU) trg_v[argi] <= 1'b0;
              else rsp_o.data <= trg_v[argi] ? trg_addr[argi] : 32'd0;
            end
            TK_GET_NUM_BRKPNT_CPU: rsp_o.data <= {count_valid_brk(brk_v), 16'(NUM_BRK)};
            TK_GET_NUM_TRGPNT_CPU: rsp_o.data <= {count_valid_trg(trg_v), 16'(NUM_TRG)};
            default: rsp_o.err <= 1'b1;   // FPU registers and foreign tokens
          endcase
        end
        L_REG: begin
          // register file answers one cycle after reg_addr
          lstate <= L_ACK;
        end
        L_ACK: begin
          if (!rsp_o.ack) begin
            rsp_o.ack <= 1'b1;
            if (tok == TK_GPR_INT32_READ) rsp_o.data <= reg_rdata;
          end else if (!req_s) begin
            rsp_o.ack <= 1'b0;
            lstate    <= L_IDLE;
          end
        end
        default: lstate <= L_IDLE;
      endcase
    end
  end
endmodule
