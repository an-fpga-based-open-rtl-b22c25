// cpu_model: behavioural stand-in for the SoC's RV32IM CPU, for testbenches
// only. It follows the CPU attachment rules of the SoC: it starts an
// instruction only in a cycle where run is 1 and halt is 0, shows its
// program counter on pc, counts cycles and retired instructions, and has a
// register-file debug port with a one-cycle read latency. cpu_rst clears the
// PC to RESET_PC and the counters.
// With USE_BUS = 0 every instruction is a one-cycle no-op. With USE_BUS = 1
// each instruction is fetched over the instruction bus and a small RV32I
// subset is executed: LUI, ADDI, LW, SW, JAL and BNE; anything else is a
// no-op. Loads and stores use the data bus (32-bit, low or high half of the
// 64-bit bus word by address bit 2). An instruction, once started,
// completes even if run drops, so a single-step runs exactly one.
`timescale 1ns/1ps
module cpu_model
  import soc_pkg::*;
#(
  parameter bit          USE_BUS  = 1'b0,
  parameter logic [31:0] RESET_PC = 32'h0
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cpu_rst,
  input  logic        run,
  input  logic        halt,
  output logic [31:0] pc,
  output logic [63:0] pmc_cycles,
  output logic [63:0] pmc_instrs,
  input  logic [4:0]  reg_addr,
  input  logic        reg_we,
  input  logic [31:0] reg_wdata,
  output logic [31:0] reg_rdata,
  output wb_m2s_t     ibus_o,
  input  wb_s2m_t     ibus_i,
  output wb_m2s_t     dbus_o,
  input  wb_s2m_t     dbus_i
);
  logic [31:0] rf [32];
  typedef enum logic [1:0] {IDLE, FETCH, MEM} st_e;
  st_e st;
  logic [31:0] ir;

  function automatic logic [31:0] imm_i(logic [31:0] i); return {{20{i[31]}}, i[31:20]}; endfunction
  function automatic logic [31:0] imm_s(logic [31:0] i); return {{20{i[31]}}, i[31:25], i[11:7]}; endfunction
  function automatic logic [31:0] imm_j(logic [31:0] i);
    return {{12{i[31]}}, i[19:12], i[20], i[30:21], 1'b0};
  endfunction
  function automatic logic [31:0] imm_b(logic [31:0] i);
    return {{20{i[31]}}, i[7], i[30:25], i[11:8], 1'b0};
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc <= RESET_PC; pmc_cycles <= '0; pmc_instrs <= '0; st <= IDLE;
      ibus_o <= WB_M2S_IDLE; dbus_o <= WB_M2S_IDLE; reg_rdata <= '0; ir <= '0;
      for (int i = 0; i < 32; i++) rf[i] <= '0;
    end else if (cpu_rst) begin
      pc <= RESET_PC; pmc_cycles <= '0; pmc_instrs <= '0; st <= IDLE;
      ibus_o <= WB_M2S_IDLE; dbus_o <= WB_M2S_IDLE;
    end else begin
      pmc_cycles <= pmc_cycles + 1;
      reg_rdata  <= rf[reg_addr];
      if (reg_we && reg_addr != 0) rf[reg_addr] <= reg_wdata;
      case (st)
        IDLE: if (run && !halt) begin
          if (!USE_BUS) begin
            pc <= pc + 4;
            pmc_instrs <= pmc_instrs + 1;
          end else begin
            ibus_o <= '{cyc: 1, stb: 1, we: 0, adr: pc, dat: '0, sel: '1, cti: CTI_CLASSIC, bte: BTE_LINEAR};
            st <= FETCH;
          end
        end
        FETCH: if (ibus_i.ack || ibus_i.err) begin
          logic [31:0] i;
          i = pc[2] ? ibus_i.dat[63:32] : ibus_i.dat[31:0];
          ir <= i;
          ibus_o <= WB_M2S_IDLE;
          st <= IDLE;
          pmc_instrs <= pmc_instrs + 1;
          pc <= pc + 4;
          case (i[6:0])
            7'h37: if (i[11:7] != 0) rf[i[11:7]] <= {i[31:12], 12'b0};                 // LUI
            7'h13: if (i[11:7] != 0 && i[14:12] == 3'b000) rf[i[11:7]] <= rf[i[19:15]] + imm_i(i); // ADDI
            7'h6F: begin                                                               // JAL
              if (i[11:7] != 0) rf[i[11:7]] <= pc + 4;
              pc <= pc + imm_j(i);
            end
            7'h63: if (i[14:12] == 3'b001 && rf[i[19:15]] != rf[i[24:20]]) pc <= pc + imm_b(i); // BNE
            7'h03, 7'h23: begin                                                        // LW / SW
              logic [31:0] a;
              a = rf[i[19:15]] + ((i[6:0] == 7'h03) ? imm_i(i) : imm_s(i));
              dbus_o <= '{cyc: 1, stb: 1, we: (i[6:0] == 7'h23), adr: a,
                          dat: {rf[i[24:20]], rf[i[24:20]]},
                          sel: a[2] ? 8'hF0 : 8'h0F, cti: CTI_CLASSIC, bte: BTE_LINEAR};
              st <= MEM;
            end
            default: ;
          endcase
        end
        MEM: if (dbus_i.ack || dbus_i.err) begin
          dbus_o <= WB_M2S_IDLE;
          st <= IDLE;
          if (ir[6:0] == 7'h03 && ir[11:7] != 0)
            rf[ir[11:7]] <= dbus_o.adr[2] ? dbus_i.dat[63:32] : dbus_i.dat[31:0];
        end
        default: st <= IDLE;
      endcase
    end
  end
endmodule
