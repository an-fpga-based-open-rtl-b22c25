// soc_pkg: types and constants shared by the blocks of the SoC.
//
// The SoC uses 64-bit Wishbone (B4) buses. A master drives a wb_m2s_t and
// receives a wb_s2m_t. Debug requests travel from the global debug unit to
// the local debug units as dbg_req_t / dbg_rsp_t, a four-phase level
// handshake: the global unit raises req with all fields stable, the local
// unit raises ack (with err/data) when done, the global unit drops req, the
// local unit drops ack. Both ends synchronise the incoming level, so the two
// units may sit in different clock domains.
//
// Token codes follow the order of the token list of the debug protocol
// (INVALID = 0 ... RND_FREQ_DFS = 28); the numeric values are this design's
// choice. The memory map is also this design's choice.
`timescale 1ns/1ps
package soc_pkg;

  localparam int unsigned WB_AW = 32;
  localparam int unsigned WB_DW = 64;
  localparam int unsigned WB_SW = WB_DW / 8;

  // Wishbone cycle type identifier and burst type extension codes.
  localparam logic [2:0] CTI_CLASSIC = 3'b000;
  localparam logic [2:0] CTI_CONST   = 3'b001;
  localparam logic [2:0] CTI_INCR    = 3'b010;
  localparam logic [2:0] CTI_EOB     = 3'b111;
  localparam logic [1:0] BTE_LINEAR  = 2'b00;
  localparam logic [1:0] BTE_WRAP4   = 2'b01;
  localparam logic [1:0] BTE_WRAP8   = 2'b10;
  localparam logic [1:0] BTE_WRAP16  = 2'b11;

  typedef struct packed {
    logic             cyc;
    logic             stb;
    logic             we;
    logic [WB_AW-1:0] adr;
    logic [WB_DW-1:0] dat;
    logic [WB_SW-1:0] sel;
    logic [2:0]       cti;
    logic [1:0]       bte;
  } wb_m2s_t;

  typedef struct packed {
    logic             ack;
    logic             err;
    logic [WB_DW-1:0] dat;
  } wb_s2m_t;

  localparam wb_m2s_t WB_M2S_IDLE = '0;
  localparam wb_s2m_t WB_S2M_IDLE = '0;

  // Memory map of the data bus (slave index order of the interconnect).
  localparam int unsigned NUM_SLAVES = 4;
  localparam int unsigned SLV_MEM    = 0;
  localparam int unsigned SLV_UART   = 1;
  localparam int unsigned SLV_TRNG   = 2;
  localparam int unsigned SLV_TIMER  = 3;
  localparam logic [31:0] MEM_BASE   = 32'h0000_0000;
  localparam logic [31:0] MEM_MASK   = 32'hFFFC_0000;  // 256 kB window
  localparam logic [31:0] UART_BASE  = 32'h8000_0000;
  localparam logic [31:0] TRNG_BASE  = 32'h8000_1000;
  localparam logic [31:0] TIMER_BASE = 32'h8000_2000;
  localparam logic [31:0] PERI_MASK  = 32'hFFFF_F000;  // 4 kB windows

  // Debug request token types.
  typedef enum logic [5:0] {
    TK_INVALID           = 6'd0,
    TK_MMAP_READ         = 6'd1,
    TK_MMAP_WRITE        = 6'd2,
    TK_GPR_INT32_READ    = 6'd3,
    TK_GPR_INT32_WRITE   = 6'd4,
    TK_GPR_FPU32_READ    = 6'd5,
    TK_GPR_FPU32_WRITE   = 6'd6,
    TK_HALT_CPU          = 6'd7,
    TK_RUN_CPU           = 6'd8,
    TK_RST_CPU           = 6'd9,
    TK_GET_DULOCAL_STATE = 6'd10,
    TK_GET_CPU_PC        = 6'd11,
    TK_ADVANCE_ONE_STEP  = 6'd12,
    TK_ECHO_FRONTEND     = 6'd13,
    TK_GET_LOW_CYCLECNT  = 6'd14,
    TK_GET_HIGH_CYCLECNT = 6'd15,
    TK_GET_LOW_INSTRCNT  = 6'd16,
    TK_GET_HIGH_INSTRCNT = 6'd17,
    TK_SET_BRKPNT_CPU    = 6'd18,
    TK_GET_BRKPNT_CPU    = 6'd19,
    TK_RM_BRKPNT_CPU     = 6'd20,
    TK_GET_NUM_BRKPNT_CPU= 6'd21,
    TK_SET_TRGPNT_CPU    = 6'd22,
    TK_GET_TRGPNT_CPU    = 6'd23,
    TK_RM_TRGPNT_CPU     = 6'd24,
    TK_GET_NUM_TRGPNT_CPU= 6'd25,
    TK_SET_FREQ_DFS      = 6'd26,
    TK_GET_FREQ_DFS      = 6'd27,
    TK_RND_FREQ_DFS      = 6'd28
  } dbg_token_e;

  // True for tokens whose request message carries a DATA field.
  function automatic logic token_is_write(logic [5:0] t);
    case (t)
      TK_MMAP_WRITE, TK_GPR_INT32_WRITE, TK_GPR_FPU32_WRITE, TK_ECHO_FRONTEND,
      TK_SET_BRKPNT_CPU, TK_RM_BRKPNT_CPU, TK_SET_TRGPNT_CPU, TK_RM_TRGPNT_CPU,
      TK_SET_FREQ_DFS, TK_RND_FREQ_DFS: return 1'b1;
      default: return 1'b0;
    endcase
  endfunction

  function automatic logic token_is_dfs(logic [5:0] t);
    return (t == TK_SET_FREQ_DFS) || (t == TK_GET_FREQ_DFS) || (t == TK_RND_FREQ_DFS);
  endfunction

  function automatic logic token_is_mmap(logic [5:0] t);
    return (t == TK_MMAP_READ) || (t == TK_MMAP_WRITE);
  endfunction

  // Request from the global debug unit to a local debug unit.
  typedef struct packed {
    logic        req;
    logic [5:0]  token;
    logic [4:0]  cpu_id;
    logic [31:0] addr;
    logic [31:0] data;
  } dbg_req_t;

  // Response of a local debug unit.
  typedef struct packed {
    logic        ack;
    logic        err;
    logic [31:0] data;
  } dbg_rsp_t;

  // Response COMMAND byte: Reserved[7:2], A (bit 1), E (bit 0).
  function automatic logic [7:0] rsp_command(logic err);
    return {6'b0, ~err, err};
  endfunction

  // MMCM parameter set: f_out = f_ref * (mult_x8/8) / (divclk * odiv_x8/8).
  typedef struct packed {
    logic [11:0] mult_x8;
    logic [11:0] odiv_x8;
    logic [7:0]  divclk;
  } mmcm_params_t;

  // TRNG post-processing methods.
  typedef enum logic [1:0] {
    PP_XOR  = 2'd0,
    PP_VN   = 2'd1,
    PP_LFSR = 2'd2
  } pp_mode_e;

endpackage
