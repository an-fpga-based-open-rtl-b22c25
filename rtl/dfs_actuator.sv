// dfs_actuator: dynamic frequency scaling actuator that generates the CPU
// clock clk_out from the reference clock clk_ref.
//
// Datapath: the target index is taken either from f_in (set through the
// DFS local debug unit) or, when rnd is 1, from f_rnd, FW bits of an
// internal TRNG. The chosen index is registered; the register is the f_out
// output (the current target) and, decoded to an address (identity here),
// reads a set of MMCM parameters from the configuration BRAM (dfs_cfg_rom).
//
// Two MMCMs avoid the clock gating that an MMCM shows while it is
// reconfigured: the master keeps driving clk_out while the slave is
// reprogrammed; once the slave has locked (ack = lock_A and lock_B) the roles
// swap by flipping is_mst, which selects clk_out (0: MMCM_A, 1: MMCM_B).
// A new reconfiguration never starts before ack is high again. With rnd=1 a
// new random reconfiguration starts as soon as the previous one completes
// and the TRNG has delivered a word not used before, so that every
// reconfiguration gets a fresh random target.
//
// After reset both MMCMs are programmed to index INIT_IDX (100 MHz by
// default) and clk_out stays low until they lock. Timing of one change:
// one cycle to register the target, one BRAM cycle, a one-cycle cfg pulse,
// the MMCM lock time, the swap, and the wait for the clock switch to
// complete (a few cycles of the slower clock); busy is high throughout.
// The structure follows the paper; the identity decoder, the is_mst
// encoding, the start-up sequence and the glitch-free clock switch
// (clk_mux_gf; a clock-buffer multiplexer on the FPGA) are this design's
// choices.
// Synthesis note: the behavioural models inside (MMCM output oscillator,
// TRNG noise oscillator) lose their delays in synthesis and are reported as
// a combinational loop and an undriven net; they stand for an FPGA clock
// primitive and a physical entropy source, so these warnings are expected.
`timescale 1ns/1ps
module dfs_actuator
  import soc_pkg::*;
#(
  parameter int unsigned FW          = 10,
  parameter int unsigned INIT_IDX    = 760,
  parameter int unsigned LOCK_CYCLES = 100
) (
  input  logic          clk_ref,
  input  logic          rst_n,
  input  logic [FW-1:0] f_in,
  input  logic          f_set,
  input  logic          rnd,
  output logic          clk_out,
  output logic [FW-1:0] f_out,
  output logic          is_mst,
  output logic          busy,
  output logic [31:0]   n_reconf
);
  typedef enum logic [2:0] {S_INIT, S_INIT_CFG, S_WAIT, S_SWAP, S_IDLE, S_RD, S_CFG} state_e;
  state_e state;

  logic [31:0]  trng_word;
  logic         trng_fresh;
  logic [FW-1:0] f_rnd, f_sel, target;
  logic         pending;
  logic         rnd_new;      // a TRNG word not yet used as a target
  logic         init_phase;
  mmcm_params_t params;
  logic         cfg_a, cfg_b;
  logic         clk_a, clk_b, lock_a, lock_b, ack;
  logic         a_on, b_on, a_on_s, b_on_s;

  trng_core #(.MODE(PP_VN)) u_trng (.clk(clk_ref), .rst_n, .rnd(trng_word), .fresh(trng_fresh));
  assign f_rnd = trng_word[FW-1:0];
  assign f_sel = rnd ? f_rnd : f_in;

  dfs_cfg_rom #(.DEPTH(1 << FW)) u_rom (.clk(clk_ref), .addr(target), .data(params));

  mmcm_model #(.LOCK_CYCLES(LOCK_CYCLES)) u_mmcm_a (.clk_in(clk_ref), .rst_n, .cfg(cfg_a), .params,
                                                    .clk_out(clk_a), .locked(lock_a));
  mmcm_model #(.LOCK_CYCLES(LOCK_CYCLES)) u_mmcm_b (.clk_in(clk_ref), .rst_n, .cfg(cfg_b), .params,
                                                    .clk_out(clk_b), .locked(lock_b));

  assign ack     = lock_a && lock_b;
  clk_mux_gf u_mux (.rst_n, .clk_a, .clk_b, .sel(is_mst), .clk_out, .a_on, .b_on);
  sync2 u_sync_a (.clk(clk_ref), .rst_n, .d(a_on), .q(a_on_s));
  sync2 u_sync_b (.clk(clk_ref), .rst_n, .d(b_on), .q(b_on_s));
  assign f_out   = target;
  assign busy    = (state != S_IDLE);

  always_ff @(posedge clk_ref or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_INIT;
      target     <= FW'(INIT_IDX);
      pending    <= 1'b0;
      rnd_new    <= 1'b0;
      init_phase <= 1'b1;
      is_mst     <= 1'b0;
      cfg_a      <= 1'b0;
      cfg_b      <= 1'b0;
      n_reconf   <= '0;
    end else begin
      cfg_a <= 1'b0;
      cfg_b <= 1'b0;
      if (f_set) pending <= 1'b1;
      if (trng_fresh) rnd_new <= 1'b1;
      case (state)
        S_INIT:     state <= S_INIT_CFG;          // BRAM read of INIT_IDX
        S_INIT_CFG: begin
          cfg_a <= 1'b1;
          cfg_b <= 1'b1;
          state <= S_WAIT;
        end
        S_IDLE: if (pending || f_set || (rnd && rnd_new)) begin
          target  <= f_sel;
          pending <= 1'b0;
          if (rnd) rnd_new <= trng_fresh;
          state   <= S_RD;
        end
        S_RD: state <= S_CFG;                      // BRAM read
        S_CFG: begin
          // reprogram the slave
          if (is_mst) cfg_a <= 1'b1;
          else        cfg_b <= 1'b1;
          state <= S_WAIT;
        end
        S_WAIT: if (ack && !cfg_a && !cfg_b) begin
          if (!init_phase) begin
            is_mst   <= ~is_mst;
            n_reconf <= n_reconf + 32'd1;
          end
          init_phase <= 1'b0;
          state      <= S_SWAP;
        end
        // the clock switch has completed: the slave may now be stopped
        S_SWAP: if (is_mst ? (b_on_s && !a_on_s) : (a_on_s && !b_on_s)) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // rule: the master MMCM is locked whenever the FSM is idle
  always_ff @(posedge clk_ref) begin
    if (rst_n && state == S_IDLE) begin
      assert (is_mst ? lock_b : lock_a) else $error("dfs_actuator: master MMCM not locked");
    end
  end
endmodule
