// mmcm_model: BEHAVIOURAL MODEL of an AMD 7-series mixed-mode clock manager
// (MMCM) under dynamic reconfiguration; not synthesizable. On the FPGA this
// is the MMCME2 primitive reprogrammed through its dynamic reconfiguration
// port. The model keeps what the DFS actuator relies on:
//   * a one-cycle cfg pulse on clk_in captures params and starts a
//     reconfiguration: locked drops and clk_out is held low at once (the
//     real MMCM output stays low while it is reconfigured);
//   * LOCK_CYCLES cycles of clk_in later the output restarts at
//     f_out = F_REF_KHZ * (mult_x8/8) / (divclk * odiv_x8/8) and locked rises.
// After reset the output is low and unlocked until the first cfg.
// The lock time (2 us at 50 MHz by default) is this design's choice.
// Synthesis tools ignore the delays of the output oscillator and then see
// clk_out as a combinational loop through an inverter; that warning is
// expected for this model, which stands in for a hard FPGA primitive.
`timescale 1ns/1ps
module mmcm_model
  import soc_pkg::*;
#(
  parameter int unsigned LOCK_CYCLES = 100,
  parameter int unsigned F_REF_KHZ   = 50000
) (
  input  logic         clk_in,
  input  logic         rst_n,
  input  logic         cfg,
  input  mmcm_params_t params,
  output logic         clk_out,
  output logic         locked
);
  mmcm_params_t p;
  logic [$clog2(LOCK_CYCLES+1)-1:0] cnt;
  logic  busy;
  logic  running;
  int unsigned half_ps;

  always_ff @(posedge clk_in or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      locked <= 1'b0;
      cnt    <= '0;
      p      <= '0;
    end else if (cfg) begin
      busy   <= 1'b1;
      locked <= 1'b0;
      cnt    <= '0;
      p      <= params;
    end else if (busy) begin
      cnt <= cnt + 1'b1;
      if (cnt == $bits(cnt)'(LOCK_CYCLES - 1)) begin
        busy   <= 1'b0;
        locked <= 1'b1;
      end
    end
  end

  assign running = locked;

  // f_out in kHz -> half period in ps (integer, so that the model stays
  // readable by tools without real arithmetic; the rounding is below 1 ps)
  always_comb begin
    if (p.mult_x8 != 0 && p.divclk != 0 && p.odiv_x8 != 0)
      half_ps = 32'((64'd500000000 * 64'(p.divclk) * 64'(p.odiv_x8))
                    / (64'(F_REF_KHZ) * 64'(p.mult_x8)));
    else
      half_ps = 32'd10000;
  end

  // output oscillator: toggles every half period while locked, low otherwise
  initial clk_out = 1'b0;
  always begin
    if (running) begin
      #(half_ps * 1ps);
      clk_out = running ? ~clk_out : 1'b0;
    end else begin
      clk_out = 1'b0;
      @(posedge running);
    end
  end
endmodule
