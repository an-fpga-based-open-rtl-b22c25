// trng_noise_src: BEHAVIOURAL MODEL of a TRNG digital noise source, not
// synthesizable logic. On the FPGA the entropy comes from free-running
// oscillators (NLFIRO, PLL-based or edge-sampling sources) whose jitter
// cannot be expressed as logic. This model stands in for any of them: one
// oscillator whose half period is HALF_PERIOD_PS plus a random jitter of up
// to +/- JITTER_PS, sampled by a flip-flop on the system clock (the
// edge-sampling scheme). raw_valid is high every cycle the source is enabled.
// The real sources are not described in detail by the paper; the model only
// keeps the interface: a sampling clock in, one raw bit per cycle out.
// Synthesis tools drop the oscillator's delays, so they report osc as used
// but undriven; that warning is expected for this model.
`timescale 1ns/1ps
module trng_noise_src #(
  parameter int unsigned HALF_PERIOD_PS = 3170,
  parameter int unsigned JITTER_PS      = 900
) (
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  output logic raw_valid,
  output logic raw
);
  logic osc;                 // free-running, so its start phase is arbitrary

  // free-running jittery oscillator
  always begin
    #((HALF_PERIOD_PS + $urandom_range(2 * JITTER_PS) - JITTER_PS) * 1ps);
    osc = ~osc;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      raw       <= 1'b0;
      raw_valid <= 1'b0;
    end else begin
      raw       <= osc;
      raw_valid <= en;
    end
  end
endmodule
