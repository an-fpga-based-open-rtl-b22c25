// clk_mux_gf: glitch-free multiplexer between two running clocks.
// Each input clock has an enable that is set or cleared through a flip-flop
// on its rising edge and a second one on its falling edge, and each enable
// is only set once the other has been cleared. On a change of sel the old
// clock is therefore stopped in its low phase before the new one is let
// through in its low phase, so clk_out shows no pulse shorter than either
// clock's half period. a_on/b_on tell which input currently drives clk_out.
// Both clocks must keep running until the switch has completed (a_on/b_on
// settled). sel = 0 selects clk_a, sel = 1 clk_b.
`timescale 1ns/1ps
module clk_mux_gf (
  input  logic rst_n,
  input  logic clk_a,
  input  logic clk_b,
  input  logic sel,
  output logic clk_out,
  output logic a_on,
  output logic b_on
);
  logic a_s1, b_s1;

  always_ff @(posedge clk_a or negedge rst_n)
    if (!rst_n) a_s1 <= 1'b0;
    else        a_s1 <= !sel && !b_on;
  always_ff @(negedge clk_a or negedge rst_n)
    if (!rst_n) a_on <= 1'b0;
    else        a_on <= a_s1;

  always_ff @(posedge clk_b or negedge rst_n)
    if (!rst_n) b_s1 <= 1'b0;
    else        b_s1 <= sel && !a_on;
  always_ff @(negedge clk_b or negedge rst_n)
    if (!rst_n) b_on <= 1'b0;
    else        b_on <= b_s1;

  assign clk_out = (clk_a && a_on) || (clk_b && b_on);
endmodule
