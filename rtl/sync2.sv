// sync2: two-flip-flop synchroniser for a single-bit level.
// The input may change at any time in another clock domain; the output
// follows it two clk edges later. Reset value is RST_VAL.
`timescale 1ns/1ps
module sync2 #(
  parameter bit RST_VAL = 1'b0
) (
  input  logic clk,
  input  logic rst_n,
  input  logic d,
  output logic q
);
  logic meta;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      meta <= RST_VAL;
      q    <= RST_VAL;
    end else begin
      meta <= d;
      q    <= meta;
    end
  end
endmodule
