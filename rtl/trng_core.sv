// trng_core: noise source followed by post-processing and a 32-bit output
// register. Post-processed bits are shifted into a collector; when 32 new
// bits have been gathered the output register rnd is replaced and fresh
// pulses for one cycle, so the random word is refreshed periodically at the
// post-processed bit rate divided by 32. Used by the memory-mapped TRNG and
// inside the DFS actuator.
// Synthesis note: the behavioural models inside (MMCM output oscillator,
// TRNG noise oscillator) lose their delays in synthesis and are reported as
// a combinational loop and an undriven net; they stand for an FPGA clock
// primitive and a physical entropy source, so these warnings are expected.
`timescale 1ns/1ps
module trng_core
  import soc_pkg::*;
#(
  parameter pp_mode_e MODE = PP_VN
) (
  input  logic        clk,
  input  logic        rst_n,
  output logic [31:0] rnd,
  output logic        fresh
);
  logic raw_valid, raw, pp_valid, pp_bit;
  logic [31:0] coll;
  logic [4:0]  n;

  trng_noise_src u_src (.clk, .rst_n, .en(1'b1), .raw_valid, .raw);
  trng_postproc #(.MODE(MODE)) u_pp (.clk, .rst_n, .raw_valid, .raw,
                                     .out_valid(pp_valid), .out_bit(pp_bit));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      coll  <= '0;
      n     <= '0;
      rnd   <= '0;
      fresh <= 1'b0;
    end else begin
      fresh <= 1'b0;
      if (pp_valid) begin
        coll <= {coll[30:0], pp_bit};
        n    <= n + 5'd1;
        if (n == 5'd31) begin
          rnd   <= {coll[30:0], pp_bit};
          fresh <= 1'b1;
        end
      end
    end
  end
endmodule
