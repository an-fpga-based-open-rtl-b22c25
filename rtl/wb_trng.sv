// wb_trng: the memory-mapped true random number generator.
// A trng_core (jittery noise source, post-processing, 32-bit output register)
// is read through the 64-bit Wishbone data bus: any read returns the current
// random word in bits [31:0] and, in bit [32], whether the word was refreshed
// since the previous read. Writes are acknowledged and ignored. Accesses are
// acknowledged one cycle after stb. MODE selects the post-processing method.
// The structure (noise source -> post-processing -> register -> bus) follows
// the paper; the refresh rule and the fresh flag are this design's choice.
// Synthesis note: the behavioural models inside (MMCM output oscillator,
// TRNG noise oscillator) lose their delays in synthesis and are reported as
// a combinational loop and an undriven net; they stand for an FPGA clock
// primitive and a physical entropy source, so these warnings are expected.
`timescale 1ns/1ps
module wb_trng
  import soc_pkg::*;
#(
  parameter pp_mode_e MODE = PP_VN
) (
  input  logic    clk,
  input  logic    rst_n,
  input  wb_m2s_t wb_i,
  output wb_s2m_t wb_o
);
  logic [31:0] rnd;
  logic        fresh, unread, ack;
  logic [63:0] rdat;

  trng_core #(.MODE(MODE)) u_core (.clk, .rst_n, .rnd, .fresh);

  wire access = wb_i.cyc && wb_i.stb && !ack;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ack    <= 1'b0;
      unread <= 1'b0;
      rdat   <= '0;
    end else begin
      ack <= access;
      if (fresh) unread <= 1'b1;
      if (access && !wb_i.we) begin
        rdat   <= {31'b0, unread || fresh, rnd};
        unread <= 1'b0;
      end
    end
  end

  assign wb_o.ack = ack;
  assign wb_o.err = 1'b0;
  assign wb_o.dat = rdat;
endmodule
