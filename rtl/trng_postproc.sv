// trng_postproc: post-processing of the raw TRNG bit stream, one of three
// textbook methods chosen by MODE:
//   PP_XOR  - XOR decimation: every XOR_N raw bits give one output bit, the
//             XOR of the XOR_N bits (reduces bias, rate 1/XOR_N).
//   PP_VN   - Von Neumann corrector: raw bits are taken in pairs; 01 gives 0,
//             10 gives 1, 00 and 11 give nothing (removes bias of
//             independent bits, variable rate, at most 1/2).
//   PP_LFSR - LFSR whitening: each raw bit is XORed into the feedback of a
//             32-bit Fibonacci LFSR (taps 32,22,2,1) and the register's top
//             bit is output (rate 1).
// out_valid pulses with out_bit one cycle after the raw bit that completes
// an output. The paper names the three methods; their exact form here is
// the standard one from the literature.
`timescale 1ns/1ps
module trng_postproc
  import soc_pkg::*;
#(
  parameter pp_mode_e    MODE  = PP_VN,
  parameter int unsigned XOR_N = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic raw_valid,
  input  logic raw,
  output logic out_valid,
  output logic out_bit
);
  localparam int unsigned CW = $clog2(XOR_N + 1);
  logic [CW-1:0] cnt;
  logic          acc;
  logic          have_first, first;
  logic [31:0]   lfsr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt        <= '0;
      acc        <= 1'b0;
      have_first <= 1'b0;
      first      <= 1'b0;
      lfsr       <= 32'h1;
      out_valid  <= 1'b0;
      out_bit    <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      if (raw_valid) begin
        case (MODE)
          PP_XOR: begin
            if (cnt == CW'(XOR_N - 1)) begin
              cnt       <= '0;
              acc       <= 1'b0;
              out_valid <= 1'b1;
              out_bit   <= acc ^ raw;
            end else begin
              cnt <= cnt + 1'b1;
              acc <= acc ^ raw;
            end
          end
          PP_VN: begin
            if (!have_first) begin
              have_first <= 1'b1;
              first      <= raw;
            end else begin
              have_first <= 1'b0;
              if (first != raw) begin
                out_valid <= 1'b1;
                out_bit   <= first;
              end
            end
          end
          default: begin
            lfsr      <= {lfsr[30:0], lfsr[31] ^ lfsr[21] ^ lfsr[1] ^ lfsr[0] ^ raw};
            out_valid <= 1'b1;
            out_bit   <= lfsr[31];
          end
        endcase
      end
    end
  end
endmodule
