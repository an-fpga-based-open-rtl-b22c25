// dbg_local_dfs: the DFS local debug unit, the adapter between the global
// debug unit and the DFS actuator, on the same req/ack link as the CPU local
// unit. It serves three tokens:
//   SET_FREQ_DFS  DATA[FW-1:0] becomes the target frequency index f_in and
//                 f_set pulses for one cycle to start a reconfiguration
//   GET_FREQ_DFS  returns the actuator's current target index f_out
//   RND_FREQ_DFS  DATA[0] sets (1) or clears (0) the random-DFS flag rnd
// Any other token is answered with an error. Each request is acknowledged
// one cycle after its synchronised req is seen.
`timescale 1ns/1ps
module dbg_local_dfs
  import soc_pkg::*;
#(
  parameter int unsigned FW = 10
) (
  input  logic          clk,
  input  logic          rst_n,
  input  dbg_req_t      req_i,
  output dbg_rsp_t      rsp_o,
  output logic [FW-1:0] f_in,
  output logic          f_set,
  output logic          rnd,
  input  logic [FW-1:0] f_out
);
  logic req_s;
  sync2 u_sync_req (.clk, .rst_n, .d(req_i.req), .q(req_s));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsp_o <= '0;
      f_in  <= '0;
      f_set <= 1'b0;
      rnd   <= 1'b0;
    end else begin
      f_set <= 1'b0;
      if (req_s && !rsp_o.ack) begin
        rsp_o.ack  <= 1'b1;
        rsp_o.err  <= 1'b0;
        rsp_o.data <= '0;
        case (req_i.token)
          TK_SET_FREQ_DFS: begin
            f_in  <= req_i.data[FW-1:0];
            f_set <= 1'b1;
          end
          TK_GET_FREQ_DFS: rsp_o.data <= 32'(f_out);
          TK_RND_FREQ_DFS: rnd <= req_i.data[0];
          default:         rsp_o.err <= 1'b1;
        endcase
      end else if (!req_s && rsp_o.ack) begin
        rsp_o.ack <= 1'b0;
      end
    end
  end
endmodule
