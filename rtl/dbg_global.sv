// dbg_global: the global debug unit, bridge between the host PC (through the
// system UART byte stream) and the SoC.
//
// Request messages arrive as bytes, each 16-bit field low byte first:
//   read request : COMMAND(2) ADDRESS(4)            - 6 bytes
//   write request: COMMAND(2) ADDRESS(4) DATA(4)    - 10 bytes
// Whether DATA follows is decided by TOKEN_TYPE = COMMAND[5:0] (see
// soc_pkg::token_is_write). The request is then executed:
//   * MMAP_READ / MMAP_WRITE: one Wishbone beat on the data bus as a bus
//     master. COMMAND gives BTE[15:14], W[13], CTI[12:10] and SEL[9:6].
//     The messages carry 32-bit data while the bus is 64 bits wide, so
//     ADDRESS[2] picks the half of the bus word and SEL is shifted to it.
//   * DFS tokens: forwarded to the DFS local debug unit.
//   * every other valid token: forwarded to the CPU local debug unit selected
//     by CPU_ID = COMMAND[10:6] (only CPU 0 exists).
// Local units are reached through a four-phase req/ack link (soc_pkg);
// the incoming ack is synchronised, so a local unit may run on another clock.
// Response messages are sent back on the same byte stream:
//   read request  -> COMMAND(1) DATA(4), DATA low byte first
//   write request -> COMMAND(1)
// with COMMAND = {Reserved[7:2], A, E}: A=1 on success, E=1 on error
// (invalid token, unknown CPU_ID, bus error or bus timeout). A new request is
// only parsed after the response to the previous one has been sent.
// Message layout and field positions follow the paper; the byte order, the
// numeric token codes and the timeout are this design's choice.
`timescale 1ns/1ps
module dbg_global
  import soc_pkg::*;
#(
  parameter int unsigned TIMEOUT = 1024
) (
  input  logic       clk,
  input  logic       rst_n,
  // byte stream from / to the system UART
  input  logic       rx_valid,
  input  logic [7:0] rx_data,
  output logic       tx_valid,
  output logic [7:0] tx_data,
  input  logic       tx_ready,
  // Wishbone master on the data bus
  output wb_m2s_t    wbm_o,
  input  wb_s2m_t    wbm_i,
  // point-to-point links to the local debug units
  output dbg_req_t   cpu_req_o,
  input  dbg_rsp_t   cpu_rsp_i,
  output dbg_req_t   dfs_req_o,
  input  dbg_rsp_t   dfs_rsp_i
);
  typedef enum logic [2:0] {S_RX, S_DECODE, S_BUS, S_LINK, S_LINK_DONE, S_TX} state_e;
  state_e state;

  logic [79:0] msg;        // {DATA, ADDRESS, COMMAND}, low byte first
  logic [3:0]  nbytes;
  logic [15:0] cmd;
  logic [31:0] addr, wdata;
  logic [5:0]  tok;
  logic        is_wr;
  logic        to_dfs;

  logic        rsp_err;
  logic [31:0] rsp_data;
  logic [2:0]  tx_idx, tx_len;
  logic [$clog2(TIMEOUT+1)-1:0] tmo;
  logic        cpu_ack_s, dfs_ack_s, link_ack;

  assign cmd   = msg[15:0];
  assign addr  = msg[47:16];
  assign wdata = is_wr ? msg[79:48] : 32'd0;   // read requests carry no DATA
  assign tok   = cmd[5:0];
  assign is_wr = token_is_write(tok);

  sync2 u_sync_cpu (.clk, .rst_n, .d(cpu_rsp_i.ack), .q(cpu_ack_s));
  sync2 u_sync_dfs (.clk, .rst_n, .d(dfs_rsp_i.ack), .q(dfs_ack_s));
  assign link_ack = to_dfs ? dfs_ack_s : cpu_ack_s;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_RX;
      msg       <= '0;
      nbytes    <= '0;
      rsp_err   <= 1'b0;
      rsp_data  <= '0;
      tx_idx    <= '0;
      tx_len    <= '0;
      tmo       <= '0;
      to_dfs    <= 1'b0;
      wbm_o     <= WB_M2S_IDLE;
      cpu_req_o <= '0;
      dfs_req_o <= '0;
    end else begin
      case (state)
        S_RX: if (rx_valid) begin
          msg[8*nbytes +: 8] <= rx_data;
          nbytes <= nbytes + 4'd1;
          // complete after 6 bytes (read) or 10 bytes (write)
          if ((nbytes == 4'd5 && !is_wr) || nbytes == 4'd9) state <= S_DECODE;
        end

        S_DECODE: begin
          nbytes   <= '0;
          rsp_data <= '0;
          rsp_err  <= 1'b0;
          tx_idx   <= '0;
          tx_len   <= is_wr ? 3'd1 : 3'd5;
          tmo      <= '0;
          if (token_is_mmap(tok)) begin
            wbm_o.cyc <= 1'b1;
            wbm_o.stb <= 1'b1;
            wbm_o.we  <= (tok == TK_MMAP_WRITE);
            wbm_o.adr <= addr;
            wbm_o.dat <= {wdata, wdata};
            wbm_o.sel <= addr[2] ? {cmd[9:6], 4'b0} : {4'b0, cmd[9:6]};
            wbm_o.cti <= cmd[12:10];
            wbm_o.bte <= cmd[15:14];
            state     <= S_BUS;
          end else if (tok == TK_INVALID || tok > TK_RND_FREQ_DFS ||
                       (!token_is_dfs(tok) && cmd[10:6] != 5'd0)) begin
            rsp_err <= 1'b1;
            state   <= S_TX;
          end else begin
            to_dfs <= token_is_dfs(tok);
            if (token_is_dfs(tok)) dfs_req_o <= '{req: 1'b1, token: tok, cpu_id: cmd[10:6], addr: addr, data: wdata};
            else                   cpu_req_o <= '{req: 1'b1, token: tok, cpu_id: cmd[10:6], addr: addr, data: wdata};
            state <= S_LINK;
          end
        end

        S_BUS: begin
          tmo <= tmo + 1'b1;
          if (wbm_i.ack || wbm_i.err || tmo == $bits(tmo)'(TIMEOUT)) begin
            wbm_o    <= WB_M2S_IDLE;
            rsp_err  <= !wbm_i.ack;
            rsp_data <= addr[2] ? wbm_i.dat[63:32] : wbm_i.dat[31:0];
            state    <= S_TX;
          end
        end

        S_LINK: if (link_ack) begin
          rsp_err   <= to_dfs ? dfs_rsp_i.err  : cpu_rsp_i.err;
          rsp_data  <= to_dfs ? dfs_rsp_i.data : cpu_rsp_i.data;
          cpu_req_o.req <= 1'b0;
          dfs_req_o.req <= 1'b0;
          state     <= S_LINK_DONE;
        end

        S_LINK_DONE: if (!link_ack) state <= S_TX;

        S_TX: if (tx_ready && tx_valid) begin
          tx_idx <= tx_idx + 3'd1;
          if (tx_idx == tx_len - 3'd1) state <= S_RX;
        end

        default: state <= S_RX;
      endcase
    end
  end

  // response serialiser
  always_comb begin
    tx_valid = (state == S_TX);
    case (tx_idx)
      3'd0:    tx_data = rsp_command(rsp_err);
      3'd1:    tx_data = rsp_data[7:0];
      3'd2:    tx_data = rsp_data[15:8];
      3'd3:    tx_data = rsp_data[23:16];
      default: tx_data = rsp_data[31:24];
    endcase
  end

  // protocol rule: a link request is never raised while its ack is still high
  always_ff @(posedge clk) begin
    if (rst_n && state == S_DECODE) begin
      assert (!(cpu_ack_s || dfs_ack_s))
        else $error("dbg_global: local link not idle at a new request");
    end
  end
endmodule
