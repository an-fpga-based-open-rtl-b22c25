// wb_cdc: Wishbone clock-domain bridge from a master in clock domain clk_m
// (the DFS-driven CPU clock) to the bus in clock domain clk_s (the fixed
// system clock). Each access is carried as a single classic transfer:
// the master-side request is captured in a holding register and announced
// by toggling req_tog; the slave side, seeing the synchronised toggle, runs
// the transfer on the bus, captures data/err and toggles ack_tog back; the
// master side then acknowledges its master for one cycle. The holding
// registers do not change while a toggle is in flight, so only the two
// toggles cross domains, each through a two-flip-flop synchroniser.
// Latency is a few cycles of each clock per access; bursts are split into
// single transfers. This bridge is not in the paper, which gives the CPU its
// own DFS clock and the rest of the SoC a fixed clock without saying how the
// bus crosses between them.
`timescale 1ns/1ps
module wb_cdc
  import soc_pkg::*;
(
  input  logic    rst_n,
  input  logic    clk_m,
  input  wb_m2s_t m_i,
  output wb_s2m_t m_o,
  input  logic    clk_s,
  output wb_m2s_t s_o,
  input  wb_s2m_t s_i
);
  // master domain
  wb_m2s_t hold;
  logic    req_tog, ack_seen, ack_tog_s, busy_m, ack_m;
  wb_s2m_t resp;        // written in the slave domain, stable when read

  // slave domain
  logic    ack_tog, req_seen, req_tog_s, active;

  sync2 u_sync_ack (.clk(clk_m), .rst_n, .d(ack_tog), .q(ack_tog_s));
  sync2 u_sync_req (.clk(clk_s), .rst_n, .d(req_tog), .q(req_tog_s));

  always_ff @(posedge clk_m or negedge rst_n) begin
    if (!rst_n) begin
      hold     <= WB_M2S_IDLE;
      req_tog  <= 1'b0;
      ack_seen <= 1'b0;
      busy_m   <= 1'b0;
      ack_m    <= 1'b0;
    end else begin
      ack_m <= 1'b0;
      if (!busy_m) begin
        if (m_i.cyc && m_i.stb && !ack_m) begin
          hold     <= m_i;
          hold.cti <= CTI_CLASSIC;
          req_tog  <= ~req_tog;
          busy_m   <= 1'b1;
        end
      end else if (ack_tog_s != ack_seen) begin
        ack_seen <= ack_tog_s;
        busy_m   <= 1'b0;
        ack_m    <= 1'b1;
      end
    end
  end

  assign m_o.ack = ack_m && !resp.err;
  assign m_o.err = ack_m && resp.err;
  assign m_o.dat = resp.dat;

  always_ff @(posedge clk_s or negedge rst_n) begin
    if (!rst_n) begin
      s_o      <= WB_M2S_IDLE;
      resp     <= WB_S2M_IDLE;
      ack_tog  <= 1'b0;
      req_seen <= 1'b0;
      active   <= 1'b0;
    end else if (!active) begin
      if (req_tog_s != req_seen) begin
        req_seen <= req_tog_s;
        s_o      <= hold;
        active   <= 1'b1;
      end
    end else if (s_i.ack || s_i.err) begin
      s_o      <= WB_M2S_IDLE;
      resp.dat <= s_i.dat;
      resp.err <= s_i.err;
      resp.ack <= s_i.ack;
      ack_tog  <= ~ack_tog;
      active   <= 1'b0;
    end
  end
endmodule
