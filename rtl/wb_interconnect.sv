// wb_interconnect: the shared 64-bit Wishbone data bus.
// NM masters compete for the bus; a round-robin arbiter grants it to one
// master, which keeps it until it drops cyc (so bursts and read-modify-write
// sequences are not interleaved). The grant is registered: between two
// owners the bus is idle for one cycle. The owner's address is decoded to one
// of the NUM_SLAVES slaves of soc_pkg (memory, user UART, TRNG, timer); only
// that slave sees cyc/stb. An address that hits no slave is answered with err
// one cycle later. Masters without the grant see no ack.
// The bus width and the master/slave sets follow the paper; the arbitration
// scheme and the memory map are this design's choice.
`timescale 1ns/1ps
module wb_interconnect
  import soc_pkg::*;
#(
  parameter int unsigned NM = 2
) (
  input  logic    clk,
  input  logic    rst_n,
  input  wb_m2s_t m_i [NM],
  output wb_s2m_t m_o [NM],
  output wb_m2s_t s_o [NUM_SLAVES],
  input  wb_s2m_t s_i [NUM_SLAVES]
);
  localparam int unsigned GW = (NM > 1) ? $clog2(NM) : 1;

  logic [GW-1:0] gnt;
  logic          busy;
  logic          derr;

  function automatic int slave_of(logic [31:0] a);
    if ((a & MEM_MASK)  == MEM_BASE)   return SLV_MEM;
    if ((a & PERI_MASK) == UART_BASE)  return SLV_UART;
    if ((a & PERI_MASK) == TRNG_BASE)  return SLV_TRNG;
    if ((a & PERI_MASK) == TIMER_BASE) return SLV_TIMER;
    return -1;
  endfunction

  // round-robin pick, starting after the last owner
  logic [GW-1:0] pick;
  logic          any;
  always_comb begin
    pick = gnt;
    any  = 1'b0;
    for (int k = NM; k >= 1; k--) begin
      int unsigned c;
      c = (int'(gnt) + k) % NM;
      if (m_i[c].cyc) begin
        pick = GW'(c);
        any  = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gnt  <= '0;
      busy <= 1'b0;
    end else if (!busy) begin
      if (any) begin
        gnt  <= pick;
        busy <= 1'b1;
      end
    end else if (!m_i[gnt].cyc) begin
      busy <= 1'b0;
    end
  end

  wb_m2s_t own;
  int      tgt;
  assign own = busy ? m_i[gnt] : WB_M2S_IDLE;
  assign tgt = slave_of(own.adr);

  always_comb begin
    for (int s = 0; s < NUM_SLAVES; s++) begin
      s_o[s] = own;
      if (tgt != s) begin
        s_o[s].cyc = 1'b0;
        s_o[s].stb = 1'b0;
      end
    end
  end

  // decode error for unmapped addresses
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) derr <= 1'b0;
    else        derr <= own.cyc && own.stb && (tgt < 0) && !derr;
  end

  wb_s2m_t back;
  always_comb begin
    back = WB_S2M_IDLE;
    if (tgt >= 0) back = s_i[tgt];
    back.err = back.err || (derr && own.cyc && own.stb);
    for (int m = 0; m < NM; m++)
      m_o[m] = (busy && gnt == GW'(m)) ? back : WB_S2M_IDLE;
  end

  // bus rule: no two slaves answer at once
  always_ff @(posedge clk) begin
    if (rst_n) begin
      assert ($countones({s_i[0].ack, s_i[1].ack, s_i[2].ack, s_i[3].ack}) <= 1)
        else $error("wb_interconnect: several slaves acknowledged at once");
    end
  end
endmodule
