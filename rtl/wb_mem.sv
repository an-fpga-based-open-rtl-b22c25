// wb_mem: main memory, a block-RAM array with two 64-bit Wishbone slave
// ports. Port wbi sits on the instruction bus and only reads; port wbd sits on
// the data bus and reads and writes with byte enables (sel). Using one array
// with two ports gives the modified Harvard arrangement of the SoC: the
// instruction and data buses never contend.
//
// Timing, per port: a classic cycle (cti 000 or 111) is acknowledged one
// cycle after stb and the ack then drops, so a single access takes two
// cycles. In an incrementing burst (cti 010) the ack stays high and one beat
// completes per cycle: the next address is computed from the current one and
// bte (linear or 4/8/16-beat wrap) and read one cycle ahead. Writes are done
// in the cycle the beat is acknowledged. An access outside the array is
// answered with err. The array is cleared at start-up.
`timescale 1ns/1ps
module wb_mem
  import soc_pkg::*;
#(
  parameter int unsigned MEM_BYTES = 262144
) (
  input  logic    clk,
  input  logic    rst_n,
  input  wb_m2s_t wbi_i,
  output wb_s2m_t wbi_o,
  input  wb_m2s_t wbd_i,
  output wb_s2m_t wbd_o
);
  localparam int unsigned DEPTH = MEM_BYTES / 8;
  localparam int unsigned AW    = $clog2(DEPTH);

  logic [63:0] mem [DEPTH];

  initial begin
    for (int i = 0; i < DEPTH; i++) mem[i] = '0;
  end

  function automatic logic [31:0] burst_next(logic [31:0] a, logic [1:0] bte);
    logic [31:0] n;
    n = a + 32'd8;
    case (bte)
      BTE_WRAP4:  return {a[31:5], n[4:3], a[2:0]};
      BTE_WRAP8:  return {a[31:6], n[5:3], a[2:0]};
      BTE_WRAP16: return {a[31:7], n[6:3], a[2:0]};
      default:    return n;
    endcase
  endfunction

  wb_m2s_t     req [2];
  wb_s2m_t     rsp [2];
  logic        ack [2];
  logic        err [2];
  logic [63:0] rdat [2];

  assign req[0] = wbi_i;
  assign req[1] = wbd_i;

  for (genvar p = 0; p < 2; p++) begin : g_port
    wire         act   = req[p].cyc && req[p].stb;
    wire  [31:0] radr  = ack[p] ? burst_next(req[p].adr, req[p].bte) : req[p].adr;
    wire         inr   = (req[p].adr >> 3) < 32'(DEPTH);
    wire         rinr  = (radr >> 3) < 32'(DEPTH);
    wire [AW-1:0] ridx = radr[AW+2:3];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        ack[p]  <= 1'b0;
        err[p]  <= 1'b0;
        rdat[p] <= '0;
      end else begin
        // a burst keeps ack high while the master announces more beats
        ack[p] <= act && rinr && (!(ack[p] || err[p]) || (ack[p] && req[p].cti == CTI_INCR));
        err[p] <= act && !rinr && !(ack[p] || err[p]);
        if (act && rinr) rdat[p] <= mem[ridx];
      end
    end

    assign rsp[p].ack = ack[p] && act && inr;
    assign rsp[p].err = err[p] && act;
    assign rsp[p].dat = rdat[p];
  end

  // data-port writes, in the cycle the beat is acknowledged
  wire [AW-1:0] widx = wbd_i.adr[AW+2:3];
  always_ff @(posedge clk) begin
    if (rsp[1].ack && wbd_i.we) begin
      for (int b = 0; b < 8; b++)
        if (wbd_i.sel[b]) mem[widx][8*b +: 8] <= wbd_i.dat[8*b +: 8];
    end
  end

  assign wbi_o = rsp[0];
  assign wbd_o = rsp[1];
endmodule
