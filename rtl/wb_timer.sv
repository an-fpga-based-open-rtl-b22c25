// wb_timer: memory-mapped timer that gives FreeRTOS its tick interrupt.
// Two 64-bit registers sit on the 64-bit Wishbone data bus:
//   0x0  current time, incremented by one every clock cycle (writable)
//   0x8  time threshold (writable)
// When the current time is greater than the threshold, a 1-bit register
// drives irq to the CPU; it drops once the condition no longer holds (for
// instance after software moves the threshold forward). The registers,
// the increment and the registered irq follow the paper; the offsets, the
// clearing rule and the reset values (time 0, threshold all ones so that no
// interrupt is pending after reset) are this design's choice.
// Accesses are acknowledged one cycle after stb; byte enables are honoured.
`timescale 1ns/1ps
module wb_timer
  import soc_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  wb_m2s_t wb_i,
  output wb_s2m_t wb_o,
  output logic    irq
);
  logic [63:0] mtime, mtimecmp, rdat;
  logic        ack;

  wire access = wb_i.cyc && wb_i.stb && !ack;
  wire sel_cmp = wb_i.adr[3];

  function automatic logic [63:0] merge(logic [63:0] old, logic [63:0] nw, logic [7:0] sel);
    for (int b = 0; b < 8; b++)
      if (sel[b]) old[8*b +: 8] = nw[8*b +: 8];
    return old;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mtime    <= '0;
      mtimecmp <= '1;
      ack      <= 1'b0;
      rdat     <= '0;
      irq      <= 1'b0;
    end else begin
      ack   <= access;
      mtime <= mtime + 64'd1;
      irq   <= mtime > mtimecmp;
      if (access) begin
        if (wb_i.we) begin
          if (sel_cmp) mtimecmp <= merge(mtimecmp, wb_i.dat, wb_i.sel);
          else         mtime    <= merge(mtime, wb_i.dat, wb_i.sel);
        end else begin
          rdat <= sel_cmp ? mtimecmp : mtime;
        end
      end
    end
  end

  assign wb_o.ack = ack;
  assign wb_o.err = 1'b0;
  assign wb_o.dat = rdat;
endmodule
