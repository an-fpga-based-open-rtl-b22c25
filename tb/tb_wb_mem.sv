// tb_wb_mem: self-checking test of the dual-port main memory.
// A reference model (associative array) tracks every write. The test does
// classic writes with random byte enables and reads them back on both ports,
// an incrementing linear burst write and read, and wrapping bursts (4, 8 and
// 16 beats) whose addresses must wrap inside their block. Timing checks: a
// classic access is acknowledged one cycle after stb; an N-beat burst takes
// N+1 cycles. An address beyond the array must be answered with err.
`timescale 1ns/1ps
module tb_wb_mem;
  import soc_pkg::*;
  localparam int BYTES = 262144;
  logic clk = 0, rst_n = 0;
  always #10 clk = ~clk;

  wb_m2s_t mi [2];
  wb_s2m_t mo [2];
  int checks = 0, failures = 0;
  logic [63:0] ref_mem [int];

  wb_mem dut (.clk, .rst_n, .wbi_i(mi[0]), .wbi_o(mo[0]), .wbd_i(mi[1]), .wbd_o(mo[1]));

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic logic [63:0] ref_rd(int a);
    return ref_mem.exists(a >> 3) ? ref_mem[a >> 3] : 64'd0;
  endfunction

  function automatic logic [31:0] nxt(logic [31:0] a, logic [1:0] bte);
    logic [31:0] n = a + 8;
    case (bte)
      BTE_WRAP4:  return {a[31:5], n[4:3], a[2:0]};
      BTE_WRAP8:  return {a[31:6], n[5:3], a[2:0]};
      BTE_WRAP16: return {a[31:7], n[6:3], a[2:0]};
      default:    return n;
    endcase
  endfunction

  // burst of nb beats (nb = 1: classic); data from wd, results in q
  task automatic xfer(input int p, input logic we, input logic [31:0] a0, input logic [1:0] bte,
                      input int nb, input logic [7:0] sel, input logic [63:0] wd [16], output logic [63:0] q [16]);
    int cyc = 0, beat = 0;
    logic [31:0] a = a0;
    @(negedge clk);
    mi[p].cyc = 1; mi[p].stb = 1; mi[p].we = we; mi[p].bte = bte; mi[p].sel = sel;
    mi[p].adr = a; mi[p].dat = wd[0];
    mi[p].cti = (nb == 1) ? CTI_CLASSIC : CTI_INCR;
    while (beat < nb) begin
      @(posedge clk);
      cyc++;
      if (mo[p].ack) begin
        q[beat] = mo[p].dat;
        if (we) begin
          logic [63:0] old = ref_rd(int'(a));
          for (int b = 0; b < 8; b++) if (sel[b]) old[8*b +: 8] = wd[beat][8*b +: 8];
          ref_mem[int'(a) >> 3] = old;
        end
        beat++;
        #1;
        a = nxt(a, bte);
        mi[p].adr = a;
        if (beat < 16) mi[p].dat = wd[beat];
        if (beat == nb - 1 && nb > 1) mi[p].cti = CTI_EOB;
      end
    end
    #1;
    mi[p] = WB_M2S_IDLE;
    check(cyc == nb + 1,
          $sformatf("%0d-beat transfer took %0d cycles", nb, cyc));
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] wd [16], q [16];
    logic [31:0] a;
    mi[0] = WB_M2S_IDLE; mi[1] = WB_M2S_IDLE;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    // classic writes with random byte enables, read back on both ports
    for (int n = 0; n < 40; n++) begin
      automatic logic [7:0] sel = (n < 10) ? 8'hFF : 8'($urandom);
      a = {$urandom_range(BYTES / 8 - 1), 3'b0};
      if (n >= 20) a = {$urandom_range(31), 3'b0};   // revisit a few words
      wd[0] = {$urandom, $urandom};
      xfer(1, 1, a, BTE_LINEAR, 1, sel, wd, q);
      xfer(1, 0, a, BTE_LINEAR, 1, 8'hFF, wd, q);
      check(q[0] == ref_rd(int'(a)), $sformatf("data port read %08x", a));
      xfer(0, 0, a, BTE_LINEAR, 1, 8'hFF, wd, q);
      check(q[0] == ref_rd(int'(a)), $sformatf("instruction port read %08x", a));
    end
    // bursts: linear 8 beats, wrap 4/8/16 starting mid-block
    for (int t = 0; t < 4; t++) begin
      automatic logic [1:0] bte = 2'(t);
      automatic int nb = (t == 0) ? 8 : (4 << (t - 1));
      a = 32'h0000_1000 + 32'(t) * 32'h100 + 32'h18;
      for (int i = 0; i < 16; i++) wd[i] = {$urandom, $urandom};
      xfer(1, 1, a, bte, nb, 8'hFF, wd, q);
      xfer(t[0], 0, a, bte, nb, 8'hFF, wd, q);
      begin
        automatic logic [31:0] aa = a;
        for (int i = 0; i < nb; i++) begin
          check(q[i] == ref_rd(int'(aa)), $sformatf("burst bte=%0d beat %0d", bte, i));
          check(q[i] == wd[i], $sformatf("burst bte=%0d beat %0d data %x %x %x", bte, i, q[i], wd[i], ref_rd(int'(aa))));
          aa = nxt(aa, bte);
        end
      end
    end
    // out-of-range access
    @(negedge clk);
    mi[1].cyc = 1; mi[1].stb = 1; mi[1].we = 0; mi[1].adr = BYTES; mi[1].cti = CTI_CLASSIC;
    @(posedge clk); @(posedge clk);
    check(mo[1].err && !mo[1].ack, "error for address beyond the array");
    @(negedge clk); mi[1] = WB_M2S_IDLE;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
