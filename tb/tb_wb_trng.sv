// tb_wb_trng: self-checking test of the memory-mapped TRNG.
// Reads the random register over Wishbone and checks: the ack comes one
// cycle after stb; after waiting long enough for a refresh the fresh flag
// (bit 32) is set and a read clears it (an immediate second read returns the
// same word with the flag clear); successive refreshed words differ; and over
// 64 words the fraction of one bits is between 40 % and 60 %. The word is
// also compared with the core's output register seen through the hierarchy.
`timescale 1ns/1ps
module tb_wb_trng;
  import soc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #10 clk = ~clk;
  wb_m2s_t wb = WB_M2S_IDLE;
  wb_s2m_t wr;
  int checks = 0, failures = 0;

  wb_trng dut (.clk, .rst_n, .wb_i(wb), .wb_o(wr));

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic rd(output logic [63:0] q);
    @(negedge clk);
    wb.cyc = 1; wb.stb = 1; wb.we = 0; wb.adr = TRNG_BASE; wb.sel = 8'hFF;
    @(posedge clk);
    check(!wr.ack, "no ack in the stb cycle");
    @(posedge clk);
    check(wr.ack, "ack one cycle after stb");
    q = wr.dat;
    @(negedge clk);
    wb = WB_M2S_IDLE;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] q, q2;
    logic [31:0] prev = 0;
    int ones = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 64; n++) begin
      // wait for a refresh of the core register
      @(posedge dut.fresh);
      repeat (2) @(posedge clk);
      rd(q);
      check(q[32] == 1'b1, "fresh flag set after refresh");
      check(q[31:0] == dut.rnd || dut.fresh, "word equals the core register");
      rd(q2);
      check(q2[32] == 1'b0 || dut.fresh, "fresh flag cleared by read");
      check(n == 0 || q[31:0] != prev, "successive words differ");
      prev = q[31:0];
      ones += $countones(q[31:0]);
    end
    check(ones > 64 * 32 * 4 / 10 && ones < 64 * 32 * 6 / 10, $sformatf("ones = %0d of 2048", ones));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
