// tb_dbg_local_dfs: self-checking test of the DFS local debug unit.
// The testbench plays the global debug unit on the four-phase link and a
// simple actuator that reports back the last index it was given.
// Checks: SET_FREQ_DFS drives f_in and pulses f_set for exactly one cycle;
// GET_FREQ_DFS returns f_out; RND_FREQ_DFS sets and clears rnd; other
// tokens give an error; every request is acknowledged and the ack drops
// after req drops; the ack arrives within 4 cycles of req (2 synchroniser
// cycles plus one).
`timescale 1ns/1ps
module tb_dbg_local_dfs;
  import soc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #10 clk = ~clk;
  dbg_req_t req = '0;
  dbg_rsp_t rsp;
  logic [9:0] f_in, f_out = 0;
  logic f_set, rnd;
  int checks = 0, failures = 0, nset = 0;

  dbg_local_dfs dut (.clk, .rst_n, .req_i(req), .rsp_o(rsp), .f_in, .f_set, .rnd, .f_out);

  always @(posedge clk) if (f_set) begin f_out <= f_in; nset++; end

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic link(input logic [5:0] tok, input logic [31:0] a, d, output logic err, output logic [31:0] q);
    int n = 0;
    @(negedge clk);
    req = '{req: 1'b1, token: tok, cpu_id: 5'd0, addr: a, data: d};
    @(posedge clk);
    while (!rsp.ack) begin n++; @(posedge clk); end
    check(n <= 4, $sformatf("ack after %0d cycles", n));
    q = rsp.data; err = rsp.err;
    @(negedge clk);
    req.req = 1'b0;
    n = 0;
    while (rsp.ack) begin n++; @(posedge clk); end
    check(n <= 4, "ack drops after req");
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic err;
    logic [31:0] q;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 8; n++) begin
      automatic logic [9:0] idx = 10'($urandom);
      automatic int nset0 = nset;
      link(TK_SET_FREQ_DFS, 0, {22'h3FFFFF, idx}, err, q);
      check(!err, "set accepted");
      repeat (2) @(posedge clk);
      check(nset == nset0 + 1, "f_set pulsed once");
      check(f_in == idx, "f_in driven");
      link(TK_GET_FREQ_DFS, 0, 0, err, q);
      check(!err && q == 32'(idx), $sformatf("get returns %0d, expected %0d", q, idx));
    end
    link(TK_RND_FREQ_DFS, 0, 1, err, q);
    check(!err && rnd, "rnd set");
    link(TK_RND_FREQ_DFS, 0, 0, err, q);
    check(!err && !rnd, "rnd cleared");
    link(TK_HALT_CPU, 0, 0, err, q);
    check(err, "foreign token rejected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
