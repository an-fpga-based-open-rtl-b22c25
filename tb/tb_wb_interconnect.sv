// tb_wb_interconnect: self-checking test of the shared data bus.
// Two masters run random reads and writes at the same time, to all four
// slave windows and to unmapped addresses. The slaves are testbench models
// that answer after 1-3 cycles with data that encodes their index and the
// address they saw, and log every write. Checks: each access reaches the
// slave its address maps to (data tag and write log), unmapped addresses end
// with err, never more than one slave sees cyc at a time, both masters
// complete all their accesses (round-robin fairness: neither waits for more
// than one access of the other), and the bus is idle one cycle between
// owners.
`timescale 1ns/1ps
module tb_wb_interconnect;
  import soc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #10 clk = ~clk;

  wb_m2s_t mi [2];
  wb_s2m_t mo [2];
  wb_m2s_t so [NUM_SLAVES];
  wb_s2m_t si [NUM_SLAVES];
  int checks = 0, failures = 0;
  logic [63:0] wlog [NUM_SLAVES];

  wb_interconnect #(.NM(2)) dut (.clk, .rst_n, .m_i(mi), .m_o(mo), .s_o(so), .s_i(si));

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // slave models
  for (genvar s = 0; s < NUM_SLAVES; s++) begin : g_slv
    int wait_n = 0;
    always @(posedge clk) begin
      si[s].ack <= 1'b0;
      si[s].err <= 1'b0;
      if (so[s].cyc && so[s].stb && !si[s].ack) begin
        if (wait_n == 0) wait_n = 1 + $urandom_range(2);
        wait_n--;
        if (wait_n == 0) begin
          si[s].ack <= 1'b1;
          si[s].dat <= {8'(s), 24'h0, so[s].adr};
          if (so[s].we) wlog[s] <= so[s].dat;
        end
      end
    end
  end

  // one-owner rule
  always @(posedge clk) if (rst_n) begin
    check($countones({so[0].cyc, so[1].cyc, so[2].cyc, so[3].cyc}) <= 1, "one slave selected");
  end

  const logic [31:0] bases [5] = '{MEM_BASE, UART_BASE, TRNG_BASE, TIMER_BASE, 32'h4000_0000};

  int done [2] = '{0, 0};
  int maxwait [2] = '{0, 0};

  task automatic master(int m, int n);
    for (int k = 0; k < n; k++) begin
      automatic int tgt = $urandom_range(4);
      automatic logic [31:0] a = bases[tgt] + {$urandom_range(511), 3'b0};
      automatic logic we = 1'($urandom);
      automatic logic [63:0] d = {$urandom, $urandom};
      automatic int w = 0;
      @(negedge clk);
      mi[m].cyc = 1; mi[m].stb = 1; mi[m].we = we; mi[m].adr = a; mi[m].dat = d; mi[m].sel = '1;
      @(posedge clk);
      while (!mo[m].ack && !mo[m].err) begin w++; @(posedge clk); end
      if (w > maxwait[m]) maxwait[m] = w;
      if (tgt == 4) check(mo[m].err && !mo[m].ack, "unmapped address gives err");
      else begin
        check(mo[m].ack, "mapped address acked");
        check(mo[m].dat == {8'(tgt), 24'h0, a}, $sformatf("master %0d reached slave %0d", m, tgt));
        if (we) begin
          @(negedge clk);
          check(wlog[tgt] == d, "write data reached the slave");
        end
      end
      @(negedge clk);
      mi[m] = WB_M2S_IDLE;
      done[m]++;
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mi[0] = WB_M2S_IDLE; mi[1] = WB_M2S_IDLE;
    for (int s = 0; s < NUM_SLAVES; s++) si[s] = WB_S2M_IDLE;
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      master(0, 200);
      master(1, 200);
    join
    check(done[0] == 200 && done[1] == 200, "both masters completed");
    // an access takes at most 1 (grant) + 3 (slave) + 1 cycles; waiting for
    // one access of the other master at most doubles that
    check(maxwait[0] <= 12 && maxwait[1] <= 12, $sformatf("max wait %0d / %0d cycles", maxwait[0], maxwait[1]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
