// tb_wb_uart: self-checking test of the user UART (memory-mapped).
// Bytes written to offset 0x0 are captured from the tx pin by a reference
// receiver in the testbench and compared; the status register must show the
// transmitter busy during a frame. Bytes driven serially on the rx pin must
// appear in the RX register with its valid bit, and reading clears the valid
// bit. Each Wishbone access must be acknowledged exactly one cycle after stb.
`timescale 1ns/1ps
module tb_wb_uart;
  import soc_pkg::*;
  localparam int DIV = 16;
  logic clk = 0, rst_n = 0;
  always #10 clk = ~clk;

  wb_m2s_t wb = WB_M2S_IDLE;
  wb_s2m_t wr;
  logic rx = 1, tx;
  int checks = 0, failures = 0;

  wb_uart #(.CLK_DIV(DIV)) dut (.clk, .rst_n, .wb_i(wb), .wb_o(wr), .rx, .tx);

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic wb_access(input logic we, input logic [31:0] a, input logic [63:0] d, output logic [63:0] q);
    int n = 0;
    @(negedge clk);
    wb.cyc = 1; wb.stb = 1; wb.we = we; wb.adr = a; wb.dat = d; wb.sel = 8'hFF; wb.cti = CTI_CLASSIC;
    @(posedge clk);
    while (!wr.ack) begin n++; @(posedge clk); end
    q = wr.dat;
    check(n == 1, $sformatf("ack latency %0d", n));
    @(negedge clk);
    wb = WB_M2S_IDLE;
  endtask

  // reference serial receiver on tx
  task automatic capture_tx(output logic [7:0] b);
    while (tx) @(posedge clk);
    repeat (DIV / 2) @(posedge clk);
    for (int i = 0; i < 8; i++) begin
      repeat (DIV) @(posedge clk);
      b[i] = tx;
    end
    repeat (DIV) @(posedge clk);
    check(tx == 1'b1, "stop bit");
  endtask

  task automatic send_rx(input logic [7:0] b);
    rx = 0; repeat (DIV) @(posedge clk);
    for (int i = 0; i < 8; i++) begin rx = b[i]; repeat (DIV) @(posedge clk); end
    rx = 1; repeat (DIV) @(posedge clk);
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] q;
    logic [7:0] b, got;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    for (int n = 0; n < 6; n++) begin
      b = 8'($urandom);
      wb_access(1, UART_BASE, {56'b0, b}, q);
      fork
        capture_tx(got);
        begin
          repeat (3) @(posedge clk);
          wb_access(0, UART_BASE + 8, 0, q);
          check(q[1] == 1'b1, "tx busy during frame");
        end
      join
      check(got == b, $sformatf("tx byte %02x expected %02x", got, b));
      repeat (DIV) @(posedge clk);
      wb_access(0, UART_BASE + 8, 0, q);
      check(q[1] == 1'b0, "tx idle after frame");
    end
    for (int n = 0; n < 6; n++) begin
      b = 8'($urandom);
      send_rx(b);
      repeat (4) @(posedge clk);
      wb_access(0, UART_BASE + 8, 0, q);
      check(q[0] == 1'b1, "rx valid in status");
      wb_access(0, UART_BASE, 0, q);
      check(q[7:0] == b && q[8] == 1'b1, $sformatf("rx byte %02x expected %02x", q[7:0], b));
      wb_access(0, UART_BASE, 0, q);
      check(q[8] == 1'b0, "rx valid cleared by read");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
