// tb_sys_uart: self-checking test of the system UART.
// The serial output is looped back to the serial input. Random bytes are
// offered on the transmit side and must come back, in order, on the receive
// side. The time from accepting a byte to receiving it must be one frame
// (start, 8 data bits and the middle of the stop bit: 9.5 bit times) plus the
// two-flop input synchroniser, within two cycles. A short bit time
// (CLK_DIV = 16) keeps the run short.
`timescale 1ns/1ps
module tb_sys_uart;
  localparam int DIV = 16;
  logic clk = 0, rst_n = 0;
  always #10 clk = ~clk;

  logic line, rx_valid, tx_valid = 0, tx_ready;
  logic [7:0] rx_data, tx_data = 0;
  int checks = 0, failures = 0;

  sys_uart #(.CLK_DIV(DIV)) dut (.clk, .rst_n, .rx(line), .tx(line), .rx_valid, .rx_data,
                                  .tx_valid, .tx_data, .tx_ready);

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] b;
    longint t0, lat;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (3) @(posedge clk);
    check(line == 1'b1, "line idles high");
    for (int n = 0; n < 12; n++) begin
      b = (n == 0) ? 8'h00 : (n == 1) ? 8'hFF : 8'($urandom);
      @(negedge clk);
      tx_data = b; tx_valid = 1;
      @(posedge clk);
      check(tx_ready, "transmitter ready");
      t0 = $time / 20;
      @(negedge clk);
      tx_valid = 0;
      while (!rx_valid) @(posedge clk);
      lat = $time / 20 - t0;
      check(rx_data == b, $sformatf("byte %0d: got %02x expected %02x", n, rx_data, b));
      check(lat >= DIV * 19 / 2 && lat <= DIV * 19 / 2 + 4, $sformatf("frame latency %0d cycles", lat));
      while (!tx_ready) @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
