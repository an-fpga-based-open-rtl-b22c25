// sys_uart: the system UART that links the host PC to the global debug unit.
// It is a plain 8N1 receiver and transmitter pair with a byte-stream
// interface: each received byte appears on rx_valid/rx_data for one cycle,
// and a byte offered on tx_valid is taken when tx_ready is high. The bit time
// is CLK_DIV cycles; the default (434) gives 115200 baud from a 50 MHz clock.
// The frame format and the baud rate are this design's choice: the baud rate
// is a build-time parameter of the SoC.
`timescale 1ns/1ps
module sys_uart #(
  parameter int unsigned CLK_DIV = 434
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rx,
  output logic       tx,
  output logic       rx_valid,
  output logic [7:0] rx_data,
  input  logic       tx_valid,
  input  logic [7:0] tx_data,
  output logic       tx_ready
);
  uart_rx #(.CLK_DIV(CLK_DIV)) u_rx (.clk, .rst_n, .rx, .rx_valid, .rx_data);
  uart_tx #(.CLK_DIV(CLK_DIV)) u_tx (.clk, .rst_n, .tx_valid, .tx_data, .tx_ready, .tx);
endmodule
