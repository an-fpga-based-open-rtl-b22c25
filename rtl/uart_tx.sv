// uart_tx: 8N1 serial transmitter.
// A byte offered with tx_valid while tx_ready is high is sent as one start
// bit (0), eight data bits LSB first and one stop bit (1), each CLK_DIV clock
// cycles long. tx_ready is low from the accepting cycle until the stop bit
// has ended. The line idles high.
`timescale 1ns/1ps
module uart_tx #(
  parameter int unsigned CLK_DIV = 434
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       tx_valid,
  input  logic [7:0] tx_data,
  output logic       tx_ready,
  output logic       tx
);
  localparam int unsigned CW = $clog2(CLK_DIV + 1);
  logic [CW-1:0] cnt;
  logic [3:0]    bitn;
  logic [9:0]    shreg;
  logic          busy;

  assign tx_ready = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      cnt   <= '0;
      bitn  <= '0;
      shreg <= '1;
      tx    <= 1'b1;
    end else if (!busy) begin
      tx <= 1'b1;
      if (tx_valid) begin
        busy  <= 1'b1;
        shreg <= {1'b1, tx_data, 1'b0};
        cnt   <= '0;
        bitn  <= '0;
        tx    <= 1'b0;
      end
    end else if (cnt == CW'(CLK_DIV - 1)) begin
      cnt <= '0;
      if (bitn == 4'd9) begin
        busy <= 1'b0;
        tx   <= 1'b1;
      end else begin
        bitn  <= bitn + 4'd1;
        shreg <= {1'b1, shreg[9:1]};
        tx    <= shreg[1];
      end
    end else begin
      cnt <= cnt + 1'b1;
    end
  end
endmodule
