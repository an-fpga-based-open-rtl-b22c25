// uart_rx: 8N1 serial receiver.
// The rx line is synchronised, a falling edge starts a frame, and each bit
// is sampled in its middle (CLK_DIV/2 cycles after the start edge, then every
// CLK_DIV cycles). After the stop bit is sampled high, rx_valid pulses for
// one cycle with the byte in rx_data; a low stop bit drops the byte.
`timescale 1ns/1ps
module uart_rx #(
  parameter int unsigned CLK_DIV = 434
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rx,
  output logic       rx_valid,
  output logic [7:0] rx_data
);
  localparam int unsigned CW = $clog2(CLK_DIV + 1);
  logic          rx_s;
  logic [CW-1:0] cnt;
  logic [3:0]    bitn;
  logic [7:0]    shreg;
  logic          busy;

  sync2 #(.RST_VAL(1'b1)) u_sync (.clk, .rst_n, .d(rx), .q(rx_s));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      cnt      <= '0;
      bitn     <= '0;
      shreg    <= '0;
      rx_valid <= 1'b0;
      rx_data  <= '0;
    end else begin
      rx_valid <= 1'b0;
      if (!busy) begin
        if (!rx_s) begin
          busy <= 1'b1;
          cnt  <= CW'(CLK_DIV / 2);
          bitn <= '0;
        end
      end else if (cnt == CW'(CLK_DIV - 1)) begin
        cnt <= '0;
        if (bitn == 4'd0) begin
          // middle of the start bit: a high line was a glitch
          if (rx_s) busy <= 1'b0;
          bitn <= 4'd1;
        end else if (bitn == 4'd9) begin
          busy <= 1'b0;
          if (rx_s) begin
            rx_valid <= 1'b1;
            rx_data  <= shreg;
          end
        end else begin
          shreg <= {rx_s, shreg[7:1]};
          bitn  <= bitn + 4'd1;
        end
      end else begin
        cnt <= cnt + 1'b1;
      end
    end
  end
endmodule
