// wb_uart: the user UART, a memory-mapped 8N1 UART for application I/O.
// Registers (64-bit Wishbone slave, offsets within its window):
//   0x0  write: byte [7:0] is sent (ignored while the transmitter is busy)
//        read : [7:0] last received byte, [8] rx byte valid; reading clears [8]
//   0x8  read : [0] rx byte valid, [1] transmitter busy
// Each access is acknowledged one cycle after stb (two-cycle classic access).
// The register map and the single-byte holding registers are this design's
// choice; the paper names the block and its purpose only.
`timescale 1ns/1ps
module wb_uart
  import soc_pkg::*;
#(
  parameter int unsigned CLK_DIV = 434
) (
  input  logic    clk,
  input  logic    rst_n,
  input  wb_m2s_t wb_i,
  output wb_s2m_t wb_o,
  input  logic    rx,
  output logic    tx
);
  logic       rx_valid, tx_ready, tx_valid;
  logic [7:0] rx_byte, rx_hold, tx_data;
  logic       rx_full;
  logic       ack;
  logic [63:0] rdat;

  uart_rx #(.CLK_DIV(CLK_DIV)) u_rx (.clk, .rst_n, .rx, .rx_valid, .rx_data(rx_byte));
  uart_tx #(.CLK_DIV(CLK_DIV)) u_tx (.clk, .rst_n, .tx_valid, .tx_data, .tx_ready, .tx);

  wire access = wb_i.cyc && wb_i.stb && !ack;
  wire reg_hi = wb_i.adr[3];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ack      <= 1'b0;
      rdat     <= '0;
      rx_hold  <= '0;
      rx_full  <= 1'b0;
      tx_valid <= 1'b0;
      tx_data  <= '0;
    end else begin
      ack      <= access;
      tx_valid <= 1'b0;
      if (rx_valid) begin
        rx_hold <= rx_byte;
        rx_full <= 1'b1;
      end
      if (access) begin
        if (wb_i.we) begin
          if (!reg_hi && wb_i.sel[0] && tx_ready) begin
            tx_valid <= 1'b1;
            tx_data  <= wb_i.dat[7:0];
          end
        end else if (!reg_hi) begin
          rdat <= {55'b0, rx_full, rx_hold};
          if (!rx_valid) rx_full <= 1'b0;
        end else begin
          rdat <= {62'b0, !tx_ready || tx_valid, rx_full};
        end
      end
    end
  end

  assign wb_o.ack = ack;
  assign wb_o.err = 1'b0;
  assign wb_o.dat = rdat;
endmodule
