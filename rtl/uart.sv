// uart: the processor's serial port at 0x0000C004, a UART with a transmit
// FIFO (and a receive FIFO).
//
// A processor write (wr) pushes the low byte of wdata into the transmit
// FIFO; the transmitter sends queued bytes back to back, so the firmware
// can write a prediction without waiting for the line. Received bytes go
// into a receive FIFO; a processor read (rd) returns
// {22'b0, tx_full, rx_valid, rx_byte} and pops the byte if there was one.
// Both FIFOs hold FIFO_DEPTH bytes; a byte written to a full transmit FIFO
// is dropped.
//
// From the design: a FIFO added to a base UART for buffering the
// transmitted predictions, and the single address used for transmit
// (write) and receive (read). This design's choices: the 8N1 format, the
// bit rate, the FIFO depth, the receive FIFO and the layout of the read
// word.
module uart #(
  parameter int CLKS_PER_BIT = 434,
  parameter int FIFO_DEPTH   = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        wr,
  input  logic [31:0] wdata,
  input  logic        rd,
  output logic [31:0] rdata,
  output logic        tx,
  input  logic        rx
);
  logic [7:0] tx_byte, rx_byte, rxq_byte;
  logic       tx_empty, tx_full, tx_busy, tx_go;
  logic       rx_valid, rxq_empty;
  logic       unused_full;
  logic [$clog2(FIFO_DEPTH):0] unused_c1, unused_c2;

  sync_fifo #(.WIDTH(8), .DEPTH(FIFO_DEPTH)) u_txq (
    .clk(clk), .rst_n(rst_n), .push(wr), .din(wdata[7:0]), .pop(tx_go),
    .dout(tx_byte), .full(tx_full), .empty(tx_empty), .count(unused_c1));

  assign tx_go = !tx_empty && !tx_busy;

  uart_tx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_tx (
    .clk(clk), .rst_n(rst_n), .tx_start(tx_go), .tx_data(tx_byte),
    .tx(tx), .busy(tx_busy));

  uart_rx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_rx (
    .clk(clk), .rst_n(rst_n), .rx(rx), .rx_data(rx_byte), .rx_valid(rx_valid));

  sync_fifo #(.WIDTH(8), .DEPTH(FIFO_DEPTH)) u_rxq (
    .clk(clk), .rst_n(rst_n), .push(rx_valid), .din(rx_byte), .pop(rd),
    .dout(rxq_byte), .full(unused_full), .empty(rxq_empty), .count(unused_c2));

  assign rdata = {22'd0, tx_full, !rxq_empty, rxq_empty ? 8'd0 : rxq_byte};
endmodule
