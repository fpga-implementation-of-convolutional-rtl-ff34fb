// uart_tx: UART transmitter, 8 data bits, no parity, one stop bit (8N1),
// least significant bit first.
//
// When idle and tx_start is high, latches tx_data and sends a start bit
// (0), the eight data bits and a stop bit (1), each CLKS_PER_BIT clocks
// long; busy is high from the cycle after tx_start until the stop bit
// ends. The line idles high. The frame format and bit rate are this
// design's choices (the design only names the UART).
module uart_tx #(
  parameter int CLKS_PER_BIT = 434    // 50 MHz / 115200 baud
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       tx_start,
  input  logic [7:0] tx_data,
  output logic       tx,
  output logic       busy
);
  localparam int CW = $clog2(CLKS_PER_BIT + 1);
  logic [CW-1:0] cnt;
  logic [3:0]    bitn;    // 0 start, 1..8 data, 9 stop
  logic [9:0]    shreg;

  assign tx = busy ? shreg[0] : 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; cnt <= '0; bitn <= '0; shreg <= '1;
    end else if (!busy) begin
      if (tx_start) begin
        busy <= 1'b1; cnt <= '0; bitn <= '0;
        shreg <= {1'b1, tx_data, 1'b0};
      end
    end else if (int'(cnt) == CLKS_PER_BIT - 1) begin
      cnt <= '0;
      if (bitn == 4'd9) busy <= 1'b0;
      else begin
        bitn  <= bitn + 4'd1;
        shreg <= {1'b1, shreg[9:1]};
      end
    end else begin
      cnt <= cnt + 1'b1;
    end
  end
endmodule
