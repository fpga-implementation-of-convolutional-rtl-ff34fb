// uart_rx: UART receiver for 8N1 frames, least significant bit first.
//
// The input is passed through two flip-flops. A falling edge starts a
// frame; the line is sampled in the middle of each bit, CLKS_PER_BIT
// clocks apart. After the stop bit, rx_valid pulses for one clock with the
// byte on rx_data (a frame whose start bit is not 0 at mid-bit is
// dropped). Frame format and bit rate are this design's choices.
module uart_rx #(
  parameter int CLKS_PER_BIT = 434
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rx,
  output logic [7:0] rx_data,
  output logic       rx_valid
);
  localparam int CW = $clog2(CLKS_PER_BIT + 1);
  typedef enum logic [1:0] {IDLE, START, DATA, STOP} state_e;
  state_e        state;
  logic [CW-1:0] cnt;
  logic [2:0]    bitn;
  logic          rx_s1, rx_s2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_s1 <= 1'b1; rx_s2 <= 1'b1;
      state <= IDLE; cnt <= '0; bitn <= '0; rx_data <= '0; rx_valid <= 1'b0;
    end else begin
      rx_s1 <= rx; rx_s2 <= rx_s1;
      rx_valid <= 1'b0;
      unique case (state)
        IDLE: if (!rx_s2) begin state <= START; cnt <= '0; end
        START:
          if (int'(cnt) == CLKS_PER_BIT / 2 - 1) begin
            cnt <= '0; bitn <= '0;
            state <= rx_s2 ? IDLE : DATA;
          end else cnt <= cnt + 1'b1;
        DATA:
          if (int'(cnt) == CLKS_PER_BIT - 1) begin
            cnt <= '0;
            rx_data <= {rx_s2, rx_data[7:1]};
            if (bitn == 3'd7) state <= STOP;
            else bitn <= bitn + 3'd1;
          end else cnt <= cnt + 1'b1;
        STOP:
          if (int'(cnt) == CLKS_PER_BIT - 1) begin
            cnt <= '0; state <= IDLE;
            rx_valid <= rx_s2;
          end else cnt <= cnt + 1'b1;
        default: state <= IDLE;
      endcase
    end
  end
endmodule
