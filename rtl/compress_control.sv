// compress_control: the snapshot-request register at 0x0000C008 and the
// logic that starts the image compressor on a frame boundary.
//
// The processor writes 1 (we with compress_wdata = 1) to request a
// snapshot; compress_req, which the processor reads back at the same
// address, then stays 1. While a request is pending and the pause button
// is not held, the controller waits for the scan position of the
// uncompressed image to be its first pixel (uncompress_addr_x = 0 and
// uncompress_addr_y = 0, qualified by pix_valid) and pulses compress_start
// for one clock. It then waits for the compressor to report done, and
// clears compress_req. Writing 0 withdraws a request that has not started.
//
// From the design: the register, its signals (uncompress_addr_x/y, we,
// compress_wdata, pause, compress_req, compress_start) and their meaning.
// This design's choices: the three-state machine, the done and pix_valid
// inputs, and the behaviour of a write of 0.
module compress_control (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       we,
  input  logic       compress_wdata,
  input  logic       pause,
  input  logic       pix_valid,
  input  logic [7:0] uncompress_addr_x,
  input  logic [7:0] uncompress_addr_y,
  input  logic       done,
  output logic       compress_req,
  output logic       compress_start
);
  typedef enum logic [1:0] {IDLE, WAIT_FRAME, BUSY} state_e;
  state_e state;

  assign compress_req   = (state != IDLE);
  assign compress_start = (state == WAIT_FRAME) && !pause && pix_valid &&
                          uncompress_addr_x == 8'd0 && uncompress_addr_y == 8'd0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state <= IDLE;
    else unique case (state)
      IDLE:       if (we && compress_wdata) state <= WAIT_FRAME;
      WAIT_FRAME: if (we && !compress_wdata) state <= IDLE;
                  else if (compress_start)   state <= BUSY;
      BUSY:       if (done) state <= IDLE;
      default:    state <= IDLE;
    endcase
  end
endmodule
