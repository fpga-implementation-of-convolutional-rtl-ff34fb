// weight_rom: memory holding the trained CNN kernels and weights as
// IEEE-754 singles, read by the processor at 0x00020000 + index.
//
// 63,654 words: conv1 6x1x5x5 (150), conv2 16x6x5x5 (2,400), fc1 400x120
// (48,000), fc2 120x84 (10,080) and fc3 84x36 (3,024). The read is
// asynchronous. On the board the contents came from a hex file produced by
// the training software; here a load port (load_we, load_addr, load_data)
// fills it instead, and to the processor it is read-only. The word count
// follows the CNN weight budget (61,104 + 2,550 = 63,654); the memory
// table of the top level gives the range 0x00020000-0x00021E9F (7,840
// words, the digits-only linear classifier), which is too small for the
// CNN, so this design follows the CNN count. The load port is this
// design's choice.
module weight_rom #(
  parameter int DEPTH = 63654
) (
  input  logic                     clk,
  input  logic [$clog2(DEPTH)-1:0] addr,
  output logic [31:0]              rdata,
  input  logic                     load_we,
  input  logic [$clog2(DEPTH)-1:0] load_addr,
  input  logic [31:0]              load_data
);
  logic [31:0] mem [DEPTH];
  always_ff @(posedge clk) if (load_we) mem[load_addr] <= load_data;
  assign rdata = (int'(addr) < DEPTH) ? mem[addr] : 32'd0;
endmodule
