// image_mem: RAM holding the compressed camera image, one 8-bit grayscale
// pixel per word, 1024 words (32 x 32 with the zero border).
//
// One write port for the image compressor (synchronous, we/waddr/wdata)
// and two asynchronous read ports: one for the processor (read at
// 0x00010000 + address, zero-extended to 32 bits by the top level) and one
// for the VGA echo of the image. The memory is cleared on reset (clr) so
// that the border addresses, which the compressor never writes, read 0.
// Function and place in the design follow the memory table of the top
// level. That table gives the range 0x00010000-0x0001030F (784 words,
// the 28 x 28 image), while the compressor for the CNN writes addresses
// 0-1023 of a 32 x 32 padded image; this design follows the 1024-word
// CNN configuration. A third (VGA) read port and the clear are this
// design's choices.
module image_mem #(
  parameter int DEPTH = 1024
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [7:0]               wdata,
  input  logic [$clog2(DEPTH)-1:0] cpu_raddr,
  output logic [7:0]               cpu_rdata,
  input  logic [$clog2(DEPTH)-1:0] vga_raddr,
  output logic [7:0]               vga_rdata
);
  logic [7:0] mem [DEPTH];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  mem <= '{default: '0};
    else if (we) mem[waddr] <= wdata;
  end
  assign cpu_rdata = mem[cpu_raddr];
  assign vga_rdata = mem[vga_raddr];
endmodule
