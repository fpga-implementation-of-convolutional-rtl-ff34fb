// image_compressor_x: shrinks the 224 x 224 8-bit window of the camera
// image to 28 x 28 by averaging 8 x 8 blocks, and writes it into a 32 x 32
// image memory with a zero border of 2 pixels (the CNN input).
//
// Pixels arrive one per clock enable (pix_valid) in raster order with their
// window coordinates pix_haddr, pix_vaddr (0..223). One 14-bit accumulator
// per block column (28 of them, indexed by b_haddr = pix_haddr[7:3]) sums
// the 64 pixels of the current row of blocks: the first pixel of a block
// (both low coordinate bits 0) loads it, the others add to it. On the last
// pixel of a block (both low coordinate bits 7) the upper 8 bits of the
// completed 14-bit sum (sum / 64) are written with sram_wr, at
// compress_addrx, and compress_addr (0..783) advances.
// compress_addr resets to 784, is cleared by start, increments on each
// write, and stops at 784 until the next start: writes happen only while it
// is below 784, so one start compresses one frame. compress_addrx maps the
// 28 x 28 address to the padded 32 x 32 one, (row + 2) * 32 + col + 2; the
// border addresses are never written and stay 0. done is high while
// compress_addr is 784.
//
// From the design: the 224 -> 28 block average, the 28 14-bit
// accumulators addressed by the upper 5 bits of pix_haddr, the upper-8-bit
// average, the compress_addr register rules and the padded addressing.
// compress_addrx is combinational in compress_addr, as in the design; so
// start must come just before window pixel (0,0), which compress_control
// ensures.
// This design's choices: the pix_valid qualifier and the done output.
module image_compressor_x #(
  parameter int IMG   = 224,          // input window side
  parameter int BLK   = 8,            // block side
  parameter int PAD   = 2,            // zero border of the output
  localparam int OUT  = IMG / BLK,    // 28
  localparam int OSIDE = OUT + 2 * PAD, // 32
  localparam int NPIX = OUT * OUT     // 784
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic       pix_valid,
  input  logic [7:0] pix_color_in,
  input  logic [7:0] pix_haddr,
  input  logic [7:0] pix_vaddr,
  output logic       sram_wr,
  output logic [7:0] pix_color_out,
  output logic [9:0] compress_addr,
  output logic [9:0] compress_addrx,
  output logic       done
);
  localparam int LB = $clog2(BLK);
  localparam int SW = 8 + 2 * LB;     // 14-bit sums
  localparam int BW = $clog2(OUT);    // block column index width
  logic [SW-1:0] block [OUT];
  logic [7:0]    b_haddr;
  logic          first, last;
  logic [SW-1:0] total;

  always_comb begin
    b_haddr = pix_haddr >> LB;
    first   = (pix_haddr[LB-1:0] == '0) && (pix_vaddr[LB-1:0] == '0);
    last    = (pix_haddr[LB-1:0] == '1) && (pix_vaddr[LB-1:0] == '1);
    total   = block[BW'(b_haddr)] + SW'(pix_color_in);
    done    = (compress_addr == 10'(NPIX));
    sram_wr = pix_valid && last && !done && !start;
    pix_color_out  = total[SW-1 -: 8];
    // padded address, a function of compress_addr alone
    compress_addrx = 10'((int'(compress_addr) / OUT + PAD) * OSIDE + int'(compress_addr) % OUT + PAD);
  end

  always_ff @(posedge clk) begin
    if (pix_valid) block[BW'(b_haddr)] <= first ? SW'(pix_color_in) : total;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       compress_addr <= 10'(NPIX);
    else if (start)   compress_addr <= 10'd0;
    else if (sram_wr) compress_addr <= compress_addr + 10'd1;
  end
endmodule
