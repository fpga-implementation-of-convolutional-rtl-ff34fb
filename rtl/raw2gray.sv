// raw2gray: turns the camera's Bayer-pattern pixels into grayscale.
//
// The sensor delivers one colour sample per pixel in a repeating 2 x 2
// pattern (G R / B G). Each output pixel is the average of one 2 x 2 quad,
// (G1 + R + B + G2) / 4, which weighs the two greens as the pattern does.
// The previous line is held in a line buffer of WIDTH samples; when a
// sample at an odd x of an odd line arrives, the quad is complete and one
// gray pixel is produced (oDVAL) with 12-bit value and coordinates
// (x/2, y/2), so a WIDTH x H sensor window gives a (WIDTH/2) x (H/2)
// image. Output is registered: one clock after the completing sample.
//
// From the design: conversion of the captured colour image to grayscale
// using the capture module's pixel and x/y outputs. This design's choices:
// the 2 x 2 averaging, the line buffer and WIDTH = 1280 (a 1280-wide sensor
// window binned to the 640-wide VGA picture).
module raw2gray #(
  parameter int WIDTH = 1280
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [11:0] iDATA,
  input  logic        iDVAL,
  input  logic [15:0] iX_Cont,
  input  logic [15:0] iY_Cont,
  output logic [11:0] oGray,
  output logic        oDVAL,
  output logic [15:0] oX,
  output logic [15:0] oY
);
  localparam int AW = $clog2(WIDTH);
  logic [11:0] line [WIDTH];
  logic [11:0] prev_up, prev_cur;   // samples at x-1 of the line above and of this line
  logic [11:0] up;
  logic [13:0] quad;

  assign up   = line[AW'(iX_Cont)];
  assign quad = 14'(prev_up) + 14'(up) + 14'(prev_cur) + 14'(iDATA);

  always_ff @(posedge clk) begin
    if (iDVAL) line[AW'(iX_Cont)] <= iDATA;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev_up <= '0; prev_cur <= '0; oGray <= '0; oDVAL <= 1'b0; oX <= '0; oY <= '0;
    end else begin
      oDVAL <= 1'b0;
      if (iDVAL) begin
        prev_up  <= up;
        prev_cur <= iDATA;
        if (iX_Cont[0] && iY_Cont[0]) begin
          oGray <= quad[13:2];
          oDVAL <= 1'b1;
          oX    <= iX_Cont >> 1;
          oY    <= iY_Cont >> 1;
        end
      end
    end
  end
endmodule
