// vga_controller: 640 x 480 VGA output of the live camera picture, and the
// source of the pixel stream the image compressor averages.
//
// A pixel clock enable (pix_en, 25 MHz) advances horizontal and vertical
// counters over 800 x 525 positions (640 visible + 16 front porch + 96
// sync + 48 back porch; 480 + 10 + 2 + 33), with active-low hsync and
// vsync. In the visible area it requests the next gray pixel from the
// frame buffer (pix_req) and shows iGray, which the frame buffer must give
// in the same cycle. A 224 x 224 window centred on the screen (x 208-431,
// y 128-351) is the capture area: its pixels are passed to the compressor
// as win_valid, win_x, win_y (0-223) and win_gray, and it is outlined by a
// 2-pixel red frame. The top-left 32 x 32 corner shows the compressed image
// read from the image memory (echo_addr, echo_gray). Outputs are
// registered with the counters' pixel, so colour and syncs stay aligned.
//
// From the design: 640 x 480 at 25 MHz, live video from the frame buffer,
// the 224 x 224 capture window, the red frame around it and the 32 x 32
// echo in the top-left corner. This design's choices: the standard
// 640 x 480 at 60 Hz timing, the window position, the 8-bit colour
// outputs and the pixel-request handshake.
module vga_controller #(
  parameter int H_VIS = 640, H_FP = 16, H_SYNC = 96, H_BP = 48,
  parameter int V_VIS = 480, V_FP = 10, V_SYNC = 2,  V_BP = 33,
  parameter int WIN   = 224,
  parameter int WIN_X = (H_VIS - WIN) / 2,
  parameter int WIN_Y = (V_VIS - WIN) / 2,
  parameter int ECHO  = 32
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       pix_en,
  // frame buffer pixel stream
  output logic       pix_req,
  input  logic [7:0] iGray,
  // compressed-image echo
  output logic [9:0] echo_addr,
  input  logic [7:0] echo_gray,
  // capture window to the compressor
  output logic       win_valid,
  output logic [7:0] win_x,
  output logic [7:0] win_y,
  output logic [7:0] win_gray,
  // VGA
  output logic       vga_hs,
  output logic       vga_vs,
  output logic       vga_blank_n,
  output logic [7:0] vga_r,
  output logic [7:0] vga_g,
  output logic [7:0] vga_b
);
  localparam int H_TOT = H_VIS + H_FP + H_SYNC + H_BP;
  localparam int V_TOT = V_VIS + V_FP + V_SYNC + V_BP;
  logic [9:0] hc, vc;
  logic       vis, in_win, on_frame, in_echo;
  int         hi, vi;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hc <= '0; vc <= '0;
    end else if (pix_en) begin
      if (int'(hc) == H_TOT - 1) begin
        hc <= '0;
        vc <= (int'(vc) == V_TOT - 1) ? '0 : vc + 1'b1;
      end else hc <= hc + 1'b1;
    end
  end

  always_comb begin
    hi       = int'(hc);
    vi       = int'(vc);
    vis      = hi < H_VIS && vi < V_VIS;
    in_win   = hi >= WIN_X && hi < WIN_X + WIN && vi >= WIN_Y && vi < WIN_Y + WIN;
    on_frame = vis && !in_win &&
               hi >= WIN_X - 2 && hi < WIN_X + WIN + 2 && vi >= WIN_Y - 2 && vi < WIN_Y + WIN + 2;
    in_echo  = hi < ECHO && vi < ECHO;
    pix_req  = pix_en && vis;
    win_valid = pix_en && in_win;
    win_x    = 8'(hi - WIN_X);
    win_y    = 8'(vi - WIN_Y);
    win_gray = iGray;
    echo_addr = 10'(vi * ECHO + hi);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vga_hs <= 1'b1; vga_vs <= 1'b1; vga_blank_n <= 1'b0;
      vga_r <= '0; vga_g <= '0; vga_b <= '0;
    end else if (pix_en) begin
      vga_hs      <= !(hi >= H_VIS + H_FP && hi < H_VIS + H_FP + H_SYNC);
      vga_vs      <= !(vi >= V_VIS + V_FP && vi < V_VIS + V_FP + V_SYNC);
      vga_blank_n <= vis;
      if (!vis)          {vga_r, vga_g, vga_b} <= '0;
      else if (in_echo)  {vga_r, vga_g, vga_b} <= {3{echo_gray}};
      else if (on_frame) {vga_r, vga_g, vga_b} <= {8'hFF, 8'h00, 8'h00};
      else               {vga_r, vga_g, vga_b} <= {3{iGray}};
    end
  end
endmodule
