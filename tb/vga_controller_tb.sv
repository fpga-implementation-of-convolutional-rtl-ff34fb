// vga_controller_tb: runs two full 640 x 480 frames and checks the frame
// timing (800 x 525 pixel clocks, hsync 96 and vsync 2 lines wide, 640 x
// 480 visible), the number of window pixels (224 x 224) and their
// coordinates, the red frame, the live pixel and the 32 x 32 echo.
module vga_controller_tb;
  logic clk = 0, rst_n = 0, en = 0, req, wv, hs, vs, bn;
  logic [7:0] gray, egray, wx, wy, wg, r, g, b;
  logic [9:0] ea;
  int checks = 0, failures = 0;
  int npix = 0, nwin = 0, nhs = 0, nvs = 0, nvis = 0, nred = 0, necho = 0, bad = 0;
  int hcount = 0;
  always #5 clk = ~clk;
  always @(posedge clk) en <= ~en;
  vga_controller dut (.clk(clk), .rst_n(rst_n), .pix_en(en), .pix_req(req), .iGray(gray),
    .echo_addr(ea), .echo_gray(egray), .win_valid(wv), .win_x(wx), .win_y(wy), .win_gray(wg),
    .vga_hs(hs), .vga_vs(vs), .vga_blank_n(bn), .vga_r(r), .vga_g(g), .vga_b(b));
  // frame buffer model: gray level from the request position
  assign gray  = 8'(dut.hc ^ dut.vc);
  assign egray = 8'(ea) | 8'h01;
  always @(posedge clk) if (rst_n && en) begin
    npix++;
    if (wv) begin
      nwin++;
      if (int'(wx) != int'(dut.hc) - 208 || int'(wy) != int'(dut.vc) - 128 || wg !== gray) bad++;
    end
  end
  // output side, one pixel clock later
  always @(posedge clk) if (rst_n && en && npix > 1) begin
    if (!hs) nhs++;
    if (!vs) nvs++;
    if (bn) nvis++;
    if (bn && r == 8'hFF && g == 0 && b == 0) nred++;
    if (bn && g[0] && r == g && g == b) necho++;
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    repeat (2 * 2 * 800 * 525) @(posedge clk);
    checks++; if (nwin != 2 * 224 * 224) begin failures++; $display("FAIL win %0d", nwin); end
    checks++; if (bad != 0) begin failures++; $display("FAIL %0d bad window pixels", bad); end
    checks++; if (nvis != 2 * 640 * 480) begin failures++; $display("FAIL vis %0d", nvis); end
    checks++; if (nhs != 2 * 525 * 96) begin failures++; $display("FAIL hs %0d", nhs); end
    checks++; if (nvs != 2 * 2 * 800) begin failures++; $display("FAIL vs %0d", nvs); end
    checks++; if (nred != 2 * (228 * 228 - 224 * 224)) begin failures++; $display("FAIL red %0d", nred); end
    checks++; if (necho < 2 * 32 * 32) begin failures++; $display("FAIL echo %0d", necho); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
