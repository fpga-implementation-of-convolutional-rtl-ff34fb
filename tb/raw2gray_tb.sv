// raw2gray_tb: feeds a random Bayer frame with gaps between samples and
// checks every gray output against the 2 x 2 quad average and its
// coordinates, and the number of outputs.
module raw2gray_tb;
  localparam int W = 16, H = 8;
  logic clk = 0, rst_n = 0, iv, ov;
  logic [11:0] d, g;
  logic [15:0] ix, iy, ox, oy;
  logic [11:0] img [H][W];
  int checks = 0, failures = 0, nout = 0;
  always #5 clk = ~clk;
  raw2gray #(.WIDTH(W)) dut (.clk(clk), .rst_n(rst_n), .iDATA(d), .iDVAL(iv),
    .iX_Cont(ix), .iY_Cont(iy), .oGray(g), .oDVAL(ov), .oX(ox), .oY(oy));
  always @(posedge clk) if (ov) begin
    int s;
    nout++;
    s = img[2*oy][2*ox] + img[2*oy][2*ox+1] + img[2*oy+1][2*ox] + img[2*oy+1][2*ox+1];
    checks++;
    if (g !== 12'(s / 4)) begin failures++; $display("FAIL (%0d,%0d) %0d exp %0d", ox, oy, g, s / 4); end
  end
  initial begin
    iv = 0; d = 0; ix = 0; iy = 0;
    foreach (img[y, x]) img[y][x] = 12'($urandom);
    repeat (2) @(negedge clk); rst_n = 1;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        @(negedge clk);
        while ($urandom % 3 == 0) begin iv = 0; @(negedge clk); end
        iv = 1; d = img[y][x]; ix = 16'(x); iy = 16'(y);
      end
    @(negedge clk); iv = 0;
    repeat (3) @(negedge clk);
    checks++; if (nout != W * H / 4) begin failures++; $display("FAIL %0d outputs", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
