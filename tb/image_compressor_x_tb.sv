// image_compressor_x_tb: streams random 224 x 224 frames through the
// compressor and checks each write against the 8 x 8 block averages of the
// frame (floor of the sum / 64) at the padded 32 x 32 address; checks that
// exactly 784 writes happen, that none lands in the border, that a frame
// without start writes nothing, and that a new start compresses again.
module image_compressor_x_tb;
  logic clk = 0, rst_n = 0, start, pv, wr, done;
  logic [7:0] pin, h, v, pout;
  logic [9:0] ca, cax;
  logic [7:0] frame [224][224];
  int checks = 0, failures = 0, writes = 0;
  always #5 clk = ~clk;
  image_compressor_x dut (.clk(clk), .rst_n(rst_n), .start(start), .pix_valid(pv),
    .pix_color_in(pin), .pix_haddr(h), .pix_vaddr(v), .sram_wr(wr),
    .pix_color_out(pout), .compress_addr(ca), .compress_addrx(cax), .done(done));

  always @(posedge clk) if (wr) begin
    int r, c, s;
    writes++;
    r = int'(cax) / 32 - 2; c = int'(cax) % 32 - 2;
    s = 0;
    if (r >= 0 && r < 28 && c >= 0 && c < 28)
      for (int y = 0; y < 8; y++) for (int x = 0; x < 8; x++) s += frame[r*8+y][c*8+x];
    checks++;
    if (r < 0 || r >= 28 || c < 0 || c >= 28 || pout !== 8'(s / 64) || ca !== 10'(r * 28 + c)) begin
      failures++; $display("FAIL write addrx %0d val %0d exp %0d ca %0d", cax, pout, s / 64, ca);
    end
  end

  task automatic run_frame(input bit do_start);
    foreach (frame[y, x]) frame[y][x] = 8'($urandom);
    for (int y = 0; y < 224; y++)
      for (int x = 0; x < 224; x++) begin
        @(negedge clk);
        while ($urandom % 4 == 0) begin pv = 0; @(negedge clk); end
        pv = 1; h = 8'(x); v = 8'(y); pin = frame[y][x];
        start = do_start && x == 0 && y == 0;
      end
    @(negedge clk); pv = 0; start = 0;
    @(negedge clk);
  endtask

  initial begin
    pv = 0; start = 0; h = 0; v = 0; pin = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    checks++; if (!done || ca !== 10'd784) begin failures++; $display("FAIL reset value"); end
    run_frame(1);
    checks++; if (writes != 784) begin failures++; $display("FAIL %0d writes", writes); end
    checks++; if (!done) begin failures++; $display("FAIL not done"); end
    writes = 0;
    run_frame(0);
    checks++; if (writes != 0) begin failures++; $display("FAIL %0d writes without start", writes); end
    run_frame(1);
    checks++; if (writes != 784) begin failures++; $display("FAIL %0d writes 2nd", writes); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
