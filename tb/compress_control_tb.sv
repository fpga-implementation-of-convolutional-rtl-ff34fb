// compress_control_tb: checks the snapshot handshake: a request raises
// compress_req, start pulses exactly once and only on a valid (0,0) pixel
// with pause released, req stays high until done and then falls, and a
// write of 0 cancels a pending request.
module compress_control_tb;
  logic clk = 0, rst_n = 0, we, wd, pause, pv, done, req, st;
  logic [7:0] x, y;
  int checks = 0, failures = 0, starts = 0;
  always #5 clk = ~clk;
  compress_control dut (.clk(clk), .rst_n(rst_n), .we(we), .compress_wdata(wd),
    .pause(pause), .pix_valid(pv), .uncompress_addr_x(x), .uncompress_addr_y(y),
    .done(done), .compress_req(req), .compress_start(st));
  task automatic c(input string what, input bit cond);
    checks++; if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask
  always @(posedge clk) if (st) begin
    starts++;
    c("start only at (0,0) valid, unpaused", pv && x == 0 && y == 0 && !pause);
  end
  initial begin
    we = 0; wd = 0; pause = 0; pv = 0; done = 1; x = 5; y = 5;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); c("idle req 0", req == 0);
    // request, with pause held over the first frame start
    we = 1; wd = 1; @(negedge clk); we = 0;
    c("req set", req == 1);
    pause = 1;
    for (int k = 0; k < 50; k++) begin
      @(negedge clk); pv = 1; x = 8'(k % 10); y = 8'(k / 10);
    end
    c("no start while paused", starts == 0);
    pause = 0;
    for (int k = 0; k < 50; k++) begin
      @(negedge clk); pv = ($urandom % 2) == 1; x = 8'(k % 10); y = 8'(k / 10);
      if (k == 0) pv = 0;          // (0,0) not valid this time
    end
    c("no start on invalid pixel", starts == 0);
    @(negedge clk); pv = 1; x = 0; y = 0;
    @(negedge clk); done = 0; x = 1;
    c("one start", starts == 1);
    repeat (20) @(negedge clk);
    c("req held while busy", req == 1);
    x = 0; @(negedge clk); x = 1;
    c("no second start", starts == 1);
    done = 1; @(negedge clk); @(negedge clk);
    c("req cleared on done", req == 0);
    // cancel
    we = 1; wd = 1; @(negedge clk); wd = 0; @(negedge clk); we = 0;
    c("cancelled", req == 0);
    x = 0; y = 0; @(negedge clk);
    c("no start after cancel", starts == 1);
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
