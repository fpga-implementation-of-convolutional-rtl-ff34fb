// ccd_capture_tb: drives sensor frames (FVAL/LVAL with blanking) and
// checks every valid pixel's data and x/y position, the frame counter,
// that nothing is passed before iSTART and that iEND stops at the next
// frame.
module ccd_capture_tb;
  localparam int W = 20, H = 6;
  logic clk = 0, rst_n = 0, fval, lval, st, en, dval;
  logic [11:0] d, od;
  logic [15:0] x, y;
  logic [31:0] fc;
  int checks = 0, failures = 0, nval = 0, frame_no = 0;
  always #5 clk = ~clk;
  ccd_capture dut (.clk(clk), .rst_n(rst_n), .iDATA(d), .iFVAL(fval), .iLVAL(lval),
    .iSTART(st), .iEND(en), .oDATA(od), .oDVAL(dval), .oX_Cont(x), .oY_Cont(y), .oFrame_Cont(fc));
  function automatic logic [11:0] pix(input int f, input int xx, input int yy);
    return 12'(f * 1000 + yy * 37 + xx * 3);
  endfunction
  always @(posedge clk) if (rst_n && dval) begin
    nval++;
    checks++;
    if (od !== pix(frame_no, int'(x), int'(y)) || int'(x) >= W || int'(y) >= H) begin
      failures++; $display("FAIL pix %h at %0d,%0d", od, x, y);
    end
  end
  task automatic frame(input int f);
    frame_no = f;
    @(negedge clk); fval = 1; lval = 0;
    repeat (3) @(negedge clk);
    for (int yy = 0; yy < H; yy++) begin
      for (int xx = 0; xx < W; xx++) begin lval = 1; d = pix(f, xx, yy); @(negedge clk); end
      lval = 0; repeat (4) @(negedge clk);
    end
    fval = 0; repeat (6) @(negedge clk);
  endtask
  initial begin
    fval = 0; lval = 0; d = 0; st = 0; en = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    frame(0);
    checks++; if (nval != 0) begin failures++; $display("FAIL passed before start"); end
    st = 1; @(negedge clk); st = 0;
    frame(1);
    checks++; if (nval != W * H) begin failures++; $display("FAIL %0d valid", nval); end
    frame(2);
    checks++; if (nval != 2 * W * H || fc != 2) begin failures++; $display("FAIL frame count %0d", fc); end
    en = 1; @(negedge clk); en = 0;
    frame(3);
    checks++; if (nval != 2 * W * H) begin failures++; $display("FAIL not stopped"); end
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
