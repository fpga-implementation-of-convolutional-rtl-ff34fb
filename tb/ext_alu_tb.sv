// ext_alu_tb: drives every func code of the extended ALU and checks the
// registered result one clock later against reference arithmetic, the
// combinational flags in the same cycle, the SUBF sign inversion, and the
// DEADDEAD pattern of the undefined code.
module ext_alu_tb;
  import cpu_pkg::*;
  import fp_tb_pkg::*;
  logic        clk = 0;
  logic [31:0] src1, src0, dst;
  xfunc_e      func;
  logic        ov, zr, neg;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  ext_alu dut (.clk(clk), .src1(src1), .src0(src0), .func(func),
               .dst_EX_DM(dst), .ov(ov), .zr(zr), .neg(neg));

  task automatic chk(input string what, input logic [31:0] got, exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h exp %h (func %0d %h %h)", what, got, exp, func, src1, src0);
    end
  endtask

  function automatic logic [31:0] model(input xfunc_e f, input logic [31:0] x, y);
    case (f)
      XF_MUL:  return 32'($signed(x[15:0]) * $signed(y[15:0]));
      XF_UMUL: return {16'd0, x[15:0]} * {16'd0, y[15:0]};
      XF_ADDF: return r2f_trunc(f2r(x) + f2r(y));
      XF_SUBF: return r2f_trunc(f2r(x) - f2r(y));
      XF_MULF: return r2f_trunc(f2r(x) * f2r(y));
      XF_ITF:  return r2f_trunc(real'($signed(x)));
      XF_FTI:  return 32'($rtoi(f2r(x)));
      default: return 32'hDEAD_DEAD;
    endcase
  endfunction

  initial begin
    logic [31:0] exp;
    logic        ez, en;
    for (int k = 0; k < 4000; k++) begin
      @(negedge clk);
      func = xfunc_e'(k % 8);
      // small integers as floats keep FP sums exact
      src1 = r2f_trunc(real'(int'($urandom % 512) - 256));
      src0 = r2f_trunc(real'(int'($urandom % 512) - 256));
      if (func inside {XF_MUL, XF_UMUL, XF_ITF}) begin
        src1 = $urandom; src0 = $urandom;
        if (k % 3 == 0) src0 = 32'd0;
      end
      if (k % 17 == 0 && func == XF_SUBF) src0 = src1;
      if (k % 13 == 0 && func == XF_ITF) src1 = 32'd0;
      exp = model(func, src1, src0);
      if (func inside {XF_ADDF, XF_SUBF, XF_MULF}) ez = (exp[30:0] == 31'd0);
      else ez = (exp == 32'd0);
      en = (func == XF_UMUL || func == XF_UNDEF) ? 1'b0 : exp[31];
      #1;
      chk("zr", 32'(zr), 32'(ez));
      chk("neg", 32'(neg), 32'(en));
      chk("ov", 32'(ov), 32'd0);
      @(posedge clk); #1;
      chk("dst", dst, exp);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
