// float_to_int_tb: checks float-to-integer conversion (toward zero,
// saturating at the 32-bit limits) against real arithmetic.
module float_to_int_tb;
  import fp_tb_pkg::*;
  logic [31:0] f, i;
  int checks = 0, failures = 0;
  float_to_int dut (.f(f), .i(i));

  task automatic check(input logic [31:0] x);
    real r;
    logic [31:0] exp;
    f = x; #1;
    r = f2r(x);
    if (x[30:23] == 8'hFF || r >= 2147483648.0 || r < -2147483648.0)
      exp = x[31] ? 32'h8000_0000 : 32'h7FFF_FFFF;
    else
      exp = 32'($rtoi(r));
    checks++;
    if (i !== exp) begin
      failures++;
      $display("FAIL fti %h -> %h exp %h", x, i, exp);
    end
  endtask

  initial begin
    logic [31:0] x;
    check(32'h3F80_0000); check(32'hBFC0_0000); check(32'h3F7F_FFFF);
    check(32'h4F00_0000); check(32'hCF00_0000); check(32'h7F80_0000);
    check(32'h437F_0000); check(32'h0000_0001); check(32'h4EFF_FFFF);
    for (int k = 0; k < 20000; k++) begin
      x = $urandom;
      x[30:23] = 8'(110 + $urandom % 50);
      check(x);
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
