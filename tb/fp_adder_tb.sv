// fp_adder_tb: checks the FP adder against real arithmetic.
// Directed special values, every pair of 16 corner values of the format,
// exact integer sums, then random operands with
// exponents close to each other; a finite result must lie within one unit
// in the last place (of the larger operand plus one of the result) of
// the exact sum, and a result
// whose magnitude reaches 2^128 must be infinity.
module fp_adder_tb;
  import fp_tb_pkg::*;
  logic [31:0] a, b, s;
  int checks = 0, failures = 0;
  fp_adder dut (.a(a), .b(b), .sum(s));

  task automatic check_eq(input logic [31:0] x, y, exp);
    a = x; b = y; #1;
    checks++;
    if (s !== exp) begin
      failures++;
      $display("FAIL add %h + %h = %h exp %h", x, y, s, exp);
    end
  endtask

  task automatic check_tol(input logic [31:0] x, y);
    real ex, got, ulp;
    int  emax;
    a = x; b = y; #1;
    checks++;
    ex = f2r(x) + f2r(y);
    emax = (x[30:23] > y[30:23]) ? int'(x[30:23]) : int'(y[30:23]);
    if (int'(s[30:23]) > emax) emax = int'(s[30:23]);
    if (emax == 0) emax = 1;
    // alignment loses under one ulp of the larger operand, packing under
    // one ulp of the result
    ulp = 2.0 * (2.0 ** (emax - 150));
    if ((ex >= 0 ? ex : -ex) >= 2.0 ** 128) begin
      if (s[30:0] !== 31'h7F80_0000) begin
        failures++; $display("FAIL ovf %h + %h = %h", x, y, s);
      end
    end else begin
      got = f2r(s);
      if (s[30:23] == 8'hFF || ((got - ex) > ulp) || ((ex - got) > ulp)) begin
        failures++;
        $display("FAIL add %h + %h = %h (%g) exp %g", x, y, s, got, ex);
      end
    end
  endtask

  // corner values of the IEEE-754 single format: smallest and largest
  // subnormal and normal of each sign, the neighbours of +-1, zeros, infinities
  localparam logic [31:0] CORNER [16] = '{
    32'h0000_0001, 32'h007F_FFFF, 32'h0080_0000, 32'h7F7F_FFFF,
    32'h807F_FFFF, 32'h8000_0001, 32'hFF7F_FFFF, 32'h8080_0000,
    32'h3F80_0001, 32'h3F7F_FFFF, 32'hBF7F_FFFF, 32'hBF80_0001,
    32'h0000_0000, 32'h8000_0000, 32'h7F80_0000, 32'hFF80_0000};

  task automatic check_corner(input logic [31:0] x, y);
    bit xi, yi;
    xi = x[30:0] == 31'h7F80_0000; yi = y[30:0] == 31'h7F80_0000;
    if (xi && yi && x[31] != y[31]) check_eq(x, y, 32'h7FC0_0000);
    else if (xi) check_eq(x, y, x);
    else if (yi) check_eq(x, y, y);
    else check_tol(x, y);
  endtask

  initial begin
    logic [31:0] x, y;
    check_eq(32'h3F80_0000, 32'h3F80_0000, 32'h4000_0000); // 1+1
    check_eq(32'h4040_0000, 32'hC000_0000, 32'h3F80_0000); // 3-2
    check_eq(32'h3F80_0000, 32'hBF80_0000, 32'h0000_0000); // 1-1
    check_eq(32'h8000_0000, 32'h8000_0000, 32'h8000_0000); // -0 + -0
    check_eq(32'h0000_0001, 32'h0000_0001, 32'h0000_0002); // subnormals
    check_eq(32'h007F_FFFF, 32'h0000_0001, 32'h0080_0000); // into normal
    check_eq(32'h7F80_0000, 32'h3F80_0000, 32'h7F80_0000); // inf + 1
    check_eq(32'h7F80_0000, 32'hFF80_0000, 32'h7FC0_0000); // inf - inf
    check_eq(32'h7FC0_0001, 32'h3F80_0000, 32'h7FC0_0000); // NaN
    check_eq(32'h7F7F_FFFF, 32'h7F7F_FFFF, 32'h7F80_0000); // overflow
    check_eq(32'h4B00_0000, 32'h3F80_0000, 32'h4B00_0001); // 2^23 + 1
    check_eq(32'h3F80_0000, 32'h3380_0000, 32'h3F80_0000); // 1 + 2^-24 truncates
    foreach (CORNER[i]) foreach (CORNER[j]) check_corner(CORNER[i], CORNER[j]);
    for (int i = 0; i < 400; i++) begin
      check_eq(r2f_trunc(real'(i * 37 - 5000)), r2f_trunc(real'(i * 11)),
               r2f_trunc(real'(i * 48 - 5000)));
    end
    for (int i = 0; i < 20000; i++) begin
      x = $urandom;
      y = $urandom;
      if (i % 2 == 0) y[30:23] = 8'(int'(x[30:23]) + ($urandom % 9) - 4);
      if (x[30:23] == 8'hFF) x[30] = 1'b0;
      if (y[30:23] == 8'hFF) y[30] = 1'b0;
      check_tol(x, y);
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
