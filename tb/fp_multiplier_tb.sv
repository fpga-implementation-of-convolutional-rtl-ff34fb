// fp_multiplier_tb: checks the FP multiplier bit-exactly against the
// exact product (a double holds the 48-bit mantissa product exactly)
// truncated toward zero, plus IEEE special cases and every pair of 16
// corner values of the format.
module fp_multiplier_tb;
  import fp_tb_pkg::*;
  logic [31:0] a, b, p;
  int checks = 0, failures = 0;
  fp_multiplier dut (.a(a), .b(b), .prod(p));

  task automatic check(input logic [31:0] x, y, exp);
    a = x; b = y; #1;
    checks++;
    if (p !== exp) begin
      failures++;
      $display("FAIL mul %h * %h = %h exp %h", x, y, p, exp);
    end
  endtask

  // corner values of the IEEE-754 single format: smallest and largest
  // subnormal and normal of each sign, the neighbours of +-1, zeros, infinities
  localparam logic [31:0] CORNER [16] = '{
    32'h0000_0001, 32'h007F_FFFF, 32'h0080_0000, 32'h7F7F_FFFF,
    32'h807F_FFFF, 32'h8000_0001, 32'hFF7F_FFFF, 32'h8080_0000,
    32'h3F80_0001, 32'h3F7F_FFFF, 32'hBF7F_FFFF, 32'hBF80_0001,
    32'h0000_0000, 32'h8000_0000, 32'h7F80_0000, 32'hFF80_0000};

  function automatic logic [31:0] expect_mul(input logic [31:0] x, y);
    logic [31:0] r;
    bit xi, yi, xz, yz;
    xi = x[30:0] == 31'h7F80_0000; yi = y[30:0] == 31'h7F80_0000;
    xz = x[30:0] == 31'd0;         yz = y[30:0] == 31'd0;
    if ((xi && yz) || (yi && xz)) return 32'h7FC0_0000;
    if (xi || yi) r = 32'h7F80_0000;
    else          r = r2f_trunc(f2r(x) * f2r(y));
    r[31] = x[31] ^ y[31];
    return r;
  endfunction

  initial begin
    logic [31:0] x, y;
    check(32'h4000_0000, 32'h4040_0000, 32'h40C0_0000); // 2*3 = 6
    check(32'hBF80_0000, 32'h3F00_0000, 32'hBF00_0000); // -1*0.5
    check(32'h7F80_0000, 32'h0000_0000, 32'h7FC0_0000); // inf*0
    check(32'hFF80_0000, 32'h4000_0000, 32'hFF80_0000); // -inf*2
    check(32'h8000_0000, 32'h4000_0000, 32'h8000_0000); // -0*2
    check(32'h7F7F_FFFF, 32'h4000_0000, 32'h7F80_0000); // overflow
    check(32'h0080_0000, 32'h3F00_0000, 32'h0040_0000); // to subnormal
    check(32'h7FC0_0000, 32'h3F80_0000, 32'h7FC0_0000); // NaN
    foreach (CORNER[i]) foreach (CORNER[j]) check(CORNER[i], CORNER[j], expect_mul(CORNER[i], CORNER[j]));
    for (int i = 0; i < 30000; i++) begin
      x = $urandom; y = $urandom;
      if (i % 2 == 0) begin
        x[30:23] = 8'(64 + $urandom % 128);
        y[30:23] = 8'(64 + $urandom % 128);
      end
      if (x[30:23] == 8'hFF || y[30:23] == 8'hFF) continue;
      check(x, y, r2f_trunc(f2r(x) * f2r(y)));
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
