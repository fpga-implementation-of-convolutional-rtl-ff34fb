// int_to_float_tb: checks integer-to-float conversion bit-exactly against
// the real value of the integer truncated toward zero.
module int_to_float_tb;
  import fp_tb_pkg::*;
  logic [31:0] i, f;
  int checks = 0, failures = 0;
  int_to_float dut (.i(i), .f(f));

  task automatic check(input logic [31:0] x);
    i = x; #1;
    checks++;
    if (f !== r2f_trunc(real'($signed(x)))) begin
      failures++;
      $display("FAIL itf %h -> %h exp %h", x, f, r2f_trunc(real'($signed(x))));
    end
  endtask

  initial begin
    check(32'd0); check(32'd1); check(32'd255); check(-32'sd1);
    check(32'h8000_0000); check(32'h7FFF_FFFF); check(32'h0100_0001);
    for (int k = 0; k < 256; k++) check(32'(k));
    for (int k = 0; k < 20000; k++) check($urandom >> ($urandom % 32));
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
