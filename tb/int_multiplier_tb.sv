// int_multiplier_tb: checks signed and unsigned 16 x 16 products of the
// low halves against integer arithmetic.
module int_multiplier_tb;
  logic [31:0] a, b, p;
  logic        sgn;
  int checks = 0, failures = 0;
  int_multiplier dut (.a(a), .b(b), .is_signed(sgn), .p(p));

  initial begin
    longint ea;
    for (int k = 0; k < 20000; k++) begin
      a = $urandom; b = $urandom; sgn = k[0];
      if (k < 4) begin a = 32'hFFFF_FFFF; b = 32'h0001_FFFF; end
      #1;
      if (sgn) ea = longint'($signed(a[15:0])) * longint'($signed(b[15:0]));
      else     ea = longint'({48'd0, a[15:0]}) * longint'({48'd0, b[15:0]});
      checks++;
      if (p !== 32'(ea)) begin
        failures++;
        $display("FAIL %h*%h s=%0d -> %h exp %h", a, b, sgn, p, 32'(ea));
      end
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
