// alu_tb: checks every integer ALU operation, saturation and flags against
// 64-bit integer arithmetic on random and corner operands.
module alu_tb;
  import cpu_pkg::*;
  aluop_e      op;
  logic [31:0] a, b, r;
  logic [15:0] imm;
  flags_t      f;
  int checks = 0, failures = 0;
  alu dut (.op(op), .src1(a), .src2(b), .imm(imm), .result(r), .flags(f));

  initial begin
    longint s;
    logic [31:0] exp;
    logic        ev;
    for (int k = 0; k < 30000; k++) begin
      op = aluop_e'(k % 11);
      a = $urandom; b = $urandom; imm = 16'($urandom);
      if (k % 7 == 0) a = 32'h7FFF_FFF0;
      if (k % 5 == 0) b = 32'h7FFF_FFF0;
      if (k % 11 == 3) b = a;
      #1;
      ev = 1'b0;
      case (op)
        AO_ADD, AO_SUB: begin
          s = (op == AO_ADD) ? longint'($signed(a)) + longint'($signed(b))
                             : longint'($signed(a)) - longint'($signed(b));
          if (s > 64'sd2147483647) begin exp = 32'h7FFF_FFFF; ev = 1; end
          else if (s < -64'sd2147483648) begin exp = 32'h8000_0000; ev = 1; end
          else exp = 32'(s);
        end
        AO_AND:  exp = a & b;
        AO_NOR:  exp = ~(a | b);
        AO_SLL:  exp = a << (b % 32);
        AO_SRL:  exp = a >> (b % 32);
        AO_SRA:  exp = 32'(longint'($signed(a)) >>> (b % 32));
        AO_ADDR: exp = 32'(longint'(a) + longint'($signed(imm[7:0])));
        AO_LHB:  exp = {imm, b[15:0]};
        AO_LLB:  exp = 32'($signed(imm));
        default: exp = a;
      endcase
      checks++;
      if (r !== exp || f.v !== ev || f.z !== (exp == 0) || f.n !== exp[31]) begin
        failures++;
        $display("FAIL op %0d a %h b %h imm %h -> %h v%b exp %h v%b", op, a, b, imm, r, f.v, exp, ev);
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
