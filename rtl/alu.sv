// alu: integer ALU of the execute stage.
//
// Combinational. Performs the integer instructions other than the
// multiplies: saturating add and subtract (ADD, ADDZ, SUB, ADDI, SUBI),
// AND, NOR, the three shifts by a 5-bit amount, the load/store address sum
// src1 + sign-extended 8-bit offset, LHB ({imm16, src2[15:0]}), LLB
// (sign-extended imm16) and a pass-through used for the JAL link value.
// Saturation: a positive overflow gives 7FFFFFFF and a negative one
// 80000000, and both set v. The flags are produced for every operation;
// the pipeline decides which ones an instruction writes (Z, V and N for the
// adds and subtracts, Z alone for the logic ops and shifts).
//
// Operation set, saturation and flag rules are from the instruction table.
// Interface: op selects the operation; src1 is the first source (s field),
// src2 the second operand (t register or the immediate already extended by
// the decoder); imm holds the raw 16-bit immediate for LHB/LLB and the
// 8-bit offset for addresses.
module alu
  import cpu_pkg::*;
(
  input  aluop_e      op,
  input  logic [31:0] src1,
  input  logic [31:0] src2,
  input  logic [15:0] imm,
  output logic [31:0] result,
  output flags_t      flags
);
  logic [32:0] sum;
  logic [31:0] b;
  logic        ovf;

  always_comb begin
    b      = (op == AO_SUB) ? ~src2 : src2;
    sum    = {1'b0, src1} + {1'b0, b} + {32'd0, op == AO_SUB};
    ovf    = (src1[31] == b[31]) && (sum[31] != src1[31]);
    result = 32'd0;
    flags.v = 1'b0;
    unique case (op)
      AO_ADD, AO_SUB: begin
        if (ovf) result = src1[31] ? 32'h8000_0000 : 32'h7FFF_FFFF;
        else     result = sum[31:0];
        flags.v = ovf;
      end
      AO_AND:  result = src1 & src2;
      AO_NOR:  result = ~(src1 | src2);
      AO_SLL:  result = src1 << src2[4:0];
      AO_SRL:  result = src1 >> src2[4:0];
      AO_SRA:  result = $unsigned($signed(src1) >>> src2[4:0]);
      AO_ADDR: result = src1 + {{24{imm[7]}}, imm[7:0]};
      AO_LHB:  result = {imm, src2[15:0]};
      AO_LLB:  result = {{16{imm[15]}}, imm};
      AO_PASS: result = src1;
      default: result = 32'd0;
    endcase
    flags.z = (result == 32'd0);
    flags.n = result[31];
  end
endmodule
