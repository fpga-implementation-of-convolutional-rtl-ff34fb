// ext_alu: the extended ALU of the execute stage.
//
// Holds five units side by side: FP adder, FP multiplier, integer-to-float,
// float-to-integer and the 16 x 16 integer multiplier. A multiplexer picked
// by func chooses one result (32'hDEADDEAD for the undefined code 111) and
// a flip-flop registers it as dst_EX_DM, so the result appears one clock
// after the operands, at the execute/memory pipeline boundary. The flags
// are taken combinationally from the unregistered result, so they are valid
// in the same cycle as the operands: zr is the NOR of OUT[30:0] for the
// floating-point results (so +0 and -0 are both zero) and of all 32 bits
// otherwise; neg is OUT[31] or 0; ov is always 0.
//
// From the EXT_ALU diagram and interface table: the five units, the 32'hDEADDEAD
// default, the src0[31] inverter feeding the adder for SUBF (so SUBF gives
// src1 - src0), the inverted func bit choosing signed multiply, the
// registered output and the flag sources. This design's choices: ITF and
// FTI convert src1; neg is forced to 0 for UMUL and the undefined code.
//
// func: 000 MUL, 001 UMUL, 010 ADDF, 011 SUBF, 100 MULF, 101 ITF, 110 FTI.
module ext_alu
  import cpu_pkg::*;
(
  input  logic        clk,
  input  logic [31:0] src1,
  input  logic [31:0] src0,
  input  xfunc_e      func,
  output logic [31:0] dst_EX_DM,
  output logic        ov,
  output logic        zr,
  output logic        neg
);
  logic [31:0] add_b, add_o, mul_o, itf_o, fti_o, imul_o, out;

  // SUBF: invert the sign of src0 before the adder
  assign add_b = (func == XF_SUBF) ? {~src0[31], src0[30:0]} : src0;

  fp_adder       u_add  (.a(src1), .b(add_b), .sum(add_o));
  fp_multiplier  u_mul  (.a(src1), .b(src0),  .prod(mul_o));
  int_to_float   u_itf  (.i(src1), .f(itf_o));
  float_to_int   u_fti  (.f(src1), .i(fti_o));
  int_multiplier u_imul (.a(src1), .b(src0), .is_signed(~func[0]), .p(imul_o));

  always_comb begin
    unique case (func)
      XF_MUL, XF_UMUL:  out = imul_o;
      XF_ADDF, XF_SUBF: out = add_o;
      XF_MULF:          out = mul_o;
      XF_ITF:           out = itf_o;
      XF_FTI:           out = fti_o;
      default:          out = 32'hDEAD_DEAD;
    endcase
  end

  always_comb begin
    unique case (func)
      XF_ADDF, XF_SUBF, XF_MULF: zr = ~|out[30:0];
      default:                   zr = ~|out;
    endcase
    neg = (func == XF_UMUL || func == XF_UNDEF) ? 1'b0 : out[31];
    ov  = 1'b0;
  end

  always_ff @(posedge clk) dst_EX_DM <= out;
endmodule
