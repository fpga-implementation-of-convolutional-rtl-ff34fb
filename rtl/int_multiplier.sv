// int_multiplier: combinational 16 x 16 integer multiplier (MUL, UMUL).
//
// Multiplies the low halves of the two sources into a full 32-bit
// product, as signed numbers when is_signed is 1 (MUL) or unsigned when 0
// (UMUL); the upper halves of the sources are ignored, as the instruction
// table states. Interface: a, b, is_signed in; p out; combinational.
module int_multiplier (
  input  logic [31:0] a,
  input  logic [31:0] b,
  input  logic        is_signed,
  output logic [31:0] p
);
  logic signed [16:0] sa, sb;
  logic signed [33:0] sp;
  always_comb begin
    sa = {is_signed & a[15], a[15:0]};
    sb = {is_signed & b[15], b[15:0]};
    sp = sa * sb;
    p  = sp[31:0];
  end
endmodule
