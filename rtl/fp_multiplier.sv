// fp_multiplier: combinational IEEE-754 single-precision multiplier.
//
// Splits both operands into sign, exponent and mantissa; the product sign
// is the XOR of the signs, the exponents are added with the 127 bias taken
// out once, and the 24-bit mantissas (hidden bit 1, or 0 for a subnormal)
// are multiplied into a 48-bit product that is renormalised and packed.
// Special values follow IEEE rules: NaN in gives NaN (7FC00000), infinity
// times zero gives NaN, infinity times anything else gives a signed
// infinity, and zeros give a signed zero. Results are truncated (round
// toward zero), overflow gives infinity and small results become
// subnormal or zero; the rounding mode is this design's choice.
// Interface: a, b in, prod out; pure combinational.
module fp_multiplier
  import cpu_pkg::*;
(
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] prod
);
  logic        s;
  logic [7:0]  ea, eb;
  logic [23:0] ma, mb;
  logic [47:0] p;
  logic        a_nan, b_nan, a_inf, b_inf, a_zero, b_zero;

  always_comb begin
    s  = a[31] ^ b[31];
    ea = a[30:23]; eb = b[30:23];
    ma = {ea != 8'd0, a[22:0]};
    mb = {eb != 8'd0, b[22:0]};
    a_nan  = (ea == 8'hFF) && (a[22:0] != 23'd0);
    b_nan  = (eb == 8'hFF) && (b[22:0] != 23'd0);
    a_inf  = (ea == 8'hFF) && (a[22:0] == 23'd0);
    b_inf  = (eb == 8'hFF) && (b[22:0] == 23'd0);
    a_zero = (a[30:0] == 31'd0);
    b_zero = (b[30:0] == 31'd0);
    p = ma * mb;
    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero))
      prod = FP_QNAN;
    else if (a_inf || b_inf)
      prod = {s, FP_POS_INF[30:0]};
    else if (a_zero || b_zero)
      prod = {s, 31'd0};
    else
      // value = p * 2^(ea_eff - 150) * 2^(eb_eff - 150)
      prod = fp_pack_trunc(s, {16'd0, p},
                           int'((ea == 8'd0) ? 32'd1 : {24'd0, ea}) +
                           int'((eb == 8'd0) ? 32'd1 : {24'd0, eb}) - 300);
  end
endmodule
