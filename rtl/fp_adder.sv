// fp_adder: combinational IEEE-754 single-precision adder.
//
// sum = a + b. Subtraction is done by the caller flipping the sign bit of
// one operand (the EXT_ALU inverts src0[31] through a mux for SUBF).
// Steps, following the adder algorithm of the design:
//   1. compare exponents; the larger one is the common exponent;
//   2. prepend the hidden bit to both 23-bit fractions (24 bits);
//   3. shift the mantissa with the smaller exponent right by the exponent
//      difference (bits shifted out are lost: no guard bits);
//   4. turn both into 25-bit two's complement numbers by their signs;
//   5. add them (26-bit sum, so an internal overflow is kept);
//   6-8. take sign and magnitude of the sum and renormalise it against the
//      common exponent, giving a subnormal when the exponent reaches 0.
// The result is truncated (rounded toward zero); this and the handling of
// infinities and NaNs (IEEE rules, NaN output 7FC00000) are this design's
// choices. A difference of 25 or more shifts the smaller operand out
// entirely. Interface: a, b in, sum out; no clock, pure combinational.
module fp_adder
  import cpu_pkg::*;
(
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] sum
);
  logic        sa, sb;
  logic [7:0]  ea, eb, ea_eff, eb_eff, e_big;
  logic [23:0] ma, mb, m_big, m_small, m_shift;
  logic        s_big, s_small;
  logic [8:0]  diff;
  logic signed [25:0] t_big, t_small, t_sum;
  logic [25:0] mag;

  always_comb begin
    sa = a[31];  sb = b[31];
    ea = a[30:23]; eb = b[30:23];
    ea_eff = (ea == 8'd0) ? 8'd1 : ea;
    eb_eff = (eb == 8'd0) ? 8'd1 : eb;
    ma = {ea != 8'd0, a[22:0]};
    mb = {eb != 8'd0, b[22:0]};
    // step 1: order the operands by exponent
    if (ea_eff >= eb_eff) begin
      e_big = ea_eff; m_big = ma; s_big = sa; m_small = mb; s_small = sb;
      diff = {1'b0, ea_eff} - {1'b0, eb_eff};
    end else begin
      e_big = eb_eff; m_big = mb; s_big = sb; m_small = ma; s_small = sa;
      diff = {1'b0, eb_eff} - {1'b0, ea_eff};
    end
    // step 3: align
    m_shift = (diff > 9'd24) ? 24'd0 : (m_small >> diff);
    // step 4: two's complement
    t_big   = s_big   ? -$signed({2'b00, m_big})   : $signed({2'b00, m_big});
    t_small = s_small ? -$signed({2'b00, m_shift}) : $signed({2'b00, m_shift});
    // step 5: add
    t_sum = t_big + t_small;
    // steps 6-8: sign/magnitude and renormalise
    mag = t_sum[25] ? 26'(-t_sum) : 26'(t_sum);
    if (t_sum == 26'sd0)
      sum = {sa & sb, 31'd0};
    else
      sum = fp_pack_trunc(t_sum[25], {38'd0, mag}, int'(e_big) - 150);

    // special operands
    if ((ea == 8'hFF && a[22:0] != 23'd0) || (eb == 8'hFF && b[22:0] != 23'd0))
      sum = FP_QNAN;
    else if (ea == 8'hFF && eb == 8'hFF)
      sum = (sa == sb) ? {sa, FP_POS_INF[30:0]} : FP_QNAN;
    else if (ea == 8'hFF)
      sum = {sa, FP_POS_INF[30:0]};
    else if (eb == 8'hFF)
      sum = {sb, FP_POS_INF[30:0]};
  end
endmodule
