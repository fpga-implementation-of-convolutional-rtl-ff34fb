// float_to_int: combinational conversion of an IEEE-754 single to a 32-bit
// two's complement integer (the FTI instruction).
//
// The fractional part is dropped (toward zero). Magnitudes of 2^31 or more,
// infinities and NaNs saturate to 7FFFFFFF or 80000000 by sign, and
// subnormals and values below 1 give 0. Rounding and saturation are this
// design's choices: the instruction table only names the conversion.
// Interface: f in, i out; pure combinational.
module float_to_int (
  input  logic [31:0] f,
  output logic [31:0] i
);
  logic [7:0]  e;
  logic [23:0] m;
  logic [31:0] mag;
  int          sh;
  always_comb begin
    e   = f[30:23];
    m   = {1'b1, f[22:0]};
    sh  = int'(e) - 127;       // unbiased exponent
    mag = 32'd0;
    if (sh >= 31) begin
      i = f[31] ? 32'h8000_0000 : 32'h7FFF_FFFF;
    end else begin
      if (sh < 0)        mag = 32'd0;
      else if (sh >= 23) mag = {8'd0, m} << (sh - 23);
      else               mag = {8'd0, m} >> (23 - sh);
      i = f[31] ? -mag : mag;
    end
  end
endmodule
