// int_to_float: combinational conversion of a 32-bit two's complement
// integer to an IEEE-754 single (the ITF instruction).
//
// Takes the magnitude of the integer and packs it with the shared
// truncating packer, so integers above 2^24 lose their low bits toward
// zero (this design's choice; the instruction table only names the
// conversion). Interface: i in, f out; pure combinational.
module int_to_float
  import cpu_pkg::*;
(
  input  logic [31:0] i,
  output logic [31:0] f
);
  logic [32:0] mag;
  always_comb begin
    mag = i[31] ? 33'(-{i[31], i}) : {1'b0, i};
    f   = fp_pack_trunc(i[31], {31'd0, mag}, 0);
  end
endmodule
