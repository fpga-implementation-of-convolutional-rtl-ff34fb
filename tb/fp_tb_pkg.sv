// fp_tb_pkg: reference arithmetic for the testbenches.
//
// Independent of the RTL: converts IEEE-754 single bit patterns to and from
// double-precision reals with plain real arithmetic and bit slicing, with
// truncation toward zero, and provides the 32-bit instruction encoders the
// processor testbenches use as a small assembler.
package fp_tb_pkg;

  function automatic real f2r(input logic [31:0] f);
    real m;
    int  e;
    e = int'(f[30:23]);
    if (e == 0) m = real'(f[22:0]) * (2.0 ** -149);
    else        m = (1.0 + real'(f[22:0]) / 8388608.0) * (2.0 ** (e - 127));
    return f[31] ? -m : m;
  endfunction

  // Truncate a real (exactly representable as a double) toward zero into a single.
  function automatic logic [31:0] r2f_trunc(input real x);
    logic [63:0] d;
    int          e, sh;
    logic [52:0] m;
    logic [52:0] fld;
    d = $realtobits(x);
    if (d[62:0] == 63'd0) return {d[63], 31'd0};
    e = int'(d[62:52]) - 1023;
    m = {1'b1, d[51:0]};
    if (e >= 128) return {d[63], 8'hFF, 23'd0};
    if (e >= -126) return {d[63], 8'(e + 127), d[51:29]};
    sh = 52 - (e + 149);
    if (sh > 52) return {d[63], 31'd0};
    fld = m >> sh;
    return {d[63], 8'd0, fld[22:0]};
  endfunction

  function automatic bit is_nan(input logic [31:0] f);
    return (&f[30:23]) && (|f[22:0]);
  endfunction

  // ---- instruction encoders ----
  function automatic logic [31:0] enc_r(input logic [4:0] op, input int d, input int s, input int t);
    return {op, 6'd0, 5'(d), 3'd0, 5'(s), 3'd0, 5'(t)};
  endfunction
  function automatic logic [31:0] enc_i8(input logic [4:0] op, input int d, input int s, input int imm);
    return {op, 6'd0, 5'(d), 3'd0, 5'(s), 8'(imm)};
  endfunction
  function automatic logic [31:0] enc_i16(input logic [4:0] op, input int d, input int imm);
    return {op, 6'd0, 5'(d), 16'(imm)};
  endfunction
  function automatic logic [31:0] enc_b(input logic [2:0] cond, input int off);
    return {5'b01100, cond, 12'd0, 12'(off)};
  endfunction
  function automatic logic [31:0] enc_jal(input int off);
    return {5'b01101, 15'd0, 12'(off)};
  endfunction
  function automatic logic [31:0] enc_jr(input int t);
    return {5'b01110, 14'd0, 5'(t), 8'd0};
  endfunction
  function automatic logic [31:0] enc_push(input int s);
    return {5'b10010, 14'd0, 5'(s), 8'd0};
  endfunction
  function automatic logic [31:0] enc_pop(input int d);
    return {5'b10011, 6'd0, 5'(d), 16'd0};
  endfunction
  function automatic logic [31:0] enc_hlt();
    return {5'b11111, 27'd0};
  endfunction
endpackage
