// cpu_pkg: types and constants shared by the processor and its units.
//
// Holds the 5-bit opcode map and 3-bit branch conditions of the 32-bit
// instruction set, the EXT_ALU function codes, the memory map of the
// processor's address space, the flag-register struct, and one helper
// function, fp_pack_trunc, that turns an exact unsigned magnitude times a
// power of two into an IEEE-754 single with truncation (round toward zero),
// overflow to infinity and gradual underflow to subnormals.
//
// Opcodes, condition codes, EXT_ALU function codes and the addresses follow
// the instruction table, the EXT_ALU interface table and the memory-map
// tables of the design. The choice of truncation instead of
// round-to-nearest is this design's: the floating-point adder description
// keeps no guard bits, so nothing is rounded.
package cpu_pkg;

  typedef enum logic [4:0] {
    OP_ADD  = 5'b00000, OP_ADDZ = 5'b00001, OP_SUB  = 5'b00010,
    OP_AND  = 5'b00011, OP_NOR  = 5'b00100, OP_SLL  = 5'b00101,
    OP_SRL  = 5'b00110, OP_SRA  = 5'b00111, OP_LW   = 5'b01000,
    OP_SW   = 5'b01001, OP_LHB  = 5'b01010, OP_LLB  = 5'b01011,
    OP_B    = 5'b01100, OP_JAL  = 5'b01101, OP_JR   = 5'b01110,
    OP_R15  = 5'b01111, OP_R16  = 5'b10000, OP_R17  = 5'b10001,
    OP_PUSH = 5'b10010, OP_POP  = 5'b10011, OP_ADDI = 5'b10100,
    OP_SUBI = 5'b10101, OP_R22  = 5'b10110, OP_R23  = 5'b10111,
    OP_MUL  = 5'b11000, OP_UMUL = 5'b11001, OP_ADDF = 5'b11010,
    OP_SUBF = 5'b11011, OP_MULF = 5'b11100, OP_ITF  = 5'b11101,
    OP_FTI  = 5'b11110, OP_HLT  = 5'b11111
  } opcode_e;

  typedef enum logic [2:0] {
    BR_NEQ = 3'b000, BR_EQ  = 3'b001, BR_GT  = 3'b010, BR_LT     = 3'b011,
    BR_GTE = 3'b100, BR_LTE = 3'b101, BR_OVFL = 3'b110, BR_UNCOND = 3'b111
  } cond_e;

  // EXT_ALU function select (func[2:0])
  typedef enum logic [2:0] {
    XF_MUL = 3'b000, XF_UMUL = 3'b001, XF_ADDF = 3'b010, XF_SUBF = 3'b011,
    XF_MULF = 3'b100, XF_ITF = 3'b101, XF_FTI = 3'b110, XF_UNDEF = 3'b111
  } xfunc_e;

  // Integer ALU operation select
  typedef enum logic [3:0] {
    AO_ADD, AO_SUB, AO_AND, AO_NOR, AO_SLL, AO_SRL, AO_SRA,
    AO_ADDR, AO_LHB, AO_LLB, AO_PASS
  } aluop_e;

  typedef struct packed {
    logic z;  // zero
    logic v;  // overflow (positive overflow or negative underflow)
    logic n;  // negative
  } flags_t;

  // Memory map (word addresses)
  localparam logic [31:0] ADDR_LEDR      = 32'h0000_C000;
  localparam logic [31:0] ADDR_SW        = 32'h0000_C001;
  localparam logic [31:0] ADDR_UART      = 32'h0000_C004;
  localparam logic [31:0] ADDR_COMPRESS  = 32'h0000_C008;
  localparam logic [31:0] IMAGE_MEM_BASE = 32'h0001_0000;
  localparam logic [31:0] WEIGHT_ROM_BASE = 32'h0002_0000;

  localparam logic [31:0] FP_POS_INF = 32'h7F80_0000;
  localparam logic [31:0] FP_QNAN    = 32'h7FC0_0000;

  // Pack sign * mag * 2^e2 into an IEEE-754 single, truncating.
  // mag is an exact unsigned magnitude (up to 64 bits), e2 an unbiased
  // power of two.
  function automatic logic [31:0] fp_pack_trunc(input logic sgn,
                                                input logic [63:0] mag,
                                                input int e2);
    int          p;        // position of the leading one
    int          be;       // biased exponent of the result
    int          sh;
    logic [63:0] m;
    logic [22:0] frac;
    p = -1;
    for (int i = 0; i < 64; i++) if (mag[i]) p = i;
    if (p < 0) return {sgn, 31'd0};
    be = p + e2 + 127;
    if (be >= 255) return {sgn, 8'hFF, 23'd0};
    if (be >= 1) begin
      // normal: keep the 23 bits under the leading one
      if (p >= 23) m = mag >> (p - 23);
      else         m = mag << (23 - p);
      frac = m[22:0];
      return {sgn, be[7:0], frac};
    end
    // subnormal: field = floor(mag * 2^(e2 + 149))
    sh = -(e2 + 149);
    if (sh >= 64)     m = 64'd0;
    else if (sh >= 0) m = mag >> sh;
    else              m = mag << (-sh);
    frac = m[22:0];
    return {sgn, 8'd0, frac};
  endfunction

endpackage
