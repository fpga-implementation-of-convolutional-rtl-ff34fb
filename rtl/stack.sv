// stack: the 1K-entry last-in first-out memory used by PUSH and POP.
//
// A 1024 x 32 memory and a stack pointer SP that starts at DEPTH-1 and
// points at the next free entry. PUSH writes the value at SP and
// decrements SP; POP increments SP and reads the entry it then points at,
// so the last value pushed is the first popped. The popped value is
// registered: it appears on pop_data one clock after pop, i.e. at the
// execute/memory pipeline boundary, like the EXT_ALU result. SP wraps
// around at both ends (overflow and underflow are not detected).
//
// Depth 1K and its place in the execute stage follow the processor
// description. The instruction table words PUSH as "DataMem[SP] <= R1;
// decrement SP" and POP as "R1 <= DataMem[SP]; increment SP", which read
// literally would pop the empty slot; this design keeps the PUSH order and
// increments before reading on POP so that the stack is a true LIFO.
module stack #(
  parameter int DEPTH = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        push,
  input  logic        pop,
  input  logic [31:0] push_data,
  output logic [31:0] pop_data,
  output logic [$clog2(DEPTH)-1:0] sp
);
  localparam int AW = $clog2(DEPTH);
  logic [31:0] mem [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    sp <= AW'(DEPTH - 1);
    else if (push) sp <= sp - 1'b1;
    else if (pop)  sp <= sp + 1'b1;
  end

  always_ff @(posedge clk) begin
    if (push) mem[sp] <= push_data;
    if (pop)  pop_data <= mem[sp + 1'b1];
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(push && pop))
    else $error("stack: push and pop in the same cycle");
endmodule
