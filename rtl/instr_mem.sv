// instr_mem: instruction memory of the processor, 1K words of 32 bits.
//
// Read asynchronously by the fetch stage at the program counter. A write
// port (prog_we, prog_addr, prog_data) lets a host or testbench load the
// program; on the board the program was loaded from a hex file at
// configuration time, which this port replaces. Contents start at zero.
// The size follows the processor description ("Instr_mem only has 1K
// entries"); the load port is this design's choice.
module instr_mem #(
  parameter int DEPTH = 1024
) (
  input  logic                     clk,
  input  logic [$clog2(DEPTH)-1:0] addr,
  output logic [31:0]              instr,
  input  logic                     prog_we,
  input  logic [$clog2(DEPTH)-1:0] prog_addr,
  input  logic [31:0]              prog_data
);
  logic [31:0] mem [DEPTH] = '{default: '0};
  always_ff @(posedge clk) if (prog_we) mem[prog_addr] <= prog_data;
  assign instr = mem[addr];
endmodule
