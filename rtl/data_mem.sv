// data_mem: the processor's internal data memory, 8K words of 32 bits.
//
// Written on the rising clock edge when we is high, read asynchronously in
// the memory stage. The 8K size follows the processor description (data
// memory "with 8K entries"; the firmware map uses addresses up to 8009);
// the asynchronous read is this design's choice.
module data_mem #(
  parameter int DEPTH = 8192
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic [31:0]              wdata,
  output logic [31:0]              rdata
);
  logic [31:0] mem [DEPTH];
  always_ff @(posedge clk) if (we) mem[addr] <= wdata;
  assign rdata = mem[addr];
endmodule
