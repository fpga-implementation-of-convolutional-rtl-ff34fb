// dual_port_32x32: 32-entry x 32-bit memory with one write port and one
// read port, the building block of the register file.
//
// Writes happen on the rising clock edge when we is high. The read port is
// asynchronous (combinational on raddr), as a distributed/LUT RAM; the
// write-before-read bypass is added by the register file around it.
// Contents start at zero.
module dual_port_32x32 (
  input  logic        clk,
  input  logic        we,
  input  logic [4:0]  waddr,
  input  logic [31:0] wdata,
  input  logic [4:0]  raddr,
  output logic [31:0] rdata
);
  logic [31:0] mem [32] = '{default: '0};
  always_ff @(posedge clk) if (we) mem[waddr] <= wdata;
  assign rdata = mem[raddr];
endmodule
