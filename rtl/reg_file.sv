// reg_file: 32 x 32-bit register file with two read ports and one write
// port, built from two dual_port_32x32 memories written in parallel, one
// per read port, plus bypass logic.
//
// Reading the register being written in the same cycle returns the new
// value (write-through bypass), so an instruction in decode sees the
// result of the one in write-back. R0 always reads as zero and writes to
// it are ignored. Structure (two dual-port 32x32 memories and bypass) and
// the R0 rule follow the processor description; the asynchronous read is
// this design's choice so that decode reads in the same cycle.
module reg_file (
  input  logic        clk,
  input  logic        we,
  input  logic [4:0]  waddr,
  input  logic [31:0] wdata,
  input  logic [4:0]  raddr1,
  input  logic [4:0]  raddr2,
  output logic [31:0] rdata1,
  output logic [31:0] rdata2
);
  logic [31:0] m1, m2;
  logic        wr;
  assign wr = we && (waddr != 5'd0);

  dual_port_32x32 u_bank1 (.clk(clk), .we(wr), .waddr(waddr), .wdata(wdata),
                           .raddr(raddr1), .rdata(m1));
  dual_port_32x32 u_bank2 (.clk(clk), .we(wr), .waddr(waddr), .wdata(wdata),
                           .raddr(raddr2), .rdata(m2));

  always_comb begin
    rdata1 = (raddr1 == 5'd0) ? 32'd0 : (wr && waddr == raddr1) ? wdata : m1;
    rdata2 = (raddr2 == 5'd0) ? 32'd0 : (wr && waddr == raddr2) ? wdata : m2;
  end
endmodule
