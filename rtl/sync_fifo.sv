// sync_fifo: single-clock first-in first-out buffer.
//
// DEPTH entries of WIDTH bits. push writes din when not full; pop removes
// the oldest entry when not empty; dout shows the oldest entry
// (first-word fall-through). Pushing when full or popping when empty is
// ignored (and flagged by an assertion). count holds the fill level.
module sync_fifo #(
  parameter int WIDTH = 8,
  parameter int DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] din,
  input  logic             pop,
  output logic [WIDTH-1:0] dout,
  output logic             full,
  output logic             empty,
  output logic [$clog2(DEPTH):0] count
);
  localparam int AW = $clog2(DEPTH);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    rp, wp;
  logic             do_push, do_pop;

  assign full    = (count == (AW+1)'(DEPTH));
  assign empty   = (count == '0);
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign dout    = mem[rp];

  always_ff @(posedge clk) if (do_push) mem[wp] <= din;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp <= '0; wp <= '0; count <= '0;
    end else begin
      if (do_push) wp <= (int'(wp) == DEPTH - 1) ? '0 : wp + 1'b1;
      if (do_pop)  rp <= (int'(rp) == DEPTH - 1) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(push && full))
    else $warning("sync_fifo: push while full dropped");
endmodule
