// sync_fifo: single-clock first-word-fall-through FIFO.
//
// Used as the block-RAM buffer behind data acquisition and as the split
// buffer in front of each mapper of the map-reduce engine. A word written
// with push appears on dout while empty is low; pop removes it. push is
// ignored when full and pop when empty. Both may occur in the same cycle.
// Storage is a plain array (maps onto block RAM with asynchronous read as
// distributed RAM); the paper asks only for BRAM FIFOs, so width, depth and
// the first-word-fall-through behaviour are this design's choices.
// An immediate assertion checks that the occupancy never exceeds DEPTH.
module sync_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 1024
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] din,
  input  logic             pop,
  output logic [WIDTH-1:0] dout,
  output logic             full,
  output logic             empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic             do_push, do_pop;

  assign full    = (count == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign empty   = (count == '0);
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign dout    = mem[rd_ptr];

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= inc(wr_ptr);
      if (do_pop)  rd_ptr <= inc(rd_ptr);
      count <= count + $bits(count)'(do_push) - $bits(count)'(do_pop);
      // the occupancy never exceeds the depth
      assert (count <= ($bits(count))'(DEPTH));
    end
  end


endmodule
