// amu_fifo: synchronous first-in first-out queue, the "FIFO" of the AMU's pipeline-side
// MemAcc block. The AMU uses one to hand requests from the pipeline to the engine in the
// L2 controller, and one to hold finished request ids until getfin collects them.
//
// Interface: push/pop strobes, first-word-fall-through read (pop_data shows the oldest
// entry while empty is low), full/empty flags and an occupancy count. A push and a pop
// in the same cycle are both taken, also when full (the pop frees the slot). Pushing a
// full FIFO or popping an empty one is a usage error, caught by the assertions.
// Depth and element type are this design's choices; the paper only names the FIFO.
module amu_fifo #(
  parameter type         T     = logic [63:0],
  parameter int unsigned DEPTH = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     push,
  input  T                         push_data,
  input  logic                     pop,
  output T                         pop_data,
  output logic                     full,
  output logic                     empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T                mem [DEPTH];
  logic [AW-1:0]   rd_ptr, wr_ptr;

  assign empty    = (count == 0);
  assign full     = (count == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign pop_data = mem[rd_ptr];

  logic do_push, do_pop;
  assign do_pop  = pop && !empty;
  assign do_push = push && (!full || do_pop);

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= inc(wr_ptr);
      if (do_pop)  rd_ptr <= inc(rd_ptr);
      if (do_push && !do_pop)      count <= count + 1'b1;
      else if (do_pop && !do_push) count <= count - 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= push_data;
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);
endmodule
