// task_queue: first-in first-out queue of tasks (or any packed type).
//
// A plain synchronous FIFO of DEPTH entries. push writes din when not full,
// pop removes the head when not empty; head is the oldest entry and is valid
// while empty is low. Pushing and popping in the same cycle is allowed. count
// gives the number of entries. Reset empties the queue.
//
// From the paper: the cluster's task queues hold the layer-wise and
// sub-layer tasks of the requests waiting for the scheduler, and the load
// balancer's request queue hands requests to the clusters first-in
// first-out. The depth and the storage are this design's own.
module task_queue #(
  parameter type         T     = logic [31:0],
  parameter int unsigned DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     push,
  input  T                         din,
  input  logic                     pop,
  output T                         head,
  output logic                     empty,
  output logic                     full,
  output logic [$clog2(DEPTH):0]   count
);
  localparam int unsigned AW = $clog2(DEPTH);
  T            mem [DEPTH];
  logic [AW-1:0] rp, wp;

  assign empty = (count == 0);
  assign full  = (count == (AW+1)'(DEPTH));
  assign head  = mem[rp];

  logic do_push, do_pop;
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rp <= '0; wp <= '0; count <= '0;
      for (int i = 0; i < int'(DEPTH); i++) mem[i] <= '0;
    end else begin
      if (do_push) begin
        mem[wp] <= din;
        wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1;
      end
      if (do_pop) rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1;
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  // a push into a full queue or a pop from an empty one is a caller error
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> !full);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);
endmodule
