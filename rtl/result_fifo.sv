// result_fifo: the FIFO that carries the batch from one tree level to the next.
//
// Holds up to DEPTH entries of type fifo_entry_t. During the traversal of
// an inner level, each entry is a child address plus the number of search
// keys routed to that child; the entries of the next level are appended
// behind those of the current level that are still waiting. After the
// leaf level the FIFO holds one result per search key, in key order.
// Because one popped entry with n keys produces at most n new entries,
// DEPTH equal to the largest batch is always enough.
// Interface: push/push_data write at the tail; the head entry is always
// visible on head (first-word fall-through) while empty is low, and pop
// removes it. Push and pop may happen in the same cycle. count gives the
// occupancy. Synchronous reset empties the FIFO. The overflow/underflow
// assertions state the usage rule. A circular buffer of DEPTH = 1000
// entries follows the design ("the size of the FIFO is determined by the
// batch size"); fall-through reads are this design's choice.
module result_fifo
  import bpt_pkg::*;
#(
  parameter int unsigned DEPTH = 1000,
  parameter int unsigned PTR_W = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          push,
  input  fifo_entry_t   push_data,
  input  logic          pop,
  output fifo_entry_t   head,
  output logic          empty,
  output logic          full,
  output logic [PTR_W:0] count
);
  fifo_entry_t      mem [DEPTH];
  logic [PTR_W-1:0] wr_ptr, rd_ptr;

  function automatic logic [PTR_W-1:0] next_ptr(logic [PTR_W-1:0] p);
    return (p == PTR_W'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  assign empty = (count == 0);
  assign full  = (count == (PTR_W+1)'(DEPTH));
  assign head  = mem[rd_ptr];

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= push_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= next_ptr(wr_ptr);
      if (pop)  rd_ptr <= next_ptr(rd_ptr);
      count <= count + (PTR_W+1)'(push) - (PTR_W+1)'(pop);
    end
  end

  a_no_overflow  : assert property (@(posedge clk) disable iff (rst) push |-> (!full || pop));
  a_no_underflow : assert property (@(posedge clk) disable iff (rst) pop  |-> !empty);
endmodule
