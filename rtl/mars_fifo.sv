// mars_fifo: synchronous first-in first-out queue.
//
// DEPTH entries of WIDTH bits kept in a circular array with read and write
// pointers and an occupancy counter. push stores push_data at the tail,
// pop drops the head; both may happen in one cycle, also when the queue is
// full (the pop makes room). The head is shown combinationally on pop_data
// whenever empty is low. A push into a full queue (without a pop) or a pop
// from an empty one is a usage error, caught by the assertions.
// In MARS this one circuit is used three times: as the page order FIFO
// (PhyPageOrderQ, depth M, holding page-table entry indices), as the pending
// queue for requests the page table cannot take, and as the in-order buffer
// toward the memory controller. The paper calls the page order queue a simple
// FIFO; the circular-buffer construction is the usual one.
module mars_fifo #(
  parameter int unsigned WIDTH = 7,
  parameter int unsigned DEPTH = 128,
  parameter int unsigned PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] push_data,
  input  logic             pop,
  output logic [WIDTH-1:0] pop_data,
  output logic             empty,
  output logic             full,
  output logic [PTR_W:0]   count
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PTR_W-1:0] rd_ptr, wr_ptr;

  function automatic logic [PTR_W-1:0] incr(input logic [PTR_W-1:0] p);
    return (p == PTR_W'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= push_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= incr(wr_ptr);
      if (pop)  rd_ptr <= incr(rd_ptr);
      if (push && !pop) count <= count + 1'b1;
      else if (pop && !push) count <= count - 1'b1;
    end
  end

  assign pop_data = mem[rd_ptr];
  assign empty    = (count == '0);
  assign full     = (count == (PTR_W + 1)'(DEPTH));

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n)
                                   push && full |-> pop);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n)
                                   pop |-> !empty);

endmodule
