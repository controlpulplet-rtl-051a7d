// cpl_fifo: synchronous first-word-fall-through FIFO.
//
// DEPTH entries of WIDTH bits held in a register array, with read and
// write pointers and an occupancy counter. The head entry is visible on
// rdata_o whenever valid_o is high; pop_i removes it. push_i writes wdata_i
// when ready_o (not full) is high; a push and a pop may happen in the same
// cycle, also when the FIFO is full (the pop frees the slot the push
// takes). Used for the D2D credit buffer and the DMA data buffers; a
// general helper, not a block of the paper on its own.
module cpl_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 8,
  parameter int unsigned CNT_W = $clog2(DEPTH + 1)
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic [WIDTH-1:0] wdata_i,
  input  logic             push_i,
  output logic             ready_o,
  output logic [WIDTH-1:0] rdata_o,
  output logic             valid_o,
  input  logic             pop_i,
  output logic [CNT_W-1:0] count_o
);
  localparam int unsigned PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem_q [DEPTH];
  logic [PTR_W-1:0] wptr_q, rptr_q;
  logic [CNT_W-1:0] cnt_q;
  logic do_push, do_pop;

  assign valid_o = (cnt_q != '0);
  assign ready_o = (cnt_q != CNT_W'(DEPTH)) || pop_i;
  assign do_pop  = pop_i && valid_o;
  assign do_push = push_i && ready_o;
  assign rdata_o = mem_q[rptr_q];
  assign count_o = cnt_q;

  function automatic logic [PTR_W-1:0] inc(logic [PTR_W-1:0] p);
    return (p == PTR_W'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wptr_q <= '0;
      rptr_q <= '0;
      cnt_q  <= '0;
    end else begin
      if (do_push) wptr_q <= inc(wptr_q);
      if (do_pop)  rptr_q <= inc(rptr_q);
      cnt_q <= cnt_q + CNT_W'(do_push) - CNT_W'(do_pop);
    end
  end

  always_ff @(posedge clk_i) begin
    if (do_push) mem_q[wptr_q] <= wdata_i;
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) pop_i |-> valid_o)
    else $error("pop from empty FIFO");
endmodule
