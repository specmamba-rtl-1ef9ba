// tree_state_fifo: on-chip FIFO of hidden-state tiles for breadth-first tree verification.
//
// During verification the tree is walked in breadth-first order, so the parents whose
// children are still to come are needed in exactly the order they were produced. A node's
// state tile is pushed when the node has children and popped when the walk reaches its
// first child; leaves are never pushed. With N tree tokens at most N/2 entries of G
// elements are live, which sets DEPTH. This follows the paper. Each entry also keeps its
// node number so that the controller can check the head is the parent it expects.
//
// Interface: show-ahead head (head_data/head_node valid while !empty); push and pop may
// both be asserted in one cycle. A push into a full FIFO or a pop from an empty one is
// ignored and sets the sticky overflow / underflow flag (cleared by clear or reset).
// Timing: a pushed entry is visible at the head from the next cycle.
module tree_state_fifo
  import specmamba_pkg::*;
#(
  parameter int DEPTH = 8,
  parameter int G     = 8,
  parameter int NW    = 5,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          push,
  input  fx_t           push_data [G],
  input  logic [NW-1:0] push_node,
  input  logic          pop,
  output fx_t           head_data [G],
  output logic [NW-1:0] head_node,
  output logic [AW:0]   count,
  output logic          empty,
  output logic          full,
  output logic          overflow,
  output logic          underflow
);

  fx_t           mem_d [DEPTH][G];
  logic [NW-1:0] mem_n [DEPTH];
  logic [AW-1:0] rd_q, wr_q;

  assign empty = (count == '0);
  assign full  = (count == (AW+1)'(DEPTH));
  wire do_pop  = pop && !empty;
  wire do_push = push && (!full || do_pop);

  assign head_data = mem_d[rd_q];
  assign head_node = mem_n[rd_q];

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) begin
      mem_d[wr_q] <= push_data;
      mem_n[wr_q] <= push_node;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q <= '0; wr_q <= '0; count <= '0; overflow <= 1'b0; underflow <= 1'b0;
    end else if (clear) begin
      rd_q <= '0; wr_q <= '0; count <= '0; overflow <= 1'b0; underflow <= 1'b0;
    end else begin
      if (do_push) wr_q <= inc(wr_q);
      if (do_pop)  rd_q <= inc(rd_q);
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
      if (push && !do_push) overflow  <= 1'b1;
      if (pop && empty)     underflow <= 1'b1;
    end
  end

endmodule
