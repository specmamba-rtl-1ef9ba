// tb_tree_state_fifo: random push/pop (also together) against a queue model, then the
// paper's example schedule (pushes of nodes 0,1,2,4,7 and pops in the same order), then a
// deliberate overflow and underflow, which must raise the sticky flags and lose nothing.
module tb_tree_state_fifo;
  import specmamba_pkg::*;
  localparam int DEPTH = 4, G = 2, NW = 5;
  logic clk = 0, rst_n = 0, clear = 0, push = 0, pop = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  fx_t push_data [G]; fx_t head_data [G];
  logic [NW-1:0] push_node, head_node;
  logic [2:0] count; logic empty, full, overflow, underflow;
  tree_state_fifo #(.DEPTH(DEPTH), .G(G), .NW(NW)) dut (.*);

  typedef struct { int node; fx_t d0; fx_t d1; } ent_t;
  ent_t q [$];

  task automatic step(input bit pu, input bit po, input int n);
    @(negedge clk);
    // check head before the edge
    checks++;
    if (int'(count) != q.size() || empty != (q.size() == 0) || full != (q.size() == DEPTH)) begin
      failures++; $display("FAIL count %0d vs %0d", count, q.size());
    end
    if (q.size() > 0) begin
      checks++;
      if (int'(head_node) != q[0].node || head_data[0] != q[0].d0 || head_data[1] != q[0].d1) begin
        failures++; $display("FAIL head %0d vs %0d", head_node, q[0].node);
      end
    end
    push = pu; pop = po; push_node = NW'(n);
    push_data[0] = fx_t'($urandom); push_data[1] = fx_t'($urandom);
    @(posedge clk);
    begin
      bit dpop, dpush;
      dpop = po && q.size() > 0;
      dpush = pu && (q.size() < DEPTH || dpop);
      if (dpop) void'(q.pop_front());
      if (dpush) begin ent_t e; e.node = n; e.d0 = push_data[0]; e.d1 = push_data[1]; q.push_back(e); end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      bit pu, po;
      pu = $urandom_range(0,1); po = $urandom_range(0,1);
      if (!pu && q.size() == DEPTH) pu = 0;
      if (po && q.size() == 0) po = 0;
      if (pu && !po && q.size() == DEPTH) pu = 0;
      step(pu, po, i % 32);
    end
    while (q.size() > 0) step(0, 1, 0);
    // example tree of the paper: load 0; T1 pop0 push1; T2 push2; T3 -; T4 pop1 push4; T5 -;
    // T6 pop2; T7 pop4 push7; T8 -; T9 pop7
    step(1,0,0); step(1,1,1); step(1,0,2); step(0,0,0); step(1,1,4); step(0,0,0);
    step(0,1,0); step(1,1,7); step(0,0,0); step(0,1,0);
    @(negedge clk);
    checks++; if (!empty) begin failures++; $display("FAIL not empty after example"); end
    checks++; if (overflow || underflow) begin failures++; $display("FAIL spurious flag"); end
    // overflow
    for (int i = 0; i < DEPTH; i++) step(1, 0, i);
    @(negedge clk); push = 1; pop = 0; @(posedge clk); @(negedge clk); push = 0;
    checks++; if (!overflow || int'(count) != DEPTH) begin failures++; $display("FAIL overflow not flagged"); end
    while (q.size() > 0) step(0, 1, 0);
    @(negedge clk); pop = 1; @(posedge clk); @(negedge clk); pop = 0;
    checks++; if (!underflow) begin failures++; $display("FAIL underflow not flagged"); end
    clear = 1; @(negedge clk); clear = 0;
    checks++; if (overflow || underflow || !empty) begin failures++; $display("FAIL clear"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
