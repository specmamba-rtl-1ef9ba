// tb_ssm_state_controller: runs the controller against a behavioural FIFO, state buffer
// and linear unit and checks its schedule token by token.
//  * VERIFY of the paper's 9-node breadth-first example tree: in every tile the FIFO is
//    popped at tokens 1,4,6,7,9, the held parent is reused at 2,3,5,8, the root and nodes
//    1,2,4,7 are pushed, leaves 3,5,6,8,9 are dropped, the activation cache is written for
//    every token and one linear block is released per tile; with no back-pressure a tile
//    takes 1 + 9 cycles.
//  * DRAFT of a 3-token chain with random store back-pressure: every state is stored at
//    st_addr + (node-1)*NBLK + blk.
//  * COMMIT of path 1-4-7: tokens replayed in path order, only the last one stored at
//    st_addr + blk, no linear block consumed.
module tb_ssm_state_controller;
  import specmamba_pkg::*;
  localparam int L = 10, NBLK = 3, AW = 16, NW = 4;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc++;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic cmd_valid = 0, cmd_ready, cmd_fire, done, ld_start, ld_valid = 1, ld_ready, st_valid, st_ready = 1, sb_idle;
  mode_e cmd_mode = MODE_VERIFY, mode;
  logic [NW-1:0] cmd_ntok;
  logic [AW-1:0] cmd_ld_addr = '0, cmd_st_addr = '0, ld_base, st_addr;
  logic [NW-1:0] parent [L+1];
  logic [NW-1:0] path [L];
  logic [15:0] ld_count;
  logic blk_valid = 1, blk_ready, fifo_clear, fifo_push, fifo_push_root, fifo_pop, fifo_empty;
  logic [NW-1:0] fifo_push_node, fifo_head_node, node, node_parent;
  logic ssm_step, ssm_load_parent, first_blk, last_blk, cache_we, conv_valid, conv_adv, conv_shift, ev_reuse, ev_discard;
  logic [1:0] blk;
  ssm_state_controller #(.L(L), .NBLK(NBLK), .AW(AW)) dut (.*);

  // behavioural FIFO of node numbers
  int q [$];
  assign fifo_empty     = (q.size() == 0);
  assign fifo_head_node = (q.size() > 0) ? NW'(q[0]) : '0;
  assign sb_idle = 1'b1;
  bit bp = 0;
  always @(negedge clk) st_ready <= bp ? ($urandom_range(0, 2) == 0) : 1'b1;

  // per-tile event log
  string log_s;
  int stores [$];
  int n_blk_ready = 0, n_cache = 0;
  always @(posedge clk) if (rst_n) begin
    if (fifo_pop) begin
      if (q.size() == 0) begin failures++; $display("FAIL pop on empty"); end
      else void'(q.pop_front());
    end
    if (fifo_push) q.push_back(int'(fifo_push_node));
    if (ssm_step) begin
      log_s = {log_s, $sformatf("%0d", node), fifo_pop ? "P" : (ev_reuse ? "R" : "?")};
      if (fifo_push) log_s = {log_s, "+"};
      if (ev_discard) log_s = {log_s, "d"};
      log_s = {log_s, " "};
    end
    if (st_valid && st_ready) stores.push_back(int'(st_addr));
    n_blk_ready += int'(blk_ready);
    n_cache += int'(cache_we);
  end

  task automatic run(mode_e m, int ntok, output int cycles);
    int t0;
    @(negedge clk);
    cmd_valid = 1; cmd_mode = m; cmd_ntok = NW'(ntok);
    @(negedge clk); cmd_valid = 0; t0 = cyc;
    while (!done) @(negedge clk);
    cycles = cyc - t0;
  endtask

  initial begin
    int tp [10] = '{0, 0, 0, 0, 1, 1, 2, 4, 4, 7};
    int cycles;
    for (int i = 0; i <= L; i++) parent[i] = (i < 10) ? NW'(tp[i]) : '0;
    for (int j = 0; j < L; j++) path[j] = '0;
    repeat (2) @(negedge clk); rst_n = 1;

    // ---- VERIFY of the example tree ----
    log_s = "";
    run(MODE_VERIFY, 9, cycles);
    begin
      string exp1, expall;
      exp1 = "1P+ 2R+ 3Rd 4P+ 5Rd 6Pd 7P+ 8Rd 9Pd ";
      expall = {exp1, exp1, exp1};
      checks++;
      if (log_s != expall) begin failures++; $display("FAIL schedule\n got %s\n exp %s", log_s, expall); end
    end
    checks++; if (n_blk_ready != NBLK) begin failures++; $display("FAIL blk_ready %0d", n_blk_ready); end
    checks++; if (n_cache != 9*NBLK) begin failures++; $display("FAIL cache writes %0d", n_cache); end
    checks++; if (stores.size() != 0) begin failures++; $display("FAIL verify stored states"); end
    checks++; if (q.size() != 0) begin failures++; $display("FAIL FIFO not empty"); end
    // cmd taken, then per tile 1 root + 9 tokens, then one drain cycle
    checks++; if (cycles != NBLK*10 + 1) begin failures++; $display("FAIL verify took %0d cycles, exp %0d", cycles, NBLK*10 + 1); end

    // ---- DRAFT chain with store back-pressure ----
    parent[1] = 0; parent[2] = 1; parent[3] = 2;
    cmd_st_addr = 16'h100; bp = 1; n_blk_ready = 0;
    run(MODE_DRAFT, 3, cycles);
    bp = 0;
    checks++;
    if (stores.size() != 3*NBLK) begin failures++; $display("FAIL draft stores %0d", stores.size()); end
    else for (int b = 0; b < NBLK; b++) for (int n = 1; n <= 3; n++) begin
      checks++;
      if (stores[b*3 + n-1] != 16'h100 + (n-1)*NBLK + b) begin failures++; $display("FAIL draft store addr %h", stores[b*3+n-1]); end
    end
    checks++; if (n_blk_ready != NBLK) begin failures++; $display("FAIL draft blk_ready"); end

    // ---- COMMIT path 1-4-7 ----
    stores.delete(); log_s = ""; n_blk_ready = 0; n_cache = 0;
    path[0] = 1; path[1] = 4; path[2] = 7; cmd_st_addr = 16'h200; blk_valid = 0;
    run(MODE_COMMIT, 3, cycles);
    checks++;
    if (log_s != "1P+ 4P+ 7Pd 1P+ 4P+ 7Pd 1P+ 4P+ 7Pd ") begin failures++; $display("FAIL commit schedule %s", log_s); end
    checks++;
    if (stores.size() != NBLK || stores[0] != 16'h200 || stores[NBLK-1] != 16'h200 + NBLK-1) begin failures++; $display("FAIL commit stores"); end
    checks++; if (n_blk_ready != 0 || n_cache != 0) begin failures++; $display("FAIL commit used linear/cache write"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
