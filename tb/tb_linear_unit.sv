// tb_linear_unit: checks the weight-broadcast MAC array against a direct matrix product.
//
// Small sizes (4 tokens, 3 blocks of 3 outputs, 4 tiles of 2 inputs). Pass 1 streams a
// tile every cycle with the output always taken and checks that the last block appears
// NBLK*T_TILES cycles after start. Pass 2 uses random gaps in the weight stream and holds
// out_ready low for a while, which must stall the unit without losing data.
module tb_linear_unit;
  import specmamba_pkg::*;
  localparam int L = 4, TILE_IN = 2, T_TILES = 4, BLK_OUT = 3, NBLK = 3, SH = 4;
  localparam int WW = BLK_OUT*TILE_IN*4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc++;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic act_we = 0, start = 0, busy, stall, w_valid = 0, w_ready, out_valid, out_ready;
  logic [1:0] act_tok; logic [1:0] act_tile; logic [TILE_IN*4-1:0] act_data;
  logic [WW-1:0] w_data;
  logic [1:0] out_blk;
  fx_t out_data [L][BLK_OUT];

  linear_unit #(.L(L), .TILE_IN(TILE_IN), .T_TILES(T_TILES), .BLK_OUT(BLK_OUT), .NBLK(NBLK),
                .ACT_W(4), .WGT_W(4), .LIN_SHIFT(SH)) dut (.*);

  int act [L][T_TILES*TILE_IN];
  int wt  [NBLK][T_TILES][BLK_OUT][TILE_IN];
  int nstall = 0;
  always @(negedge clk) begin #2; nstall += int'(stall); end

  function automatic int ref_out(int l, int b, int o);
    int s; s = 0;
    for (int t = 0; t < T_TILES; t++) for (int i = 0; i < TILE_IN; i++) s += act[l][t*TILE_IN+i] * wt[b][t][o][i];
    s = s * (1 << SH);
    if (s > 32767) s = 32767; if (s < -32768) s = -32768;
    return s;
  endfunction

  // collector
  int blocks_seen, last_cyc;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    for (int l = 0; l < L; l++) for (int o = 0; o < BLK_OUT; o++) begin
      checks++;
      if (int'(out_data[l][o]) != ref_out(l, int'(out_blk), o)) begin
        failures++; $display("FAIL blk %0d tok %0d out %0d: %0d vs %0d", out_blk, l, o, out_data[l][o], ref_out(l, int'(out_blk), o));
      end
    end
    checks++; if (int'(out_blk) != blocks_seen) begin failures++; $display("FAIL block order"); end
    blocks_seen++; last_cyc = cyc;
  end

  bit slow_sink = 0;
  int sink_cnt = 0;
  // slow sink: takes a block only every 12th cycle
  always @(negedge clk) begin sink_cnt++; out_ready <= slow_sink ? (sink_cnt % 12 == 0) : 1'b1; end

  task automatic pass(input bit gaps);
    int start_cyc;
    slow_sink = gaps;
    for (int l = 0; l < L; l++) for (int t = 0; t < T_TILES; t++) begin
      @(negedge clk); act_we = 1; act_tok = 2'(l); act_tile = 2'(t);
      for (int i = 0; i < TILE_IN; i++) begin act[l][t*TILE_IN+i] = $urandom_range(0,15) - 8; act_data[i*4 +: 4] = 4'(act[l][t*TILE_IN+i]); end
    end
    for (int b = 0; b < NBLK; b++) for (int t = 0; t < T_TILES; t++) for (int o = 0; o < BLK_OUT; o++) for (int i = 0; i < TILE_IN; i++)
      wt[b][t][o][i] = $urandom_range(0,15) - 8;
    @(negedge clk); act_we = 0; start = 1; blocks_seen = 0; start_cyc = cyc;
    @(negedge clk); start = 0;
    for (int b = 0; b < NBLK; b++) for (int t = 0; t < T_TILES; t++) begin
      while (gaps && $urandom_range(0,2) == 0) begin w_valid = 0; @(negedge clk); end
      w_valid = 1;
      for (int o = 0; o < BLK_OUT; o++) for (int i = 0; i < TILE_IN; i++) w_data[(o*TILE_IN+i)*4 +: 4] = 4'(wt[b][t][o][i]);
      #1; while (!w_ready) begin @(negedge clk); #1; end
      @(negedge clk);
    end
    w_valid = 0;
    repeat (10) @(negedge clk);
    slow_sink = 0;
    repeat (10) @(negedge clk);
    checks++; if (blocks_seen != NBLK) begin failures++; $display("FAIL %0d blocks", blocks_seen); end
    if (!gaps) begin
      checks++;
      // one cycle to take start, NBLK*T_TILES tile cycles, one cycle for the output register
      if (last_cyc - start_cyc != NBLK*T_TILES + 2) begin failures++; $display("FAIL took %0d cycles, expected %0d", last_cyc - start_cyc, NBLK*T_TILES + 2); end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk); rst_n = 1;
    pass(0);
    pass(1);
    checks++; if (nstall == 0) begin failures++; $display("FAIL no stall seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
