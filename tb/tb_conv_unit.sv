// tb_conv_unit: checks the tree-aware causal convolution. Random weights for both models;
// a 6-token tree (parents 0,0,1,1,2,4) is applied per tile and every output is compared
// with a reference that walks the ancestor chain and then the history. Then a path is
// committed with shift_* (target history), a draft chain is run with adv (draft history),
// and the tree is applied again so that both histories are exercised.
module tb_conv_unit;
  import specmamba_pkg::*;
  localparam int K = 3, LANES = 2, L = 6, NBLK = 2;
  typedef logic signed [15:0] q_t;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  int checks = 0, failures = 0;
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic q_t rsat(input longint v);
    if (v > 32767) return 16'sh7fff; if (v < -32768) return 16'sh8000; return q_t'(v);
  endfunction
  function automatic q_t rmul(input q_t a, input q_t b); return rsat((longint'(a) * longint'(b)) >>> 8); endfunction

  logic cw_we = 0, cw_model, valid = 0, adv = 0, model, shift_valid = 0, shift_model;
  logic cw_lane; logic [1:0] cw_tap; fx_t cw_data;
  logic blk, shift_blk; logic [2:0] node, parent, shift_node;
  fx_t in_v [LANES]; fx_t out_v [LANES];
  conv_unit #(.K(K), .LANES(LANES), .L(L), .NBLK(NBLK)) dut (.*);

  q_t w [2][LANES][K];
  q_t hist [2][NBLK][K-1][LANES];
  q_t nv [NBLK][L+1][LANES];
  int par [L+1] = '{0, 0, 0, 1, 1, 2, 4};

  task automatic apply(int m, int b, int n, int p, bit a);
    q_t e [LANES];
    @(negedge clk);
    valid = 1; adv = a; model = m[0]; blk = b[0]; node = 3'(n); parent = 3'(p);
    for (int c = 0; c < LANES; c++) begin in_v[c] = q_t'($urandom_range(0, 1000)) - 16'sd500; nv[b][n][c] = in_v[c]; end
    for (int c = 0; c < LANES; c++) begin
      longint s; int cur, h;
      s = rmul(w[m][c][0], in_v[c]); cur = a ? 0 : p; h = 0;
      for (int k = 1; k < K; k++)
        if (cur != 0) begin s += rmul(w[m][c][k], nv[b][cur][c]); cur = par[cur]; end
        else begin s += rmul(w[m][c][k], hist[m][b][h][c]); h++; end
      e[c] = rsat(s);
    end
    #1;
    for (int c = 0; c < LANES; c++) begin
      checks++;
      if (out_v[c] != e[c]) begin failures++; $display("FAIL m%0d b%0d n%0d lane %0d: %0d vs %0d", m, b, n, c, out_v[c], e[c]); end
    end
    if (a) begin
      for (int k = K-2; k > 0; k--) hist[m][b][k] = hist[m][b][k-1];
      hist[m][b][0] = nv[b][n];
    end
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int m = 0; m < 2; m++) for (int b = 0; b < NBLK; b++) for (int k = 0; k < K-1; k++) for (int c = 0; c < LANES; c++) hist[m][b][k][c] = 0;
    for (int m = 0; m < 2; m++) for (int c = 0; c < LANES; c++) for (int k = 0; k < K; k++) begin
      @(negedge clk); cw_we = 1; cw_model = m[0]; cw_lane = c[0]; cw_tap = 2'(k);
      w[m][c][k] = q_t'($urandom_range(0, 600)) - 16'sd300; cw_data = w[m][c][k];
    end
    @(negedge clk); cw_we = 0;
    for (int b = 0; b < NBLK; b++) for (int n = 1; n <= L; n++) apply(1, b, n, par[n], 0);
    // commit path 1 -> 3 into the target history
    @(negedge clk); valid = 0;
    for (int b = 0; b < NBLK; b++) foreach (par[i]) if (i == 1 || i == 3) begin
      @(negedge clk); shift_valid = 1; shift_model = 1; shift_blk = b[0]; shift_node = 3'(i);
      for (int k = K-2; k > 0; k--) hist[1][b][k] = hist[1][b][k-1];
      hist[1][b][0] = nv[b][i];
    end
    @(negedge clk); shift_valid = 0;
    // draft chain: three tokens, each appended to the draft history
    for (int n = 1; n <= 3; n++) apply(0, 0, 1, 0, 1);
    // the tree again on the target model, now with a non-zero history
    for (int b = 0; b < NBLK; b++) for (int n = 1; n <= L; n++) apply(1, b, n, par[n], 0);
    @(negedge clk); valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
