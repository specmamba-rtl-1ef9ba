// tb_activation_cache: fills every (tile, token) entry with random dt, x and B values,
// then reads them all back in a different order and compares; then rewrites part of the
// cache and checks that only those entries changed.
module tb_activation_cache;
  import specmamba_pkg::*;
  localparam int L = 4, NBLK = 3, G = 2;
  logic clk = 0; always #5 clk = ~clk;
  int checks = 0, failures = 0;
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  logic we = 0; logic [1:0] w_blk, r_blk; logic [2:0] w_node, r_node;
  fx_t w_dt, w_x, r_dt, r_x; fx_t w_b [G]; fx_t r_b [G];
  activation_cache #(.L(L), .NBLK(NBLK), .G(G)) dut (.*);
  fx_t m_dt [NBLK][L+1]; fx_t m_x [NBLK][L+1]; fx_t m_b [NBLK][L+1][G];

  task automatic wr(int b, int n);
    @(negedge clk); we = 1; w_blk = 2'(b); w_node = 3'(n);
    w_dt = fx_t'($urandom); w_x = fx_t'($urandom); w_b[0] = fx_t'($urandom); w_b[1] = fx_t'($urandom);
    m_dt[b][n] = w_dt; m_x[b][n] = w_x; m_b[b][n][0] = w_b[0]; m_b[b][n][1] = w_b[1];
  endtask
  task automatic rd_all();
    @(negedge clk); we = 0;
    for (int n = L; n >= 1; n--) for (int b = NBLK-1; b >= 0; b--) begin
      r_blk = 2'(b); r_node = 3'(n); #1;
      checks++;
      if (r_dt != m_dt[b][n] || r_x != m_x[b][n] || r_b[0] != m_b[b][n][0] || r_b[1] != m_b[b][n][1]) begin
        failures++; $display("FAIL entry blk %0d node %0d", b, n);
      end
    end
  endtask
  initial begin
    for (int b = 0; b < NBLK; b++) for (int n = 1; n <= L; n++) wr(b, n);
    rd_all();
    wr(1, 2); wr(2, 4);
    rd_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
