// tb_ssm_unit: drives the SSM datapath with random tokens over a small tree and compares
// the new state tile after every step and each token's gated output with a reference
// written with its own fixed-point helpers. Three tiles per token; tokens 1..4 with
// parents 0,0,1,1 exercise both parent loading and parent reuse.
module tb_ssm_unit;
  import specmamba_pkg::*;
  localparam int G = 4, L = 4, NBLK = 3;
  typedef logic signed [15:0] q_t;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
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
  function automatic q_t radd(input q_t a, input q_t b); return rsat(longint'(a) + longint'(b)); endfunction

  logic step = 0, load_parent = 0, first_blk, last_blk, y_valid;
  fx_t parent_in [G]; fx_t b_tile [G]; fx_t c_tile [G]; fx_t h_next [G];
  fx_t a_coef, d_coef, dt, x, z, y_data;
  logic [2:0] tok, y_tok;
  ssm_unit #(.G(G), .L(L)) dut (.*);

  q_t hs [L+1][NBLK][G];
  q_t yacc [L+1];
  int par [L+1] = '{0, 0, 0, 1, 1};

  initial begin
    a_coef = 16'sd200; d_coef = -16'sd40;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int b = 0; b < NBLK; b++) for (int g = 0; g < G; g++) hs[0][b][g] = q_t'($urandom_range(0, 800)) - 16'sd400;
    for (int b = 0; b < NBLK; b++) begin
      for (int n = 1; n <= L; n++) begin
        q_t s_dt, s_x, s_z, hc;
        longint s;
        bit lp;
        s_dt = q_t'($urandom_range(0, 300)); s_x = q_t'($urandom_range(0, 600)) - 16'sd300;
        s_z = q_t'($urandom_range(0, 600)) - 16'sd300;
        lp = (n == 1) || (par[n] != par[n-1]);
        @(negedge clk);
        step = 1; load_parent = lp; tok = 3'(n); first_blk = (b == 0); last_blk = (b == NBLK-1);
        dt = s_dt; x = s_x; z = s_z;
        for (int g = 0; g < G; g++) begin
          b_tile[g] = q_t'($urandom_range(0, 600)) - 16'sd300;
          c_tile[g] = q_t'($urandom_range(0, 600)) - 16'sd300;
          // when the parent is reused the input bus carries garbage: it must be ignored
          parent_in[g] = lp ? hs[par[n]][b][g] : q_t'($urandom);
        end
        s = 0;
        for (int g = 0; g < G; g++) begin
          hs[n][b][g] = radd(rmul(rmul(a_coef, s_dt), hs[par[n]][b][g]), rmul(rmul(b_tile[g], s_dt), s_x));
          s += rmul(hs[n][b][g], c_tile[g]);
        end
        hc = rsat(s);
        yacc[n] = (b == 0) ? hc : radd(yacc[n], hc);
        #1;
        for (int g = 0; g < G; g++) begin
          checks++;
          if (h_next[g] != hs[n][b][g]) begin failures++; $display("FAIL h blk %0d tok %0d g %0d: %0d vs %0d", b, n, g, h_next[g], hs[n][b][g]); end
        end
        if (b == NBLK-1) begin
          q_t yexp;
          yexp = rmul(radd(yacc[n], rmul(d_coef, s_x)), s_z);
          @(negedge clk); step = 0; load_parent = 0;
          checks++;
          if (!y_valid || int'(y_tok) != n || y_data != yexp) begin failures++; $display("FAIL y tok %0d: %0d vs %0d", n, y_data, yexp); end
        end
      end
    end
    @(negedge clk); step = 0;
    @(negedge clk);
    checks++; if (y_valid) begin failures++; $display("FAIL spurious y"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
