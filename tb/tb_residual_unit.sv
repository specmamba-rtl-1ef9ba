// tb_residual_unit: loads random residuals, sends random block outputs (with saturation
// cases) and checks each sum one cycle later, plus that no output appears without input.
module tb_residual_unit;
  import specmamba_pkg::*;
  localparam int L = 4;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  int checks = 0, failures = 0;
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  logic r_we = 0, in_valid = 0, out_valid; logic [2:0] r_tok, in_tok, out_tok;
  fx_t r_data, in_data, out_data;
  residual_unit #(.L(L)) dut (.*);
  int res [L+1];
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 1; n <= L; n++) begin
      @(negedge clk); r_we = 1; r_tok = 3'(n); res[n] = (n == 2) ? 32000 : $urandom_range(0, 2000) - 1000; r_data = fx_t'(res[n]);
    end
    @(negedge clk); r_we = 0;
    for (int k = 0; k < 60; k++) begin
      int n, v, e;
      n = $urandom_range(1, L); v = (k % 7 == 0) ? 30000 : $urandom_range(0, 4000) - 2000;
      in_valid = 1; in_tok = 3'(n); in_data = fx_t'(v);
      @(negedge clk); in_valid = 0;
      e = res[n] + v; if (e > 32767) e = 32767; if (e < -32768) e = -32768;
      checks++;
      if (!out_valid || int'(out_tok) != n || int'(out_data) != e) begin failures++; $display("FAIL tok %0d: %0d vs %0d", n, out_data, e); end
      @(negedge clk);
      checks++; if (out_valid) begin failures++; $display("FAIL output without input"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
