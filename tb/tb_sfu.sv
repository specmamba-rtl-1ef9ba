// tb_sfu: checks the SiLU lanes at the breakpoints of the approximation (exact 0 for
// v <= -3, exact v for v >= 3), against the bench's own evaluation of the same formula for
// random inputs, and against a real-valued SiLU within 0.25.
module tb_sfu;
  import specmamba_pkg::*;
  localparam int LANES = 4;
  int checks = 0, failures = 0;
  fx_t in_v [LANES]; fx_t out_v [LANES];
  sfu #(.LANES(LANES)) dut (.*);
  function automatic int ref_q(int v);
    int g;
    g = ((v * 43) >>> 8) + 128;
    if (g < 0) g = 0; if (g > 256) g = 256;
    return (v * g) >>> 8;
  endfunction
  initial begin
    in_v[0] = -16'sd1024; in_v[1] = 16'sd1024; in_v[2] = 16'sd0; in_v[3] = -16'sd768;
    #1;
    checks++; if (out_v[0] != 0)   begin failures++; $display("FAIL silu(-4)"); end
    checks++; if (out_v[1] != 1024) begin failures++; $display("FAIL silu(4) %0d", out_v[1]); end
    checks++; if (out_v[2] != 0)   begin failures++; $display("FAIL silu(0)"); end
    checks++; if (out_v[3] > 0 || out_v[3] < -16'sd8) begin failures++; $display("FAIL silu(-3) %0d", out_v[3]); end
    for (int k = 0; k < 400; k++) begin
      for (int i = 0; i < LANES; i++) in_v[i] = fx_t'($urandom_range(0, 3000)) - 16'sd1500;
      #1;
      for (int i = 0; i < LANES; i++) begin
        real x, s;
        x = real'(in_v[i]) / 256.0;
        s = x / (1.0 + $exp(-x));
        checks++;
        if (int'(out_v[i]) != ref_q(int'(in_v[i]))) begin failures++; $display("FAIL lane %0d in %0d out %0d", i, in_v[i], out_v[i]); end
        checks++;
        if ((real'(out_v[i]) / 256.0 - s) > 0.25 || (s - real'(out_v[i]) / 256.0) > 0.25) begin
          failures++; $display("FAIL accuracy at %f: %f vs %f", x, real'(out_v[i]) / 256.0, s);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin #100000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
