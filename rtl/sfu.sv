// sfu: special function unit, SiLU on every lane (combinational).
//
// The SSM path applies SiLU to the convolved x, B and C lanes and to the gate z before
// they enter the SSM unit. The paper only says that the SFU evaluates the non-linear
// functions; the approximation used here is this design's choice:
//   silu(v) ~ v * clamp(v/6 + 1/2, 0, 1)       (1/6 taken as 43/256)
// which is exact for v <= -3 (0) and v >= 3 (v) and within 0.15 of SiLU in between.
// All values are Q8.8.
module sfu
  import specmamba_pkg::*;
#(
  parameter int LANES = 18
) (
  input  fx_t in_v  [LANES],
  output fx_t out_v [LANES]
);

  localparam fx_t HALF = fx_t'(16'sd128);     // 0.5
  localparam fx_t ONE  = fx_t'(16'sd256);     // 1.0
  localparam fx_t SIXTH = fx_t'(16'sd43);     // ~1/6

  function automatic fx_t silu(input fx_t v);
    fx_t g;
    g = fx_add(fx_mul(v, SIXTH), HALF);
    if (g < 0)   g = '0;
    if (g > ONE) g = ONE;
    return fx_mul(v, g);
  endfunction

  always_comb
    for (int i = 0; i < LANES; i++) out_v[i] = silu(in_v[i]);

endmodule
