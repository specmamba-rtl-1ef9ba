// specmamba_pkg: types, sizes and fixed-point helpers shared by the SpecMamba accelerator.
//
// The accelerator runs one Mamba2 channel slice per pass. Sizes that the paper gives
// (16 tokens per verification tree, state dimension n = 128, INT4 weights and activations)
// are the defaults; the tile sizes and the 16-bit Q8.8 fixed-point format used inside the
// SSM datapath are this design's own choices.
package specmamba_pkg;

  // ---- fixed point used by the SSM, conv, SFU and residual datapaths (Q8.8) -----------
  localparam int FX_W    = 16;
  localparam int FX_FRAC = 8;
  typedef logic signed [FX_W-1:0] fx_t;

  localparam fx_t FX_MAX = fx_t'(16'sh7FFF);
  localparam fx_t FX_MIN = fx_t'(16'sh8000);

  // Saturate a wide signed value into fx_t.
  function automatic fx_t fx_sat(input logic signed [47:0] v);
    if (v > 48'sd32767)       return FX_MAX;
    else if (v < -48'sd32768) return FX_MIN;
    else                      return fx_t'(v[FX_W-1:0]);
  endfunction

  // Q8.8 x Q8.8 -> Q8.8, arithmetic shift (round toward -inf), saturated.
  function automatic fx_t fx_mul(input fx_t a, input fx_t b);
    logic signed [47:0] p;
    p = 48'(a) * 48'(b);
    return fx_sat(p >>> FX_FRAC);
  endfunction

  function automatic fx_t fx_add(input fx_t a, input fx_t b);
    return fx_sat(48'(a) + 48'(b));
  endfunction

  // ---- operating modes of the unified datapath (paper Sec. III) --------------------------
  // DRAFT  : autoregressive draft-model step, every new hidden state stored off-chip (Plan I)
  // VERIFY : target-model tree verification through the state FIFO, activations cached (Plan II)
  // COMMIT : target-model recompute of the accepted path from cached activations, final state
  //          stored off-chip
  typedef enum logic [1:0] {
    MODE_DRAFT  = 2'd0,
    MODE_VERIFY = 2'd1,
    MODE_COMMIT = 2'd2
  } mode_e;

  // Memory client identifiers used by the memory controller's read-tag queue.
  typedef enum logic {
    CLI_WEIGHT = 1'b0,
    CLI_STATE  = 1'b1
  } client_e;

endpackage
