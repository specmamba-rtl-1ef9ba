// ssm_unit: element-wise SSM datapath of the SpecMamba accelerator.
//
// One token and one G-wide tile of its hidden state are processed per cycle. All operators
// are unrolled over the tile as element-wise multiplication units (EMUs):
//   Abar = A * dt              Bbar[g] = B[g] * dt
//   h_t[g] = Abar * h_{t-1}[g] + Bbar[g] * x
//   yacc  += sum_g h_t[g] * C[g]           (accumulated over the NBLK tiles of the token)
//   y      = (yacc + D * x) * z            (after the last tile; z is already SiLU-gated)
// The operator graph is the paper's (discretisation by plain products, as the paper prints
// it, without the exponential of textbook Mamba). Q8.8 arithmetic is this design's choice.
//
// The parent state h_{t-1} is held in a register: when load_parent is set the tile on
// parent_in (the FIFO head or a freshly loaded state) is used and captured, otherwise the
// held tile is reused, so siblings share one parent without re-reading it. h_next is
// combinational so that a child can be processed in the cycle after its parent. The token
// output y is registered and appears one cycle after the step of the last tile.
module ssm_unit
  import specmamba_pkg::*;
#(
  parameter int G  = 8,
  parameter int L  = 16,
  localparam int NW = $clog2(L+1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          step,
  input  logic          load_parent,
  input  fx_t           parent_in [G],
  input  fx_t           a_coef,
  input  fx_t           d_coef,
  input  fx_t           dt,
  input  fx_t           x,
  input  fx_t           z,
  input  fx_t           b_tile [G],
  input  fx_t           c_tile [G],
  input  logic [NW-1:0] tok,
  input  logic          first_blk,
  input  logic          last_blk,
  output fx_t           h_next [G],
  output logic          y_valid,
  output logic [NW-1:0] y_tok,
  output fx_t           y_data
);

  fx_t parent_q [G];
  fx_t yacc [L+1];

  fx_t abar, dx, hc_sum, ysum;
  fx_t h_prev [G];

  always_comb begin
    logic signed [47:0] s;
    abar = fx_mul(a_coef, dt);
    s = '0;
    for (int g = 0; g < G; g++) begin
      h_prev[g] = load_parent ? parent_in[g] : parent_q[g];
      h_next[g] = fx_add(fx_mul(abar, h_prev[g]), fx_mul(fx_mul(b_tile[g], dt), x));
      s += 48'(fx_mul(h_next[g], c_tile[g]));
    end
    hc_sum = fx_sat(s);
    ysum   = first_blk ? hc_sum : fx_add(yacc[tok], hc_sum);
    dx     = fx_mul(d_coef, x);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y_valid <= 1'b0;
      y_tok   <= '0;
      y_data  <= '0;
      for (int g = 0; g < G; g++) parent_q[g] <= '0;
      for (int i = 0; i <= L; i++) yacc[i] <= '0;
    end else begin
      y_valid <= 1'b0;
      if (step) begin
        if (load_parent) parent_q <= parent_in;
        yacc[tok] <= ysum;
        if (last_blk) begin
          y_valid <= 1'b1;
          y_tok   <= tok;
          y_data  <= fx_mul(fx_add(ysum, dx), z);
        end
      end else if (load_parent) begin
        parent_q <= parent_in;
      end
    end
  end

endmodule
