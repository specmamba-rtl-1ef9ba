// conv_unit: causal depthwise 1-D convolution for the x, B and C lanes of the SSM path.
//
// Each lane has its own K taps per model (draft and target keep separate weights and
// histories). out[lane] = sum_k w[k][lane] * v_k[lane], where v_0 is the current token and
// v_k its k-th predecessor. Inside a verification tree the predecessors are taken along the
// token's own ancestor chain (parent, grandparent, ...) and, once the chain reaches the root,
// from the committed history of the model, so every branch of the tree sees the sequence it
// would see on its own. The paper only names this unit; kernel size, tree handling and
// history management are this design's choices.
//
// Interface: conv weights are loaded through cw_*. A token is applied with valid/model/blk/
// node/parent/in_v; out_v is combinational, and at the clock edge the token's inputs and
// parent are remembered for its descendants. With adv set the token is also appended to the
// history (draft steps); such a token's window is then taken from the history alone,
// which already holds its predecessors. shift_* appends a remembered node to the history (COMMIT of an
// accepted path). History is kept per model and per state tile (blk).
module conv_unit
  import specmamba_pkg::*;
#(
  parameter int K     = 4,
  parameter int LANES = 17,
  parameter int L     = 16,
  parameter int NBLK  = 16,
  localparam int NW   = $clog2(L+1),
  localparam int BW   = (NBLK > 1) ? $clog2(NBLK) : 1,
  localparam int LNW  = $clog2(LANES),
  localparam int KW   = (K > 1) ? $clog2(K) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           cw_we,
  input  logic           cw_model,
  input  logic [LNW-1:0] cw_lane,
  input  logic [KW-1:0]  cw_tap,
  input  fx_t            cw_data,
  input  logic           valid,
  input  logic           adv,
  input  logic           model,
  input  logic [BW-1:0]  blk,
  input  logic [NW-1:0]  node,
  input  logic [NW-1:0]  parent,
  input  fx_t            in_v  [LANES],
  output fx_t            out_v [LANES],
  input  logic           shift_valid,
  input  logic           shift_model,
  input  logic [BW-1:0]  shift_blk,
  input  logic [NW-1:0]  shift_node
);

  fx_t           cw       [2][LANES][K];
  fx_t           hist     [2][NBLK][K-1][LANES];
  fx_t           node_mem [NBLK][L+1][LANES];
  logic [NW-1:0] par_mem  [L+1];

  always_comb begin
    logic [NW-1:0]      cur;
    int                 hidx;
    logic signed [47:0] s [LANES];
    for (int c = 0; c < LANES; c++) s[c] = 48'(fx_mul(cw[model][c][0], in_v[c]));
    // A draft step has already pushed its predecessors into the history.
    cur  = adv ? '0 : parent;
    hidx = 0;
    for (int k = 1; k < K; k++) begin
      if (cur != '0) begin
        for (int c = 0; c < LANES; c++) s[c] += 48'(fx_mul(cw[model][c][k], node_mem[blk][cur][c]));
        cur = par_mem[cur];
      end else begin
        for (int c = 0; c < LANES; c++) s[c] += 48'(fx_mul(cw[model][c][k], hist[model][blk][hidx][c]));
        hidx++;
      end
    end
    for (int c = 0; c < LANES; c++) out_v[c] = fx_sat(s[c]);
  end

  always_ff @(posedge clk) begin
    if (cw_we) cw[cw_model][cw_lane][cw_tap] <= cw_data;
    if (valid) begin
      node_mem[blk][node] <= in_v;
      par_mem[node]       <= parent;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int m = 0; m < 2; m++)
        for (int b = 0; b < NBLK; b++)
          for (int j = 0; j < K-1; j++)
            for (int c = 0; c < LANES; c++) hist[m][b][j][c] <= '0;
    end else if (valid && adv) begin
      hist[model][blk][0] <= in_v;
      for (int j = 1; j < K-1; j++) hist[model][blk][j] <= hist[model][blk][j-1];
    end else if (shift_valid) begin
      hist[shift_model][shift_blk][0] <= node_mem[shift_blk][shift_node];
      for (int j = 1; j < K-1; j++) hist[shift_model][shift_blk][j] <= hist[shift_model][shift_blk][j-1];
    end
  end

endmodule
