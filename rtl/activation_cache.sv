// activation_cache: on-chip cache of the target model's SSM activations (Plan II backtracking).
//
// While the target model verifies a draft tree, the per-token activations that the state
// update needs (dt, x and the G-wide B tile, for every one of the NBLK state tiles) are
// written here instead of storing every intermediate hidden state off-chip. Once the host
// knows which path was accepted, the state controller reads the entries of that path back
// and the SSM unit recomputes the committed state. Caching activations rather than states
// follows the paper; A is a per-head constant kept in a register elsewhere, so it is not
// stored. Interface: one write port, one combinational read port (distributed-RAM style).
module activation_cache
  import specmamba_pkg::*;
#(
  parameter int L    = 16,
  parameter int NBLK = 16,
  parameter int G    = 8,
  localparam int NW  = $clog2(L+1),
  localparam int BW  = (NBLK > 1) ? $clog2(NBLK) : 1,
  localparam int LW  = (L > 1) ? $clog2(L) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [BW-1:0] w_blk,
  input  logic [NW-1:0] w_node,   // 1..L
  input  fx_t           w_dt,
  input  fx_t           w_x,
  input  fx_t           w_b [G],
  input  logic [BW-1:0] r_blk,
  input  logic [NW-1:0] r_node,
  output fx_t           r_dt,
  output fx_t           r_x,
  output fx_t           r_b [G]
);

  typedef struct packed {
    fx_t               dt;
    fx_t               x;
    logic [G*FX_W-1:0] b;
  } entry_t;

  entry_t mem [NBLK][L];

  entry_t wr_e, rd_e;
  always_comb begin
    wr_e.dt = w_dt;
    wr_e.x  = w_x;
    for (int g = 0; g < G; g++) wr_e.b[g*FX_W +: FX_W] = w_b[g];
  end

  always_ff @(posedge clk) begin
    if (we) mem[w_blk][LW'(w_node - 1'b1)] <= wr_e;
  end

  assign rd_e = mem[r_blk][LW'(r_node - 1'b1)];
  assign r_dt = rd_e.dt;
  assign r_x  = rd_e.x;
  always_comb
    for (int g = 0; g < G; g++) r_b[g] = fx_t'(rd_e.b[g*FX_W +: FX_W]);

endmodule
