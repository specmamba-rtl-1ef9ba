// specmamba_top: one SpecMamba pipeline (one Mamba2 channel slice) with its memory system.
//
// Data path of a DRAFT or VERIFY command:
//   off-chip weights -> memory_controller -> weight_buffer -> linear_unit (L tokens in
//   parallel, one weight tile broadcast per cycle, NBLK blocks of T_TILES tiles)
//   -> block b of every token = {dt, x, z, B tile b, C tile b}
//   -> conv_unit (x, B, C; tree-aware window) -> sfu (SiLU on x, B, C and z)
//   -> ssm_unit, one token per cycle, driven by ssm_state_controller and tree_state_fifo
//   -> after the last block, y of each token -> residual_unit -> out_*.
// While the SSM side works on block b (ntok+1 cycles) the linear unit already accumulates
// block b+1 (T_TILES cycles): linear layers in parallel over tokens, SSM in series over
// tokens, overlapped block by block, which is the paper's dataflow. Hidden-state tiles move
// between off-chip memory and the SSM unit through state_buffer: draft states are all stored
// (Plan I), target states are recomputed from activation_cache by COMMIT (Plan II).
//
// The host (processor system) loads INT4 input activations (act_*), residuals (res_*), conv
// weights (cw_*), the per-model constants A and D, the tree parent table and the accepted
// path, then issues a command. done pulses when all tiles are finished and stored. The
// off-chip memory port (mem_*) is a simple in-order request/response port of one DW-bit word
// per beat. Model 0 is the draft model, model 1 the target model.
module specmamba_top
  import specmamba_pkg::*;
#(
  parameter int L         = 16,
  parameter int G         = 8,
  parameter int NBLK      = 16,
  parameter int TILE_IN   = 8,
  parameter int T_TILES   = 16,
  parameter int ACT_W     = 4,
  parameter int WGT_W     = 4,
  parameter int LIN_SHIFT = 4,
  parameter int KCONV     = 4,
  parameter int AW        = 24,
  parameter int FIFO_DEPTH = L/2,
  parameter int WB_DEPTH  = 16,
  localparam int BLK_OUT  = 2*G + 3,
  localparam int DW       = BLK_OUT*TILE_IN*WGT_W,
  localparam int NW       = $clog2(L+1),
  localparam int LW       = $clog2(L),
  localparam int TW       = $clog2(T_TILES),
  localparam int CLANES   = 2*G + 1,
  localparam int CLW      = $clog2(CLANES),
  localparam int KW       = (KCONV > 1) ? $clog2(KCONV) : 1,
  localparam int FAW      = (FIFO_DEPTH > 1) ? $clog2(FIFO_DEPTH) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // command
  input  logic          cmd_valid,
  output logic          cmd_ready,
  input  mode_e         cmd_mode,
  input  logic [NW-1:0] cmd_ntok,
  input  logic [AW-1:0] cmd_w_addr,
  input  logic [AW-1:0] cmd_ld_addr,
  input  logic [AW-1:0] cmd_st_addr,
  input  logic [NW-1:0] tree_parent [L+1],
  input  logic [NW-1:0] accept_path [L],
  output logic          done,
  output logic          busy,
  // configuration
  input  fx_t           a_coef [2],
  input  fx_t           d_coef [2],
  input  logic          cw_we,
  input  logic          cw_model,
  input  logic [CLW-1:0] cw_lane,
  input  logic [KW-1:0] cw_tap,
  input  fx_t           cw_data,
  // token inputs
  input  logic          act_we,
  input  logic [LW-1:0] act_tok,
  input  logic [TW-1:0] act_tile,
  input  logic [TILE_IN*ACT_W-1:0] act_data,
  input  logic          res_we,
  input  logic [NW-1:0] res_tok,
  input  fx_t           res_data,
  // token outputs
  output logic          out_valid,
  output logic [NW-1:0] out_tok,
  output fx_t           out_data,
  // off-chip memory port
  output logic          mem_req_valid,
  input  logic          mem_req_ready,
  output logic          mem_req_we,
  output logic [AW-1:0] mem_req_addr,
  output logic [DW-1:0] mem_req_wdata,
  input  logic          mem_rsp_valid,
  input  logic [DW-1:0] mem_rsp_data,
  // status and event strobes
  output logic          ev_lin_stall,
  output logic          ev_fifo_pop,
  output logic          ev_fifo_push,
  output logic          ev_reuse,
  output logic          ev_discard,
  output logic          ev_state_store,
  output logic          ev_cache_write,
  output logic [FAW:0]  fifo_count,
  output logic          fifo_overflow,
  output logic          fifo_underflow
);

  // ---------------- memory system ----------------
  logic          wb_req_valid, wb_req_ready, wb_rsp_valid;
  logic [AW-1:0] wb_req_addr;
  logic [DW-1:0] wb_rsp_data;
  logic          sb_rd_valid, sb_rd_ready, sb_rsp_valid, sb_wr_valid, sb_wr_ready;
  logic [AW-1:0] sb_rd_addr, sb_wr_addr;
  logic [DW-1:0] sb_rsp_data, sb_wr_data;

  memory_controller #(.AW(AW), .DW(DW)) u_mc (
    .clk, .rst_n,
    .w_req_valid(wb_req_valid), .w_req_ready(wb_req_ready), .w_req_addr(wb_req_addr),
    .w_rsp_valid(wb_rsp_valid), .w_rsp_data(wb_rsp_data),
    .s_req_valid(sb_rd_valid), .s_req_ready(sb_rd_ready), .s_req_addr(sb_rd_addr),
    .s_rsp_valid(sb_rsp_valid), .s_rsp_data(sb_rsp_data),
    .s_wr_valid(sb_wr_valid), .s_wr_ready(sb_wr_ready), .s_wr_addr(sb_wr_addr), .s_wr_data(sb_wr_data),
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_wdata,
    .mem_rsp_valid, .mem_rsp_data
  );

  // ---------------- control ----------------
  logic          cmd_fire, sc_done;
  mode_e         mode;
  logic          ld_start, ld_valid, ld_ready, st_valid, st_ready, sb_idle;
  logic [AW-1:0] ld_base, st_addr;
  logic [15:0]   ld_count;
  logic          blk_valid, blk_ready;
  logic          f_clear, f_push, f_push_root, f_pop, f_empty, f_full;
  logic [NW-1:0] f_push_node, f_head_node;
  logic          ssm_step, ssm_load_parent, first_blk, last_blk;
  logic [NW-1:0] node, node_parent;
  logic [$clog2(NBLK)-1:0] blk;
  logic          cache_we, conv_valid, conv_adv, conv_shift;
  fx_t           ld_data [G];
  fx_t           h_next [G];
  fx_t           f_push_data [G];
  fx_t           f_head_data [G];

  ssm_state_controller #(.L(L), .NBLK(NBLK), .AW(AW)) u_sc (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd_mode, .cmd_ntok, .cmd_ld_addr, .cmd_st_addr,
    .parent(tree_parent), .path(accept_path), .cmd_fire, .mode, .done(sc_done),
    .ld_start, .ld_base, .ld_count, .ld_valid, .ld_ready, .st_valid, .st_ready, .st_addr, .sb_idle,
    .blk_valid, .blk_ready,
    .fifo_clear(f_clear), .fifo_push(f_push), .fifo_push_root(f_push_root), .fifo_push_node(f_push_node),
    .fifo_pop(f_pop), .fifo_head_node(f_head_node), .fifo_empty(f_empty),
    .ssm_step, .ssm_load_parent, .node, .node_parent, .blk, .first_blk, .last_blk,
    .cache_we, .conv_valid, .conv_adv, .conv_shift, .ev_reuse, .ev_discard
  );
  assign done = sc_done;

  state_buffer #(.AW(AW), .DW(DW), .G(G)) u_sb (
    .clk, .rst_n,
    .ld_start, .ld_base, .ld_count, .ld_valid, .ld_ready, .ld_data,
    .st_valid, .st_ready, .st_addr, .st_data(h_next), .idle(sb_idle),
    .rd_req_valid(sb_rd_valid), .rd_req_ready(sb_rd_ready), .rd_req_addr(sb_rd_addr),
    .rd_rsp_valid(sb_rsp_valid), .rd_rsp_data(sb_rsp_data),
    .wr_valid(sb_wr_valid), .wr_ready(sb_wr_ready), .wr_addr(sb_wr_addr), .wr_data(sb_wr_data)
  );

  always_comb
    for (int g = 0; g < G; g++) f_push_data[g] = f_push_root ? ld_data[g] : h_next[g];

  tree_state_fifo #(.DEPTH(FIFO_DEPTH), .G(G), .NW(NW)) u_fifo (
    .clk, .rst_n, .clear(f_clear),
    .push(f_push), .push_data(f_push_data), .push_node(f_push_node),
    .pop(f_pop), .head_data(f_head_data), .head_node(f_head_node),
    .count(fifo_count), .empty(f_empty), .full(f_full), .overflow(fifo_overflow), .underflow(fifo_underflow)
  );

  // ---------------- linear unit ----------------
  logic          w_valid, w_ready, lin_busy, wb_busy;
  logic [DW-1:0] w_data;
  fx_t           lin_out [L][BLK_OUT];
  logic [$clog2(NBLK)-1:0] lin_blk;
  wire           lin_start = cmd_fire && (cmd_mode != MODE_COMMIT);

  weight_buffer #(.AW(AW), .DW(DW), .DEPTH(WB_DEPTH)) u_wb (
    .clk, .rst_n, .start(lin_start), .base(cmd_w_addr), .count(16'(NBLK*T_TILES)), .busy(wb_busy),
    .req_valid(wb_req_valid), .req_ready(wb_req_ready), .req_addr(wb_req_addr),
    .rsp_valid(wb_rsp_valid), .rsp_data(wb_rsp_data),
    .out_valid(w_valid), .out_ready(w_ready), .out_data(w_data)
  );

  linear_unit #(.L(L), .TILE_IN(TILE_IN), .T_TILES(T_TILES), .BLK_OUT(BLK_OUT), .NBLK(NBLK),
                .ACT_W(ACT_W), .WGT_W(WGT_W), .LIN_SHIFT(LIN_SHIFT)) u_lin (
    .clk, .rst_n, .act_we, .act_tok, .act_tile, .act_data,
    .start(lin_start), .busy(lin_busy), .stall(ev_lin_stall),
    .w_valid, .w_ready, .w_data,
    .out_valid(blk_valid), .out_ready(blk_ready), .out_blk(lin_blk), .out_data(lin_out)
  );

  // ---------------- per-token SSM inputs ----------------
  // Field layout of one block row: [0]=dt, [1]=x, [2]=z, [3..3+G-1]=B tile, [3+G..]=C tile
  logic [LW-1:0] row;
  assign row = LW'(node - 1'b1);
  logic model;
  assign model = (mode == MODE_DRAFT) ? 1'b0 : 1'b1;

  fx_t conv_in  [CLANES];
  fx_t conv_out [CLANES];
  fx_t sfu_in   [CLANES+1];
  fx_t sfu_out  [CLANES+1];
  always_comb begin
    conv_in[0] = lin_out[row][1];
    for (int g = 0; g < 2*G; g++) conv_in[1+g] = lin_out[row][3+g];
    for (int c = 0; c < CLANES; c++) sfu_in[c] = conv_out[c];
    sfu_in[CLANES] = lin_out[row][2];
  end

  conv_unit #(.K(KCONV), .LANES(CLANES), .L(L), .NBLK(NBLK)) u_conv (
    .clk, .rst_n, .cw_we, .cw_model, .cw_lane, .cw_tap, .cw_data,
    .valid(conv_valid), .adv(conv_adv), .model, .blk, .node, .parent(node_parent),
    .in_v(conv_in), .out_v(conv_out),
    .shift_valid(conv_shift), .shift_model(1'b1), .shift_blk(blk), .shift_node(node)
  );

  sfu #(.LANES(CLANES+1)) u_sfu (.in_v(sfu_in), .out_v(sfu_out));

  fx_t c_dt, c_x;
  fx_t c_b [G];
  fx_t s_dt, s_x, s_z;
  fx_t s_b [G];
  fx_t s_c [G];
  fx_t a_dt [G];

  activation_cache #(.L(L), .NBLK(NBLK), .G(G)) u_cache (
    .clk, .we(cache_we), .w_blk(blk), .w_node(node),
    .w_dt(lin_out[row][0]), .w_x(sfu_out[0]), .w_b(a_dt),
    .r_blk(blk), .r_node(node), .r_dt(c_dt), .r_x(c_x), .r_b(c_b)
  );

  always_comb begin
    for (int g = 0; g < G; g++) begin
      a_dt[g] = sfu_out[1+g];
      s_c[g]  = sfu_out[1+G+g];
      s_b[g]  = (mode == MODE_COMMIT) ? c_b[g] : sfu_out[1+g];
    end
    s_dt = (mode == MODE_COMMIT) ? c_dt : lin_out[row][0];
    s_x  = (mode == MODE_COMMIT) ? c_x  : sfu_out[0];
    s_z  = sfu_out[CLANES];
  end

  // ---------------- SSM unit and residual ----------------
  logic          y_valid;
  logic [NW-1:0] y_tok;
  fx_t           y_data;

  ssm_unit #(.G(G), .L(L)) u_ssm (
    .clk, .rst_n, .step(ssm_step), .load_parent(ssm_load_parent), .parent_in(f_head_data),
    .a_coef(a_coef[model]), .d_coef(d_coef[model]), .dt(s_dt), .x(s_x), .z(s_z),
    .b_tile(s_b), .c_tile(s_c), .tok(node), .first_blk,
    .last_blk(last_blk && (mode != MODE_COMMIT)),
    .h_next, .y_valid, .y_tok, .y_data
  );

  residual_unit #(.L(L)) u_res (
    .clk, .rst_n, .r_we(res_we), .r_tok(res_tok), .r_data(res_data),
    .in_valid(y_valid), .in_tok(y_tok), .in_data(y_data),
    .out_valid, .out_tok, .out_data
  );

  assign busy           = !cmd_ready || lin_busy || wb_busy;
  assign ev_fifo_pop    = f_pop;
  assign ev_fifo_push   = f_push && !f_push_root;
  assign ev_state_store = st_valid && st_ready;
  assign ev_cache_write = cache_we;

endmodule
