// tb_specmamba_top: end-to-end test of specmamba_top at reduced sizes.
//
// 10-token trees, 2-element state tiles, 4 tiles, 8 weight tiles per block. The host,
// memory model, reference model and checks are in specmamba_bench: three draft steps, a
// verification of the paper's 9-node example tree, a commit of the accepted path and a
// second verification of a random 10-token tree, with every output and stored state tile
// compared and every mechanism (linear stall, FIFO push/pop, parent reuse, leaf discard,
// draft state store, activation caching) required to occur.
module tb_specmamba_top;
  localparam int L = 10;
  localparam int G = 2;
  localparam int NBLK = 4;
  localparam int TILE_IN = 2;
  localparam int T_TILES = 8;
  localparam int KCONV = 4;
  localparam int LIN_SHIFT = 4;
  localparam int AW = 24;
  localparam int BLK_OUT = 2*G + 3;
  localparam int DW      = BLK_OUT*TILE_IN*4;
  localparam int NW      = $clog2(L+1);
  localparam int LW      = $clog2(L);
  localparam int TW      = $clog2(T_TILES);
  localparam int CLANES  = 2*G + 1;
  localparam int CLW     = $clog2(CLANES);
  localparam int KW      = (KCONV > 1) ? $clog2(KCONV) : 1;
  localparam int FAW     = (L/2 > 1) ? $clog2(L/2) : 1;
  logic clk, rst_n, cmd_valid, cmd_ready, done, busy, cw_we, cw_model, act_we, res_we, out_valid;
  specmamba_pkg::mode_e cmd_mode;
  logic [NW-1:0] cmd_ntok, res_tok, out_tok;
  logic [AW-1:0] cmd_w_addr, cmd_ld_addr, cmd_st_addr, mem_req_addr;
  logic [NW-1:0] tree_parent [L+1];
  logic [NW-1:0] accept_path [L];
  logic signed [15:0] a_coef [2];
  logic signed [15:0] d_coef [2];
  logic [CLW-1:0] cw_lane;
  logic [KW-1:0] cw_tap;
  logic signed [15:0] cw_data, res_data, out_data;
  logic [LW-1:0] act_tok;
  logic [TW-1:0] act_tile;
  logic [TILE_IN*4-1:0] act_data;
  logic mem_req_valid, mem_req_ready, mem_req_we, mem_rsp_valid;
  logic [DW-1:0] mem_req_wdata, mem_rsp_data;
  logic ev_lin_stall, ev_fifo_pop, ev_fifo_push, ev_reuse, ev_discard, ev_state_store, ev_cache_write;
  logic [FAW:0] fifo_count;
  logic fifo_overflow, fifo_underflow;

  specmamba_top #(.L(L), .G(G), .NBLK(NBLK), .TILE_IN(TILE_IN), .T_TILES(T_TILES), .KCONV(KCONV), .LIN_SHIFT(LIN_SHIFT), .AW(AW)) u_dut (
    .clk,
    .rst_n,
    .cmd_valid,
    .cmd_ready,
    .cmd_mode,
    .cmd_ntok,
    .cmd_w_addr,
    .cmd_ld_addr,
    .cmd_st_addr,
    .tree_parent,
    .accept_path,
    .done,
    .busy,
    .a_coef,
    .d_coef,
    .cw_we,
    .cw_model,
    .cw_lane,
    .cw_tap,
    .cw_data,
    .act_we,
    .act_tok,
    .act_tile,
    .act_data,
    .res_we,
    .res_tok,
    .res_data,
    .out_valid,
    .out_tok,
    .out_data,
    .mem_req_valid,
    .mem_req_ready,
    .mem_req_we,
    .mem_req_addr,
    .mem_req_wdata,
    .mem_rsp_valid,
    .mem_rsp_data,
    .ev_lin_stall,
    .ev_fifo_pop,
    .ev_fifo_push,
    .ev_reuse,
    .ev_discard,
    .ev_state_store,
    .ev_cache_write,
    .fifo_count,
    .fifo_overflow,
    .fifo_underflow
  );

  specmamba_bench #(.L(L), .G(G), .NBLK(NBLK), .TILE_IN(TILE_IN), .T_TILES(T_TILES), .KCONV(KCONV),
                    .LIN_SHIFT(LIN_SHIFT), .AW(AW), .WATCHDOG(100000)) u_bench (
    .clk,
    .rst_n,
    .cmd_valid,
    .cmd_ready,
    .cmd_mode,
    .cmd_ntok,
    .cmd_w_addr,
    .cmd_ld_addr,
    .cmd_st_addr,
    .tree_parent,
    .accept_path,
    .done,
    .busy,
    .a_coef,
    .d_coef,
    .cw_we,
    .cw_model,
    .cw_lane,
    .cw_tap,
    .cw_data,
    .act_we,
    .act_tok,
    .act_tile,
    .act_data,
    .res_we,
    .res_tok,
    .res_data,
    .out_valid,
    .out_tok,
    .out_data,
    .mem_req_valid,
    .mem_req_ready,
    .mem_req_we,
    .mem_req_addr,
    .mem_req_wdata,
    .mem_rsp_valid,
    .mem_rsp_data,
    .ev_lin_stall,
    .ev_fifo_pop,
    .ev_fifo_push,
    .ev_reuse,
    .ev_discard,
    .ev_state_store,
    .ev_cache_write,
    .fifo_count,
    .fifo_overflow,
    .fifo_underflow
  );

endmodule
