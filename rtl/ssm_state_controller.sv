// ssm_state_controller: schedules the SSM unit, the tree FIFO and hidden-state traffic.
//
// Work is done tile by tile (NBLK = D/G tiles of the hidden state, outer loop) and, inside
// a tile, token by token, one token per cycle (inner loop), so only one G-wide tile of
// each live state is ever on chip. For every tile:
//   1. the root state tile (the committed state, or the draft state to resume from) is taken
//      from the state buffer and pushed into the tree FIFO (the paper's T=0 step);
//   2. each token i = 1..ntok is processed in breadth-first order. If its parent differs from
//      the parent held in the SSM unit, the FIFO is popped and the head becomes the new
//      parent; otherwise the held parent is reused (siblings). The new state tile is pushed
//      only if some later token has this token as parent; leaves are dropped.
// Three commands (modes) use this schedule:
//   DRAFT  - draft model: every new state tile is also stored off-chip at
//            st_addr + (node-1)*NBLK + blk, so any draft position can be resumed (Plan I).
//   VERIFY - target model: nothing is stored; dt, x and the B tile of every token are written
//            to the activation cache (Plan II).
//   COMMIT - target model: the accepted path (path[0..ntok-1]) is replayed from the activation
//            cache starting at the committed state, and only the final state tile is stored
//            at st_addr + blk. No weights are read.
// The hybrid use of Plan I for the draft and Plan II for the target, the FIFO schedule and the
// tile-outer loop follow the paper. The command interface, the parent-table encoding of the
// tree (parent[i] < i, 0 = root state), addresses, and running the recompute as a separate
// COMMIT command (the paper folds it into the start of the next verification) are this
// design's choices.
//
// Handshakes: cmd_valid/cmd_ready; blk_valid (a linear-unit block is ready) and blk_ready
// (pulsed on the cycle of the tile's last token, releasing the block); ld_valid/ld_ready for
// root tiles; st_valid/st_ready for stored tiles (the token waits while st_ready is low).
// Cost per tile: 1 + ntok cycles when nothing stalls.
module ssm_state_controller
  import specmamba_pkg::*;
#(
  parameter int L    = 16,
  parameter int NBLK = 16,
  parameter int AW   = 24,
  localparam int NW  = $clog2(L+1),
  localparam int BW  = (NBLK > 1) ? $clog2(NBLK) : 1,
  localparam int LW  = (L > 1) ? $clog2(L) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // command
  input  logic          cmd_valid,
  output logic          cmd_ready,
  input  mode_e         cmd_mode,
  input  logic [NW-1:0] cmd_ntok,
  input  logic [AW-1:0] cmd_ld_addr,
  input  logic [AW-1:0] cmd_st_addr,
  input  logic [NW-1:0] parent [L+1],
  input  logic [NW-1:0] path   [L],
  output logic          cmd_fire,
  output mode_e         mode,
  output logic          done,
  // state buffer
  output logic          ld_start,
  output logic [AW-1:0] ld_base,
  output logic [15:0]   ld_count,
  input  logic          ld_valid,
  output logic          ld_ready,
  output logic          st_valid,
  input  logic          st_ready,
  output logic [AW-1:0] st_addr,
  input  logic          sb_idle,
  // linear unit block handshake
  input  logic          blk_valid,
  output logic          blk_ready,
  // tree FIFO
  output logic          fifo_clear,
  output logic          fifo_push,
  output logic          fifo_push_root,
  output logic [NW-1:0] fifo_push_node,
  output logic          fifo_pop,
  input  logic [NW-1:0] fifo_head_node,
  input  logic          fifo_empty,
  // SSM unit and per-token side units
  output logic          ssm_step,
  output logic          ssm_load_parent,
  output logic [NW-1:0] node,
  output logic [NW-1:0] node_parent,
  output logic [BW-1:0] blk,
  output logic          first_blk,
  output logic          last_blk,
  output logic          cache_we,
  output logic          conv_valid,
  output logic          conv_adv,
  output logic          conv_shift,
  // event strobes (for monitoring)
  output logic          ev_reuse,
  output logic          ev_discard
);

  typedef enum logic [1:0] {S_IDLE, S_ROOT, S_TOK, S_DRAIN} state_e;
  state_e        st_q;
  mode_e         mode_q;
  logic [NW-1:0] ntok_q, i_q, cur_par_q;
  logic          has_par_q;
  logic [AW-1:0] st_base_q;
  logic [BW-1:0] blk_q;

  assign cmd_ready = (st_q == S_IDLE);
  assign cmd_fire  = cmd_valid && cmd_ready;
  assign mode      = mode_q;
  assign blk       = blk_q;
  assign first_blk = (blk_q == '0);
  assign last_blk  = (blk_q == BW'(NBLK-1));
  assign ld_start  = cmd_fire;
  assign ld_base   = cmd_ld_addr;
  assign ld_count  = 16'(NBLK);
  assign fifo_clear = cmd_fire;

  // Current token and its parent
  always_comb begin
    if (mode_q == MODE_COMMIT) begin
      node        = path[LW'(i_q - 1'b1)];
      node_parent = (i_q == NW'(1)) ? '0 : path[LW'(i_q - NW'(2))];
    end else begin
      node        = i_q;
      node_parent = parent[i_q];
    end
  end

  // Does any later token hang below the current one?
  logic has_child;
  always_comb begin
    has_child = 1'b0;
    if (mode_q == MODE_COMMIT) has_child = (i_q < ntok_q);
    else
      for (int j = 1; j <= L; j++)
        if (NW'(j) > i_q && NW'(j) <= ntok_q && parent[j] == i_q) has_child = 1'b1;
  end

  wire need_pop   = !has_par_q || (node_parent != cur_par_q);
  wire need_store = (mode_q == MODE_DRAFT) || (mode_q == MODE_COMMIT && i_q == ntok_q);
  wire tok_go     = (st_q == S_TOK) && (!need_store || st_ready);
  wire root_go    = (st_q == S_ROOT) && ld_valid && (mode_q == MODE_COMMIT || blk_valid);

  always_comb begin
    ld_ready        = root_go;
    fifo_push_root  = root_go;
    fifo_push       = root_go || (tok_go && has_child);
    fifo_push_node  = root_go ? '0 : node;
    fifo_pop        = tok_go && need_pop;
    ssm_step        = tok_go;
    ssm_load_parent = tok_go && need_pop;
    st_valid        = (st_q == S_TOK) && need_store;
    st_addr         = (mode_q == MODE_DRAFT)
                      ? st_base_q + AW'((int'(node) - 1) * NBLK) + AW'(blk_q)
                      : st_base_q + AW'(blk_q);
    cache_we        = tok_go && (mode_q == MODE_VERIFY);
    conv_valid      = tok_go && (mode_q != MODE_COMMIT);
    conv_adv        = tok_go && (mode_q == MODE_DRAFT);
    conv_shift      = tok_go && (mode_q == MODE_COMMIT);
    blk_ready       = tok_go && (i_q == ntok_q) && (mode_q != MODE_COMMIT);
    ev_reuse        = tok_go && !need_pop;
    ev_discard      = tok_go && !has_child;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= S_IDLE; mode_q <= MODE_DRAFT; ntok_q <= '0; i_q <= '0; cur_par_q <= '0;
      has_par_q <= 1'b0; st_base_q <= '0; blk_q <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st_q)
        S_IDLE: if (cmd_valid) begin
          mode_q    <= cmd_mode;
          ntok_q    <= cmd_ntok;
          st_base_q <= cmd_st_addr;
          blk_q     <= '0;
          st_q      <= S_ROOT;
        end
        S_ROOT: if (root_go) begin
          i_q       <= NW'(1);
          has_par_q <= 1'b0;
          st_q      <= S_TOK;
        end
        S_TOK: if (tok_go) begin
          cur_par_q <= node_parent;
          has_par_q <= 1'b1;
          if (i_q == ntok_q) begin
            if (last_blk) st_q <= S_DRAIN;
            else begin
              blk_q <= blk_q + 1'b1;
              st_q  <= S_ROOT;
            end
          end else begin
            i_q <= i_q + 1'b1;
          end
        end
        S_DRAIN: if (sb_idle) begin
          done <= 1'b1;
          st_q <= S_IDLE;
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end

  // The FIFO head must be the parent the schedule expects (breadth-first order).
  assert property (@(posedge clk) disable iff (!rst_n) fifo_pop |-> (!fifo_empty && fifo_head_node == node_parent))
    else $error("ssm_state_controller: FIFO head is not the expected parent");
  // Tree tokens must point to an earlier token or to the root.
  assert property (@(posedge clk) disable iff (!rst_n) (st_q == S_TOK && mode_q != MODE_COMMIT) |-> node_parent < node)
    else $error("ssm_state_controller: parent table not in breadth-first order");

endmodule
