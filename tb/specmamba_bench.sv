// specmamba_bench: host, off-chip memory model and reference model for specmamba_top.
//
// Connects to the top's ports (plain signals). It plays the host: it writes weights and
// hidden states into a behavioural in-order DDR/HBM model (random request back-pressure,
// fixed read latency), loads INT4 activations, residuals, conv weights and the A/D
// constants, and runs the speculative-decoding sequence
//   DRAFT (one token) -> DRAFT (resume from the stored state) -> DRAFT (3-token chain)
//   -> VERIFY (the 9-node tree of the paper's FIFO example) -> COMMIT (accepted path 1-4-7)
//   -> VERIFY (second tree from the committed state).
// An independent reference model (own fixed-point helpers, own tree walk with full state
// copies instead of a FIFO) predicts every token output and every stored state tile. It
// also checks the cycle count of a VERIFY pass against the linear-unit bound NBLK*T_TILES
// (or NBLK*(ntok+1) when the SSM side is the slower one) plus a small margin, and counts how often each mechanism fired: linear-unit stall, FIFO
// pop, FIFO push, parent reuse, leaf discard, draft state store, activation-cache write.
module specmamba_bench #(
  parameter int L         = 16,
  parameter int G         = 8,
  parameter int NBLK      = 16,
  parameter int TILE_IN   = 8,
  parameter int T_TILES   = 16,
  parameter int KCONV     = 4,
  parameter int LIN_SHIFT = 4,
  parameter int AW        = 24,
  parameter int WATCHDOG  = 200000,
  localparam int BLK_OUT  = 2*G + 3,
  localparam int DW       = BLK_OUT*TILE_IN*4,
  localparam int NW       = $clog2(L+1),
  localparam int LW       = $clog2(L),
  localparam int TW       = $clog2(T_TILES),
  localparam int CLANES   = 2*G + 1,
  localparam int CLW      = $clog2(CLANES),
  localparam int KW       = (KCONV > 1) ? $clog2(KCONV) : 1,
  localparam int FAW      = (L/2 > 1) ? $clog2(L/2) : 1
) (
  output logic          clk,
  output logic          rst_n,
  output logic          cmd_valid,
  input  logic          cmd_ready,
  output specmamba_pkg::mode_e cmd_mode,
  output logic [NW-1:0] cmd_ntok,
  output logic [AW-1:0] cmd_w_addr,
  output logic [AW-1:0] cmd_ld_addr,
  output logic [AW-1:0] cmd_st_addr,
  output logic [NW-1:0] tree_parent [L+1],
  output logic [NW-1:0] accept_path [L],
  input  logic          done,
  input  logic          busy,
  output logic signed [15:0] a_coef [2],
  output logic signed [15:0] d_coef [2],
  output logic          cw_we,
  output logic          cw_model,
  output logic [CLW-1:0] cw_lane,
  output logic [KW-1:0] cw_tap,
  output logic signed [15:0] cw_data,
  output logic          act_we,
  output logic [LW-1:0] act_tok,
  output logic [TW-1:0] act_tile,
  output logic [TILE_IN*4-1:0] act_data,
  output logic          res_we,
  output logic [NW-1:0] res_tok,
  output logic signed [15:0] res_data,
  input  logic          out_valid,
  input  logic [NW-1:0] out_tok,
  input  logic signed [15:0] out_data,
  input  logic          mem_req_valid,
  output logic          mem_req_ready,
  input  logic          mem_req_we,
  input  logic [AW-1:0] mem_req_addr,
  input  logic [DW-1:0] mem_req_wdata,
  output logic          mem_rsp_valid,
  output logic [DW-1:0] mem_rsp_data,
  input  logic          ev_lin_stall,
  input  logic          ev_fifo_pop,
  input  logic          ev_fifo_push,
  input  logic          ev_reuse,
  input  logic          ev_discard,
  input  logic          ev_state_store,
  input  logic          ev_cache_write,
  input  logic [FAW:0]  fifo_count,
  input  logic          fifo_overflow,
  input  logic          fifo_underflow
);
  import specmamba_pkg::*;
  typedef logic signed [15:0] q_t;

  int checks = 0, failures = 0;
  longint cyc = 0;

  // ---------------- reference fixed-point helpers (independent of the RTL) --------------
  function automatic q_t rsat(input longint v);
    if (v > 32767) return 16'sh7fff;
    if (v < -32768) return 16'sh8000;
    return q_t'(v);
  endfunction
  function automatic q_t rmul(input q_t a, input q_t b);
    longint p;
    p = longint'(a) * longint'(b);
    return rsat(p >>> 8);
  endfunction
  function automatic q_t radd(input q_t a, input q_t b);
    return rsat(longint'(a) + longint'(b));
  endfunction
  function automatic q_t rsilu(input q_t v);
    q_t g;
    g = radd(rmul(v, 16'sd43), 16'sd128);
    if (g < 0) g = 0;
    if (g > 256) g = 256;
    return rmul(v, g);
  endfunction

  // ---------------- clock, reset, watchdog ----------------
  initial clk = 1'b0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- off-chip memory model ----------------
  localparam int LAT = 4;
  bit full_rate = 0;   // memory accepts every cycle (used while timing a VERIFY pass)
  logic [DW-1:0] dram [longint];
  typedef struct { longint due; logic [AW-1:0] addr; } rd_t;
  rd_t rdq [$];
  always @(posedge clk) begin
    mem_rsp_valid <= 1'b0;
    if (rdq.size() > 0 && rdq[0].due <= cyc) begin
      rd_t r;
      r = rdq.pop_front();
      mem_rsp_valid <= 1'b1;
      mem_rsp_data  <= dram.exists(r.addr) ? dram[r.addr] : '0;
    end
    if (mem_req_valid && mem_req_ready) begin
      if (mem_req_we) dram[mem_req_addr] = mem_req_wdata;
      else begin
        rd_t r;
        r.due = cyc + LAT; r.addr = mem_req_addr;
        rdq.push_back(r);
      end
    end
    mem_req_ready <= full_rate || ($urandom_range(0, 9) != 0);
  end

  // ---------------- event counters ----------------
  int n_stall = 0, n_pop = 0, n_push = 0, n_reuse = 0, n_discard = 0, n_store = 0, n_cache = 0;
  int max_fifo = 0;
  always @(posedge clk) if (rst_n) begin
    n_stall   += int'(ev_lin_stall);
    n_pop     += int'(ev_fifo_pop);
    n_push    += int'(ev_fifo_push);
    n_reuse   += int'(ev_reuse);
    n_discard += int'(ev_discard);
    n_store   += int'(ev_state_store);
    n_cache   += int'(ev_cache_write);
    if (int'(fifo_count) > max_fifo) max_fifo = int'(fifo_count);
  end

  // ---------------- output capture ----------------
  q_t   got [L+1];
  bit   got_v [L+1];
  always @(posedge clk) if (out_valid) begin
    got[out_tok]   = out_data;
    got_v[out_tok] = 1'b1;
  end

  // ---------------- reference state ----------------
  q_t cw_r   [2][CLANES][KCONV];
  q_t hist_r [2][NBLK][KCONV-1][CLANES];
  q_t A_r [2], D_r [2];
  int act_r [L][T_TILES*TILE_IN];
  q_t res_r [L+1];
  // saved from the last VERIFY for COMMIT
  q_t vin_r   [NBLK][L+1][CLANES];
  q_t cdt_r   [NBLK][L+1];
  q_t cx_r    [NBLK][L+1];
  q_t cb_r    [NBLK][L+1][G];

  logic [DW-1:0] exp_store [longint];

  localparam longint W_DRAFT  = 64'h1000;
  localparam longint W_TARGET = 64'h8000;
  localparam longint S_DRAFT0 = 64'h20000;
  localparam longint S_DRAFT1 = 64'h21000;
  localparam longint S_DRAFT2 = 64'h22000;
  localparam longint S_TGT0   = 64'h30000;
  localparam longint S_TGT1   = 64'h31000;

  function automatic int wfield(longint base, int b, int t, int o, int i);
    logic [DW-1:0] w;
    w = dram[base + b*T_TILES + t];
    return int'(signed'(w[(o*TILE_IN+i)*4 +: 4]));
  endfunction

  function automatic q_t tile_elem(longint addr, int g);
    logic [DW-1:0] w;
    w = dram.exists(addr) ? dram[addr] : '0;
    return q_t'(w[g*16 +: 16]);
  endfunction

  task automatic host_init();
    for (int m = 0; m < 2; m++) begin
      A_r[m] = q_t'($urandom_range(0, 200));         // 0 .. 0.78
      D_r[m] = q_t'($urandom_range(0, 128)) - 16'sd64;
      for (int c = 0; c < CLANES; c++)
        for (int k = 0; k < KCONV; k++) begin
          cw_r[m][c][k] = q_t'($urandom_range(0, 160)) - 16'sd80;
          @(negedge clk);
          cw_we = 1; cw_model = m[0]; cw_lane = CLW'(c); cw_tap = KW'(k); cw_data = cw_r[m][c][k];
        end
      for (int b = 0; b < NBLK; b++)
        for (int j = 0; j < KCONV-1; j++)
          for (int c = 0; c < CLANES; c++) hist_r[m][b][j][c] = '0;
    end
    @(negedge clk); cw_we = 0;
    a_coef[0] = A_r[0]; a_coef[1] = A_r[1]; d_coef[0] = D_r[0]; d_coef[1] = D_r[1];
    // weights of both models
    for (int m = 0; m < 2; m++)
      for (int b = 0; b < NBLK; b++)
        for (int t = 0; t < T_TILES; t++) begin
          logic [DW-1:0] w;
          for (int k = 0; k < DW/32; k++) w[k*32 +: 32] = $urandom;
          if (DW % 32 != 0) w[DW-1 -: (DW%32 == 0 ? 1 : DW%32)] = '0;
          dram[(m == 0 ? W_DRAFT : W_TARGET) + b*T_TILES + t] = w;
        end
    // initial hidden states of both models
    for (int b = 0; b < NBLK; b++) begin
      logic [DW-1:0] w0, w1;
      w0 = '0; w1 = '0;
      for (int g = 0; g < G; g++) begin
        w0[g*16 +: 16] = 16'($urandom_range(0, 512)) - 16'd256;
        w1[g*16 +: 16] = 16'($urandom_range(0, 512)) - 16'd256;
      end
      dram[S_DRAFT0 + b] = w0;
      dram[S_TGT0 + b]   = w1;
    end
  endtask

  task automatic load_tokens();
    for (int l = 0; l < L; l++) begin
      for (int t = 0; t < T_TILES; t++) begin
        @(negedge clk);
        act_we = 1; act_tok = LW'(l); act_tile = TW'(t);
        for (int i = 0; i < TILE_IN; i++) begin
          act_r[l][t*TILE_IN+i] = $urandom_range(0, 15) - 8;
          act_data[i*4 +: 4] = 4'(act_r[l][t*TILE_IN+i]);
        end
      end
      @(negedge clk);
      act_we = 0;
      res_r[l+1] = q_t'($urandom_range(0, 1024)) - 16'sd512;
      res_we = 1; res_tok = NW'(l+1); res_data = res_r[l+1];
    end
    @(negedge clk); res_we = 0;
  endtask

  function automatic q_t lin_ref(longint wbase, int l, int b, int o);
    longint acc;
    acc = 0;
    for (int t = 0; t < T_TILES; t++)
      for (int i = 0; i < TILE_IN; i++)
        acc += longint'(act_r[l][t*TILE_IN+i]) * longint'(wfield(wbase, b, t, o, i));
    return rsat(acc <<< LIN_SHIFT);
  endfunction

  // Run one command and compare. par[] is the tree (par[i] < i), path[] the accepted nodes.
  task automatic run(input mode_e mode, input int ntok, input int par [L+1], input int path [L],
                     input longint ld, input longint st, input bit check_cycles);
    int m;
    longint wbase, t0, t1;
    q_t hs   [L+1][G];
    q_t yacc [L+1];
    q_t yexp [L+1];
    q_t lin  [L][BLK_OUT];
    q_t vin  [L+1][CLANES];
    int nstore_exp;
    m = (mode == MODE_DRAFT) ? 0 : 1;
    wbase = (m == 0) ? W_DRAFT : W_TARGET;
    if (mode != MODE_COMMIT) load_tokens();
    for (int i = 0; i <= L; i++) got_v[i] = 0;

    // ---- reference ----
    for (int b = 0; b < NBLK; b++) begin
      for (int g = 0; g < G; g++) hs[0][g] = tile_elem(ld + b, g);
      if (mode == MODE_COMMIT) begin
        int prev;
        prev = 0;
        for (int j = 0; j < ntok; j++) begin
          int n;
          n = path[j];
          for (int g = 0; g < G; g++)
            hs[n][g] = radd(rmul(rmul(A_r[1], cdt_r[b][n]), hs[prev][g]),
                            rmul(rmul(cb_r[b][n][g], cdt_r[b][n]), cx_r[b][n]));
          prev = n;
          // target conv history takes the accepted token
          for (int k = KCONV-2; k > 0; k--) hist_r[1][b][k] = hist_r[1][b][k-1];
          hist_r[1][b][0] = vin_r[b][n];
        end
        // the final tile of the path is the new committed state
        for (int g = 0; g < G; g++) hs[0][g] = hs[path[ntok-1]][g];
        begin : keep
          logic [DW-1:0] e;
          e = '0;
          for (int g = 0; g < G; g++) e[g*16 +: 16] = hs[0][g];
          exp_store[st + b] = e;
        end
      end else begin
        for (int l = 0; l < L; l++)
          for (int o = 0; o < BLK_OUT; o++) lin[l][o] = lin_ref(wbase, l, b, o);
        for (int n = 1; n <= ntok; n++) begin
          q_t cv [CLANES];
          q_t sx, sz, dt;
          q_t sb [G];
          q_t sc [G];
          q_t hc;
          longint s;
          int cur, hidx;
          vin[n][0] = lin[n-1][1];
          for (int g = 0; g < 2*G; g++) vin[n][1+g] = lin[n-1][3+g];
          // conv along the ancestor chain, then the history
          for (int c = 0; c < CLANES; c++) begin
            longint acc;
            acc = rmul(cw_r[m][c][0], vin[n][c]);
            cur = par[n]; hidx = 0;
            for (int k = 1; k < KCONV; k++) begin
              if (cur != 0) begin acc += rmul(cw_r[m][c][k], vin[cur][c]); cur = par[cur]; end
              else begin acc += rmul(cw_r[m][c][k], hist_r[m][b][hidx][c]); hidx++; end
            end
            cv[c] = rsat(acc);
          end
          dt = lin[n-1][0];
          sx = rsilu(cv[0]);
          sz = rsilu(lin[n-1][2]);
          for (int g = 0; g < G; g++) begin sb[g] = rsilu(cv[1+g]); sc[g] = rsilu(cv[1+G+g]); end
          s = 0;
          for (int g = 0; g < G; g++) begin
            hs[n][g] = radd(rmul(rmul(A_r[m], dt), hs[par[n]][g]), rmul(rmul(sb[g], dt), sx));
            s += rmul(hs[n][g], sc[g]);
          end
          hc = rsat(s);
          yacc[n] = (b == 0) ? hc : radd(yacc[n], hc);
          if (b == NBLK-1) yexp[n] = radd(res_r[n], rmul(radd(yacc[n], rmul(D_r[m], sx)), sz));
          if (mode == MODE_VERIFY) begin
            vin_r[b][n] = vin[n];
            cdt_r[b][n] = dt; cx_r[b][n] = sx;
            for (int g = 0; g < G; g++) cb_r[b][n][g] = sb[g];
          end
          if (mode == MODE_DRAFT) begin
            logic [DW-1:0] e;
            e = '0;
            for (int g = 0; g < G; g++) e[g*16 +: 16] = hs[n][g];
            exp_store[st + (n-1)*NBLK + b] = e;
          end
        end
        if (mode == MODE_DRAFT)
          for (int n = 1; n <= ntok; n++) begin
            for (int k = KCONV-2; k > 0; k--) hist_r[0][b][k] = hist_r[0][b][k-1];
            hist_r[0][b][0] = vin[n];
          end
      end
    end

    // ---- drive the command ----
    @(negedge clk);
    full_rate = check_cycles;
    for (int i = 0; i <= L; i++) tree_parent[i] = NW'(par[i]);
    for (int j = 0; j < L; j++) accept_path[j] = NW'(path[j]);
    cmd_valid = 1; cmd_mode = mode; cmd_ntok = NW'(ntok);
    cmd_w_addr = AW'(wbase); cmd_ld_addr = AW'(ld); cmd_st_addr = AW'(st);
    while (!cmd_ready) @(negedge clk);
    t0 = cyc;
    @(negedge clk);
    cmd_valid = 0;
    while (!done) @(negedge clk);
    t1 = cyc;
    full_rate = 0;
    repeat (4) @(negedge clk);

    // ---- compare ----
    if (mode != MODE_COMMIT)
      for (int n = 1; n <= ntok; n++) begin
        checks++;
        if (!got_v[n] || got[n] != yexp[n]) begin
          failures++;
          $display("FAIL mode=%0d token %0d: got %0d (valid %0d) exp %0d", mode, n, got[n], got_v[n], yexp[n]);
        end
      end
    foreach (exp_store[a]) begin
      checks++;
      if (!dram.exists(a) || dram[a] != exp_store[a]) begin
        failures++;
        $display("FAIL mode=%0d stored tile at %h differs", mode, a);
      end
    end
    exp_store.delete();
    $display("mode %0d ntok %0d: %0d cycles", mode, ntok, t1 - t0);
    if (check_cycles) begin
      // linear bound NBLK*T_TILES, plus memory latency, a 1-cycle root step per tile and drain
      longint bound;
      bound = longint'(NBLK*((T_TILES > ntok+1) ? T_TILES : ntok+1)) + longint'(NBLK*2) + 40;
      checks++;
      if ((t1 - t0) > bound || (t1 - t0) < longint'(NBLK*T_TILES)) begin
        failures++;
        $display("FAIL verify took %0d cycles, expected %0d..%0d", t1 - t0, NBLK*T_TILES, bound);
      end
    end
  endtask

  initial begin
    int par [L+1];
    int path [L];
    rst_n = 0; cmd_valid = 0; cmd_mode = MODE_DRAFT; cmd_ntok = '0; cmd_w_addr = '0;
    cmd_ld_addr = '0; cmd_st_addr = '0; cw_we = 0; cw_model = 0; cw_lane = '0; cw_tap = '0;
    cw_data = '0; act_we = 0; act_tok = '0; act_tile = '0; act_data = '0; res_we = 0;
    res_tok = '0; res_data = '0; mem_req_ready = 0; mem_rsp_valid = 0; mem_rsp_data = '0;
    for (int i = 0; i <= L; i++) begin tree_parent[i] = '0; par[i] = 0; end
    for (int j = 0; j < L; j++) begin accept_path[j] = '0; path[j] = 0; end
    a_coef[0] = 0; a_coef[1] = 0; d_coef[0] = 0; d_coef[1] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    host_init();

    // Draft model, Plan I: one token, then resume from its stored state.
    par[1] = 0;
    run(MODE_DRAFT, 1, par, path, S_DRAFT0, S_DRAFT1, 0);
    run(MODE_DRAFT, 1, par, path, S_DRAFT1, S_DRAFT2, 0);
    // A 3-token chain through the FIFO (every state stored).
    par[1] = 0; par[2] = 1; par[3] = 2;
    run(MODE_DRAFT, 3, par, path, S_DRAFT2, S_DRAFT0, 0);

    // Target model: the 9-node tree of the paper's breadth-first FIFO example.
    begin
      int tp [10] = '{0, 0, 0, 0, 1, 1, 2, 4, 4, 7};
      int nt;
      nt = (L >= 9) ? 9 : L;
      for (int i = 0; i <= L; i++) par[i] = 0;
      for (int i = 1; i <= nt; i++) par[i] = (tp[i] < i) ? tp[i] : 0;
      run(MODE_VERIFY, nt, par, path, S_TGT0, 0, 1);
      // accept 1 -> 4 -> 7 and recompute the committed state (Plan II)
      path[0] = 1; path[1] = (nt >= 4) ? 4 : 0; path[2] = (nt >= 7) ? 7 : 0;
      run(MODE_COMMIT, (nt >= 7) ? 3 : 1, par, path, S_TGT0, S_TGT1, 0);
    end
    // Second verification from the committed state: a full-width random tree.
    // parents drawn at random and sorted, which gives a breadth-first numbered tree
    for (int i = 1; i <= L; i++) par[i] = (i == 1) ? 0 : $urandom_range(0, i-1);
    for (int i = 1; i <= L; i++)
      for (int j = i+1; j <= L; j++)
        if (par[j] < par[i]) begin int tmp; tmp = par[i]; par[i] = par[j]; par[j] = tmp; end
    run(MODE_VERIFY, L, par, path, S_TGT1, 0, 1);

    // ---- mechanism coverage ----
    $display("events: stall=%0d pop=%0d push=%0d reuse=%0d discard=%0d store=%0d cache=%0d max_fifo=%0d",
             n_stall, n_pop, n_push, n_reuse, n_discard, n_store, n_cache, max_fifo);
    checks++; if (n_stall == 0)   begin failures++; $display("FAIL no linear stall"); end
    checks++; if (n_pop == 0)     begin failures++; $display("FAIL no FIFO pop"); end
    checks++; if (n_push == 0)    begin failures++; $display("FAIL no FIFO push"); end
    checks++; if (n_reuse == 0)   begin failures++; $display("FAIL no parent reuse"); end
    checks++; if (n_discard == 0) begin failures++; $display("FAIL no leaf discard"); end
    checks++; if (n_store == 0)   begin failures++; $display("FAIL no state store"); end
    checks++; if (n_cache == 0)   begin failures++; $display("FAIL no activation caching"); end
    checks++; if (fifo_overflow || fifo_underflow) begin failures++; $display("FAIL FIFO overflow/underflow"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
