# SpecMamba RTL: speculative decoding for Mamba2 on an FPGA datapath

Speculative decoding makes a large language model faster. A small *draft* model guesses
several tokens ahead, and the large *target* model checks all of the guesses in one pass.
Mamba makes this harder than a Transformer does, for three reasons:

- **Rejected guesses cannot be dropped.** A Mamba layer carries a recurrent hidden state
  h (n = 128 values per channel). Each accepted or rejected token changes h, and the
  update cannot be undone. The design must keep or rebuild the state of the last
  accepted token.
- **Tree verification needs many states.** Checking a *tree* of guesses means every branch
  needs its own copy of h. Keeping a full state per node costs far too much memory.
- **The two layer types stress hardware differently.** Linear layers are limited by memory
  bandwidth. The SSM recurrence is limited by compute and is sequential from token to
  token.

This RTL implements the accelerator architecture that answers these problems. It has
three parts:

1. **Hybrid backtracking.** The draft model stores every intermediate state off-chip. The
   target model caches only the small per-token activations on chip. Once the accepted
   path is known, it recomputes the state from that cache.
2. **FIFO-based tree verification with tiling.** The tree is walked breadth-first, one
   tile of the state at a time. Only the states that still have unprocessed children stay
   on chip, in a FIFO of at most N/2 tiles.
3. **Linear-parallel / SSM-sequential dataflow.** The linear unit processes all tokens of
   a tree together. The SSM unit walks the tokens one per cycle, and the two overlap
   block by block.

Each feature is described below, together with the numbers this RTL uses.

The top module `specmamba_top` is one pipeline for **one channel of one Mamba2 layer**. A
host (the processor system on the FPGA) calls it once per channel and layer.

## Building blocks and the path of a token

```
 off-chip DDR/HBM
      |
 memory_controller ---- state_buffer <------> ssm_state_controller ---- tree_state_fifo
      |                                              |                        |
 weight_buffer                                       v                        v
      |                 +--> conv_unit --> sfu --> ssm_unit (EMUs) <--- parent tile
 linear_unit (L tokens) |                            |      \
   block b = {dt, x, z, B tile, C tile} -------------+       \--> activation_cache (VERIFY)
                                                     v
                                              residual_unit --> out_*
```

| Module | Role |
|---|---|
| `linear_unit` | INT4 weight-broadcast MAC array, L tokens in parallel |
| `conv_unit` | Causal depthwise 1-D convolution (K = 4) on x, B and C. The window is tree-aware. |
| `sfu` | SiLU on x, B, C and the gate z |
| `ssm_unit` | One token × one G-wide state tile per cycle: h' = A·dt·h + B·dt·x, then y = (Σ h'·C + D·x)·z |
| `tree_state_fifo` | Holds the parent state tiles of the tree walk |
| `ssm_state_controller` | Schedules tiles, tokens, FIFO pops and pushes, state loads and stores, and cache writes |
| `activation_cache` | dt, x and the B tile of every verified token, per state tile |
| `state_buffer` | Prefetch queue for state tiles to load, write queue for tiles to store |
| `weight_buffer` | Credit-limited prefetch of the weight tiles of one projection |
| `memory_controller` | One off-chip port shared by three clients: state writes first, then state reads, then weight reads. Read data returns in order. |
| `residual_unit` | Adds the residual input to y, per token |
| `sync_fifo` | Generic valid/ready FIFO used by the buffers and the controller |
| `specmamba_pkg` | Q8.8 type `fx_t`, saturating helpers, command and client enums |

## Commands: DRAFT, VERIFY, COMMIT

The host loads the following, then issues a command (`cmd_valid`/`cmd_ready`):

- INT4 input activations (`act_*`), one tile of `TILE_IN` inputs per token and tile;
- the residual input per token (`res_*`);
- conv weights per model (`cw_*`);
- the per-model constants A and D (`a_coef[m]`, `d_coef[m]`);
- the tree (`tree_parent`);
- for COMMIT, the accepted path (`accept_path`).

Model 0 is the draft model and model 1 the target model.

| Mode | Model | Weights read | States loaded from | States stored to | Output |
|---|---|---|---|---|---|
| DRAFT (0) | draft | yes | `cmd_ld_addr + blk` | `cmd_st_addr + (node-1)·NBLK + blk`, every node | y per token |
| VERIFY (1) | target | yes | `cmd_ld_addr + blk` (committed state) | none; the activation cache is written instead | y per tree node |
| COMMIT (2) | target | no | `cmd_ld_addr + blk` | `cmd_st_addr + blk`, final state only | none |

`cmd_ntok` is the number of tokens in the command (1..L). `done` pulses once the last tile
has been computed and stored.

A typical decoding step runs these commands:

1. DRAFT, several times: one token per command, or a short chain.
2. VERIFY of the whole tree.
3. COMMIT of the path the host accepted, based on the outputs of VERIFY.
4. The next VERIFY loads the state that COMMIT stored.

The draft model can resume from any stored node state, so rolling back the draft model
costs nothing.

### The tree

Nodes are numbered 1..N in breadth-first order. `tree_parent[i]` is the parent of node i,
0 stands for the root (the committed state), and `tree_parent[i] < i` must hold. The
example tree used throughout the testbenches is:

```
            root(0)
        /     |     \
       1      2      3
     /  \     |
    4    5    6
   / \
  7   8
  |
  9
parent = {-, 0,0,0, 1,1, 2, 4,4, 7}
```

## FIFO-based tree verification with tiling

This is the central mechanism of the design.

A verified token i needs the state of its parent. Keeping every node's full state (n =
128 values per channel) for a 16-node tree would not fit on chip. Two facts make the
memory small:

- **Tiles are the outer loop.** The state is split into NBLK = 16 tiles of G = 8
  elements. The controller processes tile 0 for all tokens, then tile 1 for all tokens,
  and so on. Only one G-wide tile of any state is ever live.
- **Breadth-first order makes the live parents a queue.** With nodes in breadth-first
  order, the parents are needed in the order they were produced. When a node's state
  tile is produced, it is pushed only if the node has children. A node whose parent
  differs from the one held in the SSM unit pops the FIFO head. A node with the same
  parent as the previous node reuses the held parent, with no FIFO access. Leaves are
  never pushed. At most N/2 tiles are in the FIFO at once.

For every tile the controller takes the following steps:

1. **Step T = 0.** It takes the root tile from the state buffer and pushes it into the
   FIFO.
2. **Steps T = 1..N, one token per cycle.** For each token, it pops or reuses the parent
   tile, runs the SSM step, pushes the result if the node has children, and writes the
   node's activations into the cache (VERIFY).

The last token of a tile releases the linear-unit block, and the next tile starts. The
cost is 1 + N cycles per tile.

For the example tree the per-tile schedule is:

| T | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 | 9 |
|---|---|---|---|---|---|---|---|---|---|
| parent | 0 | 0 | 0 | 1 | 1 | 2 | 4 | 4 | 7 |
| FIFO | pop | reuse | reuse | pop | reuse | pop | pop | reuse | pop |
| result | push | push | drop | push | drop | drop | push | drop | drop |

The controller asserts that every pop delivers exactly the expected parent. The FIFO has
sticky `overflow` / `underflow` flags, which the top exposes as ports.

## Hybrid backtracking: stored draft states, recomputed target states

- **Draft model (store everything).** The draft runs one token at a time. Every produced
  state tile is written off-chip at `st_addr + (node-1)·NBLK + blk`. Each write overlaps
  the weight streaming of the same command. To roll back, the next DRAFT or VERIFY simply
  loads from another address.
- **Target model (recompute).** Storing a state per tree node would multiply the off-chip
  traffic. During VERIFY, the activation cache instead keeps dt, x and the B tile of every
  token for every state tile: L × NBLK entries of (2 + G) Q8.8 values. COMMIT then
  replays the accepted path from the committed state, reading the cache instead of the
  linear unit. It stores only the final state. Replaying k accepted tokens costs
  NBLK·(1 + k) cycles and reads no weights.
- **Conv history follows the same rule.** `conv_unit` remembers the inputs of every tree
  node. COMMIT shifts the nodes of the accepted path into the target model's conv
  history.

In the paper, the recomputation is folded into the start of the next verification. Here
it is a separate COMMIT command. The arithmetic is the same; the only difference is one
extra command per step.

## Linear-parallel, SSM-sequential dataflow

The in-projection weights are split as follows:

- **Blocks.** There are NBLK = 16 blocks along the output dimension, one block per state
  tile. Block b carries the outputs `{dt, x, z, B[8b..8b+7], C[8b..8b+7]}`, so
  BLK_OUT = 2G + 3 = 19 outputs.
- **Tiles.** Each block has T_TILES = 16 tiles of TILE_IN = 8 inputs along the input
  dimension.

The `linear_unit` works as follows:

- **One weight tile per cycle.** Each cycle, one weight tile (19 × 8 INT4 weights = 608
  bits, one memory beat) is broadcast to the MACs of all L = 16 tokens. After 16 cycles a
  block is complete for every token.
- **Output register.** The finished block moves to an output register. The next block
  starts accumulating at once, while the conv → SFU → SSM side consumes the held block
  one token per cycle.
- **Timing.** The linear side needs T_TILES = 16 cycles per block; the SSM side needs
  N + 1 ≤ 17. The two overlap, so a 16-token VERIFY takes roughly NBLK × max(T_TILES,
  N+1) cycles plus fill and drain. The full-size testbench measures 300 cycles for 16
  tokens, against 256 cycles of pure weight streaming.
- **Stalls.** If the SSM side has not released the held block when the next block's last
  tile arrives, the linear unit stalls that tile (`ev_lin_stall`). The testbenches
  provoke this case.

The accumulators are 32-bit. A finished output is requantised to Q8.8 as
`sat(acc << LIN_SHIFT)`, with LIN_SHIFT = 4.

## Arithmetic

- **Number formats.** Weights and input activations are 4-bit signed (INT4). Everything
  after the linear unit is Q8.8 signed 16-bit with saturation (`fx_sat`, `fx_mul`,
  `fx_add` in `specmamba_pkg`).
- **SSM step, per element g of a tile:**
  - Ā = A·dt and B̄[g] = B[g]·dt, by plain products.
  - h'[g] = Ā·h[g] + B̄[g]·x.
  - y accumulates Σ h'[g]·C[g] over all 16 tiles.
  - After the last tile, y = (Σ + D·x)·z.

  Textbook Mamba uses exp(A·dt) and a softplus on dt. The formulas printed with this
  design have neither, and the RTL follows them. Two printed versions of the output
  equation disagree: one uses the previous state with C, the dataflow figure uses the new
  state. The RTL uses the new state, h'·C.
- **SiLU** is approximated as `v · clamp(v·43/256 + 1/2, 0, 1)`. The result is exact for
  |v| ≥ 3 and within 0.15 elsewhere.
- **Conv.** The window is K = 4 taps per lane and model. For a tree node, the previous
  taps follow the node's own ancestor chain (parent, grandparent, …). Once the chain
  reaches the root, they continue into the committed history. Each branch therefore sees
  exactly the sequence it would see alone.

## Memory system

- **Memory port.** `memory_controller` presents one in-order request/response port
  (`mem_*`) with a DW = 608-bit word. Its priority order is state write, then state read,
  then weight read: state traffic is small and must never wait behind a weight stream. A
  tag FIFO of OUTST = 8 entries sends each read response to the client that issued it.
- **Weight and state buffers.** `weight_buffer` (16 entries in the top) and `state_buffer`
  (4 entries) issue a request only when they have room for its response. A response
  therefore never has to be refused. State tiles occupy the low G × 16 = 128 bits of a
  memory word.
- **Memory model.** The memory itself (DDR4 or HBM with its controller IP) is not part of
  the RTL. The testbenches use an in-order behavioural model with random back-pressure
  and a fixed latency.

## Parameters

Defaults of `specmamba_top`:

| Parameter | Default | Meaning / origin |
|---|---|---|
| `L` | 16 | Maximum tokens per tree (the paper's default prediction length) |
| `G` | 8 | State elements per tile (own choice) |
| `NBLK` | 16 | State tiles: NBLK·G = n = 128, the Mamba2-2.7B state size |
| `TILE_IN`, `T_TILES` | 8, 16 | Linear tile width and tiles per block, so 128 inputs per pass (own choice) |
| `ACT_W`, `WGT_W` | 4, 4 | INT4 activations and weights |
| `LIN_SHIFT` | 4 | Requantisation shift (own choice) |
| `KCONV` | 4 | Conv taps (Mamba2's usual kernel; not given with the design) |
| `FIFO_DEPTH` | L/2 = 8 | Bound N/2 of the tree FIFO |
| `WB_DEPTH` | 16 | Weight prefetch depth (own choice) |
| `AW` | 24 | Off-chip word address width (own choice) |

**What fits at these defaults:**

- Trees and chains of 1..16 tokens (prediction lengths 6..16) fit.
- The state size n = 128 of every Mamba2 model evaluated (130M, 370M, 780M drafts and the
  2.7B target) fits, one channel per command.
- A whole layer does not fit in one pass. The in-projection of those models reduces over
  768..2560 inputs, and one linear pass here reduces over 128. Splitting that reduction
  across passes is not supported.

## Departures and gaps

- **Scope of the top.** The top is one channel slice. The outer loops over 80 heads × 64
  channels and over layers belong to the host. The way slices map onto the FPGA's DSPs is
  not modelled.
- **RMSNorm.** The two RMSNorm layers of a Mamba block are not built. No unit of the
  accelerator is given for them, and the top expects normalised INT4 inputs.
- **Out projection.** The out projection is not a separate unit. It would be one more pass
  of `linear_unit`, which the host would have to sequence.
- **Other own choices.** COMMIT is a separate command. The command format, the
  parent-table tree encoding, the memory map, the handshakes, Q8.8, the SiLU
  approximation, the conv kernel size and tree handling, and the controller priorities
  are all this design's own choices.
- **No softplus or exp.** dt is used as the linear unit produces it, and A·dt replaces
  exp(A·dt).

- **Root step per tile.** Each tile starts with a root step, T = 0, in which the committed
  state tile is pushed into the FIFO. Token 1 then pops it, so a tile costs N + 1 cycles,
  not N. In the worked example of the method, pops are listed only at T = 4, 6, 7 and 9,
  and the root goes straight into the SSM unit. The root step is not overlapped with the
  previous tile.

## Simulation

Every testbench is self-checking. It ends with a line
`TB_RESULT checks=<n> failures=<m>` and has a watchdog. Run one with plain Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/specmamba_pkg.sv tb/tb_ssm_unit.sv --top-module tb_ssm_unit
./obj_dir/Vtb_ssm_unit
```

| Testbench | What it checks |
|---|---|
| `tb_linear_unit` | Random INT4 tiles against a reference matmul. The stall works under a slow consumer, and timing is NBLK·T_TILES cycles. |
| `tb_tree_state_fifo` | Random push/pop (also in the same cycle) against a queue model, the example-tree push/pop order, and a deliberate overflow and underflow that must raise the sticky flags. |
| `tb_ssm_unit` | Random steps against a reference recurrence, with parent hold/reuse and the y timing. |
| `tb_ssm_state_controller` | The example-tree schedule above, cycle for cycle (1 + N per tile). Also draft store addresses under back-pressure and the COMMIT replay. |
| `tb_conv_unit` | Tree windows, draft history and COMMIT shift, against a reference. |
| `tb_sfu`, `tb_residual_unit`, `tb_activation_cache` | Sweeps and random checks against reference formulas. |
| `tb_memory_controller`, `tb_weight_buffer`, `tb_state_buffer` | Random traffic, random memory latency and back-pressure. They check priority, ordering, data, credit limits and throughput. |
| `tb_specmamba_top` | End-to-end run at reduced sizes (L = 10, G = 2, NBLK = 4): two single-token DRAFTs, a 3-token DRAFT chain, VERIFY of the example tree, COMMIT of path 1-4-7, and VERIFY of a random 10-node tree from the committed state. Every output is checked against an independent fixed-point model of the whole layer. Each mechanism (linear stall, FIFO pop, push, reuse, discard, state store, cache write) must occur, and the FIFO must never overflow or underflow. |
| `tb_specmamba_full` | The same sequence with `specmamba_top` at its default sizes, no overrides, with a random 16-token tree. It takes about 3 minutes to compile and under a second to run. |

`specmamba_bench` holds the shared host, memory model and reference model of the two
end-to-end testbenches.

Tree sizes simulated end to end are 1, 3, 9 and 10 tokens at the reduced sizes, and 1, 3,
9 and 16 tokens at the default sizes. The shorter prediction lengths of the evaluation
(6 to 14 tokens) use the same schedule with a smaller `cmd_ntok` and were not run as
separate cases.
