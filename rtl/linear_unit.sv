// linear_unit: weight-broadcast MAC array of the SpecMamba accelerator.
//
// L tokens are processed in parallel. The weight matrix is cut into NBLK blocks along the
// output channel and each block into T_TILES tiles along the input channel. Every cycle in
// which a weight tile arrives (w_valid & w_ready) it is broadcast to the MACs of all L tokens,
// which multiply it with the matching input tile of their token and accumulate. After
// T_TILES tiles the block is complete: its L x BLK_OUT results are requantised to Q8.8 and
// moved into an output register, and accumulation of the next block starts at once, so a
// whole projection takes NBLK x T_TILES cycles when tiles stream without gaps. This schedule
// follows the paper; the tile sizes, the INT4 x INT4 arithmetic, the requantisation
// (saturate(acc << LIN_SHIFT)) and the valid/ready handshakes are this design's choices.
//
// Interface: input activations are written tile by tile through act_*; start begins a pass
// over NBLK blocks. The output register is offered on out_valid until out_ready; if a block
// finishes while the previous one is still held, the last tile of the new block is not
// accepted (stall = 1) until the register is free.
module linear_unit
  import specmamba_pkg::*;
#(
  parameter int L         = 16,
  parameter int TILE_IN   = 8,
  parameter int T_TILES   = 16,
  parameter int BLK_OUT   = 19,
  parameter int NBLK      = 16,
  parameter int ACT_W     = 4,
  parameter int WGT_W     = 4,
  parameter int LIN_SHIFT = 4,
  localparam int TW = $clog2(T_TILES),
  localparam int BW = (NBLK > 1) ? $clog2(NBLK) : 1,
  localparam int LW = $clog2(L)
) (
  input  logic clk,
  input  logic rst_n,
  // input activations
  input  logic                           act_we,
  input  logic [LW-1:0]                  act_tok,
  input  logic [TW-1:0]                  act_tile,
  input  logic [TILE_IN*ACT_W-1:0]       act_data,
  // control
  input  logic                           start,
  output logic                           busy,
  output logic                           stall,
  // weight tile stream, element (o,i) at bits [(o*TILE_IN+i)*WGT_W +: WGT_W]
  input  logic                           w_valid,
  output logic                           w_ready,
  input  logic [BLK_OUT*TILE_IN*WGT_W-1:0] w_data,
  // finished block
  output logic                           out_valid,
  input  logic                           out_ready,
  output logic [BW-1:0]                  out_blk,
  output fx_t                            out_data [L][BLK_OUT]
);

  logic [TILE_IN*ACT_W-1:0] act_mem [L][T_TILES];
  logic signed [31:0]       acc     [L][BLK_OUT];
  logic [TW-1:0]            tile_q;
  logic [BW-1:0]            blk_q;

  wire last_tile = (tile_q == TW'(T_TILES-1));
  assign stall   = busy && w_valid && last_tile && out_valid && !out_ready;
  assign w_ready = busy && !(last_tile && out_valid && !out_ready);
  wire   fire    = w_valid && w_ready;

  // Dot product of one weight row with one token's input tile.
  function automatic logic signed [31:0] dot(input logic [TILE_IN*ACT_W-1:0] a,
                                             input logic [BLK_OUT*TILE_IN*WGT_W-1:0] w,
                                             input int o);
    logic signed [31:0] s;
    s = '0;
    for (int i = 0; i < TILE_IN; i++)
      s += 32'(signed'(a[i*ACT_W +: ACT_W])) * 32'(signed'(w[(o*TILE_IN+i)*WGT_W +: WGT_W]));
    return s;
  endfunction

  always_ff @(posedge clk) begin
    if (act_we) act_mem[act_tok][act_tile] <= act_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      tile_q    <= '0;
      blk_q     <= '0;
      out_valid <= 1'b0;
      out_blk   <= '0;
      for (int l = 0; l < L; l++)
        for (int o = 0; o < BLK_OUT; o++) begin
          acc[l][o]      <= '0;
          out_data[l][o] <= '0;
        end
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (start && !busy) begin
        busy   <= 1'b1;
        tile_q <= '0;
        blk_q  <= '0;
      end else if (fire) begin
        for (int l = 0; l < L; l++)
          for (int o = 0; o < BLK_OUT; o++) begin
            logic signed [31:0] s;
            s = ((tile_q == '0) ? 32'sd0 : acc[l][o]) + dot(act_mem[l][tile_q], w_data, o);
            acc[l][o] <= s;
            if (last_tile) out_data[l][o] <= fx_sat(48'(s) <<< LIN_SHIFT);
          end
        if (last_tile) begin
          out_valid <= 1'b1;
          out_blk   <= blk_q;
          tile_q    <= '0;
          if (blk_q == BW'(NBLK-1)) busy <= 1'b0;
          else                      blk_q <= blk_q + 1'b1;
        end else begin
          tile_q <= tile_q + 1'b1;
        end
      end
    end
  end

endmodule
