// state_buffer: on-chip staging buffer for hidden-state tiles (load and store queues).
//
// Load side: ld_start asks for ld_count consecutive state tiles from ld_base (one tile per
// memory word). They are prefetched through the memory controller into a DEPTH-entry FIFO
// and handed to the state controller in order, so that the state needed by the next tile
// iteration is already on chip when the SSM unit reaches it (overlapping the state load with
// the weight stream). Store side: tiles written by the state controller (with their memory
// address) queue here until the memory controller accepts them. The paper names a state
// buffer between the memory controller and the state controller; the queue structure is
// this design's choice. Tiles are G Q8.8 elements, padded into the DW-bit memory word.
module state_buffer
  import specmamba_pkg::*;
#(
  parameter int AW    = 24,
  parameter int DW    = 608,
  parameter int G     = 8,
  parameter int CW    = 16,
  parameter int DEPTH = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  // load side
  input  logic          ld_start,
  input  logic [AW-1:0] ld_base,
  input  logic [CW-1:0] ld_count,
  output logic          ld_valid,
  input  logic          ld_ready,
  output fx_t           ld_data [G],
  // store side
  input  logic          st_valid,
  output logic          st_ready,
  input  logic [AW-1:0] st_addr,
  input  fx_t           st_data [G],
  output logic          idle,
  // memory controller: state reads
  output logic          rd_req_valid,
  input  logic          rd_req_ready,
  output logic [AW-1:0] rd_req_addr,
  input  logic          rd_rsp_valid,
  input  logic [DW-1:0] rd_rsp_data,
  // memory controller: state writes
  output logic          wr_valid,
  input  logic          wr_ready,
  output logic [AW-1:0] wr_addr,
  output logic [DW-1:0] wr_data
);

  localparam int TW = G*FX_W;
  localparam int QW = $clog2(DEPTH);

  logic [CW-1:0] left_q;
  logic [AW-1:0] addr_q;
  logic [QW:0]   inflight_q, lq_count, sq_count;
  logic          lq_in_ready;
  logic [TW-1:0] lq_out, st_packed;
  logic [AW+TW-1:0] sq_out;

  assign rd_req_valid = (left_q != '0) && ((inflight_q + lq_count) < (QW+1)'(DEPTH));
  assign rd_req_addr  = addr_q;
  wire   issue        = rd_req_valid && rd_req_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      left_q <= '0; addr_q <= '0; inflight_q <= '0;
    end else begin
      if (ld_start) begin
        left_q <= ld_count;
        addr_q <= ld_base;
      end else if (issue) begin
        left_q <= left_q - 1'b1;
        addr_q <= addr_q + 1'b1;
      end
      inflight_q <= inflight_q + (QW+1)'(issue) - (QW+1)'(rd_rsp_valid);
    end
  end

  sync_fifo #(.W(TW), .DEPTH(DEPTH)) u_ldq (
    .clk, .rst_n,
    .in_valid (rd_rsp_valid), .in_ready(lq_in_ready), .in_data(rd_rsp_data[TW-1:0]),
    .out_valid(ld_valid), .out_ready(ld_ready), .out_data(lq_out), .count(lq_count)
  );

  always_comb
    for (int g = 0; g < G; g++) begin
      ld_data[g] = fx_t'(lq_out[g*FX_W +: FX_W]);
      st_packed[g*FX_W +: FX_W] = st_data[g];
    end

  sync_fifo #(.W(AW+TW), .DEPTH(DEPTH)) u_stq (
    .clk, .rst_n,
    .in_valid (st_valid), .in_ready(st_ready), .in_data({st_addr, st_packed}),
    .out_valid(wr_valid), .out_ready(wr_ready), .out_data(sq_out), .count(sq_count)
  );

  assign wr_addr = sq_out[AW+TW-1:TW];
  assign wr_data = DW'(sq_out[TW-1:0]);
  assign idle    = (left_q == '0) && (inflight_q == '0) && !wr_valid;

  assert property (@(posedge clk) disable iff (!rst_n) rd_rsp_valid |-> lq_in_ready)
    else $error("state_buffer: response with no room");

endmodule
