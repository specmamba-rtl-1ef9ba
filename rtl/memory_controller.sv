// memory_controller: arbiter between the on-chip clients and the off-chip memory port.
//
// Three clients share one DDR/HBM port: weight-tile reads (weight buffer), state-tile reads
// and state-tile writes (state buffer). Each cycle at most one request is issued, with fixed
// priority state write > state read > weight read, so that the small state traffic is never
// stuck behind the long weight stream. The off-chip port returns read data in request order;
// a tag FIFO records which client each outstanding read belongs to and the response is
// steered to it. At most OUTST reads are outstanding. The paper only states that this unit
// schedules the transfers between the FPGA and off-chip memory; priority, tag queue and
// handshakes are this design's choices.
//
// Timing: a request is passed through combinationally (client valid -> mem_req_valid, mem
// ready -> client ready); responses are forwarded combinationally to the owning client.
module memory_controller
  import specmamba_pkg::*;
#(
  parameter int AW    = 24,
  parameter int DW    = 608,
  parameter int OUTST = 8
) (
  input  logic          clk,
  input  logic          rst_n,
  // weight read client
  input  logic          w_req_valid,
  output logic          w_req_ready,
  input  logic [AW-1:0] w_req_addr,
  output logic          w_rsp_valid,
  output logic [DW-1:0] w_rsp_data,
  // state read client
  input  logic          s_req_valid,
  output logic          s_req_ready,
  input  logic [AW-1:0] s_req_addr,
  output logic          s_rsp_valid,
  output logic [DW-1:0] s_rsp_data,
  // state write client
  input  logic          s_wr_valid,
  output logic          s_wr_ready,
  input  logic [AW-1:0] s_wr_addr,
  input  logic [DW-1:0] s_wr_data,
  // off-chip port
  output logic          mem_req_valid,
  input  logic          mem_req_ready,
  output logic          mem_req_we,
  output logic [AW-1:0] mem_req_addr,
  output logic [DW-1:0] mem_req_wdata,
  input  logic          mem_rsp_valid,
  input  logic [DW-1:0] mem_rsp_data
);

  logic tag_in_ready, tag_out_valid, tag_out;
  logic [$clog2(OUTST):0] tag_count;
  client_e rd_client;

  // Selection
  logic rd_sel;
  always_comb begin
    mem_req_valid = 1'b0;
    mem_req_we    = 1'b0;
    mem_req_addr  = '0;
    mem_req_wdata = s_wr_data;
    rd_client     = CLI_WEIGHT;
    rd_sel        = 1'b0;
    w_req_ready   = 1'b0;
    s_req_ready   = 1'b0;
    s_wr_ready    = 1'b0;
    if (s_wr_valid) begin
      mem_req_valid = 1'b1;
      mem_req_we    = 1'b1;
      mem_req_addr  = s_wr_addr;
      s_wr_ready    = mem_req_ready;
    end else if (s_req_valid && tag_in_ready) begin
      mem_req_valid = 1'b1;
      mem_req_addr  = s_req_addr;
      rd_client     = CLI_STATE;
      rd_sel        = 1'b1;
      s_req_ready   = mem_req_ready;
    end else if (w_req_valid && tag_in_ready) begin
      mem_req_valid = 1'b1;
      mem_req_addr  = w_req_addr;
      rd_client     = CLI_WEIGHT;
      rd_sel        = 1'b1;
      w_req_ready   = mem_req_ready;
    end
  end

  sync_fifo #(.W(1), .DEPTH(OUTST)) u_tags (
    .clk, .rst_n,
    .in_valid (rd_sel && mem_req_ready),
    .in_ready (tag_in_ready),
    .in_data  (rd_client),
    .out_valid(tag_out_valid),
    .out_ready(mem_rsp_valid),
    .out_data (tag_out),
    .count    (tag_count)
  );

  assign w_rsp_valid = mem_rsp_valid && tag_out_valid && (tag_out == CLI_WEIGHT);
  assign s_rsp_valid = mem_rsp_valid && tag_out_valid && (tag_out == CLI_STATE);
  assign w_rsp_data  = mem_rsp_data;
  assign s_rsp_data  = mem_rsp_data;

  // A response may only arrive for a read that was issued.
  assert property (@(posedge clk) disable iff (!rst_n) mem_rsp_valid |-> tag_out_valid)
    else $error("memory_controller: read response without outstanding request");

endmodule
