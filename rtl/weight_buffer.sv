// weight_buffer: on-chip prefetch buffer of weight tiles for the linear unit.
//
// On start it reads 'count' consecutive tiles from 'base' through the memory controller and
// queues them in a DEPTH-entry FIFO; the linear unit takes them in order. Requests are
// issued only while the tiles in flight plus those queued fit in the FIFO, so a response
// always has room and the memory stream runs back-to-back as long as the linear unit keeps
// up. The paper names the weight buffer; the prefetch scheme is this design's choice.
module weight_buffer #(
  parameter int AW    = 24,
  parameter int DW    = 608,
  parameter int CW    = 16,
  parameter int DEPTH = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW-1:0] base,
  input  logic [CW-1:0] count,
  output logic          busy,
  // to the memory controller
  output logic          req_valid,
  input  logic          req_ready,
  output logic [AW-1:0] req_addr,
  input  logic          rsp_valid,
  input  logic [DW-1:0] rsp_data,
  // to the linear unit
  output logic          out_valid,
  input  logic          out_ready,
  output logic [DW-1:0] out_data
);

  localparam int QW = $clog2(DEPTH);
  logic [CW-1:0] left_q;
  logic [AW-1:0] addr_q;
  logic [QW:0]   inflight_q, q_count;
  logic          q_in_ready;

  assign req_valid = (left_q != '0) && ((inflight_q + q_count) < (QW+1)'(DEPTH));
  assign req_addr  = addr_q;
  wire   issue     = req_valid && req_ready;
  assign busy      = (left_q != '0) || (inflight_q != '0) || out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      left_q <= '0; addr_q <= '0; inflight_q <= '0;
    end else begin
      if (start) begin
        left_q <= count;
        addr_q <= base;
      end else if (issue) begin
        left_q <= left_q - 1'b1;
        addr_q <= addr_q + 1'b1;
      end
      inflight_q <= inflight_q + (QW+1)'(issue) - (QW+1)'(rsp_valid);
    end
  end

  sync_fifo #(.W(DW), .DEPTH(DEPTH)) u_q (
    .clk, .rst_n,
    .in_valid (rsp_valid), .in_ready(q_in_ready), .in_data(rsp_data),
    .out_valid, .out_ready, .out_data, .count(q_count)
  );

  assert property (@(posedge clk) disable iff (!rst_n) rsp_valid |-> q_in_ready)
    else $error("weight_buffer: response with no room");

endmodule
