// sync_fifo: small synchronous FIFO with valid/ready on both sides (helper).
//
// Show-ahead: out_data is the oldest entry whenever out_valid is high. A write and a read
// may happen in the same cycle. in_ready is low only when the FIFO is full. 'count' is the
// occupancy, used by the prefetchers to limit outstanding requests.
module sync_fifo #(
  parameter int W     = 8,
  parameter int DEPTH = 4,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [W-1:0] out_data,
  output logic [AW:0]  count
);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rd_q, wr_q;

  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_q];
  wire wr = in_valid && in_ready;
  wire rd = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (wr) mem[wr_q] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q <= '0; wr_q <= '0; count <= '0;
    end else begin
      if (wr) wr_q <= (wr_q == AW'(DEPTH-1)) ? '0 : wr_q + 1'b1;
      if (rd) rd_q <= (rd_q == AW'(DEPTH-1)) ? '0 : rd_q + 1'b1;
      count <= count + (AW+1)'(wr) - (AW+1)'(rd);
    end
  end

endmodule
