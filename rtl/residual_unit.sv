// residual_unit: residual connection at the end of the Mamba block.
//
// The host writes each token's residual value (the block input of this channel, Q8.8)
// before a pass. When the SSM path delivers a token's output, the unit adds the stored
// residual with saturation and sends the sum on, one cycle later, towards the next layer
// or the host. Adding the residual follows the paper; the buffer, saturation and
// one-cycle registered output are this design's choices.
module residual_unit
  import specmamba_pkg::*;
#(
  parameter int L  = 16,
  localparam int NW = $clog2(L+1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          r_we,
  input  logic [NW-1:0] r_tok,
  input  fx_t           r_data,
  input  logic          in_valid,
  input  logic [NW-1:0] in_tok,
  input  fx_t           in_data,
  output logic          out_valid,
  output logic [NW-1:0] out_tok,
  output fx_t           out_data
);

  fx_t resid [L+1];

  always_ff @(posedge clk) begin
    if (r_we) resid[r_tok] <= r_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_tok   <= '0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_tok  <= in_tok;
        out_data <= fx_add(resid[in_tok], in_data);
      end
    end
  end

endmodule
