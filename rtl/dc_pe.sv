// dc_pe: dense-core processing element.
//
// Holds one int4 weight in a register (weight-stationary dataflow) and one
// multiply-accumulate: psum_out <= psum_in + w * pix. The pixel is also
// registered and passed to the PE below, so pixels move down the array one
// row per cycle while partial sums move right one PE per cycle. Both outputs
// have one cycle of latency. rst clears the registered outputs (the paper's
// rst that clears partial sums at a channel change). The MAC and the weight
// register follow the paper; the widths are this design's choice.
module dc_pe
  import snn_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    rst,
  input  logic    w_load,
  input  weight_t w_in,
  input  pix_t    pix,
  input  psum_t   psum_in,
  output psum_t   psum_out,
  output pix_t    pix_out
);
  weight_t w_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_q      <= '0;
      psum_out <= '0;
      pix_out  <= '0;
    end else begin
      if (w_load) w_q <= w_in;
      if (rst) begin
        psum_out <= '0;
        pix_out  <= '0;
      end else begin
        psum_out <= psum_in + PSUM_W'(w_q) * $signed({1'b0, pix});
        pix_out  <= pix;
      end
    end
  end
endmodule
