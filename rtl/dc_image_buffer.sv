// dc_image_buffer: flip-flop image buffers of the dense core, one per input channel.
//
// The input image (IN_CH channels of H x W unsigned pixels, row-major) is
// written one pixel per cycle through wr_*. For the output pixel (row, col)
// the 27 read ports return the 3 x 3 neighbourhood of every channel, tap
// k = c*9 + ky*3 + kx reading pixel (row+ky-1, col+kx-1) of channel c, and 0
// outside the image (zero padding, so the output map has the input's size).
// This is the read-index calculation of the paper's Address Generation
// Routine. Reads are combinational. Flip-flop storage follows the paper;
// padding and the tap order (matching the PE numbering of the dense-core
// figure, w(c, ky*3+kx)) are this design's choice.
module dc_image_buffer
  import snn_pkg::*;
#(
  parameter int unsigned H     = 32,
  parameter int unsigned W     = 32,
  parameter int unsigned IN_CH = 3
) (
  input  logic                         clk,
  input  logic                         wr_en,
  input  logic [1:0]                   wr_ch,
  input  logic [$clog2(H*W)-1:0]       wr_addr,
  input  pix_t                         wr_data,
  input  logic [$clog2(H)-1:0]         row,
  input  logic [$clog2(W)-1:0]         col,
  output pix_t                         taps [IN_CH*9]
);
  pix_t img [IN_CH][H*W];

  always_ff @(posedge clk) begin
    if (wr_en) img[wr_ch][wr_addr] <= wr_data;
  end

  always_comb begin
    for (int c = 0; c < IN_CH; c++) begin
      for (int ky = 0; ky < 3; ky++) begin
        for (int kx = 0; kx < 3; kx++) begin
          int r, q;
          r = int'(row) + ky - 1;
          q = int'(col) + kx - 1;
          if (r < 0 || r >= int'(H) || q < 0 || q >= int'(W))
            taps[c*9 + ky*3 + kx] = '0;
          else
            taps[c*9 + ky*3 + kx] = img[c][r*W + q];
        end
      end
    end
  end
endmodule
