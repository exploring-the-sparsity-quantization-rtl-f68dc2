// tb_dc_image_buffer: loads a random 3-channel 8x6 image and checks all 27
// taps for every output position, including zero padding at the borders.
module tb_dc_image_buffer;
  import snn_pkg::*;
  localparam int H = 8, W = 6;
  int checks = 0, failures = 0;
  logic clk = 0, wr_en = 0;
  logic [1:0] wr_ch; logic [$clog2(H*W)-1:0] wr_addr; pix_t wr_data;
  logic [$clog2(H)-1:0] row; logic [$clog2(W)-1:0] col;
  pix_t taps [27];
  pix_t img [3][H][W];
  dc_image_buffer #(.H(H), .W(W)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int c = 0; c < 3; c++) for (int r = 0; r < H; r++) for (int q = 0; q < W; q++) begin
      img[c][r][q] = pix_t'($urandom);
      @(negedge clk); wr_en = 1; wr_ch = 2'(c); wr_addr = $bits(wr_addr)'(r*W + q); wr_data = img[c][r][q];
    end
    @(negedge clk); wr_en = 0;
    for (int r = 0; r < H; r++) for (int q = 0; q < W; q++) begin
      row = $bits(row)'(r); col = $bits(col)'(q); #1;
      for (int c = 0; c < 3; c++) for (int k = 0; k < 9; k++) begin
        int rr, qq; pix_t e;
        rr = r + k/3 - 1; qq = q + k%3 - 1;
        e = (rr < 0 || rr >= H || qq < 0 || qq >= W) ? 8'd0 : img[c][rr][qq];
        checks++;
        if (taps[c*9+k] != e) begin failures++; $display("(%0d,%0d) tap %0d got %0d exp %0d", r, q, c*9+k, taps[c*9+k], e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
