// tb_dense_core: the dense core on a 5x4 three-channel image, 4 output
// channels on 2 PE rows, 2 timesteps. Random pixels, weights and biases are
// loaded; every spike train written to the Spike RAM port is compared with a
// model of the zero-padded 3x3 convolution followed by the LIF step, at
// address t*4 + channel. Also checks the layer latency
// 1 + GROUPS * (1 + T*(H*W + 27 + 2*ROWS + 1)) from start to layer_avail,
// that the PE rows were reloaded for each group and that EN reached every row.
module tb_dense_core;
  import snn_pkg::*;
  localparam int H = 5, W = 4, ROWS = 2, OC = 4, T = 2;
  int checks = 0, failures = 0, nwr = 0, nspk = 0, nload = 0, nen = 0;
  logic clk = 0, rst_n = 0;
  logic img_we = 0; logic [1:0] img_ch; logic [4:0] img_addr; pix_t img_data;
  logic w_we = 0; logic [1:0] w_ch; weight_t w_data [27]; weight_t b_data;
  logic start = 0, layer_avail, busy, sr_we; logic [2:0] sr_waddr; logic [H*W-1:0] sr_wdata;
  pix_t img [3][H][W];
  weight_t wt [OC][27]; weight_t bs [OC];
  logic [H*W-1:0] got [T*OC];
  dense_core #(.H(H), .W(W), .ROWS(ROWS), .OUT_CH(OC), .T(T)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n) begin
    if (sr_we) begin got[sr_waddr] <= sr_wdata; nwr++; end
    if (dut.w_load) nload++;
    if (dut.en[ROWS-1]) nen++;
  end
  initial begin
    #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int cyc, exp_cyc;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int c = 0; c < 3; c++) for (int r = 0; r < H; r++) for (int q = 0; q < W; q++) begin
      img[c][r][q] = pix_t'($urandom);
      @(negedge clk); img_we = 1; img_ch = 2'(c); img_addr = 5'(r*W+q); img_data = img[c][r][q];
    end
    @(negedge clk); img_we = 0;
    for (int o = 0; o < OC; o++) begin
      for (int k = 0; k < 27; k++) begin wt[o][k] = weight_t'($urandom); w_data[k] = wt[o][k]; end
      bs[o] = weight_t'($urandom); b_data = bs[o];
      w_we = 1; w_ch = 2'(o); @(negedge clk);
    end
    w_we = 0;
    start = 1; @(negedge clk); start = 0; cyc = 1;
    while (!layer_avail) begin @(negedge clk); cyc++; end
    exp_cyc = 1 + (OC/ROWS) * (1 + T*(H*W + 27 + 2*ROWS + 1));
    checks++; if (cyc != exp_cyc) begin failures++; $display("latency %0d exp %0d", cyc, exp_cyc); end
    checks++; if (nwr != T*OC) begin failures++; $display("writes %0d", nwr); end
    checks++; if (nload != OC/ROWS) begin failures++; $display("weight loads %0d", nload); end
    checks++; if (nen != T*(OC/ROWS)*H*W) begin failures++; $display("EN cycles %0d", nen); end
    for (int o = 0; o < OC; o++) begin
      longint m [H*W];
      for (int t = 0; t < T; t++) begin
        logic [H*W-1:0] et;
        for (int r = 0; r < H; r++) for (int q = 0; q < W; q++) begin
          longint ps, u; bit s;
          ps = 0;
          for (int c = 0; c < 3; c++) for (int k = 0; k < 9; k++) begin
            int rr, qq; rr = r + k/3 - 1; qq = q + k%3 - 1;
            if (rr >= 0 && rr < H && qq >= 0 && qq < W) ps += longint'(wt[o][c*9+k]) * longint'(img[c][rr][qq]);
          end
          u = (t == 0 ? 0 : m[r*W+q]) + ((ps * 32) >>> 8) + longint'(bs[o]) * 32;
          s = u > 128;
          m[r*W+q] = ((s ? u - 128 : u) * 38) >>> 8;
          et[r*W+q] = s; if (s) nspk++;
        end
        checks++;
        if (got[t*OC+o] != et) begin failures++; $display("t=%0d ch=%0d got %h exp %h", t, o, got[t*OC+o], et); end
      end
    end
    checks++; if (nspk == 0) begin failures++; $display("no spikes"); end
    $display("dense core latency %0d cycles", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
