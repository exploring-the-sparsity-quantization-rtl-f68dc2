// tb_snn_hybrid_full: one image through the accelerator at its default size
// (the paper's CIFAR100 configuration: 32x32x3 input, VGG9 with P = 5000,
// 2 timesteps, (1, 28, 12, 54, 16, 72, 70, 19, 4) cores).
// The dense core's weights are random and loaded through the ports. The image
// is dark except for a 2x2 patch of random pixels, so that activity stays
// local, as in the sparse maps the design is built for; a dense random image
// would need some 20 M cycles. Every sparse-layer bias is loaded as -8 (the
// most negative int4 value); the sparse weights are whatever the weight
// memories hold at power-up (loading 17 M weights would dominate the run), so
// sparse-layer spikes are not compared with a model. Checked:
//  * every spike train of the input layer against a model of the dense core;
//  * for every sparse layer, address generation spent exactly
//    9 * (C_out / N) cycles per input spike (C_out / N for FC), the paper's
//    workload model W = F x C_out x sum(S) divided over N cores;
//  * the output population becomes available.
// Per-layer latency in cycles (at 100 MHz, 10 ns each) is printed.
module tb_snn_hybrid_full;
  import snn_pkg::*;
  localparam int H = 32, W = 32, T = 2, C1 = 64;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic img_we = 0, img_ready, start = 0; logic [1:0] img_ch; logic [9:0] img_addr; pix_t img_data;
  logic dcw_we = 0; logic [5:0] dcw_ch; weight_t dcw_data [27]; weight_t dcb_data;
  logic sw_we = 0, sb_we = 0; logic [3:0] sw_layer = 0; logic [7:0] sw_nc = 0; logic [23:0] sw_addr = 0;
  logic [15:0] sb_slot = 0; weight_t sw_data = 0;
  logic out_valid, out_re = 0, out_rdata, out_ack = 0; logic [13:0] out_raddr = 0;
  logic [8:0] layer_busy;
  snn_hybrid_top dut (.*);
  always #5 clk = ~clk;

  // address-generation busy cycles and latency per layer
  longint ag [9]; longint lat [9];
  initial for (int k = 0; k < 9; k++) begin ag[k] = 0; lat[k] = 0; end
  logic [8:0] busy_q = '0;
  always @(posedge clk) if (rst_n) begin
    busy_q <= layer_busy;
    for (int k = 0; k < 9; k++) begin
      if (layer_busy[k]) lat[k]++;
      if (busy_q[k] && !layer_busy[k]) $display("layer %0d finished at cycle %0t", k, $time / 10);
    end
    if (dut.u_conv1_2.u_ag.busy) ag[1]++;
    if (dut.u_conv2_1.u_ag.busy) ag[2]++;
    if (dut.u_conv2_2.u_ag.busy) ag[3]++;
    if (dut.u_conv3_1.u_ag.busy) ag[4]++;
    if (dut.u_conv3_2.u_ag.busy) ag[5]++;
    if (dut.u_conv3_3.u_ag.busy) ag[6]++;
    if (dut.u_fc1.u_ag.busy) ag[7]++;
    if (dut.u_fc2.u_ag.busy) ag[8]++;
  end

  pix_t img [3][H][W];
  weight_t wt [C1][27]; weight_t bs [C1];

  function automatic longint ones(input logic [1023:0] v);
    longint n; n = 0;
    for (int i = 0; i < 1024; i++) n += v[i];
    return n;
  endfunction

  initial begin
    #2000000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    longint s [9]; longint slots [9];
    slots = '{0, 112/28, 192/12, 216/54, 480/16, 504/72, 560/70, 1064/19, 5000/4};
    for (int c = 0; c < 3; c++) for (int r = 0; r < H; r++) for (int q = 0; q < W; q++)
      img[c][r][q] = (r >= 14 && r < 16 && q >= 14 && q < 16) ? pix_t'($urandom) : '0;
    for (int o = 0; o < C1; o++) begin
      for (int k = 0; k < 27; k++) wt[o][k] = weight_t'($urandom_range(0, 8)) - 4'sd4;
      bs[o] = weight_t'($urandom_range(0, 2)) - 4'sd1;
    end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int o = 0; o < C1; o++) begin
      @(negedge clk); dcw_we = 1; dcw_ch = 6'(o); dcb_data = bs[o];
      for (int k = 0; k < 27; k++) dcw_data[k] = wt[o][k];
    end
    @(negedge clk); dcw_we = 0;
    // sparse-layer biases: layer k, core n, slot j
    begin
      int nc [9]; int sl [9];
      nc = '{0, 28, 12, 54, 16, 72, 70, 19, 4};
      for (int k = 1; k < 9; k++) sl[k] = int'(slots[k]);
      for (int k = 1; k < 9; k++) for (int n = 0; n < nc[k]; n++) for (int j = 0; j < sl[k]; j++) begin
        @(negedge clk); sb_we = 1; sw_layer = 4'(k); sw_nc = 8'(n); sb_slot = 16'(j); sw_data = -4'sd8;
      end
      @(negedge clk); sb_we = 0;
    end
    for (int c = 0; c < 3; c++) for (int r = 0; r < H; r++) for (int q = 0; q < W; q++) begin
      @(negedge clk); img_we = 1; img_ch = 2'(c); img_addr = 10'(r*W+q); img_data = img[c][r][q];
    end
    @(negedge clk); img_we = 0; start = 1;
    @(negedge clk); start = 0;
    while (!out_valid) @(negedge clk);
    // ---- input layer against the model ----
    for (int o = 0; o < C1; o++) begin
      longint m [1024];
      for (int t = 0; t < T; t++) begin
        logic [1023:0] et;
        for (int r = 0; r < H; r++) for (int q = 0; q < W; q++) begin
          longint ps, u; bit sp; ps = 0;
          for (int c = 0; c < 3; c++) for (int k = 0; k < 9; k++) begin
            int rr, qq; rr = r + k/3 - 1; qq = q + k%3 - 1;
            if (rr >= 0 && rr < H && qq >= 0 && qq < W) ps += longint'(wt[o][c*9+k]) * longint'(img[c][rr][qq]);
          end
          u = (t == 0 ? 0 : m[r*W+q]) + ((ps * 32) >>> 8) + longint'(bs[o]) * 32;
          sp = u > 128;
          m[r*W+q] = ((sp ? u - 128 : u) * 38) >>> 8;
          et[r*W+q] = sp;
        end
        checks++;
        if (dut.u_ram0.mem[t*C1+o] != et) begin failures++; $display("input layer t=%0d ch=%0d differs", t, o); end
      end
    end
    // ---- input spikes of every sparse layer ----
    for (int k = 0; k < 9; k++) s[k] = 0;
    for (int a = 0; a < T*64;   a++) s[1] += ones(1024'(dut.u_ram0.mem[a]));
    for (int a = 0; a < T*112;  a++) s[2] += ones(1024'(dut.u_ram1.mem[a]));
    for (int a = 0; a < T*192;  a++) s[3] += ones(1024'(dut.u_ram2.mem[a]));
    for (int a = 0; a < T*216;  a++) s[4] += ones(1024'(dut.u_ram3.mem[a]));
    for (int a = 0; a < T*480;  a++) s[5] += ones(1024'(dut.u_ram4.mem[a]));
    for (int a = 0; a < T*504;  a++) s[6] += ones(1024'(dut.u_ram5.mem[a]));
    for (int a = 0; a < T*560;  a++) s[7] += ones(1024'(dut.u_ram6.mem[a]));
    for (int a = 0; a < T*1064; a++) s[8] += ones(1024'(dut.u_ram7.mem[a]));
    for (int k = 1; k < 9; k++) begin
      longint e; e = s[k] * slots[k] * ((k >= 7) ? 1 : 9);
      checks++;
      if (ag[k] != e) begin failures++; $display("layer %0d: %0d update cycles, model %0d", k, ag[k], e); end
      $display("layer %0d: %0d input spikes, %0d update cycles, latency %0d cycles", k, s[k], ag[k], lat[k]);
    end
    $display("layer 0 (dense core) latency %0d cycles", lat[0]);
    checks++;
    if (!out_valid) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
