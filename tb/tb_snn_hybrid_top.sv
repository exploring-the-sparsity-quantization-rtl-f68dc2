// tb_snn_hybrid_top: end-to-end test of the hybrid accelerator on a scaled
// VGG9 (16x16x3 input, 4 channels in every conv layer, FC 6, population 4,
// 2 timesteps, 2 PE rows and 2-6 neural cores per layer; one neuron per core in the first FC layer, so consecutive updates from one 2x2 input map hit the same neuron). Two random images
// are pushed through back to back with random int4 weights. For each image
// the output population's spike trains are compared with a layer-by-layer
// model of the network: dense 3x3 conv + LIF for the input layer, event
// accumulation + LIF for the others, 2x2 OR-pooling after layers 1, 3 and 6.
// It also counts, and requires at least once: two images in flight in
// different layers, a full Spike Events array stalling compression, the
// neural-core bypass, both clock-gated memory regions, an out-of-map
// neuron skipped by address generation, and an FC layer update.
module tb_snn_hybrid_top;
  import snn_pkg::*;
  localparam int H = 16, W = 16, T = 2, C = 4, F1 = 6, P = 4;
  localparam int NL = 9;
  // channels into / out of each layer, map size of each layer's input
  localparam int IC [NL] = '{3, C, C, C, C, C, C, C, F1};
  localparam int OC [NL] = '{C, C, C, C, C, C, C, F1, P};
  localparam int MH [NL] = '{16, 16, 8, 8, 4, 4, 4, 2, 1};
  localparam bit PL [NL] = '{0, 1, 0, 1, 0, 0, 1, 0, 0};
  localparam bit FC [NL] = '{0, 0, 0, 0, 0, 0, 0, 1, 1};
  localparam int NC [NL] = '{2, 2, 2, 2, 2, 2, 2, 6, 4};
  localparam int MAXC = 8;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic img_we = 0, img_ready, start = 0; logic [1:0] img_ch; logic [7:0] img_addr; pix_t img_data;
  logic dcw_we = 0; logic [1:0] dcw_ch; weight_t dcw_data [27]; weight_t dcb_data;
  logic sw_we = 0, sb_we = 0; logic [3:0] sw_layer; logic [7:0] sw_nc; logic [23:0] sw_addr;
  logic [15:0] sb_slot; weight_t sw_data;
  logic out_valid, out_re = 0, out_rdata, out_ack = 0; logic [2:0] out_raddr;
  logic [8:0] layer_busy;

  snn_hybrid_top #(.H(H), .W(W), .T(T), .DC_ROWS(2),
    .C1(C), .C2(C), .C3(C), .C4(C), .C5(C), .C6(C), .C7(C), .F1(F1), .P(P),
    .NC1(2), .NC2(2), .NC3(2), .NC4(2), .NC5(2), .NC6(2), .NC7(6), .NC8(4), .CHUNK(4)) dut (.*);
  always #5 clk = ~clk;

  // ---------------- mechanism counters ----------------
  int n_overlap = 0, n_stall = 0, n_fwd = 0, n_bank0 = 0, n_bank1 = 0, n_skip = 0, n_fc = 0, n_en = 0;
  always @(posedge clk) if (rst_n) begin
    if ($countones(layer_busy) >= 2) n_overlap++;
    if (dut.u_conv1_2.cev_valid && !dut.u_conv1_2.cev_ready) n_stall++;
    if (dut.u_conv2_1.cev_valid && !dut.u_conv2_1.cev_ready) n_stall++;
    if (dut.u_fc1.g_nc[0].u_nc.fwd_hit) n_fwd++;
    if (dut.u_conv1_2.g_nc[0].u_nc.u_mem.gclk0) n_bank0++;
    if (dut.u_conv1_2.g_nc[0].u_nc.u_mem.gclk1) n_bank1++;
    if (dut.u_conv1_2.u_ag.busy && !dut.u_conv1_2.u_ag.upd_valid) n_skip++;
    if (dut.u_fc1.upd_valid) n_fc++;
    if (dut.u_dc.en[1]) n_en++;
  end

  // ---------------- network model ----------------
  pix_t    img [2][3][H][W];
  weight_t wt [NL][MAXC][MAXC][9];
  weight_t bs [NL][MAXC];
  logic    sp [NL+1][T][MAXC][256];   // sp[k] = input spikes of layer k (k >= 1)

  function automatic bit lif(inout longint m, input longint acc, input weight_t b);
    longint u; bit s;
    u = m + acc + longint'(b) * 32;
    s = u > 128;
    m = ((s ? u - 128 : u) * 38) >>> 8;
    return s;
  endfunction

  task automatic model(input int im);
    // layer 0: dense
    for (int o = 0; o < C; o++) begin
      longint m [256];
      for (int p = 0; p < 256; p++) m[p] = 0;
      for (int t = 0; t < T; t++) for (int r = 0; r < H; r++) for (int q = 0; q < W; q++) begin
        longint ps; ps = 0;
        for (int c = 0; c < 3; c++) for (int k = 0; k < 9; k++) begin
          int rr, qq; rr = r + k/3 - 1; qq = q + k%3 - 1;
          if (rr >= 0 && rr < H && qq >= 0 && qq < W) ps += longint'(wt[0][o][c][k]) * longint'(img[im][c][rr][qq]);
        end
        sp[1][t][o][r*W+q] = lif(m[r*W+q], (ps * 32) >>> 8, bs[0][o]);
      end
    end
    // layers 1..8: event driven
    for (int l = 1; l < NL; l++) begin
      int hh, ohw; hh = MH[l]; ohw = FC[l] ? 1 : hh*hh;
      for (int o = 0; o < OC[l]; o++) begin
        longint m [256];
        for (int p = 0; p < 256; p++) m[p] = 0;
        for (int t = 0; t < T; t++) begin
          logic s [256];
          for (int p = 0; p < ohw; p++) begin
            longint acc; acc = 0;
            for (int c = 0; c < IC[l]; c++) begin
              if (FC[l]) begin
                for (int x = 0; x < hh*hh; x++) if (sp[l][t][c][x]) acc += longint'(wt[l][o][c][x]) * 32;
              end else begin
                for (int k = 0; k < 9; k++) begin
                  int rr, qq; rr = p/hh + k/3 - 1; qq = p%hh + k%3 - 1;
                  if (rr >= 0 && rr < hh && qq >= 0 && qq < hh && sp[l][t][c][rr*hh+qq]) acc += longint'(wt[l][o][c][k]) * 32;
                end
              end
            end
            s[p] = lif(m[p], acc, bs[l][o]);
          end
          if (PL[l]) begin
            for (int r = 0; r < hh/2; r++) for (int q = 0; q < hh/2; q++)
              sp[l+1][t][o][r*(hh/2)+q] = s[(2*r)*hh+2*q] | s[(2*r)*hh+2*q+1] | s[(2*r+1)*hh+2*q] | s[(2*r+1)*hh+2*q+1];
          end else begin
            for (int p = 0; p < ohw; p++) sp[l+1][t][o][p] = s[p];
          end
        end
      end
    end
  endtask

  task automatic load_image(input int im);
    for (int c = 0; c < 3; c++) for (int r = 0; r < H; r++) for (int q = 0; q < W; q++) begin
      @(negedge clk); img_we = 1; img_ch = 2'(c); img_addr = 8'(r*W+q); img_data = img[im][c][r][q];
    end
    @(negedge clk); img_we = 0; start = 1;
    @(negedge clk); start = 0;
  endtask

  initial begin
    #2000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int nspk_total; nspk_total = 0;
    for (int im = 0; im < 2; im++) for (int c = 0; c < 3; c++) for (int r = 0; r < H; r++) for (int q = 0; q < W; q++)
      img[im][c][r][q] = pix_t'($urandom);
    for (int l = 0; l < NL; l++) for (int o = 0; o < OC[l]; o++) begin
      bs[l][o] = weight_t'($urandom_range(0, 4)) - 4'sd1;
      for (int c = 0; c < IC[l]; c++) for (int k = 0; k < 9; k++)
        wt[l][o][c][k] = (l == 0) ? weight_t'($urandom) : weight_t'($urandom_range(0, 10)) - 4'sd3;
    end
    repeat (2) @(posedge clk); rst_n = 1;
    // weights
    for (int o = 0; o < C; o++) begin
      @(negedge clk); dcw_we = 1; dcw_ch = 2'(o); dcb_data = bs[0][o];
      for (int c = 0; c < 3; c++) for (int k = 0; k < 9; k++) dcw_data[c*9+k] = wt[0][o][c][k];
    end
    @(negedge clk); dcw_we = 0;
    for (int l = 1; l < NL; l++) begin
      int taps; taps = FC[l] ? MH[l]*MH[l] : 9;
      for (int o = 0; o < OC[l]; o++) begin
        for (int c = 0; c < IC[l]; c++) for (int k = 0; k < taps; k++) begin
          @(negedge clk); sw_we = 1; sw_layer = 4'(l); sw_nc = 8'(o % NC[l]);
          sw_addr = 24'(((o / NC[l]) * IC[l] + c) * taps + k); sw_data = wt[l][o][c][k];
        end
        @(negedge clk); sw_we = 0; sb_we = 1; sw_layer = 4'(l); sw_nc = 8'(o % NC[l]);
        sb_slot = 16'(o / NC[l]); sw_data = bs[l][o];
        @(negedge clk); sb_we = 0;
      end
    end
    fork
      begin
        load_image(0);
        while (!img_ready) @(negedge clk);
        load_image(1);
      end
      begin
        for (int im = 0; im < 2; im++) begin
          while (!out_valid) @(negedge clk);
          model(im);
          for (int a = 0; a < T*P; a++) begin
            logic e; e = sp[NL][a / P][a % P][0];
            nspk_total += e;
            out_re = 1; out_raddr = 3'(a); @(negedge clk); out_re = 0;
            checks++;
            if (out_rdata != e) begin failures++; $display("image %0d out t=%0d n=%0d got %0d exp %0d", im, a/P, a%P, out_rdata, e); end
          end
          out_ack = 1; @(negedge clk); out_ack = 0;
          $display("image %0d done at %0t", im, $time);
        end
      end
    join
    checks += 8;
    if (n_overlap == 0) begin failures++; $display("no layer overlap"); end
    if (n_stall == 0)   begin failures++; $display("no Spike Events stall"); end
    if (n_fwd == 0)     begin failures++; $display("no bypass"); end
    if (n_bank0 == 0 || n_bank1 == 0) begin failures++; $display("a memory region never clocked"); end
    if (n_skip == 0)    begin failures++; $display("no out-of-map skip"); end
    if (n_fc == 0)      begin failures++; $display("no FC update"); end
    if (n_en == 0)      begin failures++; $display("dense row 1 never enabled"); end
    if (nspk_total == 0) begin failures++; $display("output population silent"); end
    $display("overlap=%0d stall=%0d bypass=%0d bank0=%0d bank1=%0d skip=%0d fc=%0d en=%0d outspikes=%0d",
             n_overlap, n_stall, n_fwd, n_bank0, n_bank1, n_skip, n_fc, n_en, nspk_total);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
