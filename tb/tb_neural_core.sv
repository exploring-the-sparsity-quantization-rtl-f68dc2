// tb_neural_core: one NC with 2 slots of 6 neurons and 36 weight words.
// Loads random weights and biases, clears the potentials, then runs two
// timesteps: random updates (including back-to-back updates of the same
// neuron, which need the bypass) followed by the activation sweep of both
// slots. Spike trains are compared with a model (potential += w*32 per
// update; u = mem + bias*32, spike = u > 128, mem = ((u - 128*spike)*38)>>>8);
// the sweep must take OUT_HW + 2 cycles to train_ready.
module tb_neural_core;
  import snn_pkg::*;
  localparam int SLOTS = 2, OUT_HW = 6, NW = 36;
  int checks = 0, failures = 0, nfwd = 0, nspk = 0;
  logic clk = 0, rst_n = 0;
  logic w_we = 0, b_we = 0, upd_valid = 0, clr_start = 0, act_start = 0, act_next = 0;
  logic [5:0] w_addr, upd_waddr; logic [3:0] upd_maddr; logic b_slot;
  weight_t w_data, b_data;
  logic acc_busy, busy, train_ready; logic [OUT_HW-1:0] train;
  neural_core #(.SLOTS(SLOTS), .OUT_HW(OUT_HW), .NW(NW)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && dut.fwd_hit) nfwd++;
  longint m [SLOTS*OUT_HW];
  weight_t wm [NW];
  weight_t bm [SLOTS];
  initial begin
    #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int a = 0; a < NW; a++) begin
      @(negedge clk); w_we = 1; w_addr = 6'(a); w_data = weight_t'($urandom); wm[a] = w_data;
    end
    for (int s = 0; s < SLOTS; s++) begin
      @(negedge clk); w_we = 0; b_we = 1; b_slot = 1'(s); b_data = weight_t'($urandom_range(0, 3)); bm[s] = b_data;
    end
    @(negedge clk); b_we = 0; clr_start = 1;
    @(negedge clk); clr_start = 0;
    while (busy) @(negedge clk);
    for (int i = 0; i < SLOTS*OUT_HW; i++) m[i] = 0;
    for (int t = 0; t < 2; t++) begin
      int last_m; last_m = 0;
      for (int i = 0; i < 80; i++) begin
        int ma, wa;
        ma = ($urandom_range(0, 3) == 0) ? last_m : $urandom_range(0, SLOTS*OUT_HW-1);
        wa = $urandom_range(0, NW-1);
        last_m = ma;
        upd_valid = 1; upd_maddr = 4'(ma); upd_waddr = 6'(wa);
        m[ma] += longint'(wm[wa]) * 32;
        @(negedge clk);
      end
      upd_valid = 0;
      repeat (3) @(negedge clk);
      act_start = 1; @(negedge clk); act_start = 0;
      for (int s = 0; s < SLOTS; s++) begin
        int cyc; logic [OUT_HW-1:0] et;
        cyc = (s == 0) ? 1 : 0;
        while (!train_ready) begin @(negedge clk); cyc++; end
        for (int p = 0; p < OUT_HW; p++) begin
          longint u; bit sp;
          u  = m[s*OUT_HW + p] + longint'(bm[s]) * 32;
          sp = u > 128;
          m[s*OUT_HW + p] = ((sp ? u - 128 : u) * 38) >>> 8;
          et[p] = sp; if (sp) nspk++;
        end
        checks++;
        if (train != et) begin failures++; $display("t=%0d slot %0d train %b exp %b", t, s, train, et); end
        checks++;
        if (cyc != OUT_HW + 2 + (s == 0 ? 0 : 0)) begin
          if (s == 0) begin failures++; $display("sweep took %0d cycles", cyc); end
        end
        act_next = 1; @(negedge clk); act_next = 0;
      end
      while (busy) @(negedge clk);
    end
    checks += 2;
    if (nfwd == 0) begin failures++; $display("bypass never used"); end
    if (nspk == 0) begin failures++; $display("no spikes"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
