// tb_sparse_core: two sparse cores driven from modelled Spike RAMs.
//  A: CONV layer, 3 -> 4 channels, 4x4 maps, 2 neural cores, 2 timesteps,
//     2x2 max-pooling, 4-bit chunks and a 2-entry Spike Events array (so the
//     compressor is back-pressured).
//  B: FC layer, 2 input maps of 2x2 (8 inputs) -> 3 neurons on 3 cores.
// Random input spike trains, weights and biases. Every output train is
// compared with a model of the layer (event accumulation = dense sum over
// set input bits, then the LIF step and OR-pooling). Also checks that
// address generation spent exactly 9*SLOTS (CONV) or SLOTS (FC) cycles per
// input spike, the paper's workload model W = F x C_out x S / N.
module tb_sparse_core;
  import snn_pkg::*;
  int checks = 0, failures = 0, stalls = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // ---------------- A: CONV ----------------
  localparam int A_IC = 3, AO = 4, AH = 4, AW = 4, AN = 2, T = 2, AS = AO / AN;
  logic a_start = 0, a_busy, a_done, a_in_re, a_out_we;
  logic [2:0] a_in_raddr; logic [15:0] a_in_rdata; logic [2:0] a_out_waddr; logic [3:0] a_out_wdata;
  logic a_w_we = 0, a_b_we = 0; logic a_w_nc; logic [6:0] a_w_addr; weight_t a_w_data, a_b_data; logic a_b_slot;
  sparse_core #(.IN_CH(A_IC), .OUT_CH(AO), .H(AH), .W(AW), .N_NC(AN), .T(T), .IS_FC(1'b0), .POOL(1'b1),
                .CHUNK(4), .EV_DEPTH(2)) dut_a (
    .clk, .rst_n, .start(a_start), .busy(a_busy), .done(a_done),
    .in_re(a_in_re), .in_raddr(a_in_raddr), .in_rdata(a_in_rdata),
    .out_we(a_out_we), .out_waddr(a_out_waddr), .out_wdata(a_out_wdata),
    .w_we(a_w_we), .w_nc(a_w_nc), .w_addr(a_w_addr), .w_data(a_w_data),
    .b_we(a_b_we), .b_slot(a_b_slot), .b_data(a_b_data));
  logic [15:0] a_in [T*A_IC];
  logic [3:0]  a_out [T*AO];
  weight_t a_wt [AO][A_IC][9]; weight_t a_bs [AO];
  int a_ag = 0;
  always @(posedge clk) if (rst_n) begin
    if (a_in_re) a_in_rdata <= a_in[a_in_raddr];
    if (a_out_we) a_out[a_out_waddr] <= a_out_wdata;
    if (dut_a.u_ag.busy) a_ag++;
    if (dut_a.cev_valid && !dut_a.cev_ready) stalls++;
  end

  // ---------------- B: FC ----------------
  localparam int BI = 2, BO = 3, BN = 3, BHW = 4;
  logic b_start = 0, b_busy, b_done, b_in_re, b_out_we;
  logic [1:0] b_in_raddr; logic [3:0] b_in_rdata; logic [2:0] b_out_waddr; logic [0:0] b_out_wdata;
  logic b_w_we = 0, b_b_we = 0; logic [1:0] b_w_nc; logic [2:0] b_w_addr; weight_t b_w_data, b_b_data; logic b_b_slot;
  sparse_core #(.IN_CH(BI), .OUT_CH(BO), .H(2), .W(2), .N_NC(BN), .T(T), .IS_FC(1'b1), .POOL(1'b0)) dut_b (
    .clk, .rst_n, .start(b_start), .busy(b_busy), .done(b_done),
    .in_re(b_in_re), .in_raddr(b_in_raddr), .in_rdata(b_in_rdata),
    .out_we(b_out_we), .out_waddr(b_out_waddr), .out_wdata(b_out_wdata),
    .w_we(b_w_we), .w_nc(b_w_nc), .w_addr(b_w_addr), .w_data(b_w_data),
    .b_we(b_b_we), .b_slot(b_b_slot), .b_data(b_b_data));
  logic [3:0] b_in [T*BI];
  logic       b_out [T*BO];
  weight_t b_wt [BO][BI*BHW]; weight_t b_bs [BO];
  int b_ag = 0;
  always @(posedge clk) if (rst_n) begin
    if (b_in_re) b_in_rdata <= b_in[b_in_raddr];
    if (b_out_we) b_out[b_out_waddr] <= b_out_wdata[0];
    if (dut_b.u_ag.busy) b_ag++;
  end

  function automatic bit lif(inout longint m, input longint acc, input weight_t b);
    longint u; bit s;
    u = m + acc + longint'(b) * 32;
    s = u > 128;
    m = ((s ? u - 128 : u) * 38) >>> 8;
    return s;
  endfunction

  initial begin
    #50000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int nsa, nsb, nspk;
    nsa = 0; nsb = 0; nspk = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    // ---- load A ----
    for (int i = 0; i < T*A_IC; i++) begin a_in[i] = 16'($urandom) & 16'($urandom); for (int b = 0; b < 16; b++) nsa += a_in[i][b]; end
    for (int o = 0; o < AO; o++) begin
      for (int c = 0; c < A_IC; c++) for (int k = 0; k < 9; k++) begin
        a_wt[o][c][k] = weight_t'($urandom_range(0, 10)) - 4'sd3;
        @(negedge clk); a_w_we = 1; a_w_nc = 1'(o % AN); a_w_addr = 7'(((o / AN) * A_IC + c) * 9 + k); a_w_data = a_wt[o][c][k];
      end
      @(negedge clk); a_w_we = 0; a_b_we = 1; a_w_nc = 1'(o % AN); a_b_slot = 1'(o / AN);
      a_bs[o] = weight_t'($urandom_range(0, 4)) - 4'sd2; a_b_data = a_bs[o];
      @(negedge clk); a_b_we = 0;
    end
    // ---- load B ----
    for (int i = 0; i < T*BI; i++) begin b_in[i] = 4'($urandom); for (int b = 0; b < 4; b++) nsb += b_in[i][b]; end
    for (int o = 0; o < BO; o++) begin
      for (int x = 0; x < BI*BHW; x++) begin
        b_wt[o][x] = weight_t'($urandom_range(0, 10)) - 4'sd3;
        @(negedge clk); b_w_we = 1; b_w_nc = 2'(o % BN); b_w_addr = 3'(x); b_w_data = b_wt[o][x];
      end
      @(negedge clk); b_w_we = 0; b_b_we = 1; b_w_nc = 2'(o % BN); b_b_slot = 1'b0;
      b_bs[o] = weight_t'($urandom_range(0, 4)); b_b_data = b_bs[o];
      @(negedge clk); b_b_we = 0;
    end
    // ---- run both ----
    @(negedge clk); a_start = 1; b_start = 1;
    @(negedge clk); a_start = 0; b_start = 0;
    fork
      begin @(posedge a_done); end
      begin @(posedge b_done); end
    join
    repeat (2) @(negedge clk);
    // ---- model A ----
    for (int o = 0; o < AO; o++) begin
      longint m [16];
      for (int p = 0; p < 16; p++) m[p] = 0;
      for (int t = 0; t < T; t++) begin
        logic [15:0] sp; logic [3:0] pooled;
        for (int r = 0; r < AH; r++) for (int q = 0; q < AW; q++) begin
          longint acc; acc = 0;
          for (int c = 0; c < A_IC; c++) for (int k = 0; k < 9; k++) begin
            int rr, qq; rr = r + k/3 - 1; qq = q + k%3 - 1;
            if (rr >= 0 && rr < AH && qq >= 0 && qq < AW && a_in[t*A_IC+c][rr*AW+qq])
              acc += longint'(a_wt[o][c][k]) * 32;
          end
          sp[r*AW+q] = lif(m[r*AW+q], acc, a_bs[o]);
          nspk += sp[r*AW+q];
        end
        for (int r = 0; r < 2; r++) for (int q = 0; q < 2; q++)
          pooled[r*2+q] = sp[(2*r)*4+2*q] | sp[(2*r)*4+2*q+1] | sp[(2*r+1)*4+2*q] | sp[(2*r+1)*4+2*q+1];
        checks++;
        if (a_out[t*AO+o] != pooled) begin failures++; $display("CONV t=%0d ch=%0d got %b exp %b", t, o, a_out[t*AO+o], pooled); end
      end
    end
    // ---- model B ----
    for (int o = 0; o < BO; o++) begin
      longint m; m = 0;
      for (int t = 0; t < T; t++) begin
        longint acc; bit s; acc = 0;
        for (int c = 0; c < BI; c++) for (int p = 0; p < BHW; p++)
          if (b_in[t*BI+c][p]) acc += longint'(b_wt[o][c*BHW+p]) * 32;
        s = lif(m, acc, b_bs[o]);
        nspk += s;
        checks++;
        if (b_out[t*BO+o] != s) begin failures++; $display("FC t=%0d n=%0d got %0d exp %0d", t, o, b_out[t*BO+o], s); end
      end
    end
    checks += 4;
    if (a_ag != nsa * 9 * AS) begin failures++; $display("CONV addr-gen cycles %0d exp %0d", a_ag, nsa*9*AS); end
    if (b_ag != nsb * 1) begin failures++; $display("FC addr-gen cycles %0d exp %0d", b_ag, nsb); end
    if (stalls == 0) begin failures++; $display("Spike Events never full"); end
    if (nspk == 0) begin failures++; $display("no output spikes"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
