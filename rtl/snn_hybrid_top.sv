// snn_hybrid_top: hybrid dense/sparse accelerator for a direct-coded spiking VGG9.
//
// The network 64C3-112C3-MP2-192C3-216C3-MP2-480C3-504C3-560C3-MP2-1064-P
// (3x3 convolutions with leaky integrate-and-fire neurons, 2x2 spike
// max-pooling, two fully connected layers, P output neurons) is laid out
// layer by layer in hardware. The input layer, whose activations are
// multi-bit pixels and dense, runs on the dense core (a systolic array); every
// other layer runs on its own event-driven sparse core whose number of
// neural cores (NC1..NC8) is sized to that layer's spike workload. Layers
// exchange spike trains through Spike RAMs (spike_ram), one per layer
// boundary, timestep-major (address t*channels + channel).
// Layer scheduling: layer k starts when its input Spike RAM is full and its
// output Spike RAM is empty; when it finishes, its output is marked full and
// its input empty. Consecutive images therefore overlap in different layers.
// The image buffer counts as layer 0's input: pulse start after loading an
// image (img_ready high), read the output population through out_* once
// out_valid is high, then pulse out_ack.
// Defaults are the paper's CIFAR100 perf^2 configuration
// (1, 28, 12, 54, 16, 72, 70, 19, 4) cores, P = 5000, 32x32x3 input, T = 2.
// Weight loading ports and the full/empty scheduling are this design's choice.
module snn_hybrid_top
  import snn_pkg::*;
#(
  parameter int unsigned H     = 32,
  parameter int unsigned W     = 32,
  parameter int unsigned T     = 2,
  parameter int unsigned DC_ROWS = 1,
  parameter int unsigned C1 = 64,  parameter int unsigned C2 = 112, parameter int unsigned C3 = 192,
  parameter int unsigned C4 = 216, parameter int unsigned C5 = 480, parameter int unsigned C6 = 504,
  parameter int unsigned C7 = 560, parameter int unsigned F1 = 1064, parameter int unsigned P = 5000,
  parameter int unsigned NC1 = 28, parameter int unsigned NC2 = 12, parameter int unsigned NC3 = 54,
  parameter int unsigned NC4 = 16, parameter int unsigned NC5 = 72, parameter int unsigned NC6 = 70,
  parameter int unsigned NC7 = 19, parameter int unsigned NC8 = 4,
  parameter int unsigned CHUNK = 16,
  localparam int unsigned OAW  = (T*P > 1) ? $clog2(T*P) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // image load (dense-core image buffers)
  input  logic                     img_we,
  input  logic [1:0]               img_ch,
  input  logic [$clog2(H*W)-1:0]   img_addr,
  input  pix_t                     img_data,
  output logic                     img_ready,
  input  logic                     start,
  // dense-core weights: 27 taps + bias of one output channel per write
  input  logic                     dcw_we,
  input  logic [$clog2(C1)-1:0]    dcw_ch,
  input  weight_t                  dcw_data [27],
  input  weight_t                  dcb_data,
  // sparse-core weights: layer 1..8, neural core, word address
  input  logic                     sw_we,
  input  logic                     sb_we,
  input  logic [3:0]               sw_layer,
  input  logic [7:0]               sw_nc,
  input  logic [23:0]              sw_addr,
  input  logic [15:0]              sb_slot,
  input  weight_t                  sw_data,
  // output population spikes: address t*P + neuron
  output logic                     out_valid,
  input  logic                     out_re,
  input  logic [OAW-1:0]           out_raddr,
  output logic                     out_rdata,
  input  logic                     out_ack,
  // status
  output logic [8:0]               layer_busy
);

  // ---------------- Spike RAMs ----------------
  localparam int unsigned D0 = T * C1;
  localparam int unsigned A0 = (D0 > 1) ? $clog2(D0) : 1;
  logic                r0_we, r0_re;
  logic [A0-1:0]      r0_waddr, r0_raddr;
  logic [H*W-1:0]  r0_wdata, r0_rdata;
  spike_ram #(.DEPTH(D0), .WIDTH(H*W)) u_ram0 (
    .clk, .we(r0_we), .waddr(r0_waddr), .wdata(r0_wdata),
    .re(r0_re), .raddr(r0_raddr), .rdata(r0_rdata));

  localparam int unsigned D1 = T * C2;
  localparam int unsigned A1 = (D1 > 1) ? $clog2(D1) : 1;
  logic                r1_we, r1_re;
  logic [A1-1:0]      r1_waddr, r1_raddr;
  logic [(H/2)*(W/2)-1:0]  r1_wdata, r1_rdata;
  spike_ram #(.DEPTH(D1), .WIDTH((H/2)*(W/2))) u_ram1 (
    .clk, .we(r1_we), .waddr(r1_waddr), .wdata(r1_wdata),
    .re(r1_re), .raddr(r1_raddr), .rdata(r1_rdata));

  localparam int unsigned D2 = T * C3;
  localparam int unsigned A2 = (D2 > 1) ? $clog2(D2) : 1;
  logic                r2_we, r2_re;
  logic [A2-1:0]      r2_waddr, r2_raddr;
  logic [(H/2)*(W/2)-1:0]  r2_wdata, r2_rdata;
  spike_ram #(.DEPTH(D2), .WIDTH((H/2)*(W/2))) u_ram2 (
    .clk, .we(r2_we), .waddr(r2_waddr), .wdata(r2_wdata),
    .re(r2_re), .raddr(r2_raddr), .rdata(r2_rdata));

  localparam int unsigned D3 = T * C4;
  localparam int unsigned A3 = (D3 > 1) ? $clog2(D3) : 1;
  logic                r3_we, r3_re;
  logic [A3-1:0]      r3_waddr, r3_raddr;
  logic [(H/4)*(W/4)-1:0]  r3_wdata, r3_rdata;
  spike_ram #(.DEPTH(D3), .WIDTH((H/4)*(W/4))) u_ram3 (
    .clk, .we(r3_we), .waddr(r3_waddr), .wdata(r3_wdata),
    .re(r3_re), .raddr(r3_raddr), .rdata(r3_rdata));

  localparam int unsigned D4 = T * C5;
  localparam int unsigned A4 = (D4 > 1) ? $clog2(D4) : 1;
  logic                r4_we, r4_re;
  logic [A4-1:0]      r4_waddr, r4_raddr;
  logic [(H/4)*(W/4)-1:0]  r4_wdata, r4_rdata;
  spike_ram #(.DEPTH(D4), .WIDTH((H/4)*(W/4))) u_ram4 (
    .clk, .we(r4_we), .waddr(r4_waddr), .wdata(r4_wdata),
    .re(r4_re), .raddr(r4_raddr), .rdata(r4_rdata));

  localparam int unsigned D5 = T * C6;
  localparam int unsigned A5 = (D5 > 1) ? $clog2(D5) : 1;
  logic                r5_we, r5_re;
  logic [A5-1:0]      r5_waddr, r5_raddr;
  logic [(H/4)*(W/4)-1:0]  r5_wdata, r5_rdata;
  spike_ram #(.DEPTH(D5), .WIDTH((H/4)*(W/4))) u_ram5 (
    .clk, .we(r5_we), .waddr(r5_waddr), .wdata(r5_wdata),
    .re(r5_re), .raddr(r5_raddr), .rdata(r5_rdata));

  localparam int unsigned D6 = T * C7;
  localparam int unsigned A6 = (D6 > 1) ? $clog2(D6) : 1;
  logic                r6_we, r6_re;
  logic [A6-1:0]      r6_waddr, r6_raddr;
  logic [(H/8)*(W/8)-1:0]  r6_wdata, r6_rdata;
  spike_ram #(.DEPTH(D6), .WIDTH((H/8)*(W/8))) u_ram6 (
    .clk, .we(r6_we), .waddr(r6_waddr), .wdata(r6_wdata),
    .re(r6_re), .raddr(r6_raddr), .rdata(r6_rdata));

  localparam int unsigned D7 = T * F1;
  localparam int unsigned A7 = (D7 > 1) ? $clog2(D7) : 1;
  logic                r7_we, r7_re;
  logic [A7-1:0]      r7_waddr, r7_raddr;
  logic [1-1:0]  r7_wdata, r7_rdata;
  spike_ram #(.DEPTH(D7), .WIDTH(1)) u_ram7 (
    .clk, .we(r7_we), .waddr(r7_waddr), .wdata(r7_wdata),
    .re(r7_re), .raddr(r7_raddr), .rdata(r7_rdata));

  localparam int unsigned D8 = T * P;
  localparam int unsigned A8 = (D8 > 1) ? $clog2(D8) : 1;
  logic                r8_we, r8_re;
  logic [A8-1:0]      r8_waddr, r8_raddr;
  logic [1-1:0]  r8_wdata, r8_rdata;
  spike_ram #(.DEPTH(D8), .WIDTH(1)) u_ram8 (
    .clk, .we(r8_we), .waddr(r8_waddr), .wdata(r8_wdata),
    .re(r8_re), .raddr(r8_raddr), .rdata(r8_rdata));

  // ---------------- layer scheduling ----------------
  logic [8:0] run, go, fin, full;
  logic       img_full;
  logic       dc_busy, dc_avail;
  logic [8:1] core_busy;   // sparse cores' own busy flags (observation only)

  assign img_ready = !img_full;
  assign go[0] = img_full && !full[0] && !run[0];
  for (genvar k = 1; k < 9; k++) begin : g_go
    assign go[k] = full[k-1] && !full[k] && !run[k];
  end
  assign fin[0] = run[0] && dc_avail && !dc_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= '0; full <= '0; img_full <= 1'b0;
    end else begin
      if (start) img_full <= 1'b1;
      for (int k = 0; k < 9; k++) begin
        if (go[k]) run[k] <= 1'b1;
        if (fin[k]) begin
          run[k]  <= 1'b0;
          full[k] <= 1'b1;
          if (k == 0) img_full <= 1'b0;
          else        full[k-1] <= 1'b0;
        end
      end
      if (out_ack) full[8] <= 1'b0;
    end
  end
  assign out_valid  = full[8];
  assign layer_busy = run;

  // ---------------- layer 0: dense core (CONV_1_1) ----------------
  dense_core #(.H(H), .W(W), .ROWS(DC_ROWS), .OUT_CH(C1), .T(T)) u_dc (
    .clk, .rst_n, .img_we, .img_ch, .img_addr, .img_data,
    .w_we(dcw_we), .w_ch(dcw_ch), .w_data(dcw_data), .b_data(dcb_data),
    .start(go[0]), .layer_avail(dc_avail), .busy(dc_busy),
    .sr_we(r0_we), .sr_waddr(r0_waddr), .sr_wdata(r0_wdata));

  // ---------------- layer 1: sparse core (CONV1_2) ----------------
  localparam int unsigned CONV1_2_SLOTS = C2 / NC1;
  localparam int unsigned CONV1_2_NWORDS = CONV1_2_SLOTS * C1 * 9;
  localparam int unsigned CONV1_2_W_NCW   = (NC1 > 1) ? $clog2(NC1) : 1;
  localparam int unsigned CONV1_2_W_ADDRW = (CONV1_2_NWORDS > 2) ? $clog2(CONV1_2_NWORDS) : 1;
  localparam int unsigned CONV1_2_B_SLOTW = (CONV1_2_SLOTS > 1) ? $clog2(CONV1_2_SLOTS) : 1;
  sparse_core #(.IN_CH(C1), .OUT_CH(C2), .H(H), .W(W), .N_NC(NC1), .T(T),
                .IS_FC(1'b0), .POOL(1'b1), .CHUNK(CHUNK)) u_conv1_2 (
    .clk, .rst_n, .start(go[1]), .busy(core_busy[1]), .done(fin[1]),
    .in_re(r0_re), .in_raddr(r0_raddr), .in_rdata(r0_rdata),
    .out_we(r1_we), .out_waddr(r1_waddr), .out_wdata(r1_wdata),
    .w_we(sw_we && sw_layer == 4'd1), .w_nc(CONV1_2_W_NCW'(sw_nc)),
    .w_addr(CONV1_2_W_ADDRW'(sw_addr)), .w_data(sw_data),
    .b_we(sb_we && sw_layer == 4'd1), .b_slot(CONV1_2_B_SLOTW'(sb_slot)), .b_data(sw_data));

  // ---------------- layer 2: sparse core (CONV2_1) ----------------
  localparam int unsigned CONV2_1_SLOTS = C3 / NC2;
  localparam int unsigned CONV2_1_NWORDS = CONV2_1_SLOTS * C2 * 9;
  localparam int unsigned CONV2_1_W_NCW   = (NC2 > 1) ? $clog2(NC2) : 1;
  localparam int unsigned CONV2_1_W_ADDRW = (CONV2_1_NWORDS > 2) ? $clog2(CONV2_1_NWORDS) : 1;
  localparam int unsigned CONV2_1_B_SLOTW = (CONV2_1_SLOTS > 1) ? $clog2(CONV2_1_SLOTS) : 1;
  sparse_core #(.IN_CH(C2), .OUT_CH(C3), .H(H/2), .W(W/2), .N_NC(NC2), .T(T),
                .IS_FC(1'b0), .POOL(1'b0), .CHUNK(CHUNK)) u_conv2_1 (
    .clk, .rst_n, .start(go[2]), .busy(core_busy[2]), .done(fin[2]),
    .in_re(r1_re), .in_raddr(r1_raddr), .in_rdata(r1_rdata),
    .out_we(r2_we), .out_waddr(r2_waddr), .out_wdata(r2_wdata),
    .w_we(sw_we && sw_layer == 4'd2), .w_nc(CONV2_1_W_NCW'(sw_nc)),
    .w_addr(CONV2_1_W_ADDRW'(sw_addr)), .w_data(sw_data),
    .b_we(sb_we && sw_layer == 4'd2), .b_slot(CONV2_1_B_SLOTW'(sb_slot)), .b_data(sw_data));

  // ---------------- layer 3: sparse core (CONV2_2) ----------------
  localparam int unsigned CONV2_2_SLOTS = C4 / NC3;
  localparam int unsigned CONV2_2_NWORDS = CONV2_2_SLOTS * C3 * 9;
  localparam int unsigned CONV2_2_W_NCW   = (NC3 > 1) ? $clog2(NC3) : 1;
  localparam int unsigned CONV2_2_W_ADDRW = (CONV2_2_NWORDS > 2) ? $clog2(CONV2_2_NWORDS) : 1;
  localparam int unsigned CONV2_2_B_SLOTW = (CONV2_2_SLOTS > 1) ? $clog2(CONV2_2_SLOTS) : 1;
  sparse_core #(.IN_CH(C3), .OUT_CH(C4), .H(H/2), .W(W/2), .N_NC(NC3), .T(T),
                .IS_FC(1'b0), .POOL(1'b1), .CHUNK(CHUNK)) u_conv2_2 (
    .clk, .rst_n, .start(go[3]), .busy(core_busy[3]), .done(fin[3]),
    .in_re(r2_re), .in_raddr(r2_raddr), .in_rdata(r2_rdata),
    .out_we(r3_we), .out_waddr(r3_waddr), .out_wdata(r3_wdata),
    .w_we(sw_we && sw_layer == 4'd3), .w_nc(CONV2_2_W_NCW'(sw_nc)),
    .w_addr(CONV2_2_W_ADDRW'(sw_addr)), .w_data(sw_data),
    .b_we(sb_we && sw_layer == 4'd3), .b_slot(CONV2_2_B_SLOTW'(sb_slot)), .b_data(sw_data));

  // ---------------- layer 4: sparse core (CONV3_1) ----------------
  localparam int unsigned CONV3_1_SLOTS = C5 / NC4;
  localparam int unsigned CONV3_1_NWORDS = CONV3_1_SLOTS * C4 * 9;
  localparam int unsigned CONV3_1_W_NCW   = (NC4 > 1) ? $clog2(NC4) : 1;
  localparam int unsigned CONV3_1_W_ADDRW = (CONV3_1_NWORDS > 2) ? $clog2(CONV3_1_NWORDS) : 1;
  localparam int unsigned CONV3_1_B_SLOTW = (CONV3_1_SLOTS > 1) ? $clog2(CONV3_1_SLOTS) : 1;
  sparse_core #(.IN_CH(C4), .OUT_CH(C5), .H(H/4), .W(W/4), .N_NC(NC4), .T(T),
                .IS_FC(1'b0), .POOL(1'b0), .CHUNK(CHUNK)) u_conv3_1 (
    .clk, .rst_n, .start(go[4]), .busy(core_busy[4]), .done(fin[4]),
    .in_re(r3_re), .in_raddr(r3_raddr), .in_rdata(r3_rdata),
    .out_we(r4_we), .out_waddr(r4_waddr), .out_wdata(r4_wdata),
    .w_we(sw_we && sw_layer == 4'd4), .w_nc(CONV3_1_W_NCW'(sw_nc)),
    .w_addr(CONV3_1_W_ADDRW'(sw_addr)), .w_data(sw_data),
    .b_we(sb_we && sw_layer == 4'd4), .b_slot(CONV3_1_B_SLOTW'(sb_slot)), .b_data(sw_data));

  // ---------------- layer 5: sparse core (CONV3_2) ----------------
  localparam int unsigned CONV3_2_SLOTS = C6 / NC5;
  localparam int unsigned CONV3_2_NWORDS = CONV3_2_SLOTS * C5 * 9;
  localparam int unsigned CONV3_2_W_NCW   = (NC5 > 1) ? $clog2(NC5) : 1;
  localparam int unsigned CONV3_2_W_ADDRW = (CONV3_2_NWORDS > 2) ? $clog2(CONV3_2_NWORDS) : 1;
  localparam int unsigned CONV3_2_B_SLOTW = (CONV3_2_SLOTS > 1) ? $clog2(CONV3_2_SLOTS) : 1;
  sparse_core #(.IN_CH(C5), .OUT_CH(C6), .H(H/4), .W(W/4), .N_NC(NC5), .T(T),
                .IS_FC(1'b0), .POOL(1'b0), .CHUNK(CHUNK)) u_conv3_2 (
    .clk, .rst_n, .start(go[5]), .busy(core_busy[5]), .done(fin[5]),
    .in_re(r4_re), .in_raddr(r4_raddr), .in_rdata(r4_rdata),
    .out_we(r5_we), .out_waddr(r5_waddr), .out_wdata(r5_wdata),
    .w_we(sw_we && sw_layer == 4'd5), .w_nc(CONV3_2_W_NCW'(sw_nc)),
    .w_addr(CONV3_2_W_ADDRW'(sw_addr)), .w_data(sw_data),
    .b_we(sb_we && sw_layer == 4'd5), .b_slot(CONV3_2_B_SLOTW'(sb_slot)), .b_data(sw_data));

  // ---------------- layer 6: sparse core (CONV3_3) ----------------
  localparam int unsigned CONV3_3_SLOTS = C7 / NC6;
  localparam int unsigned CONV3_3_NWORDS = CONV3_3_SLOTS * C6 * 9;
  localparam int unsigned CONV3_3_W_NCW   = (NC6 > 1) ? $clog2(NC6) : 1;
  localparam int unsigned CONV3_3_W_ADDRW = (CONV3_3_NWORDS > 2) ? $clog2(CONV3_3_NWORDS) : 1;
  localparam int unsigned CONV3_3_B_SLOTW = (CONV3_3_SLOTS > 1) ? $clog2(CONV3_3_SLOTS) : 1;
  sparse_core #(.IN_CH(C6), .OUT_CH(C7), .H(H/4), .W(W/4), .N_NC(NC6), .T(T),
                .IS_FC(1'b0), .POOL(1'b1), .CHUNK(CHUNK)) u_conv3_3 (
    .clk, .rst_n, .start(go[6]), .busy(core_busy[6]), .done(fin[6]),
    .in_re(r5_re), .in_raddr(r5_raddr), .in_rdata(r5_rdata),
    .out_we(r6_we), .out_waddr(r6_waddr), .out_wdata(r6_wdata),
    .w_we(sw_we && sw_layer == 4'd6), .w_nc(CONV3_3_W_NCW'(sw_nc)),
    .w_addr(CONV3_3_W_ADDRW'(sw_addr)), .w_data(sw_data),
    .b_we(sb_we && sw_layer == 4'd6), .b_slot(CONV3_3_B_SLOTW'(sb_slot)), .b_data(sw_data));

  // ---------------- layer 7: sparse core (FC1) ----------------
  localparam int unsigned FC1_SLOTS = F1 / NC7;
  localparam int unsigned FC1_NWORDS = FC1_SLOTS * C7 * (H/8)*(W/8);
  localparam int unsigned FC1_W_NCW   = (NC7 > 1) ? $clog2(NC7) : 1;
  localparam int unsigned FC1_W_ADDRW = (FC1_NWORDS > 2) ? $clog2(FC1_NWORDS) : 1;
  localparam int unsigned FC1_B_SLOTW = (FC1_SLOTS > 1) ? $clog2(FC1_SLOTS) : 1;
  sparse_core #(.IN_CH(C7), .OUT_CH(F1), .H(H/8), .W(W/8), .N_NC(NC7), .T(T),
                .IS_FC(1'b1), .POOL(1'b0), .CHUNK(CHUNK)) u_fc1 (
    .clk, .rst_n, .start(go[7]), .busy(core_busy[7]), .done(fin[7]),
    .in_re(r6_re), .in_raddr(r6_raddr), .in_rdata(r6_rdata),
    .out_we(r7_we), .out_waddr(r7_waddr), .out_wdata(r7_wdata),
    .w_we(sw_we && sw_layer == 4'd7), .w_nc(FC1_W_NCW'(sw_nc)),
    .w_addr(FC1_W_ADDRW'(sw_addr)), .w_data(sw_data),
    .b_we(sb_we && sw_layer == 4'd7), .b_slot(FC1_B_SLOTW'(sb_slot)), .b_data(sw_data));

  // ---------------- layer 8: sparse core (FC2) ----------------
  localparam int unsigned FC2_SLOTS = P / NC8;
  localparam int unsigned FC2_NWORDS = FC2_SLOTS * F1 * (1)*(1);
  localparam int unsigned FC2_W_NCW   = (NC8 > 1) ? $clog2(NC8) : 1;
  localparam int unsigned FC2_W_ADDRW = (FC2_NWORDS > 2) ? $clog2(FC2_NWORDS) : 1;
  localparam int unsigned FC2_B_SLOTW = (FC2_SLOTS > 1) ? $clog2(FC2_SLOTS) : 1;
  sparse_core #(.IN_CH(F1), .OUT_CH(P), .H(1), .W(1), .N_NC(NC8), .T(T),
                .IS_FC(1'b1), .POOL(1'b0), .CHUNK(CHUNK)) u_fc2 (
    .clk, .rst_n, .start(go[8]), .busy(core_busy[8]), .done(fin[8]),
    .in_re(r7_re), .in_raddr(r7_raddr), .in_rdata(r7_rdata),
    .out_we(r8_we), .out_waddr(r8_waddr), .out_wdata(r8_wdata),
    .w_we(sw_we && sw_layer == 4'd8), .w_nc(FC2_W_NCW'(sw_nc)),
    .w_addr(FC2_W_ADDRW'(sw_addr)), .w_data(sw_data),
    .b_we(sb_we && sw_layer == 4'd8), .b_slot(FC2_B_SLOTW'(sb_slot)), .b_data(sw_data));

  // ---------------- output population ----------------
  assign r8_re    = out_re;
  assign r8_raddr = out_raddr;
  assign out_rdata = r8_rdata;
endmodule
