// dense_core: the dense core that runs the non-binary input layer (CONV_1_1).
//
// Direct coding feeds the same IN_CH x H x W image to the first convolution
// at every timestep. The core holds the image in flip-flop buffers, computes
// 3x3 convolutions for ROWS output channels at a time on a ROWS x 27
// weight-stationary systolic array (one membrane-potential increment per row
// per cycle), turns them into spikes in one activation unit per row, and
// writes one spike train (a whole H x W map) per channel and timestep to the
// next layer's Spike RAM at address t*OUT_CH + channel.
// Interface: img_* loads pixels, w_* loads the int4 weights of one output
// channel (27 taps, tap k = c*9 + ky*3 + kx) and its int4 bias, start runs
// the layer, layer_avail rises when all trains are written.
// Timing per channel group and timestep: H*W feed cycles, 27+ROWS+2 drain
// cycles and ROWS write cycles, plus one weight-load cycle per group.
module dense_core
  import snn_pkg::*;
#(
  parameter int unsigned H      = 32,
  parameter int unsigned W      = 32,
  parameter int unsigned ROWS   = 1,
  parameter int unsigned OUT_CH = 64,
  parameter int unsigned T      = 2,
  localparam int unsigned NPE   = 27,
  localparam int unsigned AW    = $clog2(T*OUT_CH)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // image load
  input  logic                     img_we,
  input  logic [1:0]               img_ch,
  input  logic [$clog2(H*W)-1:0]   img_addr,
  input  pix_t                     img_data,
  // weight / bias load, one output channel per write
  input  logic                     w_we,
  input  logic [$clog2(OUT_CH)-1:0] w_ch,
  input  weight_t                  w_data [NPE],
  input  weight_t                  b_data,
  // control
  input  logic                     start,
  output logic                     layer_avail,
  output logic                     busy,
  // spike RAM write port
  output logic                     sr_we,
  output logic [AW-1:0]            sr_waddr,
  output logic [H*W-1:0]           sr_wdata
);
  localparam int unsigned GROUPS = OUT_CH / ROWS;

  weight_t wmem [OUT_CH][NPE];
  weight_t bmem [OUT_CH];
  always_ff @(posedge clk) begin
    if (w_we) begin
      wmem[w_ch] <= w_data;
      bmem[w_ch] <= b_data;
    end
  end

  logic [$clog2(H)-1:0] row;
  logic [$clog2(W)-1:0] col;
  logic w_load, pe_rst, first_t;
  logic [$clog2(GROUPS+1)-1:0] group;
  logic [ROWS-1:0] en;
  logic [$clog2(ROWS+1)-1:0] wr_row;

  dc_control #(.H(H), .W(W), .ROWS(ROWS), .OUT_CH(OUT_CH), .T(T), .NPE(NPE)) u_ctrl (
    .clk, .rst_n, .start, .layer_avail, .busy, .row, .col, .w_load, .group, .pe_rst,
    .en, .first_t, .sr_we, .sr_waddr, .wr_row);

  pix_t taps [NPE];
  dc_image_buffer #(.H(H), .W(W), .IN_CH(3)) u_img (
    .clk, .wr_en(img_we), .wr_ch(img_ch), .wr_addr(img_addr), .wr_data(img_data),
    .row, .col, .taps);

  weight_t w_row [ROWS][NPE];
  always_comb begin
    for (int r = 0; r < ROWS; r++) w_row[r] = wmem[group*ROWS + r];
  end

  psum_t psum [ROWS];
  dc_pe_array #(.ROWS(ROWS), .NPE(NPE)) u_array (
    .clk, .rst_n, .rst(pe_rst), .w_load, .w_row, .taps, .psum);

  logic [H*W-1:0] train [ROWS];
  for (genvar r = 0; r < ROWS; r++) begin : g_act
    logic map_done;
    dc_activ #(.HW(H*W)) u_act (
      .clk, .rst_n, .en(en[r]), .first_t, .psum(psum[r]),
      .bias(bmem[group*ROWS + r]), .train(train[r]), .map_done);
  end

  assign sr_wdata = train[wr_row];
endmodule
