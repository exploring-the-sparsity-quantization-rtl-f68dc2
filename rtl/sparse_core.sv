// sparse_core: event-driven core for one CONV or FC layer of the spiking network.
//
// Binary spike maps are processed as events instead of dense convolutions.
// The event control unit (sc_control) fetches each input spike train of a
// timestep from the input Spike RAM; the compression routine (sc_compress)
// turns it into the positions of its set bits; these wait in the Spike
// Events array (spike_events) until address generation (sc_addr_gen) expands
// each event into neuron updates, broadcast to N_NC neural cores
// (neural_core), each owning OUT_CH/N_NC output channels. After all input
// channels, the cores fire and leak their neurons and the trains, optionally
// max-pooled 2x2 (maxpool), are written to the output Spike RAM at
// t*OUT_CH + channel. Compression and accumulation overlap.
// CONV layers: 3x3 filters, zero padding, H x W maps in and out.
// FC layers (IS_FC): the input is IN_CH maps of H x W flattened (input index
// ch*H*W + pix), the output is OUT_CH neurons, each a 1-bit train.
// Interface: start/busy/done; input Spike RAM read port (one cycle
// latency); output Spike RAM write port; w_*/b_* load the int4 weights
// (address (slot*IN_CH + ch)*TAPS + tap of core w_nc) and biases.
// Cycle cost per timestep: about 9*SLOTS per input spike (SLOTS for FC),
// plus per input channel 3 cycles and one per CHUNK bits, plus the activation
// sweep of SLOTS*(OUT_HW+2) cycles and N_NC*SLOTS output writes.
module sparse_core
  import snn_pkg::*;
#(
  parameter int unsigned IN_CH  = 64,
  parameter int unsigned OUT_CH = 112,
  parameter int unsigned H      = 32,
  parameter int unsigned W      = 32,
  parameter int unsigned N_NC   = 28,
  parameter int unsigned T      = 2,
  parameter bit          IS_FC  = 1'b0,
  parameter bit          POOL   = 1'b1,
  parameter int unsigned CHUNK  = 16,
  parameter int unsigned EV_DEPTH = 16,
  localparam int unsigned HW     = H * W,
  localparam int unsigned SLOTS  = OUT_CH / N_NC,
  localparam int unsigned OUT_HW = IS_FC ? 1 : HW,
  localparam int unsigned OUT_TW = POOL ? OUT_HW / 4 : OUT_HW,
  localparam int unsigned TAPS   = IS_FC ? HW : 9,
  localparam int unsigned NWORDS = SLOTS * IN_CH * TAPS,
  localparam int unsigned IAW    = (T*IN_CH > 1) ? $clog2(T*IN_CH) : 1,
  localparam int unsigned OAW    = (T*OUT_CH > 1) ? $clog2(T*OUT_CH) : 1,
  localparam int unsigned WAW    = (NWORDS > 2) ? $clog2(NWORDS) : 1,
  localparam int unsigned SW     = (SLOTS > 1) ? $clog2(SLOTS) : 1,
  localparam int unsigned NCW    = (N_NC > 1) ? $clog2(N_NC) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              busy,
  output logic              done,
  // input Spike RAM read port
  output logic              in_re,
  output logic [IAW-1:0]    in_raddr,
  input  logic [HW-1:0]     in_rdata,
  // output Spike RAM write port
  output logic              out_we,
  output logic [OAW-1:0]    out_waddr,
  output logic [OUT_TW-1:0] out_wdata,
  // weight and bias load
  input  logic              w_we,
  input  logic [NCW-1:0]    w_nc,
  input  logic [WAW-1:0]    w_addr,
  input  weight_t           w_data,
  input  logic              b_we,
  input  logic [SW-1:0]     b_slot,
  input  weight_t           b_data
);
  localparam int unsigned CHW = (IN_CH > 1) ? $clog2(IN_CH) : 1;
  localparam int unsigned PAW = (HW > 1) ? $clog2(HW) : 1;
  localparam int unsigned MAW = (SLOTS*OUT_HW > 2) ? $clog2(SLOTS*OUT_HW) : 1;

  logic           comp_load, comp_busy, pipe_idle;
  logic [CHW-1:0] cur_ch;
  logic           nc_clr, nc_act_start, nc_act_next;
  logic [N_NC-1:0] nc_busy, nc_ready, nc_acc_busy;
  logic [NCW-1:0] out_sel;

  // ---- compression ----
  logic           cev_valid, cev_ready;
  logic [PAW-1:0] cev_addr;
  sc_compress #(.HW(HW), .CHUNK(CHUNK)) u_comp (
    .clk, .rst_n, .load(comp_load), .train(in_rdata), .busy(comp_busy),
    .ev_valid(cev_valid), .ev_ready(cev_ready), .ev_addr(cev_addr));

  // ---- Spike Events ----
  logic           fifo_full, fifo_empty, ag_ready, ag_busy;
  logic [CHW+PAW-1:0] fifo_dout;
  spike_events #(.DW(CHW+PAW), .DEPTH(EV_DEPTH)) u_events (
    .clk, .rst_n, .push(cev_valid && !fifo_full), .din({cur_ch, cev_addr}), .full(fifo_full),
    .pop(ag_ready && !fifo_empty), .dout(fifo_dout), .empty(fifo_empty));
  assign cev_ready = !fifo_full;

  // ---- address generation ----
  logic           upd_valid;
  logic [MAW-1:0] upd_maddr;
  logic [WAW-1:0] upd_waddr;
  sc_addr_gen #(.H(H), .W(W), .IN_CH(IN_CH), .SLOTS(SLOTS), .IS_FC(IS_FC)) u_ag (
    .clk, .rst_n, .ev_valid(!fifo_empty), .ev_ch(fifo_dout[CHW+PAW-1:PAW]),
    .ev_pix(fifo_dout[PAW-1:0]), .ev_ready(ag_ready), .busy(ag_busy),
    .upd_valid, .upd_maddr, .upd_waddr);

  // ---- neural cores ----
  logic [OUT_HW-1:0] trains [N_NC];
  for (genvar n = 0; n < N_NC; n++) begin : g_nc
    neural_core #(.SLOTS(SLOTS), .OUT_HW(OUT_HW), .NW(NWORDS)) u_nc (
      .clk, .rst_n,
      .w_we(w_we && w_nc == NCW'(n)), .w_addr, .w_data,
      .b_we(b_we && w_nc == NCW'(n)), .b_slot, .b_data,
      .upd_valid, .upd_maddr, .upd_waddr, .acc_busy(nc_acc_busy[n]),
      .clr_start(nc_clr), .act_start(nc_act_start), .act_next(nc_act_next),
      .busy(nc_busy[n]), .train_ready(nc_ready[n]), .train(trains[n]));
  end

  assign pipe_idle = !comp_busy && fifo_empty && !ag_busy && !(|nc_acc_busy) && !upd_valid;

  sc_control #(.IN_CH(IN_CH), .OUT_CH(OUT_CH), .N_NC(N_NC), .T(T)) u_ctrl (
    .clk, .rst_n, .start, .busy, .done, .in_re, .in_raddr,
    .comp_load, .cur_ch, .comp_busy, .pipe_idle,
    .nc_clr, .nc_act_start, .nc_act_next, .nc_any_busy(|nc_busy), .nc_all_ready(&nc_ready),
    .out_we, .out_waddr, .out_sel);

  // ---- max-pooling on the way to the output Spike RAM ----
  if (POOL) begin : g_pool
    maxpool #(.H(H), .W(W), .K(2)) u_mp (.in_train(trains[out_sel]), .out_train(out_wdata));
  end else begin : g_nopool
    assign out_wdata = trains[out_sel];
  end
endmodule
