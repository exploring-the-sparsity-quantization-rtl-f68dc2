// sc_addr_gen: address generation of the sparse core's event control unit.
//
// Takes one spike event (input channel ch, position pix in the H x W input
// map) at a time and emits the neuron updates it causes, one per cycle, to
// all neural cores at once. Each NC owns SLOTS output channels (slot j of NC
// i is channel i + N*j), so for a CONV layer the generator walks slot j =
// 0..SLOTS-1 and filter tap k = ky*3 + kx = 0..8 and emits the neuron
// (row - ky + 1, col - kx + 1) of slot j with the weight of tap k of input
// channel ch; neurons outside the map are skipped (the cycle is spent with
// upd_valid low), so an event costs exactly 9*SLOTS cycles, the paper's
// F x C_out / N per spike. For an FC layer (IS_FC) the output map is 1 x 1,
// the event costs SLOTS cycles and the weight index is ch*H*W + pix.
// Outputs: upd_maddr = slot*OUT_HW + neuron, upd_waddr = (slot*IN_CH + ch)
// * TAPS + tap. Zero padding (9 neurons around the spike) is this design's
// reading of the paper, whose text gives the range (row-3,col-3)..(row,col).
module sc_addr_gen #(
  parameter int unsigned H      = 32,
  parameter int unsigned W      = 32,
  parameter int unsigned IN_CH  = 64,
  parameter int unsigned SLOTS  = 4,
  parameter bit          IS_FC  = 1'b0,
  localparam int unsigned HW     = H * W,
  localparam int unsigned OUT_HW = IS_FC ? 1 : HW,
  localparam int unsigned TAPS   = IS_FC ? HW : 9,
  localparam int unsigned CHW    = (IN_CH > 1) ? $clog2(IN_CH) : 1,
  localparam int unsigned PAW    = (HW > 1) ? $clog2(HW) : 1,
  localparam int unsigned MAW    = (SLOTS*OUT_HW > 2) ? $clog2(SLOTS*OUT_HW) : 1,
  localparam int unsigned WAW    = (SLOTS*IN_CH*TAPS > 2) ? $clog2(SLOTS*IN_CH*TAPS) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           ev_valid,
  input  logic [CHW-1:0] ev_ch,
  input  logic [PAW-1:0] ev_pix,
  output logic           ev_ready,
  output logic           busy,
  output logic           upd_valid,
  output logic [MAW-1:0] upd_maddr,
  output logic [WAW-1:0] upd_waddr
);
  localparam int unsigned KN = IS_FC ? 1 : 9;

  logic [CHW-1:0] ch_q;
  logic [PAW-1:0] pix_q;
  int unsigned    slot, k;
  logic           last;

  assign last     = (slot == SLOTS - 1) && (k == KN - 1);
  assign ev_ready = !busy || last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; slot <= 0; k <= 0; ch_q <= '0; pix_q <= '0;
    end else begin
      if (busy && !last) begin
        if (k == KN - 1) begin
          k    <= 0;
          slot <= slot + 1;
        end else k <= k + 1;
      end else if (ev_valid && ev_ready) begin
        busy  <= 1'b1;
        ch_q  <= ev_ch;
        pix_q <= ev_pix;
        slot  <= 0;
        k     <= 0;
      end else begin
        busy <= 1'b0;
      end
    end
  end

  always_comb begin
    int r, c, orow, ocol;
    r    = int'(pix_q) / int'(W);
    c    = int'(pix_q) % int'(W);
    orow = r - int'(k) / 3 + 1;
    ocol = c - int'(k) % 3 + 1;
    if (IS_FC) begin
      upd_valid = busy;
      upd_maddr = MAW'(slot);
      upd_waddr = WAW'((slot * IN_CH + int'(ch_q)) * TAPS + int'(pix_q));
    end else begin
      upd_valid = busy && orow >= 0 && orow < int'(H) && ocol >= 0 && ocol < int'(W);
      upd_maddr = MAW'(slot * OUT_HW + orow * W + ocol);
      upd_waddr = WAW'((slot * IN_CH + int'(ch_q)) * TAPS + k);
    end
  end
endmodule
