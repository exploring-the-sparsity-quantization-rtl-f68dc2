// sc_compress: the compression routine of the sparse core's event control unit.
//
// A spike train of HW bits is loaded and cut into CHUNK-bit pieces handled
// one after another. Each cycle a priority encoder finds the lowest set bit
// of the current chunk and offers its position in the map (chunk index *
// CHUNK + bit) as a spike event. When the event is accepted, the bit-reset
// path clears that bit and the chunk register takes the cleared chunk back
// through the MUX, so the next set bit is found in the following cycle. An
// empty chunk makes the MUX take the next chunk of the train instead.
// Cost: one cycle per spike plus one per chunk. The structure (MUX, priority
// encoder, bit reset) follows the paper's figure; the chunk width n is not
// given in the paper and the default of 16 is this design's choice.
module sc_compress #(
  parameter int unsigned HW    = 1024,
  parameter int unsigned CHUNK = 16,
  localparam int unsigned CW   = (CHUNK < HW) ? CHUNK : HW,
  localparam int unsigned NCH  = HW / CW,
  localparam int unsigned AW   = (HW > 1) ? $clog2(HW) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          load,
  input  logic [HW-1:0] train,
  output logic          busy,
  output logic          ev_valid,
  input  logic          ev_ready,
  output logic [AW-1:0] ev_addr
);
  localparam int unsigned PW  = (CW > 1) ? $clog2(CW) : 1;
  localparam int unsigned CIW = (NCH > 1) ? $clog2(NCH) : 1;

  logic [HW-1:0]  train_q;
  logic [CW-1:0]  cur;
  logic [CIW-1:0] cidx;
  logic [PW-1:0]  pos;
  logic           found;

  // priority encoder: lowest set bit wins
  always_comb begin
    found = 1'b0;
    pos   = '0;
    for (int i = CW - 1; i >= 0; i--) begin
      if (cur[i]) begin
        found = 1'b1;
        pos   = PW'(i);
      end
    end
  end

  assign ev_valid = busy && found;
  assign ev_addr  = AW'(cidx * CW + pos);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      cidx <= '0;
      cur  <= '0;
      train_q <= '0;
    end else if (load) begin
      train_q <= train;
      cur     <= train[CW-1:0];
      cidx    <= '0;
      busy    <= 1'b1;
    end else if (busy) begin
      if (found) begin
        if (ev_ready) cur[pos] <= 1'b0;           // bit reset
      end else if (cidx == CIW'(NCH - 1)) begin
        busy <= 1'b0;
      end else begin
        cidx <= cidx + 1'b1;
        cur  <= train_q[(32'(cidx) + 1) * CW +: CW];  // MUX: next chunk
      end
    end
  end
endmodule
