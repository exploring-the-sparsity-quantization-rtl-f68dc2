// gated_ram: simple dual-port RAM split in two clock-gated halves.
//
// The paper saves memory power by splitting each neural-core memory in two
// regions: the most significant address bit selects the active region for
// reads and writes, and an AND gate passes the clock only to that region.
// Bank 0 holds addresses [0, HALF-1], bank 1 holds [HALF, DEPTH-1], where
// HALF = 2^(AW-1). A bank's clock runs in a cycle only if a read or a write
// addresses it. Reads are synchronous, one cycle of latency; a read and a
// write of the same address in one cycle return the old word.
module gated_ram #(
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned WIDTH = 24,
  localparam int unsigned AW   = (DEPTH > 2) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata
);
  localparam int unsigned HALF  = 2 ** (AW - 1);
  localparam int unsigned D1    = (DEPTH > HALF) ? DEPTH - HALF : 1;
  localparam int unsigned BAW   = (AW > 1) ? AW - 1 : 1;

  logic [WIDTH-1:0] mem0 [HALF];
  logic [WIDTH-1:0] mem1 [D1];
  logic [WIDTH-1:0] rd0, rd1;
  logic             gclk0, gclk1, rsel;
  logic [BAW-1:0]   ra, wa;

  // address inside a region: the address without its MSB (0 for a 2-word RAM)
  assign ra = (AW > 1) ? BAW'(raddr) : '0;
  assign wa = (AW > 1) ? BAW'(waddr) : '0;

  // addr[MSB] low enables bank 0 (through the inverter), high enables bank 1
  clk_gate u_cg0 (.clk, .en((re && !raddr[AW-1]) || (we && !waddr[AW-1])), .gclk(gclk0));
  clk_gate u_cg1 (.clk, .en((re &&  raddr[AW-1]) || (we &&  waddr[AW-1])), .gclk(gclk1));

  always_ff @(posedge gclk0) begin
    if (we && !waddr[AW-1]) mem0[wa] <= wdata;
    if (re && !raddr[AW-1]) rd0 <= mem0[ra];
  end
  always_ff @(posedge gclk1) begin
    if (we && waddr[AW-1]) mem1[wa] <= wdata;
    if (re && raddr[AW-1]) rd1 <= mem1[ra];
  end
  always_ff @(posedge clk) begin
    if (re) rsel <= raddr[AW-1];
  end
  assign rdata = rsel ? rd1 : rd0;
endmodule
