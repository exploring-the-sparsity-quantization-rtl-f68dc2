// spike_ram: on-chip buffer of spike trains between two layers.
//
// One word holds the complete spike train of one feature map (WIDTH = map
// height x width bits). Trains are stored timestep-major: channel ch of
// timestep t lives at address t*N + ch, so a layer with N channels and T
// timesteps takes N*T words, as in the paper. One write port (producer
// layer) and one read port (consumer layer); reads are synchronous with one
// cycle of latency. The one-train-per-word layout and the synchronous read
// are this design's choice.
module spike_ram #(
  parameter int unsigned DEPTH = 128,
  parameter int unsigned WIDTH = 1024,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
