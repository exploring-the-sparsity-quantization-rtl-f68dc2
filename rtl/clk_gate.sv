// clk_gate: AND-gate clock gating for one memory region.
//
// gclk = clk AND en_q. The enable is sampled on the falling edge of clk so it
// is stable while clk is high and the gated clock cannot glitch. A request
// raised in the cycle before a rising edge therefore lets exactly that edge
// through. The AND gate follows the paper; the falling-edge enable register
// is this design's choice.
module clk_gate (
  input  logic clk,
  input  logic en,
  output logic gclk
);
  logic en_q;
  always_ff @(negedge clk) en_q <= en;
  assign gclk = clk & en_q;
endmodule
