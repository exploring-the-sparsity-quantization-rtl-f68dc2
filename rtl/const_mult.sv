// const_mult: multiply a signed value by a constant with shifts and adds.
//
// The quantised datapaths dequantise int4 weights, biases and dense-core
// partial sums, and apply the leak factor beta, by multiplying with constants
// that are fixed at elaboration. Following the paper, no multiplier (DSP) is
// used: one copy of x shifted left by k is added for every bit k set in C, and
// the sum is shifted right arithmetically by CFRAC, so y = (x * C) >>> CFRAC
// exactly. Purely combinational, no latency. C must be non-negative.
// Widths and the Q-format are this design's choices.
module const_mult #(
  parameter int unsigned IN_W  = 24,
  parameter int unsigned OUT_W = 24,
  parameter int unsigned C     = 38,
  parameter int unsigned CFRAC = 8
) (
  input  logic signed [IN_W-1:0]  x,
  output logic signed [OUT_W-1:0] y
);
  localparam int unsigned SUM_W = IN_W + 33;
  logic signed [SUM_W-1:0] terms [32];
  logic signed [SUM_W-1:0] sum;

  for (genvar k = 0; k < 32; k++) begin : g_term
    if (C[k]) begin : g_set
      assign terms[k] = SUM_W'(x) <<< k;
    end else begin : g_clr
      assign terms[k] = '0;
    end
  end

  always_comb begin
    sum = '0;
    for (int k = 0; k < 32; k++) sum += terms[k];
  end

  assign y = OUT_W'(sum >>> CFRAC);
endmodule
