// snn_pkg: numeric formats and LIF constants shared by the dense and sparse cores.
//
// Weights and biases are 4-bit signed integers (int4, as in the quantised
// hardware). Membrane potentials are signed fixed point with FRAC fractional
// bits. The paper keeps neuron state in floating point; this design uses
// fixed point instead and dequantises int4 values with a shift-and-add
// multiplication by a constant scale (see const_mult). The leak factor
// beta = 0.15 and threshold theta = 0.5 are the paper's values, rounded to
// FRAC = 8 fractional bits. The scale factors are this design's choice.
package snn_pkg;
  localparam int unsigned W_W    = 4;   // int4 weights and biases
  localparam int unsigned PIX_W  = 8;   // unsigned input pixels
  localparam int unsigned PSUM_W = 20;  // dense-core partial sums
  localparam int unsigned MEM_W  = 24;  // membrane potential word
  localparam int unsigned FRAC   = 8;   // fractional bits of MEM_W and of all Q8 constants
  localparam int unsigned BETA_Q8  = 38;   // 0.15  * 256 = 38.4
  localparam int unsigned THETA_Q8 = 128;  // 0.5   * 256
  localparam int unsigned W_SCALE_Q8  = 32;  // real weight = int4 * 0.125 ; in Q8 units: int4 * 32
  localparam int unsigned DC_SCALE_Q8 = 32;  // dense psum unit (pixel/256 * w/8) in Q8: psum * 32/256

  typedef logic signed [W_W-1:0]    weight_t;
  typedef logic signed [MEM_W-1:0]  mem_t;
  typedef logic signed [PSUM_W-1:0] psum_t;
  typedef logic        [PIX_W-1:0]  pix_t;
endpackage
