// dc_pe_array: the dense core's weight-stationary systolic PE array.
//
// ROWS rows of NPE = 27 PEs (3 input channels x 3 x 3 taps). Each row
// computes one output channel; row r's PE k holds weight k of that channel.
// Column k's pixel is delayed by k cycles in a staggering shift register
// (depth 0 for PE 0, 1 for PE 1, ... 26 for PE 26, as the dense-core figure
// prints), so it meets the partial sum that left PE 0 k cycles earlier.
// Partial sums flow left to right starting from 0; pixels flow down through
// the PEs, one row per cycle. A tap vector presented at cycle p appears as a
// complete sum at row r's output at cycle p + 27 + r, one sum per row per
// cycle. rst clears the pipeline. The array shape and delays follow the paper.
module dc_pe_array
  import snn_pkg::*;
#(
  parameter int unsigned ROWS = 1,
  parameter int unsigned NPE  = 27
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    rst,
  input  logic    w_load,
  input  weight_t w_row [ROWS][NPE],
  input  pix_t    taps  [NPE],
  output psum_t   psum  [ROWS]
);
  pix_t  stag   [NPE];          // staggered pixels entering row 0
  pix_t  pix_dn [ROWS+1][NPE];  // pixel into row r
  psum_t ps     [ROWS][NPE+1];

  // Staggering routine: column k delayed by k cycles
  for (genvar k = 0; k < NPE; k++) begin : g_stag
    if (k == 0) begin : g_d0
      assign stag[k] = taps[k];
    end else begin : g_dk
      pix_t sr [k];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int i = 0; i < k; i++) sr[i] <= '0;
        end else begin
          sr[0] <= taps[k];
          for (int i = 1; i < k; i++) sr[i] <= sr[i-1];
        end
      end
      assign stag[k] = sr[k-1];
    end
  end

  for (genvar k = 0; k < NPE; k++) begin : g_top
    assign pix_dn[0][k] = stag[k];
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    assign ps[r][0] = '0;
    for (genvar k = 0; k < NPE; k++) begin : g_pe
      dc_pe u_pe (
        .clk, .rst_n, .rst, .w_load,
        .w_in    (w_row[r][k]),
        .pix     (pix_dn[r][k]),
        .psum_in (ps[r][k]),
        .psum_out(ps[r][k+1]),
        .pix_out (pix_dn[r+1][k])
      );
    end
    assign psum[r] = ps[r][NPE];
  end
endmodule
