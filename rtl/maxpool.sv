// maxpool: max-pooling of a binary spike map.
//
// On spikes, max-pooling is an OR: output (r, c) is the OR of the K x K
// input window starting at (K*r, K*c), non-overlapping (stride K). Maps are
// row-major bit vectors. Purely combinational. The OR form follows the
// paper; the window size K = 2 is the network's MP2.
module maxpool #(
  parameter int unsigned H = 32,
  parameter int unsigned W = 32,
  parameter int unsigned K = 2
) (
  input  logic [H*W-1:0]             in_train,
  output logic [(H/K)*(W/K)-1:0]     out_train
);
  always_comb begin
    for (int r = 0; r < H / K; r++) begin
      for (int c = 0; c < W / K; c++) begin
        logic b;
        b = 1'b0;
        for (int dy = 0; dy < K; dy++)
          for (int dx = 0; dx < K; dx++)
            b = b | in_train[(r*K + dy)*W + c*K + dx];
        out_train[r*(W/K) + c] = b;
      end
    end
  end
endmodule
