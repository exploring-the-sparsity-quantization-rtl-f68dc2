// tb_dc_pe_array: 2-row array with random weights; a new random 27-pixel
// tap vector is presented every cycle, and row r's output at cycle p+27+r
// must equal sum_k w[r][k]*taps_p[k] (the staggered systolic latency).
module tb_dc_pe_array;
  import snn_pkg::*;
  localparam int ROWS = 2, N = 60;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, rst = 0, w_load = 0;
  weight_t w_row [ROWS][27];
  pix_t taps [27];
  psum_t psum [ROWS];
  pix_t vec [N][27];
  dc_pe_array #(.ROWS(ROWS)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int r = 0; r < ROWS; r++) for (int k = 0; k < 27; k++) w_row[r][k] = weight_t'($urandom);
    for (int p = 0; p < N; p++) for (int k = 0; k < 27; k++) vec[p][k] = pix_t'($urandom);
    for (int k = 0; k < 27; k++) taps[k] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); w_load = 1; rst = 1;
    @(negedge clk); w_load = 0; rst = 0;
    fork
      for (int p = 0; p < N; p++) begin
        for (int k = 0; k < 27; k++) taps[k] = vec[p][k];
        @(negedge clk);
      end
      for (int c = 1; c <= N + 27 + ROWS; c++) begin
        @(posedge clk); #1;
        for (int r = 0; r < ROWS; r++) begin
          int p; p = c - 27 - r;
          if (p >= 0 && p < N) begin
            int e; e = 0;
            for (int k = 0; k < 27; k++) e += int'(w_row[r][k]) * int'(vec[p][k]);
            checks++;
            if (int'(psum[r]) != e) begin failures++; $display("row %0d pix %0d got %0d exp %0d", r, p, psum[r], e); end
          end
        end
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
