// tb_dc_pe: checks the dense-core PE: weight register load, one-cycle
// registered MAC psum_out = psum_in + w*pix (signed weight, unsigned pixel),
// the pixel pass-through and the rst clear.
module tb_dc_pe;
  import snn_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, rst = 0, w_load = 0;
  weight_t w_in; pix_t pix, pix_out; psum_t psum_in, psum_out;
  dc_pe dut (.*);
  always #5 clk = ~clk;
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    w_in = 0; pix = 0; psum_in = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      weight_t w; int e;
      w = weight_t'($urandom);
      @(negedge clk); w_in = w; w_load = 1;
      @(negedge clk); w_load = 0; w_in = weight_t'($urandom);   // must be ignored
      pix = pix_t'($urandom); psum_in = psum_t'($signed($urandom_range(0, 20000)) - 10000);
      e = int'(psum_in) + int'(w) * int'(pix);
      @(negedge clk);
      checks += 2;
      if (int'(psum_out) != e) begin failures++; $display("psum got %0d exp %0d", psum_out, e); end
      if (pix_out != pix) begin failures++; $display("pix"); end
    end
    rst = 1; @(negedge clk); rst = 0;
    checks++; if (psum_out != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
