// tb_sc_addr_gen: conv mode (5x4 map, 3 input channels, 2 slots) and FC mode
// (2x2 input maps, 3 input channels, 3 slots). Random events are offered;
// the emitted updates must equal an independently computed list (neuron
// (r-ky+1, c-kx+1) of every slot and tap, in-map only), and each event must
// take exactly 9*SLOTS (conv) or SLOTS (FC) cycles.
module tb_sc_addr_gen;
  int checks = 0, failures = 0, skipped = 0;
  logic clk = 0, rst_n = 0;
  // conv instance
  logic cv, cr, cb, cu; logic [1:0] cch; logic [4:0] cpix; logic [5:0] cm; logic [7:0] cw;
  sc_addr_gen #(.H(5), .W(4), .IN_CH(3), .SLOTS(2), .IS_FC(1'b0)) dut_c (
    .clk, .rst_n, .ev_valid(cv), .ev_ch(cch), .ev_pix(cpix), .ev_ready(cr), .busy(cb),
    .upd_valid(cu), .upd_maddr(cm), .upd_waddr(cw));
  // FC instance
  logic fv, fr, fb, fu; logic [1:0] fch; logic [1:0] fpix; logic [1:0] fm; logic [5:0] fw;
  sc_addr_gen #(.H(2), .W(2), .IN_CH(3), .SLOTS(3), .IS_FC(1'b1)) dut_f (
    .clk, .rst_n, .ev_valid(fv), .ev_ch(fch), .ev_pix(fpix), .ev_ready(fr), .busy(fb),
    .upd_valid(fu), .upd_maddr(fm), .upd_waddr(fw));
  always #5 clk = ~clk;
  int gotc[$], gotf[$];
  int busyc = 0, busyf = 0;
  always @(posedge clk) if (rst_n) begin
    if (cu) gotc.push_back(int'(cm) * 1000 + int'(cw));
    if (fu) gotf.push_back(int'(fm) * 1000 + int'(fw));
    if (cb) busyc++;
    if (fb) busyf++;
    if (cb && !cu) skipped++;
  end
  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int expc[$], expf[$]; int nev = 20;
    cv = 0; fv = 0; cch = 0; cpix = 0; fch = 0; fpix = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int e = 0; e < nev; e++) begin
      int ch, pix, r, c;
      ch = $urandom_range(0, 2); pix = $urandom_range(0, 19); r = pix / 4; c = pix % 4;
      for (int s = 0; s < 2; s++) for (int k = 0; k < 9; k++) begin
        int orow, ocol; orow = r - k/3 + 1; ocol = c - k%3 + 1;
        if (orow >= 0 && orow < 5 && ocol >= 0 && ocol < 4)
          expc.push_back((s*20 + orow*4 + ocol) * 1000 + (s*3 + ch)*9 + k);
      end
      @(negedge clk); cv = 1; cch = 2'(ch); cpix = 5'(pix);
      #1; while (!cr) begin @(negedge clk); #1; end
      @(negedge clk); cv = 0;
    end
    repeat (20) @(negedge clk);
    for (int e = 0; e < nev; e++) begin
      int ch, pix;
      ch = $urandom_range(0, 2); pix = $urandom_range(0, 3);
      for (int s = 0; s < 3; s++) expf.push_back(s * 1000 + (s*3 + ch)*4 + pix);
      @(negedge clk); fv = 1; fch = 2'(ch); fpix = 2'(pix);
      #1; while (!fr) begin @(negedge clk); #1; end
      @(negedge clk); fv = 0;
    end
    repeat (20) @(negedge clk);
    checks += 5;
    if (gotc != expc) begin failures++; $display("conv updates differ: %0d vs %0d", gotc.size(), expc.size()); end
    if (gotf != expf) begin failures++; $display("fc updates differ: %0d vs %0d", gotf.size(), expf.size()); end
    if (busyc != nev * 18) begin failures++; $display("conv busy cycles %0d exp %0d", busyc, nev*18); end
    if (busyf != nev * 3) begin failures++; $display("fc busy cycles %0d exp %0d", busyf, nev*3); end
    if (skipped == 0) begin failures++; $display("no out-of-map neuron skipped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
