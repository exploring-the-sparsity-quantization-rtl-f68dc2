// tb_sc_compress: random 64-bit trains (including empty and full ones) with
// random back-pressure; the events must be exactly the set bits in
// ascending order, and without back-pressure one train takes one cycle per
// spike plus one per 16-bit chunk.
module tb_sc_compress;
  localparam int HW = 64;
  int checks = 0, failures = 0, stalls = 0;
  logic clk = 0, rst_n = 0, load = 0, busy, ev_valid, ev_ready = 1;
  logic [HW-1:0] train; logic [5:0] ev_addr;
  int got[$];
  sc_compress #(.HW(HW), .CHUNK(16)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (ev_valid && ev_ready) got.push_back(int'(ev_addr));
    if (ev_valid && !ev_ready) stalls++;
  end
  initial begin
    #10000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 60; n++) begin
      int cyc, nset; int expq[$]; bit bp;
      case (n)
        0: train = '0;
        1: train = '1;
        default: train = {$urandom, $urandom} & {$urandom, $urandom};
      endcase
      bp = (n % 2 == 1) && n > 2;
      expq = {}; got = {};
      for (int i = 0; i < HW; i++) if (train[i]) expq.push_back(i);
      nset = expq.size();
      @(negedge clk); load = 1;
      @(negedge clk); load = 0;
      cyc = 0;
      while (busy) begin
        ev_ready = bp ? ($urandom_range(0, 1) == 1) : 1'b1;
        @(negedge clk); cyc++;
      end
      ev_ready = 1;
      checks++;
      if (got != expq) begin failures++; $display("train %0d: events differ (%0d vs %0d)", n, got.size(), nset); end
      if (!bp) begin
        checks++;
        if (cyc != nset + HW/16) begin failures++; $display("train %0d: %0d cycles, exp %0d", n, cyc, nset + HW/16); end
      end
    end
    checks++; if (stalls == 0) begin failures++; $display("no back-pressure seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
