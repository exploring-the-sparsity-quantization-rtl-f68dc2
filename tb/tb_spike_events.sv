// tb_spike_events: pushes and pops random events with random stalls and
// checks first-in first-out order against a queue, plus full and empty.
module tb_spike_events;
  int checks = 0, failures = 0, nfull = 0;
  logic clk = 0, rst_n = 0, push = 0, pop = 0, full, empty;
  logic [11:0] din, dout;
  logic [11:0] q[$];
  spike_events #(.DW(12), .DEPTH(4)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    checks++; if (!empty) failures++;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      push = ($urandom_range(0, 2) != 0) && !full;
      pop  = ($urandom_range(0, 2) == 0) && !empty;
      din  = 12'($urandom);
      if (full) nfull++;
      if (pop) begin
        checks++;
        if (dout != q[0]) begin failures++; $display("order got %0h exp %0h", dout, q[0]); end
        void'(q.pop_front());
      end
      if (push) q.push_back(din);
      @(posedge clk); #1;
      checks++;
      if (empty != (q.size() == 0) || full != (q.size() == 4)) begin failures++; $display("flags size=%0d", q.size()); end
    end
    @(negedge clk); push = 0; pop = 0;
    checks++; if (nfull == 0) begin failures++; $display("never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
