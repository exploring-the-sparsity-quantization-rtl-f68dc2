// tb_gated_ram: random reads and writes over a 24-word, two-region RAM
// checked against a model (one-cycle read latency, old data on a same-cycle
// read/write), and checks the clock gating: accesses confined to one
// region must leave the other region's gated clock without edges.
module tb_gated_ram;
  int checks = 0, failures = 0;
  logic clk = 0, re = 0, we = 0;
  logic [4:0] raddr, waddr; logic [7:0] rdata, wdata;
  logic [7:0] m [24];
  int e0 = 0, e1 = 0;
  gated_ram #(.DEPTH(24), .WIDTH(8)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge dut.gclk0) e0++;
  always @(posedge dut.gclk1) e1++;
  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int a = 0; a < 24; a++) begin
      @(negedge clk); we = 1; waddr = 5'(a); wdata = 8'($urandom); m[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 300; i++) begin
      logic [7:0] exp_d; int ra;
      @(negedge clk);
      ra = $urandom_range(0, 23);
      re = 1; raddr = 5'(ra); exp_d = m[ra];
      we = $urandom_range(0, 1); waddr = 5'($urandom_range(0, 23)); wdata = 8'($urandom);
      if (we) m[waddr] = wdata;
      @(negedge clk); re = 0; we = 0;
      checks++; if (rdata != exp_d) begin failures++; $display("read %0d got %0h exp %0h", ra, rdata, exp_d); end
    end
    // only region 1 (addresses 16..23): region 0 clock must stay still
    @(negedge clk); e0 = 0; e1 = 0;
    for (int i = 0; i < 20; i++) begin
      @(negedge clk); re = 1; raddr = 5'(16 + i % 8); we = 1; waddr = 5'(16 + (i + 3) % 8); wdata = 8'(i);
    end
    @(negedge clk); re = 0; we = 0;
    repeat (3) @(negedge clk);
    checks += 2;
    if (e0 != 0) begin failures++; $display("region 0 clocked %0d times", e0); end
    if (e1 != 20) begin failures++; $display("region 1 clocked %0d times", e1); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
