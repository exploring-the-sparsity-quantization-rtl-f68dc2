// tb_spike_ram: writes random trains to every address, reads them back with
// the one-cycle synchronous read, and checks read-before-write ordering.
module tb_spike_ram;
  int checks = 0, failures = 0;
  logic clk = 0, we = 0, re = 0;
  logic [4:0] waddr, raddr; logic [63:0] wdata, rdata;
  logic [63:0] ref_m [32];
  spike_ram #(.DEPTH(32), .WIDTH(64)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int a = 0; a < 32; a++) begin
      @(negedge clk); we = 1; waddr = 5'(a); wdata = {$urandom, $urandom}; ref_m[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 100; i++) begin
      int a; a = $urandom_range(0, 31);
      @(negedge clk); re = 1; raddr = 5'(a);
      @(negedge clk); re = 0;
      checks++; if (rdata != ref_m[a]) begin failures++; $display("addr %0d", a); end
    end
    // read and write the same address in one cycle: old data returned
    @(negedge clk); re = 1; raddr = 5'd3; we = 1; waddr = 5'd3; wdata = ~ref_m[3];
    @(negedge clk); re = 0; we = 0;
    checks++; if (rdata != ref_m[3]) failures++;
    @(negedge clk); re = 1; @(negedge clk); re = 0;
    checks++; if (rdata != ~ref_m[3]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
