// tb_dc_activ: a 16-pixel map over three timesteps with random partial sums
// and a fixed bias; checks every spike bit and the map_done pulse against a
// model: I = (psum*32)>>>8, u = mem + I + bias*32 (mem = 0 at the first
// timestep), spike = u > 128, mem = ((u - 128*spike)*38)>>>8.
module tb_dc_activ;
  import snn_pkg::*;
  localparam int HW = 16;
  int checks = 0, failures = 0, nspk = 0, ndone = 0;
  logic clk = 0, rst_n = 0, en = 0, first_t = 0, map_done;
  psum_t psum; weight_t bias; logic [HW-1:0] train;
  longint m [HW];
  logic [HW-1:0] et;
  dc_activ #(.HW(HW)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (map_done) ndone++;
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    bias = -4'sd2; psum = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 3; t++) begin
      for (int p = 0; p < HW; p++) begin
        longint u; bit s;
        @(negedge clk);
        en = 1; first_t = (t == 0);
        psum = psum_t'($urandom_range(0, 6000));
        u = (t == 0 ? 0 : m[p]) + ((longint'(psum) * 32) >>> 8) + longint'(bias) * 32;
        s = u > 128;
        m[p] = ((s ? u - 128 : u) * 38) >>> 8;
        et[p] = s;
        if (s) nspk++;
      end
      @(negedge clk); en = 0;
      checks++; if (train != et) begin failures++; $display("t=%0d train %h exp %h", t, train, et); end
      repeat (3) @(negedge clk);
    end
    checks++; if (ndone != 3) begin failures++; $display("map_done %0d", ndone); end
    checks++; if (nspk == 0 || nspk == 3*HW) begin failures++; $display("degenerate spikes"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
