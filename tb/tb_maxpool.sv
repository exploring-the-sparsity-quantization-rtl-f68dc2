// tb_maxpool: random 8x8 binary maps, each output bit compared with the OR
// of its 2x2 window; also an all-zero map.
module tb_maxpool;
  int checks = 0, failures = 0;
  logic [63:0] in_train; logic [15:0] out_train;
  maxpool #(.H(8), .W(8), .K(2)) dut (.*);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int n = 0; n < 60; n++) begin
      in_train = (n == 0) ? 64'd0 : {$urandom, $urandom} & {$urandom, $urandom} & {$urandom, $urandom};
      #1;
      for (int r = 0; r < 4; r++) for (int c = 0; c < 4; c++) begin
        logic e;
        e = in_train[(2*r)*8 + 2*c] | in_train[(2*r)*8 + 2*c + 1] |
            in_train[(2*r+1)*8 + 2*c] | in_train[(2*r+1)*8 + 2*c + 1];
        checks++;
        if (out_train[r*4+c] != e) begin failures++; $display("map %0d (%0d,%0d)", n, r, c); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
