// tb_const_mult: checks the shift-and-add constant multiplier against a
// plain multiply, y = (x * C) >>> CFRAC, for the leak constant (38, Q8) and
// the weight dequantisation constant (32, integer), with random operands.
module tb_const_mult;
  int checks = 0, failures = 0;
  logic signed [23:0] x, y1, y2;
  const_mult #(.IN_W(24), .OUT_W(24), .C(38), .CFRAC(8)) dut1 (.x(x), .y(y1));
  const_mult #(.IN_W(24), .OUT_W(24), .C(32), .CFRAC(0)) dut2 (.x(x), .y(y2));
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 500; i++) begin
      longint e1, e2;
      x = 24'($signed($urandom_range(0, 200000)) - 100000);
      #1;
      e1 = (longint'(x) * 38) >>> 8;
      e2 = longint'(x) * 32;
      checks += 2;
      if (longint'(y1) != e1) begin failures++; $display("beta x=%0d y=%0d exp=%0d", x, y1, e1); end
      if (longint'(y2) != e2) begin failures++; $display("scale x=%0d y=%0d exp=%0d", x, y2, e2); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
