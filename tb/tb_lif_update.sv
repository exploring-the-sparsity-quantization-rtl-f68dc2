// tb_lif_update: checks one LIF step against an independent model:
// u = acc + bias; spike = u > 128 (theta 0.5 in Q8); u_r = u - 128*spike;
// next = (u_r * 38) >>> 8 (beta 0.15 in Q8). Random and boundary inputs.
module tb_lif_update;
  import snn_pkg::*;
  int checks = 0, failures = 0, nspk = 0;
  mem_t acc, bias, nxt;
  logic spk;
  lif_update dut (.acc, .bias, .spike(spk), .next_state(nxt));
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk();
    longint u, ur, en; bit es;
    #1;
    u  = longint'(acc) + longint'(bias);
    es = u > 128;
    ur = es ? u - 128 : u;
    en = (ur * 38) >>> 8;
    checks += 2;
    if (spk !== es) begin failures++; $display("spike acc=%0d bias=%0d got %0d", acc, bias, spk); end
    if (longint'(nxt) != en) begin failures++; $display("next acc=%0d got %0d exp %0d", acc, nxt, en); end
    if (spk) nspk++;
  endtask
  initial begin
    acc = 128; bias = 0; chk();   // equal to theta: no spike
    acc = 129; bias = 0; chk();   // just above
    acc = 100; bias = 29; chk();
    for (int i = 0; i < 400; i++) begin
      acc  = mem_t'($signed($urandom_range(0, 2000)) - 1000);
      bias = mem_t'($signed($urandom_range(0, 512)) - 256);
      chk();
    end
    checks++; if (nspk == 0) begin failures++; $display("no spikes seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
