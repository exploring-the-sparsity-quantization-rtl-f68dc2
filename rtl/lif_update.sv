// lif_update: one leaky integrate-and-fire step, shared by both cores.
//
// acc holds the stored (already leaked) potential plus the input current of
// this timestep; bias is the dequantised filter bias. Following the paper's
// activation unit, the bias is added, the potential is compared with the
// threshold theta (strictly greater fires), the threshold is subtracted on a
// spike, and the leak beta is applied with a shift-and-add constant multiply.
// The leaked value is what the caller stores for the next timestep, so that
// next step's accumulation lands on beta * u_r. Combinational, no latency.
// theta = 0.5 and beta = 0.15 come from the paper; the Q8 fixed point is this
// design's choice.
module lif_update
  import snn_pkg::*;
#(
  parameter int unsigned BETA  = BETA_Q8,
  parameter int unsigned THETA = THETA_Q8
) (
  input  mem_t acc,
  input  mem_t bias,
  output logic spike,
  output mem_t next_state
);
  mem_t u, u_r;
  always_comb begin
    u     = acc + bias;
    spike = (u > $signed(MEM_W'(THETA)));
    u_r   = spike ? u - $signed(MEM_W'(THETA)) : u;
  end
  const_mult #(.IN_W(MEM_W), .OUT_W(MEM_W), .C(BETA), .CFRAC(FRAC)) u_leak (.x(u_r), .y(next_state));
endmodule
