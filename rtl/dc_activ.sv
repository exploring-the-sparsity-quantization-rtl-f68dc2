// dc_activ: activation unit of one dense-core row.
//
// Every cycle en is high, the row's partial sum for the next pixel of the
// map (row-major order) arrives. It is dequantised to fixed point
// (psum * DC_SCALE >>> 8, shift-and-add), added to the pixel's stored
// potential, and passed with the dequantised bias through lif_update; the
// leaked result is stored back and the spike bit is written into the map's
// spike train. While first_t is high (the first timestep of a new output
// channel, the paper's rst) the stored potentials are read as 0. map_done
// pulses in the cycle after the last pixel; train then holds the complete
// spike train until the next map overwrites it. Membrane state lives in a
// register array of HW words (this design's choice).
module dc_activ
  import snn_pkg::*;
#(
  parameter int unsigned HW       = 1024,
  parameter int unsigned DC_SCALE = DC_SCALE_Q8
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  logic          first_t,
  input  psum_t         psum,
  input  weight_t       bias,
  output logic [HW-1:0] train,
  output logic          map_done
);
  mem_t mem [HW];
  logic [$clog2(HW)-1:0] idx;
  mem_t cur, bias_fx, acc, nxt;
  logic spk;

  const_mult #(.IN_W(PSUM_W), .OUT_W(MEM_W), .C(DC_SCALE), .CFRAC(FRAC)) u_dq
    (.x(psum), .y(cur));
  const_mult #(.IN_W(W_W), .OUT_W(MEM_W), .C(W_SCALE_Q8), .CFRAC(0)) u_bq
    (.x(bias), .y(bias_fx));

  assign acc = (first_t ? mem_t'(0) : mem[idx]) + cur;
  lif_update u_lif (.acc(acc), .bias(bias_fx), .spike(spk), .next_state(nxt));

  always_ff @(posedge clk) begin
    if (en) begin
      mem[idx]   <= nxt;
      train[idx] <= spk;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx      <= '0;
      map_done <= 1'b0;
    end else begin
      map_done <= 1'b0;
      if (en) begin
        if (idx == $clog2(HW)'(HW-1)) begin
          idx      <= '0;
          map_done <= 1'b1;
        end else begin
          idx <= idx + 1'b1;
        end
      end
    end
  end
endmodule
