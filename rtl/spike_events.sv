// spike_events: the Spike Events register array of the sparse core.
//
// A small first-in first-out register array that decouples the compression
// routine (producer) from address generation and accumulation (consumer), so
// a new spike train can be compressed while earlier events are still being
// accumulated. push/pop are valid/ready style: an entry is written when push
// is high and full is low, and read out (dout is the head, combinational)
// when pop is high and empty is low. DEPTH must be a power of two. The
// paper names the array; its depth and FIFO discipline are this design's.
module spike_events #(
  parameter int unsigned DW    = 16,
  parameter int unsigned DEPTH = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          push,
  input  logic [DW-1:0] din,
  output logic          full,
  input  logic          pop,
  output logic [DW-1:0] dout,
  output logic          empty
);
  localparam int unsigned PW = $clog2(DEPTH);
  logic [DW-1:0] q [DEPTH];
  logic [PW:0]   wp, rp;

  assign empty = (wp == rp);
  assign full  = (wp[PW-1:0] == rp[PW-1:0]) && (wp[PW] != rp[PW]);
  assign dout  = q[rp[PW-1:0]];

  always_ff @(posedge clk) begin
    if (push && !full) q[wp[PW-1:0]] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (push && !full) wp <= wp + 1'b1;
      if (pop && !empty) rp <= rp + 1'b1;
    end
  end

  // no write into a full array, no read from an empty one
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
