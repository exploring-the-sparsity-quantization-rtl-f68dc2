// sc_control: control state machine of the sparse core's event control unit (ECU).
//
// Runs one layer for one image:
//  CLR     clear every neural core's membrane potentials;
//  per timestep t:
//    FETCH/LOAD/WAITC  for each input channel c, read train t*IN_CH + c from
//                      the input Spike RAM (one cycle latency), load it into
//                      the compression routine and wait until it has emitted
//                      all its events; accumulation of earlier events runs
//                      meanwhile;
//    DRAIN   wait until compression, Spike Events, address generation and
//            every accumulation pipeline are empty;
//    ACT     start the neural cores' activation routine; for each slot j
//            (AWAIT) wait until all cores hold their train, then (WR) write
//            core i's train, through max-pooling if enabled, to output
//            address t*OUT_CH + j*N_NC + i, one core per cycle, and release
//            the cores with act_next;
//  DONE    pulse done.
// The phases follow the paper; the exact sequencing, the one-train-at-a-time
// fetch and the one-core-per-cycle output writes are this design's choice.
module sc_control #(
  parameter int unsigned IN_CH  = 64,
  parameter int unsigned OUT_CH = 112,
  parameter int unsigned N_NC   = 28,
  parameter int unsigned T      = 2,
  localparam int unsigned SLOTS = OUT_CH / N_NC,
  localparam int unsigned IAW   = (T*IN_CH > 1) ? $clog2(T*IN_CH) : 1,
  localparam int unsigned OAW   = (T*OUT_CH > 1) ? $clog2(T*OUT_CH) : 1,
  localparam int unsigned CHW   = (IN_CH > 1) ? $clog2(IN_CH) : 1,
  localparam int unsigned NW    = (N_NC > 1) ? $clog2(N_NC) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  output logic           busy,
  output logic           done,
  // input spike RAM
  output logic           in_re,
  output logic [IAW-1:0] in_raddr,
  // compression routine
  output logic           comp_load,
  output logic [CHW-1:0] cur_ch,
  input  logic           comp_busy,
  input  logic           pipe_idle,
  // neural cores
  output logic           nc_clr,
  output logic           nc_act_start,
  output logic           nc_act_next,
  input  logic           nc_any_busy,
  input  logic           nc_all_ready,
  // output spike RAM
  output logic           out_we,
  output logic [OAW-1:0] out_waddr,
  output logic [NW-1:0]  out_sel
);
  typedef enum logic [3:0] {S_IDLE, S_CLR, S_CLRW, S_FETCH, S_LOAD, S_WAITC,
                            S_DRAIN, S_ACT, S_AWAIT, S_WR} state_e;
  state_e      state;
  int unsigned t, c, j, i;

  assign busy         = (state != S_IDLE);
  assign nc_clr       = (state == S_CLR);
  assign in_re        = (state == S_FETCH);
  assign in_raddr     = IAW'(t * IN_CH + c);
  assign comp_load    = (state == S_LOAD);
  assign cur_ch       = CHW'(c);
  assign nc_act_start = (state == S_ACT);
  assign out_we       = (state == S_WR);
  assign out_waddr    = OAW'(t * OUT_CH + j * N_NC + i);
  assign out_sel      = NW'(i);
  assign nc_act_next  = (state == S_WR) && (i == N_NC - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; t <= 0; c <= 0; j <= 0; i <= 0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE:  if (start) begin t <= 0; c <= 0; state <= S_CLR; end
        S_CLR:   state <= S_CLRW;
        S_CLRW:  if (!nc_any_busy) state <= S_FETCH;
        S_FETCH: state <= S_LOAD;
        S_LOAD:  state <= S_WAITC;
        S_WAITC: if (!comp_busy) begin
          if (c == IN_CH - 1) state <= S_DRAIN;
          else begin c <= c + 1; state <= S_FETCH; end
        end
        S_DRAIN: if (pipe_idle) state <= S_ACT;
        S_ACT:   begin j <= 0; i <= 0; state <= S_AWAIT; end
        S_AWAIT: if (nc_all_ready) begin i <= 0; state <= S_WR; end
        S_WR: begin
          if (i == N_NC - 1) begin
            i <= 0;
            if (j == SLOTS - 1) begin
              j <= 0; c <= 0;
              if (t == T - 1) begin
                t <= 0; done <= 1'b1; state <= S_IDLE;
              end else begin
                t <= t + 1; state <= S_FETCH;
              end
            end else begin
              j <= j + 1; state <= S_AWAIT;
            end
          end else i <= i + 1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
