// dc_control: control state machine of the dense core.
//
// For each group of ROWS output channels (row r computes channel g*ROWS+r):
// LOADW loads the rows' weight registers and pulses rst to clear the PE
// pipeline; then for each timestep t the Address Generation Routine walks the
// output pixels in row-major order, one per cycle (FEED), while the
// Staggering Routine's delay line raises EN for row r exactly 27 + r cycles
// later, when that row's first sum leaves the array. first_t (the rst of the
// activ units) is high during timestep 0 of a group. After the map is drained
// (DRAIN) the rows' spike trains are written to the Spike RAM one per cycle
// at address t*OUT_CH + channel (timestep-major, WRITE). After the last group
// layer_avail goes high and stays high until the next start. The loop order
// (timesteps inside channel groups) and the handshake are this design's
// choice; the duties of the unit follow the paper.
module dc_control #(
  parameter int unsigned H      = 32,
  parameter int unsigned W      = 32,
  parameter int unsigned ROWS   = 1,
  parameter int unsigned OUT_CH = 64,
  parameter int unsigned T      = 2,
  parameter int unsigned NPE    = 27,
  localparam int unsigned GROUPS = OUT_CH / ROWS,
  localparam int unsigned AW     = $clog2(T*OUT_CH)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  output logic                     layer_avail,
  output logic                     busy,
  // image buffer address
  output logic [$clog2(H)-1:0]     row,
  output logic [$clog2(W)-1:0]     col,
  // PE array
  output logic                     w_load,
  output logic [$clog2(GROUPS+1)-1:0] group,
  output logic                     pe_rst,
  // activ units
  output logic [ROWS-1:0]          en,
  output logic                     first_t,
  // spike RAM write
  output logic                     sr_we,
  output logic [AW-1:0]            sr_waddr,
  output logic [$clog2(ROWS+1)-1:0] wr_row
);
  typedef enum logic [2:0] {S_IDLE, S_LOADW, S_FEED, S_DRAIN, S_WRITE} state_e;
  state_e state;
  logic [$clog2(T+1)-1:0]   t;
  logic [$clog2(NPE+ROWS+2)-1:0] dcnt;
  logic [NPE+ROWS-1:0]      vld_sr;
  logic                     feed;

  assign feed    = (state == S_FEED);
  assign busy    = (state != S_IDLE);
  assign w_load  = (state == S_LOADW);
  assign pe_rst  = (state == S_LOADW);
  assign first_t = (t == 0);
  assign sr_we   = (state == S_WRITE);
  assign sr_waddr = AW'(t * OUT_CH + group * ROWS + wr_row);

  // EN: the feed-valid flag delayed by NPE + r cycles
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld_sr <= '0;
    else        vld_sr <= {vld_sr[NPE+ROWS-2:0], feed};
  end
  for (genvar r = 0; r < ROWS; r++) begin : g_en
    assign en[r] = vld_sr[NPE-1+r];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; t <= '0; group <= '0; row <= '0; col <= '0;
      dcnt <= '0; wr_row <= '0; layer_avail <= 1'b0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          layer_avail <= 1'b0;
          group <= '0; t <= '0;
          state <= S_LOADW;
        end
        S_LOADW: begin
          row <= '0; col <= '0;
          state <= S_FEED;
        end
        S_FEED: begin
          if (col == $clog2(W)'(W-1)) begin
            col <= '0;
            if (row == $clog2(H)'(H-1)) begin
              row   <= '0;
              dcnt  <= '0;
              state <= S_DRAIN;
            end else row <= row + 1'b1;
          end else col <= col + 1'b1;
        end
        S_DRAIN: begin
          // last sum of row ROWS-1 is consumed NPE+ROWS-1 cycles after the last feed
          dcnt <= dcnt + 1'b1;
          if (dcnt == $bits(dcnt)'(NPE + ROWS)) begin
            wr_row <= '0;
            state  <= S_WRITE;
          end
        end
        S_WRITE: begin
          if (wr_row == $bits(wr_row)'(ROWS-1)) begin
            wr_row <= '0;
            if (t == $bits(t)'(T-1)) begin
              t <= '0;
              if (group == $bits(group)'(GROUPS-1)) begin
                layer_avail <= 1'b1;
                state <= S_IDLE;
              end else begin
                group <= group + 1'b1;
                state <= S_LOADW;
              end
            end else begin
              t <= t + 1'b1;
              row <= '0; col <= '0;
              state <= S_FEED;
            end
          end else wr_row <= wr_row + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
