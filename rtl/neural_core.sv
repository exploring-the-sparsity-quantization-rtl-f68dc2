// neural_core: one neural core (NC) of a sparse core.
//
// NC number i of a layer with N cores owns the SLOTS = C_out/N output
// channels i, i+N, i+2N, ... Its membrane memory holds SLOTS maps of OUT_HW
// potentials (slot-major) and its filter-weight memory the int4 weights of
// those channels; both are gated_ram, split in two clock-gated halves.
// Three modes, started by the event control unit:
//  * clear (clr_start): write 0 to every potential, one word per cycle
//    (the reset of membrane state at the start of an image);
//  * accumulate (upd_*): per update, read the potential and the weight,
//    dequantise the weight by shift-and-add (w * W_SCALE), add, write back;
//    fully pipelined, one neuron per cycle, two cycles from upd_valid to the
//    write; a bypass register forwards a result to an update of the same
//    neuron issued in the next cycle;
//  * activate (act_start / act_next): for one slot at a time, sweep its
//    OUT_HW potentials through lif_update (bias add, threshold, reset by
//    subtraction, leak), write the leaked value back and collect the spikes
//    into train; train_ready is then high until act_next moves to the next
//    slot (after the last slot the core goes idle).
// Weights and biases are written through w_* and b_*. The mode structure
// follows the paper's Accum/Activ routines; the clear sweep, the bypass and
// the load ports are this design's choice.
module neural_core
  import snn_pkg::*;
#(
  parameter int unsigned SLOTS  = 4,
  parameter int unsigned OUT_HW = 1024,
  parameter int unsigned NW     = 4 * 64 * 9,   // weight words: SLOTS*IN_CH*TAPS
  localparam int unsigned MD    = SLOTS * OUT_HW,
  localparam int unsigned MAW   = (MD > 2) ? $clog2(MD) : 1,
  localparam int unsigned WAW   = (NW > 2) ? $clog2(NW) : 1,
  localparam int unsigned SW    = (SLOTS > 1) ? $clog2(SLOTS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // weight / bias load
  input  logic              w_we,
  input  logic [WAW-1:0]    w_addr,
  input  weight_t           w_data,
  input  logic              b_we,
  input  logic [SW-1:0]     b_slot,
  input  weight_t           b_data,
  // accumulation
  input  logic              upd_valid,
  input  logic [MAW-1:0]    upd_maddr,
  input  logic [WAW-1:0]    upd_waddr,
  output logic              acc_busy,
  // clear and activation
  input  logic              clr_start,
  input  logic              act_start,
  input  logic              act_next,
  output logic              busy,
  output logic              train_ready,
  output logic [OUT_HW-1:0] train
);
  typedef enum logic [2:0] {M_IDLE, M_CLR, M_ACT, M_ACT_TAIL, M_WAIT} mode_e;
  mode_e mode;

  // ---------------- memories ----------------
  logic           m_re, m_we, w_re;
  logic [MAW-1:0] m_raddr, m_waddr;
  mem_t           m_rdata, m_wdata;
  weight_t        w_rdata;

  gated_ram #(.DEPTH(MD), .WIDTH(MEM_W)) u_mem (
    .clk, .re(m_re), .raddr(m_raddr), .rdata(m_rdata),
    .we(m_we), .waddr(m_waddr), .wdata(m_wdata));

  gated_ram #(.DEPTH(NW), .WIDTH(W_W)) u_wmem (
    .clk, .re(w_re), .raddr(upd_waddr), .rdata(w_rdata),
    .we(w_we), .waddr(w_addr), .wdata(w_data));

  weight_t bias [SLOTS];
  always_ff @(posedge clk) begin
    if (b_we) bias[b_slot] <= b_data;
  end

  // ---------------- accumulate pipeline ----------------
  logic           s1_valid, fwd_hit;
  logic [MAW-1:0] s1_maddr;
  mem_t           w_fx, acc_sum, fwd_val;

  const_mult #(.IN_W(W_W), .OUT_W(MEM_W), .C(W_SCALE_Q8), .CFRAC(0)) u_wdq
    (.x(w_rdata), .y(w_fx));
  assign acc_sum  = (fwd_hit ? fwd_val : m_rdata) + w_fx;
  assign w_re     = upd_valid;
  assign acc_busy = s1_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0; s1_maddr <= '0; fwd_hit <= 1'b0; fwd_val <= '0;
    end else begin
      s1_valid <= upd_valid;
      s1_maddr <= upd_maddr;
      fwd_hit  <= s1_valid && upd_valid && (upd_maddr == s1_maddr);
      fwd_val  <= acc_sum;
    end
  end

  // ---------------- clear / activate sweep ----------------
  logic [MAW-1:0] cnt;       // clear address
  int unsigned    pix, slot; // activation position
  logic           a1_valid;
  logic [MAW-1:0] a1_addr;
  int unsigned    a1_pix;
  mem_t           bias_fx, lif_next;
  logic           lif_spk;

  const_mult #(.IN_W(W_W), .OUT_W(MEM_W), .C(W_SCALE_Q8), .CFRAC(0)) u_bdq
    (.x(bias[SW'(slot)]), .y(bias_fx));
  lif_update u_lif (.acc(m_rdata), .bias(bias_fx), .spike(lif_spk), .next_state(lif_next));

  assign busy        = (mode != M_IDLE);
  assign train_ready = (mode == M_WAIT);

  // memory port multiplexing
  always_comb begin
    m_re    = 1'b0;
    m_raddr = upd_maddr;
    m_we    = 1'b0;
    m_waddr = s1_maddr;
    m_wdata = acc_sum;
    if (mode == M_CLR) begin
      m_we = 1'b1; m_waddr = cnt; m_wdata = '0;
    end else if (mode == M_ACT || mode == M_ACT_TAIL) begin
      m_re    = (mode == M_ACT);
      m_raddr = MAW'(slot * OUT_HW + pix);
      m_we    = a1_valid;
      m_waddr = a1_addr;
      m_wdata = lif_next;
    end else begin
      m_re = upd_valid;
      m_we = s1_valid;
    end
  end

  always_ff @(posedge clk) begin
    if (a1_valid) train[a1_pix] <= lif_spk;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode <= M_IDLE; cnt <= '0; pix <= 0; slot <= 0;
      a1_valid <= 1'b0; a1_addr <= '0; a1_pix <= 0;
    end else begin
      a1_valid <= (mode == M_ACT);
      a1_addr  <= MAW'(slot * OUT_HW + pix);
      a1_pix   <= pix;
      case (mode)
        M_IDLE: begin
          if (clr_start) begin
            cnt <= '0; mode <= M_CLR;
          end else if (act_start) begin
            slot <= 0; pix <= 0; mode <= M_ACT;
          end
        end
        M_CLR: begin
          if (cnt == MAW'(MD - 1)) mode <= M_IDLE;
          else cnt <= cnt + 1'b1;
        end
        M_ACT: begin
          if (pix == OUT_HW - 1) mode <= M_ACT_TAIL;
          else pix <= pix + 1;
        end
        M_ACT_TAIL: mode <= M_WAIT;   // last potential written, train complete
        M_WAIT: begin
          if (act_next) begin
            pix <= 0;
            if (slot == SLOTS - 1) begin
              slot <= 0; mode <= M_IDLE;
            end else begin
              slot <= slot + 1; mode <= M_ACT;
            end
          end
        end
        default: mode <= M_IDLE;
      endcase
    end
  end
endmodule
