// prnn_layer: the photonic recurrent layer, a forward-Euler discretisation of
//   tau ds/dt = -s + W_in x(t) + W_rec sigma(s) + b,
// i.e. per time step, with alpha = dt/tau = 2^-ALPHA_SHIFT (0.5 as in the paper),
//   s(t+1) = (1 - alpha) s(t) + alpha (U[t] + W_rec sigma(s(t)) + b_rec),   y(t) = sigma(s(t+1)),
// where U[t] = W_in x(t) + b_in comes precomputed from the input_weighting stage and sigma is
// the Lorentzian neuron transfer function.
//
// Operation: once a full U bank and a free Y bank are available, the state starts at s = 0
// (sigma(0) = 0). For each step the 16 recurrent dot products (one per neuron, all 16 lanes
// wide) are issued on consecutive cycles; the step cannot advance until every new sigma(s) is
// known, which is the read-after-write dependency that the paper says sets an initiation
// interval of 16 cycles. As each result leaves the MAC pipeline the neuron's state is updated,
// its output sigma(s) computed and written to Y at n*STEPS+t (channel-major, ready for the
// convolution). A step takes NEURONS+4 cycles. Then the U bank is released and Y committed.
//
// Weights: W_rec[n][m] at WREC_BASE+n*NEURONS+m, b_rec[n] at BREC_BASE+n. The equations, alpha
// and sizes are the paper's; s(0)=0, the y(t)=sigma(s(t+1)) indexing and the split of the
// paper's bias into b_in and b_rec (to match its 1,312 PRNN parameters) are this design's.
module prnn_layer
  import prnn_pkg::*;
#(
  parameter int STEPS_P     = STEPS,
  parameter int NEURONS_P   = NEURONS,
  parameter int ALPHA_SHIFT = 1,
  parameter int W_BASE      = WREC_BASE,
  parameter int B_BASE      = BREC_BASE,
  parameter int AW          = $clog2(STEPS_P*NEURONS_P)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wt_we,
  input  waddr_t        wt_addr,
  input  data_t         wt_data,
  // U buffer (consumer side)
  input  logic          i_valid,
  output logic          i_release,
  output logic [AW-1:0] i_addr,
  input  data_t         i_data,
  // Y buffer (producer side)
  input  logic          o_ready,
  output logic          o_commit,
  output logic          o_we,
  output logic [AW-1:0] o_addr,
  output data_t         o_data,
  output logic          busy
);
  localparam int TW = $clog2(NEURONS_P) > 0 ? $clog2(NEURONS_P) : 1;

  data_t w   [NEURONS_P*NEURONS_P];
  data_t bia [NEURONS_P];

  always_ff @(posedge clk) begin
    if (wt_we && int'(wt_addr) >= W_BASE && int'(wt_addr) < W_BASE + NEURONS_P*NEURONS_P)
      w[int'(wt_addr) - W_BASE] <= wt_data;
    if (wt_we && int'(wt_addr) >= B_BASE && int'(wt_addr) < B_BASE + NEURONS_P)
      bia[int'(wt_addr) - B_BASE] <= wt_data;
  end

  typedef enum logic [1:0] {IDLE, ISSUE, WAIT, DONE} state_t;
  state_t state;
  int unsigned t, n, nres;

  data_t s      [NEURONS_P];
  data_t y_prev [NEURONS_P];
  data_t y_next [NEURONS_P];

  logic          mv;
  data_t         mb [NEURONS_P];
  logic [TW-1:0] mtag, rtag;
  logic          rv;
  acc_t          racc;

  always_comb begin
    mv   = (state == ISSUE);
    mtag = TW'(n);
    for (int m = 0; m < NEURONS_P; m++) mb[m] = w[n * NEURONS_P + m];
  end

  vec_mac #(.LANES(NEURONS_P), .TAG_W(TW)) u_mac (
    .clk, .rst_n, .in_valid(mv), .in_first(1'b1), .in_last(1'b1), .in_a(y_prev), .in_b(mb),
    .in_tag(mtag), .out_valid(rv), .out_acc(racc), .out_tag(rtag));

  // state update for the neuron whose recurrent sum just arrived
  acc_t  f_acc;
  data_t f_q, s_old, s_new, y_new;
  logic signed [31:0] s_wide;

  assign i_addr = AW'(t * NEURONS_P + int'(rtag));

  always_comb begin
    f_acc  = racc + ((acc_t'(i_data) + acc_t'(bia[rtag])) <<< FRAC);
    f_q    = acc_to_data(f_acc);
    s_old  = s[rtag];
    s_wide = 32'(s_old) - (32'(s_old) >>> ALPHA_SHIFT) + (32'(f_q) >>> ALPHA_SHIFT);
    s_new  = sat_data(s_wide);
  end

  lorentzian u_sigma (.x(s_new), .y(y_new));

  assign o_we     = rv;
  assign o_addr   = AW'(int'(rtag) * STEPS_P + t);
  assign o_data   = y_new;
  assign o_commit = (state == DONE);
  assign i_release = o_commit;
  assign busy     = (state != IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE; t <= 0; n <= 0; nres <= 0;
      for (int m = 0; m < NEURONS_P; m++) begin
        s[m] <= '0; y_prev[m] <= '0; y_next[m] <= '0;
      end
    end else begin
      if (rv) begin
        s[rtag]      <= s_new;
        y_next[rtag] <= y_new;
        nres         <= nres + 1;
      end
      case (state)
        IDLE: if (i_valid && o_ready) begin
          state <= ISSUE; t <= 0; n <= 0; nres <= 0;
          for (int m = 0; m < NEURONS_P; m++) begin
            s[m] <= '0; y_prev[m] <= '0;
          end
        end
        ISSUE: begin
          if (n == NEURONS_P-1) begin n <= 0; state <= WAIT; end
          else n <= n + 1;
        end
        WAIT: if (nres == NEURONS_P) begin
          nres <= 0;
          for (int m = 0; m < NEURONS_P; m++) y_prev[m] <= y_next[m];
          if (t == STEPS_P-1) state <= DONE;
          else begin t <= t + 1; state <= ISSUE; end
        end
        DONE: state <= IDLE;
        default: state <= IDLE;
      endcase
    end
  end

  // the recurrent sum for a step must never arrive after the step has been closed
  a_raw: assert property (@(posedge clk) disable iff (!rst_n) rv |-> (state == ISSUE || state == WAIT));
endmodule
