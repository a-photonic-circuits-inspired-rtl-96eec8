// input_weighting: dataflow stage that computes the input drive of the photonic RNN for all
// time steps at once,
//   U[t][n] = sum_j W_in[n][j] * X[t][j] + b_in[n],  t = 0..STEPS-1, n = 0..NEURONS-1.
// This term does not depend on the recurrent state, so it is taken out of the PRNN loop and
// runs as its own pipeline stage, as in the paper's "Input Weighting" stage.
//
// Operation: once a full X bank (address t*FEAT+j) and a free U bank are available, the stage
// issues one LANES-wide vector/vector multiply per cycle to a vec_mac, FEAT/LANES vectors per
// output, outputs in order t-major; results (rounded to 16 bits, saturated) are written to U
// at t*NEURONS+n as they leave the MAC pipeline. When all STEPS*NEURONS outputs are written the
// X bank is released and the U bank committed. Busy time: STEPS*NEURONS*FEAT/LANES + 4 cycles.
//
// Parameters are written through the weight bus: W_in[n][j] at WIN_BASE+n*FEAT+j, b_in[n] at
// BIN_BASE+n. The lane count (LANES) is this design's choice; the paper gives the layer sizes.
module input_weighting
  import prnn_pkg::*;
#(
  parameter int STEPS_P   = STEPS,
  parameter int FEAT_P    = FEAT,
  parameter int NEURONS_P = NEURONS,
  parameter int LANES     = 8,
  parameter int W_BASE    = WIN_BASE,
  parameter int B_BASE    = BIN_BASE,
  parameter int XAW       = $clog2(STEPS_P*FEAT_P),
  parameter int UAW       = $clog2(STEPS_P*NEURONS_P)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           wt_we,
  input  waddr_t         wt_addr,
  input  data_t          wt_data,
  // X buffer (consumer side)
  input  logic           i_valid,
  output logic           i_release,
  output logic [XAW-1:0] i_addr [LANES],
  input  data_t          i_data [LANES],
  // U buffer (producer side)
  input  logic           o_ready,
  output logic           o_commit,
  output logic           o_we,
  output logic [UAW-1:0] o_addr,
  output data_t          o_data,
  output logic           busy
);
  localparam int CHUNKS = FEAT_P / LANES;
  localparam int NOUT   = STEPS_P * NEURONS_P;

  data_t w   [NEURONS_P*FEAT_P];
  data_t bia [NEURONS_P];

  always_ff @(posedge clk) begin
    if (wt_we && int'(wt_addr) >= W_BASE && int'(wt_addr) < W_BASE + NEURONS_P*FEAT_P)
      w[int'(wt_addr) - W_BASE] <= wt_data;
    if (wt_we && int'(wt_addr) >= B_BASE && int'(wt_addr) < B_BASE + NEURONS_P)
      bia[int'(wt_addr) - B_BASE] <= wt_data;
  end

  typedef enum logic [1:0] {IDLE, ISSUE, DRAIN} state_t;
  state_t state;
  int unsigned t, n, c, nout;

  logic             mv, mf, ml;
  data_t            ma [LANES];
  data_t            mb [LANES];
  logic [UAW-1:0]   mtag, rtag;
  logic             rv;
  acc_t             racc;

  always_comb begin
    mv = (state == ISSUE);
    mf = (c == 0);
    ml = (c == CHUNKS-1);
    mtag = UAW'(t * NEURONS_P + n);
    for (int l = 0; l < LANES; l++) begin
      i_addr[l] = XAW'(t * FEAT_P + c * LANES + l);
      ma[l] = i_data[l];
      mb[l] = w[n * FEAT_P + c * LANES + l];
    end
  end

  vec_mac #(.LANES(LANES), .TAG_W(UAW)) u_mac (
    .clk, .rst_n, .in_valid(mv), .in_first(mf), .in_last(ml), .in_a(ma), .in_b(mb),
    .in_tag(mtag), .out_valid(rv), .out_acc(racc), .out_tag(rtag));

  assign o_we     = rv;
  assign o_addr   = rtag;
  assign o_data   = acc_to_data(racc + (acc_t'(bia[int'(rtag) % NEURONS_P]) <<< FRAC));
  assign busy     = (state != IDLE);
  assign o_commit = (state == DRAIN) && (nout == NOUT);
  assign i_release = o_commit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE; t <= 0; n <= 0; c <= 0; nout <= 0;
    end else begin
      if (rv) nout <= nout + 1;
      case (state)
        IDLE: if (i_valid && o_ready) begin
          state <= ISSUE; t <= 0; n <= 0; c <= 0; nout <= 0;
        end
        ISSUE: begin
          if (c == CHUNKS-1) begin
            c <= 0;
            if (n == NEURONS_P-1) begin
              n <= 0;
              if (t == STEPS_P-1) state <= DRAIN;
              else t <= t + 1;
            end else n <= n + 1;
          end else c <= c + 1;
        end
        DRAIN: if (nout == NOUT) state <= IDLE;
        default: state <= IDLE;
      endcase
    end
  end
endmodule
