// conv1d_pool: one convolution stage of the classifier: Conv1D (stride 1, no padding), ELU,
// then max pooling by POOL with stride POOL (trailing positions that do not fill a window are
// dropped). Used twice: kernel 5 on the 16x32 PRNN output (-> 16x28 -> 16x14) and kernel 3 on
// that result (-> 16x12 -> 16x6).
//
// Input and output are channel-major: in[c][l] at c*LIN+l, out[o][p] at o*LP+p. The second
// stage's output order is therefore already the flattened 96-element vector the fully
// connected layer reads ("Reshape" in the paper's pipeline costs no separate pass).
//
// Operation: once a full input bank and a free output bank are available, for every output
// channel o and position x the stage issues CIN vector/vector multiplies of K lanes (kernel
// taps of one input channel) on consecutive cycles to a vec_mac, so each cycle performs K MACs
// (Fig. 5 of the paper shows five MACs for the first convolution). Sums leave the MAC
// pipeline in position order; bias, rounding, ELU and the running pool maximum are applied
// there, one pooled word written per POOL positions. Busy time: COUT*LC*CIN + 5 cycles.
//
// Weights: W[o][i][k] at W_BASE + (o*CIN+i)*K + k, biases at W_BASE + COUT*CIN*K + o.
// Layer sizes are the paper's; stride, padding and pooling window are inferred from its
// parameter counts; lane mapping and timing are this design's.
module conv1d_pool
  import prnn_pkg::*;
#(
  parameter int CIN    = 16,
  parameter int COUT   = 16,
  parameter int LIN    = 32,
  parameter int K      = 5,
  parameter int POOL   = 2,
  parameter int W_BASE = C1_BASE,
  parameter int LC     = LIN - K + 1,
  parameter int LP     = LC / POOL,
  parameter int IAW    = $clog2(CIN*LIN),
  parameter int OAW    = $clog2(COUT*LP)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           wt_we,
  input  waddr_t         wt_addr,
  input  data_t          wt_data,
  input  logic           i_valid,
  output logic           i_release,
  output logic [IAW-1:0] i_addr [K],
  input  data_t          i_data [K],
  input  logic           o_ready,
  output logic           o_commit,
  output logic           o_we,
  output logic [OAW-1:0] o_addr,
  output data_t          o_data,
  output logic           busy
);
  localparam int NW   = COUT * CIN * K;
  localparam int NOUT = COUT * LC;
  localparam int TW   = $clog2(NOUT);

  data_t w   [NW];
  data_t bia [COUT];

  always_ff @(posedge clk) begin
    if (wt_we && int'(wt_addr) >= W_BASE && int'(wt_addr) < W_BASE + NW)
      w[int'(wt_addr) - W_BASE] <= wt_data;
    if (wt_we && int'(wt_addr) >= W_BASE + NW && int'(wt_addr) < W_BASE + NW + COUT)
      bia[int'(wt_addr) - W_BASE - NW] <= wt_data;
  end

  typedef enum logic [1:0] {IDLE, ISSUE, DRAIN} state_t;
  state_t state;
  int unsigned o, x, i, nres;

  logic          mv, mf, ml;
  data_t         mb [K];
  logic [TW-1:0] mtag, rtag;
  logic          rv;
  acc_t          racc;

  always_comb begin
    mv   = (state == ISSUE);
    mf   = (i == 0);
    ml   = (i == CIN-1);
    mtag = TW'(o * LC + x);
    for (int k = 0; k < K; k++) begin
      i_addr[k] = IAW'(i * LIN + x + k);
      mb[k]     = w[(o * CIN + i) * K + k];
    end
  end

  vec_mac #(.LANES(K), .TAG_W(TW)) u_mac (
    .clk, .rst_n, .in_valid(mv), .in_first(mf), .in_last(ml), .in_a(i_data), .in_b(mb),
    .in_tag(mtag), .out_valid(rv), .out_acc(racc), .out_tag(rtag));

  // post-processing of a finished sum: bias, ELU, pooling
  int unsigned ro, rx;
  data_t pre, act, pmax, newmax;
  always_comb begin
    ro     = int'(rtag) / LC;
    rx     = int'(rtag) % LC;
    pre    = acc_to_data(racc + (acc_t'(bia[ro]) <<< FRAC));
    newmax = (rx % POOL == 0 || act > pmax) ? act : pmax;
  end

  elu u_elu (.x(pre), .y(act));

  assign o_we     = rv && (rx % POOL == POOL-1) && (rx / POOL < LP);
  assign o_addr   = OAW'(ro * LP + rx / POOL);
  assign o_data   = newmax;
  assign o_commit = (state == DRAIN) && (nres == NOUT);
  assign i_release = o_commit;
  assign busy     = (state != IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE; o <= 0; x <= 0; i <= 0; nres <= 0; pmax <= '0;
    end else begin
      if (rv) begin
        nres <= nres + 1;
        pmax <= newmax;
      end
      case (state)
        IDLE: if (i_valid && o_ready) begin
          state <= ISSUE; o <= 0; x <= 0; i <= 0; nres <= 0;
        end
        ISSUE: begin
          if (i == CIN-1) begin
            i <= 0;
            if (x == LC-1) begin
              x <= 0;
              if (o == COUT-1) state <= DRAIN;
              else o <= o + 1;
            end else x <= x + 1;
          end else i <= i + 1;
        end
        DRAIN: if (nres == NOUT) state <= IDLE;
        default: state <= IDLE;
      endcase
    end
  end
endmodule
