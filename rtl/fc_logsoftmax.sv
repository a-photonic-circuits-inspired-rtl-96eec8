// fc_logsoftmax: the classifier's output stage, a fully connected layer of NOUT (30) neurons
// over the NIN (96) flattened convolution features, followed by log softmax:
//   z[c]    = sum_f W[c][f] * in[f] + b[c]
//   logP[c] = z[c] - max(z) - ln( sum_k exp(z[k] - max(z)) )
//
// Operation: once a full input bank and a free output bank are available, the stage issues
// NIN/LANES vector/vector multiplies per class on consecutive cycles (MAC phase, tracking the
// running maximum as sums arrive), then sums exp(z[k] - max) one class per cycle (EXP phase),
// takes the logarithm (one cycle), and writes the NOUT log-probabilities to the output bank
// one per cycle (OUT phase). Busy time: NOUT*NIN/LANES + 2*NOUT + 7 cycles.
// exp and ln use the shift-plus-polynomial approximations of prnn_pkg (ln error below 1e-3).
//
// Weights: W[c][f] at W_BASE + c*NIN + f, b[c] at W_BASE + NOUT*NIN + c. The layer size and the
// log softmax are the paper's; LANES and the evaluation of log softmax are this design's.
module fc_logsoftmax
  import prnn_pkg::*;
#(
  parameter int NIN    = 96,
  parameter int NOUT   = NCLASS,
  parameter int LANES  = 8,
  parameter int W_BASE = FC_BASE,
  parameter int IAW    = $clog2(NIN),
  parameter int OAW    = $clog2(NOUT)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           wt_we,
  input  waddr_t         wt_addr,
  input  data_t          wt_data,
  input  logic           i_valid,
  output logic           i_release,
  output logic [IAW-1:0] i_addr [LANES],
  input  data_t          i_data [LANES],
  input  logic           o_ready,
  output logic           o_commit,
  output logic           o_we,
  output logic [OAW-1:0] o_addr,
  output data_t          o_data,
  output logic           busy
);
  localparam int CHUNKS = NIN / LANES;
  localparam int NW     = NOUT * NIN;

  data_t w   [NW];
  data_t bia [NOUT];

  always_ff @(posedge clk) begin
    if (wt_we && int'(wt_addr) >= W_BASE && int'(wt_addr) < W_BASE + NW)
      w[int'(wt_addr) - W_BASE] <= wt_data;
    if (wt_we && int'(wt_addr) >= W_BASE + NW && int'(wt_addr) < W_BASE + NW + NOUT)
      bia[int'(wt_addr) - W_BASE - NW] <= wt_data;
  end

  typedef enum logic [2:0] {IDLE, ISSUE, DRAIN, EXPS, LOG, OUT, DONE} state_t;
  state_t state;
  int unsigned c, ch, nres, k;

  data_t z [NOUT];
  data_t zmax;
  logic [31:0] sum;
  logic signed [31:0] lnsum;

  logic           mv, mf, ml;
  data_t          mb [LANES];
  logic [OAW-1:0] mtag, rtag;
  logic           rv;
  acc_t           racc;
  data_t          zr;

  always_comb begin
    mv   = (state == ISSUE);
    mf   = (ch == 0);
    ml   = (ch == CHUNKS-1);
    mtag = OAW'(c);
    for (int l = 0; l < LANES; l++) begin
      i_addr[l] = IAW'(ch * LANES + l);
      mb[l]     = w[c * NIN + ch * LANES + l];
    end
    zr = acc_to_data(racc + (acc_t'(bia[rtag]) <<< FRAC));
  end

  vec_mac #(.LANES(LANES), .TAG_W(OAW)) u_mac (
    .clk, .rst_n, .in_valid(mv), .in_first(mf), .in_last(ml), .in_a(i_data), .in_b(mb),
    .in_tag(mtag), .out_valid(rv), .out_acc(racc), .out_tag(rtag));

  assign o_we     = (state == OUT);
  assign o_addr   = OAW'(k);
  assign o_data   = sat_data(32'(z[k]) - 32'(zmax) - lnsum);
  assign o_commit = (state == DONE);
  assign i_release = o_commit;
  assign busy     = (state != IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE; c <= 0; ch <= 0; nres <= 0; k <= 0;
      zmax <= '0; sum <= '0; lnsum <= '0;
      for (int j = 0; j < NOUT; j++) z[j] <= '0;
    end else begin
      if (rv) begin
        z[rtag] <= zr;
        nres <= nres + 1;
        if (nres == 0 || zr > zmax) zmax <= zr;
      end
      case (state)
        IDLE: if (i_valid && o_ready) begin
          state <= ISSUE; c <= 0; ch <= 0; nres <= 0;
        end
        ISSUE: begin
          if (ch == CHUNKS-1) begin
            ch <= 0;
            if (c == NOUT-1) state <= DRAIN;
            else c <= c + 1;
          end else ch <= ch + 1;
        end
        DRAIN: if (nres == NOUT) begin state <= EXPS; k <= 0; sum <= '0; end
        EXPS: begin
          sum <= sum + 32'(exp_neg(32'(z[k]) - 32'(zmax)));
          if (k == NOUT-1) state <= LOG;
          else k <= k + 1;
        end
        LOG: begin lnsum <= ln_ge1(sum); state <= OUT; k <= 0; end
        OUT: begin
          if (k == NOUT-1) state <= DONE;
          else k <= k + 1;
        end
        DONE: state <= IDLE;
        default: state <= IDLE;
      endcase
    end
  end
endmodule
