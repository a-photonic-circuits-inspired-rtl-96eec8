// prnn_cnn_top: the PRNN-CNN RF-fingerprinting classifier as a dataflow pipeline.
//
// A data unit is 1,024 residual I/Q samples (two bytes of a ZigBee transmission). It passes
// through the stages Load (reshape to 64 features x 32 steps), Input Weighting (W_in x + b_in
// for all steps), PRNN (16 Lorentzian neurons, forward-Euler recurrence with alpha = 0.5),
// Convolution 1 (16 ch, kernel 5, ELU, max pool 2), Convolution 2 (16 ch, kernel 3, ELU, max
// pool 2, written in flattened order, which is the Reshape), Fully Connected (96 -> 30, log
// softmax) and Store (stream to the host). Every pair of stages is joined by a two-bank
// pingpong_buf, so every stage can work on a different data unit and a new one can enter every
// "slowest stage" interval (Convolution 1, about 7,200 cycles). A segment_accumulator sums the
// log-probabilities of n_seg data units and reports the winning device.
//
// Timing at the default sizes: 17,497 cycles from the first sample of a data unit to its last
// log-probability, then one data unit every 7,173 cycles while the input keeps up.
//
// Interfaces:
//   wt_*   parameter bus, one 16-bit word per cycle, 6,302 words (address map in prnn_pkg);
//          write parameters while the pipeline is idle.
//   s_*    sample stream in, I0,Q0,I1,Q1,... (2,048 beats per data unit), valid/ready.
//   m_*    log-probability stream out, 30 beats per data unit, valid/ready.
//   dec_*  decision after n_seg data units.
//   busy   per-stage activity (bit 0 input weighting .. bit 4 fully connected).
// Stage sequence and sizes are the paper's; the buffers, stream formats and the parameter
// bus are this design's own.
module prnn_cnn_top
  import prnn_pkg::*;
#(
  parameter int IW_LANES = 8,
  parameter int FC_LANES = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               wt_we,
  input  waddr_t             wt_addr,
  input  data_t              wt_data,
  input  logic               s_valid,
  output logic               s_ready,
  input  data_t              s_data,
  input  logic               s_last,
  output logic               framing_err,
  output logic               m_valid,
  input  logic               m_ready,
  output data_t              m_data,
  output logic [4:0]         m_class,
  output logic               m_last,
  input  logic [4:0]         n_seg,
  output logic               dec_valid,
  output logic [4:0]         dec_class,
  output logic signed [31:0] dec_score,
  output logic [4:0]         busy
);
  localparam int C1_LC = STEPS - 5 + 1;       // 28
  localparam int C1_LP = C1_LC / 2;           // 14
  localparam int C2_LC = C1_LP - 3 + 1;       // 12
  localparam int C2_LP = C2_LC / 2;           // 6
  localparam int FLAT  = NEURONS * C2_LP;     // 96

  // ---------------- X: 64 x 32 reshaped input ----------------
  localparam int XD = STEPS * FEAT, XAW = $clog2(XD);
  logic x_pr, x_pc, x_we, x_cv, x_cr;
  logic [XAW-1:0] x_wa, x_ra [IW_LANES];
  data_t x_wd, x_rd [IW_LANES];

  // ---------------- U: 32 x 16 input drive ----------------
  localparam int UD = STEPS * NEURONS, UAW = $clog2(UD);
  logic u_pr, u_pc, u_we, u_cv, u_cr;
  logic [UAW-1:0] u_wa, u_ra [1];
  data_t u_wd, u_rd [1];

  // ---------------- Y: 16 x 32 PRNN output ----------------
  logic y_pr, y_pc, y_we, y_cv, y_cr;
  logic [UAW-1:0] y_wa, y_ra [5];
  data_t y_wd, y_rd [5];

  // ---------------- C1: 16 x 14 ----------------
  localparam int C1D = NEURONS * C1_LP, C1AW = $clog2(C1D);
  logic c1_pr, c1_pc, c1_we, c1_cv, c1_cr;
  logic [C1AW-1:0] c1_wa, c1_ra [3];
  data_t c1_wd, c1_rd [3];

  // ---------------- C2: 96 flattened ----------------
  localparam int C2AW = $clog2(FLAT);
  logic c2_pr, c2_pc, c2_we, c2_cv, c2_cr;
  logic [C2AW-1:0] c2_wa, c2_ra [FC_LANES];
  data_t c2_wd, c2_rd [FC_LANES];

  // ---------------- L: 30 log-probabilities ----------------
  localparam int LAW = $clog2(NCLASS);
  logic l_pr, l_pc, l_we, l_cv, l_cr;
  logic [LAW-1:0] l_wa, l_ra [1];
  data_t l_wd, l_rd [1];

  load_stage u_load (
    .clk, .rst_n, .s_valid, .s_ready, .s_data, .s_last, .framing_err,
    .o_ready(x_pr), .o_commit(x_pc), .o_we(x_we), .o_addr(x_wa), .o_data(x_wd));

  pingpong_buf #(.DEPTH(XD), .NRD(IW_LANES)) u_bx (
    .clk, .rst_n, .p_ready(x_pr), .p_commit(x_pc), .wr_en(x_we), .wr_addr(x_wa), .wr_data(x_wd),
    .c_valid(x_cv), .c_release(x_cr), .rd_addr(x_ra), .rd_data(x_rd));

  input_weighting #(.LANES(IW_LANES)) u_iw (
    .clk, .rst_n, .wt_we, .wt_addr, .wt_data,
    .i_valid(x_cv), .i_release(x_cr), .i_addr(x_ra), .i_data(x_rd),
    .o_ready(u_pr), .o_commit(u_pc), .o_we(u_we), .o_addr(u_wa), .o_data(u_wd), .busy(busy[0]));

  pingpong_buf #(.DEPTH(UD), .NRD(1)) u_bu (
    .clk, .rst_n, .p_ready(u_pr), .p_commit(u_pc), .wr_en(u_we), .wr_addr(u_wa), .wr_data(u_wd),
    .c_valid(u_cv), .c_release(u_cr), .rd_addr(u_ra), .rd_data(u_rd));

  prnn_layer u_prnn (
    .clk, .rst_n, .wt_we, .wt_addr, .wt_data,
    .i_valid(u_cv), .i_release(u_cr), .i_addr(u_ra[0]), .i_data(u_rd[0]),
    .o_ready(y_pr), .o_commit(y_pc), .o_we(y_we), .o_addr(y_wa), .o_data(y_wd), .busy(busy[1]));

  pingpong_buf #(.DEPTH(UD), .NRD(5)) u_by (
    .clk, .rst_n, .p_ready(y_pr), .p_commit(y_pc), .wr_en(y_we), .wr_addr(y_wa), .wr_data(y_wd),
    .c_valid(y_cv), .c_release(y_cr), .rd_addr(y_ra), .rd_data(y_rd));

  conv1d_pool #(.CIN(NEURONS), .COUT(NEURONS), .LIN(STEPS), .K(5), .POOL(2), .W_BASE(C1_BASE)) u_conv1 (
    .clk, .rst_n, .wt_we, .wt_addr, .wt_data,
    .i_valid(y_cv), .i_release(y_cr), .i_addr(y_ra), .i_data(y_rd),
    .o_ready(c1_pr), .o_commit(c1_pc), .o_we(c1_we), .o_addr(c1_wa), .o_data(c1_wd), .busy(busy[2]));

  pingpong_buf #(.DEPTH(C1D), .NRD(3)) u_bc1 (
    .clk, .rst_n, .p_ready(c1_pr), .p_commit(c1_pc), .wr_en(c1_we), .wr_addr(c1_wa), .wr_data(c1_wd),
    .c_valid(c1_cv), .c_release(c1_cr), .rd_addr(c1_ra), .rd_data(c1_rd));

  conv1d_pool #(.CIN(NEURONS), .COUT(NEURONS), .LIN(C1_LP), .K(3), .POOL(2), .W_BASE(C2_BASE)) u_conv2 (
    .clk, .rst_n, .wt_we, .wt_addr, .wt_data,
    .i_valid(c1_cv), .i_release(c1_cr), .i_addr(c1_ra), .i_data(c1_rd),
    .o_ready(c2_pr), .o_commit(c2_pc), .o_we(c2_we), .o_addr(c2_wa), .o_data(c2_wd), .busy(busy[3]));

  pingpong_buf #(.DEPTH(FLAT), .NRD(FC_LANES)) u_bc2 (
    .clk, .rst_n, .p_ready(c2_pr), .p_commit(c2_pc), .wr_en(c2_we), .wr_addr(c2_wa), .wr_data(c2_wd),
    .c_valid(c2_cv), .c_release(c2_cr), .rd_addr(c2_ra), .rd_data(c2_rd));

  fc_logsoftmax #(.NIN(FLAT), .NOUT(NCLASS), .LANES(FC_LANES), .W_BASE(FC_BASE)) u_fc (
    .clk, .rst_n, .wt_we, .wt_addr, .wt_data,
    .i_valid(c2_cv), .i_release(c2_cr), .i_addr(c2_ra), .i_data(c2_rd),
    .o_ready(l_pr), .o_commit(l_pc), .o_we(l_we), .o_addr(l_wa), .o_data(l_wd), .busy(busy[4]));

  pingpong_buf #(.DEPTH(NCLASS), .NRD(1)) u_bl (
    .clk, .rst_n, .p_ready(l_pr), .p_commit(l_pc), .wr_en(l_we), .wr_addr(l_wa), .wr_data(l_wd),
    .c_valid(l_cv), .c_release(l_cr), .rd_addr(l_ra), .rd_data(l_rd));

  store_stage u_store (
    .clk, .rst_n, .i_valid(l_cv), .i_release(l_cr), .i_addr(l_ra[0]), .i_data(l_rd[0]),
    .m_valid, .m_ready, .m_data, .m_class, .m_last);

  segment_accumulator u_acc (
    .clk, .rst_n, .n_seg, .beat(m_valid && m_ready), .beat_class(m_class), .beat_data(m_data),
    .beat_last(m_last), .dec_valid, .dec_class, .dec_score);
endmodule
