// segment_accumulator: transmission-level decision. A transmission is classified from N of
// its 17 two-byte data units by summing their log-probability vectors,
//   log P = sum_{n=1..N} log P_n,
// and choosing the class with the largest sum (N = 1..17; fewer units trade accuracy for
// throughput). The rule is the paper's; doing it in hardware after the Store stage is this
// design's choice.
//
// It watches the result stream (beats with valid and ready both high, class index, value and
// last flag) and adds each value to a 32-bit per-class sum. After the N-th last beat it
// raises dec_valid for one cycle, one cycle later, with dec_class (argmax, lowest index on a
// tie) and dec_score (its sum, 12 fraction bits), and clears the sums. n_seg is sampled at the
// first beat of each transmission; 0 counts as 1, values above MAX_SEG as MAX_SEG.
module segment_accumulator
  import prnn_pkg::*;
#(
  parameter int NOUT    = NCLASS,
  parameter int MAX_SEG = 17,
  parameter int AW      = $clog2(NOUT),
  parameter int SW      = $clog2(MAX_SEG + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [SW-1:0]      n_seg,
  input  logic               beat,
  input  logic [AW-1:0]      beat_class,
  input  data_t              beat_data,
  input  logic               beat_last,
  output logic               dec_valid,
  output logic [AW-1:0]      dec_class,
  output logic signed [31:0] dec_score
);
  logic signed [31:0] sum [NOUT];
  logic [SW-1:0] seg, nsel;
  logic          first_beat, decide;

  logic [AW-1:0]      best;
  logic signed [31:0] best_v;
  always_comb begin
    best = '0;
    best_v = sum[0];
    for (int c = 1; c < NOUT; c++)
      if (sum[c] > best_v) begin best = AW'(c); best_v = sum[c]; end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < NOUT; c++) sum[c] <= '0;
      seg <= '0; nsel <= SW'(1); first_beat <= 1'b1; decide <= 1'b0;
      dec_valid <= 1'b0; dec_class <= '0; dec_score <= '0;
    end else begin
      dec_valid <= 1'b0;
      if (decide) begin
        decide    <= 1'b0;
        dec_valid <= 1'b1;
        dec_class <= best;
        dec_score <= best_v;
        for (int c = 0; c < NOUT; c++) sum[c] <= '0;
      end
      if (beat) begin
        sum[beat_class] <= (decide ? 32'sd0 : sum[beat_class]) + 32'(beat_data);
        if (first_beat) begin
          nsel <= (n_seg == 0) ? SW'(1) : (int'(n_seg) > MAX_SEG ? SW'(MAX_SEG) : n_seg);
          first_beat <= 1'b0;
        end
        if (beat_last) begin
          if (seg + 1'b1 >= (first_beat ? ((n_seg == 0) ? SW'(1) : n_seg) : nsel)) begin
            seg <= '0; decide <= 1'b1; first_beat <= 1'b1;
          end else seg <= seg + 1'b1;
        end
      end
    end
  end
endmodule
