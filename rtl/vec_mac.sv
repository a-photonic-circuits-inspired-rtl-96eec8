// vec_mac: pipelined vector/vector multiply-accumulate engine shared by every compute stage.
//
// Each cycle it can take one pair of LANES-element vectors (the "vector/vector multiply" of
// the design hierarchy) and multiplies the lanes in parallel (the individual MACs). A dot
// product longer than LANES is fed as consecutive vectors marked in_first ... in_last; the
// running sum is kept in one accumulator, so back-to-back vectors are accepted with an
// initiation interval of one cycle. When the vector marked in_last leaves the pipeline the
// finished 40-bit sum (24 fraction bits) appears on out_acc with out_valid for one cycle,
// together with the in_tag that entered with it.
//
// Timing: 3 cycles from in_valid to out_valid (register products, adder tree, accumulate).
// The lane parallelism and pipelining follow the paper's three-level hierarchy; the latency
// and the first/last protocol are this design's own.
module vec_mac
  import prnn_pkg::*;
#(
  parameter int LANES = 5,
  parameter int TAG_W = 12
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic               in_first,
  input  logic               in_last,
  input  data_t              in_a [LANES],
  input  data_t              in_b [LANES],
  input  logic [TAG_W-1:0]   in_tag,
  output logic               out_valid,
  output acc_t               out_acc,
  output logic [TAG_W-1:0]   out_tag
);
  // stage 1: products
  logic              v1, f1, l1;
  logic [TAG_W-1:0]  t1;
  logic signed [2*DATA_W-1:0] prod [LANES];
  // stage 2: lane sum
  logic              v2, f2, l2;
  logic [TAG_W-1:0]  t2;
  acc_t              sum2;
  // stage 3: accumulator
  acc_t              acc;

  acc_t lane_sum;
  always_comb begin
    lane_sum = '0;
    for (int i = 0; i < LANES; i++) lane_sum += acc_t'(prod[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; out_valid <= 1'b0;
      f1 <= 1'b0; l1 <= 1'b0; f2 <= 1'b0; l2 <= 1'b0;
      t1 <= '0; t2 <= '0; out_tag <= '0;
      sum2 <= '0; acc <= '0; out_acc <= '0;
      for (int i = 0; i < LANES; i++) prod[i] <= '0;
    end else begin
      v1 <= in_valid; f1 <= in_first; l1 <= in_last; t1 <= in_tag;
      for (int i = 0; i < LANES; i++) prod[i] <= in_a[i] * in_b[i];
      v2 <= v1; f2 <= f1; l2 <= l1; t2 <= t1;
      sum2 <= lane_sum;
      out_valid <= v2 && l2;
      if (v2) begin
        acc <= f2 ? sum2 : acc + sum2;
        if (l2) begin
          out_acc <= f2 ? sum2 : acc + sum2;
          out_tag <= t2;
        end
      end
    end
  end
endmodule
