// elu: exponential linear unit with alpha = 1, the activation after both Conv1D layers:
//   ELU(x) = x for x > 0, exp(x) - 1 otherwise.
//
// Combinational, 16-bit fixed point with 12 fraction bits in and out. exp(x) for x <= 0 is
// prnn_pkg::exp_neg, a shift plus a cubic fit of 2^f (error about 2.5e-4). The function and
// alpha are the paper's; the exp approximation is this design's own.
module elu
  import prnn_pkg::*;
(
  input  data_t x,
  output data_t y
);
  always_comb begin
    if (x > 0) y = x;
    else       y = data_t'(exp_neg(32'(x)) - 32'(ONE));
  end
endmodule
