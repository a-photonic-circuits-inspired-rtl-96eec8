// lorentzian: transfer function of the photonic modulator neuron,
//   sigma(x) = x^2 / (x^2 + (B + A*x)^2),  A = 0.25, B = 0.3,
// the experimentally measured Lorentzian the paper uses in its PRNN layer.
//
// Purely combinational. x and y are 16-bit fixed point with 12 fraction bits; y lies in
// [0, 1]. Numerator and denominator are formed exactly with 24 fraction bits and divided
// with an integer divider (quotient truncated). The constants follow the paper; the fixed-
// point format and the exact-division evaluation are this design's choice. The denominator
// never vanishes (its minimum is about 0.085), so no divide-by-zero guard is needed beyond
// the one kept for safety.
module lorentzian
  import prnn_pkg::*;
#(
  parameter int A_Q = 1024,   // 0.25 with 12 fraction bits
  parameter int B_Q = 1229    // 0.30 with 12 fraction bits
) (
  input  data_t x,
  output data_t y
);
  logic signed [47:0] num, lin, den, q;

  always_comb begin
    num = 48'(x) * 48'(x);                                        // 24 fraction bits
    lin = 48'(B_Q) + ((48'(A_Q) * 48'(x)) >>> FRAC);              // 12 fraction bits
    den = num + lin * lin;
    if (den <= 0) q = 0;
    else          q = (num <<< FRAC) / den;                       // 12 fraction bits
    y = (q > 48'(ONE)) ? ONE : data_t'(q);
  end
endmodule
