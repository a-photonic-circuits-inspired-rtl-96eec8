// prnn_pkg: shared word formats, parameter address map and fixed-point helpers of the
// PRNN-CNN RF-fingerprinting classifier.
//
// All activations and weights are 16-bit two's-complement numbers with 12 fraction bits
// (range -8 .. +8, LSB 1/4096). Products carry 24 fraction bits and are summed in 40-bit
// accumulators. The network dimensions (64 features x 32 steps, 16 PRNN neurons, two Conv1D
// layers of 16 channels with kernels 5 and 3, a 96->30 fully connected layer, 6,302
// parameters) are the paper's; the number format and the address map are this design's own.
//
// Parameter address map (one 16-bit word per parameter, 13-bit word address):
//   W_in  [n][j]   n*64+j          at    0 (1024 words)   input weights, 16 x 64
//   b_in  [n]                       at 1024 (16)
//   W_rec [n][m]   n*16+m          at 1040 (256)          recurrent weights, 16 x 16
//   b_rec [n]                       at 1296 (16)
//   conv1 [o][i][k] o*80+i*5+k     at 1312 (1280), bias at 2592 (16)
//   conv2 [o][i][k] o*48+i*3+k     at 2608 (768),  bias at 3376 (16)
//   fc    [c][f]   c*96+f          at 3392 (2880), bias at 6272 (30)
package prnn_pkg;

  localparam int DATA_W = 16;
  localparam int FRAC   = 12;
  localparam int ACC_W  = 40;
  localparam int WADDR_W = 13;

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic [WADDR_W-1:0]       waddr_t;

  // network sizes
  localparam int SAMPLES = 1024;  // I/Q samples per data unit
  localparam int STEPS   = 32;    // PRNN time steps
  localparam int FEAT    = 64;    // features per step (32 I + 32 Q)
  localparam int NEURONS = 16;    // PRNN neurons
  localparam int NCLASS  = 30;    // ZigBee devices
  localparam int N_PARAMS = 6302;

  // parameter address map
  localparam int WIN_BASE  = 0;
  localparam int BIN_BASE  = 1024;
  localparam int WREC_BASE = 1040;
  localparam int BREC_BASE = 1296;
  localparam int C1_BASE   = 1312;   // weights, then 16 biases
  localparam int C2_BASE   = 2608;
  localparam int FC_BASE   = 3392;

  localparam data_t ONE     = data_t'(1 <<< FRAC);
  localparam data_t DATA_MAX = data_t'(16'sh7fff);
  localparam data_t DATA_MIN = data_t'(16'sh8000);

  // Round an accumulator with 2*FRAC fraction bits to a data word, saturating.
  function automatic data_t acc_to_data(input acc_t a);
    acc_t r;
    r = (a + acc_t'(1 <<< (FRAC-1))) >>> FRAC;
    if (r > acc_t'(DATA_MAX)) return DATA_MAX;
    if (r < acc_t'(DATA_MIN)) return DATA_MIN;
    return data_t'(r);
  endfunction

  // Saturate a wide value with FRAC fraction bits to a data word.
  function automatic data_t sat_data(input logic signed [31:0] v);
    if (v > 32'(DATA_MAX)) return DATA_MAX;
    if (v < 32'sd0 + 32'(DATA_MIN)) return DATA_MIN;
    return data_t'(v);
  endfunction

  // exp(x) for x <= 0 (FRAC fraction bits in and out). exp(x) = 2^(x*log2 e); the integer part
  // of the exponent becomes a right shift and 2^f, f in [0,1), is a least-squares cubic
  // 1 + 0.6956 f + 0.2271 f^2 + 0.0774 f^3 (exact at f=0 and 1, error about 2.5e-4).
  function automatic logic signed [31:0] exp_neg(input logic signed [31:0] x);
    logic signed [31:0] t, n, f, p;
    if (x > 0) x = 0;
    t = (x * 32'sd5909) >>> FRAC;           // log2(e) = 1.4427 -> 5909
    n = t >>> FRAC;                          // floor, <= 0
    f = t - (n <<< FRAC);                    // 0 .. 4095
    p = 32'sd4096 + ((f * (32'sd2849 + ((f * (32'sd930 + ((32'sd317 * f) >>> FRAC))) >>> FRAC))) >>> FRAC);
    if (-n >= 31) return 0;
    return p >>> (-n);
  endfunction

  // ln(s) for s >= 1 given with FRAC fraction bits, s < 2^31. log2 s = e + log2(1+m) with the
  // leading one at bit FRAC+e and log2(1+m) ~ 1.4385 m - 0.6780 m^2 + 0.3237 m^3 - 0.0842 m^4
  // (least-squares quartic, exact at m=0 and 1, error below 1e-3); ln s = ln2 * log2 s.
  function automatic logic signed [31:0] ln_ge1(input logic [31:0] s);
    int p;
    logic signed [31:0] m, l2;
    p = FRAC;
    for (int i = 0; i < 32; i++) if (s[i]) p = i;
    if (p < FRAC) p = FRAC;
    m = 32'(((64'(s) << FRAC) >> p)) - 32'sd4096;   // mantissa fraction, 0 .. 4095
    l2 = 32'sd1326 + ((m * -32'sd345) >>> FRAC);
    l2 = -32'sd2777 + ((m * l2) >>> FRAC);
    l2 = 32'sd5892 + ((m * l2) >>> FRAC);
    l2 = ((p - FRAC) <<< FRAC) + ((m * l2) >>> FRAC);
    return (l2 * 32'sd2839) >>> FRAC;        // ln 2 = 0.693147 -> 2839
  endfunction

endpackage
