// load_stage: first dataflow stage. Takes one data unit of residual I/Q data from the input
// stream and stores it reshaped from (2 channels, 1024 samples) to (64 features, 32 steps):
//   X[t][j] = I[32t + j]        for j = 0..31
//   X[t][j] = Q[32t + j - 32]   for j = 32..63
// at buffer address t*64 + j. The reshape is the paper's.
//
// Stream: one 16-bit word per beat, I and Q of each sample interleaved (I0, Q0, I1, Q1, ...),
// 2*SAMPLES beats per data unit, valid/ready handshake; s_last must mark the final beat and a
// mismatch is reported on framing_err for one cycle. The stream order and handshake are this
// design's own. s_ready follows the free/full state of the output buffer, so the stage stalls
// the host while both X banks are waiting for the next stage. One beat per cycle.
module load_stage
  import prnn_pkg::*;
#(
  parameter int SAMPLES_P = SAMPLES,
  parameter int FEAT_P    = FEAT,
  parameter int AW        = $clog2(2*SAMPLES_P)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          s_valid,
  output logic          s_ready,
  input  data_t         s_data,
  input  logic          s_last,
  output logic          framing_err,
  // output buffer (producer side)
  input  logic          o_ready,
  output logic          o_commit,
  output logic          o_we,
  output logic [AW-1:0] o_addr,
  output data_t         o_data
);
  localparam int HALF = FEAT_P / 2;          // samples of one channel per step
  logic [AW-1:0] cnt;                        // beat index within the data unit
  logic [AW-2:0] samp;
  logic          chan;
  logic          beat, final_beat;

  assign s_ready    = o_ready;
  assign beat       = s_valid && s_ready;
  assign samp       = cnt[AW-1:1];
  assign chan       = cnt[0];
  assign final_beat = (cnt == AW'(2*SAMPLES_P - 1));

  always_comb begin
    // t = samp / HALF, j = samp % HALF + chan*HALF
    o_addr = AW'((int'(samp) / HALF) * FEAT_P + (int'(samp) % HALF) + (chan ? HALF : 0));
    o_data = s_data;
    o_we   = beat;
    o_commit = beat && final_beat;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0;
      framing_err <= 1'b0;
    end else begin
      framing_err <= beat && (s_last != final_beat);
      if (beat) cnt <= final_beat ? '0 : cnt + 1'b1;
    end
  end
endmodule
