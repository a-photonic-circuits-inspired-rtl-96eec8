// store_stage: last dataflow stage. Reads the NOUT log-probabilities of one data unit from
// the output bank of the fully connected stage and sends them to the host as a stream of
// NOUT beats (m_class = 0..NOUT-1, m_last on the final beat), valid/ready handshake, one beat
// per cycle while m_ready is high. The bank is released after the last beat, so a host that
// stops reading back-pressures the whole pipeline. The stream format is this design's own;
// the paper only names the Store stage and returns results to the host.
module store_stage
  import prnn_pkg::*;
#(
  parameter int NOUT = NCLASS,
  parameter int AW   = $clog2(NOUT)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          i_valid,
  output logic          i_release,
  output logic [AW-1:0] i_addr,
  input  data_t         i_data,
  output logic          m_valid,
  input  logic          m_ready,
  output data_t         m_data,
  output logic [AW-1:0] m_class,
  output logic          m_last
);
  logic [AW-1:0] k;

  assign m_valid   = i_valid;
  assign i_addr    = k;
  assign m_data    = i_data;
  assign m_class   = k;
  assign m_last    = (k == AW'(NOUT-1));
  assign i_release = m_valid && m_ready && m_last;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) k <= '0;
    else if (m_valid && m_ready) k <= m_last ? '0 : k + 1'b1;
  end

  // once offered, a beat stays valid and unchanged until taken
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           m_valid && !m_ready |=> m_valid && $stable(m_class));
endmodule
