// pingpong_buf: double-buffered array channel between two dataflow stages.
//
// The producer stage fills one bank while the consumer stage reads the other, so consecutive
// data units (independent classifications) overlap in the pipeline. The producer may start a
// bank when p_ready is high, writes it through wr_en/wr_addr/wr_data (one word per cycle), and
// pulses p_commit when the bank is complete; the bank then becomes full and the producer side
// moves to the other bank. The consumer starts when c_valid is high, reads the full bank
// through NRD combinational read ports, and pulses c_release to free it. When both banks are
// full the producer stalls (p_ready low); when both are empty the consumer waits.
//
// Words written are visible to reads of the same bank one cycle later. The two-bank channel
// is this design's reading of the paper's "HLS Dataflow pipeline" between layers.
module pingpong_buf
  import prnn_pkg::*;
#(
  parameter int DEPTH = 2048,
  parameter int NRD   = 1,
  parameter int AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  // producer
  output logic          p_ready,
  input  logic          p_commit,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  data_t         wr_data,
  // consumer
  output logic          c_valid,
  input  logic          c_release,
  input  logic [AW-1:0] rd_addr [NRD],
  output data_t         rd_data [NRD]
);
  data_t mem [2][DEPTH];
  logic [1:0] full;
  logic       wsel, rsel;

  assign p_ready = !full[wsel];
  assign c_valid = full[rsel];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wsel][wr_addr] <= wr_data;
  end

  always_comb begin
    for (int r = 0; r < NRD; r++) rd_data[r] = mem[rsel][rd_addr[r]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= 2'b00; wsel <= 1'b0; rsel <= 1'b0;
    end else begin
      if (p_commit && p_ready) begin
        full[wsel] <= 1'b1;
        wsel <= ~wsel;
      end
      if (c_release && c_valid) begin
        full[rsel] <= 1'b0;
        rsel <= ~rsel;
      end
    end
  end

  // A commit or release is only legal while the matching side holds a bank.
  a_commit:  assert property (@(posedge clk) disable iff (!rst_n) p_commit |-> p_ready);
  a_release: assert property (@(posedge clk) disable iff (!rst_n) c_release |-> c_valid);
  a_write:   assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> p_ready);
endmodule
