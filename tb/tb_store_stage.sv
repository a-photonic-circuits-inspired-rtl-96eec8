// tb_store_stage: presents two result banks (as a buffer model with one bank of 30 values)
// and reads them out with a host that drops m_ready at random. Checks every beat's class,
// value and last flag, that the bank is released exactly once after the last beat, and that a
// full ready host receives one beat per cycle.
module tb_store_stage;
  import prnn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic i_valid, i_release, m_valid, m_ready, m_last;
  logic [4:0] i_addr, m_class;
  data_t i_data, m_data;
  data_t bank [30];
  int checks = 0, failures = 0, releases = 0, beats = 0, stalls = 0;

  store_stage dut (.*);
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;
  assign i_data = bank[i_addr];

  always @(posedge clk) if (rst_n) begin
    if (i_release) releases++;
    if (m_valid && !m_ready) stalls++;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0;
    i_valid = 0; m_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int u = 0; u < 4; u++) begin
      for (int c = 0; c < 30; c++) bank[c] = data_t'($urandom);
      @(negedge clk); i_valid = 1; t0 = cyc;
      for (int c = 0; c < 30; c++) begin
        m_ready = (u == 0) ? 1'b1 : 1'($urandom_range(1));
        while (!m_ready) begin @(negedge clk); m_ready = 1'($urandom_range(1)); end
        #1;
        checks++;
        if (!m_valid || m_class != 5'(c) || m_data !== bank[c] || m_last != (c == 29)) begin
          failures++; $display("unit %0d beat %0d wrong", u, c);
        end
        @(negedge clk);
      end
      checks++;
      if (u == 0 && (cyc - t0) != 30) begin failures++; $display("rate wrong"); end
      i_valid = 0; m_ready = 0;
      checks++;
      if (releases != u + 1) begin failures++; $display("releases %0d", releases); end
      repeat (2) @(negedge clk);
    end
    checks++;
    if (stalls == 0) begin failures++; $display("host never stalled"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
