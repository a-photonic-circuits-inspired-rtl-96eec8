// tb_load_stage: streams three data units of random I/Q words (with random valid gaps) into
// the load stage and a behavioural capture of its buffer port, and checks every stored word
// against the reshape X[t][j] = I[32t+j], X[t][32+j] = Q[32t+j] computed here, the commit on
// the last beat, the one-beat-per-cycle rate, the stall while the output is not ready, and the
// framing error flag for a misplaced s_last.
module tb_load_stage;
  import prnn_pkg::*;
  localparam int AW = 11;
  logic clk = 0, rst_n = 0;
  logic s_valid, s_ready, s_last, framing_err, o_ready, o_commit, o_we;
  data_t s_data, o_data;
  logic [AW-1:0] o_addr;
  int checks = 0, failures = 0, commits = 0, ferr = 0;
  data_t mem [2048];
  data_t ii [1024], qq [1024];

  load_stage dut (.*);
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc++;

  always @(posedge clk) if (rst_n) begin
    if (o_we) mem[o_addr] <= o_data;
    if (o_commit) commits++;
    if (framing_err) ferr++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send_unit(input bit bad_last, input bit gaps);
    for (int i = 0; i < 1024; i++) begin ii[i] = data_t'($urandom); qq[i] = data_t'($urandom); end
    for (int k = 0; k < 2048; k++) begin
      @(negedge clk);
      while (gaps && $urandom_range(3) == 0) begin s_valid = 0; @(negedge clk); end
      s_valid = 1; s_data = k[0] ? qq[k/2] : ii[k/2];
      s_last = bad_last ? (k == 2046) : (k == 2047);
      @(posedge clk);
      while (!s_ready) @(posedge clk);
    end
    @(negedge clk); s_valid = 0; s_last = 0;
  endtask

  initial begin
    int c0, t0;
    s_valid = 0; s_data = 0; s_last = 0; o_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int u = 0; u < 3; u++) begin
      c0 = commits; t0 = cyc;
      send_unit(0, u == 1);
      @(posedge clk);
      checks++;
      if (commits != c0 + 1) begin failures++; $display("unit %0d: no commit", u); end
      if (u == 0) begin
        checks++;   // 2048 beats without gaps take 2048 cycles
        if ((cyc - t0) > 2051) begin failures++; $display("too slow: %0d cycles", cyc - t0); end
      end
      for (int t = 0; t < 32; t++)
        for (int j = 0; j < 64; j++) begin
          checks++;
          if (mem[t*64+j] !== (j < 32 ? ii[32*t+j] : qq[32*t+j-32])) begin
            failures++;
            if (failures < 10) $display("unit %0d X[%0d][%0d] wrong", u, t, j);
          end
        end
    end
    checks++;
    if (ferr != 0) begin failures++; $display("spurious framing error"); end
    // output not ready: no beat may be accepted
    o_ready = 0; @(negedge clk); s_valid = 1; #1;
    checks++;
    if (s_ready) begin failures++; $display("accepts while output full"); end
    @(negedge clk); s_valid = 0; o_ready = 1;
    send_unit(1, 0);
    repeat (2) @(posedge clk);
    checks++;
    if (ferr != 2) begin failures++; $display("framing errors %0d, expected 2", ferr); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
