// tb_input_weighting: loads random W_in and b_in through the parameter bus, offers two random
// X banks (64 x 32) and checks all 512 outputs of each against U[t][n] = W_in X[t] + b_in
// computed exactly here (then rounded), the one-commit/one-release handshake, the wait for a
// free output bank, and the busy time of STEPS*NEURONS*FEAT/LANES cycles (4,096) plus at most
// 8 cycles of pipeline.
module tb_input_weighting;
  import prnn_pkg::*;
  import tb_ref_pkg::*;
  localparam int LANES = 8;
  logic clk = 0, rst_n = 0;
  logic wt_we; waddr_t wt_addr; data_t wt_data;
  logic i_valid, i_release, o_ready, o_commit, o_we, busy;
  logic [10:0] i_addr [LANES];
  data_t i_data [LANES];
  logic [8:0] o_addr;
  data_t o_data;
  int checks = 0, failures = 0, commits = 0, releases = 0, cyc = 0;
  int W [16][64]; int B [16]; int X [2048]; int U [512];

  input_weighting #(.LANES(LANES)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  always_comb for (int l = 0; l < LANES; l++) i_data[l] = data_t'(X[i_addr[l]]);
  always @(posedge clk) if (rst_n) begin
    if (o_we) U[o_addr] = int'(o_data);
    if (o_commit) commits++;
    if (i_release) releases++;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, t1;
    wt_we = 0; wt_addr = 0; wt_data = 0; i_valid = 0; o_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 16; n++) begin
      for (int j = 0; j < 64; j++) begin
        W[n][j] = rnd_w(600);
        @(negedge clk); wt_we = 1; wt_addr = waddr_t'(WIN_BASE + n*64 + j); wt_data = data_t'(W[n][j]);
      end
      B[n] = rnd_w(1000);
      @(negedge clk); wt_we = 1; wt_addr = waddr_t'(BIN_BASE + n); wt_data = data_t'(B[n]);
    end
    @(negedge clk); wt_we = 0;
    for (int u = 0; u < 2; u++) begin
      for (int a = 0; a < 2048; a++) X[a] = (u == 1 && a % 7 == 0) ? 32767 : rnd_w(4096);
      for (int a = 0; a < 512; a++) U[a] = 99999;
      @(negedge clk); i_valid = 1; o_ready = (u == 0);
      if (u == 1) begin
        repeat (20) @(negedge clk);
        checks++;
        if (busy) begin failures++; $display("started without a free output bank"); end
        o_ready = 1;
      end
      t0 = cyc;
      @(posedge clk);
      while (!o_commit) @(posedge clk);
      t1 = cyc;
      @(negedge clk); i_valid = 0; o_ready = 0;
      checks++;
      if (t1 - t0 < 4096 || t1 - t0 > 4096 + 8) begin failures++; $display("busy %0d cycles", t1 - t0); end
      for (int t = 0; t < 32; t++)
        for (int n = 0; n < 16; n++) begin
          longint acc;
          acc = 0;
          for (int j = 0; j < 64; j++) acc += longint'(W[n][j]) * longint'(X[t*64+j]);
          acc += longint'(B[n]) * 4096;
          checks++;
          if (U[t*16+n] != q_round(acc)) begin
            failures++;
            if (failures < 40) $display("U[%0d][%0d]=%0d expected %0d", t, n, U[t*16+n], q_round(acc));
          end
        end
      checks++;
      if (commits != u + 1 || releases != u + 1) begin failures++; $display("handshake counts"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
