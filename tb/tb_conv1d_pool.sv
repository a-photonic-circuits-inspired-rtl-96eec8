// tb_conv1d_pool: runs both convolution stages of the classifier, conv1 (16 ch, 32 long,
// kernel 5) and conv2 (16 ch, 14 long, kernel 3), on random inputs and weights loaded through
// the parameter bus, and checks every pooled output against Conv1D + bias computed exactly
// here, ELU in floating point and max pooling by 2 (allowed error 6 LSB). conv2's output is
// checked at the flattened address c*6+l. Also checks the busy time COUT*LC*CIN (+ at most 8)
// and the one-commit handshake.
module tb_conv1d_pool;
  import prnn_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic wt_we; waddr_t wt_addr; data_t wt_data;
  int checks = 0, failures = 0, cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  // conv1
  logic a_iv, a_rel, a_or, a_com, a_we, a_busy;
  logic [8:0] a_ia [5]; data_t a_id [5];
  logic [7:0] a_oa; data_t a_od;
  int A_in [512]; int A_out [224];
  conv1d_pool #(.CIN(16), .COUT(16), .LIN(32), .K(5), .POOL(2), .W_BASE(C1_BASE)) dut1 (
    .clk, .rst_n, .wt_we, .wt_addr, .wt_data, .i_valid(a_iv), .i_release(a_rel), .i_addr(a_ia),
    .i_data(a_id), .o_ready(a_or), .o_commit(a_com), .o_we(a_we), .o_addr(a_oa), .o_data(a_od), .busy(a_busy));
  always_comb for (int k = 0; k < 5; k++) a_id[k] = data_t'(A_in[a_ia[k]]);
  always @(posedge clk) if (a_we) A_out[a_oa] = int'(a_od);

  // conv2
  logic b_iv, b_rel, b_or, b_com, b_we, b_busy;
  logic [7:0] b_ia [3]; data_t b_id [3];
  logic [6:0] b_oa; data_t b_od;
  int B_in [224]; int B_out [96];
  conv1d_pool #(.CIN(16), .COUT(16), .LIN(14), .K(3), .POOL(2), .W_BASE(C2_BASE)) dut2 (
    .clk, .rst_n, .wt_we, .wt_addr, .wt_data, .i_valid(b_iv), .i_release(b_rel), .i_addr(b_ia),
    .i_data(b_id), .o_ready(b_or), .o_commit(b_com), .o_we(b_we), .o_addr(b_oa), .o_data(b_od), .busy(b_busy));
  always_comb for (int k = 0; k < 3; k++) b_id[k] = data_t'(B_in[b_ia[k]]);
  always @(posedge clk) if (b_we) B_out[b_oa] = int'(b_od);

  int W1 [16][16][5]; int Bi1 [16];
  int W2 [16][16][3]; int Bi2 [16];

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int addr, input int val);
    @(negedge clk); wt_we = 1; wt_addr = waddr_t'(addr); wt_data = data_t'(val);
  endtask

  // reference check of one layer
  task automatic check_layer(input int which, input int K, input int LIN);
    int LC, LP;
    LC = LIN - K + 1; LP = LC / 2;
    for (int o = 0; o < 16; o++)
      for (int p = 0; p < LP; p++) begin
        real best, e; int got;
        best = -1.0e9;
        for (int x = 2*p; x < 2*p + 2; x++) begin
          longint acc; real v;
          acc = 0;
          for (int i = 0; i < 16; i++)
            for (int k = 0; k < K; k++)
              acc += (which == 1) ? longint'(W1[o][i][k]) * longint'(A_in[i*LIN + x + k])
                                  : longint'(W2[o][i][k]) * longint'(B_in[i*LIN + x + k]);
          acc += longint'((which == 1) ? Bi1[o] : Bi2[o]) * 4096;
          v = elu_r(real'(q_round(acc)) / 4096.0);
          if (v > best) best = v;
        end
        got = (which == 1) ? A_out[o*LP + p] : B_out[o*LP + p];
        e = real'(got) / 4096.0 - best;
        checks++;
        if (e > 6.0/4096.0 || e < -6.0/4096.0) begin
          failures++;
          if (failures < 10) $display("conv%0d out[%0d][%0d]=%f expected %f", which, o, p, real'(got)/4096.0, best);
        end
      end
  endtask

  initial begin
    int t0, t1, t2;
    wt_we = 0; wt_addr = 0; wt_data = 0;
    a_iv = 0; a_or = 0; b_iv = 0; b_or = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int o = 0; o < 16; o++) for (int i = 0; i < 16; i++) for (int k = 0; k < 5; k++) begin
      W1[o][i][k] = rnd_w(1500); wr(C1_BASE + (o*16 + i)*5 + k, W1[o][i][k]);
    end
    for (int o = 0; o < 16; o++) begin Bi1[o] = rnd_w(2000); wr(C1_BASE + 1280 + o, Bi1[o]); end
    for (int o = 0; o < 16; o++) for (int i = 0; i < 16; i++) for (int k = 0; k < 3; k++) begin
      W2[o][i][k] = rnd_w(1500); wr(C2_BASE + (o*16 + i)*3 + k, W2[o][i][k]);
    end
    for (int o = 0; o < 16; o++) begin Bi2[o] = rnd_w(2000); wr(C2_BASE + 768 + o, Bi2[o]); end
    @(negedge clk); wt_we = 0;
    for (int r = 0; r < 2; r++) begin
      foreach (A_in[a]) A_in[a] = int'($urandom_range(4096));      // PRNN outputs lie in [0,1]
      foreach (B_in[a]) B_in[a] = rnd_w(4096);
      @(negedge clk); a_iv = 1; a_or = 1; b_iv = 1; b_or = 1; t0 = cyc; t1 = 0; t2 = 0;
      while (t1 == 0 || t2 == 0) begin
        @(posedge clk);
        if (a_com && t1 == 0) begin t1 = cyc; a_iv = 0; a_or = 0; end
        if (b_com && t2 == 0) begin t2 = cyc; b_iv = 0; b_or = 0; end
      end
      @(negedge clk); a_iv = 0; a_or = 0; b_iv = 0; b_or = 0;
      checks += 2;
      if (t1 - t0 < 16*28*16 || t1 - t0 > 16*28*16 + 8) begin failures++; $display("conv1 %0d cycles", t1 - t0); end
      if (t2 - t0 < 16*12*16 || t2 - t0 > 16*12*16 + 8) begin failures++; $display("conv2 %0d cycles", t2 - t0); end
      check_layer(1, 5, 32);
      check_layer(2, 3, 14);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
