// tb_fc_logsoftmax: loads random FC weights and biases, offers random 96-element inputs and
// checks the 30 outputs against log softmax of the exactly computed (then rounded) logits,
// evaluated in floating point (allowed error 10 LSB, about 0.0025). Also checks that the
// probabilities sum to one within 1%, the busy time 30*96/8 + 2*30 + at most 12 cycles, and
// the one-commit handshake.
module tb_fc_logsoftmax;
  import prnn_pkg::*;
  import tb_ref_pkg::*;
  localparam int LANES = 8;
  logic clk = 0, rst_n = 0;
  logic wt_we; waddr_t wt_addr; data_t wt_data;
  logic i_valid, i_release, o_ready, o_commit, o_we, busy;
  logic [6:0] i_addr [LANES];
  data_t i_data [LANES];
  logic [4:0] o_addr;
  data_t o_data;
  int checks = 0, failures = 0, commits = 0, cyc = 0;
  int W [30][96]; int B [30]; int X [96]; int L [30];

  fc_logsoftmax #(.LANES(LANES)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  always_comb for (int l = 0; l < LANES; l++) i_data[l] = data_t'(X[i_addr[l]]);
  always @(posedge clk) if (rst_n) begin
    if (o_we) L[o_addr] = int'(o_data);
    if (o_commit) commits++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, t1;
    wt_we = 0; wt_addr = 0; wt_data = 0; i_valid = 0; o_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 30; c++) begin
      for (int f = 0; f < 96; f++) begin
        W[c][f] = rnd_w(1600);
        @(negedge clk); wt_we = 1; wt_addr = waddr_t'(FC_BASE + c*96 + f); wt_data = data_t'(W[c][f]);
      end
    end
    for (int c = 0; c < 30; c++) begin
      B[c] = rnd_w(4000);
      @(negedge clk); wt_we = 1; wt_addr = waddr_t'(FC_BASE + 2880 + c); wt_data = data_t'(B[c]);
    end
    @(negedge clk); wt_we = 0;
    for (int r = 0; r < 4; r++) begin
      real z [30]; real zmax, se, psum;
      foreach (X[f]) X[f] = rnd_w(r < 2 ? 4096 : 12000);
      @(negedge clk); i_valid = 1; o_ready = 1; t0 = cyc;
      @(posedge clk);
      while (!o_commit) @(posedge clk);
      t1 = cyc;
      @(negedge clk); i_valid = 0; o_ready = 0;
      checks++;
      if (t1 - t0 < 360 + 60 || t1 - t0 > 360 + 60 + 12) begin failures++; $display("took %0d cycles", t1 - t0); end
      zmax = -1.0e9;
      for (int c = 0; c < 30; c++) begin
        longint acc;
        acc = longint'(B[c]) * 4096;
        for (int f = 0; f < 96; f++) acc += longint'(W[c][f]) * longint'(X[f]);
        z[c] = real'(q_round(acc)) / 4096.0;
        if (z[c] > zmax) zmax = z[c];
      end
      se = 0.0;
      for (int c = 0; c < 30; c++) se += $exp(z[c] - zmax);
      psum = 0.0;
      for (int c = 0; c < 30; c++) begin
        real e, lp;
        lp = z[c] - zmax - $ln(se);
        if (lp < -8.0) lp = -8.0;
        e = real'(L[c]) / 4096.0 - lp;
        psum += $exp(real'(L[c]) / 4096.0);
        checks++;
        if (e > 10.0/4096.0 || e < -10.0/4096.0) begin
          failures++;
          if (failures < 10) $display("run %0d logP[%0d]=%f expected %f", r, c, real'(L[c])/4096.0, lp);
        end
      end
      checks++;
      if (psum < 0.99 || psum > 1.01) begin failures++; $display("probabilities sum to %f", psum); end
    end
    checks++;
    if (commits != 4) begin failures++; $display("commits %0d", commits); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
