// tb_prnn_layer: loads random W_rec and b_rec, offers two random U banks (32 steps x 16
// neurons) and checks the 16 x 32 output sequence against a reference recurrence computed
// here: s(0)=0, f = round(W_rec sigma(s) + U + b_rec), s <- s - s/2 + f/2 (alpha = 0.5),
// y = sigma(s), with sigma evaluated in floating point. Allowed error 24 LSB (0.006) per
// output, which covers the 3-LSB sigma rounding carried through the recurrence. Also checks
// the time per step (16 issue cycles plus pipeline, at most 21) and the bank handshake.
module tb_prnn_layer;
  import prnn_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic wt_we; waddr_t wt_addr; data_t wt_data;
  logic i_valid, i_release, o_ready, o_commit, o_we, busy;
  logic [8:0] i_addr, o_addr;
  data_t i_data, o_data;
  int checks = 0, failures = 0, commits = 0, cyc = 0;
  int W [16][16]; int B [16]; int U [512]; int Y [512];
  real maxerr = 0.0;

  prnn_layer dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  assign i_data = data_t'(U[i_addr]);
  always @(posedge clk) if (rst_n) begin
    if (o_we) Y[o_addr] = int'(o_data);
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
    real s [16], y [16], yn [16];
    wt_we = 0; wt_addr = 0; wt_data = 0; i_valid = 0; o_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 16; n++) begin
      for (int m = 0; m < 16; m++) begin
        W[n][m] = rnd_w(2500);
        @(negedge clk); wt_we = 1; wt_addr = waddr_t'(WREC_BASE + n*16 + m); wt_data = data_t'(W[n][m]);
      end
      B[n] = rnd_w(1500);
      @(negedge clk); wt_we = 1; wt_addr = waddr_t'(BREC_BASE + n); wt_data = data_t'(B[n]);
    end
    @(negedge clk); wt_we = 0;
    for (int u = 0; u < 2; u++) begin
      for (int a = 0; a < 512; a++) U[a] = rnd_w(u == 0 ? 6000 : 12000);
      @(negedge clk); i_valid = 1; o_ready = 1; t0 = cyc;
      @(posedge clk);
      while (!o_commit) @(posedge clk);
      t1 = cyc;
      @(negedge clk); i_valid = 0; o_ready = 0;
      checks++;
      if (t1 - t0 > 32 * 21 + 4 || t1 - t0 < 32 * 16) begin failures++; $display("took %0d cycles", t1 - t0); end
      // reference (state kept as integers with 12 fraction bits, as the hardware rounds)
      for (int n = 0; n < 16; n++) begin s[n] = 0.0; y[n] = 0.0; end
      for (int t = 0; t < 32; t++) begin
        for (int n = 0; n < 16; n++) begin
          real acc; int f, si, sn;
          acc = 0.0;
          for (int m = 0; m < 16; m++) acc += real'(W[n][m]) * y[m];      // y in units of 1/4096
          f = q_round(longint'($floor(acc + 0.5)) + longint'(U[t*16+n] + B[n]) * 4096);
          si = int'(s[n]);
          sn = sat16(longint'(si - (si >>> 1) + (f >>> 1)));
          s[n] = real'(sn);
          yn[n] = sigma_r(real'(sn) / 4096.0) * 4096.0;
        end
        for (int n = 0; n < 16; n++) begin
          real e;
          y[n] = yn[n];
          e = (real'(Y[n*32+t]) - y[n]) / 4096.0;
          if (e < 0) e = -e;
          if (e > maxerr) maxerr = e;
          checks++;
          if (e > 24.0/4096.0) begin
            failures++;
            if (failures < 10) $display("u%0d y[%0d](t=%0d)=%0d expected %f", u, n, t, Y[n*32+t], y[n]);
          end
        end
      end
    end
    checks++;
    if (commits != 2) begin failures++; $display("commits %0d", commits); end
    $display("max error %f", maxerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
