// tb_transmission_workload: the paper's evaluation workload at full size: whole
// transmissions of 17 data units (34 bytes of residual data) classified from all 17 units,
// followed by transmissions classified from their first 8 units only, the accuracy/throughput
// trade-off point the paper discusses. The testbench streams 17 + 8 + 8 data units with
// n_seg = 17, then 8, compares every log-probability with the floating-point model in
// tb_model_pkg (tolerance 0.03) and every decision with the model's argmax, and checks that a
// decision over 8 units arrives in 8/17 of the time of one over 17 units (more than twice the
// transmission rate), both at the pipeline's steady interval of about 7,173 cycles per unit.
module tb_transmission_workload;
  import prnn_pkg::*;
  import tb_ref_pkg::*;
  import tb_model_pkg::*;
  localparam int NUNITS = 33;
  logic clk = 0, rst_n = 0;
  logic wt_we; waddr_t wt_addr; data_t wt_data;
  logic s_valid, s_ready, s_last, framing_err;
  data_t s_data, m_data;
  logic m_valid, m_ready, m_last, dec_valid;
  logic [4:0] m_class, n_seg, dec_class, busy;
  logic signed [31:0] dec_score;
  int checks = 0, failures = 0, cyc = 0;
  int seg_of [NUNITS];            // transmission index of each unit
  int tx_len [3] = '{17, 8, 8};

  prnn_cnn_top dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  int X [NUNITS][2048];
  data_t S [NUNITS][2048];
  real ref_lp [NUNITS][30];
  int got_lp [NUNITS][30];
  int units_out = 0;
  int dec_cls [$];
  int dec_at [$];
  real maxerr = 0.0;

  always @(posedge clk) if (rst_n) begin
    if (framing_err) begin failures++; $display("framing error"); end
    if (dec_valid) begin dec_cls.push_back(int'(dec_class)); dec_at.push_back(cyc); end
    if (m_valid && m_ready) begin
      got_lp[units_out][m_class] = int'(m_data);
      if (m_last) units_out++;
    end
  end
  // the decision length for the next transmission is set once the current one is out
  always @(negedge clk) n_seg <= (units_out >= 17) ? 5'd8 : 5'd17;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    m_ready = 1;
    wt_we = 0; wt_addr = 0; wt_data = 0; s_valid = 0; s_data = 0; s_last = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    gen_params();
    for (int a = 0; a < N_PARAMS; a++) begin
      @(negedge clk); wt_we = 1; wt_addr = waddr_t'(a); wt_data = data_t'(param_word(a));
    end
    @(negedge clk); wt_we = 0;
    for (int u = 0; u < NUNITS; u++)
      for (int i = 0; i < 1024; i++) begin
        int iv, qv;
        iv = rnd_w(4096); qv = rnd_w(4096);
        S[u][2*i] = data_t'(iv); S[u][2*i+1] = data_t'(qv);
        X[u][(i/32)*64 + i%32] = iv;
        X[u][(i/32)*64 + 32 + i%32] = qv;
      end
    for (int u = 0; u < NUNITS; u++)
      for (int k = 0; k < 2048; k++) begin
        @(negedge clk);
        s_valid = 1; s_data = S[u][k]; s_last = (k == 2047);
        @(posedge clk);
        while (!s_ready) @(posedge clk);
      end
    @(negedge clk); s_valid = 0; s_last = 0;
    while (units_out < NUNITS) @(posedge clk);
    repeat (5) @(posedge clk);
    // per-unit comparison
    for (int u = 0; u < NUNITS; u++) begin
      model(X[u], ref_lp[u]);
      for (int c = 0; c < 30; c++) begin
        real e;
        e = real'(got_lp[u][c]) / 4096.0 - ref_lp[u][c];
        if (e < 0) e = -e;
        if (e > maxerr) maxerr = e;
        checks++;
        if (e > 0.03) begin
          failures++;
          if (failures < 10) $display("unit %0d logP[%0d] = %f, model %f", u, c, real'(got_lp[u][c])/4096.0, ref_lp[u][c]);
        end
      end
    end
    // decisions
    checks++;
    if (dec_cls.size() != 3) begin failures++; $display("%0d decisions, expected 3", dec_cls.size()); end
    else begin
      int first;
      first = 0;
      for (int x = 0; x < 3; x++) begin
        real sum [30]; int best, second;
        for (int c = 0; c < 30; c++) begin
          sum[c] = 0.0;
          for (int u = first; u < first + tx_len[x]; u++) sum[c] += ref_lp[u][c];
        end
        best = 0;
        for (int c = 1; c < 30; c++) if (sum[c] > sum[best]) best = c;
        second = (best == 0) ? 1 : 0;
        for (int c = 0; c < 30; c++) if (c != best && sum[c] > sum[second]) second = c;
        checks++;
        if (dec_cls[x] != best && sum[best] - sum[second] > 0.1) begin
          failures++; $display("transmission %0d (N=%0d): class %0d, model %0d", x, tx_len[x], dec_cls[x], best);
        end
        $display("transmission %0d: N=%0d, class %0d (model %0d, margin %f)", x, tx_len[x], dec_cls[x], best, sum[best]-sum[second]);
        first += tx_len[x];
      end
      // rate: the third transmission (8 units) against the steady 17-unit rate
      $display("N=8 decision interval %0d cycles", dec_at[2] - dec_at[1]);
      checks++;
      if (dec_at[2] - dec_at[1] > 8 * 7173 + 100 || dec_at[2] - dec_at[1] < 8 * 7168) begin
        failures++; $display("N=8 transmission interval out of range");
      end
      checks++;
      if (2 * (dec_at[2] - dec_at[1]) * 17 > 17 * 17 * 7200) begin failures++; $display("no doubling of rate"); end
    end
    $display("max log-probability error %f", maxerr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
