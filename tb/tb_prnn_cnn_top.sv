// tb_prnn_cnn_top: end-to-end test of the whole classifier at its full size (no parameter
// overrides). Loads all 6,302 parameters through the parameter bus, streams six random data
// units (two transmissions of N = 3) back to back, and compares the 30 log-probabilities of
// every unit with a floating-point model of the network computed here (allowed error 0.03)
// and each transmission decision with the argmax of the summed reference log-probabilities.
//
// It also makes, counts and checks the design's mechanisms: several data units in flight in
// different stages at once (pipeline overlap), the input stream stalled by a full pipeline,
// the host stalling the result stream, the PRNN waiting on its step-to-step read-after-write
// dependency, and the N-segment decision. It measures the latency of the first unit and the
// steady-state initiation interval (set by Convolution 1: 16*28*16 = 7,168 cycles plus a few).
module tb_prnn_cnn_top;
  import prnn_pkg::*;
  import tb_ref_pkg::*;
  import tb_model_pkg::*;
  localparam int NUNITS = 6, NSEG = 3;
  logic clk = 0, rst_n = 0;
  logic wt_we; waddr_t wt_addr; data_t wt_data;
  logic s_valid, s_ready, s_last, framing_err;
  data_t s_data, m_data;
  logic m_valid, m_ready, m_last, dec_valid;
  logic [4:0] m_class, n_seg, dec_class, busy;
  logic signed [31:0] dec_score;
  int checks = 0, failures = 0, cyc = 0;

  prnn_cnn_top dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  int X [NUNITS][2048];           // reshaped inputs, X[t*64+j]
  data_t S [NUNITS][2048];        // stream words
  real ref_lp [NUNITS][30];
  int got_lp [NUNITS][30];
  int last_at [NUNITS];
  int first_in_at;

  // mechanism counters
  int overlap_cycles = 0, in_stalls = 0, out_stalls = 0, raw_waits = 0, decisions = 0;
  int dec_cls [$];
  always @(posedge clk) if (rst_n) begin
    if ($countones(busy) >= 2) overlap_cycles++;
    if (s_valid && !s_ready) in_stalls++;
    if (m_valid && !m_ready) out_stalls++;
    if (dut.u_prnn.state == dut.u_prnn.WAIT) raw_waits++;
    if (framing_err) begin failures++; $display("framing error"); end
    if (dec_valid) begin decisions++; dec_cls.push_back(int'(dec_class)); end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int addr, input int val);
    @(negedge clk); wt_we = 1; wt_addr = waddr_t'(addr); wt_data = data_t'(val);
  endtask

  // result collector
  initial begin
    int u, c;
    u = 0;
    m_ready = 1;
    while (u < NUNITS) begin
      @(negedge clk);
      m_ready = (u == NUNITS-1) ? 1'($urandom_range(1)) : 1'b1;   // host stalls on the last unit
      @(posedge clk);
      if (m_valid && m_ready) begin
        got_lp[u][m_class] = int'(m_data);
        if (m_last) begin last_at[u] = cyc; u++; end
      end
    end
  end

  initial begin
    wt_we = 0; wt_addr = 0; wt_data = 0; s_valid = 0; s_data = 0; s_last = 0; n_seg = 5'(NSEG);
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- parameters ----
    gen_params();
    for (int a = 0; a < N_PARAMS; a++) wr(a, param_word(a));
    @(negedge clk); wt_we = 0;
    // ---- data units: I/Q samples, reshaped copy kept for the model ----
    for (int u = 0; u < NUNITS; u++)
      for (int i = 0; i < 1024; i++) begin
        int iv, qv;
        iv = rnd_w(4096); qv = rnd_w(4096);
        S[u][2*i] = data_t'(iv); S[u][2*i+1] = data_t'(qv);
        X[u][(i/32)*64 + i%32] = iv;
        X[u][(i/32)*64 + 32 + i%32] = qv;
      end
    // ---- stream them in, as fast as the pipeline accepts ----
    first_in_at = cyc + 1;
    for (int u = 0; u < NUNITS; u++)
      for (int k = 0; k < 2048; k++) begin
        @(negedge clk);
        s_valid = 1; s_data = S[u][k]; s_last = (k == 2047);
        @(posedge clk);
        while (!s_ready) @(posedge clk);
      end
    @(negedge clk); s_valid = 0; s_last = 0;
    // ---- wait for all results ----
    while (last_at[NUNITS-1] == 0) @(posedge clk);
    repeat (5) @(posedge clk);
    // ---- compare ----
    for (int u = 0; u < NUNITS; u++) begin
      model(X[u], ref_lp[u]);
      for (int c = 0; c < 30; c++) begin
        real e;
        e = real'(got_lp[u][c]) / 4096.0 - ref_lp[u][c];
        checks++;
        if (e > 0.03 || e < -0.03) begin
          failures++;
          if (failures < 10) $display("unit %0d logP[%0d] = %f, model %f", u, c, real'(got_lp[u][c])/4096.0, ref_lp[u][c]);
        end
      end
    end
    for (int x = 0; x < NUNITS / NSEG; x++) begin
      real sum [30]; int best, second;
      for (int c = 0; c < 30; c++) begin
        sum[c] = 0.0;
        for (int u = x*NSEG; u < (x+1)*NSEG; u++) sum[c] += ref_lp[u][c];
      end
      best = 0;
      for (int c = 1; c < 30; c++) if (sum[c] > sum[best]) best = c;
      second = (best == 0) ? 1 : 0;
      for (int c = 0; c < 30; c++) if (c != best && sum[c] > sum[second]) second = c;
      checks++;
      if (x >= dec_cls.size()) begin failures++; $display("decision %0d missing", x); end
      else if (dec_cls[x] != best && sum[best] - sum[second] > 0.05) begin
        failures++; $display("decision %0d: class %0d, model %0d", x, dec_cls[x], best);
      end
    end
    // ---- timing ----
    $display("latency of first unit: %0d cycles", last_at[0] - first_in_at);
    for (int u = 1; u < NUNITS; u++) $display("interval %0d: %0d cycles", u, last_at[u] - last_at[u-1]);
    checks++;
    if (last_at[0] - first_in_at < 17000 || last_at[0] - first_in_at > 18500) begin
      failures++; $display("latency out of range");
    end
    for (int u = 2; u < NUNITS - 1; u++) begin
      checks++;
      if (last_at[u] - last_at[u-1] < 7168 || last_at[u] - last_at[u-1] > 7168 + 40) begin
        failures++; $display("initiation interval out of range");
      end
    end
    // ---- mechanisms ----
    $display("overlap cycles %0d, input stalls %0d, output stalls %0d, PRNN RAW waits %0d, decisions %0d",
             overlap_cycles, in_stalls, out_stalls, raw_waits, decisions);
    checks += 5;
    if (overlap_cycles == 0) begin failures++; $display("no pipeline overlap"); end
    if (in_stalls == 0)      begin failures++; $display("input never stalled"); end
    if (out_stalls == 0)     begin failures++; $display("host never stalled"); end
    if (raw_waits == 0)      begin failures++; $display("PRNN never waited"); end
    if (decisions != NUNITS / NSEG) begin failures++; $display("decisions %0d", decisions); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
