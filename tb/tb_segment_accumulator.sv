// tb_segment_accumulator: sends transmissions of N = 1, 3, 8 and 17 data units (30 random
// log-probabilities each, back to back and with gaps) and checks the decision against the
// argmax of the per-class sums computed here, including a decision that lands in the same
// cycle as the next transmission's first beat.
module tb_segment_accumulator;
  import prnn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [4:0] n_seg, beat_class, dec_class;
  logic beat, beat_last, dec_valid;
  data_t beat_data;
  logic signed [31:0] dec_score;
  int checks = 0, failures = 0, decisions = 0;
  int exp_cls [$];
  int exp_scr [$];

  segment_accumulator dut (.*);
  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n && dec_valid) begin
    checks++; decisions++;
    if (exp_cls.size() == 0) begin failures++; $display("unexpected decision"); end
    else begin
      int c, s;
      c = exp_cls.pop_front(); s = exp_scr.pop_front();
      if (int'(dec_class) != c || dec_score != s) begin
        failures++; $display("decision %0d/%0d expected %0d/%0d", dec_class, dec_score, c, s);
      end
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ns [8] = '{1, 3, 8, 17, 17, 2, 1, 5};
    beat = 0; beat_class = 0; beat_data = 0; beat_last = 0; n_seg = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (ns[x]) begin
      int sum [30];
      int best;
      foreach (sum[c]) sum[c] = 0;
      n_seg = 5'(ns[x]);
      for (int s = 0; s < ns[x]; s++)
        for (int c = 0; c < 30; c++) begin
          @(negedge clk);
          if (x >= 4) while ($urandom_range(2) == 0) begin beat = 0; @(negedge clk); end
          beat = 1; beat_class = 5'(c); beat_last = (c == 29);
          beat_data = data_t'(-int'($urandom_range(40000)) / 2);
          sum[c] += int'(beat_data);
        end
      best = 0;
      for (int c = 1; c < 30; c++) if (sum[c] > sum[best]) best = c;
      exp_cls.push_back(best); exp_scr.push_back(sum[best]);
    end
    @(negedge clk); beat = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (decisions != 8) begin failures++; $display("decisions %0d", decisions); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
