// tb_vec_mac: feeds the MAC engine back-to-back with random dot products of 1 to 6 vectors
// (a new vector every cycle, some idle gaps), computes each expected sum in the testbench and
// checks value, tag and the 3-cycle latency from the last vector to out_valid.
module tb_vec_mac;
  import prnn_pkg::*;
  localparam int LANES = 5;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_first, in_last, out_valid;
  data_t in_a [LANES], in_b [LANES];
  logic [11:0] in_tag, out_tag;
  acc_t out_acc;
  int checks = 0, failures = 0;
  int cyc = 0;

  vec_mac #(.LANES(LANES), .TAG_W(12)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  acc_t exp_q [$];
  int   tag_q [$];
  int   due_q [$];

  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("unexpected output"); end
    else begin
      acc_t e; int t, d;
      e = exp_q.pop_front(); t = tag_q.pop_front(); d = due_q.pop_front();
      if (out_acc !== e || int'(out_tag) != t || cyc != d) begin
        failures++;
        $display("got %0d tag %0d at %0d, expected %0d tag %0d at %0d", out_acc, out_tag, cyc, e, t, d);
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_first = 0; in_last = 0; in_tag = 0;
    for (int l = 0; l < LANES; l++) begin in_a[l] = 0; in_b[l] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int d = 0; d < 300; d++) begin
      int nv; acc_t sum;
      nv = 1 + int'($urandom_range(5));
      sum = 0;
      for (int v = 0; v < nv; v++) begin
        @(negedge clk);
        in_valid = 1; in_first = (v == 0); in_last = (v == nv-1); in_tag = 12'(d);
        for (int l = 0; l < LANES; l++) begin
          in_a[l] = data_t'($urandom); in_b[l] = data_t'($urandom);
          sum += acc_t'(in_a[l]) * acc_t'(in_b[l]);
        end
        if (v == nv-1) begin exp_q.push_back(sum); tag_q.push_back(d); due_q.push_back(cyc + 4); end
      end
      if ($urandom_range(3) == 0) begin @(negedge clk); in_valid = 0; end
    end
    @(negedge clk); in_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d outputs missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
