// tb_pingpong_buf: a random producer fills 16-word banks and commits them, a random consumer
// reads each full bank through two read ports and releases it. The testbench keeps its own
// queue of committed banks and checks every word read, that the producer is stalled exactly
// when two banks are waiting, and that the consumer sees no bank when none is committed.
module tb_pingpong_buf;
  import prnn_pkg::*;
  localparam int DEPTH = 16, NRD = 2, AW = 4;
  logic clk = 0, rst_n = 0;
  logic p_ready, p_commit, wr_en, c_valid, c_release;
  logic [AW-1:0] wr_addr, rd_addr [NRD];
  data_t wr_data, rd_data [NRD];
  int checks = 0, failures = 0, stalls = 0, banks_read = 0;

  pingpong_buf #(.DEPTH(DEPTH), .NRD(NRD)) dut (.*);
  always #5 clk = ~clk;

  typedef data_t bank_t [DEPTH];
  bank_t q [$];
  bank_t cur;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // producer
  initial begin
    p_commit = 0; wr_en = 0; wr_addr = 0; wr_data = 0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int b = 0; b < 60; b++) begin
      @(negedge clk);
      while (!p_ready) begin
        checks++; stalls++;
        if (q.size() != 2) begin failures++; $display("stall with %0d banks queued", q.size()); end
        @(negedge clk);
      end
      for (int a = 0; a < DEPTH; a++) begin
        wr_en = 1; wr_addr = AW'(a); wr_data = data_t'($urandom); cur[a] = wr_data;
        @(negedge clk);
      end
      wr_en = 0; p_commit = 1;
      @(posedge clk); q.push_back(cur);
      @(negedge clk); p_commit = 0;
    end
  end

  // consumer
  initial begin
    c_release = 0;
    for (int r = 0; r < NRD; r++) rd_addr[r] = 0;
    repeat (4) @(posedge clk);
    while (banks_read < 60) begin
      @(negedge clk);
      if (c_valid) begin
        bank_t e;
        checks++;
        if (q.size() == 0) begin failures++; $display("bank offered but none committed"); end
        else begin
          e = q[0];
          repeat ($urandom_range(40)) @(negedge clk);    // slow consumer: producer must stall
          for (int a = 0; a < DEPTH; a += NRD) begin
            for (int r = 0; r < NRD; r++) rd_addr[r] = AW'(a + r);
            #1;
            for (int r = 0; r < NRD; r++) begin
              checks++;
              if (rd_data[r] !== e[a+r]) begin
                failures++; $display("bank %0d word %0d: %h vs %h", banks_read, a+r, rd_data[r], e[a+r]);
              end
            end
          end
          @(negedge clk); c_release = 1;
          @(posedge clk); void'(q.pop_front()); banks_read++;
          @(negedge clk); c_release = 0;
        end
      end
    end
    checks++;
    if (stalls == 0) begin failures++; $display("producer never stalled"); end
    $display("stalls=%0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
