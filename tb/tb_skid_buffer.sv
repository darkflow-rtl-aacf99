// tb_skid_buffer -- random valid/ready on both sides; every word must come
// out once, in order, and be held while out_ready is low. With out_ready
// always high the stage must move one word per cycle with 1-cycle latency.
module tb_skid_buffer;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [19:0] in_data = 0, out_data;
  logic [19:0] q [$];
  int checks = 0, failures = 0, sent = 0, got = 0;

  skid_buffer #(.WIDTH(20)) dut (.*);
  always #1 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor
  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) q.push_back(in_data);
    if (out_valid && out_ready) begin
      checks++;
      if (q.size() == 0 || out_data !== q[0]) begin
        failures++;
        if (failures < 10) $display("out %h exp %h", out_data, (q.size() != 0) ? q[0] : 20'h0);
      end
      if (q.size() != 0) void'(q.pop_front());
      got++;
    end
  end

  initial begin
    int t0, n0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 20000; t++) begin
      @(negedge clk);
      if (!(in_valid && !in_ready)) begin   // keep a word steady until taken
        in_valid = ($urandom_range(0, 3) != 0);
        in_data  = 20'($urandom);
      end
      out_ready = ($urandom_range(0, 2) != 0);
    end
    // throughput phase
    @(negedge clk);
    out_ready = 1; in_valid = 0;
    repeat (4) @(negedge clk);
    n0 = got;
    for (int t = 0; t < 100; t++) begin
      in_valid = 1; in_data = 20'(t);
      @(negedge clk);
    end
    in_valid = 0;
    @(negedge clk);
    checks++;
    if (got - n0 != 100) begin
      failures++;
      $display("throughput: %0d words in 101 cycles", got - n0);
    end
    checks++;
    if (q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
