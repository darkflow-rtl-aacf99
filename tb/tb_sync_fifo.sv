// tb_sync_fifo -- random push/pop against a queue model at the L2 FIFO size
// (16 x 16): data order, fill level, full/empty flags, and filling to 16.
module tb_sync_fifo;
  logic clk = 0, rst_n = 0, push = 0, pop = 0;
  logic [15:0] din, dout;
  logic empty, full;
  logic [4:0] level;
  logic [15:0] q [$];
  int checks = 0, failures = 0, saw_full = 0;

  sync_fifo #(.WIDTH(16), .DEPTH(16)) dut (.*);
  always #1 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 20000; t++) begin
      int bias;
      @(negedge clk);
      checks++;
      if (int'(level) != q.size() || empty != (q.size() == 0) || full != (q.size() == 16)) begin
        failures++;
        if (failures < 10) $display("t=%0d level %0d exp %0d", t, level, q.size());
      end
      if (q.size() != 0) begin
        checks++;
        if (dout !== q[0]) failures++;
      end
      if (full) saw_full++;
      bias = ((t / 500) % 2 == 0) ? 70 : 30;
      push = ($urandom_range(0, 99) < bias) && !full;
      pop  = ($urandom_range(0, 99) < 100 - bias) && !empty;
      din  = 16'($urandom);
      @(posedge clk);
      if (pop)  void'(q.pop_front());
      if (push) q.push_back(din);
    end
    checks++;
    if (saw_full == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
