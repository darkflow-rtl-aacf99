// tb_l2_event_counter -- random L1 levels over 5-cycle frames; in the last
// cycle of every frame count must equal the frame's sum of levels computed
// here. Also checks that en = 0 freezes the accumulator.
module tb_l2_event_counter;
  logic clk = 0, rst_n = 0, en = 0, frame_start = 0;
  logic [1:0] level [16];
  logic [7:0] count;
  int checks = 0, failures = 0;

  l2_event_counter dut (.*);
  always #1 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sum;
    foreach (level[i]) level[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 2000; f++) begin
      sum = 0;
      for (int p = 0; p < 5; p++) begin
        @(negedge clk);
        en = 1;
        frame_start = (p == 0);
        foreach (level[i]) begin
          level[i] = (f % 3 == 0) ? 2'($urandom) : ((($urandom & 7) == 0) ? 2'($urandom) : 2'd0);
          sum += level[i];
        end
        if (f % 50 == 1) foreach (level[i]) begin sum -= level[i]; level[i] = 3; sum += 3; end
        #0.5;
        checks++;
        if (int'(count) != sum) begin
          failures++;
          if (failures < 10) $display("frame %0d phase %0d count %0d exp %0d", f, p, count, sum);
        end
      end
      // a held cycle between frames: en=0 must not change the accumulator
      if (f % 10 == 0) begin
        @(negedge clk);
        en = 0; frame_start = 0;
        foreach (level[i]) level[i] = 0;
        #0.5;
        checks++;
        if (int'(count) != sum) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
