// tb_l2_fine_timer -- the fine timer must read the number of 2 ns cycles since
// the cycle after the last sync, restart at 0 after each sync, and saturate
// at 2^15-1 without a sync.
module tb_l2_fine_timer;
  logic clk = 0, rst_n = 0, sync = 0;
  logic [14:0] offset;
  int checks = 0, failures = 0;
  int ref_cnt;

  l2_fine_timer dut (.*);
  always #1 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    ref_cnt = 0;
    for (int t = 0; t < 40000; t++) begin
      checks++;
      if (int'(offset) != ref_cnt) begin
        failures++;
        if (failures < 10) $display("t=%0d offset %0d exp %0d", t, offset, ref_cnt);
      end
      sync = (t < 3000) ? ($urandom_range(0, 99) == 0) : 1'b0;
      @(posedge clk);
      ref_cnt = sync ? 0 : ((ref_cnt < 32767) ? ref_cnt + 1 : 32767);
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
