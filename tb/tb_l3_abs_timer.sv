// tb_l3_abs_timer -- now must count cycles from 0 after reset; sync must fire
// in the first cycle and then every EPOCH_CYCLES cycles (checked at the
// 5000-cycle default, 10 us); epoch_time must equal now + 1.
module tb_l3_abs_timer;
  logic clk = 0, rst_n = 0;
  logic [29:0] now, epoch_time;
  logic sync;
  int checks = 0, failures = 0, n_sync = 0;

  l3_abs_timer dut (.*);
  always #1 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int t = 0; t < 30000; t++) begin
      @(posedge clk);
      #0.5;
      // t-th cycle after reset release: now reads t, sync when t % 5000 == 4999,
      // and in the very first cycle (now = -1 before the first edge)
      checks++;
      if (int'(now) != t) failures++;
      checks++;
      if (sync != ((t % 5000) == 4999)) begin
        failures++;
        if (failures < 10) $display("t=%0d sync=%0d", t, sync);
      end
      checks++;
      if (epoch_time != now + 1) failures++;
      if (sync) n_sync++;
    end
    checks++;
    if (n_sync != 6) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
