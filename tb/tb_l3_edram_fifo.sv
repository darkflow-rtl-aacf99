// tb_l3_edram_fifo -- one FIFO side, shrunk to 64 words with a 600-cycle
// retention time, read every 4 cycles and a refresh request every 4 cycles.
// Random 128-bit words go in under random valid; the consumer takes words
// with random ready and pauses for 3000 cycles, far beyond the retention
// time, while the FIFO is full. Checks: every word comes out once, in order,
// intact (top and bottom halves recombined), with no retention error, so the
// occupancy-aware refresh kept the stored data alive; in_ready drops when the
// FIFO and burst buffer are full; the read rate is one word per READ_PERIOD.
module tb_l3_edram_fifo;
  localparam int D = 64, RP = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [127:0] in_data = 0, out_data;
  logic [6:0] level;
  logic refresh_fire, retention_err;
  logic [127:0] q [$];
  int checks = 0, failures = 0, n_out = 0, n_bp = 0, n_ref = 0, n_err = 0;

  l3_edram_fifo #(.DEPTH(D), .READ_PERIOD(RP), .REFRESH_PERIOD(4), .RETENTION(600)) dut (.*);
  always #1 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("[%0t] FAIL %s", $time, what);
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) q.push_back(in_data);
    if (in_valid && !in_ready) n_bp++;
    if (refresh_fire) n_ref++;
    if (retention_err) n_err++;
    if (out_valid && out_ready) begin
      check(q.size() != 0 && out_data == q[0], $sformatf("word %0d", n_out));
      if (q.size() != 0) void'(q.pop_front());
      n_out++;
    end
  end

  initial begin
    int o0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int t = 0; t < 40000; t++) begin
      @(negedge clk);
      if (!(in_valid && !in_ready)) begin
        in_valid = ((t / 2000) % 2 == 0) ? ($urandom_range(0, 3) == 0) : ($urandom_range(0, 15) == 0);
        in_data  = {$urandom, $urandom, $urandom, $urandom};
      end
      out_ready = (t >= 10000 && t < 13000) ? 1'b0 : ($urandom_range(0, 3) != 0);
    end
    // rate: keep the FIFO busy and the consumer ready
    out_ready = 1;
    in_valid = 1;
    repeat (20) @(negedge clk);
    o0 = n_out;
    repeat (RP * 100) @(negedge clk);
    check(n_out - o0 == 100, $sformatf("read rate %0d words per %0d cycles", n_out - o0, RP * 100));
    in_valid = 0;
    repeat (D * RP * 2 + 50) @(negedge clk);
    check(q.size() == 0, "drained");
    check(n_err == 0, "no retention error");
    check(n_bp > 0 && n_ref > 100, "backpressure and refresh exercised");
    $display("out=%0d bp=%0d refresh=%0d", n_out, n_bp, n_ref);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
