// tb_l3_refresh_workload -- refresh efficiency of one L3 eDRAM FIFO side
// under a worst-case burst, with every parameter at its default (4096 words
// of 128 bits, a read every 64 cycles = 1 Gb/s per side, a refresh slot
// every 24 cycles, 250 us retention).
//
// The source offers a word every cycle for BURST cycles, so the FIFO fills
// completely while refresh is starved by writes. The source then stops and
// the FIFO drains through the read timer until it is empty, about
// 4096 x 64 cycles = 524 us. Every read is checked against the word written,
// in order.
//
// At every refresh the design issues, the testbench notes whether the
// refreshed address lies inside the occupied window [read pointer, read
// pointer + level). It also runs a reference model of a conventional global
// refresh, given the same refresh slots: a pointer that sweeps all 4096
// addresses in turn whether they hold data or not, with its own per-row
// activation stamps (writes and reads restore a row as in the bank model).
// It prints, for both schemes, the share of refreshes that hit valid data
// and the mean and largest age of a word at readout (cycles since its row
// was last activated).
//
// Checks: every word arrives intact and in order, no retention error, the
// occupancy-aware refresh hits valid data on every slot, it lands at least
// 1.5 times as many useful refreshes as the global sweep, no word is read
// older than the retention time, reads are exactly READ_PERIOD cycles apart
// while data waits, and the FIFO drains in DEPTH x READ_PERIOD cycles give
// or take one period. BURST and the margin of 1.5 are this testbench's
// choices.
module tb_l3_refresh_workload;
  localparam int DEPTH = 4096, READ_PERIOD = 64, RETENTION = 125000;
  localparam int BURST = 6000;
  localparam int ROWS  = DEPTH / 2;

  logic         clk = 0, rst_n = 0;
  logic         in_valid = 0, in_ready;
  logic [127:0] in_data = '0;
  logic         out_valid, out_ready = 1;
  logic [127:0] out_data;
  logic [12:0]  level;
  logic         refresh_fire, retention_err;

  l3_edram_fifo dut (.*);
  always #1 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("[%0t] FAIL %s", $time, what);
    end
  endtask

  initial begin
    repeat (BURST + DEPTH * READ_PERIOD + 20000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // source and sink
  int unsigned cyc = 0, sent = 0, recv = 0;
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (in_valid && in_ready) sent <= sent + 1;
  end
  always @(negedge clk) begin
    in_valid = rst_n && (cyc < BURST);
    in_data  = {4{sent}};
  end

  int unsigned n_bad = 0, n_err = 0;
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      if (out_data != {4{recv}}) n_bad <= n_bad + 1;
      recv <= recv + 1;
    end
    if (retention_err) n_err <= n_err + 1;
  end

  // refresh and age statistics, occupancy-aware (design) and global (model)
  int unsigned   stamp_g [ROWS];
  int unsigned   g_ptr = 0;
  longint        n_ref = 0, hit_oa = 0, hit_g = 0;
  longint        n_rd = 0, age_oa_sum = 0, age_g_sum = 0;
  int unsigned   age_oa_max = 0, age_g_max = 0, n_g_stale = 0;
  int unsigned   last_rd = 0, gap_min = '1, gap_max = 0, first_rd = 0;
  logic [11:0]   a, rp, win;
  int unsigned   age;

  initial foreach (stamp_g[r]) stamp_g[r] = 0;

  always @(posedge clk) if (rst_n) begin
    a   = dut.addr;
    rp  = dut.u_ctrl.rd_ptr;
    if (dut.do_refresh) begin
      n_ref++;
      win = a - rp;
      if (32'(win) < 32'(dut.level)) hit_oa++;
      win = 12'(g_ptr) - rp;
      if (32'(win) < 32'(dut.level)) hit_g++;
      stamp_g[g_ptr / 2] = dut.u_bank0.cycle;
      g_ptr = (g_ptr + 1) % DEPTH;
    end
    if (dut.do_write) stamp_g[a[11:1]] = dut.u_bank0.cycle;
    if (dut.do_read) begin
      age = dut.u_bank0.cycle - dut.u_bank0.stamp[a[11:1]];
      age_oa_sum += age;
      if (age > age_oa_max) age_oa_max = age;
      age = dut.u_bank0.cycle - stamp_g[a[11:1]];
      age_g_sum += age;
      if (age > age_g_max) age_g_max = age;
      if (age > RETENTION) n_g_stale++;
      stamp_g[a[11:1]] = dut.u_bank0.cycle;
      if (n_rd == 0) first_rd = cyc;
      else if (cyc > BURST + 2 || dut.level > 1) begin
        if (cyc - last_rd < gap_min) gap_min = cyc - last_rd;
        if (cyc - last_rd > gap_max) gap_max = cyc - last_rd;
      end
      last_rd = cyc;
      n_rd++;
    end
  end

  initial begin
    int unsigned t_full, t_empty;
    bit seen_full;
    real hr_oa, hr_g;
    seen_full = 0;
    t_full = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (!(cyc > BURST && dut.level == 0 && !out_valid)) begin
      @(negedge clk);
      if (!seen_full && dut.level == 13'(DEPTH)) begin seen_full = 1; t_full = cyc; end
    end
    t_empty = cyc;
    repeat (10) @(negedge clk);
    hr_oa = real'(hit_oa) / real'(n_ref);
    hr_g  = real'(hit_g) / real'(n_ref);
    $display("burst of %0d cycles: %0d words written, FIFO full at cycle %0d, empty at cycle %0d (%0.1f us)",
             BURST, sent, t_full, t_empty, real'(t_empty) * 0.002);
    $display("refresh slots used: %0d", n_ref);
    $display("occupancy-aware: hit rate %0.4f, mean age at read %0.1f cycles, max %0d cycles",
             hr_oa, real'(age_oa_sum) / real'(n_rd), age_oa_max);
    $display("global sweep   : hit rate %0.4f, mean age at read %0.1f cycles, max %0d cycles, %0d reads past retention",
             hr_g, real'(age_g_sum) / real'(n_rd), age_g_max, n_g_stale);
    $display("useful refreshes, occupancy-aware over global: %0.2f", real'(hit_oa) / real'(hit_g));
    $display("read gap min %0d max %0d cycles", gap_min, gap_max);
    check(seen_full, "FIFO filled by the burst");
    check(sent > DEPTH, "source backpressured once full");
    check(recv == sent, "every word read out");
    check(n_bad == 0, "words intact and in order");
    check(n_err == 0, "no retention error");
    check(n_ref > 0 && hit_oa == n_ref, "every occupancy-aware refresh hits valid data");
    check(hit_g > 0 && real'(hit_oa) >= 1.5 * real'(hit_g), "occupancy-aware lands at least 1.5x the useful refreshes");
    check(age_oa_max <= RETENTION, "no word read past retention");
    check(gap_min == READ_PERIOD && gap_max == READ_PERIOD, "reads every READ_PERIOD cycles");
    check(t_empty - first_rd >= (sent - 1) * READ_PERIOD && t_empty - first_rd <= (sent + 1) * READ_PERIOD,
          "drain takes one read period per word");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
