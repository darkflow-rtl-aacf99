// tb_darkflow_top -- end-to-end test of the whole readout with the array at its full
// size (8 rows x 16 nodes x 16 L1 units) and the eDRAM FIFO, epoch and
// read timers shrunk (128 words per side, 1000-cycle epoch, read every 4
// cycles, 2000-cycle retention) so that every mechanism occurs quickly.
//
// The testbench drives SPAD hits into every L1 unit and plays the host: it
// decodes the 128-bit words from both FIFO sides, checks every L3 event
// packet against the packets the L2 nodes wrote (observed at each node's
// FIFO write port): same row and node ID, per-node order kept, nothing lost
// or duplicated, even rows only on the left side and odd rows only on the
// right. Every L2 time packet is turned back into an absolute time with
// T_start = Global_Epoch + Offset using the absolute time packets of the same
// stream and compared with the time at which the photon arrived.
// Phases: sparse single photons (S1-like), a noisy L1 unit set to Pth = 2,
// a dense burst (S2-like), a consumer pause, then a drain. Each mechanism
// (row stall, L2 FIFO full, L2 drop, burst-buffer backpressure, refresh,
// time packet, partial word, 127-frame window wrap, Pth suppression) is
// counted and must occur at least once. No eDRAM retention error may occur.
module tb_darkflow_top;
  import darkflow_pkg::*;
  localparam int ROWS = 8, NODES = 16, N_L1 = 16;
  localparam int EPOCH = 1000;
  localparam int BURST_CYCLES = 3000, PAUSE_CYCLES = 1500;
  logic clk = 0, rst_n = 0;
  logic [15:0] spad_hit [ROWS][NODES][N_L1];
  logic [4:0]  pth      [ROWS][NODES][N_L1];
  logic [4:0]  vth2 = 5'd3, vth3 = 5'd6;
  logic left_valid, left_ready = 0, right_valid, right_ready = 0;
  logic [127:0] left_data, right_data;
  logic [NODES-1:0] l2_drop [ROWS];
  logic [NODES-1:0] l2_fifo_full [ROWS];
  logic row_stall [ROWS];
  logic [7:0] fifo_level [2];
  logic [1:0] refresh_fire, retention_err, time_inserted;
  logic epoch_sync;

  darkflow_top #(.EPOCH_CYCLES(1000), .FIFO_DEPTH(128), .READ_PERIOD(4), .REFRESH_PERIOD(4), .RETENTION(2000)) dut (.*);
  always #1 clk = ~clk;

  int checks = 0, failures = 0;
  int n_stall = 0, n_full = 0, n_drop = 0, n_bp = 0, n_ref = 0, n_time = 0;
  int n_partial = 0, n_wrap = 0, n_pth = 0, n_pkt = 0, n_tstart = 0, n_latest_ok = 0;
  longint cyc = 0;

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog");
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

  // what each node wrote, with the absolute time of the write
  logic [15:0] exp_pkt  [ROWS][NODES][$];
  longint      exp_time [ROWS][NODES][$];
  for (genvar r = 0; r < ROWS; r++) begin : g_mr
    for (genvar n = 0; n < NODES; n++) begin : g_mn
      always @(posedge clk) if (rst_n) begin
        if (dut.g_row[r].u_row.g_stage[n].u_node.push && !dut.g_row[r].u_row.g_stage[n].u_node.fifo_full) begin
          exp_pkt[r][n].push_back(dut.g_row[r].u_row.g_stage[n].u_node.push_pkt);
          exp_time[r][n].push_back(longint'(dut.now));
        end
      end
    end
  end

  // host side
  longint anchors [2][$];
  task automatic take_word(int side, logic [127:0] w);
    bit seen_zero = 0;
    for (int k = 0; k < 4; k++) begin
      logic [31:0] s;
      s = w[k*32 +: 32];
      if (s == 0) begin seen_zero = 1; continue; end
      check(!seen_zero, "slot after padding");
      if (s[31:30] == HEAD_TIME) begin
        check(s[29:0] % EPOCH == 0, "anchor on an epoch boundary");
        if (anchors[side].size() != 0) check(longint'(s[29:0]) > anchors[side][$], "anchors increase");
        anchors[side].push_back(longint'(s[29:0]));
        n_time++;
      end else begin
        int r, n;
        logic [15:0] p;
        longint t_true;
        check(s[31:30] == HEAD_EVENT && s[29:23] == 0, "L3 header");
        r = int'(s[22:20]); n = int'(s[19:16]); p = s[15:0];
        check(r % 2 == side, "row on its side");
        if (r >= ROWS || n >= NODES) begin check(0, "ID range"); continue; end
        n_pkt++;
        check(exp_pkt[r][n].size() != 0 && exp_pkt[r][n][0] == p,
              $sformatf("row %0d node %0d packet %h", r, n, p));
        if (exp_pkt[r][n].size() == 0) continue;
        void'(exp_pkt[r][n].pop_front());
        t_true = exp_time[r][n].pop_front();
        if (p[15] == 1'b0) begin
          bit found = 0;
          foreach (anchors[side][i]) if (anchors[side][i] + longint'(p[14:0]) == t_true) found = 1;
          check(found, $sformatf("T_start of row %0d node %0d", r, n));
          n_tstart++;
          if (anchors[side].size() != 0 && anchors[side][$] + longint'(p[14:0]) == t_true) n_latest_ok++;
        end else if (p[14:8] == 7'd127) n_wrap++;
      end
    end
    if (seen_zero) n_partial++;
  endtask

  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (left_valid && left_ready) take_word(0, left_data);
    if (right_valid && right_ready) take_word(1, right_data);
    foreach (row_stall[r]) if (row_stall[r]) n_stall++;
    foreach (l2_fifo_full[r]) if (|l2_fifo_full[r]) n_full++;
    foreach (l2_drop[r]) if (|l2_drop[r]) n_drop++;
    if (!dut.g_bank[0].u_fifo.in_ready || !dut.g_bank[1].u_fifo.in_ready) n_bp++;
    n_ref += int'(refresh_fire[0]) + int'(refresh_fire[1]);
    check(retention_err == 2'b00, "eDRAM retention error");
  end

  // Pth = 2 on a noisy unit: a single-SPAD hit there must not reach the L2 node
  always @(posedge clk) if (rst_n) begin
    if ($countones(spad_hit[0][0][0]) == 1) begin
      check(dut.g_row[0].u_row.g_stage[0].u_node.level[0] == 2'd0, "Pth=2 suppresses 1 PE");
      n_pth++;
    end
  end

  // stimulus helpers
  task automatic drive(int mode);
    foreach (spad_hit[r, n, l]) begin
      case (mode)
        0: spad_hit[r][n][l] = '0;
        1: spad_hit[r][n][l] = ($urandom_range(0, 20000) == 0) ? 16'(1 << $urandom_range(0, 15)) : '0;
        default: spad_hit[r][n][l] = ($urandom_range(0, 3) == 0) ? 16'($urandom & $urandom) : '0;
      endcase
    end
    // noisy unit: frequent single dark counts
    spad_hit[0][0][0] = ($urandom_range(0, 3) == 0) ? 16'(1 << $urandom_range(0, 15)) : '0;
  endtask

  initial begin
    foreach (pth[r, n, l]) pth[r][n][l] = 5'd1;
    pth[0][0][0] = 5'd2;
    drive(0);
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // S1-like sparse phase, consumer ready
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      drive(1);
      left_ready = 1; right_ready = 1;
    end
    // S2-like burst; the consumer pauses part way through
    for (int t = 0; t < BURST_CYCLES; t++) begin
      @(negedge clk);
      drive(2);
      left_ready  = !(t >= BURST_CYCLES / 4 && t < BURST_CYCLES / 4 + PAUSE_CYCLES);
      right_ready = left_ready;
    end
    // drain
    @(negedge clk);
    drive(0);
    left_ready = 1; right_ready = 1;
    for (int t = 0; t < 8000; t++) begin
      @(negedge clk);
      if (t % 5 == 0) spad_hit[0][0][0] = ($urandom_range(0, 3) == 0) ? 16'(1 << $urandom_range(0, 15)) : '0;
      else spad_hit[0][0][0] = '0;
    end
    foreach (exp_pkt[r, n]) check(exp_pkt[r][n].size() == 0, $sformatf("row %0d node %0d: %0d packets not delivered", r, n, exp_pkt[r][n].size()));
    check(n_stall > 0, "row stall happened");
    check(n_full > 0, "L2 FIFO full happened");
    check(n_drop > 0, "L2 drop happened");
    check(n_bp > 0, "burst buffer backpressure happened");
    check(n_ref > 0, "refresh happened");
    check(n_time > 0, "time packets");
    check(n_partial > 0, "partial word flush happened");
    check(n_wrap > 0, "127-frame window wrap happened");
    check(n_pth > 0, "Pth suppression exercised");
    check(n_tstart > 0, "T_start reconstructed");
    $display("packets=%0d time_pkts=%0d tstarts=%0d (latest anchor right: %0d)", n_pkt, n_time, n_tstart, n_latest_ok);
    $display("row_stall=%0d l2_full=%0d l2_drop=%0d bb_backpressure=%0d refresh=%0d partial=%0d wrap=%0d pth=%0d",
             n_stall, n_full, n_drop, n_bp, n_ref, n_partial, n_wrap, n_pth);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
