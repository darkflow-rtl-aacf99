// tb_l2_row -- a full 16-node row under random hits and random row stalls.
// Every packet an L2 node writes into its FIFO (observed at the node's
// FIFO write port) must leave the row end exactly once, in per-node order,
// as a 32-bit L3 event packet with head 2'b10, the row ID and the right node
// ID. With every node busy and no stall each node must get an equal share
// (1/16) of the row link. While row_stall is high the row-end word must not change. The test
// also checks the idle latency of the chain: a single packet from node 0
// needs one cycle through the FIFO plus one per stage.
module tb_l2_row;
  import darkflow_pkg::*;
  localparam int NODES = 16;
  logic clk = 0, rst_n = 0, sync = 0;
  logic [2:0] therm [NODES][16];
  logic out_valid, row_stall = 0;
  logic [31:0] out_data;
  logic [NODES-1:0] drop, fifo_full;
  int checks = 0, failures = 0, n_pkts = 0, n_stall_hold = 0, n_drop = 0;
  logic [15:0] exp_q [NODES][$];

  l2_row #(.ROW_ID(3'd5)) dut (.*);
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

  // record what each node writes
  for (genvar i = 0; i < NODES; i++) begin : g_mon
    always @(posedge clk) if (rst_n) begin
      if (dut.g_stage[i].u_node.push && !dut.g_stage[i].u_node.fifo_full)
        exp_q[i].push_back(dut.g_stage[i].u_node.push_pkt);
    end
  end

  int per_node [NODES];
  bit count_nodes = 0;
  always @(posedge clk) if (count_nodes && out_valid && !row_stall) per_node[out_data[19:16]]++;

  logic [31:0] last_data;
  logic        last_stalled = 0;
  int          cyc = 0, first_out = -1;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (out_valid && first_out < 0) first_out = cyc;
    if (last_stalled) begin
      check(out_valid && out_data == last_data, "row-end word held during stall");
      n_stall_hold++;
    end
    last_stalled = out_valid && row_stall;
    last_data    = out_data;
    if (|drop) n_drop++;
    if (out_valid && !row_stall) begin
      int id;
      id = int'(out_data[19:16]);
      n_pkts++;
      check(out_data[31:30] == 2'b10 && out_data[29:23] == 0 && out_data[22:20] == 3'd5,
            $sformatf("header %h", out_data));
      check(exp_q[id].size() != 0 && exp_q[id][0] == out_data[15:0],
            $sformatf("node %0d packet %h", id, out_data[15:0]));
      if (exp_q[id].size() != 0) void'(exp_q[id].pop_front());
    end
  end

  initial begin
    int mode, c0;
    foreach (therm[n, l]) therm[n][l] = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    // latency: one photon at node 0 with an idle chain
    therm[0][3] = 3'b001;
    c0 = cyc;
    @(negedge clk) therm[0][3] = 3'b000;
    repeat (30) @(negedge clk);
    // written at cycle c0+1 (posedge), FIFO output next cycle, 16 stages
    check(first_out - c0 == 1 + 1 + NODES, $sformatf("chain latency %0d", first_out - c0));
    for (int t = 0; t < 40000; t++) begin
      @(negedge clk);
      if (t % 500 == 0) mode = $urandom_range(0, 2);
      foreach (therm[n, l])
        therm[n][l] = (mode == 2) ? (($urandom_range(0, 7) == 0) ? 3'b011 : 3'b000)
                    : (mode == 1) ? (($urandom_range(0, 2999) == 0) ? 3'b001 : 3'b000) : 3'b000;
      sync = (t % 1000 == 999);
      row_stall = ((t / 300) % 4 == 3) ? 1'b1 : ($urandom_range(0, 9) == 0);
    end
    // saturation: every node busy, no stall; each node must get 1/NODES of the link
    row_stall = 0;
    foreach (therm[n, l]) therm[n][l] = 3'b001;
    repeat (500) @(negedge clk);
    foreach (per_node[i]) per_node[i] = 0;
    count_nodes = 1;
    repeat (3200) @(negedge clk);
    count_nodes = 0;
    for (int i = 0; i < NODES; i++)
      check(per_node[i] >= 180 && per_node[i] <= 220, $sformatf("node %0d share %0d of 3200", i, per_node[i]));
    // drain
    foreach (therm[n, l]) therm[n][l] = 0;
    row_stall = 0;
    repeat (3000) @(negedge clk);
    for (int i = 0; i < NODES; i++) check(exp_q[i].size() == 0, $sformatf("node %0d lost %0d", i, exp_q[i].size()));
    check(n_pkts > 1000, "traffic");
    check(n_stall_hold > 100, "stalls");
    check(n_drop > 0, "drops under long stall");
    $display("packets=%0d stall_holds=%0d drop_cycles=%0d", n_pkts, n_stall_hold, n_drop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
