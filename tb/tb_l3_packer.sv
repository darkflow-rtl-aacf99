// tb_l3_packer -- one packing engine with 4 rows. Checks: every accepted row
// packet leaves exactly once and in acceptance order (time packet first, then
// rows by index, within a cycle); time packets carry the requested times in
// order; padding (zero slots) only at the end of a word and only after the
// flush timeout; row_stall rises exactly when a full round of inputs would
// not fit; and with a ready FIFO and all rows busy the engine takes 4 packets
// per cycle and emits one 128-bit word per cycle.
module tb_l3_packer;
  import darkflow_pkg::*;
  localparam int NR = 4;
  logic clk = 0, rst_n = 0;
  logic row_valid [NR];
  logic [31:0] row_data [NR];
  logic row_stall [NR];
  logic time_req = 0;
  logic [29:0] time_value = 0;
  logic word_valid, word_ready = 0, time_inserted;
  logic [127:0] word_data;
  int checks = 0, failures = 0;
  int n_partial = 0, n_stall = 0, n_words = 0;
  logic [31:0] exp_rows [$];
  logic [29:0] exp_time [$];
  int occ = 0, idle = 0;

  l3_packer dut (.*);
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
    int removed, nz, free_after;
    bit any_in, seen_zero;
    removed = 0;
    any_in = 0;
    if (time_req) exp_time.push_back(time_value);
    if (word_valid && word_ready) begin
      n_words++;
      nz = 0; seen_zero = 0;
      for (int k = 0; k < 4; k++) begin
        logic [31:0] s;
        s = word_data[k*32 +: 32];
        if (s == 0) seen_zero = 1;
        else begin
          check(!seen_zero, "data after padding");
          nz++;
          if (s[31:30] == 2'b01) begin
            check(exp_time.size() != 0 && s[29:0] == exp_time[0], "time packet value");
            if (exp_time.size() != 0) void'(exp_time.pop_front());
          end else begin
            check(exp_rows.size() != 0 && s == exp_rows[0], $sformatf("row packet %h", s));
            if (exp_rows.size() != 0) void'(exp_rows.pop_front());
          end
        end
      end
      removed = nz;
      if (nz < 4) begin
        n_partial++;
        check(occ == nz && idle >= 16, $sformatf("early partial word occ=%0d idle=%0d", occ, idle));
      end
    end
    free_after = 8 - occ + removed;
    check(row_stall[0] == (free_after < NR + 1), $sformatf("stall rule occ=%0d", occ));
    if (row_stall[0]) n_stall++;
    occ -= removed;
    if (time_inserted) occ++;
    if (!row_stall[0])
      for (int r = 0; r < NR; r++)
        if (row_valid[r]) begin exp_rows.push_back(row_data[r]); occ++; any_in = 1; end
    if ((word_valid && word_ready) || any_in || time_inserted || occ == 0) idle = 0;
    else idle++;
  end

  int seqn = 1;
  initial begin
    int mode, w0;
    foreach (row_valid[r]) begin row_valid[r] = 0; row_data[r] = 0; end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int t = 0; t < 30000; t++) begin
      @(negedge clk);
      if (t % 400 == 0) mode = $urandom_range(0, 3);
      for (int r = 0; r < NR; r++) begin
        // a row holds its word while stalled
        if (!(row_valid[r] && row_stall[r])) begin
          row_valid[r] = (mode == 0) ? ($urandom_range(0, 99) == 0) :
                         (mode == 3) ? 1'b1 : ($urandom_range(0, 1) == 0);
          row_data[r]  = {2'b10, 7'd0, 3'(r), 4'($urandom), 16'(seqn++)};
        end
      end
      time_req   = ($urandom_range(0, 299) == 0);
      time_value = 30'($urandom);
      word_ready = (mode == 2) ? ($urandom_range(0, 4) == 0) : 1'b1;
    end
    // throughput: all rows valid, ready FIFO
    foreach (row_valid[r]) row_valid[r] = 1;
    time_req = 0; word_ready = 1;
    repeat (4) @(negedge clk);
    w0 = n_words;
    repeat (100) @(negedge clk);
    check(n_words - w0 == 100, $sformatf("throughput %0d words / 100 cycles", n_words - w0));
    foreach (row_valid[r]) row_valid[r] = 0;
    repeat (100) @(negedge clk);
    check(exp_rows.size() == 0 && exp_time.size() == 0, "all packets out");
    check(n_partial > 0, "partial flush seen");
    check(n_stall > 0, "row stall seen");
    $display("words=%0d partial=%0d stall=%0d", n_words, n_partial, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
