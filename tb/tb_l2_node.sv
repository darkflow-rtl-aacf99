// tb_l2_node -- one L2 node against a cycle-level reference model written
// from the packet rules: the first photon gives a time packet with the fine
// timer value, then one event packet {sequence index, frame sum} per 10 ns
// (5-cycle) frame with a non-zero sum, sequence index 1..127, then re-arm.
// The local FIFO is modelled as a 16-deep queue: packets that meet a full
// queue are dropped (drop must pulse). Stimulus mixes sparse hits, dense
// bursts and long consumer stalls, so the FIFO fills, drops happen and the
// 127-frame window wraps. The output must appear one cycle after the write.
module tb_l2_node;
  import darkflow_pkg::*;
  localparam int EPOCH = 300;
  logic clk = 0, rst_n = 0, sync = 0;
  logic [2:0] therm [16];
  logic out_valid, out_ready = 0, drop, fifo_full;
  logic [15:0] out_data;
  logic [4:0] fill_level;
  int checks = 0, failures = 0;
  int n_time = 0, n_event = 0, n_drop = 0, n_wrap = 0, n_full = 0;

  l2_node dut (.*);
  always #1 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference model state
  bit active = 0;
  int phase = 0, seq = 0, acc = 0, fine = 0;
  logic [15:0] q [$];

  function automatic logic [2:0] code_of(int lv);
    case (lv) 0: return 3'b000; 1: return 3'b001; 2: return 3'b011; default: return 3'b111; endcase
  endfunction

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("[%0t] FAIL %s", $time, what);
    end
  endtask

  int lv [16];
  int mode = 0;   // 0 silent, 1 sparse, 2 burst

  always @(posedge clk) if (rst_n) begin
    int s; bit hit, full, pushed, dropped;
    logic [15:0] pkt;
    s = 0; hit = 0; pushed = 0; dropped = 0;
    foreach (lv[i]) begin s += lv[i]; if (lv[i] != 0) hit = 1; end
    full = (q.size() == 16);
    // pop first (model of first-word fall-through read)
    if (out_valid && out_ready) begin
      check(q.size() != 0 && out_data == q[0], $sformatf("pop data %h exp %h", out_data, (q.size()!=0)?q[0]:16'h0));
      if (q.size() != 0) void'(q.pop_front());
    end
    if (!active) begin
      if (hit) begin
        if (!full) begin
          pkt = {1'b0, 15'(fine)}; pushed = 1; n_time++;
          active = 1; phase = 1; seq = 1; acc = s;
        end else dropped = 1;
      end
    end else begin
      acc = ((phase == 0) ? 0 : acc) + s;
      if (phase == 4) begin
        if (acc > 0) begin
          if (!full) begin pkt = {1'b1, 7'(seq), 8'(acc)}; pushed = 1; n_event++; end
          else dropped = 1;
        end
        phase = 0;
        if (seq == 127) begin active = 0; n_wrap++; end else seq++;
      end else phase++;
    end
    check(drop == dropped, $sformatf("drop %0d exp %0d", drop, dropped));
    if (dropped) n_drop++;
    if (full) n_full++;
    if (pushed) q.push_back(pkt);
    fine = sync ? 0 : ((fine < 32767) ? fine + 1 : 32767);
  end

  // cycle-by-cycle output checks
  always @(negedge clk) if (rst_n) begin
    check(out_valid == (q.size() != 0), "out_valid");
    check(int'(fill_level) == q.size(), $sformatf("fill %0d exp %0d", fill_level, q.size()));
    check(fifo_full == (q.size() == 16), "fifo_full");
    if (q.size() != 0) check(out_data == q[0], "head data");
  end

  int t = 0;
  initial begin
    foreach (therm[i]) therm[i] = 0;
    foreach (lv[i]) lv[i] = 0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (t = 0; t < 30000; t++) begin
      @(negedge clk);
      if (t % 1000 == 0) mode = $urandom_range(0, 2);
      if (t >= 20000 && t < 21000) mode = 2;          // long burst -> window wrap
      foreach (lv[i]) begin
        case (mode)
          0: lv[i] = 0;
          1: lv[i] = ($urandom_range(0, 999) == 0) ? 1 : 0;
          default: lv[i] = ($urandom_range(0, 3) == 0) ? int'($urandom_range(1, 3)) : 0;
        endcase
        therm[i] = code_of(lv[i]);
      end
      sync = ((t % EPOCH) == EPOCH - 1);
      // consumer: mostly ready, with long stalls
      out_ready = ((t / 400) % 3 == 2) ? 1'b0 : ($urandom_range(0, 3) != 0);
    end
    check(n_time > 10, "time packets seen");
    check(n_event > 100, "event packets seen");
    check(n_drop > 0, "drops seen");
    check(n_wrap > 0, "127-frame window wrap seen");
    check(n_full > 0, "FIFO full seen");
    $display("time=%0d event=%0d drop=%0d wrap=%0d", n_time, n_event, n_drop, n_wrap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
