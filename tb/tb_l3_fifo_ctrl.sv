// tb_l3_fifo_ctrl -- the pointer manager, shrunk to 256 slots so that the
// FIFO both fills and empties within the test (read every 64 cycles and
// refresh request every 24 cycles, the defaults), against a pointer model. Checks: at most one command per cycle, in the priority read > write
// > refresh; the read rate equals the timer rate while data is waiting;
// every refresh targets an occupied slot (the 100 % hit rate); the refresh
// pointer follows the published rules (RefP == WrP-1 wraps to RdP, a read
// passing RefP clamps it to RdP); no refresh while empty; full and level.
module tb_l3_fifo_ctrl;
  localparam int D = 256;
  logic clk = 0, rst_n = 0, wr_req = 0, rd_ok = 0;
  logic do_write, do_read, do_refresh, full, empty;
  logic [7:0] addr, rd_ptr, wr_ptr, ref_ptr;
  logic [8:0] level;
  int checks = 0, failures = 0;
  int n_wrap = 0, n_clamp = 0, n_ref = 0, n_read = 0, n_full = 0;
  int m_rd = 0, m_wr = 0, m_ref = 0, m_cnt = 0, cyc = 0;

  l3_fifo_ctrl #(.DEPTH(D)) dut (.*);
  always #1 clk = ~clk;

  initial begin
    repeat (800000) @(posedge clk);
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

  int rd_pending = 0, ref_pending = 0;
  always @(posedge clk) if (rst_n) begin
    bit strob, slot, e_read, e_write, e_ref;
    strob = (cyc % 64) == 63;
    slot  = (cyc % 24) == 23;
    e_read  = (rd_pending || strob) && m_cnt > 0 && rd_ok;
    e_write = !e_read && wr_req && m_cnt < D;
    e_ref   = !e_read && !e_write && (ref_pending || slot) && m_cnt > 0;
    check(do_read == e_read && do_write == e_write && do_refresh == e_ref,
          $sformatf("cmd r%0d w%0d f%0d exp r%0d w%0d f%0d", do_read, do_write, do_refresh, e_read, e_write, e_ref));
    check(int'(level) == m_cnt && full == (m_cnt == D) && empty == (m_cnt == 0), "level/full/empty");
    check(int'(rd_ptr) == m_rd && int'(wr_ptr) == m_wr && int'(ref_ptr) == m_ref, "pointers");
    if (m_cnt == D) n_full++;
    if (e_read) begin
      check(int'(addr) == m_rd, "read address");
      n_read++;
      if (m_ref == m_rd) begin m_ref = (m_rd + 1) % D; n_clamp++; end
      m_rd = (m_rd + 1) % D; m_cnt--;
    end else if (e_write) begin
      check(int'(addr) == m_wr, "write address");
      m_wr = (m_wr + 1) % D; m_cnt++;
    end else if (e_ref) begin
      // hit: the refreshed slot lies in the occupied window
      check(((int'(addr) - m_rd + D) % D) < m_cnt && int'(addr) == m_ref, "refresh hit");
      n_ref++;
      if (m_ref == (m_wr - 1 + D) % D) begin m_ref = m_rd; n_wrap++; end
      else m_ref = (m_ref + 1) % D;
    end
    rd_pending  = (rd_pending || strob) && !e_read;
    ref_pending = (ref_pending || slot) && !e_ref;
    cyc++;
  end

  initial begin
    int mode, r0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int t = 0; t < 200000; t++) begin
      @(negedge clk);
      if (t % 5000 == 0) mode = $urandom_range(0, 3);
      // 0: burst writes, 1: sparse writes, 2: idle, 3: consumer paused + writes
      wr_req = (mode == 0 || mode == 3) ? ($urandom_range(0, 9) != 0) :
               (mode == 1) ? ($urandom_range(0, 49) == 0) : 1'b0;
      rd_ok  = (mode == 3) ? 1'b0 : 1'b1;
      if (t == 150000) begin
        // rate check: keep data waiting, reads every 64 cycles
        mode = 0;
      end
    end
    wr_req = 1; rd_ok = 1;
    repeat (10) @(negedge clk);
    r0 = n_read;
    repeat (64 * 50) @(negedge clk);
    check(n_read - r0 == 50, $sformatf("read rate %0d per 3200 cycles", n_read - r0));
    check(n_wrap > 0 && n_clamp > 0 && n_ref > 100 && n_full > 0, "mechanisms exercised");
    $display("reads=%0d refreshes=%0d wraps=%0d clamps=%0d full_cycles=%0d", n_read, n_ref, n_wrap, n_clamp, n_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
