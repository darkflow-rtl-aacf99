// tb_darkflow_workload -- packet and photon-equivalent loss under illumination,
// measured on the readout with every parameter at its default (8 x 16 tiles, 2.0 Gb/s
// link pacing). For each of two spatial profiles (a localized Gaussian spot,
// sigma 20 SPAD pitches, centred on the 256 x 128 SPAD plane; and uniform
// illumination), three aggregate hit rates (1e9, 2e9 and 1e10 hits/s, i.e.
// 2, 4 and 20 hits per 2 ns cycle on average, Poisson distributed) and two
// photon thresholds (Pth = 1 and 2 on every L1 unit), the design is reset and
// illuminated for a burst of 10 us and, separately, of 50 us, then left to
// settle. The testbench counts
// packets written by the L2 tiles and packets dropped at full tile FIFOs,
// and the photon-equivalent loss: the energy (sum of L1 levels) carried by
// dropped event packets over the energy of all event packets. It prints one
// line per run. The checks are structural: no eDRAM retention error, Pth = 2
// never produces more packets than Pth = 1, loss does not fall as the rate
// rises, a longer burst loses no smaller share, and every run saw traffic. The spot size and burst length are this
// testbench's choices.
module tb_darkflow_workload;
  import darkflow_pkg::*;
  localparam int ROWS = 8, NODES = 16, N_L1 = 16;
  localparam int BURST_MAX = 25000, SETTLE = 300;
  localparam int BURSTS [2] = '{5000, 25000};
  logic clk = 0, rst_n = 0;
  logic [15:0] spad_hit [ROWS][NODES][N_L1];
  logic [4:0]  pth      [ROWS][NODES][N_L1];
  logic [4:0]  vth2 = 5'd3, vth3 = 5'd6;
  logic left_valid, left_ready = 1, right_valid, right_ready = 1;
  logic [127:0] left_data, right_data;
  logic [NODES-1:0] l2_drop [ROWS];
  logic [NODES-1:0] l2_fifo_full [ROWS];
  logic row_stall [ROWS];
  logic [12:0] fifo_level [2];
  logic [1:0] refresh_fire, retention_err, time_inserted;
  logic epoch_sync;

  darkflow_top dut (.*);
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
    repeat (12 * (BURSTS[0] + BURSTS[1] + 2 * (SETTLE + 20)) + 1000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // per-tile counters, one writer each
  longint n_wr [ROWS][NODES], n_dr [ROWS][NODES], e_wr [ROWS][NODES], e_dr [ROWS][NODES];
  bit counting = 0;
  for (genvar r = 0; r < ROWS; r++) begin : g_mr
    for (genvar n = 0; n < NODES; n++) begin : g_mn
      always @(posedge clk) if (rst_n && counting) begin
        if (dut.g_row[r].u_row.g_stage[n].u_node.drop) begin
          n_dr[r][n]++;
          if (dut.g_row[r].u_row.g_stage[n].u_node.push_pkt[15])
            e_dr[r][n] += longint'(dut.g_row[r].u_row.g_stage[n].u_node.push_pkt[7:0]);
        end else if (dut.g_row[r].u_row.g_stage[n].u_node.push) begin
          n_wr[r][n]++;
          if (dut.g_row[r].u_row.g_stage[n].u_node.push_pkt[15])
            e_wr[r][n] += longint'(dut.g_row[r].u_row.g_stage[n].u_node.push_pkt[7:0]);
        end
      end
    end
  end
  int n_reterr = 0;
  always @(posedge clk) if (rst_n && retention_err != 0) n_reterr++;

  function automatic real urand();
    return (real'($urandom_range(0, 999999)) + 0.5) / 1000000.0;
  endfunction

  function automatic int poisson(real lambda);
    real l, p;
    int k;
    l = $exp(-lambda); p = 1.0; k = 0;
    do begin k++; p = p * urand(); end while (p > l);
    return k - 1;
  endfunction

  task automatic place(int x, int y);
    int r, n, l, s;
    r = y / 16; n = x / 16;
    l = ((y % 16) / 4) * 4 + (x % 16) / 4;
    s = (y % 4) * 4 + (x % 4);
    spad_hit[r][n][l][s] = 1'b1;
  endtask

  longint pk_w [2][2][3][2], pk_d [2][2][3][2];
  real    loss_p [2][2][3][2], loss_e [2][2][3][2];

  initial begin
    real rates [3] = '{1.0e9, 2.0e9, 1.0e10};
    for (int b = 0; b < 2; b++)
    for (int prof = 0; prof < 2; prof++)
      for (int ri = 0; ri < 3; ri++)
        for (int th = 1; th <= 2; th++) begin
          longint w, d, ew, ed;
          real lambda;
          lambda = rates[ri] * 2.0e-9;
          foreach (pth[r, n, l]) pth[r][n][l] = 5'(th);
          foreach (spad_hit[r, n, l]) spad_hit[r][n][l] = '0;
          foreach (n_wr[r, n]) begin n_wr[r][n] = 0; n_dr[r][n] = 0; e_wr[r][n] = 0; e_dr[r][n] = 0; end
          @(negedge clk) rst_n = 0;
          repeat (3) @(negedge clk);
          rst_n = 1;
          counting = 1;
          for (int t = 0; t < BURSTS[b]; t++) begin
            int k;
            @(negedge clk);
            foreach (spad_hit[r, n, l]) spad_hit[r][n][l] = '0;
            k = poisson(lambda);
            for (int h = 0; h < k; h++) begin
              int x, y;
              if (prof == 0) begin
                real u1, u2, rad;
                u1 = urand(); u2 = urand();
                rad = $sqrt(-2.0 * $ln(u1));
                x = 128 + int'($floor(20.0 * rad * $cos(6.283185307 * u2)));
                y = 64 + int'($floor(20.0 * rad * $sin(6.283185307 * u2)));
                if (x < 0 || x > 255 || y < 0 || y > 127) continue;
              end else begin
                x = $urandom_range(0, 255);
                y = $urandom_range(0, 127);
              end
              place(x, y);
            end
          end
          @(negedge clk);
          foreach (spad_hit[r, n, l]) spad_hit[r][n][l] = '0;
          repeat (SETTLE) @(negedge clk);
          counting = 0;
          w = 0; d = 0; ew = 0; ed = 0;
          foreach (n_wr[r, n]) begin w += n_wr[r][n]; d += n_dr[r][n]; ew += e_wr[r][n]; ed += e_dr[r][n]; end
          pk_w[b][prof][ri][th-1] = w; pk_d[b][prof][ri][th-1] = d;
          loss_p[b][prof][ri][th-1] = (w + d == 0) ? 0.0 : real'(d) / real'(w + d);
          loss_e[b][prof][ri][th-1] = (ew + ed == 0) ? 0.0 : real'(ed) / real'(ew + ed);
          $display("burst=%0d us %s rate=%0.1e hits/s Pth=%0d: packets written=%0d dropped=%0d packet loss=%0.4f photon-eq loss=%0.4f",
                   BURSTS[b] / 500, prof == 0 ? "gaussian" : "uniform ", rates[ri], th, w, d,
                   loss_p[b][prof][ri][th-1], loss_e[b][prof][ri][th-1]);
          check(w > 0 || th == 2, "traffic");
        end
    for (int b = 0; b < 2; b++)
    for (int prof = 0; prof < 2; prof++)
      for (int ri = 0; ri < 3; ri++) begin
        check(pk_w[b][prof][ri][1] + pk_d[b][prof][ri][1] <= pk_w[b][prof][ri][0] + pk_d[b][prof][ri][0], "Pth=2 generates no more packets than Pth=1");
        if (ri > 0) check(loss_p[b][prof][ri][0] + 0.01 >= loss_p[b][prof][ri-1][0], "loss does not fall as the rate rises");
        if (b > 0) check(loss_p[b][prof][ri][0] + 0.01 >= loss_p[0][prof][ri][0], "a longer burst loses no smaller share");
      end
    check(n_reterr == 0, "no eDRAM retention error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
