// darkflow_top -- the DarkFlow readout: ROWS x NODES L2 tiles of N_L1 L1
// units each (default 8 x 16 x 16 = 2048 L1 units, 32768 SPADs), two L3
// packing engines and the two sides of the eDRAM burst-absorbing FIFO.
//
// Dataflow. Every L1 unit (analog model) turns its 16 SPAD hits into a
// 3-bit comparator code. Each L2 node turns the codes of its 16 L1 units into
// 16-bit time and event packets in its local FIFO. The nodes of a row drain
// through a systolic chain of skid buffers; the row end adds the row ID.
// Even rows go to the left packing engine and FIFO side, odd rows to the
// right, so the two halves work independently and in parallel. Each packing
// engine also inserts a 32-bit absolute time packet at every 10 us epoch
// boundary signalled by the shared absolute timer, which also realigns all
// L2 fine timers. The two 128-bit FIFO outputs go off chip through the
// external link, which is not part of this RTL: left_*/right_* are its
// valid/ready ports.
//
// Backpressure runs the other way: a consumer holding *_ready low fills the
// eDRAM FIFO, then the burst buffer, then the packing engine, which raises
// row_stall; the systolic chain freezes and the L2 FIFOs fill; an L2 node
// whose FIFO is full drops packets (l2_drop).
//
// Configuration ports: pth is the per-L1 photon threshold (Vth1), vth2 and
// vth3 the two upper comparator thresholds, all in photo-electrons.
module darkflow_top
  import darkflow_pkg::*;
#(
  parameter int unsigned ROWS           = 8,
  parameter int unsigned NODES          = 16,
  parameter int unsigned N_L1           = 16,
  parameter int unsigned N_SPAD         = 16,
  parameter int unsigned FRAME_CYCLES   = 5,
  parameter int unsigned L2_FIFO_DEPTH  = 16,
  parameter int unsigned EPOCH_CYCLES   = 5000,
  parameter int unsigned PACK_SLOTS     = 8,
  parameter int unsigned FLUSH_TIMEOUT  = 16,
  parameter int unsigned FIFO_DEPTH     = 4096,
  parameter int unsigned BB_DEPTH       = 2,
  parameter int unsigned READ_PERIOD    = 64,
  parameter int unsigned REFRESH_PERIOD = 24,
  parameter int unsigned RETENTION      = 125000
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [N_SPAD-1:0]             spad_hit [ROWS][NODES][N_L1],
  input  logic [$clog2(N_SPAD+1)-1:0]   pth      [ROWS][NODES][N_L1],
  input  logic [$clog2(N_SPAD+1)-1:0]   vth2,
  input  logic [$clog2(N_SPAD+1)-1:0]   vth3,
  output logic                          left_valid,
  input  logic                          left_ready,
  output logic [127:0]                  left_data,
  output logic                          right_valid,
  input  logic                          right_ready,
  output logic [127:0]                  right_data,
  output logic [NODES-1:0]              l2_drop      [ROWS],
  output logic [NODES-1:0]              l2_fifo_full [ROWS],
  output logic                          row_stall    [ROWS],
  output logic [$clog2(FIFO_DEPTH+1)-1:0] fifo_level [2],
  output logic [1:0]                    refresh_fire,
  output logic [1:0]                    retention_err,
  output logic [1:0]                    time_inserted,
  output logic                          epoch_sync
);
  localparam int unsigned HALF = (ROWS + 1) / 2;

  logic [2:0]           therm [ROWS][NODES][N_L1];
  logic                 row_valid [ROWS];
  logic [L3PKT_W-1:0]   row_data  [ROWS];
  logic [ABSTIME_W-1:0] now, epoch_time;

  l3_abs_timer #(.EPOCH_CYCLES(EPOCH_CYCLES)) u_abs_timer (
    .clk, .rst_n, .now, .sync(epoch_sync), .epoch_time
  );

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar n = 0; n < NODES; n++) begin : g_node
      for (genvar l = 0; l < N_L1; l++) begin : g_l1
        l1_analog_frontend #(.N_SPAD(N_SPAD)) u_afe (
          .spad_hit(spad_hit[r][n][l]), .pth(pth[r][n][l]), .vth2, .vth3,
          .therm(therm[r][n][l])
        );
      end
    end
    l2_row #(
      .NODES(NODES), .N_L1(N_L1), .FRAME_CYCLES(FRAME_CYCLES),
      .FIFO_DEPTH(L2_FIFO_DEPTH), .ROW_ID(ROWID_W'(r))
    ) u_row (
      .clk, .rst_n, .sync(epoch_sync), .therm(therm[r]),
      .out_valid(row_valid[r]), .row_stall(row_stall[r]), .out_data(row_data[r]),
      .drop(l2_drop[r]), .fifo_full(l2_fifo_full[r])
    );
  end

  // Bank b (0 = left, 1 = right) serves rows b, b+2, b+4, ...
  logic         w_valid [2];
  logic         w_ready [2];
  logic [127:0] w_data  [2];
  logic         o_valid [2];
  logic         o_ready [2];
  logic [127:0] o_data  [2];

  for (genvar b = 0; b < 2; b++) begin : g_bank
    logic               pv [HALF];
    logic [L3PKT_W-1:0] pd [HALF];
    logic               ps [HALF];
    for (genvar k = 0; k < HALF; k++) begin : g_map
      if (2*k + b < ROWS) begin : g_real
        assign pv[k] = row_valid[2*k+b];
        assign pd[k] = row_data[2*k+b];
        assign row_stall[2*k+b] = ps[k];
      end else begin : g_none
        assign pv[k] = 1'b0;
        assign pd[k] = '0;
      end
    end

    l3_packer #(.NROWS(HALF), .BUF_SLOTS(PACK_SLOTS), .FLUSH_TIMEOUT(FLUSH_TIMEOUT)) u_pack (
      .clk, .rst_n,
      .row_valid(pv), .row_data(pd), .row_stall(ps),
      .time_req(epoch_sync), .time_value(epoch_time),
      .word_valid(w_valid[b]), .word_ready(w_ready[b]), .word_data(w_data[b]),
      .time_inserted(time_inserted[b])
    );

    l3_edram_fifo #(
      .DEPTH(FIFO_DEPTH), .BB_DEPTH(BB_DEPTH), .READ_PERIOD(READ_PERIOD),
      .REFRESH_PERIOD(REFRESH_PERIOD), .RETENTION(RETENTION)
    ) u_fifo (
      .clk, .rst_n,
      .in_valid(w_valid[b]), .in_ready(w_ready[b]), .in_data(w_data[b]),
      .out_valid(o_valid[b]), .out_ready(o_ready[b]), .out_data(o_data[b]),
      .level(fifo_level[b]), .refresh_fire(refresh_fire[b]),
      .retention_err(retention_err[b])
    );
  end

  assign left_valid  = o_valid[0];
  assign left_data   = o_data[0];
  assign o_ready[0]  = left_ready;
  assign right_valid = o_valid[1];
  assign right_data  = o_data[1];
  assign o_ready[1]  = right_ready;

  logic [ABSTIME_W-1:0] now_unused;
  assign now_unused = now;
endmodule
