// l3_edram_fifo -- one side (left or right) of the L3 burst-absorbing FIFO.
//
// A 128-bit x DEPTH FIFO (4096 deep by default, 64 kB per side, 128 kB for
// the two sides together) built from:
//   - a burst buffer, a BB_DEPTH-entry (default 2) register queue that takes
//     one 128-bit word per cycle at 500 MHz from the packing engine and holds
//     it while the memory is busy with a read or a refresh;
//   - two eDRAM banks of BANK_ROWS x 128 columns with a 2:1 column mux. Each
//     word is split: bits [127:64] go to bank 0 (top), bits [63:0] to bank 1
//     (bottom), same address, same command, so both share one controller;
//   - the controller (l3_fifo_ctrl): pointer manager FSM, read/refresh timer
//     and occupancy-aware refresh.
// Words leave on out_valid/out_ready toward the external link, paced by the
// controller's read timer. A consumer that holds out_ready low stops the
// reads; the FIFO then fills, the burst buffer fills and in_ready drops,
// which stalls the packing engine (consumer-driven backpressure).
//
// Timing: a word entering the burst buffer can be written the next cycle;
// the earliest read returns data one cycle after the read command (out_data
// is the banks' read register, held until the next read).
//
// The split into banks, halves and shared control follow the paper. The
// burst buffer depth, the command priority and the read pacing are this
// design's choices.
module l3_edram_fifo #(
  parameter int unsigned DEPTH          = 4096,
  parameter int unsigned BB_DEPTH       = 2,
  parameter int unsigned READ_PERIOD    = 64,
  parameter int unsigned REFRESH_PERIOD = 24,
  parameter int unsigned RETENTION      = 125000
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic [127:0]               in_data,
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [127:0]               out_data,
  output logic [$clog2(DEPTH+1)-1:0] level,
  output logic                       refresh_fire,
  output logic                       retention_err
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic         bb_empty, bb_full;
  logic [127:0] bb_dout;
  logic         do_write, do_read, do_refresh, rd_ok;
  logic [AW-1:0] addr;
  logic         err0, err1;

  sync_fifo #(.WIDTH(128), .DEPTH(BB_DEPTH)) u_burst_buf (
    .clk, .rst_n,
    .push(in_valid && in_ready), .din(in_data),
    .pop(do_write), .dout(bb_dout), .empty(bb_empty), .full(bb_full), .level()
  );
  assign in_ready = !bb_full;

  assign rd_ok = !out_valid || out_ready;

  l3_fifo_ctrl #(.DEPTH(DEPTH), .READ_PERIOD(READ_PERIOD), .REFRESH_PERIOD(REFRESH_PERIOD)) u_ctrl (
    .clk, .rst_n,
    .wr_req(!bb_empty), .rd_ok,
    .do_write, .do_read, .do_refresh, .addr,
    .full(), .empty(), .level,
    .rd_ptr(), .wr_ptr(), .ref_ptr()
  );

  edram_bank #(.ROWS(DEPTH/2), .WIDTH(64), .RETENTION(RETENTION)) u_bank0 (
    .clk, .rst_n, .we(do_write), .re(do_read), .ref_en(do_refresh), .addr,
    .wdata(bb_dout[127:64]), .rdata(out_data[127:64]), .retention_err(err0)
  );
  edram_bank #(.ROWS(DEPTH/2), .WIDTH(64), .RETENTION(RETENTION)) u_bank1 (
    .clk, .rst_n, .we(do_write), .re(do_read), .ref_en(do_refresh), .addr,
    .wdata(bb_dout[63:0]), .rdata(out_data[63:0]), .retention_err(err1)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        out_valid <= 1'b0;
    else if (do_read)  out_valid <= 1'b1;
    else if (out_ready) out_valid <= 1'b0;
  end

  assign refresh_fire  = do_refresh;
  assign retention_err = err0 || err1;
endmodule
