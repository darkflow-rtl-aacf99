// l3_fifo_ctrl -- pointer manager FSM of the eDRAM burst-absorbing FIFO,
// with its timer and the occupancy-aware refresh.
//
// Pointers: read pointer RdP, write pointer WrP and refresh pointer RefP over
// DEPTH slots (one extra wrap bit tells full from empty). The occupied window
// is [RdP, WrP).
//
// Timer: read_strob fires every READ_PERIOD cycles and paces reads to the
// external link rate; slot_hit fires every REFRESH_PERIOD cycles and asks for
// one refresh. Each request waits (is sticky) until it is served.
//
// One command per cycle, in priority order:
//   READ    read_strob pending, FIFO not empty and the output can take a word
//   WRITE   the burst buffer holds a word and the FIFO is not full
//   REFRESH slot_hit pending and FIFO not empty
// so refresh only uses cycles that reads and writes leave free, and is in
// effect suspended during a sustained burst.
//
// Occupancy-aware refresh (the rules printed in the paper's figure):
//   - RefP always lies in [RdP, WrP): every refresh hits a valid slot.
//   - after refreshing RefP == WrP-1 it wraps to RdP;
//   - when a read advances RdP past RefP, RefP is clamped to RdP.
// An empty FIFO issues no refresh at all.
//
// The command priority, the sticky requests, the periods and the one-slot
// refresh granularity are this design's choices. READ_PERIOD = 64 gives one
// 128-bit word per 128 ns per side, i.e. 2 x 1 Gb/s = the 2.0 Gb/s link.
// REFRESH_PERIOD = 24 lets a completely full FIFO (4096 slots) be swept in
// 98304 cycles, inside the 125000-cycle (250 us) retention time.
module l3_fifo_ctrl #(
  parameter int unsigned DEPTH          = 4096,
  parameter int unsigned READ_PERIOD    = 64,
  parameter int unsigned REFRESH_PERIOD = 24
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        wr_req,    // burst buffer not empty
  input  logic                        rd_ok,     // output can take a word
  output logic                        do_write,  // Write CMD (pops burst buffer)
  output logic                        do_read,   // Read CMD
  output logic                        do_refresh,// Ref CMD
  output logic [$clog2(DEPTH)-1:0]    addr,
  output logic                        full,
  output logic                        empty,
  output logic [$clog2(DEPTH+1)-1:0]  level,
  output logic [$clog2(DEPTH)-1:0]    rd_ptr,
  output logic [$clog2(DEPTH)-1:0]    wr_ptr,
  output logic [$clog2(DEPTH)-1:0]    ref_ptr
);
  localparam int unsigned AW  = $clog2(DEPTH);
  localparam int unsigned RPW = $clog2(READ_PERIOD + 1);
  localparam int unsigned FPW = $clog2(REFRESH_PERIOD + 1);

  logic [AW:0]    rd_q, wr_q;          // with wrap bit
  logic [AW-1:0]  ref_q;
  logic [RPW-1:0] rd_tmr;
  logic [FPW-1:0] ref_tmr;
  logic           rd_pend, ref_pend;
  logic           read_strob, slot_hit;

  assign rd_ptr  = rd_q[AW-1:0];
  assign wr_ptr  = wr_q[AW-1:0];
  assign ref_ptr = ref_q;
  assign empty   = (rd_q == wr_q);
  assign full    = (rd_q[AW-1:0] == wr_q[AW-1:0]) && (rd_q[AW] != wr_q[AW]);
  assign level   = (AW+1)'(wr_q - rd_q);

  // Timer
  assign read_strob = (rd_tmr  == RPW'(READ_PERIOD - 1));
  assign slot_hit   = (ref_tmr == FPW'(REFRESH_PERIOD - 1));

  // Pointer manager: command selection
  assign do_read    = (rd_pend || read_strob) && !empty && rd_ok;
  assign do_write   = !do_read && wr_req && !full;
  assign do_refresh = !do_read && !do_write && (ref_pend || slot_hit) && !empty;

  always_comb begin
    if (do_read)       addr = rd_ptr;
    else if (do_write) addr = wr_ptr;
    else               addr = ref_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q     <= '0;
      wr_q     <= '0;
      ref_q    <= '0;
      rd_tmr   <= '0;
      ref_tmr  <= '0;
      rd_pend  <= 1'b0;
      ref_pend <= 1'b0;
    end else begin
      rd_tmr  <= read_strob ? '0 : rd_tmr + 1'b1;
      ref_tmr <= slot_hit   ? '0 : ref_tmr + 1'b1;
      rd_pend  <= (rd_pend  || read_strob) && !do_read;
      ref_pend <= (ref_pend || slot_hit)   && !do_refresh;

      if (do_read) begin
        rd_q <= rd_q + 1'b1;
        // RdP advances past RefP: clamp RefP to the new RdP.
        if (ref_q == rd_ptr) ref_q <= rd_ptr + 1'b1;
      end
      if (do_write) wr_q <= wr_q + 1'b1;
      if (do_refresh) begin
        // RefP == WrP-1: wrap to RdP, otherwise scan on.
        if (ref_q == wr_ptr - 1'b1) ref_q <= rd_ptr;
        else                        ref_q <= ref_q + 1'b1;
      end
    end
  end

  // The refresh pointer never leaves the occupied window.
  a_ref_in_window: assert property (@(posedge clk) disable iff (!rst_n)
      do_refresh |-> (AW'(ref_q - rd_ptr) < AW'(wr_ptr - rd_ptr)) || full)
    else $error("l3_fifo_ctrl: refresh outside the valid window");
  a_one_cmd: assert property (@(posedge clk) disable iff (!rst_n)
      $onehot0({do_read, do_write, do_refresh}))
    else $error("l3_fifo_ctrl: more than one command");

  initial assert (DEPTH == 2**AW) else $error("l3_fifo_ctrl: DEPTH must be a power of two");
endmodule
