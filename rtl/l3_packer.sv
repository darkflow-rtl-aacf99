// l3_packer -- L3 packing engine of one bank (left = even rows, right = odd).
//
// Each cycle the engine can take one 32-bit L3 event packet from every one of
// its NROWS rows at once, plus a 32-bit absolute time packet when the
// absolute timer signals a new epoch (time_req). Packets are appended in a
// small buffer of BUF_SLOTS 32-bit slots in a fixed order (time packet first,
// then rows by index) and leave as 128-bit words of four packets, slot 0 in
// bits [31:0]. A partly filled word is sent after FLUSH_TIMEOUT cycles with
// no new packet, its empty slots zero (head 2'b00 marks an empty slot), so
// sparse S1 hits are not held back indefinitely.
//
// Backpressure: the word is offered on word_valid/word_ready to the eDRAM
// FIFO. When the downstream stops taking words the buffer fills; once it can
// no longer hold a full round of inputs the engine asserts row_stall to all
// of its rows, which freezes their systolic chains. A time packet that meets
// a full buffer waits (time_pend) and is inserted as soon as a slot frees.
//
// Paper: two banks, even/odd row split, 128-bit output, row stall, parallel
// intake, insertion of the absolute time packet. This design's choices: the
// buffer size, slot order, padding code, flush timeout and stall rule.
module l3_packer
  import darkflow_pkg::*;
#(
  parameter int unsigned NROWS         = 4,
  parameter int unsigned BUF_SLOTS     = 8,
  parameter int unsigned FLUSH_TIMEOUT = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 row_valid [NROWS],
  input  logic [L3PKT_W-1:0]   row_data  [NROWS],
  output logic                 row_stall [NROWS],
  input  logic                 time_req,
  input  logic [ABSTIME_W-1:0] time_value,
  output logic                 word_valid,
  input  logic                 word_ready,
  output logic [127:0]         word_data,
  output logic                 time_inserted
);
  localparam int unsigned SPW = 4;                      // slots per word
  localparam int unsigned CW  = $clog2(BUF_SLOTS + 1);
  localparam int unsigned FW  = $clog2(FLUSH_TIMEOUT + 1);

  logic [L3PKT_W-1:0] slot_q [BUF_SLOTS];
  logic [L3PKT_W-1:0] slot_d [BUF_SLOTS];
  logic [CW-1:0]      count_q, count_d;
  logic [FW-1:0]      idle_q;
  logic               time_pend_q, time_pend_d;
  logic [ABSTIME_W-1:0] time_val_q, time_val_d;
  logic               emit, stall, any_in, take_time;
  logic [CW-1:0]      removed, free_after;

  // Word out: the four oldest slots.
  always_comb begin
    for (int k = 0; k < SPW; k++)
      word_data[k*32 +: 32] = (CW'(k) < count_q) ? slot_q[k] : '0;
  end
  assign word_valid = (count_q >= CW'(SPW)) ||
                      ((count_q != '0) && (idle_q >= FW'(FLUSH_TIMEOUT)));
  assign emit       = word_valid && word_ready;
  assign removed    = emit ? ((count_q >= CW'(SPW)) ? CW'(SPW) : count_q) : '0;
  assign free_after = CW'(BUF_SLOTS) - count_q + removed;
  // Accept from the rows only when a full round (all rows + a time packet) fits.
  assign stall      = (free_after < CW'(NROWS + 1));

  always_comb begin
    for (int r = 0; r < NROWS; r++) row_stall[r] = stall;
  end

  always_comb begin
    logic [CW-1:0] n;
    // Shift out what was emitted.
    for (int k = 0; k < BUF_SLOTS; k++) slot_d[k] = '0;
    for (int k = 0; k < BUF_SLOTS; k++)
      if (CW'(k) + removed < count_q) slot_d[k] = slot_q[k + int'(removed)];
    n = count_q - removed;

    time_pend_d = time_pend_q;
    time_val_d  = time_val_q;
    if (time_req) begin
      time_pend_d = 1'b1;
      time_val_d  = time_value;
    end
    take_time = time_pend_d && (n < CW'(BUF_SLOTS));
    if (take_time) begin
      slot_d[n]   = make_l3_time(time_val_d);
      n           = n + 1'b1;
      time_pend_d = 1'b0;
    end

    any_in = 1'b0;
    if (!stall) begin
      for (int r = 0; r < NROWS; r++) begin
        if (row_valid[r]) begin
          slot_d[n] = row_data[r];
          n         = n + 1'b1;
          any_in    = 1'b1;
        end
      end
    end
    count_d = n;
  end

  assign time_inserted = take_time;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count_q     <= '0;
      idle_q      <= '0;
      time_pend_q <= 1'b0;
      time_val_q  <= '0;
      for (int k = 0; k < BUF_SLOTS; k++) slot_q[k] <= '0;
    end else begin
      count_q     <= count_d;
      time_pend_q <= time_pend_d;
      time_val_q  <= time_val_d;
      for (int k = 0; k < BUF_SLOTS; k++) slot_q[k] <= slot_d[k];
      if (emit || any_in || take_time || count_q == '0) idle_q <= '0;
      else if (idle_q != '1)                          idle_q <= idle_q + 1'b1;
    end
  end

  initial assert (BUF_SLOTS >= NROWS + 1 + SPW - 1)
    else $error("l3_packer: BUF_SLOTS too small for NROWS");
endmodule
