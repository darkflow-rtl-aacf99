// darkflow_pkg: constants, packet layouts and helper functions shared by the
// DarkFlow readout blocks.
//
// Packet layouts (bit positions as published for the hierarchical format):
//   L2 time packet    (16 b): [15] head = 0, [14:0] relative offset in 2 ns steps
//   L2 event packet   (16 b): [15] head = 1, [14:8] sequence index (10 ns steps),
//                             [7:0] event count (energy) of one 10 ns frame
//   L3 event packet   (32 b): [31:30] head, [29:23] reserved, [22:20] row ID,
//                             [19:16] L2 node ID, [15:0] L2 packet
//   L3 absolute time  (32 b): [31:30] head = 2'b01, [29:0] absolute time
// Only the head value 2'b01 (time) is published for the 32-bit packets. The
// event head 2'b10 and the idle/padding code 2'b00 are this design's choice;
// an all-zero 32-bit slot therefore marks an unused slot of a 128-bit word.
// The absolute time is kept in the same 2 ns unit as the L2 offset so that
// T_start = Global_Epoch + Offset holds without scaling.
package darkflow_pkg;

  // Clock: 500 MHz, one cycle = 2 ns.
  localparam int unsigned OFFSET_W   = 15;  // L2 relative offset
  localparam int unsigned SEQ_W      = 7;   // L2 sequence index
  localparam int unsigned COUNT_W    = 8;   // L2 event count
  localparam int unsigned L2PKT_W    = 16;  // L2 packet width
  localparam int unsigned L3PKT_W    = 32;  // L3 packet width
  localparam int unsigned ABSTIME_W  = 30;  // L3 absolute time field
  localparam int unsigned ROWID_W    = 3;
  localparam int unsigned NODEID_W   = 4;

  // 32-bit heads
  localparam logic [1:0] HEAD_IDLE  = 2'b00;
  localparam logic [1:0] HEAD_TIME  = 2'b01;
  localparam logic [1:0] HEAD_EVENT = 2'b10;

  typedef struct packed {
    logic                 head;     // 0 = time, 1 = event
    logic [14:0]          body;
  } l2_pkt_t;

  typedef struct packed {
    logic [1:0]           head;
    logic [6:0]           reserved;
    logic [ROWID_W-1:0]   row_id;
    logic [NODEID_W-1:0]  node_id;
    l2_pkt_t              l2;
  } l3_evt_pkt_t;

  typedef struct packed {
    logic [1:0]           head;
    logic [ABSTIME_W-1:0] abs_time;
  } l3_time_pkt_t;

  function automatic l2_pkt_t make_l2_time(input logic [OFFSET_W-1:0] offset);
    make_l2_time.head = 1'b0;
    make_l2_time.body = offset;
  endfunction

  function automatic l2_pkt_t make_l2_event(input logic [SEQ_W-1:0] seq,
                                            input logic [COUNT_W-1:0] cnt);
    make_l2_event.head = 1'b1;
    make_l2_event.body = {seq, cnt};
  endfunction

  function automatic logic [L3PKT_W-1:0] make_l3_time(input logic [ABSTIME_W-1:0] t);
    l3_time_pkt_t p;
    p.head     = HEAD_TIME;
    p.abs_time = t;
    return p;
  endfunction

endpackage
