// l2_node -- one L2 pixel tile: 16 L1 units (256 SPADs), relative-time and
// event packet generation, and the local 16 x 16-bit FIFO.
//
// Operation. The node idles until any of its L1 units reports a non-zero
// energy level (the first photon). In that cycle it writes an L2 time packet
// carrying the 15-bit fine-timer value (2 ns resolution, relative to the
// current 10 us epoch) and starts frame 1. From then on it aggregates in
// 10 ns frames of FRAME_CYCLES clock cycles: the event counter sums the L1
// energy levels over the frame, and in the frame's last cycle an L2 event
// packet {sequence index, count} is written. The 7-bit sequence index counts
// frames from the trigger, starting at 1. After frame 2^7-1 the index would
// overflow, so the node returns to idle and the next photon re-arms it with a
// fresh time packet.
//
// Backpressure. Packets are written only when the FIFO has room; the paper's
// L1 state machine "halts packet generation only when the L2 FIFO is fully
// saturated". A packet that meets a full FIFO is not written and drop pulses
// for one cycle. The FIFO drains through out_valid/out_ready (first-word
// fall-through) into the row's systolic chain.
//
// Choices of this design, not given by the paper: frame 1 begins in the
// trigger cycle; frames whose count is zero produce no packet; the window
// closes after 127 frames; the count is the sum of 2-bit levels.
module l2_node
  import darkflow_pkg::*;
#(
  parameter int unsigned N_L1         = 16,
  parameter int unsigned FRAME_CYCLES = 5,   // 10 ns at 2 ns per cycle
  parameter int unsigned FIFO_DEPTH   = 16
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         sync,          // global time sync
  input  logic [2:0]                   therm [N_L1],  // L1 comparator codes
  output logic                         out_valid,
  input  logic                         out_ready,
  output logic [L2PKT_W-1:0]           out_data,
  output logic                         drop,          // packet lost, FIFO full
  output logic                         fifo_full,
  output logic [$clog2(FIFO_DEPTH+1)-1:0] fill_level
);
  typedef enum logic {IDLE, ACTIVE} state_t;

  localparam int unsigned PW = (FRAME_CYCLES > 1) ? $clog2(FRAME_CYCLES) : 1;

  state_t             state;
  logic [PW-1:0]      phase;
  logic [SEQ_W-1:0]   seq;
  logic [1:0]         level [N_L1];
  logic               hit;
  logic [OFFSET_W-1:0] offset;
  logic [COUNT_W-1:0] count;
  logic               frame_start, frame_end, trigger, cnt_en;
  logic               push, fifo_empty;
  l2_pkt_t            push_pkt;

  for (genvar i = 0; i < N_L1; i++) begin : g_l1
    l1_encoder u_enc (.therm(therm[i]), .level(level[i]));
  end

  always_comb begin
    hit = 1'b0;
    for (int i = 0; i < N_L1; i++) hit |= (level[i] != 2'd0);
  end

  l2_fine_timer u_timer (.clk, .rst_n, .sync, .offset);

  assign trigger     = (state == IDLE) && hit && !fifo_full;
  assign frame_start = trigger || ((state == ACTIVE) && (phase == '0));
  assign frame_end   = (state == ACTIVE) && (phase == PW'(FRAME_CYCLES-1));
  assign cnt_en      = trigger || (state == ACTIVE);

  l2_event_counter #(.N_L1(N_L1)) u_cnt (
    .clk, .rst_n, .en(cnt_en), .frame_start, .level, .count
  );

  always_comb begin
    push     = 1'b0;
    push_pkt = make_l2_time(offset);
    drop     = 1'b0;
    if (state == IDLE && hit) begin
      push = !fifo_full;
      drop = fifo_full;
    end else if (frame_end && count != '0) begin
      push     = !fifo_full;
      drop     = fifo_full;
      push_pkt = make_l2_event(seq, count);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE;
      phase <= '0;
      seq   <= '0;
    end else begin
      case (state)
        IDLE: if (trigger) begin
          state <= ACTIVE;
          phase <= PW'(1);
          seq   <= SEQ_W'(1);
        end
        ACTIVE: begin
          if (frame_end) begin
            phase <= '0;
            if (seq == '1) state <= IDLE;
            else           seq   <= seq + 1'b1;
          end else begin
            phase <= phase + 1'b1;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  sync_fifo #(.WIDTH(L2PKT_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .push, .din(push_pkt),
    .pop(out_valid && out_ready),
    .dout(out_data), .empty(fifo_empty), .full(fifo_full), .level(fill_level)
  );
  assign out_valid = !fifo_empty;

  // The frame sequencing needs at least two cycles per frame.
  initial assert (FRAME_CYCLES >= 2) else $error("l2_node: FRAME_CYCLES must be >= 2");
endmodule
