// sync_fifo -- single-clock first-word-fall-through FIFO.
//
// Used as the 16-bit x 16-entry local FIFO of every L2 node (the default
// parameters) and as the two-entry burst buffer in front of the eDRAM. dout
// shows the oldest entry whenever empty = 0; pop takes it. push is ignored
// when full and pop when empty (both flagged by assertions). level is the fill
// count, full = (level == DEPTH). The organisation (register array, wrapping
// pointers, first-word fall-through) is this design's choice.
module sync_fifo #(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     push,
  input  logic [WIDTH-1:0]         din,
  input  logic                     pop,
  output logic [WIDTH-1:0]         dout,
  output logic                     empty,
  output logic                     full,
  output logic [$clog2(DEPTH+1)-1:0] level
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned LW = $clog2(DEPTH+1);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    rd_ptr, wr_ptr;
  logic             do_push, do_pop;

  assign empty   = (level == '0);
  assign full    = (level == LW'(DEPTH));
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign dout    = mem[rd_ptr];

  function automatic logic [AW-1:0] incr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      level  <= '0;
    end else begin
      if (do_push) wr_ptr <= incr(wr_ptr);
      if (do_pop)  rd_ptr <= incr(rd_ptr);
      level <= level + LW'(do_push) - LW'(do_pop);
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= din;
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full))
    else $error("sync_fifo: push while full");
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty))
    else $error("sync_fifo: pop while empty");
endmodule
