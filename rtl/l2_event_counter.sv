// l2_event_counter -- 8-bit event counter of an L2 node.
//
// Sums the 2-bit energy levels of the node's L1 units over one 10 ns frame
// (5 cycles of 2 ns). frame_start marks the first cycle of a frame: the sum
// restarts there and includes that cycle's levels. count is the running sum
// including the current cycle, so in the last cycle of a frame it is the full
// frame total, ready to be written into an event packet. en = 0 holds the
// accumulator. With 16 L1 units the maximum is 16 * 3 * 5 = 240, which fits
// 8 bits; the sum saturates at 255 for other sizes. Using the sum of energy
// levels as the "photon count within each 10 ns window" is this design's
// reading of the paper.
module l2_event_counter
  import darkflow_pkg::*;
#(
  parameter int unsigned N_L1 = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               en,
  input  logic               frame_start,
  input  logic [1:0]         level [N_L1],
  output logic [COUNT_W-1:0] count
);
  logic [COUNT_W-1:0] acc_q;
  logic [COUNT_W+4:0] total;

  always_comb begin
    total = frame_start ? '0 : (COUNT_W+5)'(acc_q);
    for (int i = 0; i < N_L1; i++) total = total + (COUNT_W+5)'(level[i]);
    count = (total > (COUNT_W+5)'({COUNT_W{1'b1}})) ? '1 : total[COUNT_W-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  acc_q <= '0;
    else if (en) acc_q <= count;
  end
endmodule
