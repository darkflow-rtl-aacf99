// l2_fine_timer -- 15-bit relative time counter of an L2 node, 2 ns per count
// at the 500 MHz clock.
//
// The counter is realigned by the global time sync broadcast from the L3
// absolute timer: sync is high in the last cycle of an epoch, and the counter
// reads 0 in the first cycle of the next epoch, so in every cycle
// offset == absolute_time - epoch_start. The value sampled at the first photon
// becomes the 15-bit offset of the L2 time packet. If no sync arrives the
// counter saturates at its maximum instead of wrapping (this design's choice;
// with the 10 us epoch it never gets there: 5000 < 32767).
module l2_fine_timer
  import darkflow_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                sync,
  output logic [OFFSET_W-1:0] offset
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              offset <= '0;
    else if (sync)           offset <= '0;
    else if (offset != '1)   offset <= offset + 1'b1;
  end
endmodule
