// l3_abs_timer -- absolute timer of the L3 subsystem.
//
// now is a free-running 30-bit count of 2 ns clock cycles. Every
// EPOCH_CYCLES cycles (5000 = 10 us, the paper's synchronisation window) a
// new epoch begins. sync is high in the last cycle of each epoch; it is
// broadcast to every L2 fine timer (which then read 0 in the epoch's first
// cycle) and to the packing engines, which emit a 32-bit absolute time packet
// carrying epoch_time, the value now will have in the epoch's first cycle.
// After reset the first sync comes in the first cycle, so epoch 0 starts at
// time 0 and also gets its time packet. Keeping the absolute time in 2 ns
// units (rather than counting epochs) is this design's choice, made so that
// T_start = Global_Epoch + Offset needs no scaling.
module l3_abs_timer
  import darkflow_pkg::*;
#(
  parameter int unsigned EPOCH_CYCLES = 5000
) (
  input  logic                 clk,
  input  logic                 rst_n,
  output logic [ABSTIME_W-1:0] now,
  output logic                 sync,
  output logic [ABSTIME_W-1:0] epoch_time
);
  localparam int unsigned EW = $clog2(EPOCH_CYCLES);
  logic [EW-1:0] phase;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now   <= '1;                       // next cycle reads 0
      phase <= EW'(EPOCH_CYCLES - 1);
    end else begin
      now   <= now + 1'b1;
      phase <= sync ? '0 : phase + 1'b1;
    end
  end

  assign sync       = (phase == EW'(EPOCH_CYCLES - 1));
  assign epoch_time = now + 1'b1;
endmodule
