// skid_buffer -- valid/ready pipeline stage with a single skid slot.
//
// One output register plus one skid register. in_ready depends only on
// whether the skid slot is free, so ready does not ripple combinationally
// along a chain of stages: when out_ready drops, the word already in flight
// is caught in the skid slot and nothing is lost. A transfer happens on a
// clock edge where valid and ready are both high. Latency is one cycle;
// throughput is one word per cycle. The paper specifies a single-slot skid
// buffer per systolic stage; the two-register form is the standard one.
module skid_buffer #(
  parameter int unsigned WIDTH = 20
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data
);
  logic             skid_valid;
  logic [WIDTH-1:0] skid_data;

  assign in_ready = !skid_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      skid_valid <= 1'b0;
      out_data   <= '0;
      skid_data  <= '0;
    end else if (out_ready || !out_valid) begin
      if (skid_valid) begin
        out_data   <= skid_data;
        out_valid  <= 1'b1;
        skid_valid <= 1'b0;
      end else begin
        out_valid  <= in_valid;
        if (in_valid) out_data <= in_data;
      end
    end else if (in_valid && in_ready) begin
      skid_data  <= in_data;
      skid_valid <= 1'b1;
    end
  end

  // Handshake rule: a valid word is held stable until it is taken.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           out_valid && !out_ready |=> out_valid && $stable(out_data))
    else $error("skid_buffer: output changed while stalled");
endmodule
