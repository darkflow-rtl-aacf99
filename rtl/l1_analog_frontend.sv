// l1_analog_frontend -- BEHAVIOURAL MODEL of an analog/mixed-signal part, not
// synthesizable intent.
//
// Models one L1 sensing unit: a 4x4 SPAD array whose avalanche currents are
// summed on a shared load resistor, and three comparators with monotonic
// thresholds Vth1 < Vth2 < Vth3 that quantise the sum into a 3-bit
// thermometer code. The model works in photo-electron units: the analog sum is
// the number of SPADs that fired in the current 2 ns clock cycle, and each
// threshold is given as a photon count. Vth1 is the programmable photon
// threshold Pth (Pth = 1 for single-photon sensitivity, Pth = 2 to suppress a
// noisy node, higher to shed low-intensity hits during bursts).
//
// Interface: spad_hit[i] = 1 when SPAD i fired this cycle; pth, vth2, vth3 in
// photo-electrons; therm[k] = 1 when the sum reaches threshold k+1. Purely
// combinational: the model has no analog delay, so the code is sampled by the
// L2 node on the same clock edge. Treating the sum as a photon count per clock
// cycle is this model's choice; the comparator structure follows the paper.
module l1_analog_frontend #(
  parameter int unsigned N_SPAD = 16
) (
  input  logic [N_SPAD-1:0]         spad_hit,
  input  logic [$clog2(N_SPAD+1)-1:0] pth,
  input  logic [$clog2(N_SPAD+1)-1:0] vth2,
  input  logic [$clog2(N_SPAD+1)-1:0] vth3,
  output logic [2:0]                therm
);
  localparam int unsigned SW = $clog2(N_SPAD+1);
  logic [SW-1:0] analog_sum;

  always_comb begin
    analog_sum = '0;
    for (int i = 0; i < N_SPAD; i++) analog_sum = analog_sum + SW'(spad_hit[i]);
    // pth = 0 would fire on an empty array; a zero threshold is read as 1 PE.
    therm[0] = (analog_sum >= ((pth == '0) ? SW'(1) : pth));
    therm[1] = (analog_sum >= vth2);
    therm[2] = (analog_sum >= vth3);
  end
endmodule
