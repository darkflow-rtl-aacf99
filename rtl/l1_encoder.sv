// l1_encoder -- maps the 3-bit comparator thermometer code of one L1 unit to
// its 2-bit energy level.
//
//   level 0: sparse or noise-level activity (below Vth1 = Pth)
//   level 1: low photon density      (>= Vth1)
//   level 2: moderate photon density (>= Vth2)
//   level 3: high-density region     (>= Vth3)
//
// The four levels and their meaning follow the paper. How a non-thermometer
// code is resolved is this design's choice: the Vth1 comparator gates the
// others, so raising Pth above Vth2 still suppresses every sum below Pth
// (the zero-suppression role of Pth), and above that the highest comparator
// that fired sets the level. Purely combinational.
module l1_encoder (
  input  logic [2:0] therm,
  output logic [1:0] level
);
  always_comb begin
    if (!therm[0])     level = 2'd0;
    else if (therm[2]) level = 2'd3;
    else if (therm[1]) level = 2'd2;
    else               level = 2'd1;
  end
endmodule
