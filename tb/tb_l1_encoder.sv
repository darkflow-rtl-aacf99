// tb_l1_encoder -- exhaustive check of the thermometer-to-level mapping:
// 000->0, 001->1, 011->2, 111->3, and Vth1 gating for the invalid codes.
module tb_l1_encoder;
  logic [2:0] therm;
  logic [1:0] level;
  int checks = 0, failures = 0;
  // expected level for codes 0..7 (index = therm)
  localparam logic [1:0] EXP [8] = '{2'd0, 2'd1, 2'd0, 2'd2, 2'd0, 2'd3, 2'd0, 2'd3};

  l1_encoder dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int rep = 0; rep < 4; rep++)
      for (int c = 0; c < 8; c++) begin
        therm = 3'(c);
        #1;
        checks++;
        if (level !== EXP[c]) begin
          failures++;
          $display("code %b: got %0d exp %0d", therm, level, EXP[c]);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
