// tb_l1_analog_frontend -- checks the L1 front-end model: random SPAD hit
// patterns and thresholds against a reference photon count and the three
// comparator decisions (a zero Pth counts as 1 PE).
module tb_l1_analog_frontend;
  logic [15:0] spad_hit;
  logic [4:0]  pth, vth2, vth3;
  logic [2:0]  therm;
  int checks = 0, failures = 0;

  l1_analog_frontend dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 4000; t++) begin
      int n, th1;
      logic [2:0] exp_t;
      spad_hit = 16'($urandom) & 16'($urandom);
      if (t % 7 == 0) spad_hit = '1;
      if (t % 11 == 0) spad_hit = '0;
      pth  = 5'($urandom_range(0, 4));
      vth2 = 5'($urandom_range(2, 9));
      vth3 = 5'($urandom_range(6, 17));
      #1;
      n = 0;
      for (int i = 0; i < 16; i++) if (spad_hit[i]) n++;
      th1 = (pth == 0) ? 1 : int'(pth);
      exp_t = {n >= int'(vth3), n >= int'(vth2), n >= th1};
      checks++;
      if (therm !== exp_t) begin
        failures++;
        if (failures < 10) $display("mismatch hits=%0d pth=%0d v2=%0d v3=%0d got %b exp %b",
                                    n, pth, vth2, vth3, therm, exp_t);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
