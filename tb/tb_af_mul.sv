// tb_af_mul: exhaustive check of the AF8 multiplier (3x3 array and
// exponent add) and a random check of the AF16 one (8x8 array).
// Expected: P = Ma * Mb, ep = Ea' + Eb' - BIAS with E' = max(E, 1).
module tb_af_mul;
  logic [2:0]         ma, mb;
  logic [3:0]         ea, eb;
  logic [5:0]         p;
  logic signed [6:0]  ep;
  logic [7:0]         ma16, mb16;
  logic [6:0]         ea16, eb16;
  logic [15:0]        p16;
  logic signed [9:0]  ep16;
  int                 checks = 0, failures = 0;

  af_mul #(.EW(4), .MW(3), .BIAS(7))  dut8  (.ma(ma), .mb(mb), .ea_eff(ea), .eb_eff(eb),
    .p(p), .ep(ep));
  af_mul #(.EW(7), .MW(8), .BIAS(63)) dut16 (.ma(ma16), .mb(mb16), .ea_eff(ea16), .eb_eff(eb16),
    .p(p16), .ep(ep16));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 8; i++)
      for (int j = 0; j < 8; j++)
        for (int x = 0; x < 16; x++)
          for (int y = 0; y < 16; y++) begin
            ma = 3'(i); mb = 3'(j); ea = 4'(x); eb = 4'(y);
            #1;
            checks++;
            if (int'(p) != i * j || int'(ep) != x + y - 7) begin
              failures++;
              if (failures < 20) $display("FAIL %0d*%0d e %0d+%0d: p=%0d ep=%0d", i, j, x, y, p, ep);
            end
          end
    for (int k = 0; k < 20000; k++) begin
      ma16 = 8'($urandom); mb16 = 8'($urandom); ea16 = 7'($urandom); eb16 = 7'($urandom);
      #1;
      checks++;
      if (int'(p16) != int'(ma16) * int'(mb16) || int'(ep16) != int'(ea16) + int'(eb16) - 63) begin
        failures++;
        if (failures < 20) $display("FAIL16 %0d*%0d: p=%0d", ma16, mb16, p16);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
