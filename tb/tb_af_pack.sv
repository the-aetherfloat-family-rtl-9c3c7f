// tb_af_pack: exhaustive check of the AF8 encoder and a random AF16 check.
// Expected codes come from integer arithmetic: magnitude U = E*2^MW + M, and
// a negative number is the integer -1 - U. Each code is also unpacked again
// by af_unpack and must give back the fields.
module tb_af_pack;
  logic        s;
  logic [3:0]  e;
  logic [2:0]  m;
  logic [7:0]  x;
  logic        s16;
  logic [6:0]  e16;
  logic [7:0]  m16;
  logic [15:0] x16;
  logic        rs;
  logic [6:0]  ru;
  logic [3:0]  re, ree;
  logic [2:0]  rm;
  logic        rz, rsub, rinf, rnan, rnc;
  int          checks = 0, failures = 0;

  af_pack #(.EW(4), .MW(3)) dut8  (.s(s), .e(e), .m(m), .x(x));
  af_pack #(.EW(7), .MW(8)) dut16 (.s(s16), .e(e16), .m(m16), .x(x16));
  af_unpack #(.EW(4), .MW(3)) u_back (.x(x), .s(rs), .u(ru), .e(re), .e_eff(ree), .m(rm),
    .is_zero(rz), .is_sub(rsub), .is_inf(rinf), .is_nan(rnan), .non_canon(rnc));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int u, want;
    for (int is = 0; is < 2; is++)
      for (int ie = 0; ie < 16; ie++)
        for (int im = 0; im < 8; im++) begin
          s = 1'(is); e = 4'(ie); m = 3'(im);
          #1;
          u = ie * 8 + im;
          want = is ? (-1 - u) : u;
          checks++;
          if ($signed(x) != want || rs != s || re != e || rm != m) begin
            failures++;
            $display("FAIL s=%0d e=%0d m=%0d: got %02h", is, ie, im, x);
          end
        end
    for (int k = 0; k < 20000; k++) begin
      s16 = 1'($urandom); e16 = 7'($urandom); m16 = 8'($urandom);
      #1;
      u = int'(e16) * 256 + int'(m16);
      want = s16 ? (-1 - u) : u;
      checks++;
      if ($signed(x16) != want) begin
        failures++;
        if (failures < 20) $display("FAIL16 %0d %0d %0d: got %04h", s16, e16, m16, x16);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
