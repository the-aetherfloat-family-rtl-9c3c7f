// tb_af_unpack: exhaustive check of the one's-complement unpack for AF8 and
// a random check for AF16.
//
// Expected fields come from integer arithmetic on the code (a negative code x
// has magnitude -1 - x), not from bit manipulation. It also checks the
// property the encoding exists for: for every pair of non-NaN AF8 codes,
// signed-integer order equals the order of the decoded values.
module tb_af_unpack;
  import af8_ref_pkg::*;

  logic [7:0]  x8;
  logic        s8, z8, sub8, inf8, nan8, nc8;
  logic [6:0]  u8;
  logic [3:0]  e8, ee8;
  logic [2:0]  m8;
  logic [15:0] x16;
  logic        s16, z16, sub16, inf16, nan16, nc16;
  logic [14:0] u16;
  logic [6:0]  e16, ee16;
  logic [7:0]  m16;
  int          checks = 0, failures = 0;

  af_unpack #(.EW(4), .MW(3)) dut8 (.x(x8), .s(s8), .u(u8), .e(e8), .e_eff(ee8), .m(m8),
    .is_zero(z8), .is_sub(sub8), .is_inf(inf8), .is_nan(nan8), .non_canon(nc8));
  af_unpack #(.EW(7), .MW(8)) dut16 (.x(x16), .s(s16), .u(u16), .e(e16), .e_eff(ee16), .m(m16),
    .is_zero(z16), .is_sub(sub16), .is_inf(inf16), .is_nan(nan16), .non_canon(nc16));

  task automatic expect_eq(input string what, input longint got, input longint want);
    checks++;
    if (got != want) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, want);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int v, u, e, m;
    for (int i = -128; i < 128; i++) begin
      x8 = 8'(i);
      #1;
      u = (i < 0) ? (-1 - i) : i;
      e = u / 8;
      m = u % 8;
      expect_eq("s8", s8, i < 0);
      expect_eq("u8", u8, u);
      expect_eq("e8", e8, e);
      expect_eq("m8", m8, m);
      expect_eq("eeff8", ee8, (e == 0) ? 1 : e);
      expect_eq("zero8", z8, (m == 0) && (e != 15));
      expect_eq("sub8", sub8, (e == 0) && (m != 0));
      expect_eq("nan8", nan8, (e == 15) && (m == 7));
      expect_eq("inf8", inf8, (e == 15) && (m != 7));
      expect_eq("nc8", nc8, (e < 15) && ((e == 0) != (m < 2)));
    end
    for (int k = 0; k < 20000; k++) begin
      v = int'($urandom % 65536) - 32768;
      x16 = 16'(v);
      #1;
      u = (v < 0) ? (-1 - v) : v;
      e = u / 256;
      m = u % 256;
      expect_eq("s16", s16, v < 0);
      expect_eq("u16", u16, u);
      expect_eq("e16", e16, e);
      expect_eq("m16", m16, m);
      expect_eq("eeff16", ee16, (e == 0) ? 1 : e);
      expect_eq("nan16", nan16, (e == 127) && (m == 255));
      expect_eq("nc16", nc16, (e < 127) && ((e == 0) != (m < 64)));
    end
    // -NaN is the most negative 16-bit integer
    x16 = 16'h8000;
    #1;
    expect_eq("-NaN16", nan16 && s16, 1);
    // lexicographic order: integer order equals value order for canonical
    // codes (NaN excluded, Inf taken as beyond every finite value, zeros of
    // both signs equal). Non-canonical codes (leading pair 00 with E > 0, or
    // non-zero with E = 0) are outside the format and are skipped.
    for (int i = -127; i < 127; i++)
      for (int j = -127; j < 127; j++) begin
        dec_t di, dj;
        val_t vi, vj;
        di = decode(8'(i));
        dj = decode(8'(j));
        vi = di.inf ? (di.s ? -(val_t'(1) <<< 120) : (val_t'(1) <<< 120)) : value(8'(i));
        vj = dj.inf ? (dj.s ? -(val_t'(1) <<< 120) : (val_t'(1) <<< 120)) : value(8'(j));
        if (i < j && !(di.inf && dj.inf && di.s == dj.s) &&
            !(di.e < 15 && ((di.e == 0) != (di.m < 2))) &&
            !(dj.e < 15 && ((dj.e == 0) != (dj.m < 2)))) begin
          checks++;
          if (!(vi <= vj)) begin
            failures++;
            if (failures < 20) $display("FAIL order %0d %0d", i, j);
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
