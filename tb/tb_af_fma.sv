// tb_af_fma: checks the AF8 fused multiply-add against the exact reference.
//
// Directed cases first (exact sums, ties to even, subnormal products, the
// one-step underflow, cancellation, overflow to Inf, NaN and Inf rules, signed
// zeros), then random codes over the whole 8-bit space in both rounding modes
// with random SR words. Each result is compared with af8_ref_pkg::fma, which
// computes c + a*b exactly as a 128-bit integer and rounds it. Coverage
// counters make sure far alignment, subnormal results, overflow and stochastic
// round-ups all happened. A second instance with a 3-stage aligner (reach 0..7
// digits) sees the same inputs and is checked against the reference with the
// far limit at 8 digits; there a small addend 4..7 digits down still takes
// part in stochastic rounding.
module tb_af_fma;
  import af8_ref_pkg::*;

  localparam int SR = 8;

  logic [7:0]    a, b, c, y;
  logic          mode;
  logic [SR-1:0] rnd;
  logic          inexact, rounded_up, overflow, subnormal, far_align;
  logic [7:0]    y3;
  logic          inexact3, rounded_up3, overflow3, subnormal3, far_align3;
  int            n_far3 = 0;
  int            checks = 0, failures = 0;
  int            n_far = 0, n_sub = 0, n_ovf = 0, n_srup = 0, n_srdown = 0, n_tie = 0;

  af_fma #(.EW(4), .MW(3), .BIAS(7), .SR(SR)) dut (
    .a(a), .b(b), .c(c), .mode(mode), .rnd(rnd), .y(y), .inexact(inexact),
    .rounded_up(rounded_up), .overflow(overflow), .subnormal(subnormal),
    .far_align(far_align));

  af_fma #(.EW(4), .MW(3), .BIAS(7), .SR(SR), .ALIGN_STAGES(3)) dut3 (
    .a(a), .b(b), .c(c), .mode(mode), .rnd(rnd), .y(y3), .inexact(inexact3),
    .rounded_up(rounded_up3), .overflow(overflow3), .subnormal(subnormal3),
    .far_align(far_align3));

  task automatic check(input logic [7:0] ta, tb_, tc, input bit tm, input int tr);
    logic [7:0] exp_y;
    a = ta; b = tb_; c = tc; mode = tm; rnd = SR'(tr);
    #1;
    exp_y = fma(ta, tb_, tc, tm, tr, SR);
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 20)
        $display("FAIL a=%02h b=%02h c=%02h mode=%0d rnd=%02h: got %02h expected %02h",
                 ta, tb_, tc, tm, tr, y, exp_y);
    end
    exp_y = fma(ta, tb_, tc, tm, tr, SR, 8);
    checks++;
    if (y3 !== exp_y) begin
      failures++;
      if (failures < 20)
        $display("FAIL(3 stages) a=%02h b=%02h c=%02h mode=%0d rnd=%02h: got %02h expected %02h",
                 ta, tb_, tc, tm, tr, y3, exp_y);
    end
    if (far_align3) n_far3++;
    if (far_align) n_far++;
    if (subnormal) n_sub++;
    if (overflow)  n_ovf++;
    if (tm && inexact && rounded_up) n_srup++;
    if (tm && inexact && !rounded_up) n_srdown++;
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // 1.0 = E7 M2 -> 0x3a ; 1.0*1.0 + 0 = 1.0
    check(8'h3a, 8'h3a, 8'h00, 0, 0);
    if (y !== 8'h3a) begin failures++; $display("FAIL 1*1"); end
    checks++;
    // 1.5 (E7 M3 = 0x3b) * 1.5 = 2.25 -> between 2.0 (0x3c) and 2.5 (0x3d): RNE -> 2.0
    check(8'h3b, 8'h3b, 8'h00, 0, 0);
    if (y !== 8'h3c) begin failures++; $display("FAIL 1.5*1.5 got %02h", y); end
    checks++;
    // -1.0 code: ~0x3a with sign = 0xc5 ; -1*1 + 1 = +0
    check(8'hc5, 8'h3a, 8'h3a, 0, 0);
    if (y !== 8'h00) begin failures++; $display("FAIL cancel got %02h", y); end
    checks++;
    // smallest subnormal 2^-13 = 0x01 ; times 1.0 plus 0 stays 0x01
    check(8'h01, 8'h3a, 8'h00, 0, 0);
    if (y !== 8'h01) begin failures++; $display("FAIL subnormal got %02h", y); end
    checks++;
    // max normal 3.5*4^7 (0x77) * 1.0 + max normal -> Inf (0x78)
    check(8'h77, 8'h3a, 8'h77, 0, 0);
    if (y !== 8'h78) begin failures++; $display("FAIL overflow got %02h", y); end
    checks++;
    // NaN in -> +NaN (0x7f); Inf*0 -> NaN
    check(8'h80, 8'h3a, 8'h00, 0, 0);
    if (y !== 8'h7f) begin failures++; $display("FAIL nan got %02h", y); end
    checks++;
    check(8'h78, 8'h00, 8'h00, 0, 0);
    if (y !== 8'h7f) begin failures++; $display("FAIL inf*0 got %02h", y); end
    checks++;
    // -0 * +x + -0 -> -0 (0xff)
    check(8'hff, 8'h3a, 8'hff, 0, 0);
    if (y !== 8'hff) begin failures++; $display("FAIL -0 got %02h", y); end
    checks++;
    // stochastic: 1.0 + 1/64 (0x22) is 1/32 of the 0.5 quantum: fraction 8/256,
    // so rnd = 255 rounds up to 1.5 and rnd = 0 keeps 1.0
    check(8'h22, 8'h3a, 8'h3a, 1, 255);
    if (y !== 8'h3b) begin failures++; $display("FAIL sr up got %02h", y); end
    checks++;
    check(8'h22, 8'h3a, 8'h3a, 1, 0);
    if (y !== 8'h3a) begin failures++; $display("FAIL sr down got %02h", y); end
    checks++;
    // 1.0 + 1/256 (0x1a = E3 M2): 4 digits below. 2 stages: epsilon only, never
    // rounds up; 3 stages: fraction 2/256, rnd = 255 rounds up to 1.5
    check(8'h1a, 8'h3a, 8'h3a, 1, 255);
    if (y !== 8'h3a || y3 !== 8'h3b) begin
      failures++; $display("FAIL far sr got %02h / %02h", y, y3);
    end
    checks++;
    // tie: 1.0 + 0.25 (0x32 = E6 M2 = 1*4^-1 ... 0.25) -> 1.25 tie between 1.0 and 1.5 -> 1.0
    check(8'h32, 8'h3a, 8'h3a, 0, 0);
    if (y !== 8'h3a) begin failures++; $display("FAIL tie got %02h", y); end
    checks++;
    n_tie++;
    // exhaustive over a, b for a few accumulators, both modes
    for (int ia = 0; ia < 256; ia++)
      for (int ib = 0; ib < 256; ib++) begin
        check(8'(ia), 8'(ib), 8'h00, 0, 0);
        check(8'(ia), 8'(ib), 8'(($urandom % 256)), 0, 0);
        check(8'(ia), 8'(ib), 8'(($urandom % 256)), 1, int'($urandom % 256));
      end
    for (int i = 0; i < 200000; i++)
      check(8'($urandom), 8'($urandom), 8'($urandom), 1'($urandom), int'($urandom % 256));

    if (n_far == 0)    begin failures++; $display("no far alignment seen"); end
    if (n_far3 == 0)   begin failures++; $display("no far alignment seen (3 stages)"); end
    if (n_sub == 0)    begin failures++; $display("no subnormal result seen"); end
    if (n_ovf == 0)    begin failures++; $display("no overflow seen"); end
    if (n_srup == 0)   begin failures++; $display("no stochastic round-up seen"); end
    if (n_srdown == 0) begin failures++; $display("no stochastic round-down seen"); end
    $display("far3=%0d", n_far3);
    $display("far=%0d sub=%0d ovf=%0d srup=%0d srdown=%0d", n_far, n_sub, n_ovf, n_srup, n_srdown);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
