// tb_af_round: checks the normaliser/rounder on its own for AF8.
//
// t and emax are drawn at random (sparse and dense t, exponents from far below
// the subnormal range to beyond overflow); the value t * 2^-20 * 4^(emax-7)
// is rounded by the reference model in both modes and compared. Exception
// inputs and signed zeros are checked as directed cases.
module tb_af_round;
  import af8_ref_pkg::*;
  localparam int SR = 8;
  localparam int FW = 20;

  logic              s, zero_neg, mode, exc_nan, exc_inf, exc_sign;
  logic [FW+3:0]     t;
  logic signed [6:0] emax;
  logic [SR-1:0]     rnd;
  logic [7:0]        y;
  logic              inexact, rounded_up, overflow, subnormal;
  int                checks = 0, failures = 0, n_sub = 0, n_ovf = 0, n_up = 0;

  af_round #(.EW(4), .MW(3), .SR(SR), .FW(FW), .PEW(7)) dut (
    .s(s), .t(t), .emax(emax), .zero_neg(zero_neg), .mode(mode), .rnd(rnd),
    .exc_nan(exc_nan), .exc_inf(exc_inf), .exc_sign(exc_sign), .y(y), .inexact(inexact),
    .rounded_up(rounded_up), .overflow(overflow), .subnormal(subnormal));

  task automatic expect_code(input string what, input logic [7:0] want);
    checks++;
    if (y !== want) begin
      failures++;
      if (failures < 20) $display("FAIL %s t=%h emax=%0d mode=%0d rnd=%0d: got %02h expected %02h",
                                  what, t, emax, mode, rnd, y, want);
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
    val_t mg;
    exc_nan = 0; exc_inf = 0; exc_sign = 0;
    for (int k = 0; k < 100000; k++) begin
      s = 1'($urandom); zero_neg = 1'($urandom); mode = 1'($urandom); rnd = SR'($urandom);
      t = 24'($urandom);
      if (k % 4 == 1) t = t >> ($urandom % 24);
      if (k % 4 == 2) t = t & 24'hfc0000;
      emax = 7'(int'($urandom % 34) - 13);
      #1;
      // value = t * 2^-20 * 4^(emax-7) = t * 2^(2emax-34) ; in 2^-60 units: << (2emax+26)
      mg = val_t'(t) <<< (2 * int'(emax) + 26);
      expect_code("rand", round_val(s, mg, zero_neg, mode, int'(rnd), SR));
      if (subnormal) n_sub++;
      if (overflow) n_ovf++;
      if (mode && rounded_up) n_up++;
    end
    t = 24'h100000; emax = 7'sd3; s = 1; mode = 0;
    exc_nan = 1; #1; expect_code("nan", 8'h7f);
    exc_nan = 0; exc_inf = 1; exc_sign = 1; #1; expect_code("-inf", 8'h87);
    exc_inf = 0; t = '0; zero_neg = 1; #1; expect_code("-0", 8'hff);
    zero_neg = 0; #1; expect_code("+0", 8'h00);
    if (n_sub == 0 || n_ovf == 0 || n_up == 0) begin
      failures++;
      $display("coverage: sub=%0d ovf=%0d up=%0d", n_sub, n_ovf, n_up);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
