// af_round: base-4 normaliser and rounder that turns the adder's exact
// sum into an AetherFloat code.
//
// Input t is the magnitude of the sum in a fixed-point word: value =
// t / 2^FW * 4^(emax - BIAS), with 4 integer bits (two base-4 digits) and FW
// fraction bits. The leading non-zero 2-bit digit of t fixes the result
// exponent er = emax + (digit offset). When er would drop below 1 it is held at
// 1 and the mantissa is taken at that scale: the branchless subnormal rule,
// which leaves a mantissa with a zero leading pair and exponent field 0. The
// MW bits starting at the leading digit form the mantissa; the bits below it
// decide the rounding:
//   nearest-even  round bit and sticky, ties to an even mantissa;
//   stochastic    the SR fraction bits right below the mantissa are added to
//                 the shared random word rnd; a carry out rounds up, so the
//                 probability of rounding up equals the fraction (to SR bits).
// A mantissa that rounds past all ones re-normalises one digit up. An exponent
// reaching the reserved maximum becomes Inf (max exponent, mantissa 0); NaN is
// max exponent with an all-ones mantissa. Stochastic rounding itself is from
// the paper; nearest-even as the deterministic mode, the SR word width and the
// Inf-on-overflow rule are this design's choices. Purely combinational.
module af_round #(
  parameter int EW   = 4,
  parameter int MW   = 3,
  parameter int SR   = 8,                      // random bits per rounding
  parameter int FW   = 20,                     // fraction bits of t (even)
  parameter int PEW  = EW + 3,                 // signed exponent width
  localparam int N   = 1 + EW + MW,
  localparam int WW  = 4 + FW
) (
  input  logic                  s,           // sign of the sum
  input  logic [WW-1:0]         t,           // magnitude of the sum
  input  logic signed [PEW-1:0] emax,        // exponent of the integer digit
  input  logic                  zero_neg,    // sign to give an exact zero
  input  logic                  mode,        // af_pkg::rnd_mode_e
  input  logic [SR-1:0]         rnd,         // random word (stochastic mode)
  input  logic                  exc_nan,
  input  logic                  exc_inf,
  input  logic                  exc_sign,
  output logic [N-1:0]          y,
  output logic                  inexact,
  output logic                  rounded_up,
  output logic                  overflow,
  output logic                  subnormal
);
  localparam int ND   = WW / 2;                // digits in t
  localparam int FD   = FW / 2;                // fraction digits
  localparam int SHW  = PEW + 2;
  localparam int EMAX = (1 << EW) - 1;         // reserved exponent

  logic signed [SHW-1:0] lead, er_n, er, sh, er_f;
  logic                  found;
  logic [WW-1:0]         q, lost_mask;
  logic                  lost;
  logic [MW-1:0]         mnt;
  logic [MW:0]           mnt_r;
  logic                  rbit, stk, up;
  logic [SR-1:0]         frac;
  logic [SR:0]           srsum;
  logic [EW-1:0]         e_out;
  logic [MW-1:0]         m_out;
  logic                  s_out;
  logic [FW+1-MW:0]      below;                // all bits below the mantissa

  always_comb begin
    // leading non-zero base-4 digit of t
    lead  = SHW'(-FD);
    found = 1'b0;
    for (int i = ND - 1; i >= 0; i--) begin
      if (!found && (t[2*i +: 2] != 2'b00)) begin
        lead  = SHW'(i - FD);
        found = 1'b1;
      end
    end
    er_n = SHW'(emax) + lead;
    er   = (er_n < SHW'(1)) ? SHW'(1) : er_n;
    sh   = er - SHW'(emax);                   // digits to move right (<0: left)

    // bring the digit of exponent er to the integer digit position
    if (sh >= 0) begin
      q         = t >> (2 * sh);
      lost_mask = ~({WW{1'b1}} << (2 * sh));
      lost      = |(t & lost_mask);
    end else begin
      q         = t << (-2 * sh);
      lost_mask = '0;
      lost      = 1'b0;
    end

    mnt   = q[FW+1 -: MW];
    below = q[FW+1-MW : 0];
    rbit  = below[FW+1-MW];
    stk   = (|below[FW-MW:0]) | lost;
    frac  = below[FW+1-MW -: SR];
    srsum = {1'b0, frac} + {1'b0, rnd};

    inexact = rbit | stk;
    if (mode == af_pkg::RND_STOCHASTIC)
      up = srsum[SR];
    else
      up = rbit & (stk | mnt[0]);

    mnt_r = {1'b0, mnt} + (MW+1)'(up);
    er_f  = er;
    if (mnt_r[MW]) begin                      // rounded past all ones
      mnt_r = (MW+1)'(1) << (MW - 2);
      er_f  = er + SHW'(1);
    end

    overflow  = 1'b0;
    subnormal = 1'b0;
    s_out     = s;
    if (er_f >= SHW'(EMAX)) begin
      overflow = 1'b1;
      e_out    = EW'(EMAX);
      m_out    = '0;
    end else if (mnt_r[MW-1 -: 2] == 2'b00) begin
      subnormal = (mnt_r != '0);
      e_out     = '0;
      m_out     = mnt_r[MW-1:0];
      if (mnt_r == '0 && t == '0) s_out = zero_neg;
    end else begin
      e_out = er_f[EW-1:0];
      m_out = mnt_r[MW-1:0];
    end

    rounded_up = up;
    if (exc_nan) begin
      s_out = 1'b0; e_out = '1; m_out = '1;
      inexact = 1'b0; rounded_up = 1'b0; overflow = 1'b0; subnormal = 1'b0;
    end else if (exc_inf) begin
      s_out = exc_sign; e_out = '1; m_out = '0;
      inexact = 1'b0; rounded_up = 1'b0; overflow = 1'b0; subnormal = 1'b0;
    end
  end

  af_pack #(.EW(EW), .MW(MW)) u_pack (.s(s_out), .e(e_out), .m(m_out), .x(y));
endmodule
