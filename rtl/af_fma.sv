// af_fma: combinational AetherFloat fused multiply-add, y = c + a * b,
// rounded once, to nearest-even or stochastically.
//
// Datapath, in order:
//   1. af_unpack strips the one's complement of a, b and c (one XOR row each).
//   2. af_mul forms the MW x MW explicit-mantissa product and the product
//      exponent; subnormals take the same path with effective exponent 1.
//   3. The product is brought to its leading base-4 digit (at most MW digits
//      of left shift) so that both addends lie in [1,4) * 4^e, or below for a
//      subnormal or non-canonical accumulator.
//   4. The addend with the smaller exponent is aligned by af_align, the
//      multiplexer that shifts by whole digits (ALIGN_STAGES = 2 stages:
//      0..3 digits); farther apart it only leaves a sticky bit, which is
//      placed in a bottom bit that no operand bit reaches.
//   5. Add or subtract (sign-magnitude), take the magnitude, and hand it to
//      af_round for normalisation, rounding and exception encoding.
// The word has FW fraction bits, so no bit is lost within the aligner's
// reach: then both rounding modes round the exact c + a*b. Beyond it
// (2^ALIGN_STAGES digits or more) the smaller addend acts as an epsilon of its
// sign. Nearest-even is still exact then; the stochastic fraction sees only
// the larger addend, so such a small addend is never rounded up into the sum.
// With the paper's 2 stages that limit is 4 digits. For stochastic rounding to
// be exact as well, the reach must pass the SR fraction bits:
// 2^ALIGN_STAGES >= (MW + SR + 3) / 2, i.e. 3 stages for AF8 and 4 for AF16
// with SR = 8.
// Exceptions: any NaN, Inf*0 and Inf-Inf give NaN; otherwise an Inf operand
// gives Inf. An exact zero sum is +0 unless both addends are negative.
// The structure (explicit-mantissa array, 2-digit-pair alignment, branchless
// subnormals, stochastic rounding) follows the paper; the fused single
// rounding, the accumulator in the operand format and the exception rules are
// this design's own choices.
module af_fma #(
  parameter int EW   = 4,
  parameter int MW   = 3,
  parameter int BIAS = 7,
  parameter int SR   = 8,
  parameter int ALIGN_STAGES = 2,
  localparam int N   = 1 + EW + MW,
  localparam int PEW = EW + 3,
  localparam int FW  = 2 * ((2*MW - 2 + 2*((1 << ALIGN_STAGES) - 1) + SR + 3) / 2),
  localparam int WW  = 4 + FW,
  localparam int DW  = (ALIGN_STAGES + 1 > 6) ? ALIGN_STAGES + 1 : 6
) (
  input  logic [N-1:0]  a,
  input  logic [N-1:0]  b,
  input  logic [N-1:0]  c,            // addend (accumulator)
  input  logic          mode,         // af_pkg::rnd_mode_e
  input  logic [SR-1:0] rnd,          // random word for stochastic mode
  output logic [N-1:0]  y,
  output logic          inexact,
  output logic          rounded_up,
  output logic          overflow,
  output logic          subnormal,
  output logic          far_align     // addends 2^ALIGN_STAGES or more digits apart
);
  // unpacked operands
  logic          sa, sb, sc;
  logic [N-2:0]  ua, ub, uc;
  logic [EW-1:0] ea, eb, ec, eae, ebe, ece;
  logic [MW-1:0] ma, mb, mc;
  logic          za, zb, zc, suba, subb, subc;
  logic          ia, ib, ic, na, nb, nc, nca, ncb, ncc;

  // u, e, is_sub and non_canon are not used here (the effective exponent
  // covers subnormals on its own); they stay named for visibility.
  af_unpack #(.EW(EW), .MW(MW)) u_ua (.x(a), .s(sa), .u(ua), .e(ea), .e_eff(eae), .m(ma),
    .is_zero(za), .is_sub(suba), .is_inf(ia), .is_nan(na), .non_canon(nca));
  af_unpack #(.EW(EW), .MW(MW)) u_ub (.x(b), .s(sb), .u(ub), .e(eb), .e_eff(ebe), .m(mb),
    .is_zero(zb), .is_sub(subb), .is_inf(ib), .is_nan(nb), .non_canon(ncb));
  af_unpack #(.EW(EW), .MW(MW)) u_uc (.x(c), .s(sc), .u(uc), .e(ec), .e_eff(ece), .m(mc),
    .is_zero(zc), .is_sub(subc), .is_inf(ic), .is_nan(nc), .non_canon(ncc));

  // product
  logic [2*MW-1:0]       p;
  logic signed [PEW-1:0] ep;
  af_mul #(.EW(EW), .MW(MW), .BIAS(BIAS)) u_mul (.ma(ma), .mb(mb), .ea_eff(eae), .eb_eff(ebe),
    .p(p), .ep(ep));

  logic [2*MW-1:0]       pn;          // product with non-zero top digit
  logic signed [PEW-1:0] epn;         // its exponent, value pn/2^(2MW-2)*4^(epn-BIAS)
  logic                  pz, sp;
  logic [WW-1:0]         sig_p, sig_c, sig_big, sig_small, small_al, small_in;
  logic signed [PEW-1:0] e_big, dexp;
  logic                  s_big, s_small, swap, al_st;
  logic [DW-1:0]         d;
  logic [WW:0]           sum;
  logic [WW-1:0]         t;
  logic                  s_res, zero_neg;
  logic                  x_nan, x_inf, x_sgn, p_inf;

  always_comb begin
    sp  = sa ^ sb;
    pz  = (p == '0);
    pn  = p;
    epn = ep + PEW'(1);
    for (int k = 0; k < MW; k++) begin
      if (!pz && pn[2*MW-1 -: 2] == 2'b00) begin
        pn  = pn << 2;
        epn = epn - PEW'(1);
      end
    end
    sig_p = WW'(pn) << (FW - (2*MW - 2));
    sig_c = WW'(mc) << (FW - (MW - 2));

    // the addend with the larger exponent is the big one; zero addends are small
    if (zc)      swap = 1'b1;
    else if (pz) swap = 1'b0;
    else         swap = (epn > signed'({{(PEW-EW){1'b0}}, ece}));
    if (swap) begin
      sig_big = sig_p; e_big = epn; s_big = sp;
      sig_small = sig_c; s_small = sc;
      dexp = epn - signed'({{(PEW-EW){1'b0}}, ece});
    end else begin
      sig_big = sig_c; e_big = signed'({{(PEW-EW){1'b0}}, ece}); s_big = sc;
      sig_small = sig_p; s_small = sp;
      dexp = signed'({{(PEW-EW){1'b0}}, ece}) - epn;
    end
    if (zc || pz) dexp = '0;
    d = (dexp > PEW'((1 << DW) - 1)) ? '1 : dexp[DW-1:0];
  end

  af_align #(.W(WW), .DW(DW), .STAGES(ALIGN_STAGES)) u_align (.x(sig_small), .d(d), .y(small_al), .sticky(al_st));

  always_comb begin
    small_in = small_al | WW'(al_st);
    if (s_big ^ s_small) sum = {1'b0, sig_big} - {1'b0, small_in};
    else                 sum = {1'b0, sig_big} + {1'b0, small_in};
    if ((s_big ^ s_small) && sum[WW]) begin
      t     = WW'(-sum);
      s_res = ~s_big;
    end else begin
      t     = sum[WW-1:0];
      s_res = s_big;
    end
    zero_neg  = sp & sc;
    far_align = !(zc || pz) && (d >= DW'(1 << ALIGN_STAGES));

    p_inf = (ia & !zb) | (ib & !za);
    x_nan = na | nb | nc | (ia & zb) | (za & ib) | (p_inf & ic & (sp != sc));
    x_inf = !x_nan & (p_inf | ic);
    x_sgn = p_inf ? sp : sc;
  end

  af_round #(.EW(EW), .MW(MW), .SR(SR), .FW(FW), .PEW(PEW)) u_round (
    .s(s_res), .t(t), .emax(e_big), .zero_neg(zero_neg), .mode(mode), .rnd(rnd),
    .exc_nan(x_nan), .exc_inf(x_inf), .exc_sign(x_sgn),
    .y(y), .inexact(inexact), .rounded_up(rounded_up), .overflow(overflow),
    .subnormal(subnormal));
endmodule
