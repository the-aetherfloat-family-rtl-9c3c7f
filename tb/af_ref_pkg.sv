// af_ref_pkg: format-generic arithmetic reference model of AetherFloat,
// used by the AF16 testbench (af8_ref_pkg is the AF8 special case).
//
// Values are exact signed 640-bit integers in units of 2^-U, where U leaves
// 34 bits below the smallest product of two subnormals; that is enough for
// AF16 (products span about 2^-260 to 2^256). Value of a code:
//   (-1)^S * M / 2^(MW-2) * 4^(max(E,1) - BIAS).
// Rounding searches the exponent e >= 1 whose range [1,4)*4^(e-BIAS) holds
// the result, divides by the quantum 2^-(MW-2)*4^(e-BIAS) and rounds the
// quotient to nearest-even or stochastically (SR-bit truncated fraction plus
// the random word, round up on carry). Addends FAR or more base-4 digits
// apart: the one with the smaller exponent counts only as an epsilon of its
// sign, as in the datapath's aligner (FAR = 2^stages, 4 for 2 stages).
package af_ref_pkg;

  typedef logic signed [639:0] wval_t;

  class af_model #(int EW = 4, int MW = 3, int BIAS = 7, int SR = 8, int FAR = 4);
    localparam int N     = 1 + EW + MW;
    localparam int EMAXC = (1 << EW) - 1;
    localparam int U     = 2 * (MW - 2) + 4 * BIAS - 4 + 34;

    static function automatic wval_t pow2(int k);     // 2^k units, k >= 0
      return wval_t'(1) <<< k;
    endfunction

    static function automatic void dec(logic [N-1:0] x, output bit s, output int e,
                                       output int m);
      logic [N-2:0] u;
      s = x[N-1];
      u = s ? ~x[N-2:0] : x[N-2:0];
      e = int'(u >> MW);
      m = int'(u & ((1 << MW) - 1));
    endfunction

    static function automatic logic [N-1:0] enc(bit s, int e, int m);
      logic [N-2:0] u = (N-1)'((e << MW) | m);
      return s ? {1'b1, ~u} : {1'b0, u};
    endfunction

    static function automatic wval_t mag(logic [N-1:0] x);
      bit s; int e, m;
      dec(x, s, e, m);
      if (e == 0) e = 1;
      return wval_t'(m) <<< (2 * e - 2 * BIAS - (MW - 2) + U);
    endfunction

    static function automatic logic [N-1:0] round_val(bit sg, wval_t mg, bit zero_neg,
                                                      bit sr, int rnd);
      int    er;
      wval_t ulp, q, rem, half, frac;
      bit    up;
      if (mg == 0) return enc(zero_neg, 0, 0);
      er = 1;
      for (int e = 1; e <= EMAXC + 1; e++)
        if (mg >= pow2(2 * e - 2 * BIAS + U)) er = e;
      ulp  = pow2(2 * er - 2 * BIAS - (MW - 2) + U);
      q    = mg / ulp;
      rem  = mg % ulp;
      half = ulp >>> 1;
      if (sr) begin
        frac = (rem <<< SR) / ulp;
        up   = (frac + wval_t'(rnd)) >= pow2(SR);
      end else
        up = (rem > half) || ((rem == half) && q[0]);
      q = q + wval_t'(up);
      if (q == pow2(MW)) begin
        q  = pow2(MW - 2);
        er = er + 1;
      end
      if (er >= EMAXC)        return enc(sg, EMAXC, 0);
      if (q < pow2(MW - 2))   return enc(sg, 0, int'(q));
      return enc(sg, er, int'(q));
    endfunction

    static function automatic logic [N-1:0] fma(logic [N-1:0] a, logic [N-1:0] b,
                                                logic [N-1:0] c, bit sr, int rnd);
      bit    sa, sb, sc, sp, pinf, ainf, binf, cinf, anan, bnan, cnan, az, bz, cz;
      int    ea, ma, eb, mb, ec, mc, ep;
      wval_t p, cv, x;
      dec(a, sa, ea, ma);
      dec(b, sb, eb, mb);
      dec(c, sc, ec, mc);
      anan = (ea == EMAXC) && (ma == (1 << MW) - 1);
      bnan = (eb == EMAXC) && (mb == (1 << MW) - 1);
      cnan = (ec == EMAXC) && (mc == (1 << MW) - 1);
      ainf = (ea == EMAXC) && !anan;
      binf = (eb == EMAXC) && !bnan;
      cinf = (ec == EMAXC) && !cnan;
      az = (ma == 0) && (ea != EMAXC);
      bz = (mb == 0) && (eb != EMAXC);
      cz = (mc == 0) && (ec != EMAXC);
      sp = sa ^ sb;
      pinf = (ainf && !bz) || (binf && !az);
      if (anan || bnan || cnan || (ainf && bz) || (az && binf) || (pinf && cinf && (sp != sc)))
        return enc(0, EMAXC, (1 << MW) - 1);
      if (pinf) return enc(sp, EMAXC, 0);
      if (cinf) return enc(sc, EMAXC, 0);
      if (ea == 0) ea = 1;
      if (eb == 0) eb = 1;
      p  = wval_t'(ma * mb) <<< (2 * (ea + eb) - 4 * BIAS - 2 * (MW - 2) + U);
      cv = sc ? -mag(c) : mag(c);
      if (p != 0 && !cz) begin
        ep = -4 * BIAS;
        for (int e = -4 * BIAS; e < 2 * EMAXC + 4; e++)
          if (2 * e - 2 * BIAS + U >= 0 && 2 * e - 2 * BIAS + U < 630 &&
              p >= pow2(2 * e - 2 * BIAS + U)) ep = e;
        if (ec == 0) ec = 1;
        if (ec - ep >= FAR)      p  = 1;
        else if (ep - ec >= FAR) cv = sc ? -1 : 1;
      end
      if (sp) p = -p;
      x = cv + p;
      return round_val(x < 0, (x < 0) ? -x : x, sp & sc, sr, rnd);
    endfunction
  endclass

endpackage
