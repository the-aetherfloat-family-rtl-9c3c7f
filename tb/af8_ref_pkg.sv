// af8_ref_pkg: arithmetic reference model of AF8 used by the testbenches.
//
// It works from the format definition alone, not from the RTL's structure:
// every finite AF8 value and every product of two is an integer multiple of
// 2^-40, so values are held exactly as signed 128-bit integers in units of
// 2^-60 (the spare 20 bits give room for the epsilon below).
//   value(code)  = (-1)^S * M/2 * 4^(E-7)   for E > 0
//                = (-1)^S * M   * 2^-13     for E = 0
// A result is rounded by searching the exponent whose range [1,4)*4^(e-7)
// holds it (at least 1), dividing by that exponent's quantum 2^(2e-15), and
// rounding the quotient to nearest-even or, stochastically, up when the
// SR-bit truncated fraction plus the random word carries out of SR bits.
// Exception rules mirror the documented behaviour of the datapath.
package af8_ref_pkg;

  typedef logic signed [127:0] val_t;

  typedef struct {
    bit   s;
    int   e;
    int   m;
    bit   nan;
    bit   inf;
    bit   zero;
  } dec_t;

  function automatic dec_t decode(logic [7:0] x);
    dec_t d;
    int   u;
    u = x[7] ? (~x[6:0]) & 7'h7f : int'(x[6:0]);
    d.s    = x[7];
    d.e    = u >> 3;
    d.m    = u & 7;
    d.nan  = (d.e == 15) && (d.m == 7);
    d.inf  = (d.e == 15) && (d.m != 7);
    d.zero = (d.m == 0) && (d.e != 15);
    return d;
  endfunction

  // |value| in units of 2^-60 (finite codes only)
  function automatic val_t mag(logic [7:0] x);
    dec_t d = decode(x);
    int   ee = (d.e == 0) ? 1 : d.e;
    // M/2 * 4^(ee-7) = M * 2^(2ee-15) = M * 2^(2ee+45) units
    return val_t'(d.m) <<< (2 * ee + 45);
  endfunction

  function automatic val_t value(logic [7:0] x);
    dec_t d = decode(x);
    return d.s ? -mag(x) : mag(x);
  endfunction

  function automatic logic [7:0] encode(bit s, int e, int m);
    logic [6:0] u = 7'((e << 3) | m);
    return s ? {1'b1, ~u} : {1'b0, u};
  endfunction

  // Round an exact value (sign sg, magnitude mg in 2^-60 units) to AF8.
  function automatic logic [7:0] round_val(bit sg, val_t mg, bit zero_neg, bit sr, int rnd,
                                            int srbits);
    int   er;
    val_t ulp, q, rem, half, frac;
    bit   up;
    if (mg == 0) return encode(zero_neg, 0, 0);
    er = 1;
    for (int e = 1; e < 40; e++)
      if (mg >= (val_t'(1) <<< (2 * e + 46))) er = e;
    ulp  = val_t'(1) <<< (2 * er + 45);
    q    = mg / ulp;
    rem  = mg % ulp;
    half = ulp >>> 1;
    if (sr) begin
      frac = (rem <<< srbits) / ulp;
      up   = (frac + val_t'(rnd)) >= (val_t'(1) <<< srbits);
    end else begin
      up = (rem > half) || ((rem == half) && q[0]);
    end
    q = q + val_t'(up);
    if (q == 8) begin
      q  = 2;
      er = er + 1;
    end
    if (er >= 15) return encode(sg, 15, 0);             // Inf
    if (q < 2)    return encode(sg, 0, int'(q));       // subnormal or zero
    return encode(sg, er, int'(q));
  endfunction

  // Reference c + a*b.
  function automatic logic [7:0] fma(logic [7:0] a, logic [7:0] b, logic [7:0] c, bit sr,
                                      int rnd, int srbits, int far = 4);
    dec_t da = decode(a), db = decode(b), dc = decode(c);
    bit   sp = da.s ^ db.s;
    bit   pinf;
    val_t p, x, cv;
    int   ep, ec;
    pinf = (da.inf && !db.zero) || (db.inf && !da.zero);
    if (da.nan || db.nan || dc.nan || (da.inf && db.zero) || (da.zero && db.inf) ||
        (pinf && dc.inf && (sp != dc.s)))
      return 8'h7f;
    if (pinf)   return encode(sp, 15, 0);
    if (dc.inf) return encode(dc.s, 15, 0);
    // product: (Ma/2)(Mb/2)4^(ea+eb-14) = Ma*Mb * 2^(2(ea+eb)-30) = units 2^(2(ea+eb)+30)
    p = val_t'(da.m * db.m) <<< (2 * (((da.e == 0) ? 1 : da.e) + ((db.e == 0) ? 1 : db.e)) + 30);
    cv = value(c);
    // Addends far (default four) or more base-4 digits apart: the one with the
    // smaller exponent only counts as an epsilon of its sign. The product's exponent
    // is that of its leading digit, the addend's its stored (effective) one.
    if (p != 0 && !dc.zero) begin
      ep = -40;
      for (int e = -40; e < 40; e++)
        if (p >= (val_t'(1) <<< (2 * e + 46))) ep = e;
      ec = (dc.e == 0) ? 1 : dc.e;
      if (ec - ep >= far)      p  = 1;
      else if (ep - ec >= far) cv = dc.s ? -1 : 1;
    end
    if (sp) p = -p;
    x = cv + p;
    return round_val(x < 0, (x < 0) ? -x : x, sp & dc.s, sr, rnd, srbits);
  endfunction

endpackage
