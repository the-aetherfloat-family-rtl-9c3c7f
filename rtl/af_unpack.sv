// af_unpack: lexicographic one's-complement unpack of one AetherFloat code.
//
// The sign bit is broadcast to a row of XOR gates that strips the one's
// complement from the N-1 magnitude bits in a single gate level, exactly the
// "mask = X >> (N-1); U = (X ^ mask) & (2^(N-1)-1)" rule. The magnitude U then
// splits into the base-4 exponent E and the explicit mantissa M. For the
// branchless subnormal path the effective exponent is E with its LSB forced to
// 1 when E = 0: E = 0 and E = 1 share one mantissa scale, so no extra MUX is
// needed. A finite code with M = 0 is zero whatever its exponent, as the
// value formula says. Class flags: the all-ones exponent is reserved for exceptions, with
// an all-ones mantissa meaning NaN (so -NaN is the most negative code) and any
// other mantissa meaning Inf; this split of the reserved exponent is this
// design's choice. non_canon flags codes outside the format: E > 0 with a zero
// leading mantissa pair, or E = 0 with a non-zero one (which would duplicate
// E = 1 values; for AF8 the only subnormal mantissas are 0 and 1).
// The sign output is the code's top bit itself. Purely combinational, zero
// latency.
module af_unpack #(
  parameter int EW = 4,
  parameter int MW = 3,
  localparam int N = 1 + EW + MW
) (
  input  logic [N-1:0]  x,          // code
  output logic          s,          // sign
  output logic [N-2:0]  u,          // magnitude {E, M}
  output logic [EW-1:0] e,          // stored exponent
  output logic [EW-1:0] e_eff,      // exponent with E=0 read as 1
  output logic [MW-1:0] m,          // explicit mantissa
  output logic          is_zero,
  output logic          is_sub,     // E = 0, M != 0
  output logic          is_inf,
  output logic          is_nan,
  output logic          non_canon   // E > 0 and leading mantissa pair 00
);
  always_comb begin
    s         = x[N-1];
    u         = x[N-2:0] ^ {(N-1){s}};
    e         = u[N-2:MW];
    m         = u[MW-1:0];
    e_eff     = e | EW'(e == '0);
    is_zero   = (m == '0) && (e != '1);
    is_sub    = (e == '0) && (m != '0);
    is_nan    = (e == '1) && (m == '1);
    is_inf    = (e == '1) && (m != '1);
    non_canon = (e != '1) && ((e == '0) != (m[MW-1 -: 2] == 2'b00));
  end
endmodule
