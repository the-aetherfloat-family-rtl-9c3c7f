// af_mul: explicit-mantissa multiplier of the AetherFloat MAC.
//
// With no hidden bit, the MW x MW mantissa product is a plain partial-product
// array: MW rows of AND gates (row i = a & b[i], shifted by i) summed into a
// 2*MW-bit product P. For AF8 this is the 3x3 array the format is built
// around. The exponent path adds the two effective (subnormal-adjusted) base-4
// exponents and removes one bias, giving the product's biased exponent ep,
// which may fall below 1 or above the format's maximum; it is signed.
// The product value is P / 2^(2*(MW-2)) * 4^(ep - BIAS), exactly
// (Ma/2^(MW-2)) * (Mb/2^(MW-2)) * 4^(Ea + Eb - 2*BIAS).
// Subnormal operands need no special case because their effective exponent
// is 1. Purely combinational.
module af_mul #(
  parameter int EW   = 4,
  parameter int MW   = 3,
  parameter int BIAS = 7,
  localparam int PEW = EW + 3           // signed product exponent width
) (
  input  logic [MW-1:0]         ma,
  input  logic [MW-1:0]         mb,
  input  logic [EW-1:0]         ea_eff,
  input  logic [EW-1:0]         eb_eff,
  output logic [2*MW-1:0]       p,      // mantissa product
  output logic signed [PEW-1:0] ep      // biased product exponent
);
  logic [2*MW-1:0] pp [MW];             // partial products

  always_comb begin
    for (int i = 0; i < MW; i++)
      pp[i] = (2*MW)'(ma & {MW{mb[i]}}) << i;
    p = '0;
    for (int i = 0; i < MW; i++)
      p = p + pp[i];
    ep = PEW'(signed'({1'b0, ea_eff})) + PEW'(signed'({1'b0, eb_eff})) - PEW'(BIAS);
  end
endmodule
