// af_pack: encode sign, base-4 exponent and explicit mantissa into the
// AetherFloat code, the inverse of af_unpack.
//
// Positive values store {E, M} as they are; negative values store them
// bitwise inverted behind a set sign bit (one's complement), a single XOR row
// driven by the sign. The resulting code is monotonic as a signed integer:
// +0 is all zeros, -0 is all ones (-1), and the reserved maximum exponent
// lands at both ends of the integer range. The sign goes straight to the
// code's top bit. Purely combinational.
module af_pack #(
  parameter int EW = 4,
  parameter int MW = 3,
  localparam int N = 1 + EW + MW
) (
  input  logic          s,
  input  logic [EW-1:0] e,
  input  logic [MW-1:0] m,
  output logic [N-1:0]  x
);
  always_comb x = {s, {e, m} ^ {(N-1){s}}};
endmodule
