// af_pkg: constants and types shared by the AetherFloat datapath.
//
// An AetherFloat code is an N-bit signed integer: one sign bit, an EW-bit
// exponent in base 4 and an MW-bit explicit mantissa (no hidden bit). The
// radix point of the mantissa sits after its top two bits, so a mantissa M
// stands for M / 2^(MW-2). Negative numbers store the exponent and mantissa
// bitwise inverted (one's complement), so that codes compare as signed integers.
// The field widths and biases of AF8 and AF16 are the published ones. The
// encoding of NaN (maximum exponent, all-ones mantissa) follows the statement
// that -NaN sorts to the most negative integer; the Inf encoding and the
// rounding-mode and ALU opcodes are this implementation's own choices.
package af_pkg;

  // AF8: S1 E4 M3, base 4, bias 7 (main configuration)
  localparam int AF8_EW   = 4;
  localparam int AF8_MW   = 3;
  localparam int AF8_BIAS = 7;
  // AF16: S1 E7 M8, base 4, bias 63
  localparam int AF16_EW   = 7;
  localparam int AF16_MW   = 8;
  localparam int AF16_BIAS = 63;

  // Width of the random word handed to each rounder in stochastic mode.
  localparam int SR_BITS_DEFAULT = 8;

  // Rounding of a MAC result.
  typedef enum logic {
    RND_NEAREST_EVEN = 1'b0,   // deterministic (inference, QAT forward pass)
    RND_STOCHASTIC   = 1'b1    // LFSR-driven (on-device gradient accumulation)
  } rnd_mode_e;

  // Operations of the integer-only bypass ALU.
  typedef enum logic [2:0] {
    ALU_MAX     = 3'd0,  // y = max(a, b)
    ALU_MIN     = 3'd1,  // y = min(a, b)
    ALU_RELU    = 3'd2,  // y = max(a, +0)
    ALU_NANFILT = 3'd3,  // y = 0 where a is a NaN code, else a
    ALU_GT      = 3'd4   // y = (a > b) ? 1 : 0
  } alu_op_e;

endpackage
