// af_int_alu: integer-only SIMD ALU working directly on AetherFloat codes.
//
// Because the one's-complement code of an AetherFloat number orders like a
// signed integer, ReLU, max, min, comparisons and max-pooling need no
// floating-point unit: each lane is a plain signed comparator and a multiplexer.
// NaN filtering is a threshold test: NaN codes are the two extremes of the
// signed range (+NaN = 0111..1, -NaN = 1000..0), so a lane is cleared to +0
// when its code is not strictly between them. pool_max is the signed maximum
// of all a lanes (a max-pooling window as wide as the vector), built as a
// chain of comparators. -0 (all ones, -1 as an integer) sorts just below +0, so
// ReLU maps it to +0. The operations are the paper's examples of the
// integer bypass; the opcode set and the pool width are this design's choice.
// Purely combinational (zero cycles).
module af_int_alu #(
  parameter int N     = 8,
  parameter int LANES = 16
) (
  input  af_pkg::alu_op_e             op,
  input  logic [LANES-1:0][N-1:0]     a,
  input  logic [LANES-1:0][N-1:0]     b,
  output logic [LANES-1:0][N-1:0]     y,
  output logic [N-1:0]                pool_max
);
  localparam logic signed [N-1:0] NAN_POS = {1'b0, {(N-1){1'b1}}};
  localparam logic signed [N-1:0] NAN_NEG = {1'b1, {(N-1){1'b0}}};

  logic signed [N-1:0] sa, sb, mx;

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      sa = signed'(a[i]);
      sb = signed'(b[i]);
      unique case (op)
        af_pkg::ALU_MAX:     y[i] = (sa > sb) ? a[i] : b[i];
        af_pkg::ALU_MIN:     y[i] = (sa < sb) ? a[i] : b[i];
        af_pkg::ALU_RELU:    y[i] = (sa > 0) ? a[i] : '0;
        af_pkg::ALU_NANFILT: y[i] = (sa > NAN_NEG && sa < NAN_POS) ? a[i] : '0;
        af_pkg::ALU_GT:      y[i] = N'(sa > sb);
        default:             y[i] = '0;
      endcase
    end
    mx = signed'(a[0]);
    for (int i = 1; i < LANES; i++)
      if (signed'(a[i]) > mx) mx = signed'(a[i]);
    pool_max = mx;
  end
endmodule
