// af_vector_unit: one SIMD vector of AetherFloat MAC lanes with a shared
// stochastic-rounding generator and the integer bypass ALU.
//
// LANES af_mac lanes work in lock step. The format defaults to AF8 (sign,
// 4-bit base-4 exponent with bias 7, 3-bit explicit mantissa); EW=7, MW=8,
// BIAS=63 gives an AF16 vector. The lanes work: on a cycle with mac_en every lane adds
// a[i]*b[i] to its accumulator; acc_clr starts new sums. With
// rnd_mode = RND_NEAREST_EVEN the lanes round deterministically (inference and
// the QAT forward pass); with RND_STOCHASTIC all lanes receive the same
// SR-bit word from one 32-bit Galois LFSR, which then steps once per MAC
// cycle: one generator per LANES MACs (16, the paper's proposed chunk).
// The integer ALU takes either the accumulators (alu_src_acc = 1, e.g. a ReLU
// or NaN filter on the MAC results, or max-pooling over lanes) or the alu_a
// inputs, with alu_b as second operand, and answers in the same cycle.
// Timing: accumulators and their flags change one cycle after mac_en or
// acc_clr; the ALU outputs are combinational. Reset: asynchronous, active low;
// accumulators to +0, LFSR to its seed. The lane count, the ALU coupling and
// the port set are this design's choices around the paper's blocks.
// ALIGN_STAGES (default 2, the paper's 2-stage multiplexer) sets the aligner
// depth of every lane; an AF16 vector that accumulates gradients with
// stochastic rounding wants 4 (see af_fma).
module af_vector_unit #(
  parameter int LANES = 16,
  parameter int SR    = af_pkg::SR_BITS_DEFAULT,
  parameter int EW    = af_pkg::AF8_EW,
  parameter int MW    = af_pkg::AF8_MW,
  parameter int BIAS  = af_pkg::AF8_BIAS,
  parameter int ALIGN_STAGES = 2,
  localparam int N    = 1 + EW + MW
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // MAC control and operands
  input  logic                     mac_en,
  input  logic                     acc_clr,
  input  af_pkg::rnd_mode_e        rnd_mode,
  input  logic [LANES-1:0][N-1:0]  a,
  input  logic [LANES-1:0][N-1:0]  b,
  output logic [LANES-1:0][N-1:0]  acc,
  output logic [LANES-1:0]         inexact,
  output logic [LANES-1:0]         rounded_up,
  output logic [LANES-1:0]         overflow,
  output logic [LANES-1:0]         subnormal,
  output logic [LANES-1:0]         far_align,
  // shared random source
  input  logic                     lfsr_load,
  input  logic [31:0]              lfsr_seed,
  output logic [31:0]              lfsr_state,
  // integer bypass ALU
  input  af_pkg::alu_op_e          alu_op,
  input  logic                     alu_src_acc,
  input  logic [LANES-1:0][N-1:0]  alu_a,
  input  logic [LANES-1:0][N-1:0]  alu_b,
  output logic [LANES-1:0][N-1:0]  alu_y,
  output logic [N-1:0]             pool_max
);
  logic [SR-1:0]             rnd;
  logic                      sr_step;
  logic [LANES-1:0][N-1:0]   alu_in;

  assign sr_step = mac_en && (rnd_mode == af_pkg::RND_STOCHASTIC);

  sr_lfsr #(.SR(SR)) u_lfsr (
    .clk(clk), .rst_n(rst_n), .step(sr_step), .load(lfsr_load), .seed(lfsr_seed),
    .state(lfsr_state), .rnd(rnd));

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    af_mac #(.EW(EW), .MW(MW), .BIAS(BIAS), .SR(SR), .ALIGN_STAGES(ALIGN_STAGES)) u_mac (
      .clk(clk), .rst_n(rst_n), .clr(acc_clr), .en(mac_en),
      .a(a[i]), .b(b[i]), .mode(rnd_mode), .rnd(rnd), .acc(acc[i]),
      .inexact(inexact[i]), .rounded_up(rounded_up[i]), .overflow(overflow[i]),
      .subnormal(subnormal[i]), .far_align(far_align[i]));
  end

  assign alu_in = alu_src_acc ? acc : alu_a;

  af_int_alu #(.N(N), .LANES(LANES)) u_alu (
    .op(alu_op), .a(alu_in), .b(alu_b), .y(alu_y), .pool_max(pool_max));
endmodule
