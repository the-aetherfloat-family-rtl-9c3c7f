// af_mac: one AetherFloat multiply-accumulate lane.
//
// Holds an accumulator register in the operand format and, on each cycle
// with en set, replaces it with round(acc + a*b) through af_fma. clr starts a
// new sum: with en it loads round(+0 + a*b), without en it loads +0. The
// rounding mode and the random word come from outside, so that one LFSR can
// serve a whole vector of lanes. One operation per cycle; the result is
// visible on acc one cycle after the operands. The status flags of the last
// operation are registered with it. The paper gives the MAC's datapath
// (3x3 explicit array, 2-digit alignment, adder, stochastic rounding of
// accumulations); the accumulator width, the register and clr/en timing are
// this design's choices. Reset is asynchronous, active low, to +0.
// ALIGN_STAGES sets the aligner depth (default 2, see af_fma).
module af_mac #(
  parameter int EW   = 4,
  parameter int MW   = 3,
  parameter int BIAS = 7,
  parameter int SR   = 8,
  parameter int ALIGN_STAGES = 2,
  localparam int N   = 1 + EW + MW
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          en,
  input  logic [N-1:0]  a,
  input  logic [N-1:0]  b,
  input  logic          mode,         // af_pkg::rnd_mode_e
  input  logic [SR-1:0] rnd,
  output logic [N-1:0]  acc,
  output logic          inexact,
  output logic          rounded_up,
  output logic          overflow,
  output logic          subnormal,
  output logic          far_align
);
  logic [N-1:0] c_in, y;
  logic         f_inx, f_up, f_ovf, f_sub, f_far;

  assign c_in = clr ? '0 : acc;

  af_fma #(.EW(EW), .MW(MW), .BIAS(BIAS), .SR(SR), .ALIGN_STAGES(ALIGN_STAGES)) u_fma (
    .a(a), .b(b), .c(c_in), .mode(mode), .rnd(rnd), .y(y),
    .inexact(f_inx), .rounded_up(f_up), .overflow(f_ovf), .subnormal(f_sub),
    .far_align(f_far));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0;
      {inexact, rounded_up, overflow, subnormal, far_align} <= '0;
    end else if (en) begin
      acc <= y;
      {inexact, rounded_up, overflow, subnormal, far_align} <= {f_inx, f_up, f_ovf, f_sub, f_far};
    end else if (clr) begin
      acc <= '0;
      {inexact, rounded_up, overflow, subnormal, far_align} <= '0;
    end
  end
endmodule
