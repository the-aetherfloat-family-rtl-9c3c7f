// af_align: quad-radix operand alignment shifter.
//
// Because exponents step in powers of 4, the smaller operand of an addition
// only ever moves right by whole 2-bit digits. Stage k of the multiplexer
// shifts by 2^k digits when bit k of the distance d is set, so STAGES stages
// cover 0 .. 2^STAGES-1 digits. The default, STAGES = 2, is the 2-stage
// multiplexer the format is designed around: 0, 1, 2 or 3 digits (0, 2, 4 or 6
// bits). Bits pushed out of the W-bit word are ORed into a sticky flag; a
// distance of 2^STAGES digits or more flushes the whole operand into it.
// The flush rule and the sticky flag are this design's choices (see af_fma
// for what they mean for rounding). Purely combinational.
module af_align #(
  parameter int W      = 24,     // word width
  parameter int DW     = 6,      // width of the digit distance
  parameter int STAGES = 2       // multiplexer stages
) (
  input  logic [W-1:0]  x,
  input  logic [DW-1:0] d,       // distance in base-4 digits
  output logic [W-1:0]  y,
  output logic          sticky
);
  logic [W-1:0] s;
  logic [W-1:0] out_mask;

  always_comb begin
    s        = x;
    out_mask = '0;
    sticky   = 1'b0;
    for (int k = 0; k < STAGES; k++) begin
      if (d[k]) begin
        out_mask = ~({W{1'b1}} << (2 << k));
        sticky   = sticky | (|(s & out_mask));
        s        = s >> (2 << k);
      end
    end
    y = s;
    if (d >= DW'(1 << STAGES)) begin
      y      = '0;
      sticky = |x;
    end
  end
endmodule
