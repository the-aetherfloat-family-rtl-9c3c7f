// sr_lfsr: shared pseudo-random source for stochastic rounding.
//
// A 32-bit Galois LFSR (right-shifting: the bit shifted out is fed back by
// XOR into the tap positions of POLY) advances once per cycle with step set.
// Its low SR bits are the random word broadcast to every MAC lane of one
// vector, so one generator serves a chunk of lanes (16 in the paper's
// proposed configuration) instead of one per lane. The 32-bit Galois form and
// the broadcast are from the paper; the polynomial
// x^32 + x^22 + x^2 + x + 1 (maximal length), the seed and the choice of the
// low bits as the word are this design's. A zero seed is replaced by SEED
// because the all-zero state is a lock-up state. Reset: asynchronous, to SEED.
module sr_lfsr #(
  parameter int           SR   = 8,
  parameter logic [31:0]  POLY = 32'h8020_0003,
  parameter logic [31:0]  SEED = 32'h1357_9BDF
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          step,
  input  logic          load,
  input  logic [31:0]   seed,
  output logic [31:0]   state,
  output logic [SR-1:0] rnd
);
  logic [31:0] nxt;

  always_comb begin
    nxt = (state >> 1) ^ (state[0] ? POLY : 32'h0);
    rnd = state[SR-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     state <= SEED;
    else if (load)  state <= (seed == 32'h0) ? SEED : seed;
    else if (step)  state <= nxt;
  end
endmodule
