// xorshift_rng -- 32-bit Xorshift pseudo-random number generator.
//
// Supplies the random bits used for stochastic rounding in the FP<->BFP
// converters.  The generator is the classic Xorshift: three constant shifts
// and three XORs per step,
//     x ^= x << 13;  x ^= x >> 17;  x ^= x << 5;
// The use of Xorshift for stochastic rounding follows the paper; the shift
// constants (13, 17, 5) are Marsaglia's standard 32-bit triple, chosen here.
//
// Interface: `rnd` is the current state.  When `en` is high the state steps
// once at the rising clock edge, so a consumer sees a fresh value on every
// cycle it enables.  Reset (active-low, synchronous) loads SEED, which must be
// non-zero: zero is a fixed point of the recurrence.
module xorshift_rng #(
  parameter logic [31:0] SEED = 32'h2545_F491
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  output logic [31:0] rnd
);

  logic [31:0] state, s1, s2, s3;

  always_comb begin
    s1 = state ^ (state << 13);
    s2 = s1 ^ (s1 >> 17);
    s3 = s2 ^ (s2 << 5);
  end

  always_ff @(posedge clk) begin
    if (!rst_n)  state <= SEED;
    else if (en) state <= s3;
  end

  assign rnd = state;

  initial assert (SEED != 32'd0) else $error("xorshift_rng: SEED must be non-zero");

endmodule
