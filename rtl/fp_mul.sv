// fp_mul -- combinational floating-point multiplier used by the weight update.
//
// Multiplies two FP words (sign, EW-bit biased exponent, FW fraction bits,
// hidden one), rounding the product to nearest, ties to even.  Zero operands
// give zero; results below the smallest normal flush to +0 and results above
// the largest finite value saturate.  As for fp_add, the format details and
// the rounding mode are this design's choices.
//
// Purely combinational: no clock, no latency.
module fp_mul #(
  parameter int unsigned EW = hbfp_pkg::FP_EXP_W,
  parameter int unsigned FW = hbfp_pkg::FP_FRAC_W
) (
  input  logic [EW+FW:0] a,
  input  logic [EW+FW:0] b,
  output logic [EW+FW:0] y
);

  localparam int BIAS  = (1 << (EW - 1)) - 1;
  localparam int EMAXF = (1 << EW) - 2;
  localparam int PW    = 2 * FW + 2;

  always_comb begin
    logic [PW-1:0] prod;
    logic [FW+1:0] mant;
    logic          s, g, st;
    int            e;
    s    = a[EW+FW] ^ b[EW+FW];
    prod = PW'({1'b1, a[FW-1:0]}) * PW'({1'b1, b[FW-1:0]});
    e    = int'(a[EW+FW-1:FW]) + int'(b[EW+FW-1:FW]) - BIAS;
    if (prod[PW-1]) begin
      mant = {1'b0, prod[PW-1:FW+1]};
      g    = prod[FW];
      st   = |prod[FW-1:0];
      e    = e + 1;
    end else begin
      mant = {1'b0, prod[PW-2:FW]};
      g    = prod[FW-1];
      st   = (FW >= 2) ? |(prod & ((PW'(1) << (FW - 1)) - PW'(1))) : 1'b0;
    end
    if (g && (st || mant[0])) mant = mant + 1'b1;
    if (mant[FW+1]) begin
      mant = mant >> 1;
      e    = e + 1;
    end
    if (a[EW+FW-1:FW] == '0 || b[EW+FW-1:FW] == '0 || e < 1) y = '0;
    else if (e > EMAXF) y = {s, EW'(EMAXF), {FW{1'b1}}};
    else                y = {s, EW'(e), mant[FW-1:0]};
  end

endmodule
