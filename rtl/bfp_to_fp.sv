// bfp_to_fp -- converts wide fixed-point results with a shared exponent to FP.
//
// Each lane holds a signed AW-bit accumulator value a_i that is worth
// a_i * 2^e, where e is the block exponent given with the vector.  The unit
// finds the leading one p of |a_i|, keeps the FW+1 bits from p down as the FP
// significand and sets the FP exponent to p + e + BIAS.  Bits below the kept
// ones are dropped with stochastic rounding: a random number of the dropped
// width is added before truncation (one Xorshift generator per lane, stepped
// for each accepted vector).  A round-up that carries out of the significand
// renormalises by one.  With STOCH = 0 the unit truncates.
//
// The paper gives the function (normalise, truncate, compute exponents;
// stochastic rounding with Xorshift).  Choices of this design: an exponent
// below 1 flushes to zero, one above 2^EW - 2 saturates to the largest finite
// value (exponent 2^EW - 2, fraction all ones); zero stays zero.
//
// Timing: one vector per cycle, result registered, latency 1 cycle.
module bfp_to_fp #(
  parameter int unsigned N         = hbfp_pkg::TILE,
  parameter int unsigned AW        = 2 * hbfp_pkg::MANT_W + $clog2(hbfp_pkg::TILE),
  parameter int unsigned XW        = hbfp_pkg::BEXP_W + 1,
  parameter int unsigned EW        = hbfp_pkg::FP_EXP_W,
  parameter int unsigned FW        = hbfp_pkg::FP_FRAC_W,
  parameter bit          STOCH     = 1'b1,
  parameter logic [31:0] SEED_BASE = 32'h7F4A_7C15
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic [N-1:0][AW-1:0]    in_acc,
  input  logic signed [XW-1:0]    in_exp,
  output logic                    out_valid,
  output logic [N-1:0][EW+FW:0]   out_fp
);

  localparam int BIAS  = (1 << (EW - 1)) - 1;
  localparam int EMAXF = (1 << EW) - 2;
  localparam int W     = AW + 2;

  logic [N-1:0][31:0] rnd;
  for (genvar i = 0; i < N; i++) begin : g_rng
    if (STOCH) begin : g_on
      xorshift_rng #(.SEED(SEED_BASE + 32'(i) * 32'h0002_3A3F + 32'd7)) u_rng (
        .clk, .rst_n, .en(in_valid), .rnd(rnd[i]));
    end else begin : g_off
      assign rnd[i] = '0;
    end
  end

  logic [N-1:0][EW+FW:0] fp_d;
  always_comb begin
    fp_d = '0;
    for (int i = 0; i < N; i++) begin
      logic          neg;
      logic [W-1:0]  mag, rmask, sig;
      int            p, s, e;
      neg = in_acc[i][AW-1];
      mag = neg ? W'(-$signed(in_acc[i])) : W'(in_acc[i]);
      mag = mag & ((W'(1) << AW) - W'(1));
      p = -1;
      for (int b = 0; b < AW; b++) if (mag[b]) p = b;
      sig   = '0;
      e     = 0;
      s     = 0;
      rmask = '0;
      if (p >= 0) begin
        e = p + int'(in_exp) + BIAS;
        if (p > int'(FW)) begin
          s     = p - int'(FW);
          rmask = (W'(1) << s) - W'(1);
          sig   = (mag + (W'(rnd[i]) & rmask)) >> s;
          if (sig[FW+1]) begin
            sig = sig >> 1;
            e   = e + 1;
          end
        end else begin
          sig = mag << (int'(FW) - p);
        end
      end
      if (p < 0 || e < 1)
        fp_d[i] = '0;
      else if (e > EMAXF)
        fp_d[i] = {neg, EW'(EMAXF), {FW{1'b1}}};
      else
        fp_d[i] = {neg, EW'(e), sig[FW-1:0]};
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_fp    <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out_fp <= fp_d;
    end
  end

endmodule
