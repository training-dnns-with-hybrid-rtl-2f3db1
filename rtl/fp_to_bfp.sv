// fp_to_bfp -- converts a vector of FP values into one BFP block.
//
// The unit finds the largest exponent among the N incoming FP values and
// right-shifts every significand so that all of them share that exponent.
// Element i leaves as a signed MW-bit mantissa m_i, and the block carries one
// signed exponent e, so that element i is worth m_i * 2^e:
//     s_i = (emax - E_i) + FW + 2 - MW        (right shift of lane i)
//     m_i = +-sat( (sig_i + r_i) >> s_i )      sig_i = {1, frac_i}
//     e   = emax - BIAS + 2 - MW
// r_i is a random number below 2^s_i, which makes the truncation a stochastic
// rounding: lane i rounds up with a probability equal to the discarded
// fraction.  Each lane has its own Xorshift generator, stepped once for each
// accepted vector.  With STOCH = 0, r_i = 0 and the unit truncates.
//
// The paper fixes the policy (the exponent of the largest value sets the
// block exponent; mantissas are normalised to it; stochastic rounding with
// Xorshift).  Choices of this design: random bits are limited to RND_W =
// FW + 4, so a lane shifted further than that becomes zero; a mantissa that
// rounds up to 2^(MW-1) saturates to 2^(MW-1)-1; FP zero (exponent field 0)
// gives mantissa 0.
//
// `use_emax_in` replaces the block's own largest exponent with `emax_in`,
// which lets a caller share one exponent over several vectors (a whole tile)
// after finding its maximum in a first pass; `out_emax` always reports the
// vector's own largest exponent for that first pass.
//
// Timing: one vector per cycle, result registered, latency 1 cycle.
module fp_to_bfp #(
  parameter int unsigned N         = hbfp_pkg::TILE,
  parameter int unsigned EW        = hbfp_pkg::FP_EXP_W,
  parameter int unsigned FW        = hbfp_pkg::FP_FRAC_W,
  parameter int unsigned MW        = hbfp_pkg::MANT_W,
  parameter int unsigned XW        = hbfp_pkg::BEXP_W,
  parameter bit          STOCH     = 1'b1,
  parameter logic [31:0] SEED_BASE = 32'h9E37_79B9
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  logic [N-1:0][EW+FW:0]       in_fp,
  input  logic                        use_emax_in,
  input  logic [EW-1:0]               emax_in,
  output logic                        out_valid,
  output logic [N-1:0][MW-1:0]        out_mant,
  output logic signed [XW-1:0]        out_exp,
  output logic [EW-1:0]               out_emax
);

  localparam int RND_W = FW + 4;
  localparam int BIAS  = (1 << (EW - 1)) - 1;
  localparam int SIG_W = FW + 1 + RND_W + 1;
  localparam logic [MW-1:0] MAX_MAG = {1'b0, {(MW-1){1'b1}}};

  initial assert (MW <= FW + 2) else $error("fp_to_bfp: MW must be <= FW+2");

  // ---- per-lane random numbers -------------------------------------------
  logic [N-1:0][31:0] rnd;
  for (genvar i = 0; i < N; i++) begin : g_rng
    if (STOCH) begin : g_on
      xorshift_rng #(.SEED(SEED_BASE + 32'(i) * 32'h0001_0DCD + 32'd1)) u_rng (
        .clk, .rst_n, .en(in_valid), .rnd(rnd[i]));
    end else begin : g_off
      assign rnd[i] = '0;
    end
  end

  // ---- largest exponent of the vector -------------------------------------
  logic [EW-1:0] emax_local, emax;
  always_comb begin
    emax_local = '0;
    for (int i = 0; i < N; i++)
      if (in_fp[i][EW+FW-1:FW] > emax_local) emax_local = in_fp[i][EW+FW-1:FW];
    emax = use_emax_in ? emax_in : emax_local;
  end

  // ---- align every lane to emax -------------------------------------------
  logic [N-1:0][MW-1:0] mant_d;
  always_comb begin
    mant_d = '0;
    for (int i = 0; i < N; i++) begin
      logic [EW-1:0]    ei;
      logic [SIG_W-1:0] sig, rmask, sum;
      logic [MW-1:0]    mag;
      int               s;
      ei  = in_fp[i][EW+FW-1:FW];
      sig = SIG_W'({1'b1, in_fp[i][FW-1:0]});
      s   = int'(emax) - int'(ei) + int'(FW) + 2 - int'(MW);
      mag   = '0;
      rmask = '0;
      sum   = '0;
      if (ei == '0) begin
        mag = '0;                                  // FP zero
      end else if (ei > emax) begin
        mag = MAX_MAG;                             // above a forced exponent
      end else if (s <= RND_W) begin
        rmask = (SIG_W'(1) << s) - SIG_W'(1);
        sum   = (sig + (SIG_W'(rnd[i][RND_W-1:0]) & rmask)) >> s;
        mag   = (sum > SIG_W'(MAX_MAG)) ? MAX_MAG : MW'(sum);
      end
      mant_d[i] = in_fp[i][EW+FW] ? MW'(-mag) : mag;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_mant  <= '0;
      out_exp   <= '0;
      out_emax  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_mant <= mant_d;
        out_exp  <= XW'(int'(emax) - BIAS + 2 - int'(MW));
        out_emax <= emax_local;
      end
    end
  end

endmodule
