// fp_add -- combinational floating-point adder used by the activation unit.
//
// Adds two FP words of the accelerator's format (sign, EW-bit biased
// exponent, FW stored fraction bits, hidden leading one) and rounds the sum to
// nearest, ties to even.  The smaller operand is aligned with three extra bits
// (guard, round, sticky); after the add or subtract the result is normalised
// by a leading-one search and rounded.  Exponent field 0 is zero (no
// subnormals); a result below the smallest normal flushes to +0 and one above
// the largest finite value saturates to it.  The paper only says that
// non-dot-product operations run in floating point; the format details and
// the rounding mode here are this design's choices.
//
// Purely combinational: no clock, no latency.
module fp_add #(
  parameter int unsigned EW = hbfp_pkg::FP_EXP_W,
  parameter int unsigned FW = hbfp_pkg::FP_FRAC_W
) (
  input  logic [EW+FW:0] a,
  input  logic [EW+FW:0] b,
  output logic [EW+FW:0] y
);

  localparam int EMAXF = (1 << EW) - 2;
  localparam int XWID  = FW + 5;          // carry + hidden + FW + g,r,s

  always_comb begin
    logic [EW+FW:0]   dom, lit;   // larger and smaller magnitude
    logic [XWID-1:0]  sb, ss, sum, lost;
    logic             sub, g, rs;
    logic [FW+1:0]    mant;
    int               d, e, lz;
    dom = a; lit = b;
    if (a[EW+FW-1:0] < b[EW+FW-1:0]) begin dom = b; lit = a; end
    sb   = XWID'({1'b1, dom[FW-1:0]}) << 3;
    ss   = (lit[EW+FW-1:FW] == '0) ? '0 : (XWID'({1'b1, lit[FW-1:0]}) << 3);
    d    = int'(dom[EW+FW-1:FW]) - int'(lit[EW+FW-1:FW]);
    lost = '0;
    if (d >= XWID) begin
      lost = ss;
      ss   = '0;
    end else if (d > 0) begin
      lost = ss & ((XWID'(1) << d) - XWID'(1));
      ss   = ss >> d;
    end
    ss[0] = ss[0] | (lost != '0);
    sub = dom[EW+FW] ^ lit[EW+FW];
    sum = sub ? (sb - ss) : (sb + ss);
    e   = int'(dom[EW+FW-1:FW]);
    lz  = 0;
    mant = '0;
    g    = 1'b0;
    rs   = 1'b0;
    y    = '0;
    if (dom[EW+FW-1:FW] == '0) begin
      y = '0;                                   // both operands zero
    end else if (sum == '0) begin
      y = '0;                                   // exact cancellation
    end else begin
      if (sum[XWID-1]) begin                    // carry out: shift right
        sum = (sum >> 1) | XWID'(sum[0]);
        e   = e + 1;
      end else begin                            // leading-one search
        for (int i = XWID - 2; i >= 0; i--)
          if (sum[i] && lz == 0) lz = XWID - 2 - i + 1;
        lz  = lz - 1;
        sum = sum << lz;
        e   = e - lz;
      end
      mant = {1'b0, sum[XWID-2:3]};
      g    = sum[2];
      rs   = sum[1] | sum[0];
      if (g && (rs || mant[0])) mant = mant + 1'b1;
      if (mant[FW+1]) begin
        mant = mant >> 1;
        e    = e + 1;
      end
      if (e < 1)           y = '0;
      else if (e > EMAXF)  y = {dom[EW+FW], EW'(EMAXF), {FW{1'b1}}};
      else                 y = {dom[EW+FW], EW'(e), mant[FW-1:0]};
    end
  end

endmodule
