// weight_buffer -- on-chip store of BFP weight tiles with wide mantissas.
//
// Weights are kept in BFP with WMW-bit mantissas ("wide weight storage").  A
// tile of N x N weights occupies N consecutive words; each word holds one
// tile row of N mantissas and the tile's shared exponent, which is repeated
// in all N words of the tile.  A stored weight is worth m * 2^exp.
//
// The read port delivers a word in two forms.  The wide form (all WMW bits)
// feeds the weight update.  The narrow form keeps only the MW most significant
// bits of every mantissa, with the exponent raised by WMW - MW so the value
// is unchanged up to truncation; this is what forward and backward passes
// use, so they move only the upper bits of the weights.  Reads are
// synchronous (one-cycle latency); one write port.
//
// Wide storage, narrow use in forward/backward passes and the tile exponent
// follow the paper.  The word layout, the repeated exponent, the truncation of
// the narrow form and the size are this design's choices.
module weight_buffer #(
  parameter int unsigned N     = hbfp_pkg::TILE,
  parameter int unsigned WMW   = hbfp_pkg::WMANT_W,
  parameter int unsigned MW    = hbfp_pkg::MANT_W,
  parameter int unsigned XW    = hbfp_pkg::BEXP_W,
  parameter int unsigned DEPTH = hbfp_pkg::W_DEPTH,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                         clk,
  // read port
  input  logic                         re,
  input  logic [AW-1:0]                raddr,
  output logic [N-1:0][WMW-1:0]        rd_wide,
  output logic signed [XW-1:0]         rd_wide_exp,
  output logic [N-1:0][MW-1:0]         rd_narrow,
  output logic signed [XW-1:0]         rd_narrow_exp,
  // write port
  input  logic                         we,
  input  logic [AW-1:0]                waddr,
  input  logic [N-1:0][WMW-1:0]        wdata,
  input  logic signed [XW-1:0]         wexp
);

  typedef struct packed {
    logic signed [XW-1:0]  exp;
    logic [N-1:0][WMW-1:0] mant;
  } wrow_t;

  wrow_t mem [DEPTH];
  wrow_t rd_q;

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= '{exp: wexp, mant: wdata};
    if (re) rd_q       <= mem[raddr];
  end

  assign rd_wide     = rd_q.mant;
  assign rd_wide_exp = rd_q.exp;
  for (genvar i = 0; i < N; i++) begin : g_narrow
    assign rd_narrow[i] = rd_q.mant[i][WMW-1 -: MW];
  end
  assign rd_narrow_exp = rd_q.exp + XW'(WMW - MW);

endmodule
