// bfp_matmul -- fixed-point matrix unit for BFP operands.
//
// The unit holds one N x N weight tile W (signed MW-bit mantissas sharing one
// exponent e_w) and multiplies a stream of activation vectors by it.  Each
// input vector a (N signed mantissas with its own exponent e_a) produces one
// output vector of N wide fixed-point sums
//     out[j] = sum_k a[k] * W[k][j]          out_exp = e_a + e_w
// so the whole product is computed without any mantissa alignment: the
// exponents are only added (Eq. 2 of the HBFP formulation).  The sums are
// exact: AW = 2*MW + clog2(N) bits cannot overflow, so the unit never
// saturates; normalisation is left to the BFP-to-FP converter.
//
// The tile is loaded one row per cycle through the w_load port.  With
// w_load_transpose set, the row is written as a column instead, which gives
// W^T for the backward pass (dx = dy * W^T) from the same stored tile.  The
// exponent given with any load row becomes the tile exponent.
//
// The paper gives the function (fixed-point BFP dot products in wide
// accumulators, one exponent per weight tile of 24 x 24, output width equal
// to the activation unit's input width).  The organisation -- a stationary
// tile and N dot-product units of length N, each ending in an adder tree, so
// that N results leave every cycle -- is this design's choice.
//
// Timing: one input vector per cycle, result registered, latency 1 cycle.
// A tile load and a vector may not arrive in the same cycle.
module bfp_matmul #(
  parameter int unsigned N  = hbfp_pkg::TILE,
  parameter int unsigned MW = hbfp_pkg::MANT_W,
  parameter int unsigned XW = hbfp_pkg::BEXP_W,
  parameter int unsigned AW = 2 * MW + $clog2(N)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // tile load
  input  logic                         w_load_valid,
  input  logic [$clog2(N)-1:0]         w_load_row,
  input  logic [N-1:0][MW-1:0]         w_load_data,
  input  logic signed [XW-1:0]         w_load_exp,
  input  logic                         w_load_transpose,
  // activation stream
  input  logic                         in_valid,
  input  logic [N-1:0][MW-1:0]         in_mant,
  input  logic signed [XW-1:0]         in_exp,
  output logic                         out_valid,
  output logic [N-1:0][AW-1:0]         out_acc,
  output logic signed [XW:0]           out_exp
);

  logic [N-1:0][N-1:0][MW-1:0] w_q;     // w_q[k][j]
  logic signed [XW-1:0]        w_exp_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      w_q     <= '0;
      w_exp_q <= '0;
    end else if (w_load_valid) begin
      w_exp_q <= w_load_exp;
      for (int j = 0; j < N; j++) begin
        if (w_load_transpose) w_q[j][w_load_row] <= w_load_data[j];
        else                  w_q[w_load_row][j] <= w_load_data[j];
      end
    end
  end

  // N dot products of length N
  logic [N-1:0][AW-1:0] acc_d;
  always_comb begin
    for (int j = 0; j < N; j++) begin
      logic signed [AW-1:0] sum;
      sum = '0;
      for (int k = 0; k < N; k++)
        sum = sum + AW'($signed(in_mant[k]) * $signed(w_q[k][j]));
      acc_d[j] = sum;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_acc   <= '0;
      out_exp   <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_acc <= acc_d;
        out_exp <= (XW+1)'(in_exp) + (XW+1)'(w_exp_q);
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(w_load_valid && in_valid))
    else $error("bfp_matmul: tile load and activation vector in the same cycle");

endmodule
