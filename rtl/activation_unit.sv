// activation_unit -- the floating-point "activation/loss" unit of the HBFP
// accelerator.
//
// Everything that is not a dot product runs here, in FP, N lanes wide so that
// it accepts one full MatMul output vector per cycle (the paper matches the
// two widths to avoid backpressure).  Two independent datapaths share the
// unit:
//
//  * The vector path takes x (normally the converted MatMul output) and a
//    second operand y read from the activation buffer, and applies op:
//      ACT_PASS      out = x
//      ACT_ADD       out = x + y            FP accumulation of tile results
//      ACT_ADD_RELU  out = max(0, x + y)    last tile of a layer, then ReLU
//      ACT_RELU_BWD  out = (y > 0) ? x : 0  ReLU derivative, y = forward input
//      ACT_SUB       out = x - y            gradient of the squared loss
//  * The weight-update path computes w_new = w - lr * g per lane in the wide
//    FP format (16-bit mantissa), where w is the stored weight converted from
//    its wide BFP form, g the gradient (narrow FP, widened exactly) and lr the
//    learning rate.
//
// The paper places the activations, the loss and the weight update in this
// unit, all in floating point, and accumulates tile results in FP.  The
// particular operation set (ReLU, squared loss, plain SGD) is this design's
// choice; the paper names no specific functions.
//
// Timing: both paths accept one vector per cycle; results are registered,
// latency 1 cycle.
module activation_unit
  import hbfp_pkg::*;
#(
  parameter int unsigned N   = TILE,
  parameter int unsigned EW  = FP_EXP_W,
  parameter int unsigned FW  = FP_FRAC_W,
  parameter int unsigned WFW = WFP_FRAC_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // vector path
  input  logic                     in_valid,
  input  act_op_e                  op,
  input  logic [N-1:0][EW+FW:0]    x,
  input  logic [N-1:0][EW+FW:0]    y,
  output logic                     out_valid,
  output logic [N-1:0][EW+FW:0]    out,
  // weight-update path
  input  logic                     wu_valid,
  input  logic [N-1:0][EW+WFW:0]   w,
  input  logic [N-1:0][EW+FW:0]    g,
  input  logic [EW+FW:0]           lr,
  output logic                     wu_out_valid,
  output logic [N-1:0][EW+WFW:0]   w_out
);

  localparam int PAD = WFW - FW;

  logic [N-1:0][EW+FW:0]  sum, y_eff, res;
  logic [N-1:0][EW+WFW:0] step, neg_step, w_new;
  logic [EW+WFW:0]        lr_w;

  assign lr_w = {lr, {PAD{1'b0}}};

  for (genvar i = 0; i < N; i++) begin : g_lane
    // vector path: x + y, or x - y for ACT_SUB
    assign y_eff[i] = (op == ACT_SUB) ? {~y[i][EW+FW], y[i][EW+FW-1:0]} : y[i];
    fp_add #(.EW(EW), .FW(FW)) u_add (.a(x[i]), .b(y_eff[i]), .y(sum[i]));

    always_comb begin
      unique case (op)
        ACT_PASS:     res[i] = x[i];
        ACT_ADD,
        ACT_SUB:      res[i] = sum[i];
        ACT_ADD_RELU: res[i] = sum[i][EW+FW] ? '0 : sum[i];
        ACT_RELU_BWD: res[i] = (!y[i][EW+FW] && y[i][EW+FW-1:FW] != '0) ? x[i] : '0;
        default:      res[i] = x[i];
      endcase
    end

    // weight-update path: w - lr * g in the wide format
    fp_mul #(.EW(EW), .FW(WFW)) u_mul (.a(lr_w), .b({g[i], {PAD{1'b0}}}), .y(step[i]));
    assign neg_step[i] = {~step[i][EW+WFW], step[i][EW+WFW-1:0]};
    fp_add #(.EW(EW), .FW(WFW)) u_wadd (.a(w[i]), .b(neg_step[i]), .y(w_new[i]));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid    <= 1'b0;
      out          <= '0;
      wu_out_valid <= 1'b0;
      w_out        <= '0;
    end else begin
      out_valid    <= in_valid;
      wu_out_valid <= wu_valid;
      if (in_valid) out   <= res;
      if (wu_valid) w_out <= w_new;
    end
  end

endmodule
