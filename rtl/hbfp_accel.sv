// hbfp_accel -- top level of the hybrid block floating point (HBFP) training
// accelerator.
//
// Dot products run in block floating point on a fixed-point MatMul array;
// everything else runs in floating point.  The datapath follows the block
// diagram of the design:
//
//   host --> activation buffer (FP) --> FP->BFP --> BFP MatMul --> BFP->FP
//        \                                          ^                 |
//         `-> weight buffer (wide BFP) --narrow-----'                 v
//                 ^      |                              activation/loss (FP)
//                 |      `--wide--> BFP->FP (wide) --> weight update  |
//                 `------------- FP->BFP (wide) <-------'             |
//             activation buffer <-------------------------------------'
//
// The host loads weights and activations through the buffer ports below
// while the accelerator is idle (busy low), then issues commands (see
// hbfp_pkg::hbfp_cmd_t): load a weight tile (optionally transposed, for the
// backward pass), load a tile of activations or gradients as the stationary
// operand (for the weight-gradient outer product), stream rows through
// MatMul and the activation unit, and update a weight tile in place.  A
// typical forward layer is, per output tile column, one CMD_LOAD_W and one
// CMD_MATMUL per input tile, the first with ACT_PASS and the others with
// ACT_ADD (or ACT_ADD_RELU for the last) so partial tile products are summed
// in FP.
//
// Timing: streaming passes run at one row of TILE values per cycle, i.e.
// TILE*TILE multiply-accumulates per cycle.  Counted from the clock edge that
// accepts a command to the one that raises `done`, inclusive, a MATMUL of R
// rows takes R + 7 cycles, a weight-tile load TILE + 3, a tile load from
// activations 2*TILE + 7 and a weight update 2*TILE + 11.  The FP/BFP
// converters add one pipeline cycle each and never stall the stream.
//
// What follows the paper: the units and their order, BFP only in front of the
// MatMul, wide accumulators normalised by BFP->FP, stochastic rounding with
// Xorshift, FP accumulation of tiles, FP weight update in the activation
// unit, 8-bit dot-product mantissas, 16-bit weight storage, 24 x 24 tiles.
// The command set, the buffer sizes and port arrangement, the host port in
// place of the unspecified external I/O interface, and all formats' corner
// cases are this design's choices.
module hbfp_accel
  import hbfp_pkg::*;
(
  input  logic                          clk,
  input  logic                          rst_n,
  // commands
  input  logic                          cmd_valid,
  output logic                          cmd_ready,
  input  hbfp_cmd_t                     cmd,
  output logic                          busy,
  output logic                          done,
  // host access to the activation buffer (when idle)
  input  logic                          host_ab_we,
  input  logic [ACT_AW-1:0]             host_ab_waddr,
  input  logic [TILE-1:0][FP_W-1:0]     host_ab_wdata,
  input  logic                          host_ab_re,
  input  logic [ACT_AW-1:0]             host_ab_raddr,
  output logic [TILE-1:0][FP_W-1:0]     host_ab_rdata,
  // host access to the weight buffer (when idle)
  input  logic                          host_wb_we,
  input  logic [W_AW-1:0]               host_wb_waddr,
  input  logic [TILE-1:0][WMANT_W-1:0]  host_wb_wdata,
  input  logic signed [BEXP_W-1:0]      host_wb_wexp,
  input  logic                          host_wb_re,
  input  logic [W_AW-1:0]               host_wb_raddr,
  output logic [TILE-1:0][WMANT_W-1:0]  host_wb_rdata,
  output logic signed [BEXP_W-1:0]      host_wb_rexp
);

  localparam int N    = TILE;
  localparam int ACCW = 2 * MANT_W + $clog2(TILE);

  // ---- sequencer -----------------------------------------------------------
  logic                 c_wb_re, c_wb_we, c_ab_ra_en, c_ab_rb_en, c_ab_we;
  logic [W_AW-1:0]      c_wb_raddr, c_wb_waddr;
  logic [ACT_AW-1:0]    c_ab_ra_addr, c_ab_rb_addr, c_ab_waddr;
  logic                 f2b_in_valid, f2b_use_emax, mm_stream, mm_load_valid, mm_load_sel;
  logic                 mm_load_transpose, wb2f_in_valid, wf2b_use_emax;
  logic [FP_EXP_W-1:0]  f2b_emax, f2b_out_emax, wf2b_emax, wf2b_out_emax;
  logic [$clog2(N)-1:0] mm_load_row;
  act_op_e              act_op;
  fp_t                  act_lr;

  hbfp_ctrl u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .busy, .done,
    .wb_re(c_wb_re), .wb_raddr(c_wb_raddr), .wb_we(c_wb_we), .wb_waddr(c_wb_waddr),
    .ab_ra_en(c_ab_ra_en), .ab_ra_addr(c_ab_ra_addr),
    .ab_rb_en(c_ab_rb_en), .ab_rb_addr(c_ab_rb_addr),
    .ab_we(c_ab_we), .ab_waddr(c_ab_waddr),
    .f2b_in_valid, .f2b_use_emax, .f2b_emax, .f2b_out_emax,
    .mm_stream, .mm_load_valid, .mm_load_sel, .mm_load_row, .mm_load_transpose,
    .wb2f_in_valid, .act_op, .act_lr, .wf2b_use_emax, .wf2b_emax, .wf2b_out_emax);

  // ---- weight buffer ---------------------------------------------------------
  logic [N-1:0][WMANT_W-1:0] wb_rd_wide, wf2b_mant;
  logic [N-1:0][MANT_W-1:0]  wb_rd_narrow;
  logic signed [BEXP_W-1:0]  wb_rd_wide_exp, wb_rd_narrow_exp, wf2b_exp;

  weight_buffer u_wbuf (
    .clk,
    .re    (busy ? c_wb_re    : host_wb_re),
    .raddr (busy ? c_wb_raddr : host_wb_raddr),
    .rd_wide(wb_rd_wide), .rd_wide_exp(wb_rd_wide_exp),
    .rd_narrow(wb_rd_narrow), .rd_narrow_exp(wb_rd_narrow_exp),
    .we    (busy ? c_wb_we    : host_wb_we),
    .waddr (busy ? c_wb_waddr : host_wb_waddr),
    .wdata (busy ? wf2b_mant  : host_wb_wdata),
    .wexp  (busy ? wf2b_exp   : host_wb_wexp));

  assign host_wb_rdata = wb_rd_wide;
  assign host_wb_rexp  = wb_rd_wide_exp;

  // ---- activation buffer -----------------------------------------------------
  logic [N-1:0][FP_W-1:0] ab_ra_data, ab_rb_data, act_out;

  activation_buffer u_abuf (
    .clk,
    .ra_en   (busy ? c_ab_ra_en   : host_ab_re),
    .ra_addr (busy ? c_ab_ra_addr : host_ab_raddr),
    .ra_data (ab_ra_data),
    .rb_en   (c_ab_rb_en),
    .rb_addr (c_ab_rb_addr),
    .rb_data (ab_rb_data),
    .we      (busy ? c_ab_we      : host_ab_we),
    .waddr   (busy ? c_ab_waddr   : host_ab_waddr),
    .wdata   (busy ? act_out      : host_ab_wdata));

  assign host_ab_rdata = ab_ra_data;

  // ---- FP -> BFP (activations) ----------------------------------------------
  logic                      f2b_out_valid;
  logic [N-1:0][MANT_W-1:0]  f2b_mant;
  logic signed [BEXP_W-1:0]  f2b_exp;

  fp_to_bfp u_f2b (
    .clk, .rst_n, .in_valid(f2b_in_valid), .in_fp(ab_ra_data),
    .use_emax_in(f2b_use_emax), .emax_in(f2b_emax),
    .out_valid(f2b_out_valid), .out_mant(f2b_mant), .out_exp(f2b_exp),
    .out_emax(f2b_out_emax));

  // ---- BFP MatMul -------------------------------------------------------------
  logic                      mm_out_valid;
  logic [N-1:0][ACCW-1:0]    mm_acc;
  logic signed [BEXP_W:0]    mm_exp;

  bfp_matmul u_mm (
    .clk, .rst_n,
    .w_load_valid     (mm_load_valid),
    .w_load_row       (mm_load_row),
    .w_load_data      (mm_load_sel ? f2b_mant : wb_rd_narrow),
    .w_load_exp       (mm_load_sel ? f2b_exp  : wb_rd_narrow_exp),
    .w_load_transpose (mm_load_transpose),
    .in_valid         (f2b_out_valid && mm_stream),
    .in_mant          (f2b_mant),
    .in_exp           (f2b_exp),
    .out_valid        (mm_out_valid),
    .out_acc          (mm_acc),
    .out_exp          (mm_exp));

  // ---- BFP -> FP (MatMul results) ------------------------------------------
  logic                   b2f_out_valid;
  logic [N-1:0][FP_W-1:0] b2f_fp;

  bfp_to_fp u_b2f (
    .clk, .rst_n, .in_valid(mm_out_valid), .in_acc(mm_acc), .in_exp(mm_exp),
    .out_valid(b2f_out_valid), .out_fp(b2f_fp));

  // ---- BFP -> FP (stored wide weights, exact) --------------------------------
  logic                    wb2f_out_valid;
  logic [N-1:0][WFP_W-1:0] wb2f_fp;

  bfp_to_fp #(.AW(WMANT_W), .XW(BEXP_W), .FW(WFP_FRAC_W), .STOCH(1'b0)) u_wb2f (
    .clk, .rst_n, .in_valid(wb2f_in_valid), .in_acc(wb_rd_wide), .in_exp(wb_rd_wide_exp),
    .out_valid(wb2f_out_valid), .out_fp(wb2f_fp));

  // ---- activation / loss unit -----------------------------------------------
  logic                    act_out_valid, wu_out_valid;
  logic [N-1:0][WFP_W-1:0] w_new;

  activation_unit u_act (
    .clk, .rst_n,
    .in_valid(b2f_out_valid), .op(act_op), .x(b2f_fp), .y(ab_rb_data),
    .out_valid(act_out_valid), .out(act_out),
    .wu_valid(wb2f_out_valid), .w(wb2f_fp), .g(ab_ra_data), .lr(act_lr),
    .wu_out_valid(wu_out_valid), .w_out(w_new));

  // ---- FP -> BFP (updated weights, wide) --------------------------------------
  logic wf2b_out_valid;

  fp_to_bfp #(.FW(WFP_FRAC_W), .MW(WMANT_W), .SEED_BASE(32'h5851_F42D)) u_wf2b (
    .clk, .rst_n, .in_valid(wu_out_valid), .in_fp(w_new),
    .use_emax_in(wf2b_use_emax), .emax_in(wf2b_emax),
    .out_valid(wf2b_out_valid), .out_mant(wf2b_mant), .out_exp(wf2b_exp),
    .out_emax(wf2b_out_emax));

  // the sequencer's write strobes must line up with the data they store
  assert property (@(posedge clk) disable iff (!rst_n) c_ab_we |-> act_out_valid)
    else $error("hbfp_accel: activation write without a result");
  assert property (@(posedge clk) disable iff (!rst_n) c_wb_we |-> wf2b_out_valid)
    else $error("hbfp_accel: weight write without an updated row");
  assert property (@(posedge clk) disable iff (!rst_n)
                   busy |-> !(host_ab_we || host_wb_we || host_ab_re || host_wb_re))
    else $error("hbfp_accel: host access while a command runs");

endmodule
