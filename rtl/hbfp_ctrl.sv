// hbfp_ctrl -- sequencer of the HBFP accelerator.
//
// Accepts one command at a time (valid/ready) and drives the buffers and the
// units of the datapath for it.  A command is a sequence of row steps: in
// each cycle of a pass the sequencer issues one row, and a shift register
// (pipe_v/pipe_r) tracks that row through the fixed-latency datapath so that
// every later control (a second buffer read, a tile-load strobe, a write
// address) fires in the stage where its data arrive.  After the last row the
// sequencer waits for the pipeline to drain.  Stage timing (cycle t = issue):
//
//   CMD_LOAD_W   t0 weight-buffer read       t1 array row load (narrow form)
//   CMD_LOAD_A   t0 activation read (A)      t1 FP->BFP
//                t2 pass 1: track the tile's largest exponent
//                   pass 2: array row load with that exponent forced
//   CMD_MATMUL   t0 activation read (A)      t1 FP->BFP       t2 MatMul
//                t3 BFP->FP, operand read (B) t4 activation unit
//                t5 result written to the activation buffer
//   CMD_WUPDATE  t0 weight read (wide)       t1 BFP->FP (wide), gradient read
//                t2 w - lr*g                  t3 FP->BFP (wide)
//                t4 pass 1: track the tile's largest exponent
//                   pass 2: write the new wide weights back
//
// Two-pass commands exist because a tile shares one exponent: the first pass
// finds the largest exponent of the whole tile, the second converts every row
// with it.  The weight update recomputes the same values in both passes (its
// BFP->FP step and FP arithmetic are deterministic) instead of storing them.
//
// Rows stream at one per cycle, so a pass of R rows takes R cycles plus the
// pipeline depth.  `cmd_ready` is low while a command runs; `done` pulses for
// one cycle at its end.  The paper only says the accelerator follows a
// dataflow similar to Eyeriss; this command set and schedule are this
// design's own.
module hbfp_ctrl
  import hbfp_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  // commands
  input  logic                 cmd_valid,
  output logic                 cmd_ready,
  input  hbfp_cmd_t            cmd,
  output logic                 busy,
  output logic                 done,
  // weight buffer
  output logic                 wb_re,
  output logic [W_AW-1:0]      wb_raddr,
  output logic                 wb_we,
  output logic [W_AW-1:0]      wb_waddr,
  // activation buffer
  output logic                 ab_ra_en,
  output logic [ACT_AW-1:0]    ab_ra_addr,
  output logic                 ab_rb_en,
  output logic [ACT_AW-1:0]    ab_rb_addr,
  output logic                 ab_we,
  output logic [ACT_AW-1:0]    ab_waddr,
  // FP->BFP of activations
  output logic                 f2b_in_valid,
  output logic                 f2b_use_emax,
  output logic [FP_EXP_W-1:0]  f2b_emax,
  input  logic [FP_EXP_W-1:0]  f2b_out_emax,
  // MatMul array
  output logic                 mm_stream,      // FP->BFP output feeds the stream
  output logic                 mm_load_valid,
  output logic                 mm_load_sel,    // 0: weight buffer, 1: FP->BFP
  output logic [$clog2(TILE)-1:0] mm_load_row,
  output logic                 mm_load_transpose,
  // BFP->FP of stored weights
  output logic                 wb2f_in_valid,
  // activation unit
  output act_op_e              act_op,
  output fp_t                  act_lr,
  // FP->BFP of updated weights
  output logic                 wf2b_use_emax,
  output logic [FP_EXP_W-1:0]  wf2b_emax,
  input  logic [FP_EXP_W-1:0]  wf2b_out_emax
);

  localparam int DEPTH = 6;                       // pipeline stages tracked

  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_DRAIN} state_e;

  state_e            state;
  hbfp_cmd_t         c;
  logic              pass2;
  logic [ACT_AW:0]   r, count;
  logic [FP_EXP_W-1:0] tile_emax;
  logic [DEPTH-1:0]  pipe_v;
  logic [ACT_AW:0]   pipe_r [DEPTH];
  logic              iss;

  assign cmd_ready = (state == S_IDLE);
  assign busy      = (state != S_IDLE);
  assign iss       = (state == S_ISSUE);
  assign count     = (c.op == CMD_MATMUL) ? c.rows : (ACT_AW+1)'(TILE);

  logic two_pass;
  assign two_pass = (c.op == CMD_LOAD_A) || (c.op == CMD_WUPDATE);

  // stages that must be empty before a pass counts as finished
  logic [DEPTH-1:0] drain_mask;
  always_comb begin
    unique case (c.op)
      CMD_LOAD_W:  drain_mask = DEPTH'(6'b00_0001);
      CMD_LOAD_A:  drain_mask = DEPTH'(6'b00_0011);
      CMD_MATMUL:  drain_mask = DEPTH'(6'b01_1111);
      default:     drain_mask = DEPTH'(6'b00_1111);
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      c         <= '0;
      pass2     <= 1'b0;
      r         <= '0;
      tile_emax <= '0;
      pipe_v    <= '0;
      done      <= 1'b0;
      for (int i = 0; i < DEPTH; i++) pipe_r[i] <= '0;
    end else begin
      done      <= 1'b0;
      pipe_v    <= {pipe_v[DEPTH-2:0], iss};
      pipe_r[0] <= r;
      for (int i = 1; i < DEPTH; i++) pipe_r[i] <= pipe_r[i-1];
      // largest exponent of the tile, first pass of two-pass commands
      if (!pass2 && c.op == CMD_LOAD_A && pipe_v[1] && f2b_out_emax > tile_emax)
        tile_emax <= f2b_out_emax;
      if (!pass2 && c.op == CMD_WUPDATE && pipe_v[3] && wf2b_out_emax > tile_emax)
        tile_emax <= wf2b_out_emax;
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          c         <= cmd;
          pipe_v    <= '0;       // stages past the last drain are stale
          pass2     <= 1'b0;
          r         <= '0;
          tile_emax <= '0;
          state     <= ((cmd.op == CMD_MATMUL) && (cmd.rows == '0)) ? S_DRAIN : S_ISSUE;
        end
        S_ISSUE: begin
          r <= r + 1'b1;
          if (r + 1'b1 == count) state <= S_DRAIN;
        end
        S_DRAIN: if ((pipe_v & drain_mask) == '0) begin
          if (two_pass && !pass2) begin
            pass2  <= 1'b1;
            pipe_v <= '0;
            r      <= '0;
            state <= S_ISSUE;
          end else begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---- controls by stage ---------------------------------------------------
  always_comb begin
    wb_re = 1'b0; wb_raddr = '0; wb_we = 1'b0; wb_waddr = '0;
    ab_ra_en = 1'b0; ab_ra_addr = '0; ab_rb_en = 1'b0; ab_rb_addr = '0;
    ab_we = 1'b0; ab_waddr = '0;
    f2b_in_valid = 1'b0; f2b_use_emax = 1'b0; f2b_emax = tile_emax;
    mm_stream = 1'b0; mm_load_valid = 1'b0; mm_load_sel = 1'b0; mm_load_row = '0;
    mm_load_transpose = c.transpose;
    wb2f_in_valid = 1'b0;
    act_op = c.act_op; act_lr = c.lr;
    wf2b_use_emax = pass2; wf2b_emax = tile_emax;
    unique case (c.op)
      CMD_LOAD_W: begin
        wb_re         = iss;
        wb_raddr      = c.w_row + W_AW'(r);
        mm_load_valid = pipe_v[0];
        mm_load_row   = $clog2(TILE)'(pipe_r[0]);
      end
      CMD_LOAD_A: begin
        ab_ra_en      = iss;
        ab_ra_addr    = c.src + ACT_AW'(r);
        f2b_in_valid  = pipe_v[0];
        f2b_use_emax  = pass2;
        mm_load_sel   = 1'b1;
        mm_load_valid = pass2 && pipe_v[1];
        mm_load_row   = $clog2(TILE)'(pipe_r[1]);
      end
      CMD_MATMUL: begin
        ab_ra_en      = iss;
        ab_ra_addr    = c.src + ACT_AW'(r);
        f2b_in_valid  = pipe_v[0];
        mm_stream     = 1'b1;
        ab_rb_en      = pipe_v[2];
        ab_rb_addr    = c.aux + ACT_AW'(pipe_r[2]);
        ab_we         = pipe_v[4];
        ab_waddr      = c.dst + ACT_AW'(pipe_r[4]);
      end
      CMD_WUPDATE: begin
        wb_re         = iss;
        wb_raddr      = c.w_row + W_AW'(r);
        wb2f_in_valid = pipe_v[0];
        ab_ra_en      = pipe_v[0];
        ab_ra_addr    = c.src + ACT_AW'(pipe_r[0]);
        wb_we         = pass2 && pipe_v[3];
        wb_waddr      = c.w_row + W_AW'(pipe_r[3]);
      end
      default: ;
    endcase
  end

  // a command is accepted only in the idle state
  assert property (@(posedge clk) disable iff (!rst_n) (cmd_valid && cmd_ready) |=> busy)
    else $error("hbfp_ctrl: accepted command did not start");
  assert property (@(posedge clk) disable iff (!rst_n)
                   (cmd_valid && cmd_ready && cmd.op == CMD_MATMUL) |-> (cmd.rows <= (ACT_AW+1)'(ACT_DEPTH)))
    else $error("hbfp_ctrl: MATMUL row count exceeds the activation buffer");

endmodule
