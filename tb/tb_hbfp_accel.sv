// tb_hbfp_accel -- end-to-end test of the HBFP accelerator at full size.
//
// The host loads two wide BFP weight tiles, activation rows, targets and a
// transposed copy of the inputs, then runs one training step of a small
// layer through the command interface:
//   forward  : Y1 = X W0 (PASS), Y2 = relu(Y1 + X2 W1) (ADD_RELU)
//   loss     : G  = X W0 - T (SUB); Gm = (Y1 > 0) ? X W0 : 0 (RELU_BWD)
//   backward : dX = G W0^T (transposed tile load)
//   gradient : dW = X^T G (G loaded from the activation buffer as the tile)
//   update   : W0 <- W0 - lr dW (two-pass weight update)
// Results are read back through the host port and compared with values
// computed in double precision from the operands, within error bounds
// derived from BFP quantisation (under one unit of each block exponent) and
// FP rounding.  The test also measures that a MATMUL streams one row per
// cycle, that commands are refused while one runs, and counts every
// mechanism exercised; one that never happened counts as a failure.
module tb_hbfp_accel;
  import hbfp_pkg::*;
  localparam int N = TILE;
  localparam int R = 48;              // rows in the forward pass

  logic clk = 1'b0, rst_n = 1'b0;
  logic cmd_valid = 1'b0, cmd_ready, busy, done;
  hbfp_cmd_t cmd = '0;
  logic host_ab_we = 1'b0, host_ab_re = 1'b0, host_wb_we = 1'b0, host_wb_re = 1'b0;
  logic [ACT_AW-1:0] host_ab_waddr = '0, host_ab_raddr = '0;
  logic [N-1:0][FP_W-1:0] host_ab_wdata = '0, host_ab_rdata;
  logic [W_AW-1:0] host_wb_waddr = '0, host_wb_raddr = '0;
  logic [N-1:0][WMANT_W-1:0] host_wb_wdata = '0, host_wb_rdata;
  logic signed [BEXP_W-1:0] host_wb_wexp = '0, host_wb_rexp;

  hbfp_accel dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- number helpers ------------------------------------------------------
  function automatic real pow2(input int k);
    real r;
    r = 1.0;
    if (k >= 0) for (int i = 0; i < k; i++) r = r * 2.0;
    else        for (int i = 0; i < -k; i++) r = r / 2.0;
    return r;
  endfunction
  function automatic real fp2r(input logic [15:0] f);
    real v;
    int sg;
    if (f[14:7] == 0) return 0.0;
    sg = 128 + int'(f[6:0]);
    v = real'(sg) * pow2(int'(f[14:7]) - 134);
    return f[15] ? -v : v;
  endfunction
  function automatic logic [15:0] r2fp(input real v);   // truncating encoder
    real a; int k; bit s;
    if (v == 0.0) return 16'h0;
    s = v < 0.0; a = s ? -v : v; k = 0;
    while (a >= 2.0) begin a = a / 2.0; k++; end
    while (a < 1.0)  begin a = a * 2.0; k--; end
    return {s, 8'(k + 127), 7'(int'($floor((a - 1.0) * 128.0)))};
  endfunction
  function automatic real absr(input real v); return v < 0.0 ? -v : v; endfunction
  function automatic int row_exp(input logic [N-1:0][15:0] row);   // BFP block exponent
    int m; m = 0;
    for (int i = 0; i < N; i++) if (int'(row[i][14:7]) > m) m = int'(row[i][14:7]);
    return m - 127 + 2 - MANT_W;
  endfunction

  // ---- host access ---------------------------------------------------------
  task automatic ab_write(input int a, input logic [N-1:0][15:0] d);
    @(negedge clk); host_ab_we = 1'b1; host_ab_waddr = ACT_AW'(a); host_ab_wdata = d;
    @(negedge clk); host_ab_we = 1'b0;
  endtask
  task automatic ab_read(input int a, output logic [N-1:0][15:0] d);
    @(negedge clk); host_ab_re = 1'b1; host_ab_raddr = ACT_AW'(a);
    @(negedge clk); host_ab_re = 1'b0; d = host_ab_rdata;
  endtask
  task automatic wb_write(input int a, input logic [N-1:0][15:0] d, input int e);
    @(negedge clk); host_wb_we = 1'b1; host_wb_waddr = W_AW'(a); host_wb_wdata = d;
    host_wb_wexp = BEXP_W'(e);
    @(negedge clk); host_wb_we = 1'b0;
  endtask
  task automatic wb_read(input int a, output logic [N-1:0][15:0] d, output int e);
    @(negedge clk); host_wb_re = 1'b1; host_wb_raddr = W_AW'(a);
    @(negedge clk); host_wb_re = 1'b0; d = host_wb_rdata; e = int'(host_wb_rexp);
  endtask

  int n_backpressure = 0;
  task automatic run(input cmd_op_e op, input act_op_e aop, input bit tr, input int wrow,
                     input int src, input int aux, input int dst, input int rows,
                     input logic [15:0] lr, output int cycles);
    @(negedge clk);
    cmd_valid = 1'b1;
    cmd = '{op: op, act_op: aop, transpose: tr, w_row: W_AW'(wrow), src: ACT_AW'(src),
            aux: ACT_AW'(aux), dst: ACT_AW'(dst), rows: (ACT_AW+1)'(rows), lr: fp_t'(lr)};
    @(posedge clk); #1;
    cmd_valid = 1'b0;
    cycles = 1;
    // offer another command while busy: it must not be taken
    @(negedge clk);
    cmd_valid = 1'b1;
    #1;
    check(!cmd_ready, "command refused while busy");
    n_backpressure += (!cmd_ready) ? 1 : 0;
    @(negedge clk);
    cmd_valid = 1'b0;
    cycles += 1;
    while (!done) begin @(posedge clk); #1; cycles++; end
    @(negedge clk);
  endtask

  // ---- model state -----------------------------------------------------------
  logic [N-1:0][15:0] X [R], X2 [R], T [R], XT [N], rowbuf;
  logic [N-1:0][15:0] W0w [N], W1w [N];
  int   e_w0, e_w1;
  real  Wn0 [N][N], Wn1 [N][N];        // narrow weights as real numbers
  real  Y1 [R][N], G [R][N];
  int   n_pass, n_add_relu, n_sub, n_relu_bwd, n_transpose, n_load_a, n_wupdate, n_relu_zero;

  function automatic logic [15:0] rnd_act();
    return {1'($urandom), 8'($urandom_range(123, 130)), 7'($urandom)};
  endfunction

  // checks a streamed result row: out ~ base + P, P = x . Wn (column j)
  task automatic check_mm_row(input string tag, input logic [N-1:0][15:0] xr,
                              input real Wn[N][N], input int ew_n, input real base[N],
                              input int mode, input logic [N-1:0][15:0] got);
    int ea;
    ea = row_exp(xr);
    for (int j = 0; j < N; j++) begin
      real p, bnd, expv, g;
      p = 0.0; bnd = 0.0;
      for (int k = 0; k < N; k++) begin
        p   += fp2r(xr[k]) * Wn[k][j];
        bnd += absr(Wn[k][j]) * pow2(ea);
      end
      expv = base[j] + p;
      if (mode == 1 && expv < 0.0) expv = 0.0;         // ReLU
      bnd += absr(expv) * pow2(-6) + absr(base[j]) * pow2(-7) + 1e-30;
      g = fp2r(got[j]);
      check(absr(g - expv) <= bnd,
            $sformatf("%s lane %0d: got %g expected %g (bound %g)", tag, j, g, expv, bnd));
      if (mode == 1 && got[j] == 16'h0) n_relu_zero++;
    end
  endtask

  task automatic check_relu_bwd_row(input logic [N-1:0][15:0] xr, input int b,
                                    input logic [N-1:0][15:0] got);
    int ea;
    ea = row_exp(xr);
    for (int j = 0; j < N; j++) if (Y1[b][j] > 0.0) begin
      real p, bnd;
      p = 0.0; bnd = 0.0;
      for (int k = 0; k < N; k++) begin
        p   += fp2r(xr[k]) * Wn0[k][j];
        bnd += absr(Wn0[k][j]) * pow2(ea);
      end
      bnd += absr(p) * pow2(-6) + 1e-30;
      check(absr(fp2r(got[j]) - p) <= bnd,
            $sformatf("RELU_BWD lane %0d: got %g expected %g", j, fp2r(got[j]), p));
    end
  endtask

  initial begin
    int cyc, cyc_a, cyc_b, e;
    real zero_base[N];
    logic [N-1:0][15:0] wrow;
    foreach (zero_base[j]) zero_base[j] = 0.0;
    repeat (4) @(negedge clk);
    rst_n = 1'b1;

    // ---- load weights (wide BFP) ------------------------------------------
    e_w0 = -20; e_w1 = -21;
    for (int k = 0; k < N; k++) begin
      for (int j = 0; j < N; j++) begin W0w[k][j] = 16'($urandom); W1w[k][j] = 16'($urandom); end
      wb_write(k, W0w[k], e_w0);
      wb_write(N + k, W1w[k], e_w1);
      for (int j = 0; j < N; j++) begin
        Wn0[k][j] = real'(int'($signed(W0w[k][j])) >>> 8) * pow2(e_w0 + 8);
        Wn1[k][j] = real'(int'($signed(W1w[k][j])) >>> 8) * pow2(e_w1 + 8);
      end
    end
    // ---- load activations -----------------------------------------------------
    for (int b = 0; b < R; b++) begin
      for (int i = 0; i < N; i++) begin X[b][i] = rnd_act(); X2[b][i] = rnd_act(); T[b][i] = rnd_act(); end
      ab_write(b, X[b]); ab_write(200 + b, X2[b]); ab_write(1000 + b, T[b]);
    end
    for (int k = 0; k < N; k++) begin
      for (int b = 0; b < N; b++) XT[k][b] = X[b][k];
      ab_write(600 + k, XT[k]);
    end

    // ---- forward, tile 0: Y1 = X W0 --------------------------------------------
    run(CMD_LOAD_W, ACT_PASS, 1'b0, 0, 0, 0, 0, 0, 16'h0, cyc);
    check(cyc == N + 3, $sformatf("LOAD_W took %0d cycles", cyc));
    run(CMD_MATMUL, ACT_PASS, 1'b0, 0, 0, 0, 100, R, 16'h0, cyc_a);
    n_pass++;
    for (int b = 0; b < R; b++) begin
      ab_read(100 + b, rowbuf);
      check_mm_row("Y1", X[b], Wn0, e_w0 + 8, zero_base, 0, rowbuf);
      for (int j = 0; j < N; j++) Y1[b][j] = fp2r(rowbuf[j]);
    end
    // rate: half the rows must take exactly R/2 fewer cycles
    run(CMD_MATMUL, ACT_PASS, 1'b0, 0, 0, 0, 3000, R / 2, 16'h0, cyc_b);
    check(cyc_a - cyc_b == R / 2, $sformatf("MATMUL rate: %0d vs %0d cycles", cyc_a, cyc_b));
    check(cyc_a == R + 7, $sformatf("MATMUL latency: %0d cycles for %0d rows", cyc_a, R));

    // ---- forward, tile 1 accumulated in FP, then ReLU ------------------------
    run(CMD_LOAD_W, ACT_PASS, 1'b0, N, 0, 0, 0, 0, 16'h0, cyc);
    run(CMD_MATMUL, ACT_ADD_RELU, 1'b0, 0, 200, 100, 300, R, 16'h0, cyc);
    n_add_relu++;
    for (int b = 0; b < R; b++) begin
      real base[N];
      for (int j = 0; j < N; j++) base[j] = Y1[b][j];
      ab_read(300 + b, rowbuf);
      check_mm_row("Y2", X2[b], Wn1, e_w1 + 8, base, 1, rowbuf);
    end

    // ---- loss gradient G = X W0 - T ------------------------------------------
    run(CMD_LOAD_W, ACT_PASS, 1'b0, 0, 0, 0, 0, 0, 16'h0, cyc);
    run(CMD_MATMUL, ACT_SUB, 1'b0, 0, 0, 1000, 400, R, 16'h0, cyc);
    n_sub++;
    for (int b = 0; b < R; b++) begin
      real base[N];
      for (int j = 0; j < N; j++) base[j] = -fp2r(T[b][j]);
      ab_read(400 + b, rowbuf);
      check_mm_row("G", X[b], Wn0, e_w0 + 8, base, 0, rowbuf);
      for (int j = 0; j < N; j++) G[b][j] = fp2r(rowbuf[j]);
    end

    // ---- ReLU derivative mask: (Y1 > 0) ? X W0 : 0 ---------------------------
    run(CMD_MATMUL, ACT_RELU_BWD, 1'b0, 0, 0, 100, 500, R, 16'h0, cyc);
    n_relu_bwd++;
    for (int b = 0; b < R; b++) begin
      real base[N];
      logic [N-1:0][15:0] masked;
      for (int j = 0; j < N; j++) base[j] = 0.0;
      ab_read(500 + b, rowbuf);
      masked = rowbuf;
      for (int j = 0; j < N; j++)
        if (!(Y1[b][j] > 0.0)) begin
          check(rowbuf[j] == 16'h0, "RELU_BWD zero where Y1 <= 0");
          masked[j] = 16'h0;
        end
      // where Y1 > 0 the product passes unchanged; elsewhere compare 0 with 0
      for (int j = 0; j < N; j++) if (!(Y1[b][j] > 0.0)) masked[j] = 16'h0;
      check_relu_bwd_row(X[b], b, masked);
    end

    // ---- backward: dX = G W0^T ------------------------------------------------
    run(CMD_LOAD_W, ACT_PASS, 1'b1, 0, 0, 0, 0, 0, 16'h0, cyc);
    n_transpose++;
    run(CMD_MATMUL, ACT_PASS, 1'b0, 0, 400, 0, 800, R, 16'h0, cyc);
    begin
      real WnT [N][N];
      logic [N-1:0][15:0] grow;
      for (int k = 0; k < N; k++) for (int j = 0; j < N; j++) WnT[k][j] = Wn0[j][k];
      for (int b = 0; b < R; b++) begin
        for (int j = 0; j < N; j++) grow[j] = r2fp(G[b][j]);   // exact: G is FP already
        ab_read(800 + b, rowbuf);
        check_mm_row("dX", grow, WnT, e_w0 + 8, zero_base, 0, rowbuf);
      end
    end

    // ---- weight gradient dW = X^T G (first N rows of the batch) ---------------
    run(CMD_LOAD_A, ACT_PASS, 1'b0, 0, 400, 0, 0, 0, 16'h0, cyc);
    n_load_a++;
    check(cyc == 2 * N + 7, $sformatf("LOAD_A took %0d cycles", cyc));
    run(CMD_MATMUL, ACT_PASS, 1'b0, 0, 600, 0, 700, N, 16'h0, cyc);
    begin
      int eg, mx;
      mx = 0;
      for (int b = 0; b < N; b++) for (int j = 0; j < N; j++)
        if (int'(r2fp(G[b][j]) >> 7 & 8'hFF) > mx) mx = int'(r2fp(G[b][j]) >> 7 & 8'hFF);
      eg = mx - 127 + 2 - MANT_W;
      for (int k = 0; k < N; k++) begin
        int ex;
        ex = row_exp(XT[k]);
        ab_read(700 + k, rowbuf);
        for (int j = 0; j < N; j++) begin
          real p, bnd, g;
          p = 0.0; bnd = 0.0;
          for (int b = 0; b < N; b++) begin
            p   += fp2r(X[b][k]) * G[b][j];
            bnd += absr(fp2r(X[b][k])) * pow2(eg) + absr(G[b][j]) * pow2(ex) + pow2(eg + ex);
          end
          bnd += absr(p) * pow2(-6);
          g = fp2r(rowbuf[j]);
          check(absr(g - p) <= bnd, $sformatf("dW[%0d][%0d]: got %g expected %g (bound %g)", k, j, g, p, bnd));
        end
      end
    end

    // ---- weight update W0 <- W0 - lr dW ---------------------------------------
    begin
      real dW [N][N], wn [N][N], lrv, mxv;
      logic [15:0] lr16;
      lr16 = 16'h3C00;                 // 2^-7
      lrv  = fp2r(lr16);
      for (int k = 0; k < N; k++) begin
        ab_read(700 + k, rowbuf);
        for (int j = 0; j < N; j++) dW[k][j] = fp2r(rowbuf[j]);
      end
      run(CMD_WUPDATE, ACT_PASS, 1'b0, 0, 700, 0, 0, 0, lr16, cyc);
      n_wupdate++;
      check(cyc == 2 * N + 11, $sformatf("WUPDATE took %0d cycles", cyc));
      mxv = 0.0;
      for (int k = 0; k < N; k++)
        for (int j = 0; j < N; j++) begin
          wn[k][j] = real'(int'($signed(W0w[k][j]))) * pow2(e_w0) - lrv * dW[k][j];
          if (absr(wn[k][j]) > mxv) mxv = absr(wn[k][j]);
        end
      for (int k = 0; k < N; k++) begin
        wb_read(k, wrow, e);
        if (k == 0) begin
          int ee; real a;
          a = mxv; ee = 0;
          while (a >= 2.0) begin a = a / 2.0; ee++; end
          while (a < 1.0)  begin a = a * 2.0; ee--; end
          ee = ee + 2 - WMANT_W;       // expected tile exponent
          check(e >= ee && e <= ee + 1, $sformatf("updated tile exponent %0d, expected %0d", e, ee));
        end
        for (int j = 0; j < N; j++) begin
          real got, bnd;
          got = real'(int'($signed(wrow[j]))) * pow2(e);
          bnd = pow2(e) + absr(wn[k][j]) * pow2(-14) + lrv * absr(dW[k][j]) * pow2(-14);
          check(absr(got - wn[k][j]) <= bnd,
                $sformatf("W0'[%0d][%0d]: got %g expected %g (bound %g)", k, j, got, wn[k][j], bnd));
        end
      end
    end

    // ---- every mechanism must have happened ----------------------------------
    $display("mechanisms: pass=%0d add_relu=%0d relu_zero=%0d sub=%0d relu_bwd=%0d transpose=%0d load_a=%0d wupdate=%0d backpressure=%0d",
             n_pass, n_add_relu, n_relu_zero, n_sub, n_relu_bwd, n_transpose, n_load_a, n_wupdate, n_backpressure);
    check(n_pass > 0, "PASS used");
    check(n_add_relu > 0 && n_relu_zero > 0, "ADD_RELU clipped something");
    check(n_sub > 0, "SUB used");
    check(n_relu_bwd > 0, "RELU_BWD used");
    check(n_transpose > 0, "transposed tile load used");
    check(n_load_a > 0, "activation tile load used");
    check(n_wupdate > 0, "weight update used");
    check(n_backpressure > 0, "command backpressure seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
