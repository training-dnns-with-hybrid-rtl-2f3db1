// tb_hbfp_ctrl -- self-checking test of the sequencer on its own.
// Each command type is issued with random addresses; every control strobe
// the sequencer raises is logged with its cycle (counted from the accepting
// clock edge) and address, and the logs are compared with the stage schedule
// of the design: which cycle each row's read, conversion, tile load or write
// must happen in.  For the two-pass commands the test feeds random exponents
// back and checks that the second pass forces exactly the largest one seen
// in the first, and that only the second pass writes.
module tb_hbfp_ctrl;
  import hbfp_pkg::*;
  localparam int N = TILE;
  logic clk = 1'b0, rst_n = 1'b0;
  logic cmd_valid = 1'b0, cmd_ready, busy, done;
  hbfp_cmd_t cmd = '0;
  logic wb_re, wb_we, ab_ra_en, ab_rb_en, ab_we;
  logic [W_AW-1:0] wb_raddr, wb_waddr;
  logic [ACT_AW-1:0] ab_ra_addr, ab_rb_addr, ab_waddr;
  logic f2b_in_valid, f2b_use_emax, mm_stream, mm_load_valid, mm_load_sel, mm_load_transpose;
  logic wb2f_in_valid, wf2b_use_emax;
  logic [FP_EXP_W-1:0] f2b_emax, wf2b_emax;
  logic [FP_EXP_W-1:0] f2b_out_emax = '0, wf2b_out_emax = '0;
  logic [$clog2(N)-1:0] mm_load_row;
  act_op_e act_op;
  fp_t act_lr;

  hbfp_ctrl dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // event logs: cycle * 65536 + address
  int ev_ra[$], ev_rb[$], ev_we[$], ev_wre[$], ev_wwe[$], ev_f2b[$], ev_load[$], ev_wb2f[$];
  int done_at, emax_seen, max_fed;
  bit force_ok;

  task automatic expect_seq(input string name, ref int q[$], input int first, input int cnt, input int base,
                          input int inc = 1);
    check(q.size() == cnt, $sformatf("%s: %0d events, expected %0d", name, q.size(), cnt));
    for (int i = 0; i < q.size() && i < cnt; i++)
      check(q[i] == (first + i) * 65536 + base + inc * i,
            $sformatf("%s event %0d: cycle %0d addr %0d, expected cycle %0d addr %0d",
                      name, i, q[i] / 65536, q[i] % 65536, first + i, base + inc * i));
  endtask

  // issue a command and log strobes until done
  task automatic run(input hbfp_cmd_t c, input int feed_stage);
    int n;
    ev_ra.delete(); ev_rb.delete(); ev_we.delete(); ev_wre.delete(); ev_wwe.delete();
    ev_f2b.delete(); ev_load.delete(); ev_wb2f.delete();
    max_fed = 0; force_ok = 1'b1; done_at = -1;
    @(negedge clk);
    check(cmd_ready, "ready when idle");
    cmd_valid = 1'b1; cmd = c;
    @(negedge clk);
    cmd_valid = 1'b1;                         // a second command must wait
    cmd = '0;
    n = 1;
    while (done_at < 0 && n < 400) begin
      check(!cmd_ready && busy, "not ready while busy");
      if (ab_ra_en)      ev_ra.push_back(n * 65536 + int'(ab_ra_addr));
      if (ab_rb_en)      ev_rb.push_back(n * 65536 + int'(ab_rb_addr));
      if (ab_we)         ev_we.push_back(n * 65536 + int'(ab_waddr));
      if (wb_re)         ev_wre.push_back(n * 65536 + int'(wb_raddr));
      if (wb_we)         ev_wwe.push_back(n * 65536 + int'(wb_waddr));
      if (f2b_in_valid)  ev_f2b.push_back(n * 65536 + 0);
      if (wb2f_in_valid) ev_wb2f.push_back(n * 65536 + 0);
      if (mm_load_valid) ev_load.push_back(n * 65536 + int'(mm_load_row));
      // exponents returned by the converters, as if from row data
      f2b_out_emax  = 8'($urandom_range(1, 254));
      wf2b_out_emax = 8'($urandom_range(1, 254));
      @(posedge clk); #1;
      if (done) done_at = n;
      @(negedge clk);
      cmd_valid = 1'b0;
      n++;
    end
  endtask

  initial begin
    hbfp_cmd_t c;
    int R, src, aux, dst, wrow;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 6; it++) begin
      R = $urandom_range(1, 60); src = $urandom_range(0, 4000); aux = $urandom_range(0, 4000);
      dst = $urandom_range(0, 4000); wrow = $urandom_range(0, 4000);
      // ---- MATMUL --------------------------------------------------------
      c = '{op: CMD_MATMUL, act_op: act_op_e'(it % 5), transpose: 1'b0, w_row: W_AW'(wrow),
            src: ACT_AW'(src), aux: ACT_AW'(aux), dst: ACT_AW'(dst), rows: (ACT_AW+1)'(R), lr: '0};
      fork
        run(c, 0);
        begin @(negedge clk); @(negedge clk); #1;
          check(act_op == act_op_e'(it % 5) && mm_stream, "MATMUL op/stream held"); end
      join
      expect_seq("MATMUL ra", ev_ra, 1, R, src);
      expect_seq("MATMUL f2b", ev_f2b, 2, R, 0, 0);
      expect_seq("MATMUL rb", ev_rb, 4, R, aux);
      expect_seq("MATMUL we", ev_we, 6, R, dst);
      check(done_at == R + 6, $sformatf("MATMUL done at %0d, rows %0d", done_at, R));
      check(ev_wwe.size() == 0 && ev_load.size() == 0, "MATMUL touches no weights");
      // ---- LOAD_W ----------------------------------------------------------
      c.op = CMD_LOAD_W; c.transpose = it[0];
      run(c, 0);
      expect_seq("LOAD_W wre", ev_wre, 1, N, wrow);
      expect_seq("LOAD_W load", ev_load, 2, N, 0);
      check(done_at == N + 2, $sformatf("LOAD_W done at %0d", done_at));
      check(mm_load_transpose == it[0], "transpose flag held");
    end
    // ---- LOAD_A: two passes, forced tile exponent ----------------------------
    begin
      int fed[$];
      int mx;
      c = '{op: CMD_LOAD_A, act_op: ACT_PASS, transpose: 1'b1, w_row: '0, src: ACT_AW'(77),
            aux: '0, dst: '0, rows: '0, lr: '0};
      fork
        run(c, 1);
        begin   // record what the converter reports in pass 1 stage t2
          int n; n = 0;
          @(negedge clk);
          while (!done) begin
            @(posedge clk);
            if (dut.pipe_v[1] && !dut.pass2) fed.push_back(int'(f2b_out_emax));
            if (mm_load_valid) begin
              check(f2b_use_emax && mm_load_sel, "LOAD_A pass 2 forces the exponent");
              mx = 0; foreach (fed[i]) if (fed[i] > mx) mx = fed[i];
              check(int'(f2b_emax) == mx, $sformatf("LOAD_A forced emax %0d, max %0d", f2b_emax, mx));
            end
          end
        end
      join
      check(fed.size() == N, $sformatf("LOAD_A pass 1 rows %0d", fed.size()));
      check(ev_ra.size() == 2 * N, "LOAD_A reads every row twice");
      check(ev_load.size() == N, "LOAD_A loads N rows");
      for (int i = 0; i < ev_load.size(); i++) check(ev_load[i] % 65536 == i, "LOAD_A row order");
      check(done_at == 2 * N + 6, $sformatf("LOAD_A done at %0d", done_at));
    end
    // ---- WUPDATE: two passes, write only in pass 2 ---------------------------
    begin
      int fed[$];
      int mx;
      c = '{op: CMD_WUPDATE, act_op: ACT_PASS, transpose: 1'b0, w_row: W_AW'(240), src: ACT_AW'(900),
            aux: '0, dst: '0, rows: '0, lr: fp_t'(16'h3C00)};
      fork
        run(c, 3);
        begin
          @(negedge clk);
          while (!done) begin
            @(posedge clk);
            if (dut.pipe_v[3] && !dut.pass2) fed.push_back(int'(wf2b_out_emax));
            if (wb_we) begin
              mx = 0; foreach (fed[i]) if (fed[i] > mx) mx = fed[i];
              check(wf2b_use_emax && int'(wf2b_emax) == mx,
                    $sformatf("WUPDATE forced emax %0d, max %0d", wf2b_emax, mx));
              check(act_lr == fp_t'(16'h3C00), "learning rate held");
            end
          end
        end
      join
      check(fed.size() == N, "WUPDATE pass 1 rows");
      check(ev_wre.size() == 2 * N && ev_wb2f.size() == 2 * N && ev_ra.size() == 2 * N,
            "WUPDATE reads weights and gradients in both passes");
      check(ev_wwe.size() == N, $sformatf("WUPDATE writes %0d rows", ev_wwe.size()));
      for (int i = 0; i < ev_wwe.size(); i++) check(ev_wwe[i] % 65536 == 240 + i, "WUPDATE write address");
      for (int i = 0; i < N; i++) begin
        check(ev_ra[i] == (ev_wre[i] / 65536 + 1) * 65536 + 900 + i, "gradient read one cycle after weight read");
        check(ev_wwe[i] / 65536 == ev_wre[N + i] / 65536 + 4, "write four cycles after read");
      end
      check(done_at == 2 * N + 10, $sformatf("WUPDATE done at %0d", done_at));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
