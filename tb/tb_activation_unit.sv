// tb_activation_unit -- self-checking test of the FP activation/loss unit.
// Every operation is driven with random operands, one vector per cycle, and
// the weight-update path runs at the same time.  The reference computes each
// result exactly in double precision and rounds it to the nearest value of
// the target format (ties to even, flush to zero, saturation), independently
// of the unit's bit-level algorithm.  Special cases (zero operands, exact
// cancellation, large exponent gaps) are included.
module tb_activation_unit;
  import hbfp_pkg::*;
  localparam int N = TILE;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, wu_valid = 1'b0;
  act_op_e op = ACT_PASS;
  logic [N-1:0][FP_W-1:0] x = '0, y = '0, g = '0, out;
  logic [N-1:0][WFP_W-1:0] w = '0, w_out;
  logic [FP_W-1:0] lr = '0;
  logic out_valid, wu_out_valid;
  int checks = 0, failures = 0;
  int op_count[5];

  activation_unit dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real pow2(input int k);
    real r;
    r = 1.0;
    if (k >= 0) for (int i = 0; i < k; i++) r = r * 2.0;
    else        for (int i = 0; i < -k; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real to_real(input logic [31:0] f, input int fw);
    int e;
    real v;
    e = int'((f >> fw) & 32'hFF);
    if (e == 0) return 0.0;
    v = (1.0 + real'(f & ((32'd1 << fw) - 1)) / pow2(fw)) * pow2(e - 127);
    return f[8 + fw] ? -v : v;
  endfunction

  // nearest value of the format, ties to even
  function automatic logic [31:0] round_fmt(input real v, input int fw);
    real a, m, fl, fr;
    int k;
    bit s;
    if (v == 0.0) return 0;
    s = (v < 0.0);
    a = s ? -v : v;
    k = 0;
    while (a >= 2.0) begin a = a / 2.0; k++; end
    while (a < 1.0)  begin a = a * 2.0; k--; end
    m  = a * pow2(fw);
    fl = $floor(m);
    fr = m - fl;
    if (fr > 0.5 || (fr == 0.5 && (longint'(fl) % 2 == 1))) fl = fl + 1.0;
    if (fl >= pow2(fw + 1)) begin fl = fl / 2.0; k++; end
    if (k + 127 < 1) return 0;
    if (k + 127 > 254) return (32'(s) << (8 + fw)) | (32'd254 << fw) | ((32'd1 << fw) - 1);
    return (32'(s) << (8 + fw)) | (32'(k + 127) << fw) | (32'(longint'(fl)) & ((32'd1 << fw) - 1));
  endfunction

  function automatic logic [15:0] rand_fp(input int center, input int spread);
    int e;
    e = center + $urandom_range(0, spread) - spread / 2;
    if (e < 1) e = 1;
    if (e > 254) e = 254;
    return {1'($urandom), 8'(e), 7'($urandom)};
  endfunction

  initial begin
    logic [N-1:0][FP_W-1:0] px, py, pg;
    logic [N-1:0][WFP_W-1:0] pw;
    logic [FP_W-1:0] plr;
    act_op_e pop;
    bit pend;
    pend = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 4000; k++) begin
      @(negedge clk);
      if (pend) begin
        check(out_valid && wu_out_valid, "valid latency 1");
        for (int i = 0; i < N; i++) begin
          logic [15:0] e16;
          logic [31:0] e24;
          real xv, yv;
          xv = to_real(32'(px[i]), 7);
          yv = to_real(32'(py[i]), 7);
          case (pop)
            ACT_PASS:     e16 = px[i];
            ACT_ADD:      e16 = 16'(round_fmt(xv + yv, 7));
            ACT_SUB:      e16 = 16'(round_fmt(xv - yv, 7));
            ACT_ADD_RELU: e16 = (xv + yv > 0.0) ? 16'(round_fmt(xv + yv, 7)) : 16'h0;
            default:      e16 = (yv > 0.0) ? px[i] : 16'h0;
          endcase
          check(out[i] == e16, $sformatf("op %s lane %0d x=%h y=%h: got %h exp %h",
                                         pop.name(), i, px[i], py[i], out[i], e16));
          e24 = round_fmt(to_real(32'(pw[i]), 15) -
                          to_real(32'(round_fmt(to_real(32'(plr), 7) * to_real(32'(pg[i]), 7), 15)), 15), 15);
          check(w_out[i] == 24'(e24), $sformatf("wupd lane %0d w=%h g=%h lr=%h: got %h exp %h",
                                                i, pw[i], pg[i], plr, w_out[i], e24));
        end
      end
      in_valid = 1'b1; wu_valid = 1'b1;
      op = act_op_e'(k % 5);
      op_count[k % 5]++;
      for (int i = 0; i < N; i++) begin
        int sp;
        sp = (k % 11 == 0) ? 80 : 12;
        x[i] = rand_fp(127, sp);
        y[i] = rand_fp(127, sp);
        if ($urandom_range(0, 15) == 0) x[i] = '0;
        if ($urandom_range(0, 15) == 0) y[i] = '0;
        if ($urandom_range(0, 15) == 0) y[i] = {~x[i][15], x[i][14:0]};   // cancellation
        w[i] = {1'($urandom), 8'($urandom_range(110, 130)), 15'($urandom)};
        g[i] = rand_fp(120, 20);
        if ($urandom_range(0, 15) == 0) g[i] = '0;
      end
      if (k % 13 == 0) begin x[0] = 16'h7F7F; y[0] = 16'h7F7F; end   // saturation
      lr = rand_fp(120, 8);
      lr[15] = 1'b0;
      px = x; py = y; pg = g; pw = w; plr = lr; pop = op; pend = 1'b1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
