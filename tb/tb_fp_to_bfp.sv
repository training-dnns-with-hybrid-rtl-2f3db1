// tb_fp_to_bfp -- self-checking test of the FP-to-BFP converter.
// Random vectors of bfloat16-style values (mixed signs, exponents spread over
// several binades, some zeros) are streamed one per cycle.  For every lane the
// expected mantissa is worked out from the definition: the exact scaled value
// sig / 2^s must come out as its floor or its ceiling (stochastic rounding),
// saturated at 2^(MW-1)-1.  The test also checks the block exponent, the
// one-cycle latency at full rate, the forced-exponent mode, and that the
// rounding is unbiased on average (a truncating unit fails that check).
module tb_fp_to_bfp;
  import hbfp_pkg::*;
  localparam int N = TILE;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, use_emax_in = 1'b0;
  logic [N-1:0][FP_W-1:0] in_fp;
  logic [FP_EXP_W-1:0] emax_in = '0;
  logic out_valid;
  logic [N-1:0][MANT_W-1:0] out_mant;
  logic signed [BEXP_W-1:0] out_exp;
  logic [FP_EXP_W-1:0] out_emax;
  int checks = 0, failures = 0;

  fp_to_bfp dut (.clk, .rst_n, .in_valid, .in_fp, .use_emax_in, .emax_in,
                 .out_valid, .out_mant, .out_exp, .out_emax);

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

  // expected results of the vector driven one cycle earlier
  logic [N-1:0][FP_W-1:0] prev_fp;
  logic prev_valid = 1'b0, prev_force = 1'b0;
  logic [FP_EXP_W-1:0] prev_emax_in;

  function automatic logic [N-1:0][FP_W-1:0] rand_vec(input int center, input int spread, input int zero_pct);
    logic [N-1:0][FP_W-1:0] v;
    for (int i = 0; i < N; i++) begin
      int e;
      e = center + $urandom_range(0, spread) - spread / 2;
      if (e < 1) e = 1;
      if (e > 254) e = 254;
      v[i] = {1'($urandom), 8'(e), 7'($urandom)};
      if ($urandom_range(0, 99) < zero_pct) v[i] = '0;
    end
    return v;
  endfunction

  task automatic check_prev();
    int emax, ee;
    emax = 0;
    for (int i = 0; i < N; i++) if (int'(prev_fp[i][14:7]) > emax) emax = int'(prev_fp[i][14:7]);
    check(out_valid === 1'b1, "out_valid one cycle after in_valid");
    check(int'(out_emax) == emax, $sformatf("out_emax %0d exp %0d", out_emax, emax));
    if (prev_force) emax = int'(prev_emax_in);
    ee = emax - 127 + 2 - MANT_W;
    check(int'(out_exp) == ee, $sformatf("block exponent %0d exp %0d", out_exp, ee));
    for (int i = 0; i < N; i++) begin
      longint sig, lo, hi, got;
      int s, e;
      e   = int'(prev_fp[i][14:7]);
      sig = longint'({1'b1, prev_fp[i][6:0]});
      s   = emax - e + 1;             // scaled value = sig / 2^s
      if (e == 0) begin lo = 0; hi = 0; end
      else if (s >= 40) begin lo = 0; hi = 1; end
      else begin
        lo = sig >> s;
        hi = ((lo << s) == sig) ? lo : lo + 1;
      end
      if (lo > 127) lo = 127;
      if (hi > 127) hi = 127;
      got = longint'($signed(out_mant[i]));
      if (prev_fp[i][15] && e != 0) got = -got;
      check(got == lo || got == hi,
            $sformatf("lane %0d fp=%h: mant %0d not in [%0d,%0d]", i, prev_fp[i], $signed(out_mant[i]), lo, hi));
    end
  endtask

  initial begin
    int nvec;
    real sum[N];
    logic [N-1:0][FP_W-1:0] fixed_vec;
    in_fp = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // ---- random vectors, one per cycle ----------------------------------
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk);
      if (prev_valid) check_prev();
      in_valid    = ($urandom_range(0, 9) != 0);
      use_emax_in = 1'b0;
      in_fp       = rand_vec($urandom_range(60, 190), (k % 3 == 0) ? 30 : 8, (k % 5 == 0) ? 30 : 0);
      if (in_valid && k % 7 == 0) begin      // forced (tile-wide) exponent
        int mx;
        mx = 0;
        for (int i = 0; i < N; i++) if (int'(in_fp[i][14:7]) > mx) mx = int'(in_fp[i][14:7]);
        use_emax_in = 1'b1;
        emax_in     = 8'(mx + $urandom_range(0, 3));
      end
      prev_valid = in_valid; prev_fp = in_fp; prev_force = use_emax_in; prev_emax_in = emax_in;
      if (!in_valid) begin
        @(negedge clk);
        check(out_valid === 1'b0, "no output without input");
        prev_valid = 1'b0;
        // re-align: the next loop iteration starts on a fresh negedge
      end
    end
    @(negedge clk);
    if (prev_valid) check_prev();
    in_valid = 1'b0;
    // ---- unbiased rounding: average of many conversions ------------------
    fixed_vec = rand_vec(130, 10, 0);
    fixed_vec[0] = {1'b0, 8'd140, 7'h5B};     // the largest element
    foreach (sum[i]) sum[i] = 0.0;
    nvec = 4000;
    for (int k = 0; k < nvec; k++) begin
      @(negedge clk);
      in_valid = 1'b1; use_emax_in = 1'b0; in_fp = fixed_vec;
      @(negedge clk);
      in_valid = 1'b0;
      for (int i = 0; i < N; i++) sum[i] += real'($signed(out_mant[i]));
    end
    for (int i = 0; i < N; i++) begin
      real exact, avg;
      int e;
      e = int'(fixed_vec[i][14:7]);
      exact = real'({1'b1, fixed_vec[i][6:0]}) / (2.0 ** (140 - e + 1));
      if (fixed_vec[i][15]) exact = -exact;
      avg = sum[i] / nvec;
      check((avg - exact) < 0.06 && (exact - avg) < 0.06,
            $sformatf("lane %0d mean %f vs exact %f (biased rounding)", i, avg, exact));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
