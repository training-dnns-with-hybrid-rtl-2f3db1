// tb_bfp_to_fp -- self-checking test of the BFP-to-FP converter.
// Random signed accumulator values of all magnitudes, with random block
// exponents, are streamed one vector per cycle.  For every lane the test
// builds the two FP words that bracket the exact value a * 2^e (truncated and
// rounded up, with renormalisation, flush-to-zero and saturation) and checks
// that the unit returned one of them, one cycle after the input.  A final
// check averages many conversions of one vector to show that the rounding is
// unbiased.
module tb_bfp_to_fp;
  import hbfp_pkg::*;
  localparam int N  = TILE;
  localparam int AW = 2 * MANT_W + $clog2(TILE);
  localparam int XW = BEXP_W + 1;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic [N-1:0][AW-1:0] in_acc;
  logic signed [XW-1:0] in_exp;
  logic out_valid;
  logic [N-1:0][FP_W-1:0] out_fp;
  int checks = 0, failures = 0;

  bfp_to_fp dut (.clk, .rst_n, .in_valid, .in_acc, .in_exp, .out_valid, .out_fp);

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

  // FP word for sign s, significand sig (in [128,256]) at unbiased scale:
  // value = sig * 2^(k - 7)
  function automatic logic [15:0] pack(input bit s, input longint sig, input int k);
    int e;
    e = k + 127;
    if (sig == 256) begin sig = 128; e++; end
    if (sig == 0 || e < 1) return 16'h0000;
    if (e > 254) return {s, 8'd254, 7'h7F};
    return {s, 8'(e), 7'(sig)};
  endfunction

  function automatic real pow2(input int k);
    real r;
    r = 1.0;
    if (k >= 0) for (int i = 0; i < k; i++) r = r * 2.0;
    else        for (int i = 0; i < -k; i++) r = r / 2.0;
    return r;
  endfunction

  function automatic real fp2real(input logic [15:0] f);
    real v;
    int sg;
    if (f[14:7] == 0) return 0.0;
    sg = 128 + int'(f[6:0]);
    v = real'(sg) * pow2(int'(f[14:7]) - 127 - 7);
    return f[15] ? -v : v;
  endfunction

  logic [N-1:0][AW-1:0] prev_acc;
  logic signed [XW-1:0] prev_exp;
  logic prev_valid = 1'b0;

  task automatic check_prev();
    check(out_valid === 1'b1, "out_valid one cycle after in_valid");
    for (int i = 0; i < N; i++) begin
      longint a, mag, lo, hi;
      int p, sh;
      bit neg;
      logic [15:0] flo, fhi;
      a   = longint'($signed(prev_acc[i]));
      neg = (a < 0);
      mag = neg ? -a : a;
      p = -1;
      for (int b = 0; b < 40; b++) if ((mag >> b) & 1) p = b;
      if (p < 0) begin flo = 16'h0; fhi = 16'h0; end
      else begin
        if (p > 7) begin
          sh = p - 7;
          lo = mag >> sh;
          hi = ((lo << sh) == mag) ? lo : lo + 1;
        end else begin
          lo = mag << (7 - p);
          hi = lo;
        end
        flo = pack(neg, lo, p + int'(prev_exp));
        fhi = pack(neg, hi, p + int'(prev_exp));
      end
      check(out_fp[i] == flo || out_fp[i] == fhi,
            $sformatf("lane %0d acc=%0d e=%0d: got %h expected %h or %h",
                      i, a, prev_exp, out_fp[i], flo, fhi));
    end
  endtask

  initial begin
    real sum[N];
    logic [N-1:0][AW-1:0] fixed_acc;
    int nvec;
    in_acc = '0; in_exp = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 3000; k++) begin
      @(negedge clk);
      if (prev_valid) check_prev();
      in_valid = 1'b1;
      for (int i = 0; i < N; i++) begin
        int bits;
        bits = $urandom_range(0, AW);
        in_acc[i] = AW'($signed(AW'($urandom)) >>> (AW - bits));
        if ($urandom_range(0, 19) == 0) in_acc[i] = '0;
        if ($urandom_range(0, 49) == 0) in_acc[i] = {1'b1, {(AW-1){1'b0}}};
      end
      case (k % 4)
        0: in_exp = XW'($urandom_range(0, 60)) - XW'(30);
        1: in_exp = XW'(-140);                  // underflow region
        2: in_exp = XW'(110);                   // overflow region
        default: in_exp = XW'($urandom_range(0, 400)) - XW'(200);
      endcase
      prev_valid = 1'b1; prev_acc = in_acc; prev_exp = in_exp;
    end
    @(negedge clk);
    check_prev();
    in_valid = 1'b0;
    @(negedge clk);
    check(out_valid === 1'b0, "out_valid drops with in_valid");
    // ---- unbiased stochastic rounding ------------------------------------
    for (int i = 0; i < N; i++) fixed_acc[i] = AW'(($urandom_range(0, 1) ? -1 : 1) * $urandom_range(5000, 900000));
    foreach (sum[i]) sum[i] = 0.0;
    nvec = 4000;
    for (int k = 0; k < nvec; k++) begin
      @(negedge clk);
      in_valid = 1'b1; in_acc = fixed_acc; in_exp = XW'(-10);
      @(negedge clk);
      in_valid = 1'b0;
      for (int i = 0; i < N; i++) sum[i] += fp2real(out_fp[i]);
    end
    for (int i = 0; i < N; i++) begin
      real exact, avg, tol;
      exact = real'(longint'($signed(fixed_acc[i]))) / 1024.0;
      avg   = sum[i] / nvec;
      tol   = (exact < 0 ? -exact : exact) * 0.0015;
      check((avg - exact) < tol && (exact - avg) < tol,
            $sformatf("lane %0d mean %f vs exact %f (biased rounding)", i, avg, exact));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
