// tb_bfp_matmul -- self-checking test of the BFP matrix unit.
// Random 8-bit tiles are loaded (plain and transposed) and random activation
// vectors, including the extreme value -128, are streamed one per cycle.  The
// expected sums and exponents come from an integer model of the matrix
// product; the test also checks the one-cycle latency at full rate.
module tb_bfp_matmul;
  import hbfp_pkg::*;
  localparam int N  = TILE;
  localparam int MW = MANT_W;
  localparam int XW = BEXP_W;
  localparam int AW = 2 * MW + $clog2(N);
  logic clk = 1'b0, rst_n = 1'b0;
  logic w_load_valid = 1'b0, w_load_transpose = 1'b0;
  logic [$clog2(N)-1:0] w_load_row = '0;
  logic [N-1:0][MW-1:0] w_load_data = '0;
  logic signed [XW-1:0] w_load_exp = '0;
  logic in_valid = 1'b0;
  logic [N-1:0][MW-1:0] in_mant = '0;
  logic signed [XW-1:0] in_exp = '0;
  logic out_valid;
  logic [N-1:0][AW-1:0] out_acc;
  logic signed [XW:0] out_exp;
  int checks = 0, failures = 0;

  bfp_matmul dut (.*);

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

  int W[N][N];          // model tile W[k][j]
  int wexp;

  task automatic load_tile(input bit transpose, input bit extreme);
    int T[N][N];
    wexp = $urandom_range(0, 200) - 100;
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++)
        T[r][c] = extreme ? -128 : ($urandom_range(0, 255) - 128);
    for (int r = 0; r < N; r++) begin
      @(negedge clk);
      w_load_valid = 1'b1; w_load_row = r[$clog2(N)-1:0];
      w_load_transpose = transpose; w_load_exp = XW'(wexp);
      for (int c = 0; c < N; c++) w_load_data[c] = MW'(T[r][c]);
    end
    @(negedge clk);
    w_load_valid = 1'b0;
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++)
        if (transpose) W[c][r] = T[r][c]; else W[r][c] = T[r][c];
  endtask

  task automatic stream(input int count, input bit extreme);
    int a[N];
    int aexp, pexp;
    longint expv[N];
    bit pending;
    pending = 1'b0;
    for (int v = 0; v <= count; v++) begin
      @(negedge clk);
      if (pending) begin
        check(out_valid === 1'b1, "out_valid latency 1");
        check(int'(out_exp) == pexp, $sformatf("exponent %0d exp %0d", out_exp, pexp));
        for (int j = 0; j < N; j++)
          check(longint'($signed(out_acc[j])) == expv[j],
                $sformatf("vec %0d lane %0d: %0d exp %0d", v, j, $signed(out_acc[j]), expv[j]));
      end
      if (v == count) begin in_valid = 1'b0; break; end
      for (int k = 0; k < N; k++) a[k] = extreme ? -128 : ($urandom_range(0, 255) - 128);
      aexp = $urandom_range(0, 200) - 100;
      in_valid = 1'b1; in_exp = XW'(aexp);
      for (int k = 0; k < N; k++) in_mant[k] = MW'(a[k]);
      for (int j = 0; j < N; j++) begin
        expv[j] = 0;
        for (int k = 0; k < N; k++) expv[j] += longint'(a[k]) * longint'(W[k][j]);
      end
      pexp = aexp + wexp;
      pending = 1'b1;
    end
    @(negedge clk);
    check(out_valid === 1'b0, "out_valid low when idle");
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 12; t++) begin
      load_tile(t % 2 == 1, 1'b0);
      stream(50, 1'b0);
    end
    load_tile(1'b0, 1'b1);       // all -128: largest possible sums
    stream(4, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
