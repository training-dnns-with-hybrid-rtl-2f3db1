// tb_weight_buffer -- self-checking test of the wide-storage weight buffer.
// Random rows are written and read back against a model; the test checks the
// wide read, the narrow read (top MW bits of each mantissa with the exponent
// raised by WMW - MW, so that the narrow value is the wide one truncated) and
// the one-cycle read latency.
module tb_weight_buffer;
  import hbfp_pkg::*;
  localparam int N = TILE, DEPTH = 16384, AW = $clog2(DEPTH), XW = BEXP_W;
  localparam int ROWS = 64;
  logic clk = 1'b0;
  logic re = 1'b0, we = 1'b0;
  logic [AW-1:0] raddr = '0, waddr = '0;
  logic [N-1:0][WMANT_W-1:0] rd_wide, wdata = '0;
  logic [N-1:0][MANT_W-1:0] rd_narrow;
  logic signed [XW-1:0] rd_wide_exp, rd_narrow_exp, wexp = '0;
  int checks = 0, failures = 0;

  weight_buffer dut (.*);

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

  function automatic logic [AW-1:0] addr_of(input int r);
    return AW'(r * 251 + 3);
  endfunction

  logic [N-1:0][WMANT_W-1:0] mm [ROWS];
  int me [ROWS];

  initial begin
    int pr;
    bit pend;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      we = 1'b1; waddr = addr_of(r); wexp = XW'($urandom_range(0, 300) - 150);
      for (int i = 0; i < N; i++) wdata[i] = 16'($urandom);
      mm[r] = wdata; me[r] = int'(wexp);
    end
    @(negedge clk); we = 1'b0;
    pend = 1'b0;
    for (int k = 0; k < 2000; k++) begin
      @(negedge clk);
      if (pend) begin
        check(rd_wide == mm[pr], "wide mantissas");
        check(int'(rd_wide_exp) == me[pr], "wide exponent");
        check(int'(rd_narrow_exp) == me[pr] + 8, "narrow exponent");
        for (int i = 0; i < N; i++) begin
          // narrow value = floor(wide / 2^8) as a signed number
          int wv, nv;
          wv = int'($signed(mm[pr][i]));
          nv = int'($signed(rd_narrow[i]));
          check(nv == (wv >>> 8), $sformatf("narrow lane %0d: %0d vs wide %0d", i, nv, wv));
        end
      end
      pr = $urandom_range(0, ROWS - 1);
      re = 1'b1; raddr = addr_of(pr); pend = 1'b1;
      if ($urandom_range(0, 2) == 0) begin
        int r;
        r = $urandom_range(0, ROWS - 1);
        if (r != pr) begin
          we = 1'b1; waddr = addr_of(r); wexp = XW'($urandom_range(0, 300) - 150);
          for (int i = 0; i < N; i++) wdata[i] = 16'($urandom);
          mm[r] = wdata; me[r] = int'(wexp);
        end else we = 1'b0;
      end else we = 1'b0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
