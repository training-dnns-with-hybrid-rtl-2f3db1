// tb_activation_buffer -- self-checking test of the activation buffer.
// Random writes and reads on both read ports run against a model memory; the
// test checks the one-cycle read latency, that a disabled port holds its
// output, and read-during-write (old data).
module tb_activation_buffer;
  import hbfp_pkg::*;
  localparam int N = TILE, DEPTH = 16384, AW = $clog2(DEPTH);
  localparam int ROWS = 64;     // addresses exercised, spread over the array
  logic clk = 1'b0;
  logic ra_en = 1'b0, rb_en = 1'b0, we = 1'b0;
  logic [AW-1:0] ra_addr = '0, rb_addr = '0, waddr = '0;
  logic [N-1:0][FP_W-1:0] ra_data, rb_data, wdata = '0;
  int checks = 0, failures = 0;

  activation_buffer dut (.*);

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
    return AW'(r * 257 + (r % 3) * 8000);
  endfunction

  logic [N-1:0][FP_W-1:0] model [ROWS];

  initial begin
    logic [N-1:0][FP_W-1:0] ea, eb, hold_a;
    bit pa, pb;
    // fill
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      we = 1'b1; waddr = addr_of(r);
      for (int i = 0; i < N; i++) wdata[i] = 16'($urandom);
      model[r] = wdata;
    end
    @(negedge clk); we = 1'b0;
    pa = 1'b0; pb = 1'b0;
    for (int k = 0; k < 3000; k++) begin
      int ar, br, wr;
      @(negedge clk);
      if (pa) check(ra_data == ea, $sformatf("port A read %0d", k));
      if (pb) check(rb_data == eb, $sformatf("port B read %0d", k));
      if (!ra_en && k > 0) check(ra_data == hold_a, "port A holds when disabled");
      hold_a = ra_data;
      ar = $urandom_range(0, ROWS - 1); br = $urandom_range(0, ROWS - 1);
      wr = ($urandom_range(0, 3) == 0) ? ar : $urandom_range(0, ROWS - 1);
      ra_en = ($urandom_range(0, 3) != 0); rb_en = ($urandom_range(0, 3) != 0);
      we    = ($urandom_range(0, 1) == 1);
      ra_addr = addr_of(ar); rb_addr = addr_of(br); waddr = addr_of(wr);
      for (int i = 0; i < N; i++) wdata[i] = 16'($urandom);
      ea = model[ar]; eb = model[br];       // old data on read-during-write
      pa = ra_en; pb = rb_en;
      if (we) model[wr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
