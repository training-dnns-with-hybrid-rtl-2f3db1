// tb_xorshift_rng -- self-checking test of the Xorshift generator.
// A reference model written as a plain function steps alongside the DUT; the
// test also checks that the state holds while `en` is low, that reset reloads
// the seed, and that the sequence does not repeat within the run.
module tb_xorshift_rng;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic [31:0] rnd;
  int checks = 0, failures = 0;
  localparam logic [31:0] SEED = 32'h1234_5678;

  xorshift_rng #(.SEED(SEED)) dut (.clk, .rst_n, .en, .rnd);

  always #5 clk = ~clk;

  function automatic logic [31:0] step(input logic [31:0] x);
    logic [31:0] y;
    y = x;
    y = y ^ {y[18:0], 13'b0};
    y = y ^ {17'b0, y[31:17]};
    y = y ^ {y[26:0], 5'b0};
    return y;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] model, held;
    logic [31:0] seen[$];
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    #1;
    check(rnd == SEED, "reset value");
    model = SEED;
    for (int i = 0; i < 2000; i++) begin
      en = ($urandom_range(0, 3) != 0);
      @(posedge clk);
      #1;
      if (en) model = step(model);
      check(rnd == model, $sformatf("step %0d: got %h exp %h", i, rnd, model));
      check(rnd != 32'd0, "state became zero");
    end
    // no repeat in the first 1000 enabled steps
    en = 1'b1;
    for (int i = 0; i < 1000; i++) begin
      @(posedge clk); #1;
      foreach (seen[j]) if (seen[j] == rnd) begin check(1'b0, "sequence repeated"); break; end
      seen.push_back(rnd);
    end
    check(1'b1, "no-repeat scan done");
    // hold with en low
    en = 1'b0; held = rnd;
    repeat (5) @(posedge clk);
    #1 check(rnd == held, "hold when disabled");
    // reset reloads the seed
    rst_n = 1'b0; @(posedge clk); #1;
    check(rnd == SEED, "reset reload");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
