// level_rng_tb: checks the xorshift level random source against an
// independently written model: reset state, 2000 steps, hold when disabled,
// seed load and the zero-seed substitution.
`timescale 1ns/1ps
module level_rng_tb;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic seed_load = 0, en = 0;
  logic [31:0] seed = 0, rnd;
  int checks = 0, failures = 0;

  level_rng dut (.*);

  function automatic logic [31:0] model(logic [31:0] x);
    x = x ^ {x[18:0], 13'b0};
    x = x ^ {17'b0, x[31:17]};
    x = x ^ {x[26:0], 5'b0};
    return x;
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] m;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(rnd == 32'h2545_F491, "reset seed");
    m = rnd;
    en = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      m = model(m);
      check(rnd == m, $sformatf("step %0d", i));
    end
    en = 0;
    repeat (3) @(negedge clk);
    check(rnd == m, "hold");
    seed = 32'hDEAD_BEEF; seed_load = 1;
    @(negedge clk);
    seed_load = 0;
    check(rnd == 32'hDEAD_BEEF, "seed load");
    en = 1; @(negedge clk); en = 0;
    check(rnd == model(32'hDEAD_BEEF), "step after seed");
    seed = 0; seed_load = 1;
    @(negedge clk);
    seed_load = 0;
    check(rnd == 32'h2545_F491, "zero seed replaced");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
