// iqsync_alice_tb: checks the transmitter side.
//
// Runs patterns for several configurations and checks every symbol against
// the reference symbol of its index and chosen level, the level range of each
// group, the pattern length and the start message with symbol 0. Reloading
// the same seed must reproduce the same level sequence; another seed must
// change it (the level choice really comes from the random source).
`timescale 1ns/1ps
module iqsync_alice_tb;
  import iqsync_pkg::*;
  import iqsync_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  cfg_t cfg;
  logic seed_load = 0, start = 0;
  logic [31:0] seed = 0;
  logic busy, start_msg, sym_valid, sym, done;
  level_t sym_level;
  sym_idx_t sym_idx;
  logic [1:0] ppm;
  int checks = 0, failures = 0;

  iqsync_alice dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    #20_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int lmax, int di, logic [31:0] sd, output int lv[$]);
    longint n = ref_pattern_len(lmax, di);
    bit bad = 0;
    lv = {};
    cfg.lmax = level_t'(lmax);
    cfg.di = level_t'(di);
    seed = sd; seed_load = 1; @(negedge clk); seed_load = 0;
    start = 1; @(negedge clk); start = 0;
    while (!sym_valid) @(negedge clk);
    check(start_msg, "start message with first symbol");
    for (longint k = 0; k < n; k++) begin
      int lo, hi;
      lo = int'(k >> (lmax + 1)) * di;
      hi = (lo + di - 1 > lmax) ? lmax : lo + di - 1;
      if (!sym_valid || sym_idx != sym_idx_t'(k)) bad = 1;
      if (int'(sym_level) < lo || int'(sym_level) > hi) bad = 1;
      if (int'(sym) != ref_symbol(k, int'(sym_level))) bad = 1;
      if ((k == n - 1) != done) bad = 1;
      lv.push_back(int'(sym_level));
      @(negedge clk);
    end
    check(!bad, $sformatf("pattern lmax %0d di %0d", lmax, di));
    check(!busy && !sym_valid, "idle after pattern");
  endtask

  initial begin
    int a[$], b[$], c[$];
    cfg = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(5, 3, 32'hCAFE_0001, a);
    run(5, 3, 32'hCAFE_0001, b);
    run(5, 3, 32'h0BAD_F00D, c);
    check(a == b, "same seed, same levels");
    check(a != c, "other seed, other levels");
    run(7, 8, 32'h1, a);
    run(4, 1, 32'h2, a);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
