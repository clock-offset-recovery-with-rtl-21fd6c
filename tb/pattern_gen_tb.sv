// pattern_gen_tb: checks the iQSync pattern generator.
//
// Per configuration: the pattern has ceil((lmax+1)/di) * 2**(lmax+1) symbols,
// emitted back to back from two cycles after `start`; `start_msg` comes with
// symbol 0 and `done` with the last; every chosen level lies in its group's
// range; every symbol equals the reference symbol of its index and level; the
// PPM pair marks the early timebin for 0 and the late one for 1; with
// interleaving every level of a group is chosen at least once. The
// non-interleaved lmax = 2 pattern must equal the published 24-symbol example.
`timescale 1ns/1ps
module pattern_gen_tb;
  import iqsync_pkg::*;
  import iqsync_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0;
  cfg_t cfg;
  logic [31:0] rnd;
  logic rnd_en, busy, start_msg, sym_valid, sym, done;
  level_t sym_level;
  sym_idx_t sym_idx;
  logic [1:0] ppm;
  int checks = 0, failures = 0;

  level_rng u_rng (.clk, .rst_n, .seed_load(1'b0), .seed(32'h0), .en(rnd_en), .rnd);
  pattern_gen dut (.clk, .rst_n, .start, .cfg, .rnd(rnd[31:16]), .rnd_en, .busy,
                   .start_msg, .sym_valid, .sym, .sym_level, .sym_idx, .ppm, .done);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    #50_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int lmax, int di, output int s[$]);
    longint n = ref_pattern_len(lmax, di);
    int lvl_seen[64];
    int cyc;
    bit bad_lvl = 0, bad_sym = 0, bad_ppm = 0, bad_idx = 0, gap = 0;
    s = {};
    foreach (lvl_seen[i]) lvl_seen[i] = 0;
    cfg.lmax = level_t'(lmax);
    cfg.di   = level_t'(di);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 1;
    while (!sym_valid) begin @(negedge clk); cyc++; end
    check(cyc == 2, $sformatf("first symbol after %0d cycles", cyc));
    check(start_msg, "start_msg with symbol 0");
    for (longint k = 0; k < n; k++) begin
      int g, lo, hi;
      g  = int'(k >> (lmax + 1));
      lo = g * di;
      hi = (lo + di - 1 > lmax) ? lmax : lo + di - 1;
      if (!sym_valid) gap = 1;
      if (sym_idx != sym_idx_t'(k)) bad_idx = 1;
      if (int'(sym_level) < lo || int'(sym_level) > hi) bad_lvl = 1;
      if (int'(sym) != ref_symbol(k, int'(sym_level))) bad_sym = 1;
      if (ppm != (sym ? 2'b10 : 2'b01)) bad_ppm = 1;
      if (k > 0 && start_msg) gap = 1;
      if ((k == n - 1) != done) gap = 1;
      lvl_seen[sym_level]++;
      s.push_back(int'(sym));
      @(negedge clk);
    end
    check(!gap, "symbols back to back, done on last symbol only");
    check(!bad_idx, "symbol index sequence");
    check(!bad_lvl, "chosen level inside group range");
    check(!bad_sym, "symbol matches level bit");
    check(!bad_ppm, "PPM encoding");
    check(!sym_valid && !busy, "stops after the pattern");
    for (int l = 0; l <= lmax; l++)
      check(lvl_seen[l] > 0, $sformatf("level %0d chosen", l));
  endtask

  initial begin
    int s[$];
    int tab1[24] = '{0,0,0,0,0,0,0,0, 0,1,0,1,0,1,0,1, 0,0,1,1,0,0,1,1};
    cfg = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(2, 1, s);
    check(s.size() == 24, "example length");
    foreach (tab1[i]) check(s[i] == tab1[i], $sformatf("example symbol %0d", i));
    run(3, 2, s);
    check(s.size() == 32, "lmax 3 di 2 length");
    run(6, 3, s);
    run(8, 9, s);
    run(5, 4, s);
    run(10, 1, s);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
