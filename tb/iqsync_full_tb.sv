// iqsync_full_tb: one complete synchronization at the design's full size.
//
// The top is used with all parameters at their defaults and configured for
// the largest maximum level, lmax = 28: offsets up to 2**27 symbols (215 ms
// at 1.6 ns per symbol) are recoverable. The degree of interleaving is DI
// (below), which sets the pattern length to ceil(29/DI) * 2**29 symbols.
// The channel delivers a sparse detection stream: one pulse in roughly every
// GAP symbols is detected, drawn only from symbols that land inside Bob's
// acceptance windows, since the recovery discards all others; the buffer of
// DET_DEPTH words then holds only useful detections. The start message is
// delayed by L symbols and the optical pattern by DTB timebins.
//
// Checks: Bob's histogram peak, the stored detection count, the recovered
// offset and iteration count against the reference recovery over the ideal
// timebin list, and the recovered offset against the true one.
`timescale 1ns/1ps
module iqsync_full_tb;
  import iqsync_pkg::*;
  import iqsync_ref_pkg::*;

  localparam int NB   = 1 << FINE_W;
  localparam int HALF = NB / 2;
  localparam int LM   = LMAX;
  localparam int DI   = LMAX + 1;      // maximum interleaving: one group
  localparam longint L   = 123_457;          // start-message latency (symbols)
  localparam longint DTB = 1_000_001;        // optical delay (timebins)
  localparam int PHI  = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cfg_t cfg;
  logic a_seed_load = 0, a_start = 0;
  logic [31:0] a_seed = 32'h1234_5678;
  logic a_busy, a_start_msg, a_sym_valid, a_sym, a_done;
  level_t a_sym_level;
  sym_idx_t a_sym_idx;
  logic [1:0] a_ppm;
  logic b_start_msg = 0, b_det_valid = 0;
  logic [FINE_W:0] b_det_phase = 0;
  logic b_busy, b_done, b_overflow;
  delta_t b_delta, b_delta_sym;
  logic [CNT_W-1:0] b_num_det;
  logic [FINE_W-1:0] b_peak;
  logic [31:0] b_iters;

  iqsync_top dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Deterministic channel randomness (xorshift64).
  longint unsigned rs = 64'h9E37_79B9_7F4A_7C15;
  function automatic longint unsigned rnd64();
    rs = rs ^ (rs << 13);
    rs = rs ^ (rs >> 7);
    rs = rs ^ (rs << 17);
    return rs;
  endfunction

  initial begin
    #40_000_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint ns, gs, ca, next_i, gap, d_ref, it_ref, truth, q, qg;
    int     ev[longint];
    dlist_t dref;
    int     ngen;
    ns = ref_pattern_len(LM, DI);
    gs = longint'(1) << (LM + 1);
    gap = (ns / 2) / 100_000;
    truth = DTB - 2 * L;
    cfg.lmax = level_t'(LM);
    cfg.di   = level_t'(DI);
    repeat (3) @(negedge clk);
    rst_n = 1;
    a_seed_load = 1; @(negedge clk); a_seed_load = 0;
    a_start = 1; @(negedge clk); a_start = 0;
    while (!a_start_msg) @(negedge clk);
    ca = 0;
    ngen = 0;
    next_i = 1 + longint'(rnd64() % 64'(gap));
    while (ca < L + ns + 4) begin
      // Alice's symbol next_i is detected if it lands in an acceptance window.
      if (a_sym_valid && longint'(a_sym_idx) == next_i) begin
        longint f, bs;
        int j;
        j = int'(rnd64() % 4);
        j = (j == 3) ? -1 : (j == 2) ? 1 : 0;
        f = (2 * next_i + longint'(a_sym) + DTB) * NB + PHI + j;
        bs = f / (2 * NB) - L;                   // Bob's symbol index
        q  = bs % gs;
        if (bs >= 0 && q >= gs / 4 && q < 3 * gs / 4) ev[f / (2 * NB)] = int'(f % (2 * NB));
        next_i += 1 + longint'(rnd64() % 64'(2 * gap));
      end
      b_start_msg = (ca == L);
      b_det_valid = ev.exists(ca);
      b_det_phase = b_det_valid ? (FINE_W+1)'(ev[ca]) : '0;
      if (b_det_valid) begin
        dref.push_back(((ca - L) * 2 * NB + ev[ca] + HALF - PHI) / NB);
        ev.delete(ca);
        ngen++;
      end
      @(negedge clk);
      ca++;
    end
    b_start_msg = 0;
    b_det_valid = 0;
    while (!b_done) @(negedge clk);
    d_ref = ref_recover(LM, DI, dref, it_ref);
    check(int'(b_peak) == PHI, "histogram peak");
    check(int'(b_num_det) == ngen && !b_overflow, $sformatf("stored %0d of %0d", b_num_det, ngen));
    check(longint'(b_delta) == d_ref, $sformatf("delta %0d ref %0d", b_delta, d_ref));
    check(longint'(b_iters) == it_ref, $sformatf("iters %0d ref %0d", b_iters, it_ref));
    check(longint'(b_delta) == truth, $sformatf("delta %0d true %0d", b_delta, truth));
    $display("full size: lmax=%0d di=%0d symbols=%0d detections=%0d delta=%0d true=%0d iters=%0d",
             LM, DI, ns, b_num_det, b_delta, truth, b_iters);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
