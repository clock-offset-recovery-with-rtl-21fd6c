// iqsync_bob_tb: checks the receiver side on its own.
//
// The test generates a reference pattern (random levels), offsets it by a
// known number of timebins relative to Bob's start, applies loss, noise and
// a sub-timebin phase with jitter, and presents the detections cycle by cycle
// after a start message. Bob must report the histogram peak, the detection
// count, and an offset equal to the reference recovery over the same
// detections and, for lossless non-interleaved patterns, the true offset. A
// second start message during a run must be ignored.
`timescale 1ns/1ps
module iqsync_bob_tb;
  import iqsync_pkg::*;
  import iqsync_ref_pkg::*;

  localparam int NB = 1 << FINE_W;
  localparam int HALF = NB / 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  cfg_t cfg;
  logic start_msg = 0, det_valid = 0;
  logic [FINE_W:0] det_phase = 0;
  logic busy, done, overflow;
  delta_t delta, delta_sym;
  logic [CNT_W-1:0] num_det;
  logic [FINE_W-1:0] peak;
  logic [31:0] iters;
  int checks = 0, failures = 0;

  iqsync_bob dut (.*);

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

  task automatic run(int lmax, int di, longint off, int phi, int psig, int pnoise,
                     bit expect_true);
    longint n = ref_pattern_len(lmax, di);
    int sym[$];
    dlist_t d, dref;
    longint r, it;
    int ph[longint];
    for (longint ks = 0; ks < n; ks++) begin
      int lo, hi;
      lo = int'(ks >> (lmax + 1)) * di;
      hi = (lo + di - 1 > lmax) ? lmax : lo + di - 1;
      sym.push_back(ref_symbol(ks, lo + $urandom_range(hi - lo)));
    end
    d = ref_detect(sym, off, psig, pnoise);
    // At most one detection per symbol period reaches the TDC.
    foreach (d[i]) begin
      int j;
      j = ($urandom_range(1) == 0) ? 0 : int'($urandom_range(1)) * 2 - 1;
      if (!ph.exists(d[i] / 2)) ph[d[i] / 2] = int'(d[i] % 2) * NB + phi + j;
    end
    dref = {};
    cfg.lmax = level_t'(lmax);
    cfg.di = level_t'(di);
    for (longint c = 0; c < n; c++) begin
      start_msg = (c == 0) || (c == 5);     // the second one must be ignored
      det_valid = ph.exists(c);
      det_phase = det_valid ? (FINE_W+1)'(ph[c]) : '0;
      if (det_valid && dref.size() < DET_DEPTH)
        dref.push_back((c * 2 * NB + ph[c] + HALF - phi) / NB);
      @(negedge clk);
    end
    start_msg = 0; det_valid = 0;
    for (int w = 0; w < 200_000 && !done; w++) @(negedge clk);
    check(done, "result within the expected time");
    r = ref_recover(lmax, di, dref, it);
    check(int'(peak) == phi, "peak");
    check(int'(num_det) == dref.size(), "detection count");
    check(longint'(delta) == r, $sformatf("delta %0d ref %0d", delta, r));
    check(longint'(iters) == it, "iterations");
    if (expect_true) check(longint'(delta) == off, $sformatf("delta %0d true %0d", delta, off));
    @(negedge clk);
    check(!busy, "idle after result");
  endtask

  initial begin
    cfg = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(4, 1,   5, 4, 1000000, 0, 1);
    run(6, 1, -37, 12, 1000000, 0, 1);
    run(7, 2,  90, 9, 400000, 5000, 0);
    run(8, 9, -200, 2, 500000, 0, 0);
    run(8, 1, 201, 14, 1000000, 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
