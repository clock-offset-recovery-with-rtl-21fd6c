// iqsync_top_tb: end-to-end test of iQSync, transmitter to receiver.
//
// A channel model sits between Alice and Bob. The start message reaches Bob
// L cycles (symbols) after Alice sent it. The optical pattern arrives Dtb
// timebins late, at sub-timebin phase phi with +-1 phase step of jitter
// (half of the pulses on phi, a quarter on each neighbour); each
// pulse is detected with probability psig, and noise clicks at random phases
// arrive with probability pnoise per symbol. Bob's timebin counter therefore
// runs 2L - Dtb timebins behind Alice's and the expected recovered offset is
// delta = Dtb - 2L timebins.
//
// For every run the test checks: the histogram peak equals phi; the number of
// stored detections equals the number generated inside Bob's window; delta
// and the iteration count equal the reference recovery over the ideal list of
// timebin indices; delta_sym = delta/2; and, in runs with strong signal and
// no noise, delta equals the true offset. It counts the mechanisms the design
// has and fails if one never happened: a complete pattern, interleaving,
// positive and negative offsets, an odd (timebin-level) offset, a
// sub-timebin shift, noise clicks, and a buffer overflow.
`timescale 1ns/1ps
module iqsync_top_tb;
  import iqsync_pkg::*;
  import iqsync_ref_pkg::*;

  localparam int NB = 1 << FINE_W;
  localparam int HALF = NB / 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  cfg_t cfg;
  logic a_seed_load = 0, a_start = 0;
  logic [31:0] a_seed = 0;
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
  int n_pattern = 0, n_interleaved = 0, n_pos = 0, n_neg = 0, n_odd = 0;
  int n_shift = 0, n_noise = 0, n_overflow = 0, n_true = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL: %s", what); end
  endtask

  initial begin
    #3_000_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int lmax, int di, int L, int dtb, int phi,
                     int psig_ppm, int pnoise_ppm, bit expect_true);
    longint ns = ref_pattern_len(lmax, di);
    int     ev[longint];          // cycle -> phase of the detection
    dlist_t dref;
    longint ca, it_ref, d_ref, truth;
    int     ngen;
    bit     started;
    cfg.lmax = level_t'(lmax);
    cfg.di   = level_t'(di);
    a_seed = $urandom; a_seed_load = 1;
    @(negedge clk);
    a_seed_load = 0;
    a_start = 1;
    @(negedge clk);
    a_start = 0;
    started = 0;
    ca = 0;
    ngen = 0;
    dref = {};
    truth = longint'(dtb) - 2 * longint'(L);
    // Runs until Bob has acquired its whole window.
    while (!started || ca < L + ns + 4) begin
      if (a_start_msg) begin started = 1; ca = 0; end
      if (started) begin
        // Alice's symbol of this cycle enters the quantum channel.
        if (a_sym_valid && $urandom_range(999_999) < psig_ppm) begin
          longint f;
          int j;
          j = ($urandom_range(1) == 0) ? 0 : int'($urandom_range(1)) * 2 - 1;
          f = (2 * longint'(a_sym_idx) + longint'(a_sym) + dtb) * NB + phi + j;
          if (!ev.exists(f / (2 * NB))) ev[f / (2 * NB)] = int'(f % (2 * NB));
        end
        if (!ev.exists(ca) && pnoise_ppm > 0 && $urandom_range(999_999) < pnoise_ppm) begin
          ev[ca] = $urandom_range(2 * NB - 1);
          n_noise++;
        end
        // Bob's side of the link.
        b_start_msg = (ca == L);
        b_det_valid = ev.exists(ca) && ca >= L;
        b_det_phase = ev.exists(ca) ? (FINE_W+1)'(ev[ca]) : '0;
        if (b_det_valid && ca - L < ns) begin
          longint fb;
          fb = (ca - L) * 2 * NB + ev[ca];
          if (ngen < DET_DEPTH) dref.push_back((fb + HALF - phi) / NB);
          ngen++;
        end
        if (a_done) n_pattern++;
      end
      @(negedge clk);
      if (started) ca++;
    end
    b_start_msg = 0;
    b_det_valid = 0;
    while (!b_done) @(negedge clk);
    d_ref = ref_recover(lmax, di, dref, it_ref);
    check(int'(b_peak) == phi, $sformatf("peak %0d phi %0d", b_peak, phi));
    check(int'(b_num_det) == ((ngen > DET_DEPTH) ? DET_DEPTH : ngen),
          $sformatf("stored %0d generated %0d", b_num_det, ngen));
    check(b_overflow == (ngen > DET_DEPTH), "overflow flag");
    check(longint'(b_delta) == d_ref,
          $sformatf("lmax %0d di %0d: delta %0d ref %0d", lmax, di, b_delta, d_ref));
    check(longint'(b_iters) == it_ref, "iteration count");
    check(b_delta_sym == (b_delta >>> 1), "delta in symbols");
    if (expect_true)
      check(longint'(b_delta) == truth,
            $sformatf("lmax %0d di %0d: delta %0d true %0d", lmax, di, b_delta, truth));
    if (longint'(b_delta) == truth) n_true++;
    if (di > 1) n_interleaved++;
    if (truth > 0) n_pos++;
    if (truth < 0) n_neg++;
    if (truth % 2 != 0 && longint'(b_delta) == truth) n_odd++;
    if (phi != HALF) n_shift++;
    if (b_overflow) n_overflow++;
    $display("run lmax=%0d di=%0d L=%0d dtb=%0d: dets=%0d delta=%0d true=%0d iters=%0d",
             lmax, di, L, dtb, b_num_det, b_delta, truth, b_iters);
  endtask

  initial begin
    cfg = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    //   lmax di  L    dtb  phi psig     pnoise  true?
    run(3,  1,  2,   3,   5, 1000000, 0,      1);
    run(3,  2,  0,   6,   8, 1000000, 0,      0);
    run(6,  1,  5,   1,   2, 1000000, 0,      1);
    run(6,  1,  1,  40,  13, 1000000, 0,      1);
    run(8,  3, 40,  17,   9, 600000,  0,      0);
    run(8,  1,  7, 200,   3, 300000,  10000,  0);
    run(9, 10, 60,  35,  11, 1000000, 5000,   0);
    run(10, 4, 30, 501,   6, 200000,  20000,  0);
    // Long pattern at high detection rate: fills the buffer.
    run(15, 1, 10,  25,   7, 300000,  0,      0);
    check(n_pattern == 9, "every pattern completed");
    check(n_interleaved > 0, "interleaving exercised");
    check(n_pos > 0 && n_neg > 0, "positive and negative offsets");
    check(n_odd > 0, "odd timebin offset recovered");
    check(n_shift > 0, "sub-timebin shift applied");
    check(n_noise > 0, "noise clicks");
    check(n_overflow > 0, "buffer overflow");
    check(n_true >= 6, $sformatf("true offset recovered in %0d runs", n_true));
    $display("mechanisms: patterns=%0d interleaved=%0d pos=%0d neg=%0d odd=%0d shift=%0d noise=%0d overflow=%0d true=%0d",
             n_pattern, n_interleaved, n_pos, n_neg, n_odd, n_shift, n_noise, n_overflow, n_true);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
