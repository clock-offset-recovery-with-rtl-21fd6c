// iqsync_workload_tb: the recovery engine on the reference experiment's
// configurations, at full pattern size.
//
// A cycle-by-cycle acquisition of these patterns (up to 1.6e10 symbols) cannot
// be simulated, so the detection list Bob would store is drawn statistically
// instead and loaded into a behavioural memory in front of offset_recovery
// (all parameters at their defaults). Signal detections hit each transmitted
// symbol with probability PSIG; their symbol value follows the pattern for a
// level drawn at random within the symbol's group. Noise clicks fall in each
// symbol with probability PNOISE, in a random timebin. Gaps between events
// are drawn from the exponential distribution, so only the events themselves
// cost simulation time.
//
// Configurations (lmax, di, noise, detections as measured in the reference
// experiment; signal rates derived from them):
//   A  lmax 28, di 1, pnoise 1.1e-7, ~3056 detections  -> psig 8.63e-8
//   B  lmax 28, di 4, pnoise 1.1e-7, ~4372 detections  -> psig 9.08e-7
//   C  lmax 28, di 1, pnoise 9.9e-6 (added noise), psig 1e-6 (chosen here)
//   D  lmax 26, di 1, pnoise 1.1e-7, psig 3e-7 (chosen here)
// Each is run with two random offsets within the recoverable range. Checks:
// delta and the iteration count equal the reference recovery; the run takes
// iters + 2 cycles per level + 2 cycles; and the true offset is recovered in
// at least 7 of the 8 runs (the method itself fails now and then at these
// detection rates; the experiment saw 47 of 50 successes for A).
`timescale 1ns/1ps
module iqsync_workload_tb;
  import iqsync_pkg::*;
  import iqsync_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic              start = 0;
  cfg_t              cfg;
  logic [CNT_W-1:0]  num_det;
  logic              rd_en;
  logic [ADDR_W-1:0] rd_addr;
  tb_idx_t           rd_data;
  logic              busy, done;
  delta_t            delta;
  logic [31:0]       iters;

  tb_idx_t mem [DET_DEPTH];
  always_ff @(posedge clk) if (rd_en) rd_data <= mem[rd_addr];

  offset_recovery dut (.*);

  int checks = 0, failures = 0, n_true = 0, n_runs = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Deterministic randomness (xorshift64) and exponential gaps.
  longint unsigned rs = 64'h0123_4567_89AB_CDEF;
  function automatic longint unsigned rnd64();
    rs = rs ^ (rs << 13);
    rs = rs ^ (rs >> 7);
    rs = rs ^ (rs << 17);
    return rs;
  endfunction
  function automatic real urand();
    return (real'(rnd64() >> 11) + 1.0) / 9007199254740993.0;
  endfunction
  function automatic longint gap(real p);
    return 1 + longint'($floor(-$ln(urand()) / p));
  endfunction

  initial begin
    #20_000_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(string name, int lmax, int di, real psig, real pnoise);
    longint ns, nt, off, i, j, dl, it, rdl, rit;
    dlist_t d, sg, nz;
    int cyc;
    ns  = ref_pattern_len(lmax, di);
    nt  = 2 * ns;
    off = longint'(rnd64() % 64'(longint'(1) << (lmax + 1))) - (longint'(1) << lmax);
    // Signal: Alice symbol i seen at Bob timebin 2i + s + off.
    i = gap(psig) - 1;
    while (i < ns) begin
      int g, lo, hi, lvl;
      longint t;
      g   = int'(i >> (lmax + 1));
      lo  = g * di;
      hi  = (lo + di - 1 > lmax) ? lmax : lo + di - 1;
      lvl = lo + int'(rnd64() % 64'(hi - lo + 1));
      t   = 2 * i + ref_symbol(i, lvl) + off;
      if (t >= 0 && t < nt) sg.push_back(t);
      i += gap(psig);
    end
    // Noise: one click in Bob symbol j, random timebin.
    j = gap(pnoise) - 1;
    while (j < ns) begin
      nz.push_back(2 * j + longint'(rnd64() % 2));
      j += gap(pnoise);
    end
    // Merge (both lists are ascending); one click per timebin.
    begin
      int a = 0, b = 0;
      while (a < sg.size() || b < nz.size()) begin
        longint v;
        if (b >= nz.size() || (a < sg.size() && sg[a] <= nz[b])) begin v = sg[a]; a++; end
        else begin v = nz[b]; b++; end
        if (d.size() == 0 || d[$] != v) d.push_back(v);
      end
    end
    check(d.size() <= DET_DEPTH, $sformatf("%s: %0d detections fit the buffer", name, d.size()));
    if (d.size() > DET_DEPTH) d = d[0:DET_DEPTH-1];
    foreach (d[k]) mem[k] = tb_idx_t'(d[k]);
    cfg.lmax = level_t'(lmax);
    cfg.di   = level_t'(di);
    num_det  = CNT_W'(d.size());
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    dl = longint'(delta);
    it = longint'(iters);
    rdl = ref_recover(lmax, di, d, rit);
    check(dl == rdl, $sformatf("%s: delta %0d ref %0d", name, dl, rdl));
    check(it == rit, $sformatf("%s: iters %0d ref %0d", name, it, rit));
    check(cyc == int'(it) + 2 * (lmax + 1) + 2, $sformatf("%s: %0d cycles", name, cyc));
    n_runs++;
    if (dl == off) n_true++;
    $display("%s lmax=%0d di=%0d symbols=%0d detections=%0d (signal %0d) offset=%0d delta=%0d iters=%0d cycles=%0d",
             name, lmax, di, ns, d.size(), sg.size(), off, dl, it, cyc);
  endtask

  initial begin
    cfg = '0;
    num_det = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 2; r++) begin
      run("A", 28, 1, 8.63e-8, 1.1e-7);
      run("B", 28, 4, 9.08e-7, 1.1e-7);
      run("C", 28, 1, 1.0e-6, 9.9e-6);
      run("D", 26, 1, 3.0e-7, 1.1e-7);
    end
    check(n_true >= 7, $sformatf("true offset in %0d of %0d runs", n_true, n_runs));
    $display("true offset recovered in %0d of %0d runs", n_true, n_runs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
