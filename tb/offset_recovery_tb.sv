// offset_recovery_tb: self-checking test of the dichotomic-search recovery.
//
// A behavioural memory with one cycle of read latency serves the detection
// list. Checks: (1) the worked example with lmax = 3, di = 2 and a 3-symbol
// offset, whose transmitted symbols are the published example pattern, must
// give delta = 6 timebins; (2) random patterns, offsets, loss and noise for
// several (lmax, di) pairs must give the same delta and the same inner-loop
// iteration count as the reference model, and, for lossless runs without
// interleaving, the true offset; (3) the run takes iters + 2 cycles per level
// + 2 cycles.
`timescale 1ns/1ps
module offset_recovery_tb;
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

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Runs the DUT over list d and returns delta, iteration count and cycles.
  task automatic run(int lmax, int di, dlist_t d, output longint dl,
                     output longint it, output int cyc);
    cfg.lmax = level_t'(lmax);
    cfg.di   = level_t'(di);
    num_det  = CNT_W'(d.size());
    foreach (d[i]) mem[i] = tb_idx_t'(d[i]);
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
    dl = longint'(delta);
    it = longint'(iters);
  endtask

  initial begin
    #2_000_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint dl, it, rdl, rit, off;
    int cyc;
    dlist_t d;
    int sym[$];
    cfg = '0;
    num_det = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // (1) Worked example: lmax = 3, di = 2, Bob ahead by 3 symbols.
    sym = '{0,0,0,0,0,1,0,1,0,0,0,0,0,1,0,1,
            0,0,1,0,0,0,1,1,0,0,0,1,0,1,1,1};
    d = {};
    for (int k = 3; k < 32; k++) d.push_back(2 * k + sym[k - 3]);
    run(3, 2, d, dl, it, cyc);
    rdl = ref_recover(3, 2, d, rit);
    check(dl == 6, $sformatf("example: delta %0d, expected 6", dl));
    check(rdl == 6, "reference model on the example");
    check(it == rit, $sformatf("example: iters %0d vs %0d", it, rit));
    check(cyc == int'(it) + 2 * 4 + 2, $sformatf("example: %0d cycles", cyc));

    // (2) Random runs.
    for (int t = 0; t < 60; t++) begin
      int lmax, di, psig, pnoise;
      int lv[$];
      longint n, dmax;
      case (t % 6)
        0: begin lmax = 3;  di = 1; end
        1: begin lmax = 5;  di = 2; end
        2: begin lmax = 6;  di = 7; end
        3: begin lmax = 8;  di = 3; end
        4: begin lmax = 8;  di = 1; end
        default: begin lmax = 11; di = 12; end
      endcase
      psig   = (t < 30) ? 1_000_000 : 50_000 + $urandom_range(300_000);
      pnoise = (t < 30) ? 0 : $urandom_range(20_000);
      n = ref_pattern_len(lmax, di);
      sym = {};
      for (longint ks = 0; ks < n; ks++) begin
        int g, lo, hi;
        g  = int'(ks >> (lmax + 1));
        lo = g * di;
        hi = (lo + di - 1 > lmax) ? lmax : lo + di - 1;
        sym.push_back(ref_symbol(ks, lo + $urandom_range(hi - lo)));
      end
      dmax = longint'(1) << (lmax - 1);
      off  = longint'($urandom_range(4 * int'(dmax) - 3)) - 2 * dmax;  // timebins
      d = ref_detect(sym, off, psig, pnoise);
      if (d.size() > DET_DEPTH) d = d[0:DET_DEPTH-1];
      run(lmax, di, d, dl, it, cyc);
      rdl = ref_recover(lmax, di, d, rit);
      check(dl == rdl, $sformatf("t%0d lmax %0d di %0d off %0d: delta %0d ref %0d",
                                 t, lmax, di, off, dl, rdl));
      check(it == rit, $sformatf("t%0d: iters %0d ref %0d", t, it, rit));
      check(cyc == int'(it) + 2 * (lmax + 1) + 2, $sformatf("t%0d: %0d cycles", t, cyc));
      if (psig == 1_000_000 && pnoise == 0 && di == 1)
        check(dl == off, $sformatf("t%0d: delta %0d true %0d", t, dl, off));
    end

    // (3) No detections at all: delta stays 0.
    d = {};
    run(4, 1, d, dl, it, cyc);
    check(dl == 0 && it == 0, "empty list");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
