// det_capture_tb: checks Bob's acquisition.
//
// Drives a start message and random detections with random phases, and checks
// cycle by cycle that each detection inside the window is written one cycle
// later at the next address as {symbols since start, phase}; that the window
// is exactly ceil((lmax+1)/di) * 2**(lmax+1) symbols (done with the write of
// the last symbol, later detections ignored); and, in a long run with a
// detection every cycle, that the buffer stops at its depth and flags overflow.
`timescale 1ns/1ps
module det_capture_tb;
  import iqsync_pkg::*;
  import iqsync_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start_msg = 0, det_valid = 0;
  logic [FINE_W:0] det_phase = 0;
  cfg_t cfg;
  logic busy, wr_en, overflow, done;
  logic [ADDR_W-1:0] wr_addr;
  tstamp_t wr_data;
  logic [CNT_W-1:0] num_det;
  int checks = 0, failures = 0;

  det_capture dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    #5_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // One acquisition with detection probability pct; returns the count.
  task automatic run(int lmax, int di, int pct, int extra, output int n);
    longint win = ref_pattern_len(lmax, di);
    bit bad = 0, bad_done = 0;
    cfg.lmax = level_t'(lmax);
    cfg.di = level_t'(di);
    n = 0;
    for (longint c = 0; c < win + extra; c++) begin
      bit v;
      logic [FINE_W:0] ph;
      v  = ($urandom_range(99) < pct) || c == 0;
      ph = (FINE_W+1)'($urandom);
      start_msg = (c == 0);
      det_valid = v;
      det_phase = ph;
      @(negedge clk);
      if (v && c < win && n < DET_DEPTH) begin
        if (!(wr_en && wr_addr == ADDR_W'(n) &&
              wr_data == {sym_idx_t'(c), ph})) bad = 1;
        n++;
      end else if (wr_en) bad = 1;
      if (done != (c == win - 1)) bad_done = 1;
    end
    start_msg = 0; det_valid = 0;
    @(negedge clk);
    check(!bad, $sformatf("writes, lmax %0d di %0d", lmax, di));
    check(!bad_done, "window length");
    check(int'(num_det) == n, $sformatf("count %0d vs %0d", num_det, n));
    check(!busy, "idle after window");
  endtask

  initial begin
    int n;
    cfg = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(4, 2, 30, 10, n);
    check(!overflow, "no overflow");
    run(6, 1, 50, 20, n);
    run(5, 6, 10, 5, n);
    // Overflow: every cycle a detection, window far longer than the buffer.
    cfg.lmax = 14; cfg.di = 1;
    start_msg = 1; det_valid = 1;
    @(negedge clk);
    start_msg = 0;
    repeat (DET_DEPTH + 20) @(negedge clk);
    det_valid = 0;
    check(int'(num_det) == DET_DEPTH, "buffer full count");
    check(overflow, "overflow flagged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
