// timebin_align_tb: checks the sub-timebin alignment.
//
// Fills the phase histogram with detections clustered around a chosen phase
// plus uniform background, runs the peak search and checks the peak, the
// search time (2**FINE_W cycles), and the conversion of timestamps to timebin
// indices: a timestamp at phase p of timebin t must map to t for every phase
// within half a timebin of the peak, to t+1 / t-1 beyond that, and timestamps
// that would turn negative must map to 0. Clear must empty the histogram.
`timescale 1ns/1ps
module timebin_align_tb;
  import iqsync_pkg::*;

  localparam int NB = 1 << FINE_W;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, hist_en = 0, find = 0, found;
  logic [FINE_W-1:0] hist_fine = 0, peak;
  tstamp_t raw_in = 0;
  tb_idx_t tb_out;
  int checks = 0, failures = 0;

  timebin_align dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    #5_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Expected timebin for timebin t, phase q, peak p: the detection belongs to
  // the timebin whose centred window [p - HALF, p + HALF) holds it.
  function automatic longint expect_tb(longint t, int q, int p);
    int rel = q - p;          // -NB+1 .. NB-1
    if (rel >= NB / 2)  return t + 1;
    if (rel < -NB / 2)  return t - 1;
    return t;
  endfunction

  initial begin
    int cyc;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 20; trial++) begin
      int p;
      p = $urandom_range(NB - 1);
      clear = 1; @(negedge clk); clear = 0;
      for (int i = 0; i < 400; i++) begin
        int q;
        hist_en = 1;
        if ($urandom_range(3) == 0) q = $urandom_range(NB - 1);
        else q = (p + int'($urandom_range(2)) - 1 + NB) % NB;
        if (i % 3 == 0) q = p;
        hist_fine = FINE_W'(q);
        @(negedge clk);
      end
      hist_en = 0;
      find = 1; @(negedge clk); find = 0;
      cyc = 1;
      while (!found) begin @(negedge clk); cyc++; end
      check(cyc == NB + 1, $sformatf("search took %0d cycles", cyc));
      check(int'(peak) == p, $sformatf("peak %0d expected %0d", peak, p));
      for (int i = 0; i < 50; i++) begin
        longint t;
        int q;
        longint e;
        t = 1 + $urandom_range(100_000);
        q = $urandom_range(NB - 1);
        raw_in = tstamp_t'((t << FINE_W) + q);
        #1;
        e = expect_tb(t, q, p);
        check(longint'(tb_out) == e, $sformatf("t %0d q %0d p %0d -> %0d", t, q, p, tb_out));
      end
      // Timebin 0 at a phase below the peak window would go negative.
      raw_in = '0;
      #1;
      check(tb_out == '0, "negative clamps to 0");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
