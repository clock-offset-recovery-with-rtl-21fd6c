// timebin_align: sub-timebin alignment of Bob's detections.
//
// First step of Bob's evaluation: find the phase at which the detections sit
// inside a timebin and shift every timestamp so that this phase lands in the
// middle of a timebin; then a timestamp becomes a timebin index by dropping
// its FINE_W phase bits (the remainder-free division by the timebin length).
//
// During acquisition every stored detection increments one of 2**FINE_W
// histogram counters, selected by its phase bits (`hist_en`, `hist_fine`).
// A pulse on `find` scans the counters, one per cycle, for the fullest one
// (the first on a tie); `found` pulses when `peak` and the shift are ready.
// The shift is HALF - peak with HALF = 2**(FINE_W-1), a signed value within
// one half timebin, so a detection never moves to a neighbouring timebin
// because of it. Conversion (`raw_in` to `tb_out`) is combinational and uses
// the registered shift; a timestamp that would turn negative maps to timebin
// 0. `clear` empties the histogram at the start of a run.
//
// The paper names the histogram and the remainder-free division; the bin
// count, the scan and the centring rule are choices of this design.
module timebin_align
  import iqsync_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              hist_en,
  input  logic [FINE_W-1:0] hist_fine,
  input  logic              find,
  output logic              found,
  output logic [FINE_W-1:0] peak,
  input  tstamp_t           raw_in,
  output tb_idx_t           tb_out
);

  localparam int unsigned NBINS = 1 << FINE_W;
  localparam int unsigned HALF  = NBINS / 2;

  logic [CNT_W-1:0]  hist [NBINS];
  logic              scan;
  logic [FINE_W-1:0] idx;
  logic [CNT_W-1:0]  best;
  logic [FINE_W-1:0] best_idx;
  logic signed [FINE_W+1:0] shift;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NBINS; i++) hist[i] <= '0;
    end else if (clear) begin
      for (int i = 0; i < NBINS; i++) hist[i] <= '0;
    end else if (hist_en && hist[hist_fine] != '1) begin
      hist[hist_fine] <= hist[hist_fine] + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      scan     <= 1'b0;
      idx      <= '0;
      best     <= '0;
      best_idx <= '0;
      peak     <= '0;
      found    <= 1'b0;
      shift    <= '0;
    end else begin
      found <= 1'b0;
      if (find && !scan) begin
        scan     <= 1'b1;
        idx      <= '0;
        best     <= '0;
        best_idx <= '0;
      end else if (scan) begin
        if (hist[idx] > best || idx == '0) begin
          best     <= hist[idx];
          best_idx <= idx;
        end
        idx <= idx + 1'b1;
        if (idx == FINE_W'(NBINS - 1)) begin
          scan  <= 1'b0;
          found <= 1'b1;
          if (hist[idx] > best) begin
            peak  <= idx;
            shift <= (FINE_W+2)'(HALF) - (FINE_W+2)'(idx);
          end else begin
            peak  <= best_idx;
            shift <= (FINE_W+2)'(HALF) - (FINE_W+2)'(best_idx);
          end
        end
      end
    end
  end

  logic signed [TS_W+1:0] aligned;
  always_comb begin
    aligned = $signed({2'b00, raw_in}) + (TS_W+2)'(shift);
    tb_out  = aligned[TS_W+1] ? '0 : aligned[TS_W-1:FINE_W];
  end

endmodule
