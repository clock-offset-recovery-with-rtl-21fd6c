// det_capture: detection acquisition at Bob.
//
// On the start message from Alice (the coarse marker of the pattern start) a
// local symbol counter starts at 0 and runs for the length of the pattern,
// ceil((lmax+1)/di) * 2**(lmax+1) symbols. Every detection in that window is
// time-stamped as {symbol counter, phase}, where `det_phase` is the TDC's
// position of the detection inside the current symbol period: its MSB is the
// timebin (0 early, 1 late) and the FINE_W bits below it the sub-timebin phase.
// The timestamp is therefore in units of 1/2**FINE_W timebin, counted from
// Bob's start, and goes to the detection buffer through a simple write port.
//
// A window of exactly the pattern length suffices: offsets the method can
// recover are below a quarter group, and detections pushed beyond either end
// of the window fall into the first or last quarter of a group, which Bob's
// acceptance window discards anyway.
//
// Timing: a detection presented in the cycle of `start_msg` belongs to symbol
// 0. One detection per cycle at most (the detector dead time of the paper's
// SPADs is ~96 us). When the buffer is full further detections are dropped
// and `overflow` is set. `done` pulses in the cycle in which a detection of the
// last symbol of the window would be written. The clocks of Alice and Bob are assumed phase-locked, as the paper
// does; this block runs on Bob's symbol clock.
module det_capture
  import iqsync_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start_msg,
  input  cfg_t              cfg,
  input  logic              det_valid,
  input  logic [FINE_W:0]   det_phase,
  output logic              busy,
  output logic              wr_en,
  output logic [ADDR_W-1:0] wr_addr,
  output tstamp_t           wr_data,
  output logic [CNT_W-1:0]  num_det,
  output logic              overflow,
  output logic              done
);

  sym_idx_t sc;           // local symbol counter
  sym_idx_t last_sym;     // window length - 1
  logic     run;
  logic     take;
  sym_idx_t sc_now;

  always_comb begin
    last_sym = sym_idx_t'((64'(num_groups(cfg)) << (cfg.lmax + 1)) - 64'd1);
    sc_now   = run ? sc : '0;
    take     = (run || start_msg) && det_valid;
  end

  assign busy = run;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run      <= 1'b0;
      sc       <= '0;
      num_det  <= '0;
      overflow <= 1'b0;
      wr_en    <= 1'b0;
      wr_addr  <= '0;
      wr_data  <= '0;
      done     <= 1'b0;
    end else begin
      wr_en <= 1'b0;
      done  <= 1'b0;
      if (!run && start_msg) begin
        run      <= 1'b1;
        sc       <= sym_idx_t'(1);
        num_det  <= '0;
        overflow <= 1'b0;
      end else if (run) begin
        sc <= sc + 1'b1;
        if (sc == last_sym) begin
          run  <= 1'b0;
          done <= 1'b1;
        end
      end
      if (take) begin
        if (!run || num_det != CNT_W'(DET_DEPTH)) begin
          wr_en   <= 1'b1;
          wr_addr <= run ? num_det[ADDR_W-1:0] : '0;
          wr_data <= {sc_now, det_phase};
          num_det <= run ? num_det + 1'b1 : CNT_W'(1);
        end else begin
          overflow <= 1'b1;
        end
      end
    end
  end

endmodule
