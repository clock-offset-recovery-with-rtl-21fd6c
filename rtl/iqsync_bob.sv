// iqsync_bob: receiver side of iQSync.
//
// Sequences one synchronization run at Bob:
//   1. ACQ   - on the start message, det_capture time-stamps detections for the
//              pattern length into det_buffer while timebin_align builds the
//              sub-timebin phase histogram;
//   2. ALIGN - timebin_align finds the histogram peak and the shift;
//   3. RECOV - offset_recovery sweeps the buffer, reading each raw timestamp
//              through the aligner's combinational conversion to a timebin
//              index;
//   4. `done` pulses with `delta` (offset in timebins, positive when Bob's
//      clock runs ahead) and `delta_sym` = delta/2 (offset in symbols).
// A start message while a run is in progress is ignored. The order of the two
// evaluation steps follows the paper; the sequencing is this design's.
module iqsync_bob
  import iqsync_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  cfg_t              cfg,
  input  logic              start_msg,
  input  logic              det_valid,
  input  logic [FINE_W:0]   det_phase,
  output logic              busy,
  output logic              done,
  output delta_t            delta,
  output delta_t            delta_sym,
  output logic [CNT_W-1:0]  num_det,
  output logic              overflow,
  output logic [FINE_W-1:0] peak,
  output logic [31:0]       iters
);

  typedef enum logic [1:0] {B_IDLE, B_ACQ, B_ALIGN, B_RECOV} bstate_t;
  bstate_t st;

  logic              cap_busy, cap_done, wr_en;
  logic [ADDR_W-1:0] wr_addr, rd_addr;
  tstamp_t           wr_data, rd_raw;
  logic              rd_en, found, rec_start, rec_busy;
  tb_idx_t           rd_tb;
  logic              cap_start;

  assign cap_start = (st == B_IDLE) && start_msg;

  det_capture u_cap (
    .clk, .rst_n, .start_msg(cap_start), .cfg, .det_valid, .det_phase,
    .busy(cap_busy), .wr_en, .wr_addr, .wr_data, .num_det, .overflow,
    .done(cap_done)
  );

  det_buffer u_buf (
    .clk, .wr_en, .wr_addr, .wr_data, .rd_en, .rd_addr, .rd_data(rd_raw)
  );

  timebin_align u_align (
    .clk, .rst_n, .clear(cap_start), .hist_en(wr_en),
    .hist_fine(wr_data[FINE_W-1:0]), .find(cap_done), .found, .peak,
    .raw_in(rd_raw), .tb_out(rd_tb)
  );

  assign rec_start = found;

  offset_recovery u_rec (
    .clk, .rst_n, .start(rec_start), .cfg, .num_det, .rd_en, .rd_addr,
    .rd_data(rd_tb), .busy(rec_busy), .done, .delta, .iters
  );

  assign delta_sym = delta >>> 1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) st <= B_IDLE;
    else unique case (st)
      B_IDLE:  if (cap_start) st <= B_ACQ;
      B_ACQ:   if (cap_done)  st <= B_ALIGN;
      B_ALIGN: if (found)     st <= B_RECOV;
      B_RECOV: if (done)      st <= B_IDLE;
      default: st <= B_IDLE;
    endcase
  end

  assign busy = (st != B_IDLE) || cap_busy || rec_busy;

endmodule
