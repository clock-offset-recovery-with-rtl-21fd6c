// iqsync_top: iQSync clock offset recovery, transmitter and receiver.
//
// iQSync recovers the offset between the symbol counters of a QKD sender
// (Alice) and receiver (Bob) whose clocks are already phase-locked. Alice
// sends one start message over the classical channel and, at the same time, a
// synchronization pattern over the quantum channel; Bob time-stamps the few
// single-photon detections that survive the channel and reconstructs the
// offset bit by bit. This top holds both ends with the same agreed
// configuration `cfg` (maximum level and degree of interleaving). The
// channels are outside: Alice's `a_start_msg` and `a_sym`/`a_ppm` leave the
// design and Bob's `b_start_msg` and detections (`b_det_valid`,
// `b_det_phase` from the TDC) come back in, with whatever latency, loss and
// noise the link adds. Both ends run on one clock here; in a real link each
// runs on its own, phase-locked to the other.
module iqsync_top
  import iqsync_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  cfg_t              cfg,
  // Alice
  input  logic              a_seed_load,
  input  logic [31:0]       a_seed,
  input  logic              a_start,
  output logic              a_busy,
  output logic              a_start_msg,
  output logic              a_sym_valid,
  output logic              a_sym,
  output level_t            a_sym_level,
  output sym_idx_t          a_sym_idx,
  output logic [1:0]        a_ppm,
  output logic              a_done,
  // Bob
  input  logic              b_start_msg,
  input  logic              b_det_valid,
  input  logic [FINE_W:0]   b_det_phase,
  output logic              b_busy,
  output logic              b_done,
  output delta_t            b_delta,
  output delta_t            b_delta_sym,
  output logic [CNT_W-1:0]  b_num_det,
  output logic              b_overflow,
  output logic [FINE_W-1:0] b_peak,
  output logic [31:0]       b_iters
);

  iqsync_alice u_alice (
    .clk, .rst_n, .cfg, .seed_load(a_seed_load), .seed(a_seed),
    .start(a_start), .busy(a_busy), .start_msg(a_start_msg),
    .sym_valid(a_sym_valid), .sym(a_sym), .sym_level(a_sym_level),
    .sym_idx(a_sym_idx), .ppm(a_ppm), .done(a_done)
  );

  iqsync_bob u_bob (
    .clk, .rst_n, .cfg, .start_msg(b_start_msg), .det_valid(b_det_valid),
    .det_phase(b_det_phase), .busy(b_busy), .done(b_done), .delta(b_delta),
    .delta_sym(b_delta_sym), .num_det(b_num_det), .overflow(b_overflow),
    .peak(b_peak), .iters(b_iters)
  );

endmodule
