// iqsync_alice: transmitter side of iQSync.
//
// Combines the level random source and the pattern generator. A pulse on
// `start` launches one synchronization pattern; `start_msg` is the single
// classical message for Bob, raised together with the first symbol, and goes
// out through the classical data channel (outside this design). `sym`/`ppm`
// drive the optical modulator through a serializer (also outside). The random
// source advances once per transmitted symbol (its two halves are folded
// into the 16-bit word the generator uses); `seed_load` reseeds it.
module iqsync_alice
  import iqsync_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  cfg_t        cfg,
  input  logic        seed_load,
  input  logic [31:0] seed,
  input  logic        start,
  output logic        busy,
  output logic        start_msg,
  output logic        sym_valid,
  output logic        sym,
  output level_t      sym_level,
  output sym_idx_t    sym_idx,
  output logic [1:0]  ppm,
  output logic        done
);

  logic [31:0] rnd;
  logic        rnd_en;

  level_rng u_rng (
    .clk, .rst_n, .seed_load, .seed, .en(rnd_en), .rnd
  );

  pattern_gen u_gen (
    .clk, .rst_n, .start, .cfg, .rnd(rnd[31:16] ^ rnd[15:0]), .rnd_en, .busy, .start_msg,
    .sym_valid, .sym, .sym_level, .sym_idx, .ppm, .done
  );

endmodule
