// pattern_gen: iQSync synchronization pattern generator (Alice).
//
// Emits the pattern of Algorithm 1 of the iQSync method, one symbol per clock
// cycle, from a pulse on `start` until the last symbol. The pattern is
// ceil((lmax+1)/di) groups of 2**(lmax+1) symbols. In group g the levels
// g*di .. min(g*di+di-1, lmax) are interleaved: for every symbol one of them is
// picked at random, and the transmitted symbol is LSB((ks << 1) >> level),
// i.e. 0 for level 0 and bit level-1 of the symbol index ks otherwise.
//
// The per-group level range is kept incrementally (the lowest level of the
// group advances by di at every group boundary), so no multiplication by di
// is needed. The random pick is floor(rnd[15:0] * range / 2**16), with
// range = number of levels in the group; it is exact for di = 1 and has a
// bias below 2**-11 otherwise.
//
// Timing: `start` is sampled in IDLE; the first symbol appears on the outputs
// two cycles later together with `start_msg`, the single classical message to
// Bob, and symbols follow back to back. `ppm` is the binary PPM timebin pair
// of the symbol: ppm[0] the early timebin (symbol 0), ppm[1] the late one
// (symbol 1). `done` pulses with the last symbol. The symbol rate of one per
// cycle, the output registers and the PPM bit order are choices of this
// design; the pattern itself follows the paper.
module pattern_gen
  import iqsync_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  cfg_t        cfg,          // held stable while busy
  input  logic [15:0] rnd,          // random word for the level choice
  output logic        rnd_en,       // consume `rnd` this cycle
  output logic        busy,
  output logic        start_msg,    // with symbol 0
  output logic        sym_valid,
  output logic        sym,          // transmitted symbol s
  output level_t      sym_level,    // chosen level (for monitoring)
  output sym_idx_t    sym_idx,      // symbol index k_s
  output logic [1:0]  ppm,          // {late, early} pulse
  output logic        done          // with the last symbol
);

  sym_idx_t ks;
  level_t   lmin;            // l^-: lowest level of the current group
  logic     run;

  // Group geometry for the current configuration.
  sym_idx_t grp_mask;        // 2**(lmax+1) - 1
  logic     last_in_grp;
  logic [6:0] lplus_raw, lplus, range_w;
  logic [22:0] pick;
  level_t   level;
  logic     last_grp;

  always_comb begin
    grp_mask    = sym_idx_t'((64'd1 << (cfg.lmax + 1)) - 64'd1);
    last_in_grp = (ks & grp_mask) == grp_mask;
    lplus_raw   = 7'(lmin) + 7'(cfg.di) - 7'd1;
    lplus       = (lplus_raw > 7'(cfg.lmax)) ? 7'(cfg.lmax) : lplus_raw;   // l^+
    range_w     = lplus - 7'(lmin) + 7'd1;
    pick        = 23'(rnd) * 23'(range_w);
    level       = level_t'(7'(lmin) + 7'(pick[22:16]));
    last_grp    = (7'(lmin) + 7'(cfg.di)) > 7'(cfg.lmax);
  end

  assign busy   = run;
  assign rnd_en = run;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run       <= 1'b0;
      ks        <= '0;
      lmin      <= '0;
      start_msg <= 1'b0;
      sym_valid <= 1'b0;
      sym       <= 1'b0;
      sym_level <= '0;
      sym_idx   <= '0;
      ppm       <= '0;
      done      <= 1'b0;
    end else begin
      start_msg <= 1'b0;
      sym_valid <= 1'b0;
      done      <= 1'b0;
      ppm       <= '0;
      if (!run) begin
        if (start) begin
          run  <= 1'b1;
          ks   <= '0;
          lmin <= '0;
        end
      end else begin
        sym_valid <= 1'b1;
        start_msg <= (ks == '0);
        sym       <= level_symbol(ks, level);
        sym_level <= level;
        sym_idx   <= ks;
        ppm       <= level_symbol(ks, level) ? 2'b10 : 2'b01;
        ks        <= ks + 1'b1;
        if (last_in_grp) begin
          if (last_grp) begin
            run  <= 1'b0;
            done <= 1'b1;
          end else begin
            lmin <= level_t'(7'(lmin) + 7'(cfg.di));
          end
        end
      end
    end
  end

  // A configuration outside the supported range breaks the pattern geometry.
  assert property (@(posedge clk) disable iff (!rst_n)
                   run |-> (cfg.lmax >= 1 && 32'(cfg.lmax) <= LMAX &&
                            cfg.di >= 1 && cfg.di <= cfg.lmax + 1));

endmodule
