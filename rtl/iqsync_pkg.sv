// iqsync_pkg: constants and helpers shared by the iQSync clock-offset-recovery
// blocks.
//
// The synchronization pattern is split into levels 0..LMAX. Level l > 0 carries
// one bit of the symbol index, level 0 is all-zero and fixes the symbol
// alignment when a symbol spans two timebins (binary PPM, a '1' is the late
// pulse). Levels are packed in groups of DI interleaved levels; every group is
// 2**(LMAX+1) symbols long. LMAX = 28 is the configuration of the paper's main
// experiment (offsets up to 2**27 symbols, 215 ms at 1.6 ns per symbol).
//
// Widths are sized for the largest pattern the hardware can run: at most
// LMAX+1 groups of 2**(LMAX+1) symbols, so a symbol index needs
// LMAX+1+clog2(LMAX+1) bits and a timebin index one bit more. Raw detection
// timestamps carry FINE_W more bits of sub-timebin phase from the TDC; the
// phase resolution is a choice of this design. The detection buffer holds
// 2**18 words: the detector dead time of ~96 us allows at most ~258,600
// detections during the longest pattern of the paper (24.9 s), which is what
// the paper's noisy run (noise probability ~1e-5 per symbol, ~150,000 noise
// clicks) approaches.
package iqsync_pkg;

  localparam int unsigned LMAX      = 28;                  // maximum level l_max
  localparam int unsigned LVL_W     = $clog2(LMAX + 2);    // holds 0..LMAX+1
  localparam int unsigned SYM_W     = LMAX + 1 + $clog2(LMAX + 1); // symbol index
  localparam int unsigned TB_W      = SYM_W + 1;           // timebin index
  localparam int unsigned DELTA_W   = TB_W + 1;            // signed offset in timebins
  localparam int unsigned FINE_W    = 4;                   // sub-timebin phase bits
  localparam int unsigned TS_W      = TB_W + FINE_W;       // raw timestamp
  localparam int unsigned DET_DEPTH = 262144;              // stored detections
  localparam int unsigned ADDR_W    = $clog2(DET_DEPTH);
  localparam int unsigned CNT_W     = ADDR_W + 1;          // 0..DET_DEPTH

  typedef logic [LVL_W-1:0]   level_t;
  typedef logic [SYM_W-1:0]   sym_idx_t;
  typedef logic [TB_W-1:0]    tb_idx_t;
  typedef logic [TS_W-1:0]    tstamp_t;
  typedef logic signed [DELTA_W-1:0] delta_t;

  // Agreed configuration (step 1 of the protocol): maximum level and degree of
  // interleaving. Both sides must use the same values.
  typedef struct packed {
    level_t lmax;   // 1..LMAX
    level_t di;     // 1..lmax+1
  } cfg_t;

  // Symbol of level l at symbol index ks: LSB((ks << 1) >> l), i.e. 0 for
  // level 0 and bit l-1 of ks otherwise (Algorithm 1, line 10).
  function automatic logic level_symbol(input sym_idx_t ks, input level_t l);
    logic [SYM_W:0] v;
    v = {ks, 1'b0};
    return v[$clog2(SYM_W + 1)'(l)];
  endfunction

  // Number of groups: ceil((lmax+1)/di).
  function automatic level_t num_groups(input cfg_t c);
    return level_t'((32'(c.lmax) + 32'(c.di)) / 32'(c.di));
  endfunction

endpackage
