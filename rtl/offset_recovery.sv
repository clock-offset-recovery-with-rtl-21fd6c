// offset_recovery: iQSync dichotomic-search clock offset recovery (Bob).
//
// Implements Algorithm 2 of the iQSync method over the stored detections,
// given as timebin indices D(k) in arrival order. The offset delta (in
// timebins) is built from its least significant bit up, one bit per level
// l = 0..lmax. For level l the detections of group floor(l/di) are swept; a
// detection counts only if its symbol index inside the group lies in the
// acceptance window [2**(lmax-1), 3*2**(lmax-1)), i.e. outside the first and
// last quarter of the group. With x = D(k) + delta, the received symbol is
// LSB(x) (a late pulse is a 1) and the expected one is bit l of x for l > 0,
// 0 for l = 0. A match increments the signed counter C, a mismatch
// decrements it; if C < 0 at the end of the level, delta gains 2**l. The
// sweep of a level stops at the first detection of a later group; when the
// next level belongs to the next group, that detection becomes the start
// index of the next sweep. Finally delta is wrapped into the signed range
// (minus 2**(lmax+1) if above 2**lmax) and negated, so it is positive when
// Bob's clock runs ahead. The offset in symbols is delta/2.
//
// Hardware mapping (this design's choice): a state machine evaluates one
// detection per clock cycle from a memory with one cycle of read latency; the
// next address is issued in the same cycle the current word is evaluated, so
// a level costs its detections plus two cycles. The group and window tests
// use shifts and masks by lmax+1, and floor(l/di) is kept as a counter that
// steps every di levels, so no divider is needed. `iters` counts inner-loop
// iterations, the paper's measure of the method's time complexity.
//
// Interface: pulse `start` with `cfg` and `num_det` stable; `done` pulses
// with `delta` valid, which holds until the next start.
module offset_recovery
  import iqsync_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  cfg_t              cfg,
  input  logic [CNT_W-1:0]  num_det,
  output logic              rd_en,
  output logic [ADDR_W-1:0] rd_addr,
  input  tb_idx_t           rd_data,      // D(k), one cycle after rd_en
  output logic              busy,
  output logic              done,
  output delta_t            delta,
  output logic [31:0]       iters
);

  typedef enum logic [2:0] {S_IDLE, S_LVL, S_EVAL, S_END, S_FINAL} state_t;
  state_t state;

  level_t           l;        // current level
  level_t           lmod;     // l mod di
  level_t           greq;     // floor(l / di)
  logic [CNT_W-1:0] kmin;     // k^-: first detection of the current group
  logic [CNT_W-1:0] kq;       // index of the word in rd_data
  logic signed [CNT_W+1:0] cnt;  // counter C
  tb_idx_t          dacc;     // delta before the final wrap (non-negative)

  // Combinational evaluation of rd_data.
  sym_idx_t ks, ksg, grp_mask, ks_lo, ks_hi;
  logic [TB_W:0] x;
  logic     later_grp, in_win, s_rx, s_exp, last_k;

  always_comb begin
    grp_mask  = sym_idx_t'((64'd1 << (cfg.lmax + 1)) - 64'd1);
    ks_lo     = sym_idx_t'(64'd1 << (cfg.lmax - 1));
    ks_hi     = sym_idx_t'(64'd3 << (cfg.lmax - 1));
    ks        = sym_idx_t'(rd_data >> 1);
    later_grp = (ks >> (cfg.lmax + 1)) > sym_idx_t'(greq);
    ksg       = ks & grp_mask;
    in_win    = (ksg >= ks_lo) && (ksg < ks_hi);
    x         = {1'b0, rd_data} + {1'b0, dacc};
    s_rx      = x[0];
    s_exp     = (l == '0) ? 1'b0 : x[$clog2(TB_W + 1)'(l)];
    last_k    = (kq + 1'b1) >= num_det;
  end

  always_comb begin
    rd_en   = 1'b0;
    rd_addr = '0;
    if (state == S_LVL && kmin < num_det) begin
      rd_en   = 1'b1;
      rd_addr = kmin[ADDR_W-1:0];
    end else if (state == S_EVAL && !later_grp && !last_k) begin
      rd_en   = 1'b1;
      rd_addr = ADDR_W'(kq + 1'b1);
    end
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      l     <= '0;
      lmod  <= '0;
      greq  <= '0;
      kmin  <= '0;
      kq    <= '0;
      cnt   <= '0;
      dacc  <= '0;
      delta <= '0;
      iters <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          l     <= '0;
          lmod  <= '0;
          greq  <= '0;
          kmin  <= '0;
          dacc  <= '0;
          iters <= '0;
          state <= S_LVL;
        end
        S_LVL: begin
          cnt   <= '0;
          kq    <= kmin;
          state <= (kmin < num_det) ? S_EVAL : S_END;
        end
        S_EVAL: begin
          iters <= iters + 1'b1;
          if (later_grp) begin
            if (lmod == cfg.di - 1'b1) kmin <= kq;
            state <= S_END;
          end else begin
            if (in_win) cnt <= (s_rx == s_exp) ? cnt + 1'b1 : cnt - 1'b1;
            kq <= kq + 1'b1;
            if (last_k) state <= S_END;
          end
        end
        S_END: begin
          if (cnt < 0) dacc <= dacc + (tb_idx_t'(1) << l);
          if (l == cfg.lmax) begin
            state <= S_FINAL;
          end else begin
            l <= l + 1'b1;
            if (lmod == cfg.di - 1'b1) begin
              lmod <= '0;
              greq <= greq + 1'b1;
            end else begin
              lmod <= lmod + 1'b1;
            end
            state <= S_LVL;
          end
        end
        S_FINAL: begin
          if (dacc > (tb_idx_t'(1) << cfg.lmax))
            delta <= -(delta_t'(dacc) - (delta_t'(1) <<< (cfg.lmax + 1)));
          else
            delta <= -delta_t'(dacc);
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   start && state == S_IDLE |-> cfg.lmax >= 1 && cfg.di >= 1 &&
                                                cfg.di <= cfg.lmax + 1);
  assert property (@(posedge clk) disable iff (!rst_n)
                   num_det <= CNT_W'(DET_DEPTH));

endmodule
