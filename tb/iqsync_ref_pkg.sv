// iqsync_ref_pkg: behavioural reference of the iQSync pattern and offset
// recovery, used by the testbenches to compute expected results.
//
// Written as plain loops over integers, straight from the two algorithms of
// the method, with no sharing of code with the RTL: the pattern symbol of a
// level, the symbol stream of a configuration for a given sequence of chosen
// levels, and the dichotomic-search recovery over a list of detection
// timebin indices (also returning its inner-loop iteration count).
package iqsync_ref_pkg;

  typedef longint dlist_t[$];

  function automatic int ref_symbol(longint ks, int level);
    return int'(((ks << 1) >> level) & 1);
  endfunction

  function automatic int ref_groups(int lmax, int di);
    return (lmax + 1 + di - 1) / di;
  endfunction

  function automatic longint ref_pattern_len(int lmax, int di);
    return longint'(ref_groups(lmax, di)) << (lmax + 1);
  endfunction

  // Recovery over detection timebin indices d (sorted ascending).
  function automatic longint ref_recover(int lmax, int di, dlist_t d,
                                         output longint iters);
    int     nl   = lmax + 1;
    longint ksm  = longint'(1) << (lmax - 1);
    longint ksp  = (longint'(1) << nl) - ksm;
    longint delta = 0;
    int     kmin = 0;
    iters = 0;
    for (int l = 0; l <= lmax; l++) begin
      longint c = 0;
      int greq = l / di;
      for (int k = kmin; k < d.size(); k++) begin
        longint ks = d[k] / 2;
        longint g  = ks >> nl;
        longint ksg, ksh;
        int sexp, s;
        iters++;
        if (g > greq) begin
          if ((l + 1) / di > greq) kmin = k;
          break;
        end
        ksg = ks % (longint'(1) << nl);
        if (ksg < ksm || ksg >= ksp) continue;
        ksh  = (d[k] + delta) >> 1;
        sexp = int'(((ksh << 1) >> l) & 1);
        s    = int'((d[k] + delta) & 1);
        if (s == sexp) c++; else c--;
      end
      if (c < 0) delta += longint'(1) << l;
    end
    if (delta > (longint'(1) << lmax)) delta -= longint'(1) << (lmax + 1);
    return -delta;
  endfunction

  // Detections for a transmitted symbol stream sym (one per symbol), received
  // with an offset of off_tb timebins, each symbol detected with probability
  // psig_ppm / 1e6 and a noise click in each timebin with probability
  // pnoise_ppm / 1e6; kept only inside Bob's window [0, 2*nsym).
  function automatic dlist_t ref_detect(int sym[$], longint off_tb,
                                        int psig_ppm, int pnoise_ppm);
    dlist_t d;
    longint nt = 2 * longint'(sym.size());
    for (longint t = 0; t < nt; t++) begin
      longint src = t - off_tb;     // Alice timebin seen at Bob's timebin t
      bit hit = 0;
      if (src >= 0 && src < nt && (src % 2) == sym[src / 2])
        hit = ($urandom_range(999_999) < psig_ppm);
      if (!hit && pnoise_ppm > 0)
        hit = ($urandom_range(999_999) < pnoise_ppm);
      if (hit) d.push_back(t);
    end
    return d;
  endfunction

endpackage
