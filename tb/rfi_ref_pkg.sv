// rfi_ref_pkg: reference model of one excision path, for testbenches.
//
// The model receives the same valid words as a path and predicts its output
// from the definitions, not from the design's structure: each window is kept,
// its lower median M and the lower median D of |x - M| are taken by sorting;
// in MoM mode, from the (K+1)-th window of a run on, D is the lower median of
// the previous complete group of K MADs. The thresholds are M +/- off with
// off = (n*6073*D + 2**15) >> 16, and the configuration in force is the one
// present when the window's filtering starts, at valid word
// w*L + 2*L + 2*256 + 3 of the run. Samples replaced by noise are predicted
// only as "noisy" (value checked against a bound by the caller).
package rfi_ref_pkg;
  import rfi_pkg::*;

  typedef struct { int z; bit f; bit noisy; int m; int d; repl_mode_e repl; } exp_t;

  function automatic int lower_median(const ref int q[$]);
    int t[$];
    // Sorted with an offset so that only non-negative numbers are compared.
    foreach (q[i]) t.push_back(q[i] + 1024);
    t.sort();
    return t[(t.size() + 1) / 2 - 1] - 1024;
  endfunction

  class rfi_ref;
    int lanes, win_mad, win_mom, mom_k;
    int L;
    bit mom_mode;
    int ce_cnt;
    int win_x[$];
    int win_idx;
    int mads[$];
    int mom_cur;
    int pend_x[$][$];
    int pend_m[$], pend_d[$], pend_start[$];
    bit pend_mom[$];
    exp_t exp_q[$];
    int n_mom_used;

    function new(int lanes, int win_mad, int win_mom, int mom_k);
      this.lanes = lanes; this.win_mad = win_mad; this.win_mom = win_mom; this.mom_k = mom_k;
      n_mom_used = 0;
      restart(0);
    endfunction

    function void restart(bit mom);
      mom_mode = mom; L = mom ? win_mom / lanes : win_mad / lanes;
      ce_cnt = 0; win_x.delete(); win_idx = 0; mads.delete(); mom_cur = -1;
      pend_x.delete(); pend_m.delete(); pend_d.delete(); pend_start.delete(); pend_mom.delete();
      exp_q.delete();
    endfunction

    // One valid word as the path receives it, with the configuration then.
    function void word(int xs[], chan_cfg_t cfg);
      ce_cnt++;
      foreach (xs[i]) win_x.push_back(xs[i]);
      if (win_x.size() == L * lanes) begin
        int m, d;
        int dev[$];
        m = lower_median(win_x);
        foreach (win_x[i]) dev.push_back(win_x[i] > m ? win_x[i] - m : m - win_x[i]);
        d = lower_median(dev);
        pend_x.push_back(win_x);
        pend_m.push_back(m);
        if (mom_mode) begin
          pend_d.push_back(mom_cur >= 0 ? mom_cur : d);
          pend_mom.push_back(mom_cur >= 0);
          mads.push_back(d);
          if (mads.size() == mom_k) begin mom_cur = lower_median(mads); mads.delete(); end
        end else begin
          pend_d.push_back(d);
          pend_mom.push_back(0);
        end
        pend_start.push_back(win_idx * L + 2 * L + 2 * 256 + 3);
        win_idx++;
        win_x.delete();
      end
      if (pend_start.size() > 0 && ce_cnt == pend_start[0]) begin
        int xsw[$];
        int m, d, off, tu, tl;
        xsw = pend_x.pop_front(); m = pend_m.pop_front(); d = pend_d.pop_front();
        if (pend_mom.pop_front()) n_mom_used++;
        void'(pend_start.pop_front());
        off = (int'(cfg.nmult) * 6073 * d + 32768) >>> 16;
        tu = m + off; tl = m - off;
        foreach (xsw[i]) begin
          exp_t e;
          int x;
          x = xsw[i];
          e.m = m; e.d = d; e.noisy = 0; e.repl = cfg.repl;
          e.f = cfg.enable && (x >= tu || x <= tl);
          if (!e.f) e.z = x;
          else if (cfg.repl == REPL_THRESH) e.z = (x >= tu) ? tu : tl;
          else if (cfg.repl == REPL_NOISE) begin e.z = 0; e.noisy = 1; end
          else e.z = int'(cfg.kconst);
          exp_q.push_back(e);
        end
      end
    endfunction

    // Check one output sample; returns 1 if it matches.
    function bit check(int z, bit f, output exp_t e);
      int lim;
      if (exp_q.size() == 0) return 0;
      e = exp_q.pop_front();
      if (f != e.f) return 0;
      if (!e.noisy) return z == e.z;
      lim = (5 * 1483 * e.d) / 1000 + 2;
      return (z <= e.m + lim) && (z >= e.m - lim);
    endfunction
  endclass

endpackage
