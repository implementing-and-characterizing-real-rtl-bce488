// tb_rfi_channel: end-to-end test of one excision path against a reference.
//
// Input: Gaussian-like noise (sum of four uniform values, sigma about 12)
// with impulsive bursts of +/-(90..127), on 2 lanes, with random gaps in
// in_valid. The testbench keeps its own copy of every window, takes the
// median and the MAD by sorting, forms the thresholds with the documented
// rounding and predicts every output sample and flag.
//   phase 1  MAD mode: blanking at 3 sigma, then clipping at 2 sigma, then
//            noise replacement, then the unfiltered copy (enable low); the
//            configuration changes mid-window and takes effect on the next
//            window whose filtering starts, as the design specifies.
//   phase 2  switch to MoM mode (restart), K = 4, with a burst covering most
//            of two windows: their own MADs break down but the MoM does not.
// Also checks the latency of every word (2*L + 2*256 + 4 valid words) and
// counts how often each mechanism occurred.
module tb_rfi_channel;
  import rfi_pkg::*;
  localparam int LANES = 2, WIN_MAD = 1100, WIN_MOM = 1040, MOM_K = 4;
  localparam int BINS = 256;

  logic clk = 0, rst_n = 0;
  chan_cfg_t cfg;
  logic in_valid = 0;
  logic [LANES-1:0][SAMPLE_W-1:0] in_data;
  logic out_valid, in_ready;
  logic [LANES-1:0][SAMPLE_W-1:0] out_data;
  logic [LANES-1:0] out_flag;
  logic st_primed, st_mom_valid, st_restart;
  logic signed [SAMPLE_W-1:0] st_med;
  logic [SAMPLE_W-1:0] st_mad, st_disp;
  int checks = 0, failures = 0;

  rfi_channel #(.LANES(LANES), .WIN_MAD(WIN_MAD), .WIN_MOM(WIN_MOM), .MOM_K(MOM_K)) dut (.*);

  always #5 clk = ~clk;

  // ------------------------------------------------------------ reference
  typedef struct { int z; bit f; bit noisy; int m; int d; } exp_t;

  int   L;                 // window words in the current mode
  bit   mom_mode;
  int   ce_cnt;            // valid words since the last restart
  int   win_x[$];          // samples of the window being received
  int   win_idx;           // window number since restart
  int   mads[$];           // MADs of the current MoM group
  int   mom_cur;           // -1: none yet
  int   pend_x[$][$];      // windows waiting for their pass C
  int   pend_m[$], pend_d[$], pend_start[$];
  int   word_in_cnt[$];    // ce count of each input word
  exp_t exp_q[$];
  chan_cfg_t cfg_at_start;
  int   n_blank = 0, n_clip = 0, n_noise = 0, n_bypass = 0, n_mom_used = 0, n_restart = 0;
  real  nsum = 0, nsum2 = 0;
  int   nn = 0;

  function automatic int lower_median(const ref int q[$]);
    int t[$];
    // Sorted with an offset so that only non-negative numbers are compared.
    foreach (q[i]) t.push_back(q[i] + 1024);
    t.sort();
    return t[(t.size() + 1) / 2 - 1] - 1024;
  endfunction

  // Predict the outputs of a window once its dispersion is known.
  task automatic predict(int xs[$], int m, int d, chan_cfg_t c);
    int off, tu, tl;
    off = (int'(c.nmult) * 6073 * d + 32768) >>> 16;
    tu = m + off; tl = m - off;
    foreach (xs[i]) begin
      exp_t e;
      int x;
      x = xs[i];
      e.m = m; e.d = d; e.noisy = 0;
      e.f = c.enable && (x >= tu || x <= tl);
      if (!e.f) e.z = x;
      else if (c.repl == REPL_THRESH) e.z = (x >= tu) ? tu : tl;
      else if (c.repl == REPL_NOISE) begin e.z = 0; e.noisy = 1; end
      else e.z = int'(c.kconst);
      exp_q.push_back(e);
    end
  endtask

  always @(posedge clk) begin
    // Output side: compare with the prediction.
    if (rst_n && out_valid) begin
      int a;
      a = word_in_cnt.pop_front();
      checks++;
      if (ce_cnt != a + 2 * L + 2 * BINS + 4) begin
        failures++; $display("latency: word in at %0d out at %0d (L=%0d)", a, ce_cnt, L);
      end
      for (int l = 0; l < LANES; l++) begin
        exp_t e;
        int z;
        e = exp_q.pop_front();
        z = int'($signed(out_data[l]));
        checks += 2;
        if (out_flag[l] !== e.f) begin failures++; $display("flag %0d expected %0d", out_flag[l], e.f); end
        if (e.noisy) begin
          int lim;
          lim = (5 * 1483 * e.d) / 1000 + 2;
          if (z > e.m + lim || z < e.m - lim) begin failures++; $display("noise %0d outside %0d+/-%0d", z, e.m, lim); end
          n_noise++; nsum += z - e.m; nsum2 += real'(z - e.m) * (z - e.m) / (1.4826 * 1.4826 * e.d * e.d); nn++;
        end else if (z != e.z) begin
          failures++; $display("out %0d expected %0d (M=%0d D=%0d)", z, e.z, e.m, e.d);
        end
        if (e.f && !e.noisy && cfg_at_start.repl == REPL_THRESH) n_clip++;
        if (e.f && !e.noisy && cfg_at_start.repl != REPL_THRESH) n_blank++;
      end
    end
    if (rst_n && st_restart) n_restart++;
    // Input side: windows, medians, MADs, MoM.
    if (rst_n && in_valid && in_ready && !(cfg.est_mode != (mom_mode ? EST_MOM : EST_MAD))) begin
      ce_cnt++;
      word_in_cnt.push_back(ce_cnt);
      for (int l = 0; l < LANES; l++) win_x.push_back(int'($signed(in_data[l])));
      if (win_x.size() == L * LANES) begin
        int m, d;
        int dev[$];
        m = lower_median(win_x);
        dev.delete();
        foreach (win_x[i]) dev.push_back(win_x[i] > m ? win_x[i] - m : m - win_x[i]);
        d = lower_median(dev);
        pend_x.push_back(win_x);
        pend_m.push_back(m);
        // Dispersion used: in MoM mode the median of the previous group.
        if (mom_mode) begin
          pend_d.push_back(mom_cur >= 0 ? mom_cur : d);
          if (mom_cur >= 0) n_mom_used++;
          mads.push_back(d);
          if (mads.size() == MOM_K) begin mom_cur = lower_median(mads); mads.delete(); end
        end else
          pend_d.push_back(d);
        // Pass C of window w starts at ce count w*L + 2L + 2*BINS + 3.
        pend_start.push_back(win_idx * L + 2 * L + 2 * BINS + 3);
        win_idx++;
        win_x.delete();
      end
    end
    // Configuration in force when a window's filtering starts.
    if (pend_start.size() > 0 && ce_cnt == pend_start[0] && in_valid && in_ready) begin
      cfg_at_start = cfg;
      if (!cfg.enable) n_bypass += L * LANES;
      predict(pend_x.pop_front(), pend_m.pop_front(), pend_d.pop_front(), cfg);
      void'(pend_start.pop_front());
    end
  end

  task automatic restart_ref(bit mom);
    mom_mode = mom; L = mom ? WIN_MOM / LANES : WIN_MAD / LANES;
    ce_cnt = 0; win_x.delete(); win_idx = 0; mads.delete(); mom_cur = -1;
    pend_x.delete(); pend_m.delete(); pend_d.delete(); pend_start.delete();
    word_in_cnt.delete(); exp_q.delete();
  endtask

  // ------------------------------------------------------------ stimulus
  int burst_left = 0;
  int burst_sign = 1;

  function automatic int gauss12();
    return $urandom_range(0, 20) + $urandom_range(0, 20) + $urandom_range(0, 20) + $urandom_range(0, 20) - 40;
  endfunction

  task automatic feed(int nwords, int p_burst, int long_burst_at);
    for (int w = 0; w < nwords; w++) begin
      if ($urandom_range(0, 9) == 0) begin
        in_valid <= 0; @(posedge clk);
      end
      if (w == long_burst_at) burst_left = 800;
      else if (burst_left == 0 && $urandom_range(0, 999) < p_burst) begin
        burst_left = $urandom_range(3, 30);
        burst_sign = ($urandom_range(0, 1) != 0) ? 1 : -1;
      end
      for (int l = 0; l < LANES; l++) begin
        int v;
        v = gauss12();
        if (burst_left > 0) v = (($urandom_range(0, 1) != 0) ? 1 : -1) * $urandom_range(90, 127);
        in_data[l] <= SAMPLE_W'(v);
      end
      if (burst_left > 0) burst_left--;
      in_valid <= 1;
      @(posedge clk);
    end
    in_valid <= 0;
  endtask

  function automatic chan_cfg_t mkcfg(est_mode_e mode, bit en, repl_mode_e r, int n, int k);
    chan_cfg_t c;
    c.src_sel = 0; c.enable = en; c.est_mode = mode; c.nmult = NMULT_W'(n);
    c.repl = r; c.kconst = SAMPLE_W'(k);
    return c;
  endfunction

  initial begin
    restart_ref(0);
    cfg = mkcfg(EST_MAD, 1, REPL_CONST, 48, 0);
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // Words offered while the histograms are cleared are dropped.
    feed(20, 0, -1);
    wait (in_ready);
    // Phase 1: MAD. Configuration changes in the middle of windows.
    feed(WIN_MAD / LANES * 3 + 275, 4, -1);
    cfg = mkcfg(EST_MAD, 1, REPL_THRESH, 32, 0);
    feed(WIN_MAD / LANES * 2, 4, -1);
    cfg = mkcfg(EST_MAD, 1, REPL_NOISE, 48, 0);
    feed(WIN_MAD / LANES * 2, 4, -1);
    cfg = mkcfg(EST_MAD, 0, REPL_CONST, 48, 0);
    feed(WIN_MAD / LANES * 5, 4, -1);
    checks++;
    if (exp_q.size() > L * LANES || pend_x.size() > 3) begin failures++; $display("phase 1 outputs missing"); end
    // Phase 2: MoM, after a restart.
    repeat (3) @(posedge clk);
    cfg = mkcfg(EST_MOM, 1, REPL_CONST, 48, 0);
    @(posedge clk);
    restart_ref(1);
    repeat (2) @(posedge clk);
    checks++;
    if (in_ready) begin failures++; $display("in_ready high during restart"); end
    wait (in_ready);
    feed(WIN_MOM / LANES * 14, 4, WIN_MOM / LANES * 9 + 100);
    feed(WIN_MOM / LANES * 4, 4, -1);
    checks++;
    if (pend_x.size() > 3) begin failures++; $display("phase 2 outputs missing"); end
    // Every mechanism must have been seen.
    checks += 7;
    if (n_blank == 0)    begin failures++; $display("no blanking seen"); end
    if (n_clip == 0)     begin failures++; $display("no clipping seen"); end
    if (n_noise == 0)    begin failures++; $display("no noise replacement seen"); end
    if (n_bypass == 0)   begin failures++; $display("no unfiltered window seen"); end
    if (n_mom_used == 0) begin failures++; $display("MoM never used"); end
    if (n_restart != 1)  begin failures++; $display("%0d restarts", n_restart); end
    if (nn > 0 && (nsum2 / nn < 0.5 || nsum2 / nn > 1.6)) begin
      failures++; $display("noise variance ratio %f", nsum2 / nn);
    end
    $display("blank=%0d clip=%0d noise=%0d bypass=%0d mom_windows=%0d", n_blank, n_clip, n_noise, n_bypass, n_mom_used);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
