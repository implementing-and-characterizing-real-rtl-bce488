// tb_gwb_rfi_top: end-to-end test of the four-input excision board.
//
// Two "antennas" share impulsive bursts (correlated interference, as from a
// nearby power line) on top of independent noise; inputs 2 and 3 carry plain
// noise. A reference model per path (rfi_ref_pkg) predicts every output.
//   phase 1  two-antenna arrangement: paths 0/1 see input 0 filtered and
//            unfiltered, paths 2/3 see input 1 filtered and unfiltered; the
//            input is continuous, and the output of each path must then also
//            be continuous (real-time rate, one word out per word in).
//   phase 2  1:4 copy: all paths see input 0: unfiltered, blanked at 3
//            sigma, clipped at 3 sigma, noise at 3 sigma; input with gaps.
//   phase 3  path 1 switches to MoM (restart of that path only) and a burst
//            longer than half a window arrives.
// Each mechanism is counted and must occur at least once.
module tb_gwb_rfi_top;
  import rfi_pkg::*;
  import rfi_ref_pkg::*;
  localparam int NIN = 4, NPATH = 4, LANES = 2;
  localparam int WIN_MAD = 1100, WIN_MOM = 1040, MOM_K = 4;

  logic clk = 0, rst_n = 0;
  chan_cfg_t [NPATH-1:0] cfg;
  logic in_valid = 0;
  logic [NIN-1:0][LANES-1:0][SAMPLE_W-1:0] in_data;
  logic [NPATH-1:0] in_ready, out_valid, st_primed, st_mom_valid, st_restart;
  logic [NPATH-1:0][LANES-1:0][SAMPLE_W-1:0] out_data;
  logic [NPATH-1:0][LANES-1:0] out_flag;
  logic [NPATH-1:0][SAMPLE_W-1:0] st_med, st_mad, st_disp;
  int checks = 0, failures = 0;

  gwb_rfi_top #(.NIN(NIN), .NPATH(NPATH), .LANES(LANES),
                .WIN_MAD(WIN_MAD), .WIN_MOM(WIN_MOM), .MOM_K(MOM_K)) dut (.*);

  always #5 clk = ~clk;

  rfi_ref refm[NPATH];
  int n_blank = 0, n_clip = 0, n_noise = 0, n_bypass = 0, n_restart = 0;
  int n_copy4 = 0, n_gap = 0, n_cont = 0, n_bad_rate = 0;
  bit rate_phase = 0;
  logic iv_d1 = 0, iv_d2 = 0;
  bit out_started = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      for (int p = 0; p < NPATH; p++) begin
        if (out_valid[p]) begin
          for (int l = 0; l < LANES; l++) begin
            exp_t e;
            int z;
            z = int'($signed(out_data[p][l]));
            checks++;
            if (!refm[p].check(z, out_flag[p][l], e)) begin
              failures++;
              if (failures < 20) $display("path %0d: out %0d flag %0d expected %0d flag %0d", p, z, out_flag[p][l], e.z, e.f);
            end
            if (e.f && e.noisy) n_noise++;
            else if (e.f && e.repl == REPL_THRESH) n_clip++;
            else if (e.f) n_blank++;
          end
        end
        if (st_restart[p]) n_restart++;
      end
      // Real-time rate: once primed, every path outputs one word for every
      // input word, two clocks later (copy stage, output register).
      iv_d1 <= in_valid; iv_d2 <= iv_d1;
      if (&out_valid) out_started = 1;
      if (rate_phase && out_started && iv_d2) begin
        n_cont++;
        if (out_valid != '1) n_bad_rate++;
      end
      // The copy stage registers the words; feed the models as the paths see them.
      if (in_valid) begin
        for (int p = 0; p < NPATH; p++) begin
          int xs[];
          xs = new[LANES];
          for (int l = 0; l < LANES; l++) xs[l] = int'($signed(in_data[cfg[p].src_sel][l]));
          refm[p].word(xs, cfg[p]);
          if (!cfg[p].enable) n_bypass++;
        end
        if (cfg[0].src_sel == 0 && cfg[1].src_sel == 0 && cfg[2].src_sel == 0 && cfg[3].src_sel == 0) n_copy4++;
      end
    end
  end

  // ------------------------------------------------------------ stimulus
  int burst_left = 0;

  function automatic int gauss12();
    return $urandom_range(0, 20) + $urandom_range(0, 20) + $urandom_range(0, 20) + $urandom_range(0, 20) - 40;
  endfunction

  task automatic feed(int nwords, bit gaps, int long_burst_at);
    for (int w = 0; w < nwords; w++) begin
      if (gaps && $urandom_range(0, 9) == 0) begin
        in_valid <= 0; n_gap++; @(posedge clk);
      end
      if (w == long_burst_at) burst_left = 700;
      else if (burst_left == 0 && $urandom_range(0, 999) < 4) burst_left = $urandom_range(3, 30);
      for (int i = 0; i < NIN; i++)
        for (int l = 0; l < LANES; l++) begin
          int v;
          v = gauss12();
          // The burst hits both antennas (inputs 0 and 1).
          if (burst_left > 0 && i < 2) v = (($urandom_range(0, 1) != 0) ? 1 : -1) * $urandom_range(90, 127);
          in_data[i][l] <= SAMPLE_W'(v);
        end
      if (burst_left > 0) burst_left--;
      in_valid <= 1;
      @(posedge clk);
    end
    in_valid <= 0;
  endtask

  function automatic chan_cfg_t mkcfg(int src, est_mode_e mode, bit en, repl_mode_e r, int n);
    chan_cfg_t c;
    c.src_sel = 2'(src); c.enable = en; c.est_mode = mode; c.nmult = NMULT_W'(n);
    c.repl = r; c.kconst = '0;
    return c;
  endfunction

  initial begin
    for (int p = 0; p < NPATH; p++) refm[p] = new(LANES, WIN_MAD, WIN_MOM, MOM_K);
    cfg[0] = mkcfg(0, EST_MAD, 1, REPL_CONST, 48);
    cfg[1] = mkcfg(0, EST_MAD, 0, REPL_CONST, 48);
    cfg[2] = mkcfg(1, EST_MAD, 1, REPL_CONST, 48);
    cfg[3] = mkcfg(1, EST_MAD, 0, REPL_CONST, 48);
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    wait (&in_ready);
    @(posedge clk);
    // Phase 1: continuous input, two antennas, filtered and unfiltered.
    rate_phase = 1;
    feed(WIN_MAD / LANES * 6, 0, -1);
    rate_phase = 0;
    // Phase 2: 1:4 copy, changed in the middle of a window.
    feed(WIN_MAD / LANES / 2, 1, -1);
    cfg[0] = mkcfg(0, EST_MAD, 0, REPL_CONST, 48);
    cfg[1] = mkcfg(0, EST_MAD, 1, REPL_CONST, 48);
    cfg[2] = mkcfg(0, EST_MAD, 1, REPL_THRESH, 48);
    cfg[3] = mkcfg(0, EST_MAD, 1, REPL_NOISE, 48);
    feed(WIN_MAD / LANES * 6, 1, -1);
    // Phase 3: path 1 to MoM; the input pauses across the switch.
    repeat (3) @(posedge clk);
    cfg[1] = mkcfg(0, EST_MOM, 1, REPL_CONST, 48);
    refm[1].restart(1);
    repeat (3) @(posedge clk);
    wait (&in_ready);
    @(posedge clk);
    feed(WIN_MOM / LANES * 9, 1, WIN_MOM / LANES * 7 + 50);
    feed(WIN_MOM / LANES * 4, 1, -1);

    checks += 10;
    if (n_blank == 0)   begin failures++; $display("no blanking"); end
    if (n_clip == 0)    begin failures++; $display("no clipping"); end
    if (n_noise == 0)   begin failures++; $display("no noise replacement"); end
    if (n_bypass == 0)  begin failures++; $display("no unfiltered copy"); end
    if (n_copy4 == 0)   begin failures++; $display("no 1:4 copy"); end
    if (n_gap == 0)     begin failures++; $display("no input gap"); end
    if (n_restart != 1) begin failures++; $display("%0d restarts, expected 1", n_restart); end
    if (refm[1].n_mom_used == 0) begin failures++; $display("MoM never applied"); end
    if (n_cont == 0)    begin failures++; $display("rate never observed"); end
    if (n_bad_rate != 0) begin failures++; $display("%0d clocks without output in continuous phase", n_bad_rate); end
    $display("blank=%0d clip=%0d noise=%0d bypass_words=%0d copy4_words=%0d gaps=%0d restarts=%0d mom_windows=%0d rate_clocks=%0d",
             n_blank, n_clip, n_noise, n_bypass, n_copy4, n_gap, n_restart, refm[1].n_mom_used, n_cont);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
