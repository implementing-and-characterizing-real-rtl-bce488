// tb_gwb_rfi_top_full: the excision board at its default sizes.
//
// Windows of 16384 samples for MAD and 4096 samples for MoM, with a MoM group
// of K = 4096 MADs, four samples per clock. The run is long enough for the
// first median of MADs to be formed (4096 windows of 4096 samples, about
// 16.8 million samples per input) and applied to several windows. Path 0
// filters input 0 with MAD (blanking at 3 sigma), path 1 filters the same
// input with MoM, path 2 clips input 1 at 2 sigma with MAD and path 3 carries
// input 1 unfiltered. Every output sample is compared with the reference
// model; a long burst late in the run tests MoM on a window whose own MAD
// breaks down.
module tb_gwb_rfi_top_full;
  import rfi_pkg::*;
  import rfi_ref_pkg::*;
  localparam int NIN = 4, NPATH = 4, LANES = 4;
  localparam int WIN_MAD = 16384, WIN_MOM = 4096, MOM_K = 4096;
  localparam int L_MOM = WIN_MOM / LANES;
  // Words to run: MoM formed after MOM_K windows, applied from the next one,
  // filtered two windows later; a few windows more.
  localparam int RUN_WORDS = (MOM_K + 6) * L_MOM;

  logic clk = 0, rst_n = 0;
  chan_cfg_t [NPATH-1:0] cfg;
  logic in_valid = 0;
  logic [NIN-1:0][LANES-1:0][SAMPLE_W-1:0] in_data;
  logic [NPATH-1:0] in_ready, out_valid, st_primed, st_mom_valid, st_restart;
  logic [NPATH-1:0][LANES-1:0][SAMPLE_W-1:0] out_data;
  logic [NPATH-1:0][LANES-1:0] out_flag;
  logic [NPATH-1:0][SAMPLE_W-1:0] st_med, st_mad, st_disp;
  int checks = 0, failures = 0;

  gwb_rfi_top dut (.*);

  always #5 clk = ~clk;

  rfi_ref refm[NPATH];
  longint n_out[NPATH];
  int n_blank = 0, n_clip = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      for (int p = 0; p < NPATH; p++)
        if (out_valid[p])
          for (int l = 0; l < LANES; l++) begin
            exp_t e;
            int z;
            z = int'($signed(out_data[p][l]));
            checks++;
            n_out[p]++;
            if (!refm[p].check(z, out_flag[p][l], e)) begin
              failures++;
              if (failures < 20) $display("path %0d: out %0d flag %0d expected %0d flag %0d", p, z, out_flag[p][l], e.z, e.f);
            end
            if (e.f && e.repl == REPL_THRESH) n_clip++;
            else if (e.f) n_blank++;
          end
      if (in_valid)
        for (int p = 0; p < NPATH; p++) begin
          int xs[];
          xs = new[LANES];
          for (int l = 0; l < LANES; l++) xs[l] = int'($signed(in_data[cfg[p].src_sel][l]));
          refm[p].word(xs, cfg[p]);
        end
    end
  end

  function automatic int gauss12();
    return $urandom_range(0, 20) + $urandom_range(0, 20) + $urandom_range(0, 20) + $urandom_range(0, 20) - 40;
  endfunction

  function automatic chan_cfg_t mkcfg(int src, est_mode_e mode, bit en, repl_mode_e r, int n);
    chan_cfg_t c;
    c.src_sel = 2'(src); c.enable = en; c.est_mode = mode; c.nmult = NMULT_W'(n);
    c.repl = r; c.kconst = '0;
    return c;
  endfunction

  initial begin
    int burst_left;
    burst_left = 0;
    for (int p = 0; p < NPATH; p++) begin
      refm[p] = new(LANES, WIN_MAD, WIN_MOM, MOM_K);
      n_out[p] = 0;
    end
    refm[1].restart(1);
    cfg[0] = mkcfg(0, EST_MAD, 1, REPL_CONST, 48);
    cfg[1] = mkcfg(0, EST_MOM, 1, REPL_CONST, 48);
    cfg[2] = mkcfg(1, EST_MAD, 1, REPL_THRESH, 32);
    cfg[3] = mkcfg(1, EST_MAD, 0, REPL_CONST, 48);
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    wait (&in_ready);
    @(posedge clk);
    for (int w = 0; w < RUN_WORDS; w++) begin
      // A burst covering most of the last-but-two MoM window.
      if (w == RUN_WORDS - 4 * L_MOM + 100) burst_left = 3 * L_MOM / 4;
      else if (burst_left == 0 && $urandom_range(0, 9999) < 8) burst_left = $urandom_range(3, 30);
      for (int i = 0; i < NIN; i++)
        for (int l = 0; l < LANES; l++) begin
          int v;
          v = gauss12();
          if (burst_left > 0 && i < 2) v = (($urandom_range(0, 1) != 0) ? 1 : -1) * $urandom_range(90, 127);
          in_data[i][l] <= SAMPLE_W'(v);
        end
      if (burst_left > 0) burst_left--;
      in_valid <= 1;
      @(posedge clk);
    end
    in_valid <= 0;
    repeat (4) @(posedge clk);
    checks += 4;
    if (refm[1].n_mom_used == 0) begin failures++; $display("MoM never applied"); end
    if (n_blank == 0) begin failures++; $display("no blanking"); end
    if (n_clip == 0)  begin failures++; $display("no clipping"); end
    if (n_out[3] < (longint'(RUN_WORDS) - longint'(3 * L_MOM * 4)) * LANES) begin
      failures++; $display("too few unfiltered outputs: %0d", n_out[3]);
    end
    $display("outputs per path: %0d %0d %0d %0d; blank=%0d clip=%0d mom_windows=%0d",
             n_out[0], n_out[1], n_out[2], n_out[3], n_blank, n_clip, refm[1].n_mom_used);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (RUN_WORDS + 100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
