// rfi_channel: real-time broadband RFI excision of one input stream.
//
// Every window of samples is processed in three passes over a four-bank
// window store (sample_buffer):
//   A  as the window arrives it is written to the store and its values are
//      counted into a histogram; the scan of that histogram gives the median M;
//   B  the window is read back and |x - M| is counted into a second histogram,
//      whose median is the MAD, D;
//   C  the window is read a second time and every sample is compared with
//      tau = M +/- n*1.4826*D; samples outside are replaced (rfi_replace).
// In MoM mode the MAD of each window also feeds mom_estimator, and once a
// median of MADs exists it replaces D in the thresholds (M stays the window's
// own median). Before the first MoM of a run, the window's own MAD is used.
//
// The passes overlap: while window w is filtered, w+1 is in pass B and w+2,
// w+3 are being written, so the output is a continuous stream of the same
// rate as the input, delayed by LATENCY = 2*L + 2*2**SAMPLE_W + 4 words
// (L = window length in words) counted on clocks with in_valid=1. This
// requires L >= 2*2**SAMPLE_W + 3 (checked at elaboration).
//
// Interface: LANES samples per word; in_valid acts as a clock enable for the
// whole path, so gaps in the input simply pause it. After reset and after a
// restart the histograms are cleared for 2**SAMPLE_W clocks, during which
// in_ready is low and offered words are dropped; the first word accepted
// afterwards starts the first window. out_valid is high for one
// clock per output word; out_flag marks replaced samples. cfg.est_mode selects
// MAD (window WIN_MAD samples) or MoM (window WIN_MOM samples, K = MOM_K
// windows). A change of est_mode restarts the path: stored windows are
// dropped, the histograms are cleared, and output resumes LATENCY words
// after the first word accepted. n, the replacement option,
// the constant and enable are sampled once per window at the start of pass C.
// With enable low the path outputs the unfiltered samples with the same
// latency.
//
// From the source design: the MAD estimator, the thresholds, the replacement
// options, the MoM variant and the default window sizes (16384; 4096 x 4096).
// This design's choice: counting-sort medians, the three-pass schedule,
// block (non-sliding) MoM groups and the restart on a mode change.
module rfi_channel
  import rfi_pkg::*;
#(
  parameter int unsigned LANES   = 4,
  parameter int unsigned WIN_MAD = 16384,
  parameter int unsigned WIN_MOM = 4096,
  parameter int unsigned MOM_K   = 4096,
  parameter logic [31:0] SEED    = 32'h1234_5678
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  chan_cfg_t                      cfg,
  input  logic                           in_valid,
  input  logic [LANES-1:0][SAMPLE_W-1:0] in_data,
  output logic                           in_ready,
  output logic                           out_valid,
  output logic [LANES-1:0][SAMPLE_W-1:0] out_data,
  output logic [LANES-1:0]               out_flag,
  // Status of the window whose output is being produced.
  output logic                           st_primed,   // output has started
  output logic signed [SAMPLE_W-1:0]     st_med,
  output logic [SAMPLE_W-1:0]            st_mad,
  output logic [SAMPLE_W-1:0]            st_disp,     // D used (MAD or MoM)
  output logic                           st_mom_valid,
  output logic                           st_restart   // pulses on a mode change
);
  localparam int unsigned BINS    = 1 << SAMPLE_W;
  localparam int unsigned L_MAD   = WIN_MAD / LANES;
  localparam int unsigned L_MOM   = WIN_MOM / LANES;
  localparam int unsigned L_MAX   = (L_MAD > L_MOM) ? L_MAD : L_MOM;
  localparam int unsigned AW      = $clog2(L_MAX);
  localparam int unsigned WORD_W  = LANES * SAMPLE_W;
  localparam int unsigned L_MIN   = 2 * BINS + 3;

  if (L_MAD < L_MIN || L_MOM < L_MIN) begin : g_chk_len
    $error("rfi_channel: a window must hold at least %0d words", L_MIN);
  end
  if (WIN_MAD % LANES != 0 || WIN_MOM % LANES != 0) begin : g_chk_lanes
    $error("rfi_channel: window sizes must be multiples of LANES");
  end

  // The histograms are cleared after reset and after every restart; words
  // offered meanwhile (in_ready low) are dropped.
  logic ce;
  logic rdy_x, rdy_dev, rdy_mom;
  assign in_ready = rdy_x && rdy_dev && rdy_mom;
  assign ce       = in_valid && in_ready;

  // ---------------------------------------------------------------- mode
  est_mode_e     mode_q;
  logic          clr;
  logic [AW-1:0] win_last;      // L - 1 of the current mode

  assign clr      = (cfg.est_mode != mode_q);
  assign win_last = (mode_q == EST_MAD) ? AW'(L_MAD - 1) : AW'(L_MOM - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode_q     <= EST_MAD;
      st_restart <= 1'b0;
    end else begin
      mode_q     <= cfg.est_mode;
      st_restart <= clr;
    end
  end

  // --------------------------------------------------- pass A: write, median
  logic [AW-1:0]                  wc;
  logic [1:0]                     wbank;
  logic                           a_last;
  logic [LANES-1:0][SAMPLE_W-1:0] a_obin;     // offset-binary samples
  logic                           mx_valid;
  logic [SAMPLE_W-1:0]            mx_obin;

  assign a_last = (wc == win_last);

  always_comb
    for (int l = 0; l < LANES; l++)
      a_obin[l] = in_data[l] ^ SAMPLE_W'(BINS / 2);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wc    <= '0;
      wbank <= '0;
    end else if (clr) begin
      wc    <= '0;
      wbank <= '0;
    end else if (ce) begin
      wc <= a_last ? '0 : wc + 1'b1;
      if (a_last) wbank <= wbank + 1'b1;
    end
  end

  median_hist #(
    .LANES (LANES), .VAL_W (SAMPLE_W), .MAX_PER_LANE (L_MAX)
  ) u_hist_x (
    .clk (clk), .rst_n (rst_n), .clr (clr), .ce (ce),
    .in_valid (1'b1), .in_last (a_last), .in_val (a_obin),
    .ready (rdy_x), .med_valid (mx_valid), .med (mx_obin)
  );

  // ----------------------------------------------- pass B: deviations, MAD
  logic                           b_active;
  logic [AW-1:0]                  b_addr;
  logic [1:0]                     b_bank;
  logic signed [SAMPLE_W-1:0]     b_med;      // median of the window read
  logic                           b_v1, b_last1;
  logic signed [SAMPLE_W-1:0]     b_med1;     // b_med aligned with read data
  logic [WORD_W-1:0]              b_rdata;
  logic [LANES-1:0][SAMPLE_W-1:0] b_dev;
  logic signed [SAMPLE_W-1:0]     dev_med;    // median of the window in MAD
  logic                           mad_valid;
  logic [SAMPLE_W-1:0]            mad;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_active <= 1'b0;
      b_addr   <= '0;
      b_bank   <= '0;
      b_med    <= '0;
      b_v1     <= 1'b0;
      b_last1  <= 1'b0;
      b_med1   <= '0;
      dev_med  <= '0;
    end else if (clr) begin
      b_active <= 1'b0;
      b_addr   <= '0;
      b_bank   <= '0;
      b_v1     <= 1'b0;
      b_last1  <= 1'b0;
    end else if (ce) begin
      b_v1    <= b_active;
      b_last1 <= b_active && (b_addr == win_last);
      b_med1  <= b_med;
      if (b_active) begin
        b_addr <= b_addr + 1'b1;
        if (b_addr == win_last) begin
          b_active <= 1'b0;
          b_bank   <= b_bank + 1'b1;
        end
      end
      // A new median starts the pass over its window.
      if (mx_valid) begin
        b_active <= 1'b1;
        b_addr   <= '0;
        b_med    <= $signed(mx_obin ^ SAMPLE_W'(BINS / 2));
      end
      if (b_last1)
        dev_med <= b_med1;
    end
  end

  always_comb
    for (int l = 0; l < LANES; l++) begin
      logic signed [SAMPLE_W:0] d;
      d = $signed(b_rdata[l*SAMPLE_W +: SAMPLE_W]) - b_med1;
      b_dev[l] = d[SAMPLE_W] ? SAMPLE_W'(-d) : d[SAMPLE_W-1:0];
    end

  median_hist #(
    .LANES (LANES), .VAL_W (SAMPLE_W), .MAX_PER_LANE (L_MAX)
  ) u_hist_dev (
    .clk (clk), .rst_n (rst_n), .clr (clr), .ce (ce),
    .in_valid (b_v1), .in_last (b_last1), .in_val (b_dev),
    .ready (rdy_dev), .med_valid (mad_valid), .med (mad)
  );

  // ------------------------------------------------------------- MoM
  logic                mom_valid, mom_update;
  logic [SAMPLE_W-1:0] mom;

  mom_estimator #(
    .VAL_W (SAMPLE_W), .K (MOM_K)
  ) u_mom (
    .clk (clk), .rst_n (rst_n), .clr (clr), .ce (ce),
    .mad_valid (mad_valid && mode_q == EST_MOM), .mad (mad),
    .ready (rdy_mom), .mom_valid (mom_valid), .mom_update (mom_update), .mom (mom)
  );

  // ----------------------------------------------------- pass C: filtering
  logic                       c_active;
  logic [AW-1:0]              c_addr;
  logic [1:0]                 c_bank;
  logic [SAMPLE_W-1:0]        disp_sel;
  logic signed [TAU_W-1:0]    tau_u_n, tau_l_n;
  logic [TAU_W-2:0]           offset_n;

  // Window parameters, latched at the start of pass C ...
  logic signed [SAMPLE_W-1:0] c_med;
  logic [SAMPLE_W-1:0]        c_disp, c_mad;
  logic signed [TAU_W-1:0]    c_tau_u, c_tau_l;
  logic                       c_en;
  repl_mode_e                 c_repl;
  logic signed [SAMPLE_W-1:0] c_kconst;
  // ... and aligned with the read data.
  logic                       c_v1;
  logic signed [SAMPLE_W-1:0] c1_med;
  logic [SAMPLE_W-1:0]        c1_disp;
  logic signed [TAU_W-1:0]    c1_tau_u, c1_tau_l;
  logic                       c1_en;
  repl_mode_e                 c1_repl;
  logic signed [SAMPLE_W-1:0] c1_kconst;
  logic [WORD_W-1:0]          c_rdata;

  assign disp_sel = (mode_q == EST_MOM && mom_valid) ? mom : mad;

  rfi_threshold u_thr (
    .med (dev_med), .disp (disp_sel), .nmult (cfg.nmult),
    .tau_u (tau_u_n), .tau_l (tau_l_n), .offset (offset_n)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_active  <= 1'b0;
      c_addr    <= '0;
      c_bank    <= '0;
      c_med     <= '0;
      c_disp    <= '0;
      c_mad     <= '0;
      c_tau_u   <= '0;
      c_tau_l   <= '0;
      c_en      <= 1'b0;
      c_repl    <= REPL_CONST;
      c_kconst  <= '0;
      c_v1      <= 1'b0;
      c1_med    <= '0;
      c1_disp   <= '0;
      c1_tau_u  <= '0;
      c1_tau_l  <= '0;
      c1_en     <= 1'b0;
      c1_repl   <= REPL_CONST;
      c1_kconst <= '0;
      st_primed <= 1'b0;
    end else if (clr) begin
      c_active  <= 1'b0;
      c_addr    <= '0;
      c_bank    <= '0;
      c_v1      <= 1'b0;
      st_primed <= 1'b0;
    end else if (ce) begin
      c_v1      <= c_active;
      c1_med    <= c_med;
      c1_disp   <= c_disp;
      c1_tau_u  <= c_tau_u;
      c1_tau_l  <= c_tau_l;
      c1_en     <= c_en;
      c1_repl   <= c_repl;
      c1_kconst <= c_kconst;
      if (c_active) begin
        c_addr <= c_addr + 1'b1;
        if (c_addr == win_last) begin
          c_active <= 1'b0;
          c_bank   <= c_bank + 1'b1;
        end
      end
      // A new MAD starts the filtering of its window.
      if (mad_valid) begin
        c_active  <= 1'b1;
        c_addr    <= '0;
        c_med     <= dev_med;
        c_mad     <= mad;
        c_disp    <= disp_sel;
        c_tau_u   <= tau_u_n;
        c_tau_l   <= tau_l_n;
        c_en      <= cfg.enable;
        c_repl    <= cfg.repl;
        c_kconst  <= cfg.kconst;
        st_primed <= 1'b1;
      end
    end
  end

  // ------------------------------------------------------------ store
  sample_buffer #(
    .WORD_W (WORD_W), .DEPTH (1 << AW), .NBANKS (4)
  ) u_buf (
    .clk (clk), .ce (ce),
    .we (1'b1), .wbank (wbank), .waddr (wc), .wdata (in_data),
    .ra_bank (b_bank), .ra_addr (b_addr), .ra_data (b_rdata),
    .rb_bank (c_bank), .rb_addr (c_addr), .rb_data (c_rdata)
  );

  // --------------------------------------------------- replace and output
  logic [LANES-1:0][NOISE_W-1:0]  noise;
  logic [LANES-1:0][SAMPLE_W-1:0] z;
  logic [LANES-1:0]               flag;

  noise_gen #(.LANES (LANES), .SEED (SEED)) u_noise (
    .clk (clk), .rst_n (rst_n), .ce (ce), .noise (noise)
  );

  rfi_replace #(.LANES (LANES)) u_repl (
    .x (c_rdata), .noise (noise), .med (c1_med), .disp (c1_disp),
    .tau_u (c1_tau_u), .tau_l (c1_tau_l), .enable (c1_en),
    .repl (c1_repl), .kconst (c1_kconst), .z (z), .flag (flag)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      out_flag  <= '0;
    end else begin
      out_valid <= ce && c_v1 && !clr;
      if (ce && c_v1) begin
        out_data <= z;
        out_flag <= flag;
      end
    end
  end

  assign st_med       = c_med;
  assign st_mad       = c_mad;
  assign st_disp      = c_disp;
  assign st_mom_valid = mom_valid;

  // Assertions are enabled one clock after reset is released.
  logic chk_on;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) chk_on <= 1'b0;
    else        chk_on <= 1'b1;

  // The three passes must never touch the bank being written.
  a_bank_b: assert property (@(posedge clk) disable iff (!chk_on || clr)
    (ce && b_active) |-> (b_bank != wbank));
  a_bank_c: assert property (@(posedge clk) disable iff (!chk_on || clr)
    (ce && c_active) |-> (c_bank != wbank));

endmodule
