// gwb_rfi_top: four-input broadband RFI excision stage of a wideband backend.
//
// The board receives the digitised baseband streams of NIN inputs (antenna
// polarisations), LANES samples per clock each, and passes cleaned streams on
// to the correlator and beamformer. input_copy_select first decides which
// input each of the NPATH filter paths sees; each path is an rfi_channel
// running either the MAD or the MoM estimator, with its own threshold
// multiple n and replacement option, or disabled to give an unfiltered copy
// with identical latency.
//
// Interface: in_valid qualifies one word on all inputs at once (the inputs
// share the sampling clock) and pauses every path when low. in_ready[p] is
// low for 2**SAMPLE_W clocks after reset and after a restart of path p, while
// its histograms are cleared; words arriving then are not filtered by it. cfg[p] configures
// path p (see rfi_pkg::chan_cfg_t). out_valid[p], out_data[p] and out_flag[p]
// carry the path's output; the st_* outputs show the median, the MAD and the
// dispersion in use for the window being output.
//
// Timing: the output of a path lags its input by one register stage plus the
// path's LATENCY (2*L + 2*2**SAMPLE_W + 4 valid words, L = window words).
//
// From the source design: four inputs per board, filtering at the full sample
// rate, the MAD and MoM variants and the copy arrangements. The number of
// samples per clock and the configuration format are this design's choice.
module gwb_rfi_top
  import rfi_pkg::*;
#(
  parameter int unsigned NIN     = 4,
  parameter int unsigned NPATH   = 4,
  parameter int unsigned LANES   = 4,
  parameter int unsigned WIN_MAD = 16384,
  parameter int unsigned WIN_MOM = 4096,
  parameter int unsigned MOM_K   = 4096
) (
  input  logic                                      clk,
  input  logic                                      rst_n,
  input  chan_cfg_t [NPATH-1:0]                     cfg,
  input  logic                                      in_valid,
  input  logic [NIN-1:0][LANES-1:0][SAMPLE_W-1:0]   in_data,
  output logic [NPATH-1:0]                          in_ready,
  output logic [NPATH-1:0]                          out_valid,
  output logic [NPATH-1:0][LANES-1:0][SAMPLE_W-1:0] out_data,
  output logic [NPATH-1:0][LANES-1:0]               out_flag,
  output logic [NPATH-1:0]                          st_primed,
  output logic [NPATH-1:0][SAMPLE_W-1:0]            st_med,
  output logic [NPATH-1:0][SAMPLE_W-1:0]            st_mad,
  output logic [NPATH-1:0][SAMPLE_W-1:0]            st_disp,
  output logic [NPATH-1:0]                          st_mom_valid,
  output logic [NPATH-1:0]                          st_restart
);
  localparam int unsigned SW = (NIN > 1) ? $clog2(NIN) : 1;

  logic [NPATH-1:0][SW-1:0]                  sel;
  logic                                      sel_valid;
  logic [NPATH-1:0][LANES-1:0][SAMPLE_W-1:0] path_data;

  always_comb
    for (int p = 0; p < NPATH; p++)
      sel[p] = SW'(cfg[p].src_sel);

  input_copy_select #(
    .NIN (NIN), .NPATH (NPATH), .LANES (LANES)
  ) u_copy (
    .clk (clk), .rst_n (rst_n), .in_valid (in_valid), .in_data (in_data),
    .sel (sel), .out_valid (sel_valid), .out_data (path_data)
  );

  for (genvar p = 0; p < NPATH; p++) begin : g_path
    rfi_channel #(
      .LANES   (LANES),
      .WIN_MAD (WIN_MAD),
      .WIN_MOM (WIN_MOM),
      .MOM_K   (MOM_K),
      .SEED    (32'h1234_5678 + 32'(p) * 32'h0101_0101)
    ) u_chan (
      .clk          (clk),
      .rst_n        (rst_n),
      .cfg          (cfg[p]),
      .in_valid     (sel_valid),
      .in_data      (path_data[p]),
      .in_ready     (in_ready[p]),
      .out_valid    (out_valid[p]),
      .out_data     (out_data[p]),
      .out_flag     (out_flag[p]),
      .st_primed    (st_primed[p]),
      .st_med       (st_med[p]),
      .st_mad       (st_mad[p]),
      .st_disp      (st_disp[p]),
      .st_mom_valid (st_mom_valid[p]),
      .st_restart   (st_restart[p])
    );
  end

endmodule
