// rfi_pkg: types and constants shared by the broadband RFI excision blocks.
//
// The excision removes impulsive (broadband) interference from the sampled
// time series of each antenna input. A robust dispersion estimate, the Median
// Absolute Deviation (MAD) of a window of samples, sets two thresholds around
// the window median; samples outside them are replaced. Two estimator variants
// exist: plain MAD over a long window, and Median-of-MAD (MoM), the median of
// k successive MAD values of shorter windows.
//
// From the source design: the variants, the 1.4826 MAD-to-sigma factor, the
// three replacement options (constant, threshold, digital noise), the four
// inputs per board and the window sizes. Chosen here: 8-bit two's-complement
// samples, four samples per clock, the Q4.4 format of the threshold multiple n
// and the Q.12 format of the 1.4826 factor.
package rfi_pkg;

  // Sample width. Not given by the source; 8 bits matches a typical radio
  // astronomy ADC.
  localparam int unsigned SAMPLE_W = 8;

  // 1.4826 (MAD -> robust standard deviation for a normal distribution) in
  // unsigned Q.12: round(1.4826 * 4096) = 6073.
  localparam int unsigned MAD_SIGMA_FRAC = 12;
  localparam int unsigned MAD_SIGMA_Q12  = 6073;

  // Threshold multiple n, unsigned Q4.4 (0 .. 15.9375).
  localparam int unsigned NMULT_W    = 8;
  localparam int unsigned NMULT_FRAC = 4;

  // Width of the signed thresholds: the offset n*1.4826*D is below
  // 2**(NMULT_W-NMULT_FRAC) * 1.5 * 2**SAMPLE_W, plus the median and a sign.
  localparam int unsigned TAU_W = SAMPLE_W + NMULT_W - NMULT_FRAC + 2;

  // Digital noise: sum of four uniform signed bytes (Irwin-Hall), sigma about
  // 147.8. Scaling by D*NOISE_SCALE/2**16 gives sigma 1.4826*D:
  // 1.4826/147.8*65536 = 657.
  localparam int unsigned NOISE_W     = SAMPLE_W + 2;
  localparam int unsigned NOISE_SCALE = 657;

  // Robust estimator variant of a channel.
  typedef enum logic {
    EST_MAD = 1'b0,   // MAD over one window (16384 samples by default)
    EST_MOM = 1'b1    // median of k MADs, each over a shorter window
  } est_mode_e;

  // Replacement value K for samples outside the thresholds.
  typedef enum logic [1:0] {
    REPL_CONST  = 2'd0,  // programmable constant (zero for blanking)
    REPL_THRESH = 2'd1,  // clip to the threshold that was crossed
    REPL_NOISE  = 2'd2   // digital noise with the estimated sigma
  } repl_mode_e;

  // Run-time configuration of one filter path.
  typedef struct packed {
    logic [1:0]              src_sel;  // board input feeding this path
    logic                    enable;   // 0: unfiltered copy (same latency)
    est_mode_e               est_mode; // MAD or MoM
    logic [NMULT_W-1:0]      nmult;    // threshold multiple n, Q4.4
    repl_mode_e              repl;     // replacement option
    logic signed [SAMPLE_W-1:0] kconst; // constant for REPL_CONST
  } chan_cfg_t;

endpackage
