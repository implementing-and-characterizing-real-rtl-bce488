// rfi_threshold: detection thresholds around the window median.
//
//   tau_u = M + n * (1.4826 * D)
//   tau_l = M - n * (1.4826 * D)
//
// M is the window median, D the robust dispersion (MAD, or the median of MADs)
// and n the threshold multiple. The 1.4826 factor turns a MAD into the
// standard deviation of a normal distribution. The equations follow the source
// design; the fixed-point formats are this design's: n is unsigned Q4.4,
// 1.4826 is the Q.12 constant 6073, and the offset is rounded to the nearest
// integer: off = (n * 6073 * D + 2**15) >> 16.
//
// Purely combinational; the caller registers the result once per window.
module rfi_threshold
  import rfi_pkg::*;
(
  input  logic signed [SAMPLE_W-1:0] med,
  input  logic        [SAMPLE_W-1:0] disp,     // D, non-negative
  input  logic        [NMULT_W-1:0]  nmult,    // n, Q4.4
  output logic signed [TAU_W-1:0]    tau_u,
  output logic signed [TAU_W-1:0]    tau_l,
  output logic        [TAU_W-2:0]    offset    // round(n * 1.4826 * D)
);
  localparam int unsigned FRAC  = NMULT_FRAC + MAD_SIGMA_FRAC;
  localparam int unsigned PW    = NMULT_W + 13 + SAMPLE_W;

  logic [PW-1:0] prod;
  logic [PW-1:0] rounded;

  always_comb begin
    prod    = PW'(nmult) * PW'(MAD_SIGMA_Q12) * PW'(disp);
    rounded = (prod + (PW'(1) << (FRAC - 1))) >> FRAC;
    offset  = rounded[TAU_W-2:0];
    tau_u   = TAU_W'(med) + $signed({1'b0, offset});
    tau_l   = TAU_W'(med) - $signed({1'b0, offset});
  end

endmodule
