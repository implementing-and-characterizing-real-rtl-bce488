// rfi_replace: threshold detection and replacement of LANES samples.
//
//   z = K   if x >= tau_u or x <= tau_l
//   z = x   if tau_l < x < tau_u
//
// Three choices of K, as in the source design: a constant (zero blanks the
// sample), the threshold that was crossed (clipping), or digital noise. Noise
// replacement is M + g * 1.4826 * D / 147.8, g being the Irwin-Hall sum from
// noise_gen, computed as M + (g * D * 657) >>> 16 and saturated to the sample
// range; centring the noise on the median with the window's robust sigma is
// this design's choice. With enable low the samples pass unchanged and no
// flag is raised, giving the unfiltered copy. flag marks replaced samples.
// The encoding 2'd3 of repl acts as REPL_CONST.
//
// Purely combinational.
module rfi_replace
  import rfi_pkg::*;
#(
  parameter int unsigned LANES = 4
) (
  input  logic [LANES-1:0][SAMPLE_W-1:0] x,       // signed samples
  input  logic [LANES-1:0][NOISE_W-1:0]  noise,   // signed noise
  input  logic signed [SAMPLE_W-1:0]     med,
  input  logic        [SAMPLE_W-1:0]     disp,
  input  logic signed [TAU_W-1:0]        tau_u,
  input  logic signed [TAU_W-1:0]        tau_l,
  input  logic                           enable,
  input  repl_mode_e                     repl,
  input  logic signed [SAMPLE_W-1:0]     kconst,
  output logic [LANES-1:0][SAMPLE_W-1:0] z,
  output logic [LANES-1:0]               flag
);
  localparam int unsigned NPW  = NOISE_W + SAMPLE_W + 11;   // noise*D*657
  localparam int signed   SMAX = (1 <<< (SAMPLE_W - 1)) - 1;
  localparam int signed   SMIN = -(1 <<< (SAMPLE_W - 1));

  logic signed [TAU_W-1:0] xs;
  logic                    above, below;
  logic signed [NPW-1:0]   nprod;
  logic signed [NPW-1:0]   nval;

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      xs    = TAU_W'($signed(x[l]));
      above = (xs >= tau_u);
      below = (xs <= tau_l);
      nprod = NPW'($signed(noise[l])) * $signed(NPW'(disp)) * $signed(NPW'(NOISE_SCALE));
      nval  = (nprod >>> 16) + NPW'(med);
      flag[l] = enable && (above || below);
      if (!flag[l])
        z[l] = x[l];
      else begin
        unique case (repl)
          REPL_THRESH: z[l] = above ? tau_u[SAMPLE_W-1:0] : tau_l[SAMPLE_W-1:0];
          REPL_NOISE:
            if (nval > NPW'(SMAX))      z[l] = SAMPLE_W'(SMAX);
            else if (nval < NPW'(SMIN)) z[l] = SAMPLE_W'(SMIN);
            else                        z[l] = nval[SAMPLE_W-1:0];
          default:     z[l] = kconst;
        endcase
      end
    end
  end

endmodule
