// noise_gen: digital noise for replacing excised samples, LANES per clock.
//
// Each lane runs a 32-bit xorshift generator (x ^= x<<13; x ^= x>>17;
// x ^= x<<5) and adds its four bytes, read as signed numbers. The sum of four
// independent uniform variables is close to normal (Irwin-Hall), with zero
// mean and a standard deviation of about 147.8; the replacement logic scales
// it to the estimated sigma of the window. The lanes start from different
// seeds derived from SEED, so they are uncorrelated in practice.
//
// Timing: a new value per lane on every clock with ce=1; the output is the
// registered state, available from reset.
//
// The source design only names digital noise as one replacement option; the
// generator is this design's choice.
module noise_gen
  import rfi_pkg::*;
#(
  parameter int unsigned LANES = 4,
  parameter logic [31:0] SEED  = 32'h1234_5678
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 ce,
  output logic [LANES-1:0][NOISE_W-1:0]        noise   // signed per lane
);
  logic [LANES-1:0][31:0] state;

  function automatic logic [31:0] xorshift32(input logic [31:0] x);
    logic [31:0] y;
    y = x ^ (x << 13);
    y = y ^ (y >> 17);
    y = y ^ (y << 5);
    return y;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < LANES; l++)
        // Odd multiplier keeps seeds distinct; OR 1 keeps them non-zero.
        state[l] <= (SEED ^ (32'(l) * 32'h9E37_79B9)) | 32'd1;
    end else if (ce) begin
      for (int l = 0; l < LANES; l++)
        state[l] <= xorshift32(state[l]);
    end
  end

  always_comb begin
    for (int l = 0; l < LANES; l++)
      noise[l] = NOISE_W'($signed(state[l][7:0]))  + NOISE_W'($signed(state[l][15:8]))
               + NOISE_W'($signed(state[l][23:16])) + NOISE_W'($signed(state[l][31:24]));
  end

endmodule
