// input_copy_select: routes board inputs to the filter paths ("digital copy").
//
// Each of the NPATH filter paths takes its samples from any of the NIN board
// inputs, chosen by sel[p]. This gives the test arrangements of the source
// design: the unfiltered and filtered copies of two antennas (paths 0,1 from
// input 0 and paths 2,3 from input 1, one of each pair with filtering
// disabled), or one antenna copied to all four paths (1:4 copy) so that
// different thresholds and replacement options act on the same signal.
//
// Timing: one register stage; out_valid follows in_valid one clock later.
// The selection is sampled on every valid word, so it should change only
// while the paths are not relied upon.
module input_copy_select
  import rfi_pkg::*;
#(
  parameter int unsigned NIN   = 4,
  parameter int unsigned NPATH = 4,
  parameter int unsigned LANES = 4,
  localparam int unsigned SW   = (NIN > 1) ? $clog2(NIN) : 1
) (
  input  logic                                      clk,
  input  logic                                      rst_n,
  input  logic                                      in_valid,
  input  logic [NIN-1:0][LANES-1:0][SAMPLE_W-1:0]   in_data,
  input  logic [NPATH-1:0][SW-1:0]                  sel,
  output logic                                      out_valid,
  output logic [NPATH-1:0][LANES-1:0][SAMPLE_W-1:0] out_data
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int p = 0; p < NPATH; p++)
          out_data[p] <= in_data[sel[p]];
    end
  end

endmodule
