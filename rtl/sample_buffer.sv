// sample_buffer: window store of one filter path, one write and two read ports.
//
// The excision compares every sample of a window with thresholds derived from
// that same window, so the window must be held while its median and then its
// MAD are computed. The store has NBANKS banks of DEPTH words; a word holds
// the LANES samples that arrive together. The writer fills one bank per
// window; the deviation pass (port A) and the filtering pass (port B) read
// older banks.
//
// Timing: all ports act only on clocks with ce=1. A read returns its word on
// the ce clock after the one that presents the address (registered read).
// Reading a location written on the same ce clock returns the old word.
//
// That the windows are buffered follows from the source design (samples of a
// window are compared with that window's thresholds); the bank count and port
// structure are this design's choice.
module sample_buffer #(
  parameter int unsigned WORD_W = 32,
  parameter int unsigned DEPTH  = 4096,
  parameter int unsigned NBANKS = 4,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned BW    = $clog2(NBANKS)
) (
  input  logic              clk,
  input  logic              ce,
  input  logic              we,
  input  logic [BW-1:0]     wbank,
  input  logic [AW-1:0]     waddr,
  input  logic [WORD_W-1:0] wdata,
  input  logic [BW-1:0]     ra_bank,
  input  logic [AW-1:0]     ra_addr,
  output logic [WORD_W-1:0] ra_data,
  input  logic [BW-1:0]     rb_bank,
  input  logic [AW-1:0]     rb_addr,
  output logic [WORD_W-1:0] rb_data
);
  logic [WORD_W-1:0] mem [NBANKS * DEPTH];

  always_ff @(posedge clk) begin
    if (ce) begin
      if (we)
        mem[{wbank, waddr}] <= wdata;
      ra_data <= mem[{ra_bank, ra_addr}];
      rb_data <= mem[{rb_bank, rb_addr}];
    end
  end

endmodule
