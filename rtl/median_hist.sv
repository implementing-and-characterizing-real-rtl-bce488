// median_hist: median of a window of small unsigned values by counting sort.
//
// Each value of a window is counted into a histogram with one bin per possible
// value (2**VAL_W bins). When the last word of the window has been counted,
// the histogram is frozen and scanned from bin 0 upwards, one bin per enabled
// clock, accumulating counts; the first bin at which the running count
// reaches ceil(C/2), C being the number of values in the window, is the
// median (the lower median when C is even). The scan clears each bin it
// reads. Two histogram banks alternate, so the next window is counted while
// the previous one is scanned: a window must therefore last at least 2**VAL_W
// enabled clocks.
//
// LANES values arrive per word; each lane owns its own histogram memory per
// bank, so several values are counted per clock without write conflicts, and
// the scan adds the lanes' counts of a bin. Each memory has one write port and
// one asynchronous read port (a read-modify-write counter while it is being
// filled, a read-and-clear port while it is scanned), which maps onto
// distributed RAM in an FPGA.
//
// After reset or clr the memories are swept to zero, one bin per clock on
// every clock (ce is ignored), for 2**VAL_W clocks; ready is low meanwhile and
// no value may be presented.
//
// Timing: apart from the sweep, everything advances only on clocks with ce=1.
// med_valid rises on the ce clock that ends the scan, 2**VAL_W ce clocks after
// the word with in_last, and stays high until the next ce clock; med holds its
// value until the next result.
//
// The source design gives the function (median of a window, used for the
// median, the MAD and the median of MADs); the counting-sort structure is this
// design's choice.
module median_hist #(
  parameter int unsigned LANES        = 4,
  parameter int unsigned VAL_W        = 8,
  parameter int unsigned MAX_PER_LANE = 4096   // most values per lane per window
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        clr,
  input  logic                        ce,
  input  logic                        in_valid,
  input  logic                        in_last,
  input  logic [LANES-1:0][VAL_W-1:0] in_val,
  output logic                        ready,
  output logic                        med_valid,
  output logic [VAL_W-1:0]            med
);
  localparam int unsigned BINS  = 1 << VAL_W;
  localparam int unsigned CW    = $clog2(MAX_PER_LANE + 1);
  localparam int unsigned TW    = $clog2(LANES * MAX_PER_LANE + 1);

  logic             wsel;          // bank being filled
  logic [TW-1:0]    n_acc;         // values counted in the current window
  logic [TW-1:0]    target;        // ceil(C/2) of the window being scanned
  logic [TW-1:0]    cum;
  logic             scan_active;
  logic [VAL_W-1:0] scan_idx;      // bin under scan, or under the clear sweep
  logic             found;
  logic [VAL_W-1:0] med_acc;       // median found so far in the scan
  logic             sweep;         // clearing after reset or clr
  logic [TW-1:0]    bin_sum;
  logic             fill;          // a word is counted on this clock
  logic             scan_step;     // a bin is scanned on this clock

  assign ready     = !sweep;
  assign fill      = ce && in_valid && !sweep;
  assign scan_step = ce && scan_active && !sweep;

  // ---------------------------------------------------------- memories
  logic [1:0][LANES-1:0][CW-1:0] rd;   // read data of each bank and lane

  for (genvar b = 0; b < 2; b++) begin : g_bank
    for (genvar l = 0; l < LANES; l++) begin : g_lane
      logic [CW-1:0]    mem [BINS];
      logic             filling;
      logic [VAL_W-1:0] addr;
      logic             we;
      logic [CW-1:0]    wdata;

      assign filling = (wsel == 1'(b));
      assign addr    = (filling && !sweep) ? in_val[l] : scan_idx;
      assign rd[b][l] = mem[addr];
      assign we      = sweep || (filling ? fill : scan_step);
      assign wdata   = (filling && !sweep) ? rd[b][l] + 1'b1 : '0;

      always_ff @(posedge clk)
        if (we) mem[addr] <= wdata;
    end
  end

  // Sum of the lanes' counts of the bin under scan.
  always_comb begin
    bin_sum = '0;
    for (int l = 0; l < LANES; l++)
      bin_sum += TW'(rd[~wsel][l]);
  end

  // ---------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sweep       <= 1'b1;
      wsel        <= 1'b0;
      n_acc       <= '0;
      target      <= '0;
      cum         <= '0;
      scan_active <= 1'b0;
      scan_idx    <= '0;
      found       <= 1'b0;
      med_acc     <= '0;
      med         <= '0;
      med_valid   <= 1'b0;
    end else if (clr) begin
      sweep       <= 1'b1;
      wsel        <= 1'b0;
      n_acc       <= '0;
      scan_active <= 1'b0;
      scan_idx    <= '0;
      found       <= 1'b0;
      med_valid   <= 1'b0;
    end else if (sweep) begin
      scan_idx <= scan_idx + 1'b1;
      if (scan_idx == VAL_W'(BINS - 1))
        sweep <= 1'b0;
    end else if (ce) begin
      med_valid <= 1'b0;

      // Scan the frozen bank (the memories clear each bin as it is read).
      if (scan_active) begin
        cum <= cum + bin_sum;
        if (!found && (cum + bin_sum >= target)) begin
          found   <= 1'b1;
          med_acc <= scan_idx;
        end
        scan_idx <= scan_idx + 1'b1;
        if (scan_idx == VAL_W'(BINS - 1)) begin
          scan_active <= 1'b0;
          med_valid   <= 1'b1;
          // The median found earlier, or this last bin.
          med         <= found ? med_acc : scan_idx;
        end
      end

      // Count the incoming word (the memories increment). Placed after the
      // scan so that a window ending on the scan's last clock restarts it.
      if (in_valid) begin
        if (in_last) begin
          wsel        <= ~wsel;
          n_acc       <= '0;
          target      <= TW'((32'(n_acc) + LANES + 1) / 2);
          cum         <= '0;
          scan_active <= 1'b1;
          scan_idx    <= '0;
          found       <= 1'b0;
        end else begin
          n_acc <= n_acc + TW'(LANES);
        end
      end
    end
  end

  // Assertions are enabled one clock after reset is released.
  logic chk_on;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) chk_on <= 1'b0;
    else        chk_on <= 1'b1;

  // A new window must not end while the previous one is still being scanned,
  // and no value may arrive during the clearing sweep.
  a_scan_done: assert property (@(posedge clk) disable iff (!chk_on || clr)
    (ce && in_valid && in_last && !sweep) |-> (!scan_active || scan_idx == VAL_W'(BINS - 1)));
  a_no_input_in_sweep: assert property (@(posedge clk) disable iff (!chk_on || clr)
    sweep |-> !(ce && in_valid));

endmodule
