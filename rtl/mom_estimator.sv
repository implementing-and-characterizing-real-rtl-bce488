// mom_estimator: Median of MAD (MoM), the median of K successive MAD values.
//
// A MAD over a short window breaks down when interference fills more than
// half of it. Taking the median of the MADs of K successive windows extends
// the tolerated burst length to about half of K windows. This block collects
// the MAD of each window as it is produced; after every K values it computes
// their median with a single-lane median_hist and holds it as the current
// MoM, which applies until the next group of K has been reduced. The groups
// are consecutive and do not overlap (a block median, not a sliding one),
// which is this design's choice.
//
// Interface: mad_valid (high until the next ce clock, as median_hist
// produces it) presents one MAD. mom_valid stays low until the first MoM is
// known; ready is low while the histogram is cleared after reset or clr
// (2**VAL_W clocks), when no MAD may be presented; mom_update is high from the ce clock that loads a new MoM until the
// next ce clock. Timing: the MoM of a group is loaded 2**VAL_W + 1 ce clocks
// after its last MAD.
// clr restarts the collection and forgets the current MoM.
module mom_estimator #(
  parameter int unsigned VAL_W = 8,
  parameter int unsigned K     = 4096
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clr,
  input  logic             ce,
  input  logic             mad_valid,
  input  logic [VAL_W-1:0] mad,
  output logic             ready,
  output logic             mom_valid,
  output logic             mom_update,
  output logic [VAL_W-1:0] mom
);
  localparam int unsigned KW = $clog2(K + 1);

  logic [KW-1:0]    nmad;        // MADs collected in the current group
  logic             grp_last;
  logic             med_valid;
  logic [VAL_W-1:0] med;

  assign grp_last = (nmad == KW'(K - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      nmad <= '0;
    else if (clr)
      nmad <= '0;
    else if (ce && mad_valid)
      nmad <= grp_last ? '0 : nmad + 1'b1;
  end

  median_hist #(
    .LANES        (1),
    .VAL_W        (VAL_W),
    .MAX_PER_LANE (K)
  ) u_med (
    .clk       (clk),
    .rst_n     (rst_n),
    .clr       (clr),
    .ce        (ce),
    .in_valid  (mad_valid),
    .in_last   (grp_last),
    .in_val    (mad),
    .ready     (ready),
    .med_valid (med_valid),
    .med       (med)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mom_valid  <= 1'b0;
      mom_update <= 1'b0;
      mom        <= '0;
    end else if (clr) begin
      mom_valid  <= 1'b0;
      mom_update <= 1'b0;
    end else if (ce) begin
      mom_update <= med_valid;
      if (med_valid) begin
        mom_valid <= 1'b1;
        mom       <= med;
      end
    end
  end

endmodule
