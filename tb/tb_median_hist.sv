// tb_median_hist: self-checking test of the counting-sort median.
//
// Feeds windows of random values (uniform, narrow clusters, skewed, constant)
// on three lanes with random gaps in ce, and compares every median with one
// taken by sorting the window in the testbench (lower median for even
// counts). Also checks that med_valid comes exactly 2**VAL_W ce clocks after
// the last word, that back-to-back windows of exactly 2**VAL_W words work,
// and that ready is low during the clearing sweep after reset.
module tb_median_hist;
  localparam int LANES = 3;
  localparam int VAL_W = 8;
  localparam int BINS  = 1 << VAL_W;
  localparam int MAXW  = 400;

  logic clk = 0, rst_n = 0, clr = 0, ce = 0, in_valid = 0, in_last = 0;
  logic [LANES-1:0][VAL_W-1:0] in_val;
  logic med_valid, ready;
  logic [VAL_W-1:0] med;
  int checks = 0, failures = 0;

  median_hist #(.LANES(LANES), .VAL_W(VAL_W), .MAX_PER_LANE(MAXW)) dut (.*);

  always #5 clk = ~clk;

  int exp_q[$];          // expected medians in order
  int ce_cnt = 0;        // ce clocks seen
  int due_q[$];          // ce count at which each result is due

  // Result checker: a result is taken when med_valid is seen on a ce clock.
  int vals[$];           // values of the window being received

  always @(posedge clk) begin
    if (ce) ce_cnt++;
    // Reference: collect the window as the DUT samples it, sort it.
    if (rst_n && clr) vals.delete();
    else if (rst_n && ce && in_valid) begin
      for (int l = 0; l < LANES; l++) vals.push_back(int'(in_val[l]));
      if (in_last) begin
        vals.sort();
        exp_q.push_back(vals[(vals.size() + 1) / 2 - 1]);
        due_q.push_back(ce_cnt + BINS + 1);
        vals.delete();
      end
    end
    if (rst_n && ce && med_valid) begin
      int e, d;
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("unexpected result %0d", med);
      end else begin
        e = exp_q.pop_front(); d = due_q.pop_front();
        if (med !== VAL_W'(e)) begin
          failures++; $display("median %0d expected %0d", med, e);
        end
        checks++;
        if (ce_cnt != d) begin
          failures++; $display("result at ce %0d expected %0d", ce_cnt, d);
        end
      end
    end
  end

  task automatic gap();
    if ($urandom_range(0, 1) == 1) begin
      ce <= 0; in_valid <= 0;
      @(posedge clk);
    end
  endtask

  // One window of nwords words; kind picks the distribution.
  task automatic window(int nwords, int kind, bit gaps);
    int base = $urandom_range(0, BINS - 1);
    for (int w = 0; w < nwords; w++) begin
      for (int l = 0; l < LANES; l++) begin
        int v;
        case (kind)
          0: v = $urandom_range(0, BINS - 1);
          1: v = (base + $urandom_range(0, 6)) % BINS;
          2: v = ($urandom_range(0, 9) < 8) ? $urandom_range(0, 20) : $urandom_range(200, 255);
          default: v = base;
        endcase
        in_val[l] <= VAL_W'(v);
      end
      ce <= 1; in_valid <= 1; in_last <= (w == nwords - 1);
      @(posedge clk);
      if (gaps) gap();
    end
    ce <= 1; in_valid <= 0; in_last <= 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // The histograms are cleared first.
    checks++;
    if (ready) begin failures++; $display("ready during the clearing sweep"); end
    repeat (BINS + 1) @(posedge clk);
    checks++;
    if (!ready) begin failures++; $display("not ready after the clearing sweep"); end
    for (int i = 0; i < 12; i++) window(BINS + $urandom_range(0, 100), i % 4, 1);
    // Back-to-back windows of the minimum length.
    for (int i = 0; i < 6; i++) window(BINS, i % 4, 0);
    for (int i = 0; i < 3; i++) window(BINS + 1, 0, 0);
    ce <= 1; in_valid <= 0;
    repeat (BINS + 5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d results missing", exp_q.size()); end
    // clr discards a partly filled window.
    for (int w = 0; w < 50; w++) begin
      in_val <= '1; in_valid <= 1; in_last <= 0; @(posedge clk);
    end
    in_valid <= 0; clr <= 1; @(posedge clk); clr <= 0;
    repeat (BINS + 1) @(posedge clk);
    window(BINS, 0, 0);
    repeat (BINS + 5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("result after clr missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
