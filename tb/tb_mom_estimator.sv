// tb_mom_estimator: self-checking test of the median-of-MAD estimator.
//
// Presents groups of K = 8 MAD values, one per "window", with random gaps in
// ce and random spacing, including groups where up to half the MADs are
// inflated by interference. Checks mom_valid stays low before the first group
// is reduced, each MoM equals the lower median of its group (sorted in the
// testbench), the update comes 2**VAL_W + 2 ce clocks after the group's last
// MAD, and clr forgets the MoM.
module tb_mom_estimator;
  localparam int VAL_W = 8, K = 8, BINS = 256;

  logic clk = 0, rst_n = 0, clr = 0, ce = 0, mad_valid = 0;
  logic [VAL_W-1:0] mad, mom;
  logic mom_valid, mom_update, ready;
  int checks = 0, failures = 0;

  mom_estimator #(.VAL_W(VAL_W), .K(K)) dut (.*);

  always #5 clk = ~clk;

  int grp[$], exp_q[$], due_q[$];
  int ce_cnt = 0;
  int nupd = 0;

  always @(posedge clk) begin
    if (ce) ce_cnt++;
    if (rst_n && ce && mad_valid && !clr) begin
      grp.push_back(int'(mad));
      if (grp.size() == K) begin
        grp.sort();
        exp_q.push_back(grp[K / 2 - 1]);
        due_q.push_back(ce_cnt + BINS + 2);
        grp.delete();
      end
    end
    if (rst_n && ce && mom_update) begin
      int e, d;
      nupd++;
      checks += 2;
      e = exp_q.pop_front(); d = due_q.pop_front();
      if (mom !== VAL_W'(e)) begin failures++; $display("MoM %0d expected %0d", mom, e); end
      if (ce_cnt != d) begin failures++; $display("update at %0d expected %0d", ce_cnt, d); end
    end
  end

  task automatic one_mad(int v);
    mad <= VAL_W'(v); mad_valid <= 1; ce <= 1;
    @(posedge clk);
    mad_valid <= 0;
    // Spacing of at least BINS/K ce clocks so a group spans a scan.
    repeat (BINS / K + $urandom_range(0, 20)) begin
      if ($urandom_range(0, 3) == 0) begin
        ce <= 0; @(posedge clk);
      end
      ce <= 1; @(posedge clk);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    wait (ready);
    @(posedge clk);
    for (int g = 0; g < 10; g++) begin
      automatic int base = $urandom_range(5, 30);
      for (int i = 0; i < K; i++) begin
        if (g == 0 && i == K - 1) begin
          checks++;
          if (mom_valid) begin failures++; $display("mom_valid before first group"); end
        end
        // Up to half of the MADs of a group inflated by interference.
        one_mad((i < g % (K / 2 + 1)) ? base + 100 + $urandom_range(0, 100) : base + $urandom_range(0, 4));
      end
    end
    ce <= 1;
    repeat (BINS + 10) @(posedge clk);
    checks += 2;
    if (nupd != 10) begin failures++; $display("%0d updates, expected 10", nupd); end
    if (!mom_valid) begin failures++; $display("mom_valid low"); end
    clr <= 1; @(posedge clk); clr <= 0; @(posedge clk);
    checks++;
    if (mom_valid) begin failures++; $display("mom_valid after clr"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
