// tb_rfi_threshold: self-checking test of the detection thresholds.
//
// For random and corner values of the median M, the dispersion D and the
// multiple n (Q4.4), checks that tau_u - M = M - tau_l = offset, that offset
// equals the documented rounding (n*6073*D + 2**15) >> 16, and that it is
// within one unit of n * 1.4826 * D computed in real arithmetic.
module tb_rfi_threshold;
  import rfi_pkg::*;

  logic signed [SAMPLE_W-1:0] med;
  logic [SAMPLE_W-1:0] disp;
  logic [NMULT_W-1:0] nmult;
  logic signed [TAU_W-1:0] tau_u, tau_l;
  logic [TAU_W-2:0] offset;
  int checks = 0, failures = 0;

  rfi_threshold dut (.*);

  task automatic check(int m, int d, int n);
    longint exact;
    real    ideal;
    med = SAMPLE_W'(m); disp = SAMPLE_W'(d); nmult = NMULT_W'(n);
    #1;
    exact = (longint'(n) * 6073 * d + 32768) >>> 16;
    ideal = (real'(n) / 16.0) * 1.4826 * real'(d);
    checks += 4;
    if (longint'(offset) != exact) begin
      failures++; $display("M=%0d D=%0d n=%0d: offset %0d expected %0d", m, d, n, offset, exact);
    end
    if ((real'(offset) - ideal) > 1.0 || (ideal - real'(offset)) > 1.0) begin
      failures++; $display("offset %0d far from %f", offset, ideal);
    end
    if (int'(tau_u) != m + int'(exact)) begin failures++; $display("tau_u %0d", tau_u); end
    if (int'(tau_l) != m - int'(exact)) begin failures++; $display("tau_l %0d", tau_l); end
  endtask

  initial begin
    check(0, 0, 48);
    check(0, 10, 48);            // 3 sigma
    check(-5, 7, 32);            // 2 sigma
    check(127, 255, 255);        // largest offset
    check(-128, 255, 255);
    check(10, 1, 16);
    for (int i = 0; i < 2000; i++)
      check(int'($signed(8'($urandom))), $urandom_range(0, 255), $urandom_range(0, 255));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
