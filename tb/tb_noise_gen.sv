// tb_noise_gen: self-checking test of the digital noise generator.
//
// Checks that the first output of every lane is the byte sum of its seed
// (seed formula of the generator), that the output holds while ce is low, and
// over 20000 values per lane that the mean is near 0, the standard deviation
// near 256/sqrt(12)*2 = 147.8, the values within +/-512 and the lanes
// uncorrelated.
module tb_noise_gen;
  import rfi_pkg::*;
  localparam int LANES = 3;
  localparam logic [31:0] SEED = 32'hCAFE_F00D;

  logic clk = 0, rst_n = 0, ce = 0;
  logic [LANES-1:0][NOISE_W-1:0] noise;
  int checks = 0, failures = 0;

  noise_gen #(.LANES(LANES), .SEED(SEED)) dut (.*);

  always #5 clk = ~clk;

  function automatic int bytesum(logic [31:0] s);
    return int'($signed(s[7:0])) + int'($signed(s[15:8])) + int'($signed(s[23:16])) + int'($signed(s[31:24]));
  endfunction

  real sum[LANES], sum2[LANES], xcorr;
  int  n;
  int  nout = 0;   // values outside +/-512

  initial begin
    logic [LANES-1:0][NOISE_W-1:0] held;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    #1;
    for (int l = 0; l < LANES; l++) begin
      logic [31:0] s;
      s = (SEED ^ (32'(l) * 32'h9E37_79B9)) | 32'd1;
      checks++;
      if (int'($signed(noise[l])) != bytesum(s)) begin
        failures++; $display("lane %0d first value %0d expected %0d", l, $signed(noise[l]), bytesum(s));
      end
    end
    held = noise;
    repeat (5) @(posedge clk);
    #1;
    checks++;
    if (noise !== held) begin failures++; $display("noise changed without ce"); end
    n = 20000;
    xcorr = 0;
    for (int l = 0; l < LANES; l++) begin sum[l] = 0; sum2[l] = 0; end
    ce <= 1;
    for (int i = 0; i < n; i++) begin
      @(posedge clk);
      #1;
      for (int l = 0; l < LANES; l++) begin
        int v;
        v = int'($signed(noise[l]));
        sum[l] += v; sum2[l] += real'(v) * v;
        if (v > 512 || v < -512) nout++;
      end
      xcorr += real'($signed(noise[0])) * real'($signed(noise[1]));
    end
    for (int l = 0; l < LANES; l++) begin
      real mean, sd;
      mean = sum[l] / n;
      sd   = $sqrt(sum2[l] / n - mean * mean);
      checks += 2;
      if (mean > 4.0 || mean < -4.0) begin failures++; $display("lane %0d mean %f", l, mean); end
      if (sd < 140.0 || sd > 155.0) begin failures++; $display("lane %0d sd %f", l, sd); end
    end
    checks++;
    if (nout != 0) begin failures++; $display("%0d values out of range", nout); end
    checks++;
    if (xcorr / n / (147.8 * 147.8) > 0.05 || xcorr / n / (147.8 * 147.8) < -0.05) begin
      failures++; $display("lanes correlated: %f", xcorr / n / (147.8 * 147.8));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
