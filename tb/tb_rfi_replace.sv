// tb_rfi_replace: self-checking test of detection and replacement.
//
// Random samples against random thresholds for each replacement option and
// for the disabled (unfiltered) case; the expected output and flag are worked
// out in the testbench from the rule z = K outside [tau_l, tau_u] (bounds
// included), z = x inside. For noise replacement the expected value is
// M + floor(g*D*657 / 2**16), saturated to 8 bits.
module tb_rfi_replace;
  import rfi_pkg::*;
  localparam int LANES = 4;

  logic [LANES-1:0][SAMPLE_W-1:0] x, z;
  logic [LANES-1:0][NOISE_W-1:0] noise;
  logic signed [SAMPLE_W-1:0] med, kconst;
  logic [SAMPLE_W-1:0] disp;
  logic signed [TAU_W-1:0] tau_u, tau_l;
  logic enable;
  repl_mode_e repl;
  logic [LANES-1:0] flag;
  int checks = 0, failures = 0;
  int nflag = 0;

  rfi_replace #(.LANES(LANES)) dut (.*);

  function automatic int floordiv(longint a, longint b);
    longint q;
    q = a / b;
    if ((a % b != 0) && ((a < 0) != (b < 0))) q = q - 1;
    return int'(q);
  endfunction

  initial begin
    for (int t = 0; t < 4000; t++) begin
      int m, off, ez, xi, g;
      bit ef;
      m   = $urandom_range(0, 80) - 40;
      off = (t % 50 == 0) ? 0 : $urandom_range(0, 100);
      med = SAMPLE_W'(m); disp = SAMPLE_W'($urandom_range(0, 60));
      tau_u = TAU_W'(m + off); tau_l = TAU_W'(m - off);
      enable = ($urandom_range(0, 7) != 0);
      repl = repl_mode_e'(2'($urandom_range(0, 3)));
      kconst = SAMPLE_W'($urandom);
      for (int l = 0; l < LANES; l++) begin
        x[l] = SAMPLE_W'($urandom);
        noise[l] = NOISE_W'($urandom_range(0, 1020) - 510);
      end
      #1;
      for (int l = 0; l < LANES; l++) begin
        xi = int'($signed(x[l]));
        g  = int'($signed(noise[l]));
        ef = enable && (xi >= m + off || xi <= m - off);
        if (!ef) ez = xi;
        else case (repl)
          REPL_THRESH: ez = (xi >= m + off) ? m + off : m - off;
          REPL_NOISE: begin
            ez = m + floordiv(longint'(g) * int'(disp) * 657, 65536);
            if (ez > 127) ez = 127;
            if (ez < -128) ez = -128;
          end
          default: ez = int'(kconst);
        endcase
        nflag += ef;
        checks += 2;
        if (flag[l] !== ef) begin failures++; $display("flag %0d expected %0d", flag[l], ef); end
        if (int'($signed(z[l])) != ez) begin
          failures++; $display("repl %0d x=%0d M=%0d off=%0d: z=%0d expected %0d", repl, xi, m, off, $signed(z[l]), ez);
        end
      end
    end
    checks++;
    if (nflag < 1000) begin failures++; $display("too few replaced samples: %0d", nflag); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
