// tb_input_copy_select: self-checking test of the input-to-path routing.
//
// Drives random words on four inputs with random selections (including the
// 1:4 copy and the two-antenna filtered/unfiltered arrangements) and checks
// every path output one clock later against the selected input; words with
// in_valid low must not change the outputs.
module tb_input_copy_select;
  import rfi_pkg::*;
  localparam int NIN = 4, NPATH = 4, LANES = 2;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [NIN-1:0][LANES-1:0][SAMPLE_W-1:0] in_data;
  logic [NPATH-1:0][1:0] sel;
  logic [NPATH-1:0][LANES-1:0][SAMPLE_W-1:0] out_data, exp_data;
  int checks = 0, failures = 0;

  input_copy_select #(.NIN(NIN), .NPATH(NPATH), .LANES(LANES)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    exp_data = '0;
    for (int t = 0; t < 2000; t++) begin
      logic v;
      v = ($urandom_range(0, 4) != 0);
      in_valid <= v;
      for (int i = 0; i < NIN; i++) in_data[i] <= {LANES*SAMPLE_W/16{16'($urandom)}};
      case (t / 500)
        0: sel <= '{2'd0, 2'd0, 2'd0, 2'd0};           // 1:4 copy
        1: sel <= '{2'd1, 2'd1, 2'd0, 2'd0};           // two antennas, two copies each
        default: for (int p = 0; p < NPATH; p++) sel[p] <= 2'($urandom);
      endcase
      @(posedge clk);
      if (v) for (int p = 0; p < NPATH; p++) exp_data[p] = in_data[sel[p]];
      #1;
      checks += 2;
      if (out_valid !== v) begin failures++; $display("out_valid %0d expected %0d", out_valid, v); end
      if (out_data !== exp_data) begin failures++; $display("t=%0d data mismatch", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
