// tb_sample_buffer: self-checking test of the four-bank window store.
//
// Writes random words to random banks and addresses, reads both ports at
// random locations, and compares each returned word (one ce clock later) with
// a reference array. Clocks with ce low must change nothing.
module tb_sample_buffer;
  localparam int WORD_W = 16, DEPTH = 64, NBANKS = 4;
  localparam int AW = $clog2(DEPTH), BW = $clog2(NBANKS);

  logic clk = 0, ce = 0, we = 0;
  logic [BW-1:0] wbank, ra_bank, rb_bank;
  logic [AW-1:0] waddr, ra_addr, rb_addr;
  logic [WORD_W-1:0] wdata, ra_data, rb_data;
  logic [WORD_W-1:0] ref_mem [NBANKS * DEPTH];
  logic [WORD_W-1:0] exp_a, exp_b;
  int checks = 0, failures = 0;

  sample_buffer #(.WORD_W(WORD_W), .DEPTH(DEPTH), .NBANKS(NBANKS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    // Fill every location first so that all reads are defined.
    for (int i = 0; i < NBANKS * DEPTH; i++) begin
      ce <= 1; we <= 1; {wbank, waddr} <= (BW+AW)'(i); wdata <= WORD_W'($urandom);
      @(posedge clk);
      ref_mem[i] = wdata;
    end
    for (int t = 0; t < 3000; t++) begin
      ce <= ($urandom_range(0, 3) != 0);
      we <= 1'($urandom_range(0, 1));
      wbank <= BW'($urandom); waddr <= AW'($urandom); wdata <= WORD_W'($urandom);
      ra_bank <= BW'($urandom); ra_addr <= AW'($urandom);
      rb_bank <= BW'($urandom); rb_addr <= AW'($urandom);
      @(posedge clk);
      if (ce) begin
        exp_a = ref_mem[{ra_bank, ra_addr}];
        exp_b = ref_mem[{rb_bank, rb_addr}];
        if (we) ref_mem[{wbank, waddr}] = wdata;
      end
      #1;
      if (ce) begin
        checks += 2;
        if (ra_data !== exp_a) begin failures++; $display("port A %h exp %h", ra_data, exp_a); end
        if (rb_data !== exp_b) begin failures++; $display("port B %h exp %h", rb_data, exp_b); end
      end else begin
        checks += 2;
        if (ra_data !== exp_a) begin failures++; $display("port A changed without ce"); end
        if (rb_data !== exp_b) begin failures++; $display("port B changed without ce"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
