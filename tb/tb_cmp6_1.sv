// tb_cmp6_1: exhaustive test of the [6:1) compressor.
//
// All 64 input patterns are applied; the output must be 1 exactly when the
// pattern holds at least one '1'. The testbench also counts the patterns for
// which the output equals the true number of ones, which must be 7 of 64
// (about 11 %, the paper's figure for configuration A). A watchdog ends the
// run with a failure after 10,000 clock cycles.
module tb_cmp6_1;
  logic       clk;
  initial clk = 1'b0;
  logic [5:0] din;
  logic       dout;
  int checks = 0, failures = 0, exact = 0;

  always #5 clk = ~clk;

  cmp6_1 dut (.din(din), .dout(dout));

  initial begin
    for (int p = 0; p < 64; p++) begin
      int ones;
      din = 6'(p);
      @(posedge clk);
      ones = $countones(din);
      checks++;
      if (dout !== (ones != 0)) begin
        failures++;
        $display("FAIL din=%b dout=%b", din, dout);
      end
      if (int'(dout) == ones) exact++;
    end
    checks++;
    if (exact != 7) begin
      failures++;
      $display("FAIL exact outputs %0d of 64, expected 7", exact);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
