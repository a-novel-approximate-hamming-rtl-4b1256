// tb_cmp5_2: exhaustive test of the [5:2) compressor.
//
// All 32 input patterns are applied; the 2-bit binary output must equal the
// number of '1's saturated at 3. The number of patterns counted exactly must
// be 26 of 32 (about 81 %, configuration C of the paper). A watchdog ends
// the run with a failure after 10,000 clock cycles.
module tb_cmp5_2;
  logic       clk;
  initial clk = 1'b0;
  logic [4:0] din;
  logic [1:0] dout;
  int checks = 0, failures = 0, exact = 0;

  always #5 clk = ~clk;

  cmp5_2 dut (.din(din), .dout(dout));

  initial begin
    for (int p = 0; p < 32; p++) begin
      int ones, expv;
      din = 5'(p);
      @(posedge clk);
      ones = $countones(din);
      expv = (ones > 3) ? 3 : ones;
      checks++;
      if (int'(dout) != expv) begin
        failures++;
        $display("FAIL din=%b dout=%0d expected %0d", din, dout, expv);
      end
      if (int'(dout) == ones) exact++;
    end
    checks++;
    if (exact != 26) begin
      failures++;
      $display("FAIL exact outputs %0d of 32, expected 26", exact);
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
