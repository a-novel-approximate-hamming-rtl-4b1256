// tb_cmp5_2d: exhaustive test of the [5:2<>) compressor.
//
// All 32 input patterns are applied; the output must be the thermometer code
// 00 / 01 / 11 for zero / one / two or more '1's, so that the number of ones
// in the code is the count saturated at 2. The number of patterns counted
// exactly must be 16 of 32 (50 %, configuration B of the paper). A watchdog
// ends the run with a failure after 10,000 clock cycles.
module tb_cmp5_2d;
  logic       clk;
  initial clk = 1'b0;
  logic [4:0] din;
  logic [1:0] dout;
  int checks = 0, failures = 0, exact = 0;

  always #5 clk = ~clk;

  cmp5_2d dut (.din(din), .dout(dout));

  initial begin
    for (int p = 0; p < 32; p++) begin
      int ones;
      logic [1:0] expc;
      din = 5'(p);
      @(posedge clk);
      ones = $countones(din);
      expc = (ones == 0) ? 2'b00 : (ones == 1) ? 2'b01 : 2'b11;
      checks++;
      if (dout !== expc) begin
        failures++;
        $display("FAIL din=%b dout=%b expected %b", din, dout, expc);
      end
      if ($countones(dout) == ones) exact++;
    end
    checks++;
    if (exact != 16) begin
      failures++;
      $display("FAIL exact outputs %0d of 32, expected 16", exact);
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
