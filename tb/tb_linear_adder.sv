// tb_linear_adder: random test of the linear multi-operand adder.
//
// Two instances: the default one (205 two-bit operands, the [5:2)
// configuration over 1024 bits) and one with 171 one-bit operands (the
// [6:1) configuration). Each gets all-zero, all-ones and 2,000 random operand
// vectors; the sum is compared with a sum computed in the testbench. A
// watchdog ends the run with a failure after 100,000 clock cycles.
module tb_linear_adder;
  logic clk;
  initial clk = 1'b0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  logic [205*2-1:0] op_a;
  logic [9:0]       sum_a;
  logic [170:0]     op_b;
  logic [7:0]       sum_b;

  linear_adder dut_a (.opnds(op_a), .sum(sum_a));
  linear_adder #(.M(171), .W(1), .OUT_W(8)) dut_b (.opnds(op_b), .sum(sum_b));

  initial begin
    for (int t = 0; t < 2002; t++) begin
      int ea, eb;
      for (int i = 0; i < 205*2; i++) op_a[i] = (t == 0) ? 1'b0 : (t == 1) ? 1'b1 : 1'($urandom);
      for (int i = 0; i < 171; i++)   op_b[i] = (t == 0) ? 1'b0 : (t == 1) ? 1'b1 : 1'($urandom);
      @(posedge clk);
      ea = 0;
      for (int i = 0; i < 205; i++) ea += int'(op_a[i*2 +: 2]);
      eb = $countones(op_b);
      checks += 2;
      if (int'(sum_a) != ea) begin
        failures++;
        $display("FAIL W=2 sum=%0d expected %0d", sum_a, ea);
      end
      if (int'(sum_b) != eb) begin
        failures++;
        $display("FAIL W=1 sum=%0d expected %0d", sum_b, eb);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
