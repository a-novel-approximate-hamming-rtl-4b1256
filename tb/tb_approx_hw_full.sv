// tb_approx_hw_full: the approximate Hamming weight unit at its default
// size and configuration (1024 inputs, [5:2) compressors), end to end.
//
// The unit is instantiated with no parameter overrides. It is driven with
// (1) all-zero and all-ones SV and CV, where the count must be 0 and
// 205 x 3 = 615 (the 40 % error at 100 % density of the paper's error chart),
// (2) 1,000 random received-spike vectors RV spread over densities from 1 %
// to 100 % (CV all ones, SV at the density), the kind of input the paper's
// accuracy study uses, and (3) 200 pairs of sparse SV and CV. Every result
// must equal the reference model and never exceed the exact count; at
// densities up to 10 % the mean error must stay below 1 %, in line with the
// chart, where [5:2) is nearly exact in that range. A watchdog ends the run
// with a failure after 100,000 clock cycles.
module tb_approx_hw_full;
  import tb_ref_pkg::*;

  localparam int N = 1024;
  localparam int C = 2;   // configuration C, the unit's default

  logic clk;
  initial clk = 1'b0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  logic [N-1:0] sv, cv;
  logic [10:0]  hw;

  approx_hw_top dut (.sv(sv), .cv(cv), .hw(hw));

  real err_low = 0.0;
  int  n_low = 0;

  task automatic apply_and_check(int permille);
    vec_t rv = '0;
    int ex, e;
    @(posedge clk);
    rv[N-1:0] = sv & cv;
    ex = ref_cnt(rv, N);
    e  = ref_hw(C, rv, N);
    checks++;
    if (int'(hw) != e || int'(hw) > ex) begin
      failures++;
      $display("FAIL hw=%0d expected %0d (exact %0d)", hw, e, ex);
    end
    if (permille > 0 && permille <= 100 && ex > 0) begin
      err_low += 100.0 * real'(ex - int'(hw)) / real'(ex);
      n_low++;
    end
  endtask

  initial begin
    sv = '0; cv = '0;
    apply_and_check(0);
    checks++;
    if (hw != 0) begin failures++; $display("FAIL zero input gives %0d", hw); end
    sv = '1; cv = '1;
    apply_and_check(0);
    checks++;
    if (hw != 11'd615) begin failures++; $display("FAIL all ones gives %0d, expected 615", hw); end
    for (int t = 0; t < 1000; t++) begin
      automatic int pm = 10 + (t % 100) * 10;
      automatic vec_t v = rand_vec(N, pm);
      sv = v[N-1:0];
      cv = '1;
      apply_and_check(pm);
    end
    for (int t = 0; t < 200; t++) begin
      automatic vec_t a = rand_vec(N, 20 + (t % 10) * 20);
      automatic vec_t b = rand_vec(N, 100);
      sv = a[N-1:0];
      cv = b[N-1:0];
      apply_and_check(0);
    end
    checks++;
    $display("mean error at densities up to 10 %%: %0.3f %% over %0d vectors", err_low / n_low, n_low);
    if (err_low / n_low > 1.0) begin
      failures++;
      $display("FAIL mean error at low density too high");
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
