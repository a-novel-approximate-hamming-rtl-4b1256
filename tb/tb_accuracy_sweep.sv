// tb_accuracy_sweep: the accuracy study of the approximate Hamming weight
// unit, run on the RTL.
//
// Twelve one- and two-level configurations (A-L) plus the three deep
// compressors are instantiated with 1024 inputs. For every RV density from
// 1 % to 100 % in steps of 1 %, NV uniformly random vectors (1,000 by
// default, as in the paper's study) are applied and the mean relative error
// |exact - approx| / exact of each configuration is accumulated. The table
// of mean errors is printed, and the statements the paper makes about its
// error chart are checked:
//   - [5:2) (C) has the lowest and [36:1) (D) the highest error of the
//     shallow configurations at every density;
//   - [36:1) shows about 12 % error at 1 % density (accepted 8-16 %);
//   - configurations H, I, K, L beat the one-level [6:1) (A) at low
//     density (checked up to 30 %, where the chart's curves still separate);
//   - I and L stay close to B and C below 10 % density (within 3 points);
//   - at 100 % density each shallow configuration lies within 1.5 points
//     of the chart's end point.
// Every result is also checked never to exceed the exact count. A watchdog
// ends the run with a failure after 500,000 clock cycles.
module tb_accuracy_sweep;
  import ahw_pkg::*;
  import tb_ref_pkg::*;

  localparam int N  = 1024;
  localparam int NC = 15;
  localparam int NV = 1000;

  logic clk;
  initial clk = 1'b0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  logic [N-1:0] rv;
  int           hw [NC];

  for (genvar c = 0; c < NC; c++) begin : g_cfg
    logic [10:0] o;
    approx_hw_top #(.N(N), .CFG(cfg_e'(c))) u_dut (.sv(rv), .cv({N{1'b1}}), .hw(o));
    assign hw[c] = int'(o);
  end

  real full_err [12] = '{83.3, 60.0, 40.0, 97.2, 93.2, 89.7, 93.3, 84.0, 76.0, 93.3, 84.0, 76.0};
  real err [NC][101];
  int  n_over = 0;

  initial begin
    for (int d = 1; d <= 100; d++) begin
      for (int c = 0; c < NC; c++) err[c][d] = 0.0;
      for (int t = 0; t < NV; t++) begin
        automatic vec_t v = rand_vec(N, d * 10);
        automatic int ex;
        rv = v[N-1:0];
        #1;
        ex = $countones(rv);
        for (int c = 0; c < NC; c++) begin
          if (hw[c] > ex) n_over++;
          if (ex > 0) err[c][d] += 100.0 * real'(ex - hw[c]) / real'(ex);
        end
        if (t % 100 == 0) @(posedge clk);
      end
      for (int c = 0; c < NC; c++) err[c][d] /= NV;
    end

    checks++;
    if (n_over != 0) begin failures++; $display("FAIL %0d counts above exact", n_over); end
    for (int d = 1; d <= 100; d++)
      for (int c = 0; c < 12; c++) begin
        checks++;
        if (err[2][d] > err[c][d] || err[3][d] < err[c][d]) begin
          failures++;
          $display("FAIL density %0d %%: C not lowest or D not highest (vs %s)", d, cfg_name(c));
        end
      end
    checks++;
    if (err[3][1] < 8.0 || err[3][1] > 16.0) begin
      failures++; $display("FAIL [36:1) at 1 %%: %0.1f %%", err[3][1]);
    end
    for (int d = 1; d <= 30; d++)
      foreach (g_two[i]) begin
        checks++;
        if (err[g_two[i]][d] >= err[0][d]) begin
          failures++;
          $display("FAIL density %0d %%: %s not better than A", d, cfg_name(g_two[i]));
        end
      end
    for (int d = 1; d < 10; d++) begin
      checks += 2;
      if (err[8][d] - err[1][d] > 3.0 || err[11][d] - err[1][d] > 3.0) begin
        failures++;
        $display("FAIL density %0d %%: I/L not near B/C", d);
      end
      if (err[8][d] - err[2][d] > 3.0 || err[11][d] - err[2][d] > 3.0) begin
        failures++;
        $display("FAIL density %0d %%: I/L not near C", d);
      end
    end
    for (int c = 0; c < 12; c++) begin
      checks++;
      if (err[c][100] < full_err[c] - 1.5 || err[c][100] > full_err[c] + 1.5) begin
        failures++;
        $display("FAIL %s at 100 %%: %0.1f %%, chart %0.1f %%", cfg_name(c), err[c][100], full_err[c]);
      end
    end

    $write("density %%  ");
    for (int c = 0; c < NC; c++) $write(" %8s", cfg_name(c).substr(0, 0) == "[" ? cfg_name(c) : cfg_name(c).substr(0, 0));
    $write("\n");
    for (int d = 1; d <= 100; d++)
      if (d <= 10 || d % 10 == 0) begin
        $write("%8d   ", d);
        for (int c = 0; c < NC; c++) $write(" %8.2f", err[c][d]);
        $write("\n");
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int g_two [4] = '{7, 8, 10, 11};   // H, I, K, L

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
