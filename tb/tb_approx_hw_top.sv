// tb_approx_hw_top: end-to-end test of the approximate Hamming weight unit
// with 1024 inputs in all fifteen compressor configurations.
//
// Each vector is a spike vector SV and a connection vector CV of given
// densities; each instance must return the reference model's approximate
// count of SV & CV, never more than the exact count. On top of that the
// testbench measures the mean relative error |exact - approx| / exact of
// every configuration at densities of RV from 1 % to 100 % and checks it
// against the paper's accuracy results:
//   - at 100 % density (all ones) the error of each configuration must lie
//     within 1.5 points of the end points of the paper's error chart
//     (A 83, B 60, C 40, D 97, E 93, F 90, G 93, H 84, I 76, J 93, K 84,
//     L 76 %, read off the chart);
//   - [36:1) (configuration D) must show "about 12 %" error at 1 % density
//     (accepted between 8 % and 16 %);
//   - [5:2) (configuration C) must have the lowest and [36:1) the highest
//     error of the shallow configurations at every density.
// It also counts how often each mechanism of the design acted and fails if
// one never did: a spike masked by CV, a spike in the zero-padded last
// compressor, and, per configuration, a count made exactly and a count
// reduced by compressor saturation. A watchdog ends the run with a failure
// after 100,000 clock cycles.
module tb_approx_hw_top;
  import ahw_pkg::*;
  import tb_ref_pkg::*;

  localparam int N  = 1024;
  localparam int NC = 15;
  localparam int ND = 7;

  logic clk;
  initial clk = 1'b0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  logic [N-1:0] sv, cv;
  int           hw [NC];

  for (genvar c = 0; c < NC; c++) begin : g_cfg
    logic [10:0] o;
    approx_hw_top #(.N(N), .CFG(cfg_e'(c))) u_dut (.sv(sv), .cv(cv), .hw(o));
    assign hw[c] = int'(o);
  end

  // RV densities in permille and the paper's 100 % end points
  int  dens [ND] = '{10, 20, 50, 100, 200, 500, 1000};
  real full_err [12] = '{83.3, 60.0, 40.0, 97.2, 93.2, 89.7, 93.3, 84.0, 76.0, 93.3, 84.0, 76.0};

  real err_sum [NC][ND];
  int  n_exact [NC], n_lost [NC];
  int  n_masked = 0, n_pad = 0;

  task automatic apply_and_check(int d);
    vec_t rv = '0;
    int ex;
    @(posedge clk);
    rv[N-1:0] = sv & cv;
    ex = ref_cnt(rv, N);
    if ((sv & ~cv) != '0) n_masked++;
    if (rv[N-1:1020] != '0) n_pad++;
    for (int c = 0; c < NC; c++) begin
      int e = ref_hw(c, rv, N);
      checks++;
      if (hw[c] != e || hw[c] > ex) begin
        failures++;
        $display("FAIL cfg %s hw=%0d expected %0d (exact %0d)", cfg_name(c), hw[c], e, ex);
      end
      if (hw[c] == ex) n_exact[c]++;
      else             n_lost[c]++;
      if (d >= 0 && ex > 0) err_sum[c][d] += 100.0 * real'(ex - hw[c]) / real'(ex);
    end
  endtask

  initial begin
    localparam int NV = 40;
    for (int c = 0; c < NC; c++) begin
      n_exact[c] = 0; n_lost[c] = 0;
      for (int d = 0; d < ND; d++) err_sum[c][d] = 0.0;
    end
    sv = '0; cv = '0;
    apply_and_check(-1);
    // density sweep: CV all ones, SV at the RV density
    for (int d = 0; d < ND; d++) begin
      for (int t = 0; t < NV; t++) begin
        automatic vec_t v = rand_vec(N, dens[d]);
        sv = v[N-1:0];
        cv = '1;
        apply_and_check(d);
      end
    end
    // the network regime: SV and CV both sparse
    for (int t = 0; t < 100; t++) begin
      automatic vec_t a = rand_vec(N, 50 + (t % 5) * 50);
      automatic vec_t b = rand_vec(N, 100);
      sv = a[N-1:0];
      cv = b[N-1:0];
      apply_and_check(-1);
    end
    // one spike in the last, zero-padded compressor of every configuration
    sv = '0; sv[N-1] = 1'b1; cv = '1;
    apply_and_check(-1);

    // accuracy against the paper
    for (int c = 0; c < 12; c++) begin
      automatic real e = err_sum[c][ND-1] / NV;
      checks++;
      if (e < full_err[c] - 1.5 || e > full_err[c] + 1.5) begin
        failures++;
        $display("FAIL cfg %s error at 100 %% is %0.1f %%, chart shows %0.1f %%", cfg_name(c), e, full_err[c]);
      end
    end
    begin
      automatic real e = err_sum[3][0] / NV;
      checks++;
      $display("[36:1) error at 1 %% density: %0.1f %%", e);
      if (e < 8.0 || e > 16.0) begin
        failures++;
        $display("FAIL [36:1) error at 1 %% density %0.1f %%, paper says about 12 %%", e);
      end
    end
    for (int d = 0; d < ND; d++) begin
      for (int c = 0; c < 12; c++) begin
        checks++;
        if (err_sum[2][d] > err_sum[c][d] || err_sum[3][d] < err_sum[c][d]) begin
          failures++;
          $display("FAIL density %0d permille: C not lowest or D not highest (cfg %s)", dens[d], cfg_name(c));
        end
      end
    end
    $write("mean error %% at densities 1,2,5,10,20,50,100 %%:\n");
    for (int c = 0; c < NC; c++) begin
      $write("  %-10s", cfg_name(c));
      for (int d = 0; d < ND; d++) $write(" %5.1f", err_sum[c][d] / NV);
      $write("\n");
    end

    // every mechanism must have acted
    checks += 2;
    if (n_masked == 0) begin failures++; $display("FAIL no spike masked by CV"); end
    if (n_pad == 0)    begin failures++; $display("FAIL no spike in a padded unit"); end
    $display("masked %0d, padded-unit spikes %0d", n_masked, n_pad);
    for (int c = 0; c < NC; c++) begin
      checks++;
      if (n_exact[c] == 0 || n_lost[c] == 0) begin
        failures++;
        $display("FAIL cfg %s exact %0d lost %0d", cfg_name(c), n_exact[c], n_lost[c]);
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
