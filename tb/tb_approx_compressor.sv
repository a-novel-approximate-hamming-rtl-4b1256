// tb_approx_compressor: test of the compressor array over a 1024-bit vector
// in all fifteen configurations.
//
// One approx_compressor instance per configuration (A-L, [216:1), [540:1),
// [1024:1)). Each gets the all-zero and all-ones vectors, one-hot vectors in
// the zero-padded last unit, and 300 random vectors at densities from 1 % to
// 100 %; every bit of the compressed vector is compared with the reference
// model. The width of each compressed vector (number of units times unit
// outputs) is checked too. A watchdog ends the run with a failure after
// 100,000 clock cycles.
module tb_approx_compressor;
  import ahw_pkg::*;
  import tb_ref_pkg::*;

  localparam int N  = 1024;
  localparam int NC = 15;

  logic clk;
  initial clk = 1'b0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  logic [N-1:0] din;
  vec_t         dout  [NC];
  int           width [NC];

  for (genvar c = 0; c < NC; c++) begin : g_cfg
    localparam cfg_e CFG = cfg_e'(c);
    localparam int   OW  = cfg_units(CFG, N) * cfg_out(CFG);
    logic [OW-1:0] o;
    approx_compressor #(.N(N), .CFG(CFG)) u_dut (.din(din), .dout(o));
    assign dout[c]  = vec_t'(o);
    assign width[c] = OW;
  end

  task automatic check_all();
    vec_t v = '0;
    v[N-1:0] = din;
    for (int c = 0; c < NC; c++) begin
      vec_t e = ref_cvec(c, v, N);
      checks++;
      if (dout[c] !== e) begin
        failures++;
        $display("FAIL cfg %s compressed vector differs", cfg_name(c));
      end
    end
  endtask

  initial begin
    #1;
    for (int c = 0; c < NC; c++) begin
      checks++;
      if (width[c] != units(c, N) * unit_out(c)) begin
        failures++;
        $display("FAIL cfg %s width %0d", cfg_name(c), width[c]);
      end
    end
    din = '0;
    @(posedge clk); check_all();
    din = '1;
    @(posedge clk); check_all();
    for (int i = 1000; i < N; i++) begin
      din = '0;
      din[i] = 1'b1;
      @(posedge clk); check_all();
    end
    for (int t = 0; t < 300; t++) begin
      automatic vec_t v = rand_vec(N, 10 + (t % 100) * 10);
      din = v[N-1:0];
      @(posedge clk); check_all();
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
