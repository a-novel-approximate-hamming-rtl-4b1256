// tb_two_level_cmp: test of the nine two-level compressors D-L.
//
// One two_level_cmp instance per configuration, all driven from the same
// 36-bit random word (each takes its own number of low bits). For 3,000
// words, at densities from 2 % to 100 %, every output bit is compared with
// the reference model in tb_ref_pkg. The two [15:1) compressors (G and J)
// are then swept over all 2^15 inputs: each must report the true count for
// exactly 16 of them, the paper's "about 4.9e-2 %" of correct outputs. The
// port widths of each instance are checked against the compressor names
// [36:1), [30:2), [15:1), [25:4). A watchdog ends the run with a failure
// after 200,000 clock cycles.
module tb_two_level_cmp;
  import ahw_pkg::*;
  import tb_ref_pkg::*;

  logic clk;
  initial clk = 1'b0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  logic [35:0] din;
  logic [3:0]  dout [3:11];

  two_level_cmp #(.L1(LUT6_1),  .L2(LUT6_1))  u_d (.din(din[35:0]), .dout(dout[3][0:0]));
  two_level_cmp #(.L1(LUT6_1),  .L2(LUT5_2D)) u_e (.din(din[29:0]), .dout(dout[4][1:0]));
  two_level_cmp #(.L1(LUT6_1),  .L2(LUT5_2))  u_f (.din(din[29:0]), .dout(dout[5][1:0]));
  two_level_cmp #(.L1(LUT5_2D), .L2(LUT6_1))  u_g (.din(din[14:0]), .dout(dout[6][0:0]));
  two_level_cmp #(.L1(LUT5_2D), .L2(LUT5_2D)) u_h (.din(din[24:0]), .dout(dout[7][3:0]));
  two_level_cmp #(.L1(LUT5_2D), .L2(LUT5_2))  u_i (.din(din[24:0]), .dout(dout[8][3:0]));
  two_level_cmp #(.L1(LUT5_2),  .L2(LUT6_1))  u_j (.din(din[14:0]), .dout(dout[9][0:0]));
  two_level_cmp #(.L1(LUT5_2),  .L2(LUT5_2D)) u_k (.din(din[24:0]), .dout(dout[10][3:0]));
  two_level_cmp #(.L1(LUT5_2),  .L2(LUT5_2))  u_l (.din(din[24:0]), .dout(dout[11][3:0]));

  // unit input / output widths expected from the compressor names
  int exp_in  [3:11] = '{36, 30, 30, 15, 25, 25, 15, 25, 25};
  int exp_out [3:11] = '{ 1,  2,  2,  1,  4,  4,  1,  4,  4};
  int dut_in  [3:11];
  int dut_out [3:11];
  assign dut_in  = '{u_d.IN_W, u_e.IN_W, u_f.IN_W, u_g.IN_W, u_h.IN_W,
                     u_i.IN_W, u_j.IN_W, u_k.IN_W, u_l.IN_W};
  assign dut_out = '{u_d.OUT_W, u_e.OUT_W, u_f.OUT_W, u_g.OUT_W, u_h.OUT_W,
                     u_i.OUT_W, u_j.OUT_W, u_k.OUT_W, u_l.OUT_W};

  task automatic check_all();
    for (int c = 3; c <= 11; c++) begin
      vec_t v = '0;
      logic [3:0] expv, mask;
      v[35:0] = din;
      for (int b = unit_in(c); b < 36; b++) v[b] = 1'b0;
      expv = unit_eval(c, v);
      mask = 4'((1 << unit_out(c)) - 1);
      checks++;
      if ((dout[c] & mask) !== (expv & mask)) begin
        failures++;
        $display("FAIL cfg %s din=%h dout=%b expected %b", cfg_name(c), din, dout[c] & mask, expv & mask);
      end
    end
  endtask

  initial begin
    for (int c = 3; c <= 11; c++) begin
      checks++;
      if (dut_in[c] != exp_in[c] || dut_out[c] != exp_out[c]) begin
        failures++;
        $display("FAIL cfg %s is [%0d:%0d), expected [%0d:%0d)", cfg_name(c),
                 dut_in[c], dut_out[c], exp_in[c], exp_out[c]);
      end
    end
    din = '0;
    @(posedge clk);
    check_all();
    din = '1;
    @(posedge clk);
    check_all();
    for (int t = 0; t < 3000; t++) begin
      automatic int pm = 20 + (t % 50) * 20;   // 2 % .. 100 %
      automatic vec_t v = rand_vec(36, pm);
      din = v[35:0];
      @(posedge clk);
      check_all();
    end
    begin
      automatic int exact_g = 0, exact_j = 0;
      for (int p = 0; p < (1 << 15); p++) begin
        din = 36'(p);
        #1;
        if (int'(dout[6][0]) == $countones(din[14:0])) exact_g++;
        if (int'(dout[9][0]) == $countones(din[14:0])) exact_j++;
        if ((p & 1023) == 0) @(posedge clk);
      end
      checks += 2;
      if (exact_g != 16) begin
        failures++;
        $display("FAIL G exact outputs %0d, expected 16", exact_g);
      end
      if (exact_j != 16) begin
        failures++;
        $display("FAIL J exact outputs %0d, expected 16", exact_j);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
