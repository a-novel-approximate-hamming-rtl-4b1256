// tb_deep_cmp: test of the deep [216:1), [540:1) and [1024:1) compressors.
//
// Each instance gets the all-zero vector (output 0), every one-hot vector
// (output 1: a single spike must never be lost), the all-ones vector, and
// 500 random vectors at densities from 0.1 % to 5 %, the sparse regime these
// compressors are meant for; the output must be 1 exactly when the input has
// a '1'. A watchdog ends the run with a failure after 100,000 clock cycles.
module tb_deep_cmp;
  import tb_ref_pkg::*;

  logic clk;
  initial clk = 1'b0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  logic [1023:0] din;
  logic          o216, o540, o1024;

  deep_cmp #(.X(216))  u_216  (.din(din[215:0]), .dout(o216));
  deep_cmp             u_540  (.din(din[539:0]), .dout(o540));
  deep_cmp #(.X(1024)) u_1024 (.din(din),        .dout(o1024));

  task automatic check();
    checks += 3;
    if (o216 !== (|din[215:0])) begin
      failures++; $display("FAIL [216:1) out=%b", o216);
    end
    if (o540 !== (|din[539:0])) begin
      failures++; $display("FAIL [540:1) out=%b", o540);
    end
    if (o1024 !== (|din)) begin
      failures++; $display("FAIL [1024:1) out=%b", o1024);
    end
  endtask

  initial begin
    din = '0;
    @(posedge clk);
    check();
    for (int i = 0; i < 1024; i++) begin
      din = '0;
      din[i] = 1'b1;
      @(posedge clk);
      check();
    end
    din = '1;
    @(posedge clk);
    check();
    for (int t = 0; t < 500; t++) begin
      automatic vec_t v = rand_vec(1024, 1 + (t % 50));
      din = v[1023:0];
      @(posedge clk);
      check();
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
