// linear_adder: the exact counter that follows the compressors, written as
// the paper's "simple linear adder": a chain of M-1 two-input adders in which
// adder i adds operand i to the running sum of operands 0..i-1.
//
// Operands are W bits wide, operand i in opnds[i*W +: W]: W = 1 when the
// compressor outputs are 1-bit ([6:1)) or non-positional ([5:2<>)) values,
// W = 2 when they are [5:2) binary counts. The sum is OUT_W bits wide; the
// default M = 205, W = 2 fits the [5:2) configuration over 1024 bits.
//
// Interface: opnds[M*W-1:0] in, sum[OUT_W-1:0] out. Purely combinational;
// its delay grows linearly with M, which is what the paper measures the
// compressors against.
module linear_adder #(
  parameter int M     = 205,
  parameter int W     = 2,
  parameter int OUT_W = $clog2(M * ((1 << W) - 1) + 1)
) (
  input  logic [M*W-1:0]   opnds,
  output logic [OUT_W-1:0] sum
);
  logic [OUT_W-1:0] chain [M];

  assign chain[0] = OUT_W'(opnds[0 +: W]);

  for (genvar i = 1; i < M; i++) begin : g_add
    assign chain[i] = chain[i-1] + OUT_W'(opnds[i*W +: W]);
  end

  assign sum = chain[M-1];
endmodule
