// approx_hw_top: approximate Hamming weight unit for one neuron of a binary
// spiking network.
//
// The received-spike vector RV is the bitwise AND of the spike vector SV
// (which neurons fired in the last time step) and the neuron's connection
// vector CV (which neurons are its presynaptic partners). Its Hamming weight
// is the number of spikes the neuron receives. Instead of an exact N-input
// counter, RV first passes an approximate compressor stage (LUT-based
// compressors that saturate, and so drop spikes the way synaptic
// transmission failure does when spikes crowd together), and a short linear
// adder then sums the compressed vector exactly.
//
// CFG picks the compressor (Table 1 configurations A-L, or the deep
// [216:1), [540:1), [1024:1)); the default is configuration C, [5:2), the
// most accurate one. N defaults to the 1024 inputs the paper evaluates.
// The structure (AND, compressor, linear adder) is the paper's; the default
// configuration, the zero padding of the last compressor and the choice of a
// purely combinational unit (the paper reports a combinational critical
// path, not a pipeline) are this design's.
//
// Interface: sv[N-1:0], cv[N-1:0] in; hw out, clog2(N+1) bits (the width
// of an exact count of N bits), the approximate count, never above the
// exact popcount(sv & cv). The compressors cap the count below N, so the
// upper bits of hw can be constant zero (in configuration C the largest
// count is 205 x 3 = 615 and hw[10] is always 0); the width is kept so that
// every configuration has the same interface.
// Purely combinational: hw is valid one propagation delay after sv and cv.
// A deferred assertion checks in simulation that the count never exceeds
// the exact Hamming weight of RV.
module approx_hw_top
  import ahw_pkg::*;
#(
  parameter int   N   = 1024,
  parameter cfg_e CFG = CFG_C
) (
  input  logic [N-1:0]          sv,
  input  logic [N-1:0]          cv,
  output logic [cnt_w(N)-1:0]   hw
);
  localparam int CW  = cfg_units(CFG, N) * cfg_out(CFG);  // compressed width
  localparam int OPW = cfg_opw(CFG);
  localparam int M   = cfg_opnds(CFG, N);
  localparam int SW  = $clog2(M * ((1 << OPW) - 1) + 1);  // adder width

  logic [N-1:0]  rv;
  logic [CW-1:0] cvec;
  logic [SW-1:0] sum;

  assign rv = sv & cv;

  approx_compressor #(.N(N), .CFG(CFG)) u_cmp (.din(rv), .dout(cvec));

  linear_adder #(.M(M), .W(OPW), .OUT_W(SW)) u_add (.opnds(cvec), .sum(sum));

  // The approximate count never exceeds the number of ones in rv, so it
  // always fits the N-bit count width.
  assign hw = cnt_w(N)'(sum);

  // A compressor can only lose spikes, never invent them.
  always_comb begin
    assert final (int'(sum) <= $countones(rv))
      else $error("approximate count %0d above exact count %0d", sum, $countones(rv));
  end
endmodule
