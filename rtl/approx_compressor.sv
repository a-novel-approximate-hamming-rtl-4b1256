// approx_compressor: the approximate compressor stage of Fig. 1 (bottom)
// of the paper. It covers an N-bit vector with NU identical compressor units
// of configuration CFG and concatenates their outputs into the compressed
// vector that the exact adder sums.
//
// Unit u takes input bits [u*UI +: UI]; when N is not a multiple of UI the
// last unit is fed zeros in its missing inputs (the paper does not say how a
// 1024-bit vector is split into 5-, 6-, 15-, 25-, 30- or 36-bit groups; zero
// padding does not change the count). Unit u drives dout[u*UO +: UO].
//
// Interface: din[N-1:0] in, dout[NU*UO-1:0] out, NU = ceil(N/UI).
// Purely combinational.
module approx_compressor
  import ahw_pkg::*;
#(
  parameter int   N     = 1024,
  parameter cfg_e CFG   = CFG_C,
  parameter int   OUT_W = cfg_units(CFG, N) * cfg_out(CFG)
) (
  input  logic [N-1:0]     din,
  output logic [OUT_W-1:0] dout
);
  localparam int UI = cfg_in(CFG);
  localparam int UO = cfg_out(CFG);
  localparam int NU = cfg_units(CFG, N);

  logic [NU*UI-1:0] padded;

  assign padded = (NU*UI)'(din);

  for (genvar u = 0; u < NU; u++) begin : g_unit
    cmp_unit #(.CFG(CFG)) u_unit (.din(padded[u*UI +: UI]), .dout(dout[u*UO +: UO]));
  end
endmodule
