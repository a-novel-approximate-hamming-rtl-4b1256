// cmp_unit: one approximate compressor unit of configuration CFG, the
// building block that the compressor array repeats.
//
// One-level configurations (A-C) are a single LUT cell, two-level ones (D-L)
// a two_level_cmp, and the deep ones a deep_cmp. Port widths come from the
// package: IN_W = cfg_in(CFG) inputs, OUT_W = cfg_out(CFG) outputs.
// Purely combinational.
module cmp_unit
  import ahw_pkg::*;
#(
  parameter cfg_e CFG   = CFG_C,
  parameter int   IN_W  = cfg_in(CFG),
  parameter int   OUT_W = cfg_out(CFG)
) (
  input  logic [IN_W-1:0]  din,
  output logic [OUT_W-1:0] dout
);
  if (cfg_levels(CFG) == 1) begin : g_one
    lut_cell #(.L(cfg_l1(CFG))) u_cmp (.din(din), .dout(dout));
  end else if (cfg_levels(CFG) == 2) begin : g_two
    two_level_cmp #(.L1(cfg_l1(CFG)), .L2(cfg_l2(CFG))) u_cmp (.din(din), .dout(dout));
  end else begin : g_deep
    deep_cmp #(.X(deep_in(CFG))) u_cmp (.din(din), .dout(dout));
  end
endmodule
