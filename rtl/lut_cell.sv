// lut_cell: one LUT compressor cell chosen by a parameter, so that the
// multi-level compressors can be written once for all cell types.
//
// L selects [6:1) (cmp6_1), [5:2) (cmp5_2) or [5:2<>) (cmp5_2d). The ports
// are sized for the chosen cell: IN_W = 6 or 5 inputs, OUT_W = 1 or 2
// outputs. The cell instance carries the dont_touch attribute, as the
// paper's FPGA implementation did, so that an FPGA synthesis tool keeps
// each cell as one LUT function instead of merging the compressor into the
// adder behind it. Purely combinational.
module lut_cell
  import ahw_pkg::*;
#(
  parameter lut_e L     = LUT5_2,
  parameter int   IN_W  = lut_in(L),
  parameter int   OUT_W = lut_out(L)
) (
  input  logic [IN_W-1:0]  din,
  output logic [OUT_W-1:0] dout
);
  if (L == LUT6_1) begin : g_lut6
    (* dont_touch = "true" *) cmp6_1 u_cmp (.din(din), .dout(dout));
  end else if (L == LUT5_2) begin : g_lut5p
    (* dont_touch = "true" *) cmp5_2 u_cmp (.din(din), .dout(dout));
  end else begin : g_lut5d
    (* dont_touch = "true" *) cmp5_2d u_cmp (.din(din), .dout(dout));
  end
endmodule
