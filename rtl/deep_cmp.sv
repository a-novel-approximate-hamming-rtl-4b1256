// deep_cmp: the deep [X:1) approximate compressors of the paper, more than
// two LUT levels deep, with one output bit.
//
//   X = 216 : three levels of LUT6 cells (216 -> 36 -> 6 -> 1).
//   X = 540 : fifteen [36:1) compressors (Fig. 4A) whose outputs feed one
//             [15:1) compressor (Fig. 4D, built here with [5:2) cells in the
//             first level, configuration J), as the paper describes it.
//   other X : a tree of LUT6 levels ([1024:1) for X = 1024).
// The structures for 216 and 540 are the paper's. For 1024 the paper only
// says the compressor stands for any [x:1) with x > 1024; a LUT6 tree is
// this design's choice. For any structure the output is 1 exactly when some
// input bit is 1 (every cell saturates at one nonzero input).
//
// Interface: din[X-1:0] in, dout out. Purely combinational.
module deep_cmp
  import ahw_pkg::*;
#(
  parameter int X = 540
) (
  input  logic [X-1:0] din,
  output logic         dout
);
  if (X == 540) begin : g_540
    logic [14:0] mid;
    for (genvar i = 0; i < 15; i++) begin : g_36
      two_level_cmp #(.L1(LUT6_1), .L2(LUT6_1)) u_36 (
        .din(din[i*36 +: 36]), .dout(mid[i]));
    end
    two_level_cmp #(.L1(LUT5_2), .L2(LUT6_1)) u_15 (.din(mid), .dout(dout));
  end else begin : g_tree
    lut6_tree #(.IN_W(X)) u_tree (.din(din), .dout(dout));
  end
endmodule
