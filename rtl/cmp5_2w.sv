// cmp5_2w: a second-level LUT5-pair compressor fed by binary [5:2) codes.
//
// When the first level of a two-level compressor is built from [5:2) cells,
// the bits a second-level LUT5 receives are digits of binary counts: bit 0
// of a [5:2) code is worth one '1', bit 1 is worth two. Since a LUT can
// realise any function of its inputs, the second-level cell adds its inputs
// with these weights (WEIGHT2 marks the inputs worth two) and then encodes
// the sum like the first-level cells: as a binary count saturated at 3 for
// [5:2) (L = LUT5_2) or as the thermometer code 00 / 01 / 11 for [5:2<>)
// (L = LUT5_2D). The paper's text does not spell this out; this design takes
// it from the paper's error chart, where configurations K and L reach the
// errors of configurations H and I at low density only if the first-level
// codes are weighted.
//
// Interface: din[4:0] in, dout[1:0] out. Purely combinational.
module cmp5_2w
  import ahw_pkg::*;
#(
  parameter lut_e       L       = LUT5_2,
  parameter logic [4:0] WEIGHT2 = 5'b01010
) (
  input  logic [4:0] din,
  output logic [1:0] dout
);
  logic [3:0] sum;

  always_comb begin
    sum = '0;
    for (int i = 0; i < 5; i++)
      if (din[i]) sum += WEIGHT2[i] ? 4'd2 : 4'd1;
    if (L == LUT5_2D) begin
      dout[0] = (sum >= 4'd1);
      dout[1] = (sum >= 4'd2);
    end else begin
      dout = (sum > 4'd3) ? 2'd3 : sum[1:0];
    end
  end
endmodule
