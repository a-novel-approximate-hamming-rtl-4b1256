// cmp5_2: the [5:2) one-level approximate compressor, two 5-input LUTs
// (the LUT5 pair of one 7-series LUT6 site) sharing five inputs.
//
// The two outputs form a binary (positional) number 0..3: the Hamming weight
// of din saturated at 3. It is exact whenever din holds at most three '1's,
// 26 of the 32 patterns (about 81 %, Table 1 configuration C). Binary
// meaning of the code and the 3-ones limit are the paper's; saturating at 3
// for four or five '1's is this design's choice (the paper only says the
// cell "could count up to three ones").
//
// Interface: din[4:0] in, dout[1:0] out (dout = min(popcount(din), 3)).
// Purely combinational, one LUT level.
module cmp5_2 (
  input  logic [4:0] din,
  output logic [1:0] dout
);
  logic [2:0] cnt;

  always_comb begin
    cnt = '0;
    for (int i = 0; i < 5; i++) cnt += 3'(din[i]);
    dout = (cnt > 3'd3) ? 2'd3 : cnt[1:0];
  end
endmodule
