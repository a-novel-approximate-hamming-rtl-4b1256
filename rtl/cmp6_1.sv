// cmp6_1: the [6:1) one-level approximate compressor, the function of a
// single 6-input LUT (LUT6) of a 7-series FPGA.
//
// A LUT6 has one output bit, so it can report at most one '1' among its six
// inputs. The output is 1 when any input is 1 and 0 otherwise, i.e. the
// Hamming weight of din saturated at 1. This is exact for the 7 of the 64
// input patterns with zero or one '1' (about 11 %, Table 1 configuration A).
// The paper states the one-output limit; mapping every count of one or more
// to '1' (the OR of the inputs) is this design's reading of it, and it agrees
// with the 7/64 accuracy the paper quotes.
//
// Interface: din[5:0] in, dout out. Purely combinational, one LUT level.
module cmp6_1 (
  input  logic [5:0] din,
  output logic       dout
);
  assign dout = |din;
endmodule
