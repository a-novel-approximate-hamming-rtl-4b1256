// cmp5_2d: the [5:2<>) one-level approximate compressor (the paper writes
// the non-positional variant with a diamond superscript), two 5-input LUTs
// sharing five inputs.
//
// The two outputs are a non-positional code: the count they stand for is
// the number of '1's in the code, so it can show 0, 1 or 2 ones. Each output
// bit is therefore a 1-bit operand for the exact adder that follows. It is
// exact for inputs with at most two '1's, 16 of 32 patterns (50 %, Table 1
// configuration B). The code for a count of one is not given by the paper;
// this design uses the thermometer code 00 / 01 / 11, and saturates at 11
// for two or more '1's.
//
// Interface: din[4:0] in, dout[1:0] out. Purely combinational.
module cmp5_2d (
  input  logic [4:0] din,
  output logic [1:0] dout
);
  logic [2:0] cnt;

  always_comb begin
    cnt = '0;
    for (int i = 0; i < 5; i++) cnt += 3'(din[i]);
    dout[0] = (cnt >= 3'd1);
    dout[1] = (cnt >= 3'd2);
  end
endmodule
