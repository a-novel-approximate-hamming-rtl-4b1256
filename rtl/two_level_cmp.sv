// two_level_cmp: a two-level approximate compressor (Fig. 4 of the paper),
// LUT compressor cells cascaded in two levels.
//
// A first level of U1 cells of type L1 compresses IN_W input bits; all their
// output bits, taken in order (cell 0 bit 0, cell 0 bit 1, cell 1 bit 0,
// ...), are cut into groups of lut_in(L2) bits, each of which feeds one
// second-level cell of type L2. U1 and U2 are the smallest counts for which
// the first-level outputs fill the second-level inputs exactly, which gives
// the paper's arrangements:
//   [6:1)   -> [6:1)        6 LUT6 -> 1 LUT6       [36:1)   (Fig. 4A, cfg D)
//   [6:1)   -> [5:2)/[5:2<>) 5 LUT6 -> 1 LUT5 pair [30:2)   (Fig. 4B, cfg E,F)
//   [5:2x)  -> [5:2x)       5 LUT5 -> 2 LUT5 pairs [25:4)   (Fig. 4C, cfg H,I,K,L)
//   [5:2x)  -> [6:1)        3 LUT5 -> 1 LUT6       [15:1)   (Fig. 4D, cfg G,J)
// In Fig. 4C the middle first-level cell sends one output to each
// second-level cell; which of its two bits goes left is not printed, and
// this design sends bit 0 to the first second-level cell.
//
// A second-level cell counts the '1's its inputs stand for. After [6:1) or
// [5:2<>) cells every input bit stands for one '1', so the second level is
// the same cell as the first. After [5:2) cells the inputs are binary
// digits, bit 1 of each code worth two, and a LUT5 pair second level
// (configurations K and L) is the weighted cell cmp5_2w; a LUT6 second level
// only asks whether any input is 1, which needs no weights. The paper does
// not state the weighting; its error chart (K and L close to H and I at low
// density) requires it. Outputs: dout holds the U2 second-level outputs,
// cell k in bits [k*lut_out(L2) +: lut_out(L2)]. Purely combinational, two
// LUT levels.
module two_level_cmp
  import ahw_pkg::*;
#(
  parameter lut_e L1    = LUT5_2,
  parameter lut_e L2    = LUT5_2,
  parameter int   IN_W  = tl_in(L1, L2),
  parameter int   OUT_W = tl_out(L1, L2)
) (
  input  logic [IN_W-1:0]  din,
  output logic [OUT_W-1:0] dout
);
  localparam int I1 = lut_in(L1);
  localparam int O1 = lut_out(L1);
  localparam int I2 = lut_in(L2);
  localparam int O2 = lut_out(L2);
  localparam int U1 = tl_u1(L1, L2);
  localparam int U2 = tl_u2(L1, L2);

  logic [U1*O1-1:0] mid;   // first-level outputs, = U2*I2 bits

  for (genvar i = 0; i < U1; i++) begin : g_l1
    lut_cell #(.L(L1)) u_cell (.din(din[i*I1 +: I1]), .dout(mid[i*O1 +: O1]));
  end

  // Input j of second-level cell k carries mid bit k*I2 + j; after [5:2)
  // cells the odd mid bits are the weight-two digits.
  function automatic logic [4:0] weight2(int k);
    logic [4:0] w = '0;
    for (int j = 0; j < 5; j++) w[j] = ((k * I2 + j) % 2 == 1);
    return w;
  endfunction

  for (genvar k = 0; k < U2; k++) begin : g_l2
    if (L1 == LUT5_2 && L2 != LUT6_1) begin : g_weighted
      (* dont_touch = "true" *) cmp5_2w #(.L(L2), .WEIGHT2(weight2(k))) u_cell (
        .din(mid[k*I2 +: I2]), .dout(dout[k*O2 +: O2]));
    end else begin : g_plain
      lut_cell #(.L(L2)) u_cell (.din(mid[k*I2 +: I2]), .dout(dout[k*O2 +: O2]));
    end
  end
endmodule
