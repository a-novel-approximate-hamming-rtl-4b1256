// lut6_tree: a deep [IN_W:1) compressor built from levels of LUT6 cells
// ([6:1)), each level compressing its input six to one until one bit is
// left. The last cell of a level that has fewer than six bits left is fed
// zeros in its unused inputs.
//
// Examples: IN_W = 216 gives the paper's three-level [216:1)
// (216 -> 36 -> 6 -> 1); IN_W = 1024 gives 1024 -> 171 -> 29 -> 5 -> 1.
// Because every [6:1) cell reports 1 when any input is 1, dout is 1 exactly
// when din holds at least one '1'.
//
// Each cell instance is marked dont_touch (see lut_cell).
//
// Interface: din[IN_W-1:0] in, dout out. Purely combinational,
// ceil(log6(IN_W)) LUT levels.
module lut6_tree #(
  parameter int IN_W = 216
) (
  input  logic [IN_W-1:0] din,
  output logic            dout
);
  // Width of level k (level 0 is the input).
  function automatic int lvl_w(int k);
    int w = IN_W;
    for (int i = 0; i < k; i++) w = (w + 5) / 6;
    return w;
  endfunction

  function automatic int n_lvls();
    int k = 0;
    while (lvl_w(k) > 1) k++;
    return k;
  endfunction

  localparam int NL = n_lvls();
  localparam int PW = ((IN_W + 5) / 6) * 6;   // widest padded level

  logic [PW-1:0] lvl [NL+1];

  assign lvl[0] = PW'(din);

  for (genvar k = 0; k < NL; k++) begin : g_lvl
    localparam int NC = lvl_w(k + 1);
    for (genvar c = 0; c < NC; c++) begin : g_cell
      (* dont_touch = "true" *) cmp6_1 u_cell (.din(lvl[k][c*6 +: 6]), .dout(lvl[k+1][c]));
    end
    if (NC < PW) begin : g_pad
      assign lvl[k+1][PW-1:NC] = '0;
    end
  end

  assign dout = lvl[NL][0];
endmodule
