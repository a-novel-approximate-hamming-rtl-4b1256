// ahw_pkg: shared types and sizing functions of the approximate Hamming
// weight unit.
//
// lut_e names the three LUT-based compressor cells: [6:1) (one LUT6, one
// output bit), [5:2) (a LUT5 pair whose two outputs are a binary count) and
// [5:2<>) (a LUT5 pair whose two outputs are a non-positional code, the count
// being the number of '1's in the code). cfg_e names the compressor
// configurations: the one-level configurations A-C and two-level
// configurations D-L of the paper's Table 1, plus the deep [216:1), [540:1)
// and [1024:1) compressors. The functions give, for each configuration, how
// many input bits one compressor unit takes, how many output bits it drives
// and how wide each operand of the final exact adder is (2 bits when the last
// LUT level is a positional [5:2), 1 bit otherwise). These widths follow
// directly from the compressor names in the paper; the enum encodings are
// this design's own.
package ahw_pkg;

  typedef enum logic [1:0] {
    LUT6_1  = 2'd0,   // [6:1)
    LUT5_2  = 2'd1,   // [5:2)   positional
    LUT5_2D = 2'd2    // [5:2<>) non-positional
  } lut_e;

  typedef enum logic [3:0] {
    CFG_A    = 4'd0,   // [6:1)
    CFG_B    = 4'd1,   // [5:2<>)
    CFG_C    = 4'd2,   // [5:2)
    CFG_D    = 4'd3,   // [6:1)  -> [6:1)    = [36:1)
    CFG_E    = 4'd4,   // [6:1)  -> [5:2<>)  = [30:2<>)
    CFG_F    = 4'd5,   // [6:1)  -> [5:2)    = [30:2)
    CFG_G    = 4'd6,   // [5:2<>)-> [6:1)    = [15:1)
    CFG_H    = 4'd7,   // [5:2<>)-> [5:2<>)  = [25:4<>)
    CFG_I    = 4'd8,   // [5:2<>)-> [5:2)    = [25:4)
    CFG_J    = 4'd9,   // [5:2)  -> [6:1)    = [15:1)
    CFG_K    = 4'd10,  // [5:2)  -> [5:2<>)  = [25:4<>)
    CFG_L    = 4'd11,  // [5:2)  -> [5:2)    = [25:4)
    CFG_216  = 4'd12,  // deep [216:1)
    CFG_540  = 4'd13,  // deep [540:1)
    CFG_1024 = 4'd14   // deep [1024:1)
  } cfg_e;

  // ---- LUT cell geometry -------------------------------------------------
  function automatic int lut_in(lut_e l);
    return (l == LUT6_1) ? 6 : 5;
  endfunction

  function automatic int lut_out(lut_e l);
    return (l == LUT6_1) ? 1 : 2;
  endfunction

  // Saturation limit of a cell: the largest count it can represent.
  function automatic int lut_max(lut_e l);
    case (l)
      LUT6_1:  return 1;
      LUT5_2:  return 3;
      default: return 2;
    endcase
  endfunction

  // ---- two-level geometry (Fig. 4) ----------------------------------------
  // The first-level output bits must exactly fill the second-level inputs:
  // U1 * lut_out(L1) == U2 * lut_in(L2).
  function automatic int tl_bits(lut_e l1, lut_e l2);
    return (lut_in(l2) % lut_out(l1) == 0) ? lut_in(l2) : lut_in(l2) * lut_out(l1);
  endfunction

  function automatic int tl_u1(lut_e l1, lut_e l2);
    return tl_bits(l1, l2) / lut_out(l1);
  endfunction

  function automatic int tl_u2(lut_e l1, lut_e l2);
    return tl_bits(l1, l2) / lut_in(l2);
  endfunction

  function automatic int tl_in(lut_e l1, lut_e l2);
    return tl_u1(l1, l2) * lut_in(l1);
  endfunction

  function automatic int tl_out(lut_e l1, lut_e l2);
    return tl_u2(l1, l2) * lut_out(l2);
  endfunction

  // ---- configuration table ----------------------------------------------
  function automatic int cfg_levels(cfg_e c);
    if (c <= CFG_C) return 1;
    if (c <= CFG_L) return 2;
    return 3;
  endfunction

  function automatic lut_e cfg_l1(cfg_e c);
    case (c)
      CFG_A, CFG_D, CFG_E, CFG_F: return LUT6_1;
      CFG_B, CFG_G, CFG_H, CFG_I: return LUT5_2D;
      CFG_C, CFG_J, CFG_K, CFG_L: return LUT5_2;
      default:                    return LUT6_1;
    endcase
  endfunction

  // Last LUT level of the configuration (equal to cfg_l1 for one level).
  function automatic lut_e cfg_l2(cfg_e c);
    case (c)
      CFG_B, CFG_E, CFG_H, CFG_K: return LUT5_2D;
      CFG_C, CFG_F, CFG_I, CFG_L: return LUT5_2;
      default:                    return LUT6_1;
    endcase
  endfunction

  function automatic int deep_in(cfg_e c);
    case (c)
      CFG_216: return 216;
      CFG_540: return 540;
      default: return 1024;
    endcase
  endfunction

  // Input bits of one compressor unit.
  function automatic int cfg_in(cfg_e c);
    case (cfg_levels(c))
      1:       return lut_in(cfg_l1(c));
      2:       return tl_in(cfg_l1(c), cfg_l2(c));
      default: return deep_in(c);
    endcase
  endfunction

  // Output bits of one compressor unit.
  function automatic int cfg_out(cfg_e c);
    case (cfg_levels(c))
      1:       return lut_out(cfg_l1(c));
      2:       return tl_out(cfg_l1(c), cfg_l2(c));
      default: return 1;
    endcase
  endfunction

  // Width of one operand of the exact adder.
  function automatic int cfg_opw(cfg_e c);
    return (cfg_levels(c) < 3 && cfg_l2(c) == LUT5_2) ? 2 : 1;
  endfunction

  // Number of compressor units covering an n-bit vector (last one zero-padded).
  function automatic int cfg_units(cfg_e c, int n);
    return (n + cfg_in(c) - 1) / cfg_in(c);
  endfunction

  // Number of operands of the exact adder for an n-bit vector.
  function automatic int cfg_opnds(cfg_e c, int n);
    return cfg_units(c, n) * cfg_out(c) / cfg_opw(c);
  endfunction

  // Width of a count of 0..n.
  function automatic int cnt_w(int n);
    return $clog2(n + 1);
  endfunction

endpackage
