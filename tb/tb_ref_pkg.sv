// tb_ref_pkg: reference model of the approximate compressors for the
// testbenches, written from the compressor definitions rather than from the
// RTL structure.
//
// Configurations are numbered 0..14 as A..L, [216:1), [540:1), [1024:1).
// For each one the model knows the first-level cell (group size, saturation
// limit and output code), the second-level cell, and how many cells each
// level has per unit. ref_cvec() gives the compressed vector of an n-bit
// input (unit after unit, the last unit zero-padded), ref_hw() the
// approximate Hamming weight read from it, and ref_cnt() the exact one.
package tb_ref_pkg;

  localparam int MAXN = 2048;
  typedef logic [MAXN-1:0] vec_t;

  // cell kinds: 0 = [6:1), 1 = [5:2) binary, 2 = [5:2<>) thermometer
  function automatic int cin(int k);   return (k == 0) ? 6 : 5; endfunction
  function automatic int cout_(int k); return (k == 0) ? 1 : 2; endfunction

  // Output bits of one cell for a given number of '1's at its inputs.
  function automatic logic [1:0] cell_out(int k, int ones);
    case (k)
      0: return (ones > 0) ? 2'b01 : 2'b00;
      1: return (ones >= 3) ? 2'd3 : 2'(ones);
      default: return (ones == 0) ? 2'b00 : (ones == 1) ? 2'b01 : 2'b11;
    endcase
  endfunction

  function automatic string cfg_name(int c);
    string n[15] = '{"A [6:1)", "B [5:2d)", "C [5:2)", "D [36:1)", "E [30:2d)",
                     "F [30:2)", "G [15:1)", "H [25:4d)", "I [25:4)", "J [15:1)",
                     "K [25:4d)", "L [25:4)", "[216:1)", "[540:1)", "[1024:1)"};
    return n[c];
  endfunction

  // level-1 / level-2 cell kinds per configuration (-1 = none)
  function automatic int k1(int c);
    int t[12] = '{0, 2, 1, 0, 0, 0, 2, 2, 2, 1, 1, 1};
    return (c < 12) ? t[c] : -1;
  endfunction
  function automatic int k2(int c);
    int t[12] = '{-1, -1, -1, 0, 2, 1, 0, 2, 1, 0, 2, 1};
    return (c < 12) ? t[c] : -1;
  endfunction

  // level-1 cells per unit and level-2 cells per unit (two-level configs)
  function automatic int n1(int c);
    if (k2(c) < 0) return 1;
    if (k1(c) == 0) return (k2(c) == 0) ? 6 : 5;   // 6x LUT6 or 5x LUT6
    return (k2(c) == 0) ? 3 : 5;                   // 3x or 5x LUT5
  endfunction
  function automatic int n2(int c);
    if (k2(c) < 0) return 0;
    return (k1(c) != 0 && k2(c) != 0) ? 2 : 1;
  endfunction

  function automatic int unit_in(int c);
    case (c)
      12: return 216;
      13: return 540;
      14: return 1024;
      default: return n1(c) * cin(k1(c));
    endcase
  endfunction

  function automatic int unit_out(int c);
    if (c >= 12) return 1;
    if (k2(c) < 0) return cout_(k1(c));
    return n2(c) * cout_(k2(c));
  endfunction

  // operand width of the final adder
  function automatic int opw(int c);
    int last = (k2(c) < 0) ? k1(c) : k2(c);
    return (c < 12 && last == 1) ? 2 : 1;
  endfunction

  function automatic int units(int c, int n);
    return (n + unit_in(c) - 1) / unit_in(c);
  endfunction

  function automatic int ref_cnt(vec_t v, int n);
    int s = 0;
    for (int i = 0; i < n; i++) s += int'(v[i]);
    return s;
  endfunction

  // Outputs of one unit for its input bits u (bit 0 = first input).
  function automatic logic [3:0] unit_eval(int c, vec_t u);
    logic [3:0] r = '0;
    if (c >= 12) begin
      r[0] = (ref_cnt(u, unit_in(c)) > 0);
    end else if (k2(c) < 0) begin
      r[1:0] = cell_out(k1(c), ref_cnt(u, cin(k1(c))));
    end else begin
      logic [15:0] mid = '0;
      int mb = 0;
      for (int i = 0; i < n1(c); i++) begin
        int ones = 0;
        logic [1:0] o;
        for (int b = 0; b < cin(k1(c)); b++) ones += int'(u[i*cin(k1(c)) + b]);
        o = cell_out(k1(c), ones);
        for (int b = 0; b < cout_(k1(c)); b++) mid[mb++] = o[b];
      end
      for (int j = 0; j < n2(c); j++) begin
        int ones = 0;
        logic [1:0] o;
        for (int b = 0; b < cin(k2(c)); b++)
          ones += int'(mid[j*cin(k2(c)) + b]) * ((k1(c) == 1 && ((j*cin(k2(c)) + b) % 2 == 1)) ? 2 : 1);
        o = cell_out(k2(c), ones);
        for (int b = 0; b < cout_(k2(c)); b++) r[j*cout_(k2(c)) + b] = o[b];
      end
    end
    return r;
  endfunction

  function automatic vec_t ref_cvec(int c, vec_t v, int n);
    vec_t out = '0;
    int ui = unit_in(c), uo = unit_out(c);
    for (int u = 0; u < units(c, n); u++) begin
      vec_t slice = '0;
      logic [3:0] r;
      for (int b = 0; b < ui; b++)
        if (u*ui + b < n) slice[b] = v[u*ui + b];
      r = unit_eval(c, slice);
      for (int b = 0; b < uo; b++) out[u*uo + b] = r[b];
    end
    return out;
  endfunction

  function automatic int ref_hw(int c, vec_t v, int n);
    vec_t cv = ref_cvec(c, v, n);
    int w = opw(c), s = 0;
    int nb = units(c, n) * unit_out(c);
    for (int i = 0; i < nb; i += w)
      s += (w == 2) ? int'({cv[i+1], cv[i]}) : int'(cv[i]);
    return s;
  endfunction

  // Random vector of n bits, each '1' with probability permille/1000.
  function automatic vec_t rand_vec(int n, int permille);
    vec_t v = '0;
    for (int i = 0; i < n; i++) v[i] = (($urandom % 1000) < permille);
    return v;
  endfunction

endpackage
