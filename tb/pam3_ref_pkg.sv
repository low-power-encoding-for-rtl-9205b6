// pam3_ref_pkg: reference model used by the testbenches.
//
// Works on PAM-3 levels as plain integers -1, 0, +1 rather than on the
// 2-bit codes of the RTL, and is written from the algorithm descriptions
// instead of from the RTL structure:
//  - modulation counts the pairs in ternary and skips the pair [0, 0]
//    (pair number t = code for code < 4, code + 1 otherwise),
//  - DBI inverts the 24 source bits and modulates again,
//  - MF scans for the first maximum and exchanges it with +1,
//  - SORT bubble-sorts the three levels by count and looks the order up in
//    the six-row permutation table,
//  - decoding undoes each algorithm from its flag, so round trips can be
//    checked, and power() gives termination power in units of VDD^2/200.
package pam3_ref_pkg;

  typedef int line_t [2][8];

  // Permutation table, least frequent level first.
  function automatic int perm_row(int p, int col);
    int tbl [6][3] = '{'{-1, 0, 1}, '{-1, 1, 0}, '{0, -1, 1},
                       '{0, 1, -1}, '{1, -1, 0}, '{1, 0, -1}};
    return tbl[p][col];
  endfunction

  function automatic line_t modulate(logic [7:0] x, logic [7:0] y, logic [7:0] z);
    line_t l;
    for (int i = 0; i < 8; i++) begin
      int code = 4 * x[i] + 2 * y[i] + z[i];
      int t = (code < 4) ? code : code + 1;
      l[0][i] = t / 3 - 1;
      l[1][i] = t % 3 - 1;
    end
    return l;
  endfunction

  function automatic int count(line_t l, int v);
    int n = 0;
    for (int a = 0; a < 2; a++)
      for (int i = 0; i < 8; i++)
        if (l[a][i] == v) n++;
    return n;
  endfunction

  function automatic int power(line_t l);
    return 2 * count(l, -1) + count(l, 0);
  endfunction

  function automatic line_t remap(line_t l, int from_n1, int from_z, int from_p1);
    line_t r;
    for (int a = 0; a < 2; a++)
      for (int i = 0; i < 8; i++)
        r[a][i] = (l[a][i] == -1) ? from_n1 : (l[a][i] == 0) ? from_z : from_p1;
    return r;
  endfunction

  // DBI: returns the flag, fills out
  function automatic int dbi(logic [7:0] x, logic [7:0] y, logic [7:0] z, output line_t out);
    line_t l = modulate(x, y, z);
    if (count(l, -1) > count(l, 1)) begin
      out = modulate(~x, ~y, ~z);
      return 1;
    end
    out = l;
    return 0;
  endfunction

  // MF: returns the most frequent level (-1, 0, +1)
  function automatic int mf(line_t l, output line_t out);
    int best = -1;
    for (int v = 0; v <= 1; v++)
      if (count(l, v) > count(l, best)) best = v;
    out = remap(l, (best == -1) ? 1 : -1, (best == 0) ? 1 : 0, best);
    return best;
  endfunction

  // SORT: returns the permutation number
  function automatic int sort(line_t l, output line_t out);
    int lv [3] = '{-1, 0, 1};
    int tmp, p;
    for (int pass = 0; pass < 2; pass++)
      for (int j = 0; j < 2; j++)
        if (count(l, lv[j]) > count(l, lv[j+1])) begin
          tmp = lv[j]; lv[j] = lv[j+1]; lv[j+1] = tmp;
        end
    p = -1;
    for (int r = 0; r < 6; r++)
      if (perm_row(r, 0) == lv[0] && perm_row(r, 1) == lv[1] && perm_row(r, 2) == lv[2]) p = r;
    // least -> -1, middle -> 0, most -> +1
    begin
      int to [3];
      for (int k = 0; k < 3; k++) to[lv[k] + 1] = k - 1;
      out = remap(l, to[0], to[1], to[2]);
    end
    return p;
  endfunction

  // Decoders: mode 0 DBI, 1 MF (flag = level + 1), 2 SORT
  function automatic line_t decode(int mode, int flag, line_t l);
    if (mode == 0) return flag[0] ? remap(l, 1, 0, -1) : l;
    if (mode == 1) begin
      int m = flag - 1;  // most frequent level, now sent as +1
      return remap(l, (m == -1) ? 1 : -1, (m == 0) ? 1 : 0, m);
    end
    begin
      // sent level k-1 came from perm_row(flag, k)
      return remap(l, perm_row(flag, 0), perm_row(flag, 1), perm_row(flag, 2));
    end
  endfunction

  // Inverse of modulate: rebuilds the three words from two lines. Returns 0
  // if a column holds the unused pair [0, 0].
  function automatic bit demodulate(line_t l, output logic [7:0] x, output logic [7:0] y,
                                    output logic [7:0] z);
    bit ok = 1;
    for (int i = 0; i < 8; i++) begin
      int t = 3 * (l[0][i] + 1) + (l[1][i] + 1);
      int c = (t < 4) ? t : t - 1;
      if (t == 4) ok = 0;
      x[i] = c[2]; y[i] = c[1]; z[i] = c[0];
    end
    return ok;
  endfunction

  // 2-bit RTL code <-> level
  function automatic int lvl(logic [1:0] c);
    return int'(c) - 1;
  endfunction

  function automatic logic [1:0] code(int v);
    return 2'(v + 1);
  endfunction

endpackage
