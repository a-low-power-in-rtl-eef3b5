// tb_ref_pkg: reference models used by the end-to-end testbenches.
//
// mrd4_ref runs the M-RD4 algorithm literally on an integer bit array (append
// a 0 below the LSB, extend with 0 above the MSB, rewrite 0100 -> 0011 and
// 1011 -> 1100 on each 4-bit window, z = -2 t2 + t1 + t0) and counts the two
// rewrites. mcsd_changes tells whether the M-CSD rewrite alters the plain
// differential split of a weight (a string of three or more ones below the
// top string, or a 11011 pattern); it is used only to count how often the
// weight path exercised the rewrite.
package tb_ref_pkg;

  function automatic void mrd4_ref(input int x, input int nbits, output int z [],
                                   output int n_f, output int n_g);
    int t [];
    int m, i, j;
    m = (nbits + 1) / 2;
    t = new[2 * m + 4];
    foreach (t[k]) t[k] = 0;
    for (int k = 0; k < nbits; k++) t[k+1] = (x >> k) & 1;
    z = new[m];
    n_f = 0; n_g = 0;
    i = 0; j = 0;
    while (j < m) begin
      if (t[i+3] == 0 && t[i+2] == 1 && t[i+1] == 0 && t[i] == 0) begin
        t[i+2] = 0; t[i+1] = 1; t[i] = 1; n_f++;
      end else if (t[i+3] == 1 && t[i+2] == 0 && t[i+1] == 1 && t[i] == 1) begin
        t[i+2] = 1; t[i+1] = 0; t[i] = 0; n_g++;
      end
      z[j] = -2 * t[i+2] + t[i+1] + t[i];
      i += 2; j++;
    end
  endfunction

  function automatic int digits_value(input int z []);
    int v = 0;
    for (int j = z.size() - 1; j >= 0; j--) v = 4 * v + z[j];
    return v;
  endfunction

  function automatic bit mcsd_changes(input int w, input int nbits);
    int mag, top, run;
    mag = (w < 0) ? -w : w;
    // top string: leading ones from the MSB down to the first zero
    top = nbits - 1;
    while (top > 0 && ((mag >> top) & 1)) top--;
    run = 0;
    for (int p = 0; p < top; p++) begin
      run = ((mag >> p) & 1) ? run + 1 : 0;
      if (run >= 3) return 1'b1;
      if (p >= 1 && p + 3 <= nbits - 1 && ((mag >> (p - 1)) & 5'b11111) == 5'b11011) return 1'b1;
    end
    return 1'b0;
  endfunction

  function automatic int floor_div(input longint a, input int sh);
    longint d = longint'(1) << sh;
    return (a >= 0) ? int'(a / d) : -int'((-a + d - 1) / d);
  endfunction

  function automatic int saturate(input int v, input int bits);
    int hi = (1 << (bits - 1)) - 1;
    int lo = -(1 << (bits - 1));
    return (v > hi) ? hi : (v < lo) ? lo : v;
  endfunction

endpackage
