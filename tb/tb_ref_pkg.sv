// tb_ref_pkg: bit-exact reference arithmetic for the testbenches.
//
// Computes what the device should produce with plain integer multiplies and
// loops, independent of the CSD shift-add circuits: matrix-vector products
// from the weight codes of ita_pkg::weight(), the hard-Swish gate, and whole
// layers. All values are ints; vectors are dynamic arrays.
package tb_ref_pkg;
  import ita_pkg::*;

  typedef int vec_t[];

  function automatic int sat(int v, int w);
    int hi, lo;
    hi = (1 <<< (w - 1)) - 1;
    lo = -(1 <<< (w - 1));
    return (v > hi) ? hi : (v < lo) ? lo : v;
  endfunction

  // y[r] = sat(floor(sum_c x[c] * q[r][c] / 8), outw)
  function automatic vec_t matvec(int layer, int mat, vec_t x, int nout, int outw);
    vec_t y;
    y = new[nout];
    for (int r = 0; r < nout; r++) begin
      int acc;
      acc = 0;
      for (int c = 0; c < x.size(); c++)
        acc += x[c] * int'(weight(layer, mat, r, c));
      y[r] = sat(acc >>> 3, outw);
    end
    return y;
  endfunction

  // hard-Swish gate: s = a*clamp(a+48,0,96)/96 (toward zero); g = sat((s*b)>>>4)
  function automatic int gate1(int a, int b);
    int t, s;
    t = a + 48;
    if (t < 0) t = 0;
    if (t > 96) t = 96;
    s = (a * t) / 96;
    return sat((s * b) >>> 4, 8);
  endfunction

  function automatic vec_t qkv(int layer, int mat, vec_t x, int d);
    return matvec(layer, mat, x, d, 16);
  endfunction

  // FFN of one layer applied to an INT16 attention output
  function automatic vec_t ffn(int layer, vec_t attn, int d, int f);
    vec_t a, h1, h3, g;
    a = new[attn.size()];
    foreach (a[i]) a[i] = sat(attn[i], 8);
    h1 = matvec(layer, int'(MAT_W1), a, f, 8);
    h3 = matvec(layer, int'(MAT_W3), a, f, 8);
    g = new[f];
    foreach (g[i]) g[i] = gate1(h1[i], h3[i]);
    return matvec(layer, int'(MAT_W2), g, d, 8);
  endfunction

  // pseudo-random INT8 value
  function automatic int rnd8();
    return int'($urandom_range(255)) - 128;
  endfunction

endpackage
