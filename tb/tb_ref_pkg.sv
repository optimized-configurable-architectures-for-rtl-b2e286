// tb_ref_pkg: behavioural reference of the detector arithmetic, written
// independently of the RTL helpers. The Gray labels are built from the
// binary-reflected Gray code of the level index, inverted (index 0 = most
// negative level = all ones), which reproduces the LTE tables; minima are
// found by exhaustive search over all levels in 64-bit arithmetic.
package tb_ref_pkg;

  function automatic int kre(int mod);
    return (mod == 0) ? 1 : (mod >= 4 ? 4 : mod);
  endfunction

  function automatic int kim(int mod);
    return (mod == 0) ? 0 : (mod >= 4 ? 4 : mod);
  endfunction

  function automatic int lvl(int k, int i);
    return 2 * i - ((1 << k) - 1);
  endfunction

  // bit j (j = 0 first / sign bit) of the label of level index i
  function automatic int gbit(int k, int i, int j);
    int g;
    g = (i ^ (i >> 1)) ^ ((1 << k) - 1);
    return (g >> (k - 1 - j)) & 1;
  endfunction

  function automatic longint biasd(int k, int i, int l0, int l1, int l2, int l3);
    int lam [4];
    longint s;
    lam = '{l0, l1, l2, l3};
    s = 0;
    for (int j = 0; j < k; j++) s += (gbit(k, i, j) != 0) ? -longint'(lam[j]) : longint'(lam[j]);
    return s;
  endfunction

  function automatic longint pam(int k, longint k2, longint k1, int l0, int l1, int l2, int l3, int i);
    longint l;
    l = lvl(k, i);
    return k2 * l * l + k1 * l - biasd(k, i, l0, l1, l2, l3);
  endfunction

  // exhaustive slicing: level index minimising u*p + B p^2 + G p - b^T lambda,
  // lowest index on ties
  function automatic void slice(int k, longint u, longint b, longint g,
                                int l0, int l1, int l2, int l3,
                                output int idx, output longint val);
    longint v;
    idx = 0;
    val = 0;
    for (int i = 0; i < (1 << k); i++) begin
      v = u * lvl(k, i) + pam(k, b, g, l0, l1, l2, l3, i);
      if (i == 0 || v < val) begin
        val = v;
        idx = i;
      end
    end
  endfunction

  // one pass of the 2x2 core for candidate index e; c = {A,B,C,D,E,F,G,H}
  function automatic void core_ref(longint c [8], int mod1, int mod2,
                                   int lam1 [8], int lam2 [8], bit first, int e,
                                   output bit valid, output longint d,
                                   output int xr, output int xi);
    int er, ei, k1r, k1i, k2r, k2i;
    longint x1r, x1i, ur, ui, vr, vi;
    er = e / 16; ei = e % 16;
    k1r = kre(mod1); k1i = kim(mod1); k2r = kre(mod2); k2i = kim(mod2);
    valid = (er < (1 << k1r)) && (ei < (1 << k1i));
    d = 0; xr = 0; xi = 0;
    if (!valid) return;
    x1r = lvl(k1r, er); x1i = lvl(k1i, ei);
    ur = c[4] * x1r + c[5] * x1i;
    ui = c[4] * x1i - c[5] * x1r;
    slice(k2r, ur, c[1], c[6], lam2[0], lam2[2], lam2[4], lam2[6], xr, vr);
    slice(k2i, ui, c[1], c[7], lam2[1], lam2[3], lam2[5], lam2[7], xi, vi);
    d = vr + vi;
    if (first)
      d += pam(k1r, c[0], c[2], lam1[0], lam1[2], lam1[4], lam1[6], er)
         + pam(k1i, c[0], c[3], lam1[1], lam1[3], lam1[5], lam1[7], ei);
  endfunction

endpackage
