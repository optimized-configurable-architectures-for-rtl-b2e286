// map2x2_core: parallel one-sided 2x2 soft-input MAP detector core
// (dashed box of Fig. 4 of the paper).
//
// For every symbol x1 of the enumerated layer (up to 256 for 256-QAM) the
// core evaluates, in parallel and without general multipliers,
//     d(x) = [f1R(x1R) + f1I(x1I)]                         (if tag.first)
//          + min_x2R f2R(x2R | x1) + min_x2I f2I(x2I | x1)  (eq. 15)
// where the two minimisations are done by soft-boundary slicing (Sec. III-C)
// instead of exhaustive search: the boundaries depend only on B, G/H and the
// sliced layer's priors, so they are formed once (boundary_gen) and shared
// by all 2 x 256 slicers. The sliced level then selects the multiple
// u * x2hat (shift-add of u) and the x1-independent metric table entry
// B x2^2 + G x2 - b^T lambda. With tag.first = 0 the f1 term is left out,
// which is the "simple modification" that lets the same core accumulate the
// sliced layers of an N-layer WL decomposition pass by pass.
//
// Pipeline (6 register stages, as the paper's core; the split between
// stages is this design's):
//   1 input register
//   2 metric tables (4 x pam_metric_gen), boundaries (2 x boundary_gen),
//     odd multiples E*|x|, F*|x|
//   3 per candidate: f1 = f1R + f1I, uR = E x1R + F x1I, uI = E x1I - F x1R
//   4 slicing (2 x 256 slicer)
//   5 f2R = uR*x2R + table, f2I likewise
//   6 d = f1 + f2R + f2I
// One pass is accepted every cycle; out_valid follows in_valid by 6 cycles.
//
// Interface: coefs = A..H of the pass (A, C, D of the enumerated layer;
// B, E..H of the sliced layer); mod1 / mod2 = constellation of the
// enumerated / sliced layer; lam1 / lam2 = their 8 prior LLRs in LTE bit
// order (b0 real MSB, b1 imaginary MSB, ...). Candidate e = {x1R index,
// x1I index}; dists[e] is DIST_MAX for indices outside the constellation.
// sym[e] = {x2R index, x2I index} of the sliced symbol.
module map2x2_core
  import mimo_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  coefs_t coefs,
  input  mod_t   mod1,
  input  mod_t   mod2,
  input  llr_t   lam1 [QBITS],
  input  llr_t   lam2 [QBITS],
  input  tag_t   tag_in,
  output logic   out_valid,
  output tag_t   tag_out,
  output dist_t  dists [NCAND],
  output sym_t   sym  [NCAND]
);

  logic [CORE_LAT-1:1] v;   // valid of stages 1..5 (stage 6 is out_valid)
  tag_t tg [1:5];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      v <= '0;
      out_valid <= 1'b0;
    end else begin
      v <= {v[CORE_LAT-2:1], in_valid};
      out_valid <= v[CORE_LAT-1];
    end

  // ---------------------------------------------------------------- stage 1
  coefs_t c1;
  logic [2:0] k1r, k1i, k2r, k2i;
  llr_t l1r [KMAX], l1i [KMAX], l2r [KMAX], l2i [KMAX];

  always_ff @(posedge clk) begin
    c1  <= coefs;
    k1r <= 3'(kbits_re(mod1));
    k1i <= 3'(kbits_im(mod1));
    k2r <= 3'(kbits_re(mod2));
    k2i <= 3'(kbits_im(mod2));
    for (int j = 0; j < KMAX; j++) begin
      l1r[j] <= lam1[2*j];
      l1i[j] <= lam1[2*j+1];
      l2r[j] <= lam2[2*j];
      l2i[j] <= lam2[2*j+1];
    end
    tg[1] <= tag_in;
  end

  // ---------------------------------------------------------------- stage 2
  dist_t f1r_c [PMAX], f1i_c [PMAX], c2r_c [PMAX], c2i_c [PMAX];
  dist_t lor_c [PMAX], hir_c [PMAX], loi_c [PMAX], hii_c [PMAX];

  pam_metric_gen u_f1r (.kbits(k1r), .k2(c1.a), .k1(c1.c), .lam(l1r), .m(f1r_c));
  pam_metric_gen u_f1i (.kbits(k1i), .k2(c1.a), .k1(c1.d), .lam(l1i), .m(f1i_c));
  pam_metric_gen u_f2r (.kbits(k2r), .k2(c1.b), .k1(c1.g), .lam(l2r), .m(c2r_c));
  pam_metric_gen u_f2i (.kbits(k2i), .k2(c1.b), .k1(c1.h), .lam(l2i), .m(c2i_c));
  boundary_gen   u_bdr (.kbits(k2r), .kb(c1.b), .kg(c1.g), .lam(l2r), .lo(lor_c), .hi(hir_c));
  boundary_gen   u_bdi (.kbits(k2i), .kb(c1.b), .kg(c1.h), .lam(l2i), .lo(loi_c), .hi(hii_c));

  dist_t f1r2 [PMAX], f1i2 [PMAX], c2r2 [PMAX], c2i2 [PMAX];
  dist_t lor2 [PMAX], hir2 [PMAX], loi2 [PMAX], hii2 [PMAX];
  dist_t emul2 [PMAX/2], fmul2 [PMAX/2];
  logic [2:0] k1r2, k1i2, k2r2, k2i2;

  always_ff @(posedge clk) begin
    f1r2 <= f1r_c; f1i2 <= f1i_c; c2r2 <= c2r_c; c2i2 <= c2i_c;
    lor2 <= lor_c; hir2 <= hir_c; loi2 <= loi_c; hii2 <= hii_c;
    for (int j = 0; j < PMAX/2; j++) begin
      emul2[j] <= mul_odd(dist_t'(c1.e), 4'(2*j+1));
      fmul2[j] <= mul_odd(dist_t'(c1.f), 4'(2*j+1));
    end
    k1r2 <= k1r; k1i2 <= k1i; k2r2 <= k2r; k2i2 <= k2i;
    tg[2] <= tg[1];
  end

  // ---------------------------------------------------------------- stage 3
  // Signed multiple of a table of odd multiples: x * K for x = level(idx).
  function automatic dist_t pick_mult(dist_t tbl [PMAX/2], logic [2:0] k, pidx_t idx);
    int lv;
    lv = 2 * int'(idx) - ((1 << k) - 1);
    if (lv == 0)     return '0;
    else if (lv > 0) return  tbl[(lv - 1) / 2];
    else             return -tbl[(-lv - 1) / 2];
  endfunction

  dist_t ur3 [NCAND], ui3 [NCAND], f13 [NCAND];
  logic  cv3 [NCAND];
  dist_t c2r3 [PMAX], c2i3 [PMAX];
  dist_t lor3 [PMAX], hir3 [PMAX], loi3 [PMAX], hii3 [PMAX];
  logic [2:0] k2r3, k2i3;

  always_ff @(posedge clk) begin
    for (int e = 0; e < NCAND; e++) begin
      automatic pidx_t er = pidx_t'(e / PMAX);
      automatic pidx_t ei = pidx_t'(e % PMAX);
      ur3[e] <= pick_mult(emul2, k1r2, er) + pick_mult(fmul2, k1i2, ei);
      ui3[e] <= pick_mult(emul2, k1i2, ei) - pick_mult(fmul2, k1r2, er);
      f13[e] <= f1r2[er] + f1i2[ei];
      cv3[e] <= (int'(er) < (1 << k1r2)) && (int'(ei) < (1 << k1i2));
    end
    c2r3 <= c2r2; c2i3 <= c2i2;
    lor3 <= lor2; hir3 <= hir2; loi3 <= loi2; hii3 <= hii2;
    k2r3 <= k2r2; k2i3 <= k2i2;
    tg[3] <= tg[2];
  end

  // ---------------------------------------------------------------- stage 4
  pidx_t xr_c [NCAND], xi_c [NCAND];

  for (genvar e = 0; e < NCAND; e++) begin : g_slc
    slicer u_sr (.u(ur3[e]), .lo(lor3), .hi(hir3), .idx(xr_c[e]));
    slicer u_si (.u(ui3[e]), .lo(loi3), .hi(hii3), .idx(xi_c[e]));
  end

  // the sliced level's range must hold u for valid passes
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
    end else if (v[3])
      for (int e = 0; e < NCAND; e++)
        a_slice: assert (ur3[e] >= lor3[xr_c[e]] && ur3[e] < hir3[xr_c[e]]
                      && ui3[e] >= loi3[xi_c[e]] && ui3[e] < hii3[xi_c[e]])
          else $error("slicer range miss at candidate %0d", e);

  pidx_t xr4 [NCAND], xi4 [NCAND];
  dist_t ur4 [NCAND], ui4 [NCAND], f14 [NCAND];
  logic  cv4 [NCAND];
  dist_t c2r4 [PMAX], c2i4 [PMAX];
  logic [2:0] k2r4, k2i4;

  always_ff @(posedge clk) begin
    xr4 <= xr_c; xi4 <= xi_c;
    ur4 <= ur3; ui4 <= ui3; f14 <= f13; cv4 <= cv3;
    c2r4 <= c2r3; c2i4 <= c2i3;
    k2r4 <= k2r3; k2i4 <= k2i3;
    tg[4] <= tg[3];
  end

  // ---------------------------------------------------------------- stage 5
  // u * x2hat: select the shift-add multiple of |x2hat| and apply the sign.
  function automatic dist_t u_times_level(dist_t u, logic [2:0] k, pidx_t idx);
    int lv;
    lv = 2 * int'(idx) - ((1 << k) - 1);
    if (lv == 0)     return '0;
    else if (lv > 0) return  mul_odd(u, 4'(lv));
    else             return -mul_odd(u, 4'(-lv));
  endfunction

  dist_t f15 [NCAND], f2r5 [NCAND], f2i5 [NCAND];
  logic  cv5 [NCAND];
  sym_t  s5 [NCAND];

  always_ff @(posedge clk) begin
    for (int e = 0; e < NCAND; e++) begin
      f2r5[e] <= u_times_level(ur4[e], k2r4, xr4[e]) + c2r4[xr4[e]];
      f2i5[e] <= u_times_level(ui4[e], k2i4, xi4[e]) + c2i4[xi4[e]];
      s5[e]   <= {xr4[e], xi4[e]};
    end
    f15 <= f14; cv5 <= cv4;
    tg[5] <= tg[4];
  end

  // ---------------------------------------------------------------- stage 6
  always_ff @(posedge clk) begin
    for (int e = 0; e < NCAND; e++) begin
      dists[e] <= !cv5[e] ? DIST_MAX
               : (tg[5].first ? f15[e] : '0) + f2r5[e] + f2i5[e];
      sym[e]  <= s5[e];
    end
    tag_out <= tg[5];
  end

endmodule
