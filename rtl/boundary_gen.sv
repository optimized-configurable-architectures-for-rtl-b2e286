// boundary_gen: soft decision boundaries of one sliced PAM dimension.
//
// Slicing a sliced-layer dimension means finding the level p_i that
// minimises  f(p) = u*p + B*p^2 + G*p - b(p)^T lambda  for a given
// u = E*x1R + F*x1I (eq. 18). For each pair of levels i < k the pair
// comparison f(p_i) <= f(p_k) reduces to a single threshold on u,
//     T(i,k) = -B*(p_i + p_k) - G - floor(D(i,k) / (k - i)),
//     D(i,k) = (b(p_i) - b(p_k))^T lambda / 2,
// which is the paper's boundary R(p_i,p_k) of eq. (27) (B*(p_i+p_k) minus
// the LLR combination divided by p_i - p_k) moved into the u domain ("minus
// G, with a change of sign", eq. (29)). Because u and the constants are
// integers, taking the floor of the division makes every pair decision
// exact; ties go to the lower level index. This exactness argument and the
// tie rule are this design's; the paper gives the real-valued boundaries.
//
// As in Fig. 6 the 16 hypotheses each get a max level over the boundaries
// with higher points and a min level over the boundaries with lower points:
//     lo[i] = max_{k>i} T(i,k),   hi[i] = min_{k<i} T(k,i),
// and p_i is the slicer output exactly when lo[i] <= u < hi[i].
// Missing bounds are DIST_MIN / DIST_MAX; levels above P get an empty range.
//
// The boundaries do not depend on x1, so one boundary_gen per dimension
// serves all 256 slicers of the core. Combinational.
module boundary_gen
  import mimo_pkg::*;
(
  input  logic [2:0] kbits,
  input  coef_t      kb,      // B (or B_n)
  input  coef_t      kg,      // G for the real part, H for the imaginary part
  input  llr_t       lam [KMAX],
  output dist_t      lo  [PMAX],
  output dist_t      hi  [PMAX]
);

  dist_t t [PMAX][PMAX];

  always_comb begin
    for (int i = 0; i < PMAX; i++) begin
      lo[i] = DIST_MAX;
      hi[i] = DIST_MIN;
      for (int k = 0; k < PMAX; k++) t[i][k] = '0;
    end
    for (int kk = 0; kk <= KMAX; kk++) begin
      if (int'(kbits) == kk) begin
        // boundaries of every pair i < k
        for (int i = 0; i < (1 << kk); i++)
          for (int k = i + 1; k < (1 << kk); k++)
            t[i][k] = -(dist_t'(kb) * dist_t'(level(kk, i) + level(kk, k)))
                      - dist_t'(kg)
                      - floor_div((bias_dot(kk, i, lam[0], lam[1], lam[2], lam[3])
                                 - bias_dot(kk, k, lam[0], lam[1], lam[2], lam[3])) >>> 1,
                                  k - i);
        // max level (over higher points) and min level (over lower points)
        for (int i = 0; i < (1 << kk); i++) begin
          lo[i] = DIST_MIN;
          hi[i] = DIST_MAX;
          for (int k = i + 1; k < (1 << kk); k++)
            if (t[i][k] > lo[i]) lo[i] = t[i][k];
          for (int k = 0; k < i; k++)
            if (t[k][i] < hi[i]) hi[i] = t[k][i];
        end
      end
    end
  end

endmodule
