// pam_metric_gen: metric table of one PAM dimension.
//
// For every level p_i of the configured PAM constellation it forms
//     m_i = K2 * p_i^2 + K1 * p_i - b(p_i)^T lambda
// which is f1R(x1R) = A x^2 + C x - b^T lambda (eq. 16) when K2 = A,
// K1 = C; f1I with K1 = D; and the x1-independent part
// B x^2 + G x - b^T lambda of f2R (eq. 18) when K2 = B, K1 = G (H for f2I).
// The paper builds the multiples 9A, 25A, ... 225A and C|x| with shift-add
// trees (Table I/III); here each multiple is a product of a coefficient by an
// elaboration-time constant, which synthesis reduces to the same shift-add
// form. The bias b^T lambda is the signed sum of the dimension's prior LLRs
// (eq. 22).
//
// Interface: kbits = bits of the dimension (0..4, P = 2**kbits levels);
// lam[j] = prior LLR of the j-th bit of the dimension; m[i] valid for
// i < P, zero above. Purely combinational; the core registers the result.
module pam_metric_gen
  import mimo_pkg::*;
(
  input  logic [2:0] kbits,
  input  coef_t      k2,
  input  coef_t      k1,
  input  llr_t       lam [KMAX],
  output dist_t      m   [PMAX]
);

  always_comb begin
    for (int i = 0; i < PMAX; i++) m[i] = '0;
    for (int kk = 0; kk <= KMAX; kk++) begin
      if (int'(kbits) == kk) begin
        for (int i = 0; i < (1 << kk); i++) begin
          m[i] = dist_t'(k2) * dist_t'(level(kk, i) * level(kk, i))
               + dist_t'(k1) * dist_t'(level(kk, i))
               - bias_dot(kk, i, lam[0], lam[1], lam[2], lam[3]);
        end
      end
    end
  end

endmodule
