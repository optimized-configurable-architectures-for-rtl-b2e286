// const_estimator: interferer constellation estimation for MU-MIMO
// (the "Constellation estimation" box of Fig. 9 of the paper).
//
// The co-scheduled user's constellation X_I is estimated with the max-log
// rule of eq. (49):
//     X_I = argmin_{X in {4,16,64,256-QAM}}  K log|X| + sum_k min_x d(x[k])
// For every tone the 2x2 core is run once per hypothesis (lambda = 0); the
// estimator takes the minimum of each returned list, accumulates it over K
// tones per hypothesis, adds the bias term of the hypothesis and selects
// the smallest total. The bias terms are the multiples 2, 4, 6, 8 of one
// input word bias_unit (Fig. 9 prints them as 2K/log(2) ... 8K/log(2); in
// eq. (49) they are K*ln(2^q)); bias_unit is supplied by the host in the
// same units as the core's unscaled distances, i.e. K*ln(2)*sigma^2 in the
// reading of eq. (49). The hypothesis order h = 0..3 is QPSK, 16-, 64- and
// 256-QAM.
//
// Interface: in_valid with hyp and the 256 distances of one list. The
// list with hyp = 3 closes a tone; after K_TONES tones est_valid pulses
// (registered, one cycle after the closing list) with the selected
// hypothesis and the accumulators restart. Ties pick the smaller
// constellation.
module const_estimator
  import mimo_pkg::*;
#(
  parameter int K_TONES = 12     // paper: K = 12 tones (one PRB)
)(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  logic [1:0] hyp,
  input  dist_t      in_dists [NCAND],
  input  dist_t      bias_unit,
  output logic       est_valid,
  output logic [1:0] est_hyp,
  output dist_t      totals [NHYP]
);

  dist_t acc [NHYP];
  dist_t lmin;
  dist_t nacc [NHYP];
  dist_t tot  [NHYP];
  logic [$clog2(K_TONES+1)-1:0] tone;
  logic       win_end;
  logic [1:0] best;

  always_comb begin
    lmin = DIST_MAX;
    for (int e = 0; e < NCAND; e++)
      if (in_dists[e] < lmin) lmin = in_dists[e];
    for (int h = 0; h < NHYP; h++)
      nacc[h] = (2'(h) == hyp) ? sat_add(acc[h], lmin) : acc[h];
    // bias: (2h+2) * bias_unit
    for (int h = 0; h < NHYP; h++)
      tot[h] = sat_add(nacc[h], bias_unit * dist_t'(2 * h + 2));
    best = 2'd0;
    for (int h = 1; h < NHYP; h++)
      if (tot[h] < tot[best]) best = 2'(h);
    win_end = in_valid && (hyp == 2'd3) && (int'(tone) == K_TONES - 1);
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      for (int h = 0; h < NHYP; h++) acc[h] <= '0;
      tone      <= '0;
      est_valid <= 1'b0;
      est_hyp   <= 2'd0;
    end else begin
      est_valid <= win_end;
      if (in_valid) begin
        if (win_end) begin
          for (int h = 0; h < NHYP; h++) acc[h] <= '0;
          tone    <= '0;
          est_hyp <= best;
        end else begin
          acc <= nacc;
          if (hyp == 2'd3) tone <= tone + 1'b1;
        end
      end
    end

  always_ff @(posedge clk)
    if (win_end) totals <= tot;

endmodule
