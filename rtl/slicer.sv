// slicer: soft-boundary slicer of one PAM dimension (Fig. 6 of the paper).
//
// Given u = E*x1R + F*x1I (or E*x1I - F*x1R for the imaginary part) and the
// per-hypothesis max levels lo[i] and min levels hi[i] from boundary_gen,
// the left comparator bank tests u >= lo[i] for every hypothesis, the right
// bank tests u < hi[i], and the final stage picks the one hypothesis that
// passes both (eq. 29). boundary_gen guarantees that exactly one index does;
// a priority encoder resolves the index so that the output stays defined
// even for out-of-range inputs. Combinational.
//
// Interface: u, lo[16], hi[16] in; idx = index of the sliced level (level
// p = 2*idx - (P-1)). The core that instantiates the slicers checks with an
// assertion that the selected level's range holds u.
module slicer
  import mimo_pkg::*;
(
  input  dist_t            u,
  input  dist_t            lo [PMAX],
  input  dist_t            hi [PMAX],
  output pidx_t            idx
);

  logic [PMAX-1:0] hits;

  always_comb begin
    for (int i = 0; i < PMAX; i++)
      hits[i] = (u >= lo[i]) && (u < hi[i]);
    idx = '0;
    for (int i = PMAX - 1; i >= 0; i--)
      if (hits[i]) idx = pidx_t'(i);
  end

endmodule
