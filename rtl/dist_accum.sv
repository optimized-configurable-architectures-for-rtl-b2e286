// dist_accum: distance accumulation stage ("support for higher-order
// layers", the adder with feedback in Figs. 4 and 8 of the paper).
//
// In N-layer mode the time-multiplexed core produces, for one WL
// decomposition m, one pass per sliced layer n != m: the first pass carries
// f1(x1) + min f_n, later passes only min f_n (eq. 35). This stage adds the
// passes of one decomposition element-wise over all 256 candidates:
//     acc = tag.first ? d : acc + d
// and presents the finished list g_m(x) when the pass tagged last arrives.
// The sum saturates and keeps DIST_MAX ("no candidate") sticky; saturation is
// this design's choice, the paper does not discuss overflow.
//
// Timing: out_valid / out_tag / out_dists are registered, one cycle after the
// last pass enters. A 2-layer pass is both first and last and passes through
// with one cycle of latency.
module dist_accum
  import mimo_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  tag_t  in_tag,
  input  dist_t in_dists [NCAND],
  output logic  out_valid,
  output tag_t  out_tag,
  output dist_t out_dists [NCAND]
);

  dist_t acc [NCAND];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid && in_tag.last;

  always_ff @(posedge clk)
    if (in_valid) begin
      for (int e = 0; e < NCAND; e++)
        acc[e] <= in_tag.first ? in_dists[e] : sat_add(acc[e], in_dists[e]);
      out_tag <= in_tag;
    end

  assign out_dists = acc;

endmodule
