// wld_ctrl: pass sequencer of the time-multiplexed detector core.
//
// One 2x2 core serves N = 2..4 layers by running one pass per (WL
// decomposition m, sliced layer n) pair: the m-th decomposition enumerates
// layer m and slices the other layers, taken in circular order
// n = m+1, m+2, ... (mod N), matching the circular column shift of the
// paper's Sec. IV-B. A received vector therefore takes N(N-1) passes:
// 2 for 2x2 (the 2-sided detector of Fig. 7 folded onto one core) and 12
// for 4x4, which with one pass per cycle at 275 MHz gives the paper's
// 2.2 Gb/s and 733 Mb/s for 256-QAM. The paper states the time multiplexing
// but not the pass order or this controller; both are this design's.
//
// In MU-MIMO classification mode (mu = 1) a tone takes four passes, one per
// interferer hypothesis h (QPSK, 16, 64, 256-QAM) with layer 0 enumerated,
// layer 1 sliced with the hypothesis' constellation and zero priors
// (Fig. 9: lambda = 0).
//
// The host (the DSP of the paper) must deliver the constants of the passes
// in exactly this order with in_valid; a pass is taken when in_valid and
// in_ready are both high. in_ready drops only for the last pass of a
// vector that would end before the LLR read-out of the previous vector
// (one cycle per list) is over, which happens for a 2-layer vector that
// follows a 3- or 4-layer vector; pass_list /
// pass_layer tell which pass is expected next. Prior LLRs of all layers are
// taken from lam_in at the first pass of a vector and held for its other
// passes. The outputs to the core are combinational. The bank bit toggles
// after every vector (tone) so that consecutive vectors use alternate
// list-buffer banks. The tag also carries the vector's layer count and
// modulations, so that the LLR read-out, which overlaps later vectors, uses
// the configuration the vector was detected with.
module wld_ctrl
  import mimo_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  logic       mu,
  input  logic [2:0] nlayers,           // 2..4
  input  mod_t       mods   [NLMAX],
  input  llr_t       lam_in [NLMAX][QBITS],
  output logic [1:0] pass_list,
  output logic [1:0] pass_layer,
  output logic       in_ready,
  output logic       core_valid,
  output mod_t       mod1,
  output mod_t       mod2,
  output llr_t       lam1 [QBITS],
  output llr_t       lam2 [QBITS],
  output tag_t       tag
);

  logic [1:0] m, p;
  logic       bank;
  logic       vec_start;
  llr_t       lam_r [NLMAX][QBITS];
  logic [1:0] nl_m1;        // N - 1
  logic [1:0] layer;
  logic [1:0] cool;         // cycles until the next vector may complete
  logic       acc;          // pass accepted

  assign nl_m1     = 2'(nlayers - 3'd1);
  assign vec_start = (m == 2'd0) && (p == 2'd0);

  always_comb begin
    logic [2:0] sum;
    sum = 3'(m) + 3'(p) + 3'd1;
    layer = mu ? 2'd1 : 2'((sum >= nlayers) ? sum - nlayers : sum);
  end

  assign pass_list  = m;
  assign pass_layer = layer;
  // The LLR read-out of a vector takes one cycle per list; the last pass of
  // the following vector is held back until it is over.
  assign in_ready   = !(tag.vec_last && cool != 2'd0);
  assign acc        = in_valid && in_ready;
  assign core_valid = acc;

  always_comb begin
    tag.first    = mu ? 1'b1 : (p == 2'd0);
    tag.last     = mu ? 1'b1 : (p == nl_m1 - 2'd1);
    tag.bank     = bank;
    tag.list     = m;
    tag.layer    = layer;
    tag.vec_last = mu ? (m == 2'd3) : ((p == nl_m1 - 2'd1) && (m == nl_m1));
    tag.mu       = mu;
    tag.nl       = nlayers;
    for (int n = 0; n < NLMAX; n++) tag.mods[n] = mods[n];
    mod1 = mu ? mods[0] : mods[m];
    mod2 = mu ? mod_t'(3'(MOD_QPSK) + 3'(m)) : mods[layer];
    for (int b = 0; b < QBITS; b++) begin
      lam1[b] = mu ? '0 : (vec_start ? lam_in[m][b] : lam_r[m][b]);
      lam2[b] = mu ? '0 : (vec_start ? lam_in[layer][b] : lam_r[layer][b]);
    end
  end

  always_ff @(posedge clk)
    if (acc && vec_start) lam_r <= lam_in;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      m <= '0; p <= '0; bank <= 1'b0; cool <= '0;
    end else begin
      if (cool != 2'd0) cool <= cool - 2'd1;
      if (acc && tag.vec_last) begin
        m <= '0; p <= '0; bank <= ~bank;
        cool <= mu ? 2'd0 : 2'(nlayers - 3'd1);
      end else if (acc && (mu || tag.last)) begin
        m <= m + 2'd1; p <= '0;
      end else if (acc) begin
        p <= p + 2'd1;
      end
    end

endmodule
