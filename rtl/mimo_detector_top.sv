// mimo_detector_top: configurable soft-input soft-output MIMO detector.
//
// What it does. For every received vector (one OFDM tone) the detector
// takes the per-pass constants A..H prepared by an external DSP (QL / WL
// decomposition, Sec. IV), the prior LLRs of every layer from the channel
// decoder, and returns max-log MAP output LLRs of up to 4 layers with
// BPSK..256-QAM each (eq. 42). In MU-MIMO mode it instead classifies the
// constellation of a co-scheduled interferer over a window of K tones
// (Fig. 9) and returns the LLRs of the desired layer computed with the
// estimated interferer constellation.
//
// How it works.
//   wld_ctrl        orders the passes of one vector: list m (layer m
//                   enumerated), sliced layers n = m+1.. (mod N).
//   map2x2_core     one pass per cycle, 6 pipeline stages: 256 candidate
//                   distances of the pass with the sliced layer solved by
//                   soft-boundary slicing.
//   dist_accum      adds the N-1 passes of a list (first pass includes f1).
//   list_buffer     two banks: sliced symbols of every pass and the
//                   completed lists of distances.
//   llr_proc        after the last list of a vector, reads the lists one per
//                   cycle and forms the output LLRs as differences of
//                   masked minima.
//   const_estimator MU mode: accumulates the minimum distance of every
//                   hypothesis list over K tones, adds the complexity bias
//                   and picks the smallest.
// Consecutive vectors use alternate banks, so the LLR read-out of one vector
// overlaps the passes of the next.
//
// Interface. mu, nlayers (2..4), mods[] and bias_unit are configuration and
// may only change between vectors (tones); the layer count and modulations
// travel with the passes, so the next vector's configuration may be applied
// at once. in_valid / coefs / lam_in carry one pass
// per cycle in the order given by pass_list / pass_layer, taken when
// in_ready is high (it drops for one or two cycles when a 2-layer vector
// follows a longer one); lam_in is sampled
// on the first pass of a vector. llr_valid pulses once per vector with
// llr[layer][bit] (LTE bit order, 0 for unused bits / layers; in MU mode
// only layer 0 is meaningful). est_valid pulses at the end of each K-tone
// window with est_mod and the four biased totals. The estimate used for the
// LLRs of a tone is the newest one available; before the first window ends
// it is 256-QAM.
//
// Timing. The core accepts one pass per cycle: N(N-1) cycles per vector in
// WLD mode (2 for 2x2, 12 for 4x4), 4 per tone in MU mode. llr_valid comes
// CORE_LAT + 2 + nlists cycles after the last pass of a vector.
//
// Paper versus design. The datapath structure, the 6-stage core, the pass
// accumulation and eq. (42) follow the paper; the pass order, the bank
// scheme, the read-out schedule, the default estimate and the MU-mode
// LLR policy are this design's.
module mimo_detector_top
  import mimo_pkg::*;
#(
  parameter int K_TONES = 12     // MU classification window (paper: K = 12)
)(
  input  logic       clk,
  input  logic       rst_n,
  // configuration
  input  logic       mu,
  input  logic [2:0] nlayers,
  input  mod_t       mods      [NLMAX],
  input  coef_t      bias_unit,
  // pass input
  input  logic       in_valid,
  input  coefs_t     coefs,
  input  llr_t       lam_in    [NLMAX][QBITS],
  output logic [1:0] pass_list,
  output logic [1:0] pass_layer,
  output logic       in_ready,
  // soft output
  output logic       llr_valid,
  output llro_t      llr       [NLMAX][QBITS],
  // MU-MIMO classification
  output logic       est_valid,
  output mod_t       est_mod,
  output dist_t      est_totals [NHYP]
);

  // ------------------------------------------------------------ sequencer
  logic  cv;
  mod_t  mod1, mod2;
  llr_t  lam1 [QBITS], lam2 [QBITS];
  tag_t  ctag;

  wld_ctrl u_ctrl (
    .clk, .rst_n, .in_valid, .mu, .nlayers, .mods, .lam_in,
    .pass_list, .pass_layer, .in_ready,
    .core_valid(cv), .mod1, .mod2, .lam1, .lam2, .tag(ctag)
  );

  // ------------------------------------------------------------ core
  logic  pv;
  tag_t  ptag;
  dist_t pd [NCAND];
  sym_t  ps [NCAND];

  map2x2_core u_core (
    .clk, .rst_n, .in_valid(cv), .coefs, .mod1, .mod2, .lam1, .lam2,
    .tag_in(ctag), .out_valid(pv), .tag_out(ptag), .dists(pd), .sym(ps)
  );

  // ------------------------------------------------------------ accumulate
  logic  lv;
  tag_t  ltag;
  dist_t ld [NCAND];

  dist_accum u_acc (
    .clk, .rst_n, .in_valid(pv), .in_tag(ptag), .in_dists(pd),
    .out_valid(lv), .out_tag(ltag), .out_dists(ld)
  );

  // ------------------------------------------------------------ buffer
  logic       rd_bank;
  logic [1:0] rd_list;
  dist_t      rd_dist [NCAND];
  sym_t       rd_sym  [NCAND][NLMAX];

  list_buffer u_buf (
    .clk,
    .sym_we(pv), .sym_bank(ptag.bank), .sym_list(ptag.list),
    .sym_layer(ptag.layer), .sym_in(ps),
    .dist_we(lv), .dist_bank(ltag.bank), .dist_list(ltag.list), .dist_in(ld),
    .rd_bank, .rd_list, .rd_dist, .rd_sym
  );

  // ------------------------------------------------------------ MU estimate
  logic [1:0] est_hyp;

  const_estimator #(.K_TONES(K_TONES)) u_est (
    .clk, .rst_n, .in_valid(lv && ltag.mu), .hyp(ltag.list), .in_dists(ld),
    .bias_unit(dist_t'(bias_unit)),
    .est_valid, .est_hyp, .totals(est_totals)
  );

  logic [1:0] est_cur;   // newest estimate, 256-QAM before the first window

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)         est_cur <= 2'd3;
    else if (est_valid) est_cur <= est_hyp;

  assign est_mod = mod_t'(3'(MOD_QPSK) + 3'(est_hyp));

  // ------------------------------------------------------------ LLR read-out
  // The read-out of a vector overlaps the passes of the next ones, so the
  // vector's configuration comes with its last list's tag.
  logic       st;
  logic       st_bank, st_mu;
  logic [2:0] st_nl;
  mod_t       st_mods [NLMAX];
  mod_t       pmods [NLMAX];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      st <= 1'b0; st_bank <= 1'b0; st_mu <= 1'b0; st_nl <= 3'd2;
      for (int n = 0; n < NLMAX; n++) st_mods[n] <= MOD_QPSK;
    end else begin
      st <= lv && ltag.vec_last;
      if (lv && ltag.vec_last) begin
        st_bank <= ltag.bank;
        st_mu   <= ltag.mu;
        st_nl   <= ltag.nl;
        for (int n = 0; n < NLMAX; n++) st_mods[n] <= ltag.mods[n];
      end
    end

  always_comb begin
    pmods = st_mods;
    if (st_mu) pmods[1] = mod_t'(3'(MOD_QPSK) + 3'(est_valid ? est_hyp : est_cur));
  end

  llr_proc u_llr (
    .clk, .rst_n, .start(st), .bank(st_bank),
    .first_list(st_mu ? (est_valid ? est_hyp : est_cur) : 2'd0),
    .nlists(st_mu ? 3'd1 : st_nl),
    .nlayers(st_mu ? 3'd1 : st_nl),
    .mu(st_mu), .mods(pmods),
    .rd_bank, .rd_list, .rd_dist, .rd_sym,
    .out_valid(llr_valid), .llr
  );

  // configuration must be legal while passes are accepted
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
    end else if (in_valid) begin
      a_nlayers: assert (mu || (nlayers >= 3'd2 && nlayers <= 3'd4))
        else $error("nlayers out of range");
    end

  // a completed list leaves the accumulator on its last pass; MU lists are
  // single passes that slice layer 1
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
    end else if (lv) begin
      a_list: assert (ltag.last && (!ltag.mu || (ltag.first && ltag.layer == 2'd1)))
        else $error("malformed list tag");
    end

endmodule
