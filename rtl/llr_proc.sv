// llr_proc: LLR processing stage (Figs. 4, 7, 8 and 9 of the paper).
//
// Computes the "WL-minimal" output LLRs of eq. (42):
//     L(n,j) = min_m min_{x in O_m, b_nj = +1} g_m(x)
//            - min_m min_{x in O_m, b_nj = -1} g_m(x)
// for every layer n and bit j, from the lists held in list_buffer. With two
// layers this is the exact max-log MAP LLR of eqs. (10) and (13); with one
// list it is the one-sided LLR of the enumerated layer.
//
// How: one list is read per cycle. For each candidate the symbol of every
// layer is known (the candidate index for the enumerated layer, the buffered
// sliced symbol for the others); its Gray bits decide into which of the two
// running minima of each bit the distance enters. After the last list the
// difference of the two minima is saturated to 17 bits. The paper only
// states the function here (and, for the enumerated layer, the row/column
// minima shortcut of Sec. V-B); the flat bit-by-bit minimum search is the
// simplest circuit that computes it and is this design's choice.
//
// Interface: start (one cycle) with bank, first_list, nlists (1..4),
// nlayers (layers whose LLRs are produced) and mu (list h enumerates layer 0
// instead of layer h). rd_* connect to list_buffer's read port. LLRs are
// indexed [layer][LTE bit b0..b7]; bits beyond a layer's constellation and
// layers >= nlayers read 0. out_valid pulses one cycle after the last list
// is read, i.e. nlists cycles after start.
module llr_proc
  import mimo_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic       bank,
  input  logic [1:0] first_list,
  input  logic [2:0] nlists,
  input  logic [2:0] nlayers,
  input  logic       mu,
  input  mod_t       mods [NLMAX],
  output logic       rd_bank,
  output logic [1:0] rd_list,
  input  dist_t      rd_dist [NCAND],
  input  sym_t       rd_sym  [NCAND][NLMAX],
  output logic       out_valid,
  output llro_t      llr [NLMAX][QBITS]
);

  logic       busy, bank_r, mu_r;
  logic [1:0] first_r, cnt, idx;
  logic [2:0] nlists_r, nlayers_r;
  logic       active, is_last;
  dist_t      run  [NLMAX][QBITS][2];
  dist_t      lmin [NLMAX][QBITS][2];
  dist_t      comb_min [NLMAX][QBITS][2];

  assign active  = start || busy;
  assign idx     = start ? 2'd0 : cnt;
  assign rd_list = start ? first_list : first_r + idx;
  assign rd_bank = start ? bank : bank_r;
  assign is_last = ({1'b0, idx} == (start ? nlists : nlists_r) - 3'd1);

  // minima of the list read in this cycle
  always_comb begin
    logic [1:0] enum_layer;
    sym_t       s;
    logic [KMAX-1:0] br, bi;
    enum_layer = (start ? mu : mu_r) ? 2'd0 : rd_list;
    for (int n = 0; n < NLMAX; n++)
      for (int b = 0; b < QBITS; b++) begin
        lmin[n][b][0] = DIST_MAX;
        lmin[n][b][1] = DIST_MAX;
      end
    for (int e = 0; e < NCAND; e++)
      for (int n = 0; n < NLMAX; n++) begin
        s  = (2'(n) == enum_layer) ? sym_t'(e) : rd_sym[e][n];
        br = gray_bits(kbits_re(mods[n]), int'(s[7:4]));
        bi = gray_bits(kbits_im(mods[n]), int'(s[3:0]));
        for (int j = 0; j < KMAX; j++) begin
          if (rd_dist[e] < lmin[n][2*j][br[j]])   lmin[n][2*j][br[j]]   = rd_dist[e];
          if (rd_dist[e] < lmin[n][2*j+1][bi[j]]) lmin[n][2*j+1][bi[j]] = rd_dist[e];
        end
      end
    for (int n = 0; n < NLMAX; n++)
      for (int b = 0; b < QBITS; b++)
        for (int v = 0; v < 2; v++)
          comb_min[n][b][v] = (start || lmin[n][b][v] < run[n][b][v])
                              ? lmin[n][b][v] : run[n][b][v];
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      busy <= 1'b0;
      out_valid <= 1'b0;
      cnt <= '0;
    end else begin
      out_valid <= active && is_last;
      busy      <= active && !is_last;
      cnt       <= active ? idx + 2'd1 : 2'd0;
    end

  always_ff @(posedge clk) begin
    if (start) begin
      bank_r    <= bank;
      first_r   <= first_list;
      nlists_r  <= nlists;
      nlayers_r <= nlayers;
      mu_r      <= mu;
    end
    if (active) run <= comb_min;
    if (active && is_last)
      for (int n = 0; n < NLMAX; n++)
        for (int b = 0; b < QBITS; b++) begin
          automatic int k = (b % 2 == 0) ? int'(kbits_re(mods[n])) : int'(kbits_im(mods[n]));
          automatic logic layer_on = (3'(n) < (start ? nlayers : nlayers_r));
          llr[n][b] <= (layer_on && (b / 2) < k)
                       ? llr_sub(comb_min[n][b][0], comb_min[n][b][1]) : '0;
        end
  end

endmodule
