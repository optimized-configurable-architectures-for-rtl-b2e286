// tb_mimo_detector_top: end-to-end test of the detector at its default
// parameters (K = 12 tone classification window).
//
// A behavioural host plays the DSP: for every vector it follows the pass
// order reported on pass_list / pass_layer and supplies random constants per
// pass and random prior LLRs per layer. The expected output LLRs are built
// from scratch: every list is the exhaustive-search sum of its passes, every
// layer's symbol comes from the pass that sliced it, and eq. (42) is
// evaluated by brute force over all lists. In MU-MIMO mode the expected
// estimate is the biased argmin of the per-hypothesis minima summed over the
// window, and the LLRs of each tone use the newest estimate.
//
// The run mixes 2-, 3- and 4-layer vectors, back-to-back and with gaps,
// switches into and out of MU-MIMO mode, and counts every mechanism it
// exercises: vectors per layer count, accumulation passes, bank parity,
// back-to-back vectors, in_ready stalls, mode switches, MU windows and tones, non-zero priors,
// saturated output LLRs and each modulation. Each count must be non-zero.
module tb_mimo_detector_top;
  import mimo_pkg::*;
  import tb_ref_pkg::*;

  logic       clk = 1'b0, rst_n = 1'b0;
  logic       mu = 1'b0;
  logic [2:0] nlayers = 3'd2;
  mod_t       mods [NLMAX];
  coef_t      bias_unit = '0;
  logic       in_valid = 1'b0;
  coefs_t     coefs = '0;
  llr_t       lam_in [NLMAX][QBITS];
  logic [1:0] pass_list, pass_layer;
  logic       in_ready;
  logic       llr_valid;
  llro_t      llr [NLMAX][QBITS];
  logic       est_valid;
  mod_t       est_mod;
  dist_t      est_totals [NHYP];

  mimo_detector_top dut (.*);

  always #5 clk = ~clk;

  localparam int K = 12;
  localparam int MAXV = 200;

  int checks = 0, failures = 0;

  // expected results, in output order
  longint xllr [MAXV][NLMAX][QBITS];
  int     nx = 0, ngot = 0;
  int     xest [8];
  int     nxe = 0, ngote = 0;

  // mechanism counters
  int c_vec [5];
  int c_accum = 0, c_bank [2], c_b2b = 0, c_switch = 0, c_window = 0, c_tone = 0;
  int c_stall = 0, c_prior = 0, c_sat = 0, c_mod [5], c_hyp [4];

  initial begin : watchdog
    #5000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  function automatic longint sat17(longint m0, longint m1);
    if (m0 == longint'(DIST_MAX) && m1 == longint'(DIST_MAX)) return 0;
    if (m0 == longint'(DIST_MAX) || m0 - m1 > 65535) return 65535;
    if (m1 == longint'(DIST_MAX) || m0 - m1 < -65536) return -65536;
    return m0 - m1;
  endfunction

  // one pass: random constants, reference per candidate
  task automatic do_pass(int m1, int m2, int l1 [8], int l2 [8], bit first, bit gap,
                         output longint d [NCAND], output int xr [NCAND], output int xi [NCAND]);
    longint c [8];
    c[0] = $urandom_range(1500, 0); c[1] = $urandom_range(1500, 0);
    for (int j = 2; j < 8; j++) c[j] = longint'(int'($urandom_range(3000, 0))) - 1500;
    while (gap && $urandom_range(2, 0) == 0) begin
      in_valid = 1'b0;
      @(negedge clk);
    end
    in_valid = 1'b1;
    coefs = '{a: coef_t'(c[0]), b: coef_t'(c[1]), c: coef_t'(c[2]), d: coef_t'(c[3]),
              e: coef_t'(c[4]), f: coef_t'(c[5]), g: coef_t'(c[6]), h: coef_t'(c[7])};
    #1;
    while (!in_ready) begin
      c_stall++;
      @(negedge clk);
      #1;
    end
    for (int e = 0; e < NCAND; e++) begin
      bit v;
      core_ref(c, m1, m2, l1, l2, first, e, v, d[e], xr[e], xi[e]);
      if (!v) d[e] = longint'(DIST_MAX);
    end
  endtask

  task automatic run_vector(int nl, bit gap);
    int     md [NLMAX];
    int     lam [NLMAX][8];
    longint ld [NLMAX][NCAND];
    int     ls [NLMAX][NCAND][NLMAX];
    bit     pri;
    mu = 1'b0;
    nlayers = 3'(nl);
    pri = ($urandom_range(3, 0) != 0);
    for (int n = 0; n < NLMAX; n++) begin
      md[n] = $urandom_range(4, 0);
      mods[n] = mod_t'(md[n]);
      for (int b = 0; b < 8; b++) lam[n][b] = pri ? int'($urandom_range(255, 0)) - 128 : 0;
    end
    for (int m = 0; m < nl; m++)
      for (int p = 0; p < nl - 1; p++) begin
        automatic int n = (m + 1 + p) % nl;
        longint d [NCAND];
        int xr [NCAND], xi [NCAND];
        do_pass(md[m], md[n], lam[m], lam[n], p == 0, gap, d, xr, xi);
        for (int q = 0; q < NLMAX; q++)
          for (int b = 0; b < QBITS; b++) lam_in[q][b] = llr_t'(lam[q][b]);
        #1;
        chk(int'(pass_list) == m && int'(pass_layer) == n, "pass order");
        if (p > 0) c_accum++;
        for (int e = 0; e < NCAND; e++) begin
          if (p == 0) ld[m][e] = d[e];
          else if (ld[m][e] != longint'(DIST_MAX)) ld[m][e] += d[e];
          ls[m][e][n] = xr[e] * 16 + xi[e];
        end
        @(negedge clk);
        // priors change after the first pass; the detector must hold them
        for (int q = 0; q < NLMAX; q++)
          for (int b = 0; b < QBITS; b++) lam_in[q][b] = llr_t'($urandom);
      end
    in_valid = 1'b0;
    // expected LLRs, eq. (42)
    for (int n = 0; n < NLMAX; n++)
      for (int b = 0; b < QBITS; b++) begin
        automatic int k = (b % 2 == 0) ? kre(md[n]) : kim(md[n]);
        longint mn [2];
        xllr[nx][n][b] = 0;
        if (n < nl && b / 2 < k) begin
          mn[0] = longint'(DIST_MAX); mn[1] = longint'(DIST_MAX);
          for (int m = 0; m < nl; m++)
            for (int e = 0; e < NCAND; e++) begin
              automatic int s = (n == m) ? e : ls[m][e][n];
              automatic int bv = gbit(k, (b % 2 == 0) ? s / 16 : s % 16, b / 2);
              if (ld[m][e] < mn[bv]) mn[bv] = ld[m][e];
            end
          xllr[nx][n][b] = sat17(mn[0], mn[1]);
          if (xllr[nx][n][b] == 65535 || xllr[nx][n][b] == -65536) c_sat++;
        end
      end
    nx++;
    c_vec[nl]++;
    if (pri) c_prior++;
    for (int n = 0; n < nl; n++) c_mod[md[n]]++;
  endtask

  // MU-MIMO windows: layer 0 desired (mods[0]), interferer hypotheses
  task automatic run_mu(int nwin, ref int est_cur);
    int     md0;
    int     zl [8];
    longint acc [NHYP];
    longint bu;
    for (int b = 0; b < 8; b++) zl[b] = 0;
    mu = 1'b1;
    for (int w = 0; w < nwin; w++) begin
      md0 = $urandom_range(4, 1);
      mods[0] = mod_t'(md0);
      bu = $urandom_range(400, 0);
      bias_unit = coef_t'(bu);
      for (int h = 0; h < NHYP; h++) acc[h] = 0;
      for (int t = 0; t < K; t++) begin
        longint ld [NHYP][NCAND];
        int est;
        for (int h = 0; h < NHYP; h++) begin
          longint d [NCAND];
          int xr [NCAND], xi [NCAND];
          longint mn;
          do_pass(md0, 1 + h, zl, zl, 1'b1, (t % 3 == 0), d, xr, xi);
          #1;
          chk(int'(pass_list) == h && int'(pass_layer) == 1, "MU pass order");
          mn = longint'(DIST_MAX);
          for (int e = 0; e < NCAND; e++) begin
            ld[h][e] = d[e];
            if (d[e] < mn) mn = d[e];
          end
          acc[h] += mn;
          @(negedge clk);
        end
        in_valid = 1'b0;
        c_tone++;
        if (t == K - 1) begin
          automatic int best = 0;
          longint tot [NHYP];
          for (int h = 0; h < NHYP; h++) tot[h] = acc[h] + (2 * h + 2) * bu;
          for (int h = 1; h < NHYP; h++) if (tot[h] < tot[best]) best = h;
          xest[nxe++] = best;
          est_cur = best;
          c_hyp[best]++;
        end
        est = est_cur;
        for (int n = 0; n < NLMAX; n++)
          for (int b = 0; b < QBITS; b++) begin
            automatic int k = (b % 2 == 0) ? kre(md0) : kim(md0);
            longint mn [2];
            xllr[nx][n][b] = 0;
            if (n == 0 && b / 2 < k) begin
              mn[0] = longint'(DIST_MAX); mn[1] = longint'(DIST_MAX);
              for (int e = 0; e < NCAND; e++) begin
                automatic int bv = gbit(k, (b % 2 == 0) ? e / 16 : e % 16, b / 2);
                if (ld[est][e] < mn[bv]) mn[bv] = ld[est][e];
              end
              xllr[nx][n][b] = sat17(mn[0], mn[1]);
            end
          end
        nx++;
      end
      c_window++;
    end
  endtask

  // output monitor
  always @(negedge clk) begin
    if (rst_n && llr_valid) begin
      automatic int bad = 0;
      for (int n = 0; n < NLMAX; n++)
        for (int b = 0; b < QBITS; b++)
          if (longint'(llr[n][b]) != xllr[ngot][n][b]) begin
            bad++;
            if (failures + bad < 6)
              $display("FAIL: vector %0d layer %0d bit %0d got %0d exp %0d",
                       ngot, n, b, llr[n][b], xllr[ngot][n][b]);
          end
      checks++;
      if (ngot >= nx || bad != 0) failures++;
      c_bank[ngot % 2]++;
      ngot++;
    end
    if (rst_n && est_valid) begin
      checks++;
      if (ngote >= nxe || int'(est_mod) != int'(MOD_QPSK) + xest[ngote]) begin
        failures++;
        $display("FAIL: estimate %0d got %0d", ngote, est_mod);
      end
      ngote++;
    end
  end

  initial begin
    int est_cur;
    bit prev_mu;
    for (int n = 0; n < NLMAX; n++) begin
      mods[n] = MOD_QPSK;
      for (int b = 0; b < QBITS; b++) lam_in[n][b] = '0;
    end
    for (int i = 0; i < 5; i++) c_mod[i] = 0;
    for (int i = 0; i < 5; i++) c_vec[i] = 0;
    for (int i = 0; i < 4; i++) c_hyp[i] = 0;
    c_bank[0] = 0; c_bank[1] = 0;
    est_cur = 3;
    prev_mu = 0;
    @(negedge clk); @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int seg = 0; seg < 6; seg++) begin
      if (seg == 2 || seg == 4) begin
        if (!prev_mu) c_switch++;
        run_mu(seg == 2 ? 2 : 1, est_cur);
        prev_mu = 1;
      end else begin
        if (prev_mu) c_switch++;
        prev_mu = 0;
        for (int v = 0; v < 10; v++) begin
          automatic bit gap = (v % 2 == 0);
          run_vector(2 + (v + seg) % 3, gap);
          if (!gap) c_b2b++;
        end
      end
    end
    in_valid = 1'b0;
    repeat (30) @(negedge clk);
    chk(ngot == nx, $sformatf("%0d LLR sets for %0d vectors", ngot, nx));
    chk(ngote == nxe, $sformatf("%0d estimates for %0d windows", ngote, nxe));
    // every mechanism must have happened
    chk(c_vec[2] > 0, "2-layer vectors");
    chk(c_vec[3] > 0, "3-layer vectors");
    chk(c_vec[4] > 0, "4-layer vectors");
    chk(c_accum > 0, "accumulation passes");
    chk(c_bank[0] > 0 && c_bank[1] > 0, "both buffer banks");
    chk(c_b2b > 0, "back-to-back vectors");
    chk(c_switch >= 2, "mode switches");
    chk(c_window > 0 && c_tone > 0, "MU windows");
    chk(c_prior > 0, "non-zero priors");
    chk(c_stall > 0, "in_ready stalls");
    for (int i = 0; i < 5; i++) chk(c_mod[i] > 0, $sformatf("modulation %0d", i));
    $display("mechanisms: vec2=%0d vec3=%0d vec4=%0d accum=%0d bank0=%0d bank1=%0d b2b=%0d switch=%0d stall=%0d",
             c_vec[2], c_vec[3], c_vec[4], c_accum, c_bank[0], c_bank[1], c_b2b, c_switch, c_stall);
    $display("mechanisms: windows=%0d tones=%0d prior=%0d sat=%0d est=%0d/%0d/%0d/%0d mods=%0d/%0d/%0d/%0d/%0d",
             c_window, c_tone, c_prior, c_sat, c_hyp[0], c_hyp[1], c_hyp[2], c_hyp[3],
             c_mod[0], c_mod[1], c_mod[2], c_mod[3], c_mod[4]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
