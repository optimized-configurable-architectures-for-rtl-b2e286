// tb_llr_proc: the list buffer is modelled by arrays read combinationally at
// rd_bank / rd_list. Random jobs: N = 2..4 lists of N layers with random
// modulations, or a single MU-MIMO list (first_list = hypothesis, layer 0
// enumerated). Candidates outside the enumerated constellation carry
// DIST_MAX, as the core produces them. The output LLRs are compared with a
// brute-force evaluation of eq. (42) over all candidates of all lists, and
// out_valid must come nlists cycles after start. Jobs alternate banks and
// the other bank is overwritten while a job runs.
module tb_llr_proc;
  import mimo_pkg::*;
  import tb_ref_pkg::*;

  logic       clk = 1'b0, rst_n = 1'b0, start = 1'b0, bank = 1'b0, mu = 1'b0;
  logic [1:0] first_list = '0;
  logic [2:0] nlists = 3'd2, nlayers = 3'd2;
  mod_t       mods [NLMAX];
  logic       rd_bank;
  logic [1:0] rd_list;
  dist_t      rd_dist [NCAND];
  sym_t       rd_sym  [NCAND][NLMAX];
  logic       out_valid;
  llro_t      llr [NLMAX][QBITS];

  llr_proc dut (.*);

  always #5 clk = ~clk;

  dist_t dm [2][NLMAX][NCAND];
  sym_t  sm [2][NLMAX][NCAND][NLMAX];

  always_comb
    for (int e = 0; e < NCAND; e++) begin
      rd_dist[e] = dm[rd_bank][rd_list][e];
      for (int n = 0; n < NLMAX; n++) rd_sym[e][n] = sm[rd_bank][rd_list][e][n];
    end

  int checks = 0, failures = 0;

  initial begin : watchdog
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // fill one bank with lists for the given job
  task automatic fill(int bk, int nl, bit is_mu, int h, int md [NLMAX]);
    for (int l = 0; l < NLMAX; l++) begin
      automatic int en = is_mu ? 0 : l;
      for (int e = 0; e < NCAND; e++) begin
        automatic bit v = (e / 16 < (1 << kre(md[en]))) && (e % 16 < (1 << kim(md[en])));
        dm[bk][l][e] = v ? dist_t'(int'($urandom_range(4000000, 0)) - 2000000) : DIST_MAX;
        for (int n = 0; n < NLMAX; n++) begin
          automatic int mdn = (is_mu && n == 1) ? 1 + h : md[n];
          sm[bk][l][e][n] = {4'($urandom_range((1 << kre(mdn)) - 1, 0)),
                             4'($urandom_range((1 << kim(mdn)) - 1, 0))};
        end
      end
    end
  endtask

  function automatic longint ref_llr(int bk, int fl, int nls, bit is_mu, int md [NLMAX], int n, int b);
    longint mn [2];
    int k, j;
    k = (b % 2 == 0) ? kre(md[n]) : kim(md[n]);
    j = b / 2;
    if (j >= k) return 0;
    mn[0] = longint'(DIST_MAX); mn[1] = longint'(DIST_MAX);
    for (int q = 0; q < nls; q++) begin
      automatic int l = fl + q;
      automatic int en = is_mu ? 0 : l;
      for (int e = 0; e < NCAND; e++) begin
        automatic int s = (n == en) ? e : int'(sm[bk][l][e][n]);
        automatic int idx = (b % 2 == 0) ? s / 16 : s % 16;
        automatic int bit_v = gbit(k, idx, j);
        if (longint'(dm[bk][l][e]) < mn[bit_v]) mn[bit_v] = longint'(dm[bk][l][e]);
      end
    end
    if (mn[0] == longint'(DIST_MAX) && mn[1] == longint'(DIST_MAX)) return 0;
    if (mn[0] == longint'(DIST_MAX)) return 65535;
    if (mn[1] == longint'(DIST_MAX)) return -65536;
    if (mn[0] - mn[1] > 65535) return 65535;
    if (mn[0] - mn[1] < -65536) return -65536;
    return mn[0] - mn[1];
  endfunction

  initial begin
    int md [NLMAX];
    for (int n = 0; n < NLMAX; n++) mods[n] = MOD_QPSK;
    for (int b = 0; b < 2; b++) begin
      for (int n = 0; n < NLMAX; n++) md[n] = 1;
      fill(b, 4, 0, 0, md);
    end
    @(negedge clk); @(negedge clk);
    rst_n = 1'b1;
    for (int j = 0; j < 40; j++) begin
      automatic bit is_mu = (j % 4 == 3);
      automatic int nl = is_mu ? 1 : 2 + (j % 3);
      automatic int h = $urandom_range(3, 0);
      automatic int bk = j % 2;
      automatic int lat;
      for (int n = 0; n < NLMAX; n++) md[n] = $urandom_range(4, 0);
      if (is_mu) md[1] = 1 + h;
      fill(bk, nl, is_mu, h, md);
      for (int n = 0; n < NLMAX; n++) mods[n] = mod_t'(md[n]);
      start = 1'b1; bank = 1'(bk); mu = is_mu;
      first_list = is_mu ? 2'(h) : 2'd0;
      nlists = 3'(nl); nlayers = is_mu ? 3'd1 : 3'(nl);
      @(negedge clk);
      start = 1'b0;
      first_list = 2'($urandom); nlists = 3'($urandom); bank = 1'($urandom); mu = 1'($urandom);
      lat = 1;
      while (!out_valid && lat < 10) begin
        fill(1 - bk, 4, 0, 0, md);
        @(negedge clk);
        lat++;
      end
      checks++;
      if (lat != nl) begin
        failures++;
        $display("FAIL: job %0d latency %0d exp %0d", j, lat, nl);
      end
      for (int n = 0; n < NLMAX; n++)
        for (int b = 0; b < QBITS; b++) begin
          automatic longint exp = (n < (is_mu ? 1 : nl))
            ? ref_llr(bk, is_mu ? h : 0, nl, is_mu, md, n, b) : 0;
          checks++;
          if (longint'(llr[n][b]) != exp) begin
            failures++;
            if (failures < 8) $display("FAIL: job %0d layer %0d bit %0d got %0d exp %0d",
                                       j, n, b, llr[n][b], exp);
          end
        end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
