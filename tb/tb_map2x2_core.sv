// tb_map2x2_core: self-checking test of the 2x2 core.
// Random passes (random modulations BPSK..256-QAM for both layers, random
// constants, random priors, first flag random) are streamed one per cycle
// with gaps; every output candidate distance and sliced symbol is compared
// with an exhaustive-search reference, and the output must appear exactly
// 6 cycles after its input with the tag unchanged (the input is driven after
// one clock edge and sampled at the next, the output is seen one edge after
// the sixth register, so the edge counter differs by CORE_LAT + 1).
module tb_map2x2_core;
  import mimo_pkg::*;
  import tb_ref_pkg::*;

  localparam int NP = 60;

  logic   clk = 1'b0;
  logic   rst_n = 1'b0;
  logic   in_valid = 1'b0;
  coefs_t coefs = '0;
  mod_t   mod1 = MOD_QPSK, mod2 = MOD_QPSK;
  llr_t   lam1 [QBITS], lam2 [QBITS];
  tag_t   tag_in = '0;
  logic   out_valid;
  tag_t   tag_out;
  dist_t  dists [NCAND];
  sym_t   sym [NCAND];

  map2x2_core dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  longint ec [NP][8];
  int     em1 [NP], em2 [NP];
  int     el1 [NP][8], el2 [NP][8];
  bit     efirst [NP];
  int     ecyc [NP];
  tag_t   etag [NP];
  int     nin = 0, nout = 0;
  int     nbadl = 0;

  initial begin : watchdog
    #2000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  always @(posedge clk) cyc <= cyc + 1;

  function automatic longint rnd(int bits, bit nonneg);
    longint v;
    v = longint'($urandom_range((1 << bits) - 1, 0));
    if (!nonneg && $urandom_range(1, 0) == 1) v = -v;
    return v;
  endfunction

  // drive
  initial begin
    for (int b = 0; b < QBITS; b++) begin lam1[b] = '0; lam2[b] = '0; end
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    while (nin < NP) begin
      if ($urandom_range(3, 0) != 0) begin
        automatic int m1 = $urandom_range(4, 0), m2 = $urandom_range(4, 0);
        automatic int bits = (nin < 10) ? 8 : 14;
        ec[nin][0] = rnd(bits, 1); ec[nin][1] = rnd(bits, 1);
        for (int j = 2; j < 8; j++) ec[nin][j] = rnd(bits, 0);
        em1[nin] = m1; em2[nin] = m2;
        for (int b = 0; b < 8; b++) begin
          el1[nin][b] = (nin % 4 == 0) ? 0 : int'($urandom_range(255, 0)) - 128;
          el2[nin][b] = (nin % 4 == 0) ? 0 : int'($urandom_range(255, 0)) - 128;
        end
        efirst[nin] = $urandom_range(1, 0);
        etag[nin] = tag_t'($urandom);
        etag[nin].first = efirst[nin];
        in_valid <= 1'b1;
        coefs <= '{a: coef_t'(ec[nin][0]), b: coef_t'(ec[nin][1]), c: coef_t'(ec[nin][2]),
                   d: coef_t'(ec[nin][3]), e: coef_t'(ec[nin][4]), f: coef_t'(ec[nin][5]),
                   g: coef_t'(ec[nin][6]), h: coef_t'(ec[nin][7])};
        mod1 <= mod_t'(m1); mod2 <= mod_t'(m2);
        for (int b = 0; b < 8; b++) begin
          lam1[b] <= llr_t'(el1[nin][b]);
          lam2[b] <= llr_t'(el2[nin][b]);
        end
        tag_in <= etag[nin];
        ecyc[nin] = cyc;
        nin++;
      end else begin
        in_valid <= 1'b0;
      end
      @(posedge clk);
    end
    in_valid <= 1'b0;
    repeat (20) @(posedge clk);
    checks++;
    if (nout != NP) begin
      failures++;
      $display("FAIL: %0d outputs for %0d passes", nout, NP);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // check
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      automatic int p = nout;
      automatic int bad = 0;
      checks++;
      if (p >= NP || cyc - ecyc[p] != CORE_LAT + 1 || tag_out != etag[p]) begin
        failures++;
        $display("FAIL: pass %0d latency %0d tag %h/%h", p, cyc - ecyc[p], tag_out, etag[p]);
      end else begin
        for (int e = 0; e < NCAND; e++) begin
          bit v; longint d; int xr, xi;
          core_ref(ec[p], em1[p], em2[p], el1[p], el2[p], efirst[p], e, v, d, xr, xi);
          checks++;
          if (!v) begin
            if (dists[e] != DIST_MAX) bad++;
          end else if (longint'(dists[e]) != d || int'(sym[e][7:4]) != xr || int'(sym[e][3:0]) != xi) begin
            bad++;
            if (nbadl < 5) begin
              nbadl++;
              $display("FAIL: pass %0d e %0d mods %0d/%0d got %0d (%0d,%0d) exp %0d (%0d,%0d)",
                       p, e, em1[p], em2[p], dists[e], sym[e][7:4], sym[e][3:0], d, xr, xi);
            end
          end
        end
        failures += bad;
      end
      nout++;
    end
  end

endmodule
