// tb_dist_accum: random lists of 1..3 passes (first / last flags), random
// distances including the no-candidate value DIST_MAX and values that
// overflow; each completed list must equal the saturating sum of its
// passes, with out_valid one cycle after the last pass and the tag of that
// pass. Inputs change on the falling edge, outputs are sampled there too.
module tb_dist_accum;
  import mimo_pkg::*;

  logic  clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  tag_t  in_tag = '0;
  dist_t in_dists [NCAND];
  logic  out_valid;
  tag_t  out_tag;
  dist_t out_dists [NCAND];

  dist_accum dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  initial begin : watchdog
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  longint ref_acc [NCAND];
  tag_t   exp_tag;
  bit     exp_valid;
  int     nsat = 0;

  function automatic longint clip(longint v);
    if (v > longint'(DIST_MAX)) return longint'(DIST_MAX);
    if (v < longint'(DIST_MIN)) return longint'(DIST_MIN);
    return v;
  endfunction

  initial begin
    for (int e = 0; e < NCAND; e++) in_dists[e] = '0;
    exp_valid = 0;
    @(negedge clk); @(negedge clk);
    rst_n = 1'b1;
    for (int l = 0; l < 60; l++) begin
      automatic int np = $urandom_range(3, 1);
      for (int p = 0; p < np; p++) begin
        automatic bit big = (l % 10 == 9);
        in_valid = 1'b1;
        in_tag = tag_t'($urandom);
        in_tag.first = (p == 0);
        in_tag.last  = (p == np - 1);
        for (int e = 0; e < NCAND; e++) begin
          automatic longint d;
          if ($urandom_range(20, 0) == 0) d = longint'(DIST_MAX);
          else if (big) d = longint'(DIST_MAX) - $urandom_range(1000, 0);
          else d = longint'(int'($urandom_range(2000000, 0))) - 1000000;
          in_dists[e] = dist_t'(d);
          if (p == 0) ref_acc[e] = d;
          else if (ref_acc[e] == longint'(DIST_MAX) || d == longint'(DIST_MAX)) ref_acc[e] = longint'(DIST_MAX);
          else ref_acc[e] = clip(ref_acc[e] + d);
        end
        @(negedge clk);
        checks++;
        if (out_valid !== (p == np - 1)) begin
          failures++;
          $display("FAIL: out_valid %0b at pass %0d of %0d", out_valid, p, np);
        end
        if (p == np - 1) begin
          checks++;
          if (out_tag != in_tag) failures++;
          for (int e = 0; e < NCAND; e++) begin
            checks++;
            if (longint'(out_dists[e]) != ref_acc[e]) begin
              failures++;
              if (failures < 5) $display("FAIL: list %0d e %0d got %0d exp %0d", l, e, out_dists[e], ref_acc[e]);
            end
          end
        end
        if ($urandom_range(1, 0) == 1) begin
          in_valid = 1'b0;
          @(negedge clk);
          checks++;
          if (out_valid) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
