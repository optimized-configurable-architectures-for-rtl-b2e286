// tb_const_estimator: several windows of K = 12 tones, each tone giving four
// hypothesis lists of random distances (one hypothesis made clearly best per
// window, including the biased-away case where a larger constellation has
// slightly smaller raw distance). After the last list of a window est_valid
// must pulse once, with the totals sum(min list) + (2h+2) * bias_unit and
// the argmin hypothesis (smaller constellation on ties).
module tb_const_estimator;
  import mimo_pkg::*;

  logic       clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  logic [1:0] hyp = '0;
  dist_t      in_dists [NCAND];
  dist_t      bias_unit = '0;
  logic       est_valid;
  logic [1:0] est_hyp;
  dist_t      totals [NHYP];

  const_estimator dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  localparam int K = 12;

  initial begin : watchdog
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    longint sum [NHYP];
    for (int e = 0; e < NCAND; e++) in_dists[e] = '0;
    @(negedge clk); @(negedge clk);
    rst_n = 1'b1;
    for (int w = 0; w < 12; w++) begin
      automatic int truth = w % 4;
      automatic longint bu = (w < 4) ? 0 : $urandom_range(3000, 1);
      bias_unit = dist_t'(bu);
      for (int h = 0; h < NHYP; h++) sum[h] = 0;
      for (int t = 0; t < K; t++)
        for (int h = 0; h < NHYP; h++) begin
          automatic longint mn = longint'(DIST_MAX);
          in_valid = $urandom_range(3, 0) != 0;
          while (!in_valid) begin
            @(negedge clk);
            checks++;
            if (est_valid) failures++;
            in_valid = $urandom_range(3, 0) != 0;
          end
          hyp = 2'(h);
          for (int e = 0; e < NCAND; e++) begin
            automatic longint d = 100000 + $urandom_range(500000, 0);
            // larger hypotheses fit at least as well; the true one and all
            // above it get a small distance somewhere
            if (h >= truth && e == $urandom_range(255, 0)) d = 1000 + $urandom_range(3000, 0) - 100 * h;
            if (h < truth && e == 7) d = 60000 + $urandom_range(3000, 0);
            if ($urandom_range(10, 0) == 0) d = longint'(DIST_MAX);
            in_dists[e] = dist_t'(d);
            if (d < mn) mn = d;
          end
          sum[h] += mn;
          @(negedge clk);
          in_valid = 1'b0;
          checks++;
          if (est_valid != (t == K - 1 && h == 3)) begin
            failures++;
            $display("FAIL: est_valid %0b at window %0d tone %0d hyp %0d", est_valid, w, t, h);
          end
        end
      begin
        longint tot [NHYP];
        int best;
        best = 0;
        for (int h = 0; h < NHYP; h++) tot[h] = sum[h] + (2 * h + 2) * bu;
        for (int h = 1; h < NHYP; h++) if (tot[h] < tot[best]) best = h;
        checks++;
        if (int'(est_hyp) != best) begin
          failures++;
          $display("FAIL: window %0d est %0d exp %0d", w, est_hyp, best);
        end
        for (int h = 0; h < NHYP; h++) begin
          checks++;
          if (longint'(totals[h]) != tot[h]) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
