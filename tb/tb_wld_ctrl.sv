// tb_wld_ctrl: runs vectors with 2, 3 and 4 layers and MU-MIMO tones in a
// random mix, with random gaps between passes and with lam_in changing on
// every cycle. For each accepted pass the sequencer outputs are compared
// with the expected schedule: list m, sliced layer (m+1+p) mod N, first /
// last / vec_last flags, modulations and priors of the enumerated and sliced
// layers (priors as sampled on the first pass of the vector), bank toggling
// per vector; in MU mode four hypothesis passes with zero priors. A 2-layer
// vector after a longer one must see in_ready low on its last pass only.
module tb_wld_ctrl;
  import mimo_pkg::*;

  logic       clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, mu = 1'b0;
  logic [2:0] nlayers = 3'd2;
  mod_t       mods [NLMAX];
  llr_t       lam_in [NLMAX][QBITS];
  logic [1:0] pass_list, pass_layer;
  logic       in_ready;
  logic       core_valid;
  mod_t       mod1, mod2;
  llr_t       lam1 [QBITS], lam2 [QBITS];
  tag_t       tag;

  wld_ctrl dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int nstall = 0;

  initial begin : watchdog
    #1000000;
    chk(nstall > 0, "stalls seen");
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

  task automatic rand_lam();
    for (int n = 0; n < NLMAX; n++)
      for (int b = 0; b < QBITS; b++) lam_in[n][b] = llr_t'($urandom);
  endtask

  initial begin
    llr_t vl [NLMAX][QBITS];
    bit   bank;
    for (int n = 0; n < NLMAX; n++) mods[n] = MOD_QPSK;
    rand_lam();
    @(negedge clk); @(negedge clk);
    rst_n = 1'b1;
    bank = 0;
    for (int v = 0; v < 40; v++) begin
      automatic bit is_mu = (v % 5 == 4);
      automatic int nl = 2 + (v % 3);
      automatic int npass = is_mu ? 4 : nl * (nl - 1);
      mu = is_mu;
      nlayers = 3'(nl);
      for (int n = 0; n < NLMAX; n++) mods[n] = mod_t'($urandom_range(4, 0));
      for (int q = 0; q < npass; q++) begin
        automatic int m = is_mu ? q : q / (nl - 1);
        automatic int p = is_mu ? 0 : q % (nl - 1);
        automatic int n = is_mu ? 1 : (m + 1 + p) % nl;
        while ($urandom_range(3, 0) == 0) begin
          in_valid = 1'b0;
          rand_lam();
          @(negedge clk);
        end
        in_valid = 1'b1;
        rand_lam();
        #1;
        while (!in_ready) begin
          chk(!core_valid && q == npass - 1, "stall only on the last pass");
          nstall++;
          @(negedge clk);
          rand_lam();
          #1;
        end
        if (q == 0) vl = lam_in;
        chk(core_valid, "core_valid");
        chk(int'(pass_list) == m && int'(pass_layer) == n && int'(tag.list) == m && int'(tag.layer) == n,
            $sformatf("vector %0d pass %0d list/layer %0d/%0d exp %0d/%0d", v, q, tag.list, tag.layer, m, n));
        chk(tag.first == (p == 0) && tag.last == (p == (is_mu ? 0 : nl - 2))
            && tag.vec_last == (q == npass - 1) && tag.mu == is_mu && tag.bank == bank,
            $sformatf("vector %0d pass %0d flags", v, q));
        if (is_mu) begin
          chk(mod1 == mods[0] && int'(mod2) == int'(MOD_QPSK) + m, "mu modulations");
          for (int b = 0; b < QBITS; b++) chk(lam1[b] == '0 && lam2[b] == '0, "mu priors");
        end else begin
          chk(mod1 == mods[m] && mod2 == mods[n], "modulations");
          for (int b = 0; b < QBITS; b++)
            chk(lam1[b] == vl[m][b] && lam2[b] == vl[n][b],
                $sformatf("vector %0d pass %0d prior bit %0d", v, q, b));
        end
        @(negedge clk);
      end
      bank = !bank;
      in_valid = 1'b0;
      @(negedge clk);
    end
    chk(nstall > 0, "stalls seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
