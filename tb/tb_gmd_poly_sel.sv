// Checks gmd_poly_sel. Candidate locators c*prod(1 + alpha^l X) are built over
// random position sets; a candidate is made invalid by giving it one root that
// is not a code position (alpha^-100). Eleven candidates per word are fed 12
// cycles apart, as the erasure addition does. Each trial's ok flag, its
// report 13 clock edges after loading, and the winner (first valid trial, its
// coefficients, root flags and Lambda_odd values at every position) are
// compared with values computed here. Words with no valid trial are included.
module tb_gmd_poly_sel;
  import tb_gf_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, lam_valid = 0;
  logic [3:0] lam_trial = '0;
  logic [20:0][7:0] lam = '0;
  logic trial_done, trial_ok, win_valid;
  logic [3:0] trial_num, win_trial;
  logic [20:0][7:0] win_lam;
  logic [35:0] win_root;
  logic [35:0][7:0] win_odd;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  gmd_poly_sel dut (.*);
  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  logic [20:0][7:0] cand [11];
  bit valid [11];
  logic [35:0] roots [11];
  int reported;
  // monitor: trial reports
  always @(negedge clk) if (rst_n && trial_done) begin
    checks++;
    if (trial_ok != valid[trial_num]) begin failures++; $display("FAIL trial %0d ok=%0d", trial_num, trial_ok); end
    reported++;
  end
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < 20; w++) begin
      int first;
      first = -1;
      for (int k = 0; k <= 10; k++) begin
        int d;
        logic [20:0][7:0] p;
        bit bad;
        d = $urandom_range(0, 20);
        bad = (w % 4 == 3) || ($urandom_range(0, 2) == 0);
        p = '0; p[0] = 8'($urandom_range(1, 255));
        roots[k] = '0;
        for (int n = 0; n < d; n++) begin
          int l;
          logic [7:0] x;
          if (bad && n == 0) x = apow(100);
          else begin
            do l = $urandom_range(0, 35); while (roots[k][l]);
            roots[k][l] = 1; x = apow(l);
          end
          for (int j = 20; j >= 1; j--) p[j] = p[j] ^ mul(x, p[j-1]);
        end
        cand[k] = p;
        valid[k] = !(bad && d > 0);
        if (valid[k] && first < 0) first = k;
      end
      reported = 0;
      @(negedge clk) clear = 1;
      @(negedge clk) clear = 0;
      for (int k = 0; k <= 10; k++) begin
        lam = cand[k]; lam_trial = 4'(k); lam_valid = 1;
        @(negedge clk) lam_valid = 0;
        repeat (11) @(negedge clk);
        if (k == 0) begin
          // trial 0's report lands exactly 13 edges after its load
          @(negedge clk);
          checks++;
          if (!trial_done || trial_num != 0) begin failures++; $display("FAIL trial 0 timing"); end
        end
      end
      repeat (4) @(negedge clk);
      checks += 2;
      if (reported != 11) begin failures++; $display("FAIL reports %0d", reported); end
      if (win_valid != (first >= 0)) begin failures++; $display("FAIL win_valid"); end
      if (first >= 0) begin
        checks += 2;
        if (int'(win_trial) != first) begin failures++; $display("FAIL win_trial %0d exp %0d", win_trial, first); end
        if (win_lam != cand[first]) begin failures++; $display("FAIL win_lam"); end
        for (int l = 0; l < 36; l++) begin
          logic [7:0] o;
          o = 0;
          for (int j = 1; j <= 20; j += 2) o ^= mul(cand[first][j], apow(-j * l));
          checks += 2;
          if (win_root[l] != roots[first][l]) begin failures++; $display("FAIL root flag %0d", l); end
          if (win_odd[l] != o) begin failures++; $display("FAIL odd value %0d", l); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
