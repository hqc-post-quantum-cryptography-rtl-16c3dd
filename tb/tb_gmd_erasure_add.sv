// Checks gmd_erasure_add. Random error patterns (0..22 errors on the zero
// codeword) give syndromes; rs_kes (tested on its own) supplies Lambda, X*B and
// L. The ordered erasure list puts a random number of the error positions
// first, then other random positions. For every trial k (2k erasures) whose
// errors outside the erasure set number at most t-k, Lambda^(2k) must vanish
// exactly on the union of the error positions and the 2k erasures, and have
// that many roots as its degree. Trials must be reported in order 1..t, 12
// cycles apart, and done must come 125 clock edges after start
// (4 + 20*6 = 124 cycles plus the start edge).
module tb_gmd_erasure_add;
  import tb_gf_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, kstart = 0, kdone, done, lam_valid;
  logic [19:0][7:0] synd = '0;
  logic [20:0][7:0] lambda, xb, lam_out;
  logic [5:0] l_lambda;
  logic [7:0] gamma;
  logic [19:0][5:0] era_pos = '0;
  logic [3:0] lam_trial;
  int checks = 0, failures = 0, n_checked_trials = 0;
  always #5 clk = ~clk;
  rs_kes u_kes (.clk, .rst_n, .start(kstart), .synd, .done(kdone), .lambda, .xb, .l_lambda, .gamma);
  gmd_erasure_add dut (.*);
  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int ne, n_in, lat, k_seen, last_t;
      logic [7:0] e [36];
      bit used [36];
      ne = (t < 5) ? 20 : $urandom_range(0, 22);
      n_in = (t < 5) ? 20 : $urandom_range(0, ne);
      for (int l = 0; l < 36; l++) begin e[l] = 0; used[l] = 0; end
      for (int n = 0; n < ne; n++) begin
        int p;
        do p = $urandom_range(0, 35); while (e[p] != 0);
        e[p] = 8'($urandom_range(1, 255));
        if (n < n_in && n < 20) begin era_pos[n] = 6'(p); used[p] = 1; end
      end
      for (int n = (n_in < 20 ? n_in : 20); n < 20; n++) begin
        int p;
        do p = $urandom_range(0, 35); while (used[p]);
        era_pos[n] = 6'(p); used[p] = 1;
      end
      for (int j = 1; j <= 20; j++) begin
        logic [7:0] s;
        s = 0;
        for (int l = 0; l < 36; l++) s ^= mul(e[l], apow(j * l));
        synd[j-1] = s;
      end
      @(negedge clk) kstart = 1;
      @(negedge clk) kstart = 0;
      while (!kdone) @(negedge clk);
      start = 1;
      @(negedge clk) start = 0;
      lat = 1; k_seen = 0; last_t = 0;
      forever begin
        if (lam_valid) begin
          int k, outside, deg, nroots;
          bit inset [36];
          k = int'(lam_trial);
          checks++;
          if (k != k_seen + 1 || (k > 1 && lat - last_t != 12)) begin
            failures++; $display("FAIL trial order/timing k=%0d dt=%0d", k, lat - last_t);
          end
          k_seen = k; last_t = lat;
          outside = 0;
          for (int l = 0; l < 36; l++) inset[l] = 0;
          for (int q = 0; q < 2*k; q++) inset[era_pos[q]] = 1;
          for (int l = 0; l < 36; l++) if (e[l] != 0 && !inset[l]) outside++;
          if (outside <= 10 - k) begin
            n_checked_trials++;
            deg = 0; nroots = 0;
            for (int j = 0; j <= 20; j++) if (lam_out[j] != 0) deg = j;
            for (int l = 0; l < 36; l++) begin
              logic [7:0] v;
              v = 0;
              for (int j = 20; j >= 0; j--) v = mul(v, apow(-l)) ^ lam_out[j];
              checks++;
              if ((v == 0) != (inset[l] || e[l] != 0)) begin
                failures++; $display("FAIL t=%0d trial %0d root at %0d", t, k, l);
              end
              if (v == 0) nroots++;
            end
            checks++;
            if (deg != nroots) begin failures++; $display("FAIL trial %0d degree %0d roots %0d", k, deg, nroots); end
          end
        end
        if (done) break;
        @(negedge clk); lat++;
      end
      checks += 2;
      if (lat != 125) begin failures++; $display("FAIL latency %0d", lat); end
      if (k_seen != 10) begin failures++; $display("FAIL only %0d trials", k_seen); end
    end
    checks++;
    if (n_checked_trials < 50) begin failures++; $display("FAIL too few decodable trials"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
