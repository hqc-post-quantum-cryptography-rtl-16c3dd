// End-to-end test of the HQC-128 GMD decryption back end at its default sizes
// (RM(128,8) x3, RS(36,16), t = 10).
// Each test word: a random 16-symbol message is RS-encoded (systematic, message
// in the top 16 positions, generator roots alpha^1..alpha^20) and every symbol
// is RM-encoded three times into a 384-bit segment. Symbols are then corrupted
// in four ways: clean, noisy (random bit flips), weak error (two of the three
// copies carry another symbol, plus flips: decoded wrong with low reliability)
// and strong error (all three copies carry another symbol).
// The bench computes the RM decisions and reliabilities itself by direct
// correlation, sorts the reliabilities, and predicts which GMD trial k (2k
// least reliable symbols erased) is the first with at most t-k errors outside
// its erasure set. It checks dec_ok, the winning trial and the message, and
// counts how often trial 0 (error-only), a later erasure trial, and overall
// failure occurred; each must occur at least once. The RS decoder latency from
// the last RM output to done is checked against the block latencies.
module tb_hqc_gmd_decrypt;
  localparam int NRS = 36, KRS = 16, TT = 10, NRM = 128, M = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              seg_valid, seg_ready, done, dec_ok;
  logic [M*NRM-1:0]  seg;
  logic [3:0]        win_trial;
  logic [NRS-1:0][7:0] cw;
  logic [8*KRS-1:0]  msg;

  hqc_gmd_decrypt dut (.*);

  int checks = 0, failures = 0;
  int n_trial0 = 0, n_erasure = 0, n_fail = 0, n_stall = 0;

  // ---------------- reference GF(2^8) arithmetic ----------------
  function automatic logic [7:0] mul(input logic [7:0] a, input logic [7:0] b);
    logic [15:0] p;
    p = '0;
    for (int i = 0; i < 8; i++) if (b[i]) p ^= 16'(a) << i;
    for (int i = 15; i >= 8; i--) if (p[i]) p ^= 16'h11D << (i - 8);
    return p[7:0];
  endfunction
  function automatic logic [7:0] apow(input int e);
    logic [7:0] v = 1;
    for (int i = 0; i < e; i++) v = mul(v, 8'd2);
    return v;
  endfunction

  // ---------------- RS encoder ----------------
  logic [7:0] gen [TT*2+1];
  task automatic build_gen();
    for (int i = 0; i <= 2*TT; i++) gen[i] = 0;
    gen[0] = 1;
    for (int j = 1; j <= 2*TT; j++) begin
      logic [7:0] r = apow(j);
      for (int i = 2*TT; i >= 1; i--) gen[i] = gen[i-1] ^ mul(gen[i], r);
      gen[0] = mul(gen[0], r);
    end
  endtask
  function automatic void rs_encode(input logic [7:0] m [KRS], output logic [7:0] c [NRS]);
    logic [7:0] rem [2*TT];
    for (int i = 0; i < 2*TT; i++) rem[i] = 0;
    for (int i = KRS - 1; i >= 0; i--) begin
      logic [7:0] fb = m[i] ^ rem[2*TT-1];
      for (int j = 2*TT - 1; j >= 1; j--) rem[j] = rem[j-1] ^ mul(fb, gen[j]);
      rem[0] = mul(fb, gen[0]);
    end
    for (int i = 0; i < 2*TT; i++) c[i] = rem[i];
    for (int i = 0; i < KRS; i++) c[2*TT + i] = m[i];
  endfunction

  // ---------------- RM(128,8) ----------------
  function automatic logic [NRM-1:0] rm_enc(input logic [7:0] s);
    logic [NRM-1:0] w;
    for (int j = 0; j < NRM; j++) w[j] = s[7] ^ (^(7'(j) & s[6:0]));
    return w;
  endfunction
  // direct correlation decoder (largest |F|, lowest index on ties)
  function automatic void rm_ref(input logic [M*NRM-1:0] sg, output logic [7:0] sym, output int rel);
    int best = -1, bi = 0, bs = 0;
    for (int k = 0; k < NRM; k++) begin
      int f = 0;
      for (int j = 0; j < NRM; j++) begin
        int x = 0;
        for (int g = 0; g < M; g++) x += sg[g*NRM + j] ? 1 : -1;
        f += (^(7'(j) & 7'(k))) ? -x : x;
      end
      if ((f < 0 ? -f : f) > best) begin best = (f < 0 ? -f : f); bi = k; bs = (f > 0); end
    end
    sym = {1'(bs), 7'(bi)};
    rel = best;
  endfunction

  logic [M*NRM-1:0] segs [NRS];

  task automatic run_word(input int n_weak, input int n_strong, input int max_flips);
    logic [7:0] m [KRS];
    logic [7:0] c [NRS];
    logic [7:0] r [NRS];
    int rel [NRS];
    int kind [NRS];
    int order [NRS];
    int exp_k;
    bit exp_ok;
    int t_last, t_done;
    for (int i = 0; i < KRS; i++) m[i] = 8'($urandom);
    rs_encode(m, c);
    for (int l = 0; l < NRS; l++) kind[l] = 0;
    for (int n = 0; n < n_weak; n++) begin int p; do p = $urandom_range(0, NRS-1); while (kind[p] != 0); kind[p] = 1; end
    for (int n = 0; n < n_strong; n++) begin int p; do p = $urandom_range(0, NRS-1); while (kind[p] != 0); kind[p] = 2; end
    for (int l = 0; l < NRS; l++) begin
      logic [7:0] bad;
      int nf;
      bad = c[l] ^ 8'($urandom_range(1, 255));
      for (int g = 0; g < M; g++)
        segs[l][g*NRM +: NRM] = (kind[l] == 2 || (kind[l] == 1 && g < 2)) ? rm_enc(bad) : rm_enc(c[l]);
      nf = (max_flips > 0) ? $urandom_range(0, max_flips) : 0;
      for (int f = 0; f < nf; f++) segs[l][$urandom_range(0, M*NRM-1)] ^= 1'b1;
      rm_ref(segs[l], r[l], rel[l]);
    end
    // stable ordering by reliability
    for (int l = 0; l < NRS; l++) order[l] = l;
    for (int a = 1; a < NRS; a++)
      for (int b = a; b > 0 && rel[order[b]] < rel[order[b-1]]; b--) begin
        int tmp = order[b]; order[b] = order[b-1]; order[b-1] = tmp;
      end
    exp_ok = 0; exp_k = 0;
    for (int k = 0; k <= TT && !exp_ok; k++) begin
      int outside = 0;
      for (int q = (k == 0 ? 0 : 2*k); q < NRS; q++) if (r[order[q]] != c[order[q]]) outside++;
      if (outside <= TT - k) begin exp_ok = 1; exp_k = k; end
    end
    // drive
    for (int l = 0; l < NRS; l++) begin
      seg <= segs[l];
      seg_valid <= 1'b1;
      @(posedge clk);
      while (!seg_ready) begin n_stall++; @(posedge clk); end
      seg_valid <= 1'b0;
      @(posedge clk);
    end
    t_last = 0;
    while (!done) begin @(posedge clk); t_last++; end
    checks++;
    if (exp_ok && !dec_ok) begin
      failures++;
      $display("FAIL dec_ok=%0d expected %0d (weak=%0d strong=%0d)", dec_ok, exp_ok, n_weak, n_strong);
    end
    if (exp_ok) begin
      logic [8*KRS-1:0] em;
      for (int i = 0; i < KRS; i++) em[8*i +: 8] = m[i];
      checks += 2;
      if (win_trial != 4'(exp_k)) begin failures++; $display("FAIL trial %0d expected %0d", win_trial, exp_k); end
      if (msg !== em) begin failures++; $display("FAIL message mismatch (trial %0d)", exp_k);
      end
      if (exp_k == 0) n_trial0++; else n_erasure++;
    end else begin
      // beyond the GMD radius: either no trial passes or the result is a
      // different codeword (the 2t-erasure trial always yields a codeword)
      logic [8*KRS-1:0] em;
      for (int i = 0; i < KRS; i++) em[8*i +: 8] = m[i];
      checks++;
      if (dec_ok && msg == em) begin failures++; $display("FAIL uncorrectable word decoded"); end
      n_fail++;
    end
    // RS latency after the last symbol: 36 syndrome + 60 KES + 124 erasure
    // addition + 12 last selection + magnitude computation
    checks++;
    if (t_last != 316) begin failures++; $display("FAIL latency %0d", t_last); end
    $display("word weak=%0d strong=%0d ok=%0d trial=%0d exp=%0d/%0d rs_cycles=%0d",
             n_weak, n_strong, dec_ok, win_trial, exp_ok, exp_k, t_last);
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    seg_valid = 0; seg = '0;
    build_gen();
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    run_word(0, 0, 0);        // clean
    run_word(0, 10, 20);      // t strong errors: error-only limit
    run_word(16, 0, 20);      // weak errors: erasure trials
    run_word(20, 0, 10);      // erasure-only trial
    run_word(24, 0, 10);      // beyond GMD
    for (int i = 0; i < 6; i++)
      run_word($urandom_range(0, 18), $urandom_range(0, 3), 60);
    checks++;
    if (n_trial0 == 0 || n_erasure == 0 || n_fail == 0 || n_stall == 0) begin
      failures++;
      $display("FAIL mechanism not exercised: trial0=%0d erasure=%0d fail=%0d stall=%0d",
               n_trial0, n_erasure, n_fail, n_stall);
    end
    $display("mechanisms: trial0=%0d erasure_trial=%0d failure=%0d input_stall_cycles=%0d",
             n_trial0, n_erasure, n_fail, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
