// Checks rm_peak against a linear search for the largest magnitude (lowest
// index on ties) on random vectors, including vectors built with ties.
module tb_rm_peak;
  logic signed [9:0] f [128];
  logic [8:0] max1;
  logic [6:0] idx;
  logic pos;
  int checks = 0, failures = 0;
  rm_peak dut (.*);
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 300; t++) begin
      int best, bi, bp;
      best = -1; bi = 0; bp = 0;
      for (int j = 0; j < 128; j++) f[j] = 10'($urandom_range(0, (t < 100) ? 20 : 768) - ((t < 100) ? 10 : 384));
      #1;
      for (int j = 0; j < 128; j++) begin
        int v, m;
        v = int'(f[j]);
        m = v < 0 ? -v : v;
        if (m > best) begin best = m; bi = j; bp = (v > 0); end
      end
      checks += 3;
      if (int'(max1) != best) begin failures++; $display("FAIL max1 %0d exp %0d", max1, best); end
      if (int'(idx) != bi)    begin failures++; $display("FAIL idx %0d exp %0d", idx, bi); end
      if (int'(pos) != bp)    begin failures++; $display("FAIL pos %0d exp %0d", pos, bp); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
