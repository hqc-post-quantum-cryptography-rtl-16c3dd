// Checks rs_kes: for e = 0..10 random symbol errors (any codeword gives the
// same syndromes as the error pattern alone, so the bench uses the zero
// codeword) the syndromes are computed here, the solver runs, and Lambda(X)
// must vanish exactly at alpha^(-l) for the error positions l, have degree e,
// report L = e, and X*B(X) must have a zero constant term. done must come 61
// clock edges after start (2t*3 = 60 folded iterations plus the start edge).
module tb_rs_kes;
  import tb_gf_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, done;
  logic [19:0][7:0] synd = '0;
  logic [20:0][7:0] lambda, xb;
  logic [5:0] l_lambda;
  logic [7:0] gamma;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  rs_kes dut (.*);
  initial begin
    #500000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 44; t++) begin
      int ne, lat, deg;
      logic [7:0] e [36];
      ne = t % 11;
      for (int l = 0; l < 36; l++) e[l] = 0;
      for (int n = 0; n < ne; n++) begin
        int p;
        do p = $urandom_range(0, 35); while (e[p] != 0);
        e[p] = 8'($urandom_range(1, 255));
      end
      for (int j = 1; j <= 20; j++) begin
        logic [7:0] s;
        s = 0;
        for (int l = 0; l < 36; l++) s ^= mul(e[l], apow(j * l));
        synd[j-1] = s;
      end
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      checks++;
      if (lat != 61) begin failures++; $display("FAIL latency %0d", lat); end
      deg = 0;
      for (int j = 0; j <= 20; j++) if (lambda[j] != 0) deg = j;
      checks += 3;
      if (deg != ne) begin failures++; $display("FAIL degree %0d exp %0d", deg, ne); end
      if (int'(l_lambda) != ne) begin failures++; $display("FAIL L %0d exp %0d", l_lambda, ne); end
      if (xb[0] != 0) begin failures++; $display("FAIL xb0"); end
      for (int l = 0; l < 36; l++) begin
        logic [7:0] v;
        v = 0;
        for (int j = 20; j >= 0; j--) v = mul(v, apow(-l)) ^ lambda[j];
        checks++;
        if ((v == 0) != (e[l] != 0)) begin failures++; $display("FAIL root at %0d", l); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
