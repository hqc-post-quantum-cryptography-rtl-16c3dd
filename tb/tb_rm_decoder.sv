// Checks rm_decoder: random symbols are RM(128,8)-encoded (bit j = s7 xor
// parity(s[6:0] & j)), repeated three times, and corrupted by random bit flips
// (up to 150 of 384, sometimes far beyond the decoding radius). The output
// symbol and max1 are compared with a direct correlation decoder, and the
// output must arrive 9 clock edges after the segment is offered.
module tb_rm_decoder;
  logic clk = 0, rst_n = 0, seg_valid = 0, seg_ready, out_valid;
  logic [383:0] seg = '0;
  logic [7:0] sym;
  logic [8:0] max1;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  rm_decoder dut (.*);
  initial begin
    #500000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      logic [7:0] s, es;
      int best, bi, bs, nf, lat;
      s = 8'($urandom);
      for (int g = 0; g < 3; g++)
        for (int j = 0; j < 128; j++) seg[g*128 + j] = s[7] ^ (^(7'(j) & s[6:0]));
      nf = $urandom_range(0, (t % 3 == 0) ? 150 : 60);
      for (int f = 0; f < nf; f++) seg[$urandom_range(0, 383)] ^= 1'b1;
      best = -1; bi = 0; bs = 0;
      for (int k = 0; k < 128; k++) begin
        int c, x, m;
        c = 0;
        for (int j = 0; j < 128; j++) begin
          x = 0;
          for (int g = 0; g < 3; g++) x += seg[g*128 + j] ? 1 : -1;
          c += ($countones(j & k) % 2) ? -x : x;
        end
        m = c < 0 ? -c : c;
        if (m > best) begin best = m; bi = k; bs = (c > 0); end
      end
      es = {1'(bs), 7'(bi)};
      @(negedge clk) seg_valid = 1;
      @(negedge clk) seg_valid = 0;
      lat = 1;
      while (!out_valid) begin @(negedge clk); lat++; end
      checks += 3;
      if (lat != 9) begin failures++; $display("FAIL latency %0d", lat); end
      if (sym != es) begin failures++; $display("FAIL sym %h exp %h (flips %0d)", sym, es, nf); end
      if (int'(max1) != best) begin failures++; $display("FAIL max1 %0d exp %0d", max1, best); end
      if (nf < 40) begin checks++; if (sym != s) begin failures++; $display("FAIL not decoded"); end end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
