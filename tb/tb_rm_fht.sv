// Checks rm_fht against a direct Hadamard transform
// F[k] = sum_j x[j] (-1)^popcount(j&k) for random inputs in [-3,3], and that
// the result arrives 8 clock edges after start is applied (one load edge and
// log2(128) = 7 butterfly passes).
module tb_rm_fht;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic signed [2:0] din [128];
  logic signed [9:0] dout [128];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  rm_fht dut (.*);
  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int j = 0; j < 128; j++) din[j] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      int lat;
      int x [128];
      for (int j = 0; j < 128; j++) begin
        x[j] = $urandom_range(0, 6) - 3;
        din[j] = 3'(x[j]);
      end
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      checks++;
      if (lat != 8) begin failures++; $display("FAIL latency %0d", lat); end
      for (int k = 0; k < 128; k++) begin
        int f;
        f = 0;
        for (int j = 0; j < 128; j++) f += ($countones(j & k) % 2) ? -x[j] : x[j];
        checks++;
        if (int'(dout[k]) != f) begin
          failures++;
          if (failures < 5) $display("FAIL k=%0d got %0d exp %0d", k, dout[k], f);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
