// Checks rs_syndrome: a random received word sits in a behavioural buffer
// (combinational read, like rs_buffer); the 20 syndromes must equal the direct
// evaluations r(alpha^j), j = 1..20, and done must come 37 clock edges after
// start (36 Horner steps plus the start edge). A valid RS codeword (all-zero
// syndromes) is included.
module tb_rs_syndrome;
  import tb_gf_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, done;
  logic [5:0] rd_addr;
  logic [7:0] rd_data;
  logic [19:0][7:0] synd;
  logic [7:0] word [36];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  assign rd_data = (rd_addr < 36) ? word[rd_addr] : 8'h00;
  rs_syndrome dut (.*);
  initial begin
    #500000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      int lat;
      for (int l = 0; l < 36; l++) word[l] = (t == 0) ? 8'h00 : 8'($urandom);
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      checks++;
      if (lat != 37) begin failures++; $display("FAIL latency %0d", lat); end
      for (int j = 1; j <= 20; j++) begin
        logic [7:0] s;
        s = 0;
        for (int l = 0; l < 36; l++) s ^= mul(word[l], apow(j * l));
        checks++;
        if (synd[j-1] != s) begin failures++; $display("FAIL S%0d %h exp %h", j, synd[j-1], s); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
