// Checks rs_buffer: random words are written to all 36 locations and read back
// through both read ports in random order; out-of-range addresses read 0.
module tb_rs_buffer;
  logic clk = 0, we = 0;
  logic [5:0] waddr = '0, raddr_a = '0, raddr_b = '0;
  logic [7:0] wdata = '0, rdata_a, rdata_b;
  logic [7:0] model [36];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  rs_buffer dut (.*);
  initial begin
    #500000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int r = 0; r < 5; r++) begin
      for (int l = 0; l < 36; l++) begin
        @(negedge clk);
        we = 1; waddr = 6'(l); wdata = 8'($urandom); model[l] = wdata;
      end
      @(negedge clk) we = 0;
      for (int k = 0; k < 100; k++) begin
        raddr_a = 6'($urandom_range(0, 35)); raddr_b = 6'($urandom_range(0, 40));
        #1;
        checks += 2;
        if (rdata_a != model[raddr_a]) begin failures++; $display("FAIL port a"); end
        if (rdata_b != ((raddr_b < 36) ? model[raddr_b] : 8'h00)) begin failures++; $display("FAIL port b"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
