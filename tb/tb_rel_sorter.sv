// Checks rel_sorter: 36 random reliabilities (drawn from a small range so that
// ties occur) are inserted one per cycle; the 20 cells must then hold the 20
// smallest values in ascending order with their positions, earlier position
// first on ties (stable sort computed here). clear must empty the list.
module tb_rel_sorter;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0;
  logic [8:0] in_val = '0;
  logic [5:0] in_pos = '0;
  logic [19:0][8:0] val_out;
  logic [19:0][5:0] pos_out;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  rel_sorter dut (.*);
  initial begin
    #500000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      int v [36];
      int ord [36];
      @(negedge clk) clear = 1;
      @(negedge clk) clear = 0;
      checks++;
      if (val_out[0] != '1) begin failures++; $display("FAIL clear"); end
      for (int l = 0; l < 36; l++) begin
        v[l] = (t % 2) ? $urandom_range(0, 20) : $urandom_range(0, 384);
        ord[l] = l;
        in_val = 9'(v[l]); in_pos = 6'(l); in_valid = 1;
        @(negedge clk);
      end
      in_valid = 0;
      for (int a = 1; a < 36; a++)
        for (int b = a; b > 0; b--)
          if (v[ord[b]] < v[ord[b-1]]) begin
            int tmp;
            tmp = ord[b]; ord[b] = ord[b-1]; ord[b-1] = tmp;
          end
      for (int k = 0; k < 20; k++) begin
        checks += 2;
        if (int'(val_out[k]) != v[ord[k]]) begin failures++; $display("FAIL val[%0d]", k); end
        if (int'(pos_out[k]) != ord[k])    begin failures++; $display("FAIL pos[%0d] %0d exp %0d", k, pos_out[k], ord[k]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
