// Checks rm_combine: every output equals (#ones - #zeros) over the three copies
// of that coordinate, for random and all-ones / all-zeros segments.
module tb_rm_combine;
  logic [383:0] seg;
  logic signed [2:0] sums [128];
  int checks = 0, failures = 0;
  rm_combine dut (.seg, .sums);
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int t = 0; t < 50; t++) begin
      seg = (t == 0) ? '0 : (t == 1) ? '1 : {12{$urandom}};
      #1;
      for (int j = 0; j < 128; j++) begin
        int e;
        e = 0;
        for (int g = 0; g < 3; g++) e += seg[g*128 + j] ? 1 : -1;
        checks++;
        if (int'(sums[j]) != e) begin
          failures++;
          if (failures < 5) $display("FAIL j=%0d got %0d exp %0d", j, sums[j], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
