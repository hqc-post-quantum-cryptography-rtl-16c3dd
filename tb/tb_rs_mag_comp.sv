// Checks rs_mag_comp. A random message is RS(36,16)-encoded here (generator
// roots alpha^1..alpha^20), up to 20 symbols are corrupted, and the bench
// supplies the syndromes of the corrupted word, a randomly scaled errata
// locator over the corrupted positions (plus some extra, uncorrupted
// positions, like erasures that hit correct symbols), the root flags and the
// Lambda_odd values. The streamed output must be the original codeword,
// position 0 first, and done must come 70 clock edges after start.
module tb_rs_mag_comp;
  import tb_gf_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, out_valid, done;
  logic [20:0][7:0] lam = '0;
  logic [19:0][7:0] synd = '0;
  logic [35:0] root = '0;
  logic [35:0][7:0] odd = '0;
  logic [5:0] rd_addr, out_pos;
  logic [7:0] rd_data, out_sym;
  logic [7:0] r [36];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  assign rd_data = (rd_addr < 36) ? r[rd_addr] : 8'h00;
  rs_mag_comp dut (.*);
  logic [7:0] gen [21];
  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i <= 20; i++) gen[i] = 0;
    gen[0] = 1;
    for (int j = 1; j <= 20; j++) begin
      for (int i = 20; i >= 1; i--) gen[i] = gen[i-1] ^ mul(gen[i], apow(j));
      gen[0] = mul(gen[0], apow(j));
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      logic [7:0] c [36];
      logic [7:0] rem [20];
      int ne, nx, lat, got;
      for (int i = 0; i < 20; i++) rem[i] = 0;
      for (int i = 0; i < 16; i++) c[20 + i] = 8'($urandom);
      for (int i = 15; i >= 0; i--) begin
        logic [7:0] fb;
        fb = c[20 + i] ^ rem[19];
        for (int j = 19; j >= 1; j--) rem[j] = rem[j-1] ^ mul(fb, gen[j]);
        rem[0] = mul(fb, gen[0]);
      end
      for (int i = 0; i < 20; i++) c[i] = rem[i];
      for (int l = 0; l < 36; l++) r[l] = c[l];
      ne = $urandom_range(0, 20);
      nx = $urandom_range(0, 20 - ne);
      root = '0;
      lam = '0; lam[0] = 8'($urandom_range(1, 255));
      for (int n = 0; n < ne + nx; n++) begin
        int p;
        do p = $urandom_range(0, 35); while (root[p]);
        root[p] = 1;
        if (n < ne) r[p] = c[p] ^ 8'($urandom_range(1, 255));
        for (int j = 20; j >= 1; j--) lam[j] = lam[j] ^ mul(apow(p), lam[j-1]);
      end
      for (int l = 0; l < 36; l++) begin
        logic [7:0] o;
        o = 0;
        for (int j = 1; j <= 20; j += 2) o ^= mul(lam[j], apow(-j * l));
        odd[l] = o;
      end
      for (int j = 1; j <= 20; j++) begin
        logic [7:0] s;
        s = 0;
        for (int l = 0; l < 36; l++) s ^= mul(r[l], apow(j * l));
        synd[j-1] = s;
      end
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      lat = 1; got = 0;
      forever begin
        if (out_valid) begin
          checks++;
          if (int'(out_pos) != got || out_sym != c[out_pos]) begin
            failures++; $display("FAIL pos %0d sym %h exp %h", out_pos, out_sym, c[out_pos]);
          end
          got++;
        end
        if (done) break;
        @(negedge clk); lat++;
      end
      checks += 2;
      if (got != 36) begin failures++; $display("FAIL %0d symbols", got); end
      if (lat != 70) begin failures++; $display("FAIL latency %0d", lat); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
