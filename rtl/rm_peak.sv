// Peak search over the FHT output: a binary comparison tree finds the entry of
// largest magnitude. It returns that magnitude (max1, the reliability of the
// RM-decoded symbol), its index and whether the entry is positive. On equal
// magnitudes the lower index wins. The decoded RM symbol is {pos, idx}.
// Purely combinational; the tree has LOG_N levels of comparators.
// The tree follows the paper; the tie rule and the polarity of the sign bit
// (1 = positive peak, which recovers the constant-term message bit under the
// '1' -> +1 mapping) are this design's choices.
module rm_peak #(
  parameter int unsigned LOG_N = $clog2(hqc_pkg::N_RM),
  parameter int unsigned W     = 3 + LOG_N
) (
  input  logic signed [W-1:0] f [2**LOG_N],
  output logic [W-2:0]                      max1,
  output logic [LOG_N-1:0]                  idx,
  output logic                              pos
);
  localparam int unsigned N = 2**LOG_N;

  // level-by-level tree stored in flat arrays (node 1 is the root)
  logic [W-1:0]     mag [2*N];
  logic [LOG_N-1:0] ix  [2*N];
  logic             ps  [2*N];

  always_comb begin
    for (int i = 0; i < N; i++) begin
      mag[N+i] = f[i][W-1] ? W'(-f[i]) : W'(f[i]);
      ix[N+i]  = LOG_N'(i);
      ps[N+i]  = ~f[i][W-1] & (f[i] != '0);
    end
    for (int n = N - 1; n >= 1; n--) begin
      if (mag[2*n+1] > mag[2*n]) begin
        mag[n] = mag[2*n+1]; ix[n] = ix[2*n+1]; ps[n] = ps[2*n+1];
      end else begin
        mag[n] = mag[2*n];   ix[n] = ix[2*n];   ps[n] = ps[2*n];
      end
    end
    mag[0] = '0; ix[0] = '0; ps[0] = 1'b0;
  end

  assign max1 = mag[1][W-2:0];
  assign idx  = ix[1];
  assign pos  = ps[1];
endmodule
