// RM input combining. One RS symbol position of c' is an M_REP*N_RM-bit segment
// made of M_REP repeated copies (groups) of an N_RM-bit RM codeword. Every bit is
// mapped to +1 ('1') or -1 ('0') and the M_REP groups are added component-wise,
// giving N_RM small signed integers in [-M_REP, +M_REP] that feed the FHT.
// Group g occupies bits [g*N_RM +: N_RM] of seg, bit j of a group is
// coordinate j. The mapping and the group sum follow the paper; the bit
// ordering inside the segment is this design's choice.
// Purely combinational.
module rm_combine #(
  parameter int unsigned N_RM  = hqc_pkg::N_RM,
  parameter int unsigned M_REP = hqc_pkg::M_REP,
  parameter int unsigned CW    = $clog2(M_REP + 1) + 1   // signed result width
) (
  input  logic [M_REP*N_RM-1:0]         seg,
  output logic signed [CW-1:0] sums [N_RM]
);
  always_comb begin
    for (int j = 0; j < N_RM; j++) begin
      logic signed [CW-1:0] acc;
      acc = '0;
      for (int g = 0; g < M_REP; g++)
        acc = seg[g*N_RM + j] ? acc + CW'(signed'(1)) : acc - CW'(signed'(1));
      sums[j] = acc;
    end
  end
endmodule
