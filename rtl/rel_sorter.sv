// Reliability sorter: an insertion machine of NCELL cells that keeps the NCELL
// smallest max1 values seen since clear, in ascending order, together with the
// RS symbol positions they belong to. Cell 0 holds the least reliable symbol,
// so pos_out[i] is the position of the erasure alpha_i added in iteration i of
// the GMD erasure addition.
// Each cell has a register, a comparator and a multiplexer: on in_valid, cell k
// keeps its entry if the new value is not smaller, takes the new value if it is
// smaller here but not in cell k-1, and otherwise takes cell k-1's entry
// (shift). Ties keep the earlier entry first. One value per cycle; the list is
// up to date the cycle after in_valid. clear empties all cells (value = max).
// The structure follows the paper; the unfolded form (one value per cycle
// instead of a folded, multi-cycle sorter) and the tie rule are this design's.
module rel_sorter #(
  parameter int unsigned NCELL = hqc_pkg::TWO_T,
  parameter int unsigned VW    = 9,
  parameter int unsigned PW    = $clog2(hqc_pkg::N_RS)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 in_valid,
  input  logic [VW-1:0]        in_val,
  input  logic [PW-1:0]        in_pos,
  output logic [NCELL-1:0][VW-1:0] val_out,
  output logic [NCELL-1:0][PW-1:0] pos_out
);
  logic [NCELL-1:0] less;   // new value smaller than cell k

  always_comb
    for (int k = 0; k < NCELL; k++) less[k] = in_val < val_out[k];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      val_out <= '1;
      pos_out <= '0;
    end else if (clear) begin
      val_out <= '1;
      pos_out <= '0;
    end else if (in_valid) begin
      for (int k = 0; k < NCELL; k++) begin
        if (less[k]) begin
          if (k > 0 && less[k-1]) begin
            val_out[k] <= val_out[k-1];
            pos_out[k] <= pos_out[k-1];
          end else begin
            val_out[k] <= in_val;
            pos_out[k] <= in_pos;
          end
        end
      end
    end
  end
endmodule
