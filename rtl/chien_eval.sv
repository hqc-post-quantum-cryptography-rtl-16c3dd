// Parallel Chien search engine: evaluates a polynomial c(X) of NC coefficients
// at the N_RS points X = alpha^(-l), l = 0..N_RS-1, LC points per cycle.
// Register R_j holds c_j*alpha^(-j*l) for the first point l of the current
// group and is multiplied by the constant alpha^(-j*LC) every cycle; lane k
// adds R_j*alpha^(-j*k) over j. Besides the full value it returns the sum over
// the odd-degree terms (Lambda_odd(alpha^(-l))), which the magnitude formula
// uses. Only constant multipliers are needed.
// Interface: start loads coeff; then for ceil(N_RS/LC) consecutive cycles
// out_valid is high and lane k of val/odd holds the value at l = base + k
// (lanes with l >= N_RS are flagged off in lane_ok). done pulses with the last group.
// The constant-multiplier array follows the paper; the register/lane
// arrangement is this design's.
module chien_eval #(
  parameter int unsigned NC   = hqc_pkg::NCOEF,
  parameter int unsigned N_RS = hqc_pkg::N_RS,
  parameter int unsigned LC   = 3,
  parameter int unsigned PW   = $clog2(N_RS)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  hqc_pkg::gf_t [NC-1:0] coeff,
  output logic                  out_valid,
  output logic [PW-1:0]         base,
  output logic [LC-1:0]         lane_ok,
  output hqc_pkg::gf_t [LC-1:0] val,
  output hqc_pkg::gf_t [LC-1:0] odd,
  output logic                  done
);
  import hqc_pkg::*;

  gf_t [NC-1:0]  r_q;
  logic          busy_q;
  logic [PW-1:0] base_q;

  always_comb begin
    for (int k = 0; k < LC; k++) begin
      gf_t v, o;
      v = '0;
      o = '0;
      for (int j = 0; j < NC; j++) begin
        gf_t t;
        t = gf_mul(r_q[j], gf_exp_neg(j * k));
        v = v ^ t;
        if (j % 2 == 1) o = o ^ t;
      end
      val[k]     = v;
      odd[k]     = o;
      lane_ok[k] = (int'(base_q) + k) < int'(N_RS);
    end
  end

  assign out_valid = busy_q;
  assign base      = base_q;
  assign done      = busy_q && (int'(base_q) + int'(LC) >= int'(N_RS));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_q    <= '0;
      busy_q <= 1'b0;
      base_q <= '0;
    end else if (start) begin
      r_q    <= coeff;
      busy_q <= 1'b1;
      base_q <= '0;
    end else if (busy_q) begin
      for (int j = 0; j < NC; j++) r_q[j] <= gf_mul(r_q[j], gf_exp_neg(j * LC));
      base_q <= base_q + PW'(LC);
      if (done) busy_q <= 1'b0;
    end
  end
endmodule
