// Key equation solver: inversionless Berlekamp-Massey algorithm in the form
// whose error locator Lambda(X), auxiliary polynomial B(X) and scalar gamma
// feed the one-pass GMD erasure addition directly. With S_0..S_{2t-1} the
// syndromes (S_0 = r(alpha)), iteration r = 0..2t-1 does
//   Lambda <- gamma*Lambda + Delta*P            (P = X*B)
//   if Delta != 0 and 2L <= r:  P <- X*Lambda_old, L <- r+1-L, gamma <- Delta
//   else                        P <- X*P
//   Delta <- sum_i Lambda_i * S_{r+1-i}          (next discrepancy)
// P after the last iteration is X*B(X), the initial value of the erasure
// addition's second polynomial, and L is the locator length L_Lambda.
// The 2t+1 coefficient slices are folded by FOLD onto PE = ceil((2t+1)/FOLD)
// processing elements, so one iteration takes FOLD cycles and the whole solve
// 2t*FOLD cycles (60 for t = 10, FOLD = 3). Slices are processed from the high
// coefficients down so that X*(.) reads coefficients not yet overwritten.
// Each PE has two multipliers for the update and a third that accumulates the
// next discrepancy; the paper's ePIBM form needs only two (see README).
// Interface: start pulse with synd valid; done pulses when lambda, xb, l_lambda
// and gamma hold the result, 2t*FOLD cycles after the start cycle.
module rs_kes #(
  parameter int unsigned TWO_T = hqc_pkg::TWO_T,
  parameter int unsigned FOLD  = 3,
  parameter int unsigned NC    = TWO_T + 1,
  parameter int unsigned LW    = $clog2(2*TWO_T + 2)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  hqc_pkg::gf_t [TWO_T-1:0] synd,
  output logic                     done,
  output hqc_pkg::gf_t [NC-1:0]    lambda,
  output hqc_pkg::gf_t [NC-1:0]    xb,
  output logic [LW-1:0]            l_lambda,
  output hqc_pkg::gf_t             gamma
);
  import hqc_pkg::*;

  localparam int unsigned PE = (NC + FOLD - 1) / FOLD;
  localparam int unsigned SW = $clog2(FOLD + 1);
  localparam int unsigned RW = $clog2(TWO_T + 1);

  gf_t [TWO_T-1:0] s_q;
  gf_t             delta_q, acc_q;
  logic            busy_q, upd_q;
  logic [SW-1:0]   sc_q;        // slice counter, 0 = highest slice
  logic [RW-1:0]   r_q;

  logic            upd;
  gf_t             acc_d;
  gf_t [NC-1:0]    lambda_d, xb_d;
  int unsigned     slice;

  always_comb begin
    upd      = (sc_q == '0) ? ((delta_q != '0) && ({1'b0, l_lambda, 1'b0} <= (LW+2)'(r_q)))
                            : upd_q;
    slice    = FOLD - 1 - int'(sc_q);
    lambda_d = lambda;
    xb_d     = xb;
    acc_d    = acc_q;
    for (int k = 0; k < PE; k++) begin
      int unsigned j;
      gf_t         lam_new;
      j       = slice * PE + k;
      lam_new = '0;
      if (j < NC) begin
        lam_new     = gf_mul(gamma, lambda[j]) ^ gf_mul(delta_q, xb[j]);
        lambda_d[j] = lam_new;
        if (j == 0)   xb_d[j] = '0;
        else if (upd) xb_d[j] = lambda[j-1];
        else          xb_d[j] = xb[j-1];
        // next discrepancy: sum_j lam_new_j * S_{r+1-j}
        if (int'(r_q) + 1 - int'(j) >= 0 && int'(r_q) + 1 - int'(j) < int'(TWO_T))
          acc_d = acc_d ^ gf_mul(lam_new, s_q[int'(r_q) + 1 - int'(j)]);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q   <= 1'b0;
      done     <= 1'b0;
      upd_q    <= 1'b0;
      sc_q     <= '0;
      r_q      <= '0;
      s_q      <= '0;
      delta_q  <= '0;
      acc_q    <= '0;
      lambda   <= '0;
      xb       <= '0;
      l_lambda <= '0;
      gamma    <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy_q) begin
        busy_q   <= 1'b1;
        s_q      <= synd;
        delta_q  <= synd[0];
        acc_q    <= '0;
        sc_q     <= '0;
        r_q      <= '0;
        lambda   <= {{(NC-1){8'h00}}, 8'h01};
        xb       <= {{(NC-1){8'h00}}, 8'h01};
        l_lambda <= '0;
        gamma    <= 8'h01;
      end else if (busy_q) begin
        lambda <= lambda_d;
        xb     <= xb_d;
        upd_q  <= upd;
        if (sc_q == SW'(FOLD - 1)) begin
          sc_q    <= '0;
          acc_q   <= '0;
          delta_q <= acc_d;
          if (upd) begin
            gamma    <= delta_q;
            l_lambda <= LW'(r_q) + 1'b1 - l_lambda;
          end
          r_q <= r_q + 1'b1;
          if (r_q == RW'(TWO_T - 1)) begin
            busy_q <= 1'b0;
            done   <= 1'b1;
          end
        end else begin
          sc_q  <= sc_q + 1'b1;
          acc_q <= acc_d;
        end
      end
    end
  end
endmodule
