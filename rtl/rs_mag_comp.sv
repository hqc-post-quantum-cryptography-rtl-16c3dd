// Error/erasure magnitude computation and correction. For the selected errata
// locator Lambda(X) (roots alpha^(-l) at the error and erasure positions l) it
//   1. forms the evaluator Omega(X) = Lambda(X) S(X) mod X^2t, with
//      S(X) = sum_j S_{j+1} X^j, one Lambda coefficient per cycle on 2t
//      general multipliers (2t cycles),
//   2. evaluates Omega at every alpha^(-l) with a Chien engine (N_RS/LC cycles),
//   3. for l = 0..N_RS-1, one per cycle, computes
//        e_l = Omega(alpha^(-l)) * alpha^(-l) / Lambda_odd(alpha^(-l))
//      at the root positions (one inverter, two multipliers) and outputs
//      r_l + e_l, reading r_l from the received-word buffer.
// This is Forney's formula, which holds for any scaling of Lambda and so for
// the alpha_i-scaled polynomials of the erasure addition. Lambda_odd values
// come stored from the polynomial selection, as in the paper.
// Interface: start pulse with lam, synd, root and odd valid (held until done);
// out_valid/out_pos/out_sym stream the corrected word, position 0 first;
// done pulses with the last symbol. Latency 2t + ceil(N_RS/LC) + N_RS + 2 cycles
// (70 cycles for the default sizes).
// The paper computes magnitudes with the Horiguchi-Koetter formula from B(X)
// and gamma and leaves its adaptation to the scaled GMD polynomials open; using
// Forney's formula with the syndromes is this design's replacement. The Chien
// engine's odd-part output is unused here, since only Omega is evaluated.
module rs_mag_comp #(
  parameter int unsigned TWO_T = hqc_pkg::TWO_T,
  parameter int unsigned N_RS  = hqc_pkg::N_RS,
  parameter int unsigned LC    = 3,
  parameter int unsigned NC    = TWO_T + 1,
  parameter int unsigned PW    = $clog2(N_RS)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  hqc_pkg::gf_t [NC-1:0]   lam,
  input  hqc_pkg::gf_t [TWO_T-1:0] synd,
  input  logic [N_RS-1:0]         root,
  input  hqc_pkg::gf_t [N_RS-1:0] odd,
  output logic [PW-1:0]           rd_addr,
  input  hqc_pkg::gf_t            rd_data,
  output logic                    out_valid,
  output logic [PW-1:0]           out_pos,
  output hqc_pkg::gf_t            out_sym,
  output logic                    done
);
  import hqc_pkg::*;

  typedef enum logic [1:0] {IDLE, OMEGA, EVAL, CORR} state_t;
  state_t state_q;

  localparam int unsigned IW = $clog2(NC + 1);

  gf_t [NC-1:0]   om_q;          // Omega coefficients (top one stays 0)
  gf_t [N_RS-1:0] omv_q;         // Omega(alpha^(-l))
  logic [IW-1:0]  i_q;
  logic [PW-1:0]  l_q;
  logic           ce_start;
  logic           ce_valid, ce_done;
  logic [PW-1:0]  ce_base;
  logic [LC-1:0]  ce_ok;
  gf_t [LC-1:0]   ce_val;
  gf_t [LC-1:0]   ce_odd;        // odd part not needed for Omega

  chien_eval #(.NC(NC), .N_RS(N_RS), .LC(LC), .PW(PW)) u_chien (
    .clk, .rst_n, .start(ce_start), .coeff(om_q),
    .out_valid(ce_valid), .base(ce_base), .lane_ok(ce_ok),
    .val(ce_val), .odd(ce_odd), .done(ce_done)
  );

  logic ev_go_q;                 // first EVAL cycle: load Omega into the engine
  assign ce_start = (state_q == EVAL) && ev_go_q;
  assign rd_addr  = l_q;

  // magnitude at position l_q
  gf_t mag;
  always_comb begin
    mag = '0;
    if (root[l_q])
      mag = gf_mul(gf_mul(omv_q[l_q], gf_pos_inv_pow(int'(l_q), 1)), gf_inv(odd[l_q]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= IDLE;
      om_q      <= '0;
      omv_q     <= '0;
      i_q       <= '0;
      l_q       <= '0;
      out_valid <= 1'b0;
      out_pos   <= '0;
      out_sym   <= '0;
      done      <= 1'b0;
      ev_go_q   <= 1'b0;
    end else begin
      ev_go_q   <= 1'b0;
      out_valid <= 1'b0;
      done      <= 1'b0;
      case (state_q)
        IDLE: if (start) begin
          om_q    <= '0;
          i_q     <= '0;
          state_q <= OMEGA;
        end
        OMEGA: begin
          // Omega_j += Lambda_i * S_{j-i+1}, j = i..2t-1
          for (int j = 0; j < int'(TWO_T); j++)
            if (j >= int'(i_q))
              om_q[j] <= om_q[j] ^ gf_mul(lam[i_q], synd[j - int'(i_q)]);
          i_q <= i_q + 1'b1;
          if (i_q == IW'(TWO_T - 1)) begin
            state_q <= EVAL;
            ev_go_q <= 1'b1;
          end
        end
        EVAL: if (ce_valid) begin
          for (int k = 0; k < LC; k++)
            if (ce_ok[k]) omv_q[int'(ce_base) + k] <= ce_val[k];
          if (ce_done) begin
            l_q     <= '0;
            state_q <= CORR;
          end
        end
        CORR: begin
          out_valid <= 1'b1;
          out_pos   <= l_q;
          out_sym   <= rd_data ^ mag;
          l_q       <= l_q + 1'b1;
          if (l_q == PW'(N_RS - 1)) begin
            done    <= 1'b1;
            state_q <= IDLE;
          end
        end
        default: state_q <= IDLE;
      endcase
    end
  end
endmodule
