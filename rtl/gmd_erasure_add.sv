// One-pass GMD erasure addition (Wu's algorithm). Starting from the error-only
// locator Lambda(X) and P(X) = X*B(X) of the key equation solver, it adds the
// 2t least reliable positions as erasures, one per iteration, least reliable
// first. Iteration i, with a_i = alpha_i^(-1) and alpha_i = alpha^(pos_i):
//   evaluation:  Lam_i = Lambda(a_i),  Bv_i = P(a_i)           (Horner)
//   case 1 (Lam_i = 0, or Bv_i != 0 and L_Lam >= L_P):
//       Lambda <- Bv_i*Lambda + Lam_i*P ;  P <- (X + a_i) P ;  L_P++
//   case 2 (otherwise):
//       Lambda <- (X + a_i) Lambda ;  P <- alpha_i*Bv_i*X*Lambda + Lam_i*P ;  L_Lam++
// (GF(2^8) has characteristic 2, so minus is XOR.) The case-2 update of P is
// scaled by alpha_i to keep a multiplier out of the critical path; roots are
// unchanged, and the magnitude formula used downstream is scale-invariant.
// After iterations 2k-1 Lambda is the errata locator of GMD trial k (2k erasures).
//
// Architecture: polynomials are stored as NCH chunks of LE coefficients
// (padded with zero coefficients above X^2t) and processed most significant
// chunk first. Evaluation is an LE-parallel Horner loop per polynomial
// (acc <- acc*a^LE + sum_m c_m a^m), ceil((2t+1)/LE) cycles. Updating uses four
// multipliers per lane (Bv*Lambda_j, Lam*P_j, a*(Lambda_j or P_j),
// alpha*Bv*Lambda_{j-1}) and XI = 2 pipeline stages (products, then sums written
// back). Evaluation of iteration i+1 consumes each chunk as soon as it is
// written back, so an iteration takes NCH + XI cycles and all 2t iterations
// take NCH + 2t*(NCH + XI) cycles (4 + 20*6 = 124 for t = 10, LE = 6).
// Interface: start pulse with lambda, xb, l_lambda and the sorted erasure
// positions valid (held until done). lam_valid pulses once after every second
// iteration with lam_out = Lambda^(2k) and lam_trial = k (k = 1..t). done pulses
// with the last of them, NCH + 2t*(NCH + XI) cycles after the start cycle.
// The algorithm, the four-multiplier update, the alpha_i scaling, LE, XI and
// the overlapped schedule follow the paper; the chunk padding, the storage
// organisation and the handshake are this design's.
module gmd_erasure_add #(
  parameter int unsigned TWO_T = hqc_pkg::TWO_T,
  parameter int unsigned N_RS  = hqc_pkg::N_RS,
  parameter int unsigned LE    = 6,
  parameter int unsigned NC    = TWO_T + 1,
  parameter int unsigned LW    = $clog2(2*TWO_T + 2),
  parameter int unsigned PW    = $clog2(N_RS)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  hqc_pkg::gf_t [NC-1:0]    lambda,
  input  hqc_pkg::gf_t [NC-1:0]    xb,
  input  logic [LW-1:0]            l_lambda,
  input  logic [TWO_T-1:0][PW-1:0] era_pos,
  output logic                     lam_valid,
  output logic [$clog2(TWO_T/2+1)-1:0] lam_trial,
  output hqc_pkg::gf_t [NC-1:0]    lam_out,
  output logic                     done
);
  import hqc_pkg::*;

  localparam int unsigned NCH = (NC + LE - 1) / LE;   // chunks per polynomial
  localparam int unsigned NCP = NCH * LE;             // padded coefficient count
  localparam int unsigned XI  = 2;                    // update pipeline stages
  localparam int unsigned WIN = NCH + XI;             // cycles per iteration
  localparam int unsigned QW  = $clog2(WIN + 1);
  localparam int unsigned IW  = $clog2(TWO_T + 1);

  typedef enum logic [1:0] {IDLE, PRE_EVAL, ITER} state_t;
  state_t state_q;

  gf_t [NCP-1:0] lam_q, bb_q;          // Lambda^(i), P^(i)
  logic [LW-1:0] l_lam_q, l_bb_q;
  logic [QW-1:0] q_q;                  // cycle within an iteration window
  logic [IW-1:0] i_q;                  // iteration index
  gf_t           lam_i_q, bv_i_q, sb_q; // Lam_i, Bv_i, alpha_i*Bv_i
  gf_t           acc_l_q, acc_b_q;     // Horner accumulators
  logic          case1_q;

  // stage-1 pipeline registers of the update, one set per lane
  gf_t [LE-1:0]  p_bl_q, p_lb_q, p_a_q, sh_q, p_sb_q;
  logic          s1_case1_q;

  // ---------------- erasure point powers ----------------
  logic [PW-1:0] pos_cur, pos_nxt;
  gf_t           a_cur;                // a_i for the update
  gf_t [LE:0]    a_nxt_pow;            // a_{i+1}^m, m = 0..LE, for the evaluation
  logic [IW-1:0] i_eval;

  assign i_eval  = (state_q == PRE_EVAL) ? '0 : i_q + 1'b1;
  assign pos_cur = era_pos[i_q];
  assign pos_nxt = (i_eval < IW'(TWO_T)) ? era_pos[i_eval] : '0;
  assign a_cur   = gf_pos_inv_pow(int'(pos_cur), 1);
  always_comb
    for (int m = 0; m <= LE; m++) a_nxt_pow[m] = gf_pos_inv_pow(int'(pos_nxt), m);

  // ---------------- evaluation (Horner, LE-parallel) ----------------
  logic [$clog2(NCH+1)-1:0] ev_chunk;   // chunk read by the evaluation
  logic                     ev_first, ev_en;
  gf_t                      acc_l_d, acc_b_d;

  always_comb begin
    ev_en    = 1'b0;
    ev_chunk = '0;
    if (state_q == PRE_EVAL) begin
      ev_en    = 1'b1;
      ev_chunk = q_q[$bits(ev_chunk)-1:0];
    end else if (state_q == ITER && q_q >= QW'(XI) && q_q < QW'(WIN)) begin
      ev_en    = 1'b1;
      ev_chunk = $bits(ev_chunk)'(q_q - QW'(XI));
    end
    ev_first = (ev_chunk == '0);
    acc_l_d  = ev_first ? '0 : gf_mul(acc_l_q, a_nxt_pow[LE]);
    acc_b_d  = ev_first ? '0 : gf_mul(acc_b_q, a_nxt_pow[LE]);
    for (int m = 0; m < LE; m++) begin
      int unsigned j;
      j = NCP - LE * (int'(ev_chunk) + 1) + m;
      acc_l_d = acc_l_d ^ gf_mul(lam_q[j], a_nxt_pow[m]);
      acc_b_d = acc_b_d ^ gf_mul(bb_q[j],  a_nxt_pow[m]);
    end
  end

  // ---------------- update, stage 1 (products) ----------------
  logic                     up_rd;    // a chunk is read for updating this cycle
  logic [$clog2(NCH+1)-1:0] up_chunk;
  logic                     case1;

  assign up_rd    = (state_q == ITER) && (q_q < QW'(NCH));
  assign up_chunk = $bits(up_chunk)'(q_q);
  assign case1    = (lam_i_q == '0) || ((bv_i_q != '0) && (l_lam_q >= l_bb_q));

  gf_t [LE-1:0] p_bl_d, p_lb_d, p_a_d, sh_d, p_sb_d;
  always_comb begin
    for (int m = 0; m < LE; m++) begin
      int unsigned j;
      gf_t sel_j, sel_jm1, lam_jm1;
      j       = NCP - LE * (int'(up_chunk) + 1) + m;
      lam_jm1 = (j > 0) ? lam_q[j-1] : '0;
      sel_j   = case1 ? bb_q[j] : lam_q[j];
      sel_jm1 = (j > 0) ? (case1 ? bb_q[j-1] : lam_q[j-1]) : '0;
      p_bl_d[m] = gf_mul(bv_i_q, lam_q[j]);
      p_lb_d[m] = gf_mul(lam_i_q, bb_q[j]);
      p_a_d[m]  = gf_mul(a_cur, sel_j);
      sh_d[m]   = sel_jm1;
      p_sb_d[m] = gf_mul(sb_q, lam_jm1);
    end
  end

  // stage 2 writes chunk (q-1)
  logic                     up_wr;
  logic [$clog2(NCH+1)-1:0] wr_chunk;
  assign up_wr    = (state_q == ITER) && (q_q >= 1) && (q_q <= QW'(NCH));
  assign wr_chunk = $bits(wr_chunk)'(q_q - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= IDLE;
      lam_q      <= '0;
      bb_q       <= '0;
      l_lam_q    <= '0;
      l_bb_q     <= '0;
      q_q        <= '0;
      i_q        <= '0;
      lam_i_q    <= '0;
      bv_i_q     <= '0;
      sb_q       <= '0;
      acc_l_q    <= '0;
      acc_b_q    <= '0;
      case1_q    <= 1'b0;
      p_bl_q     <= '0;
      p_lb_q     <= '0;
      p_a_q      <= '0;
      sh_q       <= '0;
      p_sb_q     <= '0;
      s1_case1_q <= 1'b0;
      lam_valid  <= 1'b0;
      lam_trial  <= '0;
      done       <= 1'b0;
    end else begin
      lam_valid <= 1'b0;
      done      <= 1'b0;
      case (state_q)
        IDLE: if (start) begin
          lam_q   <= '0;
          bb_q    <= '0;
          for (int j = 0; j < NC; j++) begin
            lam_q[j] <= lambda[j];
            bb_q[j]  <= xb[j];
          end
          l_lam_q <= l_lambda;
          l_bb_q  <= LW'(TWO_T) + 1'b1 - l_lambda;
          q_q     <= '0;
          i_q     <= '0;
          state_q <= PRE_EVAL;
        end
        PRE_EVAL: begin
          acc_l_q <= acc_l_d;
          acc_b_q <= acc_b_d;
          if (q_q == QW'(NCH - 1)) begin
            lam_i_q <= acc_l_d;
            bv_i_q  <= acc_b_d;
            sb_q    <= gf_mul(gf_pos_inv_pow(int'(era_pos[0]), 254), acc_b_d);
            q_q     <= '0;
            state_q <= ITER;
          end else
            q_q <= q_q + 1'b1;
        end
        ITER: begin
          // stage 1
          if (up_rd) begin
            p_bl_q     <= p_bl_d;
            p_lb_q     <= p_lb_d;
            p_a_q      <= p_a_d;
            sh_q       <= sh_d;
            p_sb_q     <= p_sb_d;
            s1_case1_q <= case1;
          end
          if (q_q == '0) case1_q <= case1;
          // stage 2: write back
          if (up_wr) begin
            for (int m = 0; m < LE; m++) begin
              int unsigned j;
              j = NCP - LE * (int'(wr_chunk) + 1) + m;
              if (j < NC) begin
                if (s1_case1_q) begin
                  lam_q[j] <= p_bl_q[m] ^ p_lb_q[m];
                  bb_q[j]  <= sh_q[m] ^ p_a_q[m];
                end else begin
                  lam_q[j] <= sh_q[m] ^ p_a_q[m];
                  bb_q[j]  <= p_sb_q[m] ^ p_lb_q[m];
                end
              end
            end
          end
          // evaluation for the next iteration
          if (ev_en) begin
            acc_l_q <= acc_l_d;
            acc_b_q <= acc_b_d;
          end
          if (q_q == QW'(WIN - 1)) begin
            // end of iteration i
            if (case1_q) l_bb_q  <= l_bb_q + 1'b1;
            else         l_lam_q <= l_lam_q + 1'b1;
            lam_i_q <= acc_l_d;
            bv_i_q  <= acc_b_d;
            sb_q    <= gf_mul(gf_pos_inv_pow(int'(pos_nxt), 254), acc_b_d);
            q_q     <= '0;
            i_q     <= i_q + 1'b1;
            if (i_q[0]) begin
              lam_valid <= 1'b1;
              lam_trial <= $bits(lam_trial)'((i_q + 1'b1) >> 1);
            end
            if (i_q == IW'(TWO_T - 1)) begin
              done    <= 1'b1;
              state_q <= IDLE;
            end
          end else
            q_q <= q_q + 1'b1;
        end
        default: state_q <= IDLE;
      endcase
    end
  end

  always_comb
    for (int j = 0; j < NC; j++) lam_out[j] = lam_q[j];
endmodule
