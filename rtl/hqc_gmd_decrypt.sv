// HQC-128 decryption back end with a generalized minimum-distance (GMD)
// Reed-Solomon decoder. It takes c' = v - u*y segment by segment (the
// polynomial product itself comes from outside) and returns the message.
//   RM stage : one RM(128,8) decoder turns each 3x128-bit segment into an RS
//              symbol r_l and its reliability max1; symbols go to the buffer,
//              max1 to the insertion sorter keeping the 2t least reliable.
//   RS stage : syndromes -> key equation solver (error-only locator, trial 0)
//              -> one-pass erasure addition producing the trial-k locators
//              (2k erasures, k = 1..t) -> polynomial selection by Chien search
//              (first locator whose root count equals its degree) ->
//              magnitude computation and correction of the buffered r.
// The multiplexer in front of the polynomial selection passes the key equation
// result for trial 0 and the erasure addition results afterwards.
// Interface: seg_valid/seg_ready handshake for the N_RS segments of one
// ciphertext, segment l (bits l*M_REP*N_RM upwards of c') first. After the
// last trial, cw/msg hold the corrected codeword and the K_RS message symbols
// (the highest positions of the systematic codeword, symbol N_RS-K_RS first,
// 8 bits each, least significant byte first), and done pulses. dec_ok is low
// when no trial succeeded (cw then equals r); win_trial tells which trial won.
// seg_ready stays low from the last segment until done (one word at a time).
// Block structure follows the paper; the handshakes, the sequencing of one word
// at a time and the output packing are this design's choices.
// Some sub-block outputs are left unread here and show as unused signals: the
// sorted reliabilities (only the positions matter), the solver's gamma (needed
// only by the Horiguchi-Koetter formula, which is not used), the erasure
// addition's done (its last trial report is used instead) and the selection's
// per-trial success flag (the winner register is read at the end).
module hqc_gmd_decrypt #(
  parameter int unsigned N_RM  = hqc_pkg::N_RM,
  parameter int unsigned M_REP = hqc_pkg::M_REP,
  parameter int unsigned N_RS  = hqc_pkg::N_RS,
  parameter int unsigned K_RS  = hqc_pkg::K_RS,
  parameter int unsigned LE    = 6,
  parameter int unsigned LC    = 3,
  parameter int unsigned FOLD  = 3
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        seg_valid,
  output logic                        seg_ready,
  input  logic [M_REP*N_RM-1:0]       seg,
  output logic                        done,
  output logic                        dec_ok,
  output logic [3:0]                  win_trial,
  output hqc_pkg::gf_t [N_RS-1:0]     cw,
  output logic [8*K_RS-1:0]           msg
);
  import hqc_pkg::*;

  localparam int unsigned T2 = N_RS - K_RS;
  localparam int unsigned T     = T2 / 2;
  localparam int unsigned NC    = T2 + 1;
  localparam int unsigned PW    = $clog2(N_RS);
  localparam int unsigned LW    = $clog2(2*T2 + 2);
  localparam int unsigned VW    = $clog2(N_RM) + $clog2(M_REP + 1);
  localparam int unsigned TW    = 4;

  typedef enum logic [2:0] {S_RM, S_SYN, S_KES, S_GMD, S_MAG} state_t;
  state_t state_q;

  logic [PW-1:0] sym_cnt_q;
  logic [TW-1:0] trials_q;

  // ---------------- RM decoding ----------------
  logic                rm_ready, rm_out_valid;
  logic [K_RM-1:0]     rm_sym;
  logic [VW-1:0]       rm_max1;
  logic                rm_in_valid;

  assign rm_in_valid = seg_valid && (state_q == S_RM);
  assign seg_ready   = rm_ready && (state_q == S_RM);

  rm_decoder #(.N_RM(N_RM), .M_REP(M_REP)) u_rm (
    .clk, .rst_n, .seg_valid(rm_in_valid), .seg_ready(rm_ready), .seg,
    .out_valid(rm_out_valid), .sym(rm_sym), .max1(rm_max1)
  );

  // ---------------- sorter ----------------
  logic [T2-1:0][VW-1:0] srt_val;
  logic [T2-1:0][PW-1:0] srt_pos;
  logic                     word_clear;

  rel_sorter #(.NCELL(T2), .VW(VW), .PW(PW)) u_sort (
    .clk, .rst_n, .clear(word_clear), .in_valid(rm_out_valid),
    .in_val(rm_max1), .in_pos(sym_cnt_q), .val_out(srt_val), .pos_out(srt_pos)
  );

  // ---------------- received-word buffer ----------------
  logic [PW-1:0] syn_addr, mag_addr;
  gf_t           syn_data, mag_data;

  rs_buffer #(.DEPTH(N_RS), .W(K_RM), .AW(PW)) u_buf (
    .clk, .we(rm_out_valid), .waddr(sym_cnt_q), .wdata(rm_sym),
    .raddr_a(syn_addr), .rdata_a(syn_data), .raddr_b(mag_addr), .rdata_b(mag_data)
  );

  // ---------------- syndromes ----------------
  logic              syn_start, syn_done;
  gf_t [T2-1:0]   synd;

  rs_syndrome #(.N_RS(N_RS), .TWO_T(T2), .AW(PW)) u_syn (
    .clk, .rst_n, .start(syn_start), .rd_addr(syn_addr), .rd_data(syn_data),
    .done(syn_done), .synd
  );

  // ---------------- key equation solver ----------------
  logic          kes_done;
  gf_t [NC-1:0]  kes_lam, kes_xb;
  logic [LW-1:0] kes_l;
  gf_t           kes_gamma;   // not needed with the Forney-based magnitudes

  rs_kes #(.TWO_T(T2), .FOLD(FOLD), .NC(NC), .LW(LW)) u_kes (
    .clk, .rst_n, .start(syn_done), .synd, .done(kes_done),
    .lambda(kes_lam), .xb(kes_xb), .l_lambda(kes_l), .gamma(kes_gamma)
  );

  // ---------------- erasure addition ----------------
  logic                       ea_lam_valid, ea_done;
  logic [$clog2(T+1)-1:0]     ea_trial;
  gf_t [NC-1:0]               ea_lam;

  gmd_erasure_add #(.TWO_T(T2), .N_RS(N_RS), .LE(LE), .NC(NC), .LW(LW), .PW(PW)) u_ea (
    .clk, .rst_n, .start(kes_done), .lambda(kes_lam), .xb(kes_xb), .l_lambda(kes_l),
    .era_pos(srt_pos), .lam_valid(ea_lam_valid), .lam_trial(ea_trial),
    .lam_out(ea_lam), .done(ea_done)
  );

  // ---------------- polynomial selection (with the input multiplexer) ----------------
  logic           ps_valid, ps_tdone, ps_tok, ps_win;
  logic [TW-1:0]  ps_trial, ps_tnum, ps_wtrial;
  gf_t [NC-1:0]   ps_lam, ps_wlam;
  logic [N_RS-1:0] ps_root;
  gf_t [N_RS-1:0] ps_odd;

  assign ps_valid = kes_done || ea_lam_valid;
  assign ps_lam   = kes_done ? kes_lam : ea_lam;
  assign ps_trial = kes_done ? '0 : TW'(ea_trial);

  gmd_poly_sel #(.NC(NC), .N_RS(N_RS), .LC(LC), .TW(TW), .PW(PW)) u_ps (
    .clk, .rst_n, .clear(word_clear), .lam_valid(ps_valid), .lam_trial(ps_trial), .lam(ps_lam),
    .trial_done(ps_tdone), .trial_ok(ps_tok), .trial_num(ps_tnum),
    .win_valid(ps_win), .win_trial(ps_wtrial), .win_lam(ps_wlam),
    .win_root(ps_root), .win_odd(ps_odd)
  );

  // ---------------- magnitude computation ----------------
  logic           mag_start, mag_valid, mag_done;
  logic [PW-1:0]  mag_pos;
  gf_t            mag_sym;

  rs_mag_comp #(.TWO_T(T2), .N_RS(N_RS), .LC(LC), .NC(NC), .PW(PW)) u_mag (
    .clk, .rst_n, .start(mag_start), .lam(ps_wlam), .synd,
    .root(ps_win ? ps_root : '0), .odd(ps_odd),
    .rd_addr(mag_addr), .rd_data(mag_data),
    .out_valid(mag_valid), .out_pos(mag_pos), .out_sym(mag_sym), .done(mag_done)
  );

  // ---------------- sequencing ----------------
  assign syn_start  = (state_q == S_RM) && rm_out_valid && (sym_cnt_q == PW'(N_RS - 1));
  // the winner register of the selection is updated the cycle after the last
  // trial_done, so the magnitude computation starts one cycle later
  logic last_trial_q;
  assign mag_start  = (state_q == S_GMD) && last_trial_q;
  assign word_clear = done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= S_RM;
      sym_cnt_q <= '0;
      trials_q  <= '0;
      last_trial_q <= 1'b0;
      done      <= 1'b0;
      dec_ok    <= 1'b0;
      win_trial <= '0;
      cw        <= '0;
    end else begin
      done <= 1'b0;
      last_trial_q <= (state_q == S_GMD) && ps_tdone && (ps_tnum == TW'(T));
      case (state_q)
        S_RM: if (rm_out_valid) begin
          if (sym_cnt_q == PW'(N_RS - 1)) begin
            sym_cnt_q <= '0;
            state_q   <= S_SYN;
          end else
            sym_cnt_q <= sym_cnt_q + 1'b1;
        end
        S_SYN: if (syn_done) state_q <= S_KES;
        S_KES: if (kes_done) begin
          trials_q <= '0;
          state_q  <= S_GMD;
        end
        S_GMD: begin
          if (ps_tdone) trials_q <= trials_q + 1'b1;
          if (mag_start) begin
            dec_ok    <= ps_win;
            win_trial <= ps_wtrial;
            state_q   <= S_MAG;
          end
        end
        S_MAG: begin
          if (mag_valid) cw[mag_pos] <= mag_sym;
          if (mag_done) begin
            done    <= 1'b1;
            state_q <= S_RM;
          end
        end
        default: state_q <= S_RM;
      endcase
    end
  end

  always_comb
    for (int i = 0; i < int'(K_RS); i++) msg[8*i +: 8] = cw[N_RS - K_RS + i];

endmodule
