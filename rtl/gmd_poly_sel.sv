// GMD polynomial selection. Every candidate errata locator (trial 0 from the
// key equation solver, trials 1..t from the erasure addition) is run through a
// Chien search that counts its roots among the N_RS code positions. A trial
// succeeds when the root count equals the degree of Lambda(X). The first
// successful trial (fewest erasures) is kept: its coefficients, a flag per
// position that is a root (an error/erasure location) and the stored
// Lambda_odd(alpha^(-l)) values needed by the magnitude computation.
// Interface: lam_valid loads lam with its trial number; the search takes
// ceil(N_RS/LC) cycles (12 for 36 positions, LC = 3) and trial_done pulses the
// cycle after its last group, with trial_ok. The next candidate may be loaded
// on that same cycle or later. clear forgets the winner before a new codeword.
// win_valid stays high once a winner exists.
// Root counting, the degree test and storing the odd-part values follow the
// paper; choosing the first successful trial is this design's choice.
module gmd_poly_sel #(
  parameter int unsigned NC   = hqc_pkg::NCOEF,
  parameter int unsigned N_RS = hqc_pkg::N_RS,
  parameter int unsigned LC   = 3,
  parameter int unsigned TW   = 4,
  parameter int unsigned PW   = $clog2(N_RS)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    lam_valid,
  input  logic [TW-1:0]           lam_trial,
  input  hqc_pkg::gf_t [NC-1:0]   lam,
  output logic                    trial_done,
  output logic                    trial_ok,
  output logic [TW-1:0]           trial_num,
  output logic                    win_valid,
  output logic [TW-1:0]           win_trial,
  output hqc_pkg::gf_t [NC-1:0]   win_lam,
  output logic [N_RS-1:0]         win_root,
  output hqc_pkg::gf_t [N_RS-1:0] win_odd
);
  import hqc_pkg::*;

  localparam int unsigned DW = $clog2(NC + 1);
  localparam int unsigned CW = $clog2(N_RS + 1);

  logic                    ce_valid, ce_done;
  logic [PW-1:0]           ce_base;
  logic [LC-1:0]           ce_ok;
  gf_t [LC-1:0]            ce_val, ce_odd;

  gf_t [NC-1:0]            cur_lam_q;
  logic [TW-1:0]           cur_trial_q;
  logic [DW-1:0]           cur_deg_q;
  logic [CW-1:0]           roots_q;
  logic [N_RS-1:0]         root_q;
  gf_t [N_RS-1:0]          odd_q;
  logic                    fin_q;

  chien_eval #(.NC(NC), .N_RS(N_RS), .LC(LC), .PW(PW)) u_chien (
    .clk, .rst_n, .start(lam_valid), .coeff(lam),
    .out_valid(ce_valid), .base(ce_base), .lane_ok(ce_ok),
    .val(ce_val), .odd(ce_odd), .done(ce_done)
  );

  // degree of the incoming polynomial
  logic [DW-1:0] deg_in;
  always_comb begin
    deg_in = '0;
    for (int j = 0; j < NC; j++) if (lam[j] != '0) deg_in = DW'(j);
  end

  // roots found in the current group
  logic [CW-1:0] grp_roots;
  always_comb begin
    grp_roots = '0;
    for (int k = 0; k < LC; k++)
      if (ce_ok[k] && ce_val[k] == '0) grp_roots = grp_roots + 1'b1;
  end

  logic [CW-1:0]   fin_roots_q;
  logic [DW-1:0]   fin_deg_q;
  logic [TW-1:0]   fin_trial_q;
  gf_t [NC-1:0]    fin_lam_q;

  assign trial_ok   = (fin_roots_q == CW'(fin_deg_q));
  assign trial_num  = fin_trial_q;
  assign trial_done = fin_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur_lam_q   <= '0;
      cur_trial_q <= '0;
      cur_deg_q   <= '0;
      roots_q     <= '0;
      root_q      <= '0;
      odd_q       <= '0;
      fin_q       <= 1'b0;
      fin_roots_q <= '0;
      fin_deg_q   <= '0;
      fin_trial_q <= '0;
      fin_lam_q   <= '0;
      win_valid   <= 1'b0;
      win_trial   <= '0;
      win_lam     <= '0;
      win_root    <= '0;
      win_odd     <= '0;
    end else begin
      fin_q <= 1'b0;
      if (lam_valid) begin
        cur_lam_q   <= lam;
        cur_trial_q <= lam_trial;
        cur_deg_q   <= deg_in;
      end
      if (ce_valid) begin
        roots_q <= ce_done ? '0 : roots_q + grp_roots;
        for (int k = 0; k < LC; k++)
          if (ce_ok[k]) begin
            root_q[int'(ce_base) + k] <= (ce_val[k] == '0);
            odd_q[int'(ce_base) + k]  <= ce_odd[k];
          end
        if (ce_done) begin
          fin_q       <= 1'b1;
          fin_roots_q <= roots_q + grp_roots;
          fin_deg_q   <= cur_deg_q;
          fin_trial_q <= cur_trial_q;
          fin_lam_q   <= cur_lam_q;
        end
      end
      if (clear)
        win_valid <= 1'b0;
      else if (fin_q && trial_ok && !win_valid) begin
        win_valid <= 1'b1;
        win_trial <= fin_trial_q;
        win_lam   <= fin_lam_q;
        win_root  <= root_q;
        win_odd   <= odd_q;
      end
    end
  end
endmodule
