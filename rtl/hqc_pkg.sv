// Shared constants, types and GF(2^8) arithmetic for the HQC-128 decryption
// datapath (RM(128,8) inner code, shortened RS(36,16) outer code, GMD
// soft-decision RS decoding).
//
// Field: GF(2^8) generated by p(x) = x^8 + x^4 + x^3 + x^2 + 1 (0x11D), with
// alpha = x as primitive element. The field polynomial is the one of the HQC
// specification; the RS code sizes, n_RM, m and the parallelism factors are the
// ones of the HQC-128 configuration built here. All functions below are pure
// combinational logic (constant-folded when their arguments are constants).
// The size constants serve as parameter defaults of the modules; a linter that
// looks only at module bodies may report some of them as unused.
package hqc_pkg;

  // ---- code parameters (HQC-128 with the shortened GMD-decoded RS code) ----
  localparam int unsigned N_RM   = 128;        // RM codeword length
  localparam int unsigned K_RM   = 8;          // RM dimension = RS symbol width
  localparam int unsigned M_REP  = 3;          // RM codeword copies
  localparam int unsigned N_RS   = 36;         // RS codeword length
  localparam int unsigned K_RS   = 16;         // RS dimension
  localparam int unsigned T_RS   = (N_RS - K_RS) / 2;  // 10
  localparam int unsigned TWO_T  = 2 * T_RS;           // 20
  localparam int unsigned NCOEF  = TWO_T + 1;          // coefficients kept per polynomial

  localparam logic [8:0] GF_POLY = 9'h11D;

  typedef logic [K_RM-1:0] gf_t;

  // Multiplication in GF(2^8): shift-and-add with modular reduction.
  function automatic gf_t gf_mul(input gf_t a, input gf_t b);
    logic [7:0] acc;
    logic [7:0] sh;
    acc = '0;
    sh  = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) acc = acc ^ sh;
      sh = sh[7] ? ((sh << 1) ^ GF_POLY[7:0]) : (sh << 1);
    end
    return acc;
  endfunction

  // Inverse by a^254 = a^(2+4+8+...+128): seven squarings, six products.
  // gf_inv(0) returns 0.
  function automatic gf_t gf_inv(input gf_t a);
    gf_t sq;
    gf_t r;
    sq = a;
    r  = 8'd1;
    for (int i = 1; i < 8; i++) begin
      sq = gf_mul(sq, sq);
      r  = gf_mul(r, sq);
    end
    return r;
  endfunction

  // Antilog table: EXP_TAB[e] = alpha^e for e = 0..254 (entry 255 = 1).
  typedef gf_t exp_tab_t [256];

  function automatic exp_tab_t gen_exp_tab();
    exp_tab_t t;
    t[0] = 8'd1;
    for (int e = 1; e < 256; e++) t[e] = gf_mul(t[e-1], 8'd2);
    return t;
  endfunction

  localparam exp_tab_t EXP_TAB = gen_exp_tab();

  // alpha^e and alpha^(-e)
  function automatic gf_t gf_exp(input int unsigned e);
    return EXP_TAB[e % 255];
  endfunction

  function automatic gf_t gf_exp_neg(input int unsigned e);
    return EXP_TAB[(255 - (e % 255)) % 255];
  endfunction

  // alpha^(-(m*l) mod 255) for a position l and a small power m
  function automatic gf_t gf_pos_inv_pow(input int unsigned l, input int unsigned m);
    return EXP_TAB[(255 - ((m * l) % 255)) % 255];
  endfunction

endpackage
