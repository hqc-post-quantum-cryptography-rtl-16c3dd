// RM(128,8) decoder of the HQC decryption. A single instance decodes the n_RS
// segments of c' one after another. For each M_REP*N_RM-bit segment it
//   1. maps bits to +/-1 and adds the M_REP copies (rm_combine),
//   2. runs the iterative FHT (rm_fht, LOG_N cycles),
//   3. finds the largest-magnitude FHT entry (rm_peak).
// The output symbol is {positive, index} (K_RM = LOG_N+1 bits) and max1 is its
// reliability, later used to rank the least reliable RS positions.
// Interface: valid/ready on the input (seg accepted when seg_valid && seg_ready);
// out_valid pulses for one cycle with sym and max1, LOG_N+2 cycles after the
// segment was accepted (9 cycles for N_RM = 128). seg_ready is low meanwhile.
// The three steps and their order follow the paper; the handshake is this
// design's own. The FHT's busy output is unused: seg_ready is derived from
// this wrapper's own state.
module rm_decoder #(
  parameter int unsigned N_RM  = hqc_pkg::N_RM,
  parameter int unsigned M_REP = hqc_pkg::M_REP
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      seg_valid,
  output logic                      seg_ready,
  input  logic [M_REP*N_RM-1:0]     seg,
  output logic                      out_valid,
  output logic [$clog2(N_RM):0]     sym,
  output logic [$clog2(N_RM)+$clog2(M_REP+1)-1:0] max1
);
  localparam int unsigned LOG_N = $clog2(N_RM);
  localparam int unsigned CW    = $clog2(M_REP + 1) + 1;
  localparam int unsigned OW    = CW + LOG_N;

  logic signed [CW-1:0] sums [N_RM];
  logic signed [OW-1:0] fht_out [N_RM];
  logic                           fht_busy, fht_done, fht_start;
  logic [OW-2:0]                  pk_mag;
  logic [LOG_N-1:0]               pk_idx;
  logic                           pk_pos;
  logic                           active_q;

  rm_combine #(.N_RM(N_RM), .M_REP(M_REP), .CW(CW)) u_comb (.seg(seg), .sums(sums));

  rm_fht #(.LOG_N(LOG_N), .IW(CW), .OW(OW)) u_fht (
    .clk, .rst_n, .start(fht_start), .din(sums),
    .busy(fht_busy), .done(fht_done), .dout(fht_out)
  );

  rm_peak #(.LOG_N(LOG_N), .W(OW)) u_peak (.f(fht_out), .max1(pk_mag), .idx(pk_idx), .pos(pk_pos));

  assign seg_ready = !active_q;
  assign fht_start = seg_valid && seg_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active_q  <= 1'b0;
      out_valid <= 1'b0;
      sym       <= '0;
      max1      <= '0;
    end else begin
      out_valid <= 1'b0;
      if (fht_start) active_q <= 1'b1;
      if (fht_done) begin
        sym       <= {pk_pos, pk_idx};
        max1      <= pk_mag;
        out_valid <= 1'b1;
        active_q  <= 1'b0;
      end
    end
  end
endmodule
