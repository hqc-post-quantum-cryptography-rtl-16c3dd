// RS syndrome computation S_j = r(alpha^j), j = 1..2t.
// 2t Horner feedback loops, each a constant multiplier (by alpha^j), an adder
// and a register: S_j <- S_j * alpha^j + r_l, fed with r_{N-1} first. The
// symbols are read from the received-word buffer, one per cycle, addresses
// N-1 down to 0, so all syndromes are ready N cycles after start (36 cycles).
// Interface: start pulse; rd_addr/rd_data is an asynchronous buffer read;
// done pulses for one cycle when synd holds the result (synd[j-1] = S_j).
// The loops follow the paper; reading the buffer in reverse order is this
// design's way of feeding r_{N-1} first.
module rs_syndrome #(
  parameter int unsigned N_RS  = hqc_pkg::N_RS,
  parameter int unsigned TWO_T = hqc_pkg::TWO_T,
  parameter int unsigned AW    = $clog2(N_RS)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  output logic [AW-1:0]               rd_addr,
  input  hqc_pkg::gf_t                rd_data,
  output logic                        done,
  output hqc_pkg::gf_t [TWO_T-1:0]    synd
);
  import hqc_pkg::*;

  logic          busy_q;
  logic [AW-1:0] cnt_q;

  assign rd_addr = AW'(N_RS - 1) - cnt_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q <= 1'b0;
      cnt_q  <= '0;
      done   <= 1'b0;
      synd   <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy_q) begin
        busy_q <= 1'b1;
        cnt_q  <= '0;
        synd   <= '0;
      end else if (busy_q) begin
        for (int j = 0; j < TWO_T; j++)
          synd[j] <= gf_mul(synd[j], gf_exp(j + 1)) ^ rd_data;
        cnt_q <= cnt_q + 1'b1;
        if (cnt_q == AW'(N_RS - 1)) begin
          busy_q <= 1'b0;
          done   <= 1'b1;
        end
      end
    end
  end
endmodule
