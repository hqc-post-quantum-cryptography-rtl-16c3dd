// Iterative fast Hadamard transform (FHT) for first-order RM decoding.
// Computes F[k] = sum_j x[j] * (-1)^popcount(j & k) for N = 2^LOG_N inputs.
// One butterfly stage of N adders/subtractors is built and reused LOG_N times
// in constant-geometry form: y[i] = x[2i] + x[2i+1], y[i+N/2] = x[2i] - x[2i+1].
// After LOG_N passes the result is in natural Hadamard order.
// Interface: pulse start with din valid; the transform is in dout when done
// pulses, LOG_N+1 clock edges after start is sampled (one load edge, then one
// edge per stage: 8 for N = 128). busy is high while
// the stages run. A start while busy is ignored.
// The paper specifies an iterative butterfly FHT with log2(N) stages of N adders;
// reusing a single constant-geometry stage is this design's choice.
module rm_fht #(
  parameter int unsigned LOG_N = $clog2(hqc_pkg::N_RM),
  parameter int unsigned IW    = 3,            // input width (signed)
  parameter int unsigned OW    = IW + LOG_N    // output width (signed)
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              start,
  input  logic signed [IW-1:0] din [2**LOG_N],
  output logic                              busy,
  output logic                              done,
  output logic signed [OW-1:0] dout [2**LOG_N]
);
  localparam int unsigned N = 2**LOG_N;

  logic signed [OW-1:0] stage_q [N];
  logic signed [OW-1:0] stage_d [N];
  logic [$clog2(LOG_N+1)-1:0]  cnt_q;

  always_comb begin
    for (int i = 0; i < N/2; i++) begin
      stage_d[i]       = stage_q[2*i] + stage_q[2*i+1];
      stage_d[i + N/2] = stage_q[2*i] - stage_q[2*i+1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) stage_q[i] <= '0;
      cnt_q   <= '0;
      busy    <= 1'b0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy && start) begin
        for (int i = 0; i < N; i++) stage_q[i] <= OW'(din[i]);
        cnt_q <= '0;
        busy  <= 1'b1;
      end else if (busy) begin
        stage_q <= stage_d;
        cnt_q   <= cnt_q + 1'b1;
        if (cnt_q == $bits(cnt_q)'(LOG_N - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign dout = stage_q;
endmodule
