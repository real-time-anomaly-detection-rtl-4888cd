// anomaly_score: AXOL1TL anomaly score, the sum of the squared latent means,
//     score = sum_{i=1..N} mu_i^2 .
//
// This is the published approximation of the VAE's KL-divergence term: an
// event whose latent means sit far from the origin of the N(0,1) prior is
// scored as anomalous. The module is purely combinational: N parallel
// squarers and an adder tree. With MU_W-bit signed means every square is at
// most 2^(2*MU_W-2) and the N-term sum needs 2*MU_W-1+clog2(N) bits, which
// SCORE_W must cover (checked at elaboration). The score is exact; no
// rounding or truncation is applied.
module anomaly_score #(
  parameter int unsigned N       = 8,
  parameter int unsigned MU_W    = 14,
  parameter int unsigned SCORE_W = 2*MU_W + 2
) (
  input  logic signed [MU_W-1:0]  mu [N],
  output logic [SCORE_W-1:0]      score
);

  localparam int unsigned SQ_W = 2*MU_W - 1;
  localparam int unsigned PW   = 2*MU_W;

  initial begin
    assert (SCORE_W >= SQ_W + $clog2(N))
      else $fatal(1, "anomaly_score: SCORE_W=%0d too narrow", SCORE_W);
  end

  always_comb begin
    logic [SCORE_W-1:0] sum;
    logic [PW-1:0]      sq;
    sum = '0;
    for (int i = 0; i < N; i++) begin
      sq  = unsigned'(PW'(mu[i] * mu[i]));
      sum = sum + SCORE_W'(sq);
    end
    score = sum;
  end

endmodule
