// quantile_update: one step of a streaming quantile estimator.
//
// Each leaf keeps, per feature, NQ running estimates q_j of the
// (j+1)/(NQ+1) quantiles of that feature.  A new value x moves q_j by an
// asymmetric signum step: up by lambda*p_j when x > q_j, down by
// lambda*(1 - p_j) otherwise, so q_j settles where a fraction p_j of the
// values lie below it.  The estimates are the leaf's candidate split
// thresholds; `below` tells whether x falls on the true (x <= q_j) side of
// the current estimate, which the trainer counts per class.
//
// Purely combinational.  The estimator family (asymmetric signum, lambda,
// 16 quantiles) is the reference design's; the fixed-point Q0.FW format,
// the saturation at 0 and 1 and the step constants rounded down to whole
// LSBs are this design's choices.
module quantile_update
  import ht_pkg::*;
#(
  parameter int unsigned NQ = NQ_DEF
) (
  input  feat_t                   x,
  input  feat_t                   q,
  input  logic [$clog2(NQ)-1:0]   j,
  output feat_t                   q_next,
  output logic                    below
);
  localparam int unsigned LIM = (1 << FW) - 1;

  logic [FW:0] up, down;
  logic [FW+1:0] sum;
  always_comb begin
    up   = (FW+1)'((LAMBDA_FX * (32'(j) + 1)) / (NQ + 1));
    down = (FW+1)'(LAMBDA_FX) - up;
    below = (x <= q);
    if (!below) begin
      sum    = {2'b0, q} + {1'b0, up};
      q_next = (sum > (FW+2)'(LIM)) ? feat_t'(LIM) : sum[FW-1:0];
    end else begin
      sum    = {2'b0, q} - {1'b0, down};
      q_next = ({1'b0, q} < down) ? '0 : sum[FW-1:0];
    end
  end
endmodule
