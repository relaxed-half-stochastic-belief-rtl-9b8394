// rhs_llr_tracker -- linearised LLR-domain input tracker of one VN edge.
//
// Holds Lambda_i(t), the LLR-domain estimate of the probability carried by
// the stochastic stream arriving on the edge.  Each iteration it is updated
// with the transfer function picked by n, the number of ones among the k
// received bits:  Lambda(t) = f(Lambda(t-1); mu_n)  (paper, Eq. 23 and its
// linear approximation).  Every f is "slope * L + offset" with saturation;
// only n <= k/2 are stored and the rest use f(L; mu_n) = -f(-L; mu_{k-n}).
// For k = 2, beta = 0.15 the published rounded functions are L + 1/4
// (image [-7/4, 15]) and 3/4 L (image [-2.5, 2.5]); with quarter-LSB
// values these are additions of +-1 and a sum of two shifted copies.
//
// Two tables (gears) allow a beta-sequence: `gear` selects the row.  The
// update value upd = f(...) is also output so that the VN harmonisation
// logic can compute a correction `bias` that is added (with saturation to
// +-Lambda_L) when the register is written.  The bias input is a choice of
// this design for applying the Phase-II rule to the stored tracker value.
//
// Timing: `init` (synchronous) clears the tracker to 0 (probability 1/2);
// when `upd_en` is high the register takes sat(upd + bias) at the clock edge.
module rhs_llr_tracker
  import rhs_pkg::*;
#(
  parameter int unsigned K     = 2,
  parameter trk_table_t  TABLE = table_default(2)
) (
  input  logic                   clk,
  input  logic                   init,
  input  logic                   upd_en,
  input  logic [$clog2(K+1)-1:0] n,
  input  logic                   gear,
  input  trk_t                   bias,
  output trk_t                   lam,
  output trk_t                   upd
);
  always_comb begin
    upd = trk_t'(track(TABLE[gear], int'(K), int'(n), int'(lam)));
  end

  always_ff @(posedge clk) begin
    if (init)        lam <= '0;
    else if (upd_en) lam <= trk_t'(clamp(int'(upd) + int'(bias), -LAMBDA_L_Q, LAMBDA_L_Q));
  end

  initial assert (K / 2 + 1 <= MAX_NF) else $error("rhs_llr_tracker: K too large");
endmodule
