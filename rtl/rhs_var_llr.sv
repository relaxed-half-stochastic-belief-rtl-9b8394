// rhs_var_llr -- LLR-domain VN function (VAR in the functional diagram).
//
// total = Lambda_0 + sum_i Lambda_i, and for each edge the extrinsic output
// Lambda'_i = total - Lambda_i (paper, Eq. 1), capped to the finite output
// range [-Lambda_cap, Lambda_cap] (Lambda_cap = 8, i.e. 32 in 1/4 units).
// The hard decision is the sign of the total: a negative LLR
// ln((1-p)/p) means bit 1.  Purely combinational; sizes of the sum are this
// design's choice and wide enough not to overflow for DV <= 6.
module rhs_var_llr
  import rhs_pkg::*;
#(
  parameter int unsigned DV = 6
) (
  input  sum_t prior,
  input  trk_t lam [DV],
  output ext_t ext [DV],
  output logic hard,
  output logic capped      // at least one output was saturated
);
  int total;
  int e;

  always_comb begin
    total  = int'(prior);
    for (int i = 0; i < int'(DV); i++) total += int'(lam[i]);
    hard   = (total < 0);
    capped = 1'b0;
    for (int i = 0; i < int'(DV); i++) begin
      e = total - int'(lam[i]);
      if (e > LAMBDA_CAP_Q || e < -LAMBDA_CAP_Q) capped = 1'b1;
      ext[i] = ext_t'(clamp(e, -LAMBDA_CAP_Q, LAMBDA_CAP_Q));
    end
  end
endmodule
