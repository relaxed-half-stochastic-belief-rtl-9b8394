// rhs_vn_harmonize -- Phase-II "VN harmonisation" correction (paper, Alg. 2).
//
// Looks at the signs of the DV tracker values of one variable node.  When
// exactly one of them disagrees with all the others, every other tracker is
// moved by d towards the sign of that single value: +d if it is >= 0, -d if
// it is negative.  The output is the correction for each edge (0 for the
// single one and when the rule does not apply).
//
// The paper defines the selected set as the larger of the non-negative and
// negative sets and applies the rule when it has one element, which cannot
// happen for DV > 2; this design uses the set that holds a single element
// (the minority) instead.  d = 0.3 in the paper is rounded to the 1/4 grid.
// Combinational; `en` is high in Phase II only.
module rhs_vn_harmonize
  import rhs_pkg::*;
#(
  parameter int unsigned DV = 6,
  parameter int unsigned D  = HARM_D_Q
) (
  input  logic en,
  input  trk_t lam  [DV],
  output trk_t bias [DV],
  output logic fire
);
  int npos;
  always_comb begin
    npos = 0;
    for (int i = 0; i < int'(DV); i++) if (!lam[i][TRK_W-1]) npos++;
    fire = en && DV > 2 && (npos == 1 || npos == int'(DV) - 1);
    for (int i = 0; i < int'(DV); i++) begin
      bias[i] = '0;
      if (fire) begin
        // npos == 1: the single value is >= 0, push the negatives up.
        // npos == DV-1: the single value is < 0, push the others down.
        if (npos == 1 && lam[i][TRK_W-1])       bias[i] = trk_t'(D);
        if (npos != 1 && !lam[i][TRK_W-1])      bias[i] = -trk_t'(D);
      end
    end
  end
endmodule
