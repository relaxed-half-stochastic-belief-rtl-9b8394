// rhs_prio_enc -- priority encoder used as a base-2 logarithm.
//
// Outputs W, the number of zeros that precede the first one in the sequence
// Z_1 .. Z_Q (z[0] is Z_1), or Q when every bit is zero.  With independent
// bits Pr(Z_i = 1) = psi_i this gives the geometric-like PMF that the RHS
// decoder uses for LLR-domain thresholds (paper, Eq. 17).  Purely
// combinational.
module rhs_prio_enc #(
  parameter int unsigned Q = 9
) (
  input  logic [Q-1:0]         z,
  output logic [$clog2(Q+1)-1:0] w
);
  always_comb begin
    w = ($clog2(Q+1))'(Q);
    for (int i = Q - 1; i >= 0; i--)
      if (z[i]) w = ($clog2(Q+1))'(i);
  end
endmodule
