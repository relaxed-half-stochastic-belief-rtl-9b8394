// rhs_syndrome -- codeword test used to stop decoding early.
//
// The decoding loop ends as soon as the hard-decision vector is a codeword.
// This block takes, for every check, the hard decisions of its DC variables
// (gathered by the top level) and reports `ok` when every parity is even,
// plus the number of unsatisfied checks.  The paper gives only the rule
// (terminate on a valid codeword); the separate XOR network and the
// unsatisfied-check count are this design's choices.  Combinational.
module rhs_syndrome #(
  parameter int unsigned M  = 384,
  parameter int unsigned DC = 32
) (
  input  logic [DC-1:0]          hd [M],
  output logic                   ok,
  output logic [$clog2(M+1)-1:0] n_unsat
);
  logic [M-1:0] par;
  always_comb begin
    n_unsat = '0;
    for (int c = 0; c < int'(M); c++) begin
      par[c]  = ^hd[c];
      n_unsat = n_unsat + ($clog2(M+1))'(par[c]);
    end
    ok = (par == '0);
  end
endmodule
