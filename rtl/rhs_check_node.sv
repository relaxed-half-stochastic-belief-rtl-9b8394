// rhs_check_node -- binary RHS check node, laid out as a fully partitioned
// chain.
//
// Each output is the modulo-2 sum of all the other inputs,
// y_i = x_1 ^ .. ^ x_{i-1} ^ x_{i+1} ^ .. ^ x_DC (paper, Eq. 7).  Because
// XOR can be factored arbitrarily, the node is built as two XOR chains that
// run past the variable nodes in opposite directions (a prefix chain and a
// suffix chain), so that consecutive partitions are linked by two wires and
// each partition holds one XOR per chain plus one output XOR, matching the
// drawing of a fully partitioned check node (repeated DC-2 times between
// the two end nodes).  In a layout each partition sits next to its variable
// node.  Purely combinational.
module rhs_check_node #(
  parameter int unsigned DC = 32
) (
  input  logic [DC-1:0] x,
  output logic [DC-1:0] y
);
  logic [DC-2:0] fwd;   // fwd[i] = x[0] ^ .. ^ x[i]
  logic [DC-1:1] bwd;   // bwd[i] = x[i] ^ .. ^ x[DC-1]

  assign fwd[0]    = x[0];
  assign bwd[DC-1] = x[DC-1];
  for (genvar i = 1; i < DC - 1; i++) begin : g_fwd
    assign fwd[i] = fwd[i-1] ^ x[i];
  end
  for (genvar i = DC - 2; i >= 1; i--) begin : g_bwd
    assign bwd[i] = bwd[i+1] ^ x[i];
  end

  assign y[0]    = bwd[1];
  assign y[DC-1] = fwd[DC-2];
  for (genvar i = 1; i < DC - 1; i++) begin : g_out
    assign y[i] = fwd[i-1] ^ bwd[i+1];
  end

  initial assert (DC >= 2) else $error("rhs_check_node: DC must be at least 2");
endmodule
