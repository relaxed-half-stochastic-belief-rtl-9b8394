// rhs_vn -- RHS variable node with DV edges.
//
// Per edge: a message estimator (count of ones among the k serial input
// bits), an LLR tracker, and a comparator that makes the outgoing bit.
// Shared: the prior Lambda_0, the VAR adder that forms the extrinsic LLRs
// Lambda'_i, and the Phase-II harmonisation logic.  The structure follows
// the functional diagram of the RHS VN (estimator g_k -> tracker -> VAR ->
// comparison with a random threshold), moved to the LLR domain as the paper
// does for the implementation.
//
// Outgoing bit (paper, Eq. 13 in the LLR domain): X_i = 1 when
// Lambda'_i < T, i.e. when p'_i exceeds the threshold probability.  All
// edges of the node use the same threshold T of the current bit period,
// and a threshold generator is shared by a group of nodes.
//
// Timing: one message bit per cycle with bit_en high.  x[] is combinational
// from the registered trackers and the threshold, so the check network and
// the returning bits y[] settle within the same cycle.  In the cycle with
// `last` high the trackers take the update computed from all k bits.
// `init` loads the channel value ch (4-bit, LSB = 1 LLR unit, a choice of
// this design) and clears the trackers to 0.
module rhs_vn
  import rhs_pkg::*;
#(
  parameter int unsigned DV    = 6,
  parameter int unsigned K     = 2,
  parameter trk_table_t  TABLE = table_default(2)
) (
  input  logic          clk,
  input  logic          init,
  input  ch_t           ch,
  input  logic          bit_en,
  input  logic          last,
  input  logic          gear,
  input  logic          harm_en,
  input  ext_t          thr,
  input  logic [DV-1:0] y,
  output logic [DV-1:0] x,
  output logic          hard,
  output logic          capped,
  output logic          harm_fire
);
  localparam int unsigned NW = $clog2(K + 1);

  sum_t          prior;
  trk_t          lam  [DV];
  trk_t          upd  [DV];
  trk_t          bias [DV];
  ext_t          ext  [DV];
  logic [NW-1:0] n    [DV];

  always_ff @(posedge clk)
    if (init) prior <= sum_t'(signed'(ch)) <<< CH_SHIFT;

  for (genvar i = 0; i < DV; i++) begin : g_edge
    rhs_msg_estimator #(.K(K)) u_est (
      .clk, .clr(init), .bit_en, .last, .y(y[i]), .n(n[i])
    );
    rhs_llr_tracker #(.K(K), .TABLE(TABLE)) u_trk (
      .clk, .init, .upd_en(bit_en && last), .n(n[i]), .gear,
      .bias(bias[i]), .lam(lam[i]), .upd(upd[i])
    );
    assign x[i] = (ext[i] < thr);
  end

  rhs_vn_harmonize #(.DV(DV)) u_harm (
    .en(harm_en), .lam(upd), .bias, .fire(harm_fire)
  );

  rhs_var_llr #(.DV(DV)) u_var (
    .prior, .lam, .ext, .hard, .capped
  );
endmodule
