// rhs_msg_estimator -- message estimator g_k of one VN input edge.
//
// The k bits Y_1 .. Y_k of an iteration message arrive serially on one wire,
// one per cycle with bit_en high; `last` marks Y_k.  The sample-mean
// estimate (paper, Eq. 10) is m = n/k with n the number of ones, so the
// estimator only counts ones.  n is output combinationally in the cycle of
// the last bit (count so far plus the current bit) and the counter clears
// for the next iteration.  `clr` clears it at the start of a frame.
module rhs_msg_estimator #(
  parameter int unsigned K = 2
) (
  input  logic                   clk,
  input  logic                   clr,
  input  logic                   bit_en,
  input  logic                   last,
  input  logic                   y,
  output logic [$clog2(K+1)-1:0] n
);
  localparam int unsigned NW = $clog2(K + 1);
  logic [NW-1:0] cnt;

  assign n = cnt + NW'(y);

  always_ff @(posedge clk) begin
    if (clr)                 cnt <= '0;
    else if (bit_en && last) cnt <= '0;
    else if (bit_en)         cnt <= n;
  end
endmodule
