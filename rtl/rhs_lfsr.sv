// rhs_lfsr -- pseudo-random bit source for the threshold generators.
//
// A 32-bit Fibonacci LFSR with feedback polynomial x^32 + x^22 + x^2 + x + 1
// (maximal length).  When `step` is high the register advances STEP shifts in
// one clock, so the STEP low bits of `state` are all new bits every cycle.
// The paper only asks for fair pseudo-random bits and names LFSRs as one way
// to make them; the polynomial, width and multi-step update are choices of
// this design.  A zero SEED is replaced by 1 (the all-zero state is locked).
//
// Interface: clk, synchronous active-low rst_n loads the seed; step enables
// the update; state is the registered LFSR contents (valid one cycle later).
module rhs_lfsr #(
  parameter int unsigned W    = 32,
  parameter int unsigned STEP = 11,
  parameter logic [31:0] SEED = 32'h1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         step,
  output logic [W-1:0] state
);
  localparam logic [W-1:0] SEED_NZ = (SEED[W-1:0] == '0) ? W'(1) : SEED[W-1:0];

  function automatic logic [W-1:0] advance(logic [W-1:0] s);
    logic [W-1:0] r;
    logic fb;
    r = s;
    for (int i = 0; i < int'(STEP); i++) begin
      fb = r[31] ^ r[21] ^ r[1] ^ r[0];
      r  = {r[W-2:0], fb};
    end
    return r;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n)    state <= SEED_NZ;
    else if (step) state <= advance(state);
  end

  initial assert (W == 32) else $error("rhs_lfsr: taps are for W = 32");
endmodule
