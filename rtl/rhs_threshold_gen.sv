// rhs_threshold_gen -- random LLR threshold generator shared by a group of
// variable nodes.
//
// Each enabled cycle it produces a new threshold T = (-1)^S * |T| in 1/4 LLR
// units.  |T| comes from a priority encoder over Z_1 .. Z_Q:
//   Z_1 = AND of two fair bits (psi_1 = 1/4), Z_2 .. Z_Q one fair bit each
//   (psi = 1/2), S one more fair bit, so Q + 2 LFSR bits per threshold.
// If no Z is one (W = Q) the magnitude 2 is used instead, as suggested in
// the paper for that otherwise unusable case.  The psi values, the sign bit
// and the W = Q rule follow the paper; Q = 9 (so |T| reaches Lambda_cap = 8)
// and the LFSR are this design's choices.
//
// Timing: thr is a function of the registered LFSR state, so the threshold
// for a cycle is ready right after the clock edge and changes on every
// clock where `step` is high.
module rhs_threshold_gen
  import rhs_pkg::*;
#(
  parameter int unsigned Q    = 9,
  parameter logic [31:0] SEED = 32'h1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic step,
  output ext_t thr
);
  localparam int unsigned NB = Q + 2;
  localparam int unsigned WW = $clog2(Q + 1);

  logic [31:0]   lfsr;
  logic [Q-1:0]  z;
  logic [WW-1:0] w;
  logic          s;
  int            mag;

  rhs_lfsr #(.W(32), .STEP(NB), .SEED(SEED)) u_lfsr (
    .clk, .rst_n, .step, .state(lfsr)
  );

  always_comb begin
    z[0] = lfsr[0] & lfsr[1];
    for (int i = 1; i < int'(Q); i++) z[i] = lfsr[i + 1];
    s = lfsr[Q + 1];
  end

  rhs_prio_enc #(.Q(Q)) u_pe (.z, .w);

  always_comb begin
    mag = (int'(w) == int'(Q)) ? 2 : int'(w);
    mag = mag << LLR_FRAC;
    thr = EXT_W'(s ? -mag : mag);
  end

  initial assert (NB <= 32 && ((Q - 1) << LLR_FRAC) < (1 << (EXT_W - 1)))
    else $error("rhs_threshold_gen: Q too large");
endmodule
