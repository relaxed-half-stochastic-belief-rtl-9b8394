// rhs_decoder -- fully parallel Relaxed Half-Stochastic (RHS) LDPC decoder.
//
// Every variable node of the code is a separate rhs_vn block and every
// check node a chain of XOR gates (rhs_check_node), wired as the code's
// Tanner graph.  Messages are binary: in each iteration every VN edge sends
// K bits, one per clock, on a single wire; the check nodes XOR them; each VN
// counts the ones it gets back and updates one LLR tracker per edge.  A
// threshold generator is shared by VN_PER_RNG variable nodes (the paper
// found sharing among 64 VNs harmless).  A syndrome network stops the
// decoder as soon as the hard decisions form a codeword; otherwise Phase I
// runs L1 iterations, then Phase II (VN harmonisation) up to L2 more.
//
// Defaults are the RS-LDPC configuration: 2048 variables, d_v = 6, d_c = 32
// (a graph of the same size and degrees as the 802.3an code, see
// rhs_code_pkg), k = 2 bits per message, the rounded beta = 0.15 trackers,
// Lambda_cap = 8, 4-bit channel LLRs.  L1 = 100, L2 = 50 and a gear change
// after 5 iterations are taken from the published simulations; both gears
// hold the beta = 0.15 table by default since no rounded table is
// published for the other beta values.
//
// Interface: llr[v] is the channel LLR of bit v (4-bit two's complement,
// 1 LLR unit per LSB, positive means 0), sampled in the cycle where `start`
// is taken.  `done` pulses for one cycle at the end of a decode; `hard`
// then holds the decoded word (stable until the next start), `success`
// tells whether it is a codeword and `iters` how many iterations ran.
// done rises K*t + 2 cycles after the start cycle for a decode of t iterations.
// n_unsat, cap_active and harm_active are status outputs for observation.
module rhs_decoder
  import rhs_pkg::*;
#(
  parameter int unsigned GF_S       = 6,
  parameter int unsigned GF_POLY    = 'h43,   // x^6 + x + 1
  parameter int unsigned DV         = 6,
  parameter int unsigned DC         = 32,
  parameter int unsigned K          = 2,
  parameter int unsigned L1         = 100,
  parameter int unsigned L2         = 50,
  parameter int unsigned GEAR_ITER  = 5,
  parameter int unsigned VN_PER_RNG = 64,
  parameter int unsigned Q          = 9,
  parameter trk_table_t  TABLE      = table_default(2),
  localparam int unsigned Z         = 1 << GF_S,
  localparam int unsigned N         = DC * Z,
  localparam int unsigned M         = DV * Z
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  ch_t           llr [N],
  output logic          busy,
  output logic          done,
  output logic          success,
  output logic          used_phase2,
  output logic [15:0]   iters,
  output logic [N-1:0]  hard,
  output logic [$clog2(M+1)-1:0] n_unsat,   // unsatisfied checks of `hard`
  output logic          cap_active,         // some VN output was capped this cycle
  output logic          harm_active         // VN harmonisation fired this cycle
);
  localparam int unsigned NRNG = (N + VN_PER_RNG - 1) / VN_PER_RNG;

  logic          init, bit_en, last, gear, harm_en, syn_ok;
  ext_t          thr     [NRNG];
  logic [DV-1:0] vx      [N];
  logic [DV-1:0] vy      [N];
  logic [DC-1:0] cx      [M];
  logic [DC-1:0] cy      [M];
  logic [DC-1:0] chd     [M];
  logic [N-1:0]  capped;
  logic [N-1:0]  harm_fire;

  rhs_ctrl #(.K(K), .L1(L1), .L2(L2), .GEAR_ITER(GEAR_ITER)) u_ctrl (
    .clk, .rst_n, .start, .syn_ok, .init, .bit_en, .last, .gear, .harm_en,
    .busy, .done, .success, .used_phase2, .iters
  );

  for (genvar r = 0; r < NRNG; r++) begin : g_rng
    rhs_threshold_gen #(.Q(Q), .SEED(32'h9E3779B9 * (r + 1) ^ 32'h5BD1E995))
      u_thr (.clk, .rst_n, .step(bit_en), .thr(thr[r]));
  end

  for (genvar v = 0; v < N; v++) begin : g_vn
    rhs_vn #(.DV(DV), .K(K), .TABLE(TABLE)) u_vn (
      .clk, .init, .ch(llr[v]), .bit_en, .last, .gear, .harm_en,
      .thr(thr[v / VN_PER_RNG]), .y(vy[v]), .x(vx[v]), .hard(hard[v]),
      .capped(capped[v]), .harm_fire(harm_fire[v])
    );
    for (genvar e = 0; e < DV; e++) begin : g_e
      // Edge e of VN v sits at position v / Z of its check.
      localparam int C = rhs_code_pkg::vn_check(v, e, GF_S, GF_POLY);
      assign vy[v][e] = cy[C][v / Z];
    end
  end

  for (genvar c = 0; c < M; c++) begin : g_cn
    for (genvar p = 0; p < DC; p++) begin : g_p
      localparam int V = rhs_code_pkg::chk_vn(c, p, GF_S, GF_POLY);
      assign cx[c][p]  = vx[V][c / Z];
      assign chd[c][p] = hard[V];
    end
    rhs_check_node #(.DC(DC)) u_cn (.x(cx[c]), .y(cy[c]));
  end

  rhs_syndrome #(.M(M), .DC(DC)) u_syn (.hd(chd), .ok(syn_ok), .n_unsat);

  assign cap_active  = |capped;
  assign harm_active = |(harm_fire) && last;

  initial assert (DV <= Z && DC <= Z) else $error("rhs_decoder: degrees exceed 2^GF_S");
endmodule
