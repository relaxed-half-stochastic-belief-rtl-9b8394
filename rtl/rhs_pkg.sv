// rhs_pkg -- shared number formats, sizes and tracker tables of the Relaxed
// Half-Stochastic (RHS) LDPC decoder.
//
// All LLR quantities inside the decoder are two's-complement fixed-point
// numbers with LLR_FRAC = 2 fractional bits, i.e. one LSB is 1/4 of an LLR
// unit.  The quarter grid follows the rounded tracker example for k = 2 and
// beta = 0.15 (offsets of +-1/4, slope 3/4, 7-bit trackers, Lambda_L = 15).
// The variable-node output range Lambda_cap = 8 and the 4-bit channel
// input also follow the published RS-LDPC settings.  The channel LSB (one
// LLR unit), the threshold priority-encoder length q = 9 and the sizes of
// the internal sums are this design's own choices.
//
// A tracker transfer function f(L; mu_n) is described by trk_func_t: the
// input is clamped to [in_lo, in_hi], multiplied by a slope made of shifted
// copies (bit 2: x1, bit 1: x1/2, bit 0: x1/4, applied to the magnitude so
// that the result is symmetric), offset by `offset`, and clamped to
// [out_lo, out_hi].  Only functions for n = 0 .. k/2 are stored; the others
// follow from f(L; mu_n) = -f(-L; mu_{k-n}).  A table holds one row per
// "gear" so that a beta-sequence can switch functions at a set iteration.
package rhs_pkg;

  localparam int unsigned LLR_FRAC   = 2;       // fractional bits of every LLR
  localparam int unsigned TRK_W      = 7;       // tracker width (paper: 7 bits)
  localparam int signed   LAMBDA_L_Q = 60;      // tracker limit 15.0 in 1/4 units
  localparam int signed   LAMBDA_CAP_Q = 32;    // VN output cap 8.0 in 1/4 units
  localparam int unsigned CH_W       = 4;       // channel LLR width (paper: 4 bits)
  localparam int unsigned CH_SHIFT   = 2;       // channel LSB = 1 LLR unit
  localparam int unsigned SUM_W      = 10;      // width of the VN sum
  localparam int unsigned EXT_W      = 7;       // width of capped VN outputs/thresholds
  localparam int unsigned MAX_NF     = 3;       // tracker functions per gear (k <= 4)
  localparam int unsigned MAX_GEAR   = 2;       // beta-sequence gears
  localparam logic signed [7:0] LL8 = 8'sd60;  // LAMBDA_L_Q as a table entry
  localparam int unsigned HARM_D_Q   = 1;       // VN harmonisation step d (0.3 -> 1/4)

  typedef logic signed [TRK_W-1:0] trk_t;
  typedef logic signed [EXT_W-1:0] ext_t;
  typedef logic signed [SUM_W-1:0] sum_t;
  typedef logic signed [CH_W-1:0]  ch_t;

  typedef struct packed {
    logic [2:0]        slope;   // bit2: 1, bit1: 1/2, bit0: 1/4
    logic signed [7:0] offset;  // in 1/4 units
    logic signed [7:0] in_lo;
    logic signed [7:0] in_hi;
    logic signed [7:0] out_lo;
    logic signed [7:0] out_hi;
  } trk_func_t;

  typedef trk_func_t [MAX_NF-1:0]   trk_gear_t;
  typedef trk_gear_t [MAX_GEAR-1:0] trk_table_t;

  function automatic trk_func_t mk_func(logic [2:0] slope, logic signed [7:0] offset,
                                        logic signed [7:0] in_lo, logic signed [7:0] in_hi,
                                        logic signed [7:0] out_lo, logic signed [7:0] out_hi);
    trk_func_t f;
    f.slope  = slope;
    f.offset = offset;
    f.in_lo  = in_lo;
    f.in_hi  = in_hi;
    f.out_lo = out_lo;
    f.out_hi = out_hi;
    return f;
  endfunction

  // Tracker functions published for one gear.
  //  k = 2 (RS-LDPC, beta = 0.15): f(L;0) = L + 1/4 on image [-7/4, 15],
  //                                f(L;1/2) = 3/4 L on [-2.5, 2.5].
  //  k = 4 (AR4JA, rounded):       f(L;mu0) = L + 1/2, -1 <= L <= L_L
  //                                f(L;mu1) = 3/4 L + 1/4, -2 <= L <= 11/4
  //                                f(L;mu2) = 1/2 L, -2 <= L <= 2
  function automatic trk_gear_t gear_default(int k);
    trk_gear_t g;
    g = '0;
    if (k == 4) begin
      g[0] = mk_func(4, 2, -4, LL8, -LL8, LL8);
      g[1] = mk_func(3, 1, -8, 11, -LL8, LL8);
      g[2] = mk_func(2, 0, -8, 8, -LL8, LL8);
    end else begin
      g[0] = mk_func(4, 1, -LL8, LL8, -7, LL8);
      g[1] = mk_func(3, 0, -LL8, LL8, -10, 10);
    end
    return g;
  endfunction

  function automatic trk_table_t table_default(int k);
    trk_table_t t;
    for (int g = 0; g < int'(MAX_GEAR); g++) t[g] = gear_default(k);
    return t;
  endfunction

  function automatic int clamp(int v, int lo, int hi);
    return (v < lo) ? lo : ((v > hi) ? hi : v);
  endfunction

  // f(x) for one stored function (n <= k/2).
  function automatic int apply_func(trk_func_t f, int x);
    int v, mag, p;
    v   = clamp(x, int'(f.in_lo), int'(f.in_hi));
    mag = (v < 0) ? -v : v;
    p   = (f.slope[2] ? mag : 0) + (f.slope[1] ? (mag >>> 1) : 0) + (f.slope[0] ? (mag >>> 2) : 0);
    if (v < 0) p = -p;
    p   = p + int'(f.offset);
    p   = clamp(p, int'(f.out_lo), int'(f.out_hi));
    return clamp(p, -LAMBDA_L_Q, LAMBDA_L_Q);
  endfunction

  // Full tracker update L(t) = f(L(t-1); mu_n), n = number of ones among the
  // k received bits, using the symmetry for n > k/2.
  function automatic int track(trk_gear_t g, int k, int n, int x);
    if (2 * n <= k) return apply_func(g[n], x);
    else            return -apply_func(g[k-n], -x);
  endfunction

endpackage
