// rhs_code_pkg -- Tanner graph of the regular LDPC code decoded by the RHS
// decoder, computed by constant functions.
//
// The published target is the IEEE 802.3an RS-LDPC code: length 2048, rate
// 0.8413, d_v = 6, d_c = 32.  Its parity-check matrix is defined by the
// standard and is not reproduced here.  Instead the graph is an array of
// (2^s x 2^s) permutation blocks with the same size and degrees, built from
// lines over GF(2^s): variable (j, x), j < d_c, x in GF(2^s), is attached in
// row block i < d_v to check (i, x + i*j), with + and * taken in GF(2^s) and
// i, j read as field elements.  Two variables share at most one check, so
// the graph has no 4-cycles.  With s = 6 this gives 2048 variables and
// 384 checks, the sizes of the 802.3an code.
package rhs_code_pkg;

  function automatic int gf_mul(int a, int b, int s, int poly);
    int r, aa;
    r  = 0;
    aa = a;
    for (int i = 0; i < s; i++) begin
      if (((b >> i) & 1) != 0) r = r ^ aa;
      aa = aa << 1;
      if (((aa >> s) & 1) != 0) aa = aa ^ poly;
    end
    return r;
  endfunction

  // Check attached to edge e of variable v.
  function automatic int vn_check(int v, int e, int s, int poly);
    int z, j, x;
    z = 1 << s;
    j = v / z;
    x = v % z;
    return e * z + (x ^ gf_mul(e, j, s, poly));
  endfunction

  // Variable at position p of check c (its edge index is c / 2^s).
  function automatic int chk_vn(int c, int p, int s, int poly);
    int z, i, y;
    z = 1 << s;
    i = c / z;
    y = c % z;
    return p * z + (y ^ gf_mul(i, p, s, poly));
  endfunction

endpackage
