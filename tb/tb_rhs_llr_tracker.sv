// tb_rhs_llr_tracker -- k = 2, default (beta = 0.15) table.  Random tracker
// values, counts and biases; the result is checked against the published
// rounded functions written out directly (in 1/4 units):
//   n = 0: min(max(L + 1, -7), 60)         (L + 1/4, image [-7/4, 15])
//   n = 1: sign(L) * (|L|/2 + |L|/4), limited to +-10   (3/4 L, [-2.5, 2.5])
//   n = 2: mirror of n = 0: max(min(L - 1, 7), -60)
// followed by the bias and saturation to +-60.  A second instance with a
// different gear-1 table checks gear selection.
module tb_rhs_llr_tracker;
  import rhs_pkg::*;
  logic clk = 0, init = 1, upd_en = 0, gear = 0;
  logic [1:0] n = 0;
  trk_t bias = 0, lam, upd, lam_b, upd_b;
  int checks = 0, failures = 0;

  function automatic trk_table_t tb_table();
    trk_table_t t;
    t    = table_default(2);
    t[1][0] = mk_func(3'd4, 8'sd2, -LL8, LL8, -8'sd7, LL8);   // L + 1/2
    t[1][1] = mk_func(3'd4, 8'sd0, -LL8, LL8, -LL8, LL8);     // identity
    return t;
  endfunction
  localparam trk_table_t TB_TABLE = tb_table();

  rhs_llr_tracker #(.K(2)) dut (.clk, .init, .upd_en, .n, .gear, .bias, .lam, .upd);
  rhs_llr_tracker #(.K(2), .TABLE(TB_TABLE)) dut_b (.clk, .init, .upd_en, .n, .gear,
                                                  .bias, .lam(lam_b), .upd(upd_b));
  always #5 clk = ~clk;

  function automatic int sat(int v, int lo, int hi);
    return v < lo ? lo : (v > hi ? hi : v);
  endfunction

  function automatic int ref_f(int l, int nn);
    int m;
    if (nn == 0) return sat(l + 1, -7, 60);
    if (nn == 2) return sat(l - 1, -60, 7);
    m = (l < 0) ? -l : l;
    m = (m >> 1) + (m >> 2);
    return sat((l < 0) ? -m : m, -10, 10);
  endfunction

  // gear 1 of TB_TABLE: n=0 -> L + 1/2 (low -7), n=1 -> L (identity)
  function automatic int ref_g1(int l, int nn);
    if (nn == 0) return sat(l + 2, -7, 60);
    if (nn == 2) return sat(l - 2, -60, 7);
    return l;
  endfunction

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int exp_lam, exp_b, nn, b;
  initial begin
    @(negedge clk);
    init = 0;
    chk(lam == 0, "init clears tracker");
    exp_lam = 0; exp_b = 0;
    for (int t = 0; t < 4000; t++) begin
      nn = $urandom_range(0, 2);
      b  = ($urandom_range(0, 3) == 0) ? $urandom_range(0, 2) - 1 : 0;
      gear = (t >= 2000);
      n = 2'(nn); bias = trk_t'(b); upd_en = ($urandom_range(0, 4) != 0);
      #1;
      chk(int'(upd) == ref_f(exp_lam, nn), $sformatf("upd L=%0d n=%0d got %0d exp %0d", exp_lam, nn, upd, ref_f(exp_lam, nn)));
      if (gear) chk(int'(upd_b) == ref_g1(exp_b, nn), $sformatf("gear1 L=%0d n=%0d got %0d", exp_b, nn, upd_b));
      else      chk(int'(upd_b) == ref_f(exp_b, nn), "gear0 table of second tracker");
      if (upd_en) begin
        exp_lam = sat(ref_f(exp_lam, nn) + b, -60, 60);
        exp_b   = sat((gear ? ref_g1(exp_b, nn) : ref_f(exp_b, nn)) + b, -60, 60);
      end
      @(negedge clk);
      chk(int'(lam) == exp_lam, $sformatf("lam %0d exp %0d", lam, exp_lam));
      // occasionally jump to a random state through repeated updates
      if ($urandom_range(0, 50) == 0) begin
        init = 1; @(negedge clk); init = 0; exp_lam = 0; exp_b = 0;
      end
    end
    // long run of n=0 must reach the +15 limit, n=2 the -15 limit
    upd_en = 1; bias = 0; gear = 0; n = 0;
    repeat (80) @(negedge clk);
    chk(lam == 60, "saturates at +Lambda_L");
    n = 2;
    repeat (200) @(negedge clk);
    chk(lam == -60, "saturates at -Lambda_L");
    n = 0; @(negedge clk);
    chk(lam == -7, "f(L;0) image starts at -7/4");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
