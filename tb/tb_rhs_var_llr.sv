// tb_rhs_var_llr -- random priors and tracker values for DV = 6; checks each
// extrinsic output (prior + sum of the other five, limited to +-32), the
// hard decision (total < 0) and the cap flag.
module tb_rhs_var_llr;
  import rhs_pkg::*;
  sum_t prior;
  trk_t lam [6];
  ext_t ext [6];
  logic hard, capped;
  int checks = 0, failures = 0, ncap = 0;

  rhs_var_llr #(.DV(6)) dut (.prior, .lam, .ext, .hard, .capped);

  initial begin
    for (int t = 0; t < 5000; t++) begin
      int tot, e, cap;
      prior = sum_t'(4 * ($urandom_range(0, 15) - 8));
      for (int i = 0; i < 6; i++)
        lam[i] = trk_t'((t % 2) ? $urandom_range(0, 120) - 60 : $urandom_range(0, 20) - 10);
      #1;
      tot = int'(prior);
      for (int i = 0; i < 6; i++) tot += int'(lam[i]);
      cap = 0;
      for (int i = 0; i < 6; i++) begin
        e = tot - int'(lam[i]);
        if (e > 32 || e < -32) cap = 1;
        e = e > 32 ? 32 : (e < -32 ? -32 : e);
        checks++;
        if (int'(ext[i]) != e) begin
          failures++;
          $display("FAIL: ext[%0d]=%0d expected %0d", i, ext[i], e);
        end
      end
      ncap += cap;
      checks += 2;
      if (hard != (tot < 0)) begin failures++; $display("FAIL: hard"); end
      if (capped != cap[0])  begin failures++; $display("FAIL: capped"); end
    end
    checks++;
    if (ncap == 0) begin failures++; $display("FAIL: cap never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
