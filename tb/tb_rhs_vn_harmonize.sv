// tb_rhs_vn_harmonize -- random sign patterns for DV = 6; when exactly one
// tracker has a sign different from the other five, the other five get
// +d (single one >= 0) or -d (single one < 0); otherwise, or when the
// input en is low, all corrections are 0.
module tb_rhs_vn_harmonize;
  import rhs_pkg::*;
  logic en;
  trk_t lam [6];
  trk_t bias [6];
  logic fire;
  int checks = 0, failures = 0, nfire = 0;

  rhs_vn_harmonize #(.DV(6), .D(1)) dut (.en, .lam, .bias, .fire);

  initial begin
    for (int t = 0; t < 5000; t++) begin
      int npos, single, expb;
      en = ($urandom_range(0, 3) != 0);
      // bias the patterns towards one dissenting value
      for (int i = 0; i < 6; i++) lam[i] = trk_t'($urandom_range(1, 60));
      if (t % 3 != 0) for (int i = 0; i < 6; i++) lam[i] = -lam[i];
      single = $urandom_range(0, 5);
      if (t % 4 != 3) lam[single] = (lam[single] < 0) ? trk_t'($urandom_range(0, 60)) : trk_t'(-$urandom_range(1, 60));
      if (t % 7 == 0) for (int i = 0; i < 6; i++) lam[i] = trk_t'($urandom_range(0, 120) - 60);
      #1;
      npos = 0;
      for (int i = 0; i < 6; i++) if (lam[i] >= 0) npos++;
      checks++;
      if (fire != (en && (npos == 1 || npos == 5))) begin failures++; $display("FAIL: fire npos=%0d en=%0d", npos, en); end
      if (fire) nfire++;
      for (int i = 0; i < 6; i++) begin
        expb = 0;
        if (en && npos == 1 && lam[i] < 0)   expb = 1;
        if (en && npos == 5 && lam[i] >= 0)  expb = -1;
        checks++;
        if (int'(bias[i]) != expb) begin failures++; $display("FAIL: bias[%0d]=%0d exp %0d (npos %0d)", i, bias[i], expb, npos); end
      end
    end
    checks++;
    if (nfire < 100) begin failures++; $display("FAIL: rule rarely exercised"); end
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
