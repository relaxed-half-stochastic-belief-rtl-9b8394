// tb_rhs_syndrome -- M = 12 checks of DC = 5 random bits; ok must be high
// exactly when every parity is even, n_unsat must count the odd ones.
module tb_rhs_syndrome;
  logic [4:0] hd [12];
  logic       ok;
  logic [3:0] n_unsat;
  int checks = 0, failures = 0, nok = 0;

  rhs_syndrome #(.M(12), .DC(5)) dut (.hd, .ok, .n_unsat);

  initial begin
    for (int t = 0; t < 4000; t++) begin
      int cnt;
      cnt = 0;
      for (int c = 0; c < 12; c++) begin
        hd[c] = 5'($urandom);
        // make most checks even so that ok is reached often
        if ($urandom_range(0, 9) != 0 && ^hd[c]) hd[c][$urandom_range(0, 4)] ^= 1'b1;
      end
      #1;
      for (int c = 0; c < 12; c++) cnt += ^hd[c];
      checks += 2;
      if (int'(n_unsat) != cnt) begin failures++; $display("FAIL: n_unsat %0d exp %0d", n_unsat, cnt); end
      if (ok != (cnt == 0))     begin failures++; $display("FAIL: ok"); end
      nok += ok;
    end
    checks++;
    if (nok == 0) begin failures++; $display("FAIL: ok never seen"); end
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
