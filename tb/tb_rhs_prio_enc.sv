// tb_rhs_prio_enc -- exhaustive check of the priority encoder for Q = 9 and
// Q = 4: W is the number of zeros before the first one, Q when all are zero.
module tb_rhs_prio_enc;
  logic [8:0] z9;
  logic [3:0] w9;
  logic [3:0] z4;
  logic [2:0] w4;
  int checks = 0, failures = 0;

  rhs_prio_enc #(.Q(9)) dut9 (.z(z9), .w(w9));
  rhs_prio_enc #(.Q(4)) dut4 (.z(z4), .w(w4));

  function automatic int ref_w(int z, int q);
    int w = 0;
    while (w < q && ((z >> w) & 1) == 0) w++;
    return w;
  endfunction

  initial begin
    for (int v = 0; v < 512; v++) begin
      z9 = 9'(v);
      #1;
      checks++;
      if (int'(w9) != ref_w(v, 9)) begin
        failures++;
        $display("FAIL: z=%b w=%0d expected %0d", z9, w9, ref_w(v, 9));
      end
    end
    for (int v = 0; v < 16; v++) begin
      z4 = 4'(v);
      #1;
      checks++;
      if (int'(w4) != ref_w(v, 4)) begin
        failures++;
        $display("FAIL: z=%b w=%0d expected %0d", z4, w4, ref_w(v, 4));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
