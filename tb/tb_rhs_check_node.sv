// tb_rhs_check_node -- random input vectors for DC = 32 and DC = 3; every
// output must equal the XOR of all other inputs.
module tb_rhs_check_node;
  logic [31:0] x32, y32;
  logic [2:0]  x3, y3;
  int checks = 0, failures = 0;

  rhs_check_node #(.DC(32)) dut32 (.x(x32), .y(y32));
  rhs_check_node #(.DC(3))  dut3  (.x(x3),  .y(y3));

  initial begin
    for (int t = 0; t < 3000; t++) begin
      x32 = $urandom;
      x3  = 3'($urandom);
      if (t < 32) x32 = 32'(1) << t;
      #1;
      for (int i = 0; i < 32; i++) begin
        logic r;
        r = 0;
        for (int j = 0; j < 32; j++) if (j != i) r ^= x32[j];
        checks++;
        if (y32[i] !== r) begin failures++; $display("FAIL: DC32 x=%h i=%0d", x32, i); end
      end
      for (int i = 0; i < 3; i++) begin
        logic r;
        r = 0;
        for (int j = 0; j < 3; j++) if (j != i) r ^= x3[j];
        checks++;
        if (y3[i] !== r) begin failures++; $display("FAIL: DC3 x=%b i=%0d", x3, i); end
      end
    end
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
