// tb_rhs_lfsr -- checks the multi-step LFSR against a bit-serial reference
// (x^32 + x^22 + x^2 + x + 1, one shift at a time), the hold when step is low,
// the zero-seed guard, and that the output bits are roughly balanced.
module tb_rhs_lfsr;
  logic clk = 0, rst_n = 0, step = 0;
  logic [31:0] st, st0;
  int checks = 0, failures = 0, ones = 0;
  logic [31:0] ref_s;

  rhs_lfsr #(.W(32), .STEP(11), .SEED(32'hACE1_2345)) dut (.clk, .rst_n, .step, .state(st));
  rhs_lfsr #(.W(32), .STEP(3),  .SEED(32'h0))         dut0 (.clk, .rst_n, .step, .state(st0));

  always #5 clk = ~clk;

  function automatic logic [31:0] ref_step(logic [31:0] s, int n);
    for (int i = 0; i < n; i++) s = {s[30:0], s[31] ^ s[21] ^ s[1] ^ s[0]};
    return s;
  endfunction

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(negedge clk);
    chk(st == 32'hACE1_2345, "seed loaded");
    chk(st0 == 32'h1, "zero seed replaced by 1");
    ref_s = 32'hACE1_2345;
    for (int c = 0; c < 2000; c++) begin
      step <= ($urandom_range(0, 3) != 0);
      @(negedge clk);
      if (step) ref_s = ref_step(ref_s, 11);
      chk(st == ref_s, $sformatf("state mismatch cycle %0d: %h vs %h", c, st, ref_s));
      ones += $countones(st[10:0]);
    end
    step <= 0;
    chk(ones > 0, "bits change");
    $display("ones fraction = %0d / %0d", ones, 2000 * 11);
    chk(ones > 8800 && ones < 13200, "rough balance");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
