// tb_rhs_msg_estimator -- random bit streams for k = 2 and k = 4, with random
// idle cycles; at each last bit n must equal the number of ones received
// in that iteration.  Also checks the clear input.
module tb_rhs_msg_estimator;
  logic clk = 0, clr = 1, bit_en = 0, last = 0, y = 0;
  logic [1:0] n2;
  logic [2:0] n4;
  logic       en4 = 0, last4 = 0, y4 = 0;
  int checks = 0, failures = 0;

  rhs_msg_estimator #(.K(2)) dut2 (.clk, .clr, .bit_en, .last, .y, .n(n2));
  rhs_msg_estimator #(.K(4)) dut4 (.clk, .clr, .bit_en(en4), .last(last4), .y(y4), .n(n4));
  always #5 clk = ~clk;

  task automatic run(int k, int iters);
    for (int it = 0; it < iters; it++) begin
      int ones = 0;
      for (int j = 0; j < k; j++) begin
        while ($urandom_range(0, 3) == 0) begin
          @(negedge clk);
          bit_en = 0; en4 = 0; last = 0; last4 = 0;
          y = $urandom; y4 = $urandom;
        end
        @(negedge clk);
        if (k == 2) begin bit_en = 1; y = $urandom; last = (j == k - 1); ones += y; end
        else        begin en4 = 1; y4 = $urandom; last4 = (j == k - 1); ones += y4; end
        #1;
        if (j == k - 1) begin
          checks++;
          if ((k == 2 ? int'(n2) : int'(n4)) != ones) begin
            failures++;
            $display("FAIL: k=%0d n=%0d expected %0d", k, (k == 2 ? int'(n2) : int'(n4)), ones);
          end
        end
      end
    end
    @(negedge clk);
    bit_en = 0; en4 = 0; last = 0; last4 = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    clr = 0;
    run(2, 500);
    run(4, 500);
    // clear in the middle of an iteration
    @(negedge clk); bit_en = 1; y = 1; last = 0;
    @(negedge clk); bit_en = 0; clr = 1;
    @(negedge clk); clr = 0; bit_en = 1; y = 0; last = 1;
    #1 checks++;
    if (n2 != 0) begin failures++; $display("FAIL: clear"); end
    @(negedge clk); bit_en = 0; last = 0;
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
