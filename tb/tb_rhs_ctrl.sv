// tb_rhs_ctrl -- controller with K = 2, L1 = 6, L2 = 4, GEAR_ITER = 2.
// Scenario 1: syndrome becomes valid after 3 iterations -> done with
// success after 2*3 + 2 cycles.  Scenario 2: never valid -> 6 Phase-I and 4
// Phase-II iterations, done with failure after 2*10 + 2 cycles.  Checks the
// bit/last pattern, the gear change after 2 iterations, harm_en only in
// Phase II, the iteration count and the one-cycle done pulse.
module tb_rhs_ctrl;
  logic clk = 0, rst_n = 0, start = 0, syn_ok = 0;
  logic init, bit_en, last, gear, harm_en, busy, done, success, used_phase2;
  logic [15:0] iters;
  int checks = 0, failures = 0;

  rhs_ctrl #(.K(2), .L1(6), .L2(4), .GEAR_ITER(2)) dut (
    .clk, .rst_n, .start, .syn_ok, .init, .bit_en, .last, .gear, .harm_en,
    .busy, .done, .success, .used_phase2, .iters);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ok_after: iteration after which syn_ok goes high (0 = never)
  task automatic run(int ok_after, int exp_iters, bit exp_success, bit exp_ph2);
    int cyc = 0, it_seen = 0;
    @(negedge clk);
    start = 1;
    #1 chk(init, "init with start");
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done && cyc < 200) begin
      #1;
      if (bit_en) begin
        chk(last == ((cyc - 1) % 2 == 1), $sformatf("last pattern cycle %0d", cyc));
        chk(gear == (it_seen >= 2), $sformatf("gear at iteration %0d", it_seen));
        chk(harm_en == (it_seen >= 6), $sformatf("harm_en at iteration %0d", it_seen));
        chk(busy, "busy while decoding");
        if (last) it_seen++;
      end
      syn_ok = (ok_after != 0) && (it_seen >= ok_after);
      @(negedge clk);
      cyc++;
    end
    chk(cyc == 2 * exp_iters + 2, $sformatf("cycles to done %0d expected %0d", cyc, 2 * exp_iters + 2));
    chk(iters == 16'(exp_iters), $sformatf("iters %0d expected %0d", iters, exp_iters));
    chk(success == exp_success, "success flag");
    chk(used_phase2 == exp_ph2, "phase 2 flag");
    @(negedge clk);
    chk(!done && !busy, "done is one cycle");
    syn_ok = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(3, 3, 1, 0);
    run(0, 10, 0, 1);
    run(8, 8, 1, 1);
    run(1, 1, 1, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
