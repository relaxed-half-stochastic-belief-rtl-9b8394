// tb_rhs_threshold_gen -- each cycle recomputes the expected threshold from
// the generator's LFSR state (Z_1 = b0 & b1, Z_i = b_i, S = b_(Q+1), |T| = 4W
// or 8 when W = Q) and checks the output, then checks the magnitude and
// the sign of non-zero thresholds, and the histogram against the PMF Pr(W=0) = 1/4, Pr(W=w) = 3/4 * 2^-w.
module tb_rhs_threshold_gen;
  import rhs_pkg::*;
  localparam int Q = 9;
  localparam int NS = 40000;
  logic clk = 0, rst_n = 0, step = 0;
  ext_t thr;
  int checks = 0, failures = 0;
  int hist [0:Q];
  int negs = 0, nonzero = 0;

  rhs_threshold_gen #(.Q(Q), .SEED(32'h1234_5679)) dut (.clk, .rst_n, .step, .thr);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic int expect_thr(logic [31:0] s);
    int w = 0, m;
    logic [Q-1:0] z;
    z[0] = s[0] & s[1];
    for (int i = 1; i < Q; i++) z[i] = s[i+1];
    while (w < Q && !z[w]) w++;
    m = (w == Q) ? 8 : 4 * w;
    return s[Q+1] ? -m : m;
  endfunction

  real p;
  initial begin
    for (int i = 0; i <= Q; i++) hist[i] = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    step  <= 1;
    for (int c = 0; c < NS; c++) begin
      @(negedge clk);
      if (int'(thr) != expect_thr(dut.lfsr))
        chk(0, $sformatf("thr %0d expected %0d", thr, expect_thr(dut.lfsr)));
      else checks++;
      hist[int'(dut.w)]++;
      if (thr < 0) negs++;
      if (thr != 0) nonzero++;
    end
    // W histogram against the PMF (tolerance 5 sigma)
    for (int w = 0; w <= Q; w++) begin
      real sd;
      p  = (w == 0) ? 0.25 : ((w < Q) ? 0.75 * (0.5 ** w) : 0.75 * (0.5 ** (Q - 1)));
      sd = $sqrt(NS * p * (1.0 - p));
      chk((hist[w] - NS * p) < 5 * sd + 3 && (NS * p - hist[w]) < 5 * sd + 3,
          $sformatf("W=%0d count %0d expected %f", w, hist[w], NS * p));
    end
    chk(negs > nonzero * 0.47 && negs < nonzero * 0.53, $sformatf("sign balance %0d of %0d", negs, nonzero));
    step <= 0;
    @(negedge clk);
    begin
      ext_t hold = thr;
      repeat (3) @(negedge clk);
      chk(thr == hold, "threshold holds when step is low");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NS + 1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
