// tb_rhs_vn -- variable node with DV = 6, k = 2 and the default table, run
// against a cycle model written out in the testbench: prior 4*ch, one
// tracker per edge updated once per 2 bits with the rounded beta = 0.15
// functions, harmonisation (+-1) in Phase II, extrinsic outputs capped to
// +-32 and compared with the shared threshold (X = Lambda' < T).  Checks every
// outgoing bit, the hard decision and the tracker values, over many frames
// with random channel values, thresholds and incoming bits.
module tb_rhs_vn;
  import rhs_pkg::*;
  localparam int DV = 6;
  logic clk = 0, init = 0, bit_en = 0, last = 0, gear = 0, harm_en = 0;
  ch_t  ch = 0;
  ext_t thr = 0;
  logic [DV-1:0] y = 0, x;
  logic hard, capped, harm_fire;
  int checks = 0, failures = 0, nharm = 0, ncap = 0;

  rhs_vn #(.DV(DV), .K(2)) dut (.clk, .init, .ch, .bit_en, .last, .gear, .harm_en,
                                .thr, .y, .x, .hard, .capped, .harm_fire);
  always #5 clk = ~clk;

  int r_prior;
  int r_lam [DV];
  int r_cnt [DV];

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

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic check_outputs();
    int tot, e;
    tot = r_prior;
    for (int i = 0; i < DV; i++) tot += r_lam[i];
    chk(hard == (tot < 0), "hard decision");
    for (int i = 0; i < DV; i++) begin
      e = sat(tot - r_lam[i], -32, 32);
      chk(x[i] == (e < int'(thr)), $sformatf("x[%0d]: ext %0d thr %0d got %0d", i, e, thr, x[i]));
      chk(int'(dut.lam[i]) == r_lam[i], $sformatf("tracker %0d: %0d vs %0d", i, dut.lam[i], r_lam[i]));
    end
  endtask

  task automatic model_update();
    int u [DV];
    int npos;
    for (int i = 0; i < DV; i++) u[i] = ref_f(r_lam[i], r_cnt[i]);
    npos = 0;
    for (int i = 0; i < DV; i++) if (u[i] >= 0) npos++;
    for (int i = 0; i < DV; i++) begin
      int b = 0;
      if (harm_en && npos == 1 && u[i] < 0)  b = 1;
      if (harm_en && npos == 5 && u[i] >= 0) b = -1;
      r_lam[i] = sat(u[i] + b, -60, 60);
    end
    if (harm_en && (npos == 1 || npos == 5)) nharm++;
  endtask

  initial begin
    for (int f = 0; f < 60; f++) begin
      @(negedge clk);
      ch = ch_t'($urandom_range(0, 15));
      init = 1; bit_en = 0; last = 0;
      @(negedge clk);
      init = 0;
      r_prior = 4 * int'(ch);
      for (int i = 0; i < DV; i++) begin r_lam[i] = 0; r_cnt[i] = 0; end
      harm_en = (f % 3 == 2);
      for (int it = 0; it < 40; it++) begin
        for (int j = 0; j < 2; j++) begin
          int bias_p;
          thr    = ext_t'(4 * ($urandom_range(0, 16) - 8));
          // incoming bits: biased per frame so that trackers move far
          bias_p = (f % 2) ? 20 : 80;
          for (int i = 0; i < DV; i++) y[i] = ($urandom_range(0, 99) < bias_p) ^ (i == f % DV);
          bit_en = 1;
          last   = (j == 1);
          gear   = (it >= 5);
          #1;
          check_outputs();
          if (capped) ncap++;
          for (int i = 0; i < DV; i++) r_cnt[i] += y[i];
          @(negedge clk);
          if (j == 1) begin
            model_update();
            for (int i = 0; i < DV; i++) r_cnt[i] = 0;
          end
        end
      end
      bit_en = 0; last = 0;
    end
    chk(nharm > 0, "harmonisation exercised");
    chk(ncap > 0, "output cap exercised");
    $display("harmonisation events %0d, capped cycles %0d", nharm, ncap);
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
