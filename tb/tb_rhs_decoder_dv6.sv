// tb_rhs_decoder_dv6 -- end-to-end test of the RHS decoder with the default
// variable degree: GF(8) lines graph (64 variables, 48 checks, d_v = 6, d_c = 8), k = 2,
// L1 = 30, L2 = 20, gear change after 3 iterations (gear 0 uses offsets of
// +-1/2 instead of +-1/4), one threshold generator per 8 VNs.
//
// The testbench builds the parity-check matrix with its own GF(8)
// arithmetic, finds a basis of the code by Gaussian elimination, sends
// random codewords through a BPSK/AWGN channel (4-bit LLRs, LSB = 1) and
// checks every decode:
//  * done arrives exactly 2*iters + 2 cycles after start;
//  * a decode reported successful gives a word with zero syndrome (checked
//    against the testbench's own H) and n_unsat = 0;
//  * a failed decode reports n_unsat > 0;
//  * at the low-noise points nearly all frames return the sent codeword.
// It counts how often each mechanism occurred: early termination, the gear
// change, Phase II, VN harmonisation, output capping, decoding failure, and
// frames whose channel hard decisions held errors and were corrected.  Each
// must occur (Phase-II rescues are only reported).
module tb_rhs_decoder_dv6;
  import rhs_pkg::*;
  localparam int S = 3, POLY = 'hB, DV = 6, DC = 8, Z = 8, N = 64, M = 48;
  localparam int L1 = 30, L2 = 20, GI = 3;

  function automatic trk_table_t tb_table();
    trk_table_t t;
    t = table_default(2);
    t[0][0] = mk_func(3'd4, 8'sd2, -LL8, LL8, -8'sd7, LL8);
    return t;
  endfunction

  logic clk = 0, rst_n = 0, start = 0;
  ch_t  llr [N];
  logic busy, done, success, used_phase2, cap_active, harm_active;
  logic [15:0] iters;
  logic [N-1:0] hard;
  logic [5:0] n_unsat;

  rhs_decoder #(.GF_S(S), .GF_POLY(POLY), .DV(DV), .DC(DC), .K(2), .L1(L1), .L2(L2),
                .GEAR_ITER(GI), .VN_PER_RNG(8), .Q(9), .TABLE(tb_table())) dut (
    .clk, .rst_n, .start, .llr, .busy, .done, .success, .used_phase2, .iters, .hard,
    .n_unsat, .cap_active, .harm_active);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int c_early = 0, c_gear = 0, c_ph2 = 0, c_harm = 0, c_cap = 0, c_fail = 0, c_rescue = 0, c_corr = 0;
  logic [N-1:0] H [M];
  logic [N-1:0] basis [N];
  int nbasis = 0;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic int mul8(int a, int b);
    int r = 0;
    for (int i = 0; i < 3; i++) begin
      if ((b >> i) & 1) r ^= a;
      a <<= 1;
      if (a & 8) a ^= 'hB;
    end
    return r;
  endfunction

  // H: check (i, y) contains variable (j, y ^ i*j)
  task automatic build_h();
    for (int c = 0; c < M; c++) begin
      H[c] = '0;
      for (int j = 0; j < DC; j++) H[c][j * Z + ((c % Z) ^ mul8(c / Z, j))] = 1'b1;
    end
  endtask

  // null space of H over GF(2)
  task automatic build_basis();
    logic [N-1:0] R [M];
    int piv_col [M];
    bit is_piv [N];
    int r = 0;
    for (int c = 0; c < M; c++) R[c] = H[c];
    for (int v = 0; v < N; v++) is_piv[v] = 0;
    for (int col = 0; col < N && r < M; col++) begin
      int p = -1;
      for (int q = r; q < M; q++) if (R[q][col] && p < 0) p = q;
      if (p < 0) continue;
      begin logic [N-1:0] t = R[p]; R[p] = R[r]; R[r] = t; end
      for (int q = 0; q < M; q++) if (q != r && R[q][col]) R[q] ^= R[r];
      piv_col[r] = col; is_piv[col] = 1; r++;
    end
    for (int f = 0; f < N; f++) if (!is_piv[f]) begin
      logic [N-1:0] w = '0;
      w[f] = 1'b1;
      for (int q = 0; q < r; q++) if (R[q][f]) w[piv_col[q]] = 1'b1;
      basis[nbasis++] = w;
    end
  endtask

  function automatic logic [N-1:0] rand_codeword();
    logic [N-1:0] w = '0;
    for (int b = 0; b < nbasis; b++) if ($urandom_range(0, 1)) w ^= basis[b];
    return w;
  endfunction

  function automatic int syndrome_weight(logic [N-1:0] w);
    int s = 0;
    for (int c = 0; c < M; c++) s += ^(H[c] & w);
    return s;
  endfunction

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom_range(1, 1000000))) / 1000001.0;
    u2 = (real'($urandom_range(0, 1000000))) / 1000001.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307 * u2);
  endfunction

  // one frame at noise sigma; returns 1 when the sent word came back
  task automatic frame(real sigma, output bit correct);
    logic [N-1:0] cw;
    int cyc, q;
    bit ph, hm, cp;
    real yv;
    cw = rand_codeword();
    for (int v = 0; v < N; v++) begin
      yv = (cw[v] ? -1.0 : 1.0) + sigma * gauss();
      q  = $rtoi(2.0 * yv / (sigma * sigma) + ((yv >= 0) ? 0.5 : -0.5));
      q  = (q > 7) ? 7 : ((q < -8) ? -8 : q);
      llr[v] = ch_t'(q);
    end
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1; hm = 0; cp = 0;
    while (!done && cyc < 4 * (L1 + L2) + 20) begin
      if (harm_active) hm = 1;
      if (cap_active && busy) cp = 1;
      @(negedge clk);
      cyc++;
    end
    chk(done, "decode finished");
    chk(cyc == 2 * int'(iters) + 2, $sformatf("latency %0d cycles for %0d iterations", cyc, iters));
    if (success) begin
      chk(syndrome_weight(hard) == 0, "successful word has zero syndrome");
      chk(n_unsat == 0, "n_unsat zero on success");
      if (iters < 16'(L1) && !used_phase2) c_early++;
      if (used_phase2) c_rescue++;
    end else begin
      chk(n_unsat != 0 && int'(n_unsat) == syndrome_weight(hard), "failure reports unsatisfied checks");
      chk(int'(iters) == L1 + L2, "failure runs both phases");
      c_fail++;
    end
    if (int'(iters) > GI) c_gear++;
    if (used_phase2) c_ph2++;
    if (hm) c_harm++;
    if (cp) c_cap++;
    correct = success && (hard == cw);
    begin
      int raw = 0;
      for (int v = 0; v < N; v++) raw += ((llr[v] < 0) != cw[v]) ? 1 : 0;
      if (correct && raw > 0) c_corr++;
    end
  endtask

  initial begin
    bit ok;
    int good;
    build_h();
    build_basis();
    $display("code: %0d x %0d, dimension %0d", M, N, nbasis);
    chk(nbasis >= N - M, "code dimension");
    for (int b = 0; b < nbasis; b++) chk(syndrome_weight(basis[b]) == 0, "basis word in code");
    repeat (3) @(negedge clk);
    rst_n = 1;
    // low noise: must decode nearly always
    good = 0;
    for (int f = 0; f < 40; f++) begin frame(0.5, ok); good += ok; end
    $display("sigma 0.5: %0d / 40 correct", good);
    chk(good >= 38, "low-noise frames decode");
    // moderate noise: longer decodes, gear change
    good = 0;
    for (int f = 0; f < 40; f++) begin frame(0.6, ok); good += ok; end
    $display("sigma 0.6: %0d / 40 correct", good);
    chk(good >= 20, "moderate-noise frames decode mostly");
    // heavy noise: failures, Phase II, harmonisation
    for (int f = 0; f < 10; f++) frame(1.1, ok);
    $display("early=%0d gear=%0d phase2=%0d harm=%0d cap=%0d fail=%0d rescued=%0d corrected=%0d",
             c_early, c_gear, c_ph2, c_harm, c_cap, c_fail, c_rescue, c_corr);
    chk(c_early > 0, "early termination happened");
    chk(c_gear > 0, "gear change happened");
    chk(c_ph2 > 0, "phase II happened");
    chk(c_harm > 0, "VN harmonisation happened");
    chk(c_cap > 0, "output cap happened");
    chk(c_fail > 0, "decoding failure happened");
    chk(c_corr > 20, "frames with channel errors corrected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
