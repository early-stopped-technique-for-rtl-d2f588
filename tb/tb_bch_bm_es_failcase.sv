// tb_bch_bm_es_failcase -- the failure case of early-stopped checking.
//
// Builds syndromes whose discrepancies follow the pattern
//   iteration   1    2   3   4
//   discrepancy >0   0   0   d' != 0
// S_1..S_6 are those of a single error at alpha^a, S_7 deviates by a random
// non-zero amount, the remaining odd syndromes are random and the even ones
// are squares (S_2i = S_i^2), as for any binary received word. A solver
// that stops after two zero discrepancies (KAPPA = 2) ends at iteration 3
// with the one-error locator 1 + alpha^a x, which the full algorithm later
// overturns: this is the premature stop whose probability the early-stop
// technique trades for latency. With KAPPA = 3 the same syndromes are
// solved correctly. Both solvers run side by side (T = 8) on 50 such
// vectors, and the outcomes are compared with the textbook reference.
module tb_bch_bm_es_failcase;
  import bch_tb_pkg::*;

  typedef logic [13:0] gf_t;           // GF(2^14) element

  localparam int T = 8;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic start;
  gf_t  syn [1:2*T];
  logic busy2, done2, es2, busy3, done3, es3;
  gf_t  lam2 [T+1];
  gf_t  lam3 [T+1];
  logic [$clog2(2*T+2)-1:0] deg2, deg3;
  logic [$clog2(T+1)-1:0]   it2, it3;
  int checks = 0, failures = 0, premature = 0;

  bch_bm_es #(.T(T), .KAPPA(2)) dut2 (.clk, .rst_n, .start, .syn, .busy(busy2), .done(done2),
    .lambda(lam2), .deg(deg2), .iters(it2), .early_stop(es2));
  bch_bm_es #(.T(T), .KAPPA(3)) dut3 (.clk, .rst_n, .start, .syn, .busy(busy3), .done(done3),
    .lambda(lam3), .deg(deg3), .iters(it3), .early_stop(es3));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    init();
    start = 0;
    foreach (syn[j]) syn[j] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int w = 0; w < 50; w++) begin
      int a, len, i2, i3, inv0;
      int s[];
      int rlam[];
      int dodd[];
      int l2[];
      bit same;
      a = $urandom_range(Q1 - 1, 0);
      s = new[2 * T + 1];
      s[0] = 0;
      for (int j = 1; j <= 2 * T; j++) begin
        if (j % 2 == 0)      s[j] = mul(s[j / 2], s[j / 2]);
        else if (j <= 5)     s[j] = apow(longint'(a) * j);
        else if (j == 7)     s[j] = apow(longint'(a) * j) ^ $urandom_range(Q1, 1);
        else                 s[j] = $urandom_range(Q1, 0);
      end
      massey(s, T, rlam, len, dodd);
      check(dodd[1] != 0 && dodd[2] == 0 && dodd[3] == 0 && dodd[4] != 0, "discrepancy pattern");
      i2 = es3_iters(dodd, T, 2);
      i3 = es3_iters(dodd, T, 3);
      @(negedge clk);
      for (int j = 1; j <= 2 * T; j++) syn[j] = gf_t'(s[j]);
      start = 1;
      @(negedge clk);
      start = 0;
      while (!(done3 || (!busy3 && !start))) @(negedge clk);
      // KAPPA = 2: stops at iteration 3 with the one-error locator
      check(int'(it2) == 3 && i2 == 3 && es2, $sformatf("KAPPA=2 stopped at %0d", it2));
      check(int'(deg2) == 1, $sformatf("KAPPA=2 L=%0d", deg2));
      l2 = new[T + 1];
      for (int i = 0; i <= T; i++) l2[i] = int'(lam2[i]);
      inv0 = inv(l2[0]);
      check(mul(l2[1], inv0) == apow(a), "KAPPA=2 locator is 1 + alpha^a x");
      same = 1'b1;
      for (int i = 0; i <= T; i++) if (mul(l2[i], inv0) != rlam[i]) same = 1'b0;
      check(!same && len != 1, "premature locator differs from the full result");
      if (!same) premature++;
      // KAPPA = 3: runs on and agrees with the reference
      check(int'(it3) == i3 && i3 > 4, $sformatf("KAPPA=3 stopped at %0d, expected %0d", it3, i3));
      check(int'(deg3) == len, $sformatf("KAPPA=3 L=%0d expected %0d", deg3, len));
      inv0 = inv(int'(lam3[0]));
      for (int i = 0; i <= T; i++)
        check(mul(int'(lam3[i]), inv0) == rlam[i], $sformatf("KAPPA=3 Lambda_%0d", i));
      @(negedge clk);
    end
    check(premature > 0, "premature stop never happened");
    $display("premature stops with KAPPA=2: %0d of 50", premature);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
