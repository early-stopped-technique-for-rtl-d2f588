// tb_bch_bm_es -- self-checking test of the early-stopped Berlekamp-Massey
// solver at the full size (T = 72, KAPPA = 6).
//
// For error counts from 0 to beyond T the syndromes of random error
// positions are computed by the table-based model, which also runs a
// textbook 2T-step Massey with field inverses. Checked per word:
//  - iterations made = first j >= KAPPA closing KAPPA zero odd-step
//    discrepancies of the reference, else T (normally min(e + KAPPA, T));
//  - early_stop flag, and latency start -> done = iterations + 1 clocks;
//  - for e <= T: register length L = e, the locator normalised to
//    Lambda_0 = 1 equals the reference, and it vanishes at alpha^(-p) for
//    every error position p.
module tb_bch_bm_es;
  import bch_tb_pkg::*;

  typedef logic [13:0] gf_t;           // GF(2^14) element

  localparam int T     = 72;
  localparam int KAPPA = 6;
  localparam int N     = 16383;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic start, busy, done, early_stop;
  gf_t  syn [1:2*T];
  gf_t  lambda [T+1];
  logic [$clog2(2*T+2)-1:0] deg;
  logic [$clog2(T+1)-1:0]   iters;
  int checks = 0, failures = 0;
  int n_early = 0, n_full = 0;

  bch_bm_es dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
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
    int elist[] = '{0, 1, 2, 3, 5, 10, 20, 40, 60, 66, 67, 70, 72, 73, 80};
    init();
    start = 0;
    foreach (syn[j]) syn[j] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int rep = 0; rep < 4; rep++)
    foreach (elist[x]) begin
      int e, len, exp_it, cyc;
      int pos[$];
      int s[];
      int rlam[];
      int dodd[];
      int lam[];
      e = elist[x];
      random_positions(N, e, pos);
      syndromes(pos, T, s);
      massey(s, T, rlam, len, dodd);
      exp_it = es3_iters(dodd, T, KAPPA);
      @(negedge clk);
      for (int j = 1; j <= 2 * T; j++) syn[j] = gf_t'(s[j]);
      start = 1;
      @(negedge clk);
      start = 0;
      foreach (syn[j]) syn[j] = gf_t'($urandom);   // copied at start
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      check(int'(iters) == exp_it, $sformatf("e=%0d iterations %0d, expected %0d", e, iters, exp_it));
      check(cyc == exp_it + 1, $sformatf("e=%0d latency %0d, expected %0d", e, cyc, exp_it + 1));
      check(early_stop == (exp_it < T), $sformatf("e=%0d early_stop %0b", e, early_stop));
      if (exp_it < T) n_early++; else n_full++;
      if (e <= T - KAPPA) check(exp_it == e + KAPPA || e == 0 && exp_it == KAPPA,
                                $sformatf("e=%0d reference stops at %0d", e, exp_it));
      if (e <= T) begin
        int inv0;
        check(int'(deg) == e, $sformatf("e=%0d L=%0d", e, deg));
        lam = new[T + 1];
        for (int i = 0; i <= T; i++) lam[i] = int'(lambda[i]);
        check(lam[0] != 0, "Lambda_0 zero");
        inv0 = inv(lam[0]);
        for (int i = 0; i <= T; i++)
          check(mul(lam[i], inv0) == rlam[i], $sformatf("e=%0d Lambda_%0d differs", e, i));
        foreach (pos[k])
          check(peval(lam, apow(-longint'(pos[k]))) == 0, $sformatf("e=%0d no root at %0d", e, pos[k]));
      end
      @(negedge clk);
    end
    check(n_early > 0 && n_full > 0, "both stop kinds seen");
    $display("early stops %0d, full runs %0d", n_early, n_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
