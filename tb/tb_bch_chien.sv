// tb_bch_chien -- self-checking test of the Chien search (shortened code
// N = 300, T = 8, P = 8, so the first beat holds 4 pad bits).
//
// Builds Lambda(x) = prod (1 + alpha^p x) over random positions with the
// table-based model, scales it by a random non-zero constant, and runs the
// search with step held low on random clocks. Every reported bit must be
// one of the positions and every position must be reported, in beat
// (NB-1-k)*P + b order. Some locators get a root at a pad position (>= N),
// which must not be reported, and some are given a wrong degree: nroots and
// fail are checked against both.
module tb_bch_chien;
  import bch_tb_pkg::*;

  typedef logic [13:0] gf_t;           // GF(2^14) element

  localparam int T  = 8;
  localparam int N  = 300;
  localparam int P  = 8;
  localparam int NB = (N + P - 1) / P;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic start, step, busy, err_last, done, fail;
  gf_t  lambda [T+1];
  logic [$clog2(2*T+2)-1:0] deg;
  logic [P-1:0] err_mask;
  logic [$clog2(N+1)-1:0] nroots;
  int checks = 0, failures = 0;

  bch_chien #(.T(T), .N(N), .P(P)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
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
    start = 0; step = 0; deg = '0;
    foreach (lambda[i]) lambda[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int w = 0; w < 60; w++) begin
      int e, scale, k, found, given_deg, real_roots;
      int pos[$];
      int lam[];
      bit expect_err[int];
      bit pad_root, wrong_deg;
      expect_err.delete();
      e = $urandom_range(T, 0);
      random_positions(N, e, pos);
      pad_root  = (w % 5 == 3) && e > 0;
      wrong_deg = (w % 7 == 5);
      if (pad_root) pos[0] = N + $urandom_range(NB * P - N - 1, 0);
      lam = new[T + 1];
      foreach (lam[i]) lam[i] = 0;
      scale = $urandom_range(Q1, 1);
      lam[0] = scale;
      foreach (pos[q]) begin
        int r;
        r = apow(pos[q]);
        for (int i = T; i > 0; i--) lam[i] = lam[i] ^ mul(lam[i - 1], r);
      end
      real_roots = 0;
      foreach (pos[q]) if (pos[q] < N) begin expect_err[pos[q]] = 1; real_roots++; end
      given_deg = wrong_deg ? e + 1 : e;
      @(negedge clk);
      for (int i = 0; i <= T; i++) lambda[i] = gf_t'(lam[i]);
      deg = $bits(deg)'(given_deg);
      start = 1;
      @(negedge clk);
      start = 0;
      foreach (lambda[i]) lambda[i] = '0;
      k = 0; found = 0;
      while (k < NB) begin
        step = ($urandom_range(3, 0) != 0);
        #1;
        if (step) begin
          for (int b = 0; b < P; b++) begin
            int p;
            p = (NB - 1 - k) * P + b;
            check(err_mask[b] == expect_err.exists(p), $sformatf("word %0d position %0d", w, p));
            if (err_mask[b]) found++;
          end
          check(err_last == (k == NB - 1), $sformatf("word %0d err_last at beat %0d", w, k));
          k++;
        end else begin
          check(err_mask == '0, "mask while not stepping");
        end
        @(negedge clk);
      end
      step = 0;
      check(done == 1'b1, "done after the last beat");
      check(int'(nroots) == real_roots, $sformatf("word %0d nroots %0d, expected %0d", w, nroots, real_roots));
      check(fail == (real_roots != given_deg), $sformatf("word %0d fail %0b", w, fail));
      check(!busy, "idle after the word");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
