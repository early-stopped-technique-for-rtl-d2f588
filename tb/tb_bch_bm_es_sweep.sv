// tb_bch_bm_es_sweep -- iteration count of the early-stopped solver over
// every error count, at the full size (T = 72, KAPPA = 6).
//
// For e = 0..75 errors, four words each with random positions, the solver's
// iteration count is checked against the reference (textbook Massey plus
// the stop rule) and, for e <= T - KAPPA, against e + KAPPA (KAPPA for no
// errors). It prints, per error count, the iterations made and the share of
// solver clocks saved against a solver that always runs T iterations. That
// share is the hardware counterpart of the complexity reduction plotted
// against the error count for t = 72: here every iteration costs the same
// 3(T+1) multiplications, so the saving is 1 - iterations/T.
module tb_bch_bm_es_sweep;
  import bch_tb_pkg::*;

  typedef logic [13:0] gf_t;           // GF(2^14) element

  localparam int T     = 72;
  localparam int KAPPA = 6;
  localparam int N     = 16383;
  localparam int REP   = 4;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic start, busy, done, early_stop;
  gf_t  syn [1:2*T];
  gf_t  lambda [T+1];
  logic [$clog2(2*T+2)-1:0] deg;
  logic [$clog2(T+1)-1:0]   iters;
  int checks = 0, failures = 0;

  bch_bm_es dut (.*);

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
    start = 0;
    foreach (syn[j]) syn[j] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    $display("  e  iterations  saved");
    for (int e = 0; e <= T + 3; e++) begin
      int sum_it;
      sum_it = 0;
      for (int rep = 0; rep < REP; rep++) begin
        int len, exp_it, cyc;
        int pos[$];
        int s[];
        int rlam[];
        int dodd[];
        random_positions(N, e, pos);
        syndromes(pos, T, s);
        massey(s, T, rlam, len, dodd);
        exp_it = es3_iters(dodd, T, KAPPA);
        @(negedge clk);
        for (int j = 1; j <= 2 * T; j++) syn[j] = gf_t'(s[j]);
        start = 1;
        @(negedge clk);
        start = 0;
        cyc = 1;
        while (!done) begin @(negedge clk); cyc++; end
        check(int'(iters) == exp_it, $sformatf("e=%0d iterations %0d expected %0d", e, iters, exp_it));
        check(cyc == int'(iters) + 1, $sformatf("e=%0d latency %0d", e, cyc));
        if (e <= T - KAPPA)
          check(int'(iters) == ((e == 0) ? KAPPA : e + KAPPA), $sformatf("e=%0d stops at %0d", e, iters));
        else
          check(int'(iters) == T, $sformatf("e=%0d stops at %0d, before T", e, iters));
        if (e <= T) check(int'(deg) == e, $sformatf("e=%0d L=%0d", e, deg));
        sum_it += int'(iters);
      end
      $display("%3d  %6.2f  %5.1f%%", e, real'(sum_it) / REP, 100.0 * (1.0 - real'(sum_it) / (REP * T)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
