// tb_bch_decoder_full -- end-to-end test of the BCH decoder at its default
// size: GF(2^14), N = 16383, T = 72, KAPPA = 6, P = 8 (2048 beats per word).
//
// Sends a package of three code blocks back to back, with 2, 40 and 72
// random bit errors (2 errors is the worked example for which the early
// stop ends the solver after e + KAPPA = 8 iterations; 72 errors needs all
// T iterations), followed by one block with 80 errors, beyond T, which must
// be flagged as uncorrectable. Checks are those of tb_bch_decoder: corrected
// data, error counts, iterations against a textbook Berlekamp-Massey with
// the ES version 3 rule, and the output stage's NB + iters + 2 clocks per
// word; early stop, full run, input stall and the failure flag must each
// occur at least once.
module tb_bch_decoder_full;
  import bch_tb_pkg::*;

  localparam int T     = 72;
  localparam int N     = 16383;
  localparam int P     = 8;
  localparam int KAPPA = 6;
  localparam int NB    = (N + P - 1) / P;
  localparam int NW1   = 4;             // back-to-back words
  localparam int NW    = 4;             // all words

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic in_valid, in_ready, out_valid, out_last, out_fail, out_early_stop;
  logic [P-1:0] in_data, out_data;
  logic [$clog2(N+1)-1:0] out_nerr;
  logic [$clog2(T+1)-1:0] out_iters;

  bch_decoder dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_early = 0, n_full = 0, n_stall = 0, n_fail = 0;
  logic [NB*P-1:0] sent_cw [NW];
  int              sent_e  [NW];
  int              exp_it  [NW];
  longint          cycle = 0;

  always @(posedge clk) cycle <= cycle + 1;
  always @(posedge clk) if (rst_n && in_valid && !in_ready) n_stall++;

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

  // driver
  initial begin
    bit g[];
    bit w[];
    int pos[$];
    int s[];
    int rlam[];
    int dodd[];
    int len;
    init();
    generator(T, g);
    in_valid = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int x = 0; x < NW; x++) begin
      int e;
      logic [NB*P-1:0] cw;
      e = (x == 0) ? 2 : (x == 1) ? 40 : (x == 2) ? T : 80;
      encode_random(g, N, w);
      cw = '0;
      for (int p = 0; p < N; p++) cw[p] = w[p];
      random_positions(N, e, pos);
      foreach (pos[k]) w[pos[k]] = !w[pos[k]];
      syndromes(pos, T, s);
      massey(s, T, rlam, len, dodd);
      sent_cw[x] = cw;
      sent_e[x]  = e;
      exp_it[x]  = es3_iters(dodd, T, KAPPA);
      for (int k = 0; k < NB; k++) begin
        @(negedge clk);
        if (x >= NW1) begin
          in_valid = 0;
          while ($urandom_range(4, 0) == 0) @(negedge clk);
        end
        in_valid = 1;
        in_data  = P'(beat_of(w, k, NB, P));
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
      @(negedge clk);
      in_valid = 0;
    end
  end

  // monitor
  initial begin
    int x, k;
    longint last_t;
    x = 0; k = 0; last_t = 0;
    while (x < NW) begin
      @(posedge clk);
      #1;
      if (out_valid) begin
        if (sent_e[x] <= T)
          check(out_data == sent_cw[x][(NB - 1 - k) * P +: P],
                $sformatf("word %0d beat %0d: %h expected %h", x, k, out_data, sent_cw[x][(NB - 1 - k) * P +: P]));
        check(out_last == (k == NB - 1), $sformatf("word %0d out_last at beat %0d", x, k));
        k++;
        if (out_last) begin
          check(int'(out_iters) == exp_it[x], $sformatf("word %0d iterations %0d expected %0d", x, out_iters, exp_it[x]));
          check(out_early_stop == (exp_it[x] < T), $sformatf("word %0d early_stop", x));
          if (sent_e[x] <= T) begin
            check(int'(out_nerr) == sent_e[x], $sformatf("word %0d nerr %0d expected %0d", x, out_nerr, sent_e[x]));
            check(!out_fail, $sformatf("word %0d flagged", x));
          end
          if (x >= 1 && x < NW1)
            check(cycle - last_t == longint'(NB + exp_it[x] + 2),
                  $sformatf("word %0d spacing %0d expected %0d", x, cycle - last_t, NB + exp_it[x] + 2));
          if (out_early_stop) n_early++;
          if (int'(out_iters) == T) n_full++;
          if (out_fail) n_fail++;
          last_t = cycle;
          x++; k = 0;
        end
      end
    end
    check(n_early > 0, "early stop never happened");
    check(n_full > 0, "full-length BM never happened");
    check(n_stall > 0, "input stall never happened");
    check(n_fail > 0, "uncorrectable word never flagged");
    $display("early stops %0d, full runs %0d, stall clocks %0d, flagged words %0d",
             n_early, n_full, n_stall, n_fail);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
