// bch_dec_runner -- drives one bch_decoder configuration end to end.
//
// Used by tb_bch_decoder_codes to run decoders for several codes one after
// the other. On a rising go it selects its field in the reference model,
// streams NW random codewords with random errors (some beyond T) back to
// back and checks, as tb_bch_decoder does, the corrected data and error
// count for e <= T, the iteration count and early-stop flag against the
// textbook Berlekamp-Massey with the ES version 3 rule, and the output
// stage's NB + iters + 2 clocks per word. It then raises finished and
// reports its counts: checks, failures, early stops, full-length runs,
// input stall clocks and words flagged uncorrectable.
module bch_dec_runner #(
  parameter int              M     = 5,
  parameter bch_pkg::gfw_t   PRIM  = 16'h0005,
  parameter int              T     = 3,
  parameter int              N     = 31,
  parameter int              KAPPA = 2,
  parameter int              NW    = 20,
  parameter int              P     = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic go,
  output logic finished,
  output int   checks,
  output int   failures,
  output int   n_early,
  output int   n_full,
  output int   n_stall,
  output int   n_fail
);
  import bch_tb_pkg::*;

  localparam int NB = (N + P - 1) / P;

  logic in_valid, in_ready, out_valid, out_last, out_fail, out_early_stop;
  logic [P-1:0] in_data, out_data;
  logic [$clog2(N+1)-1:0] out_nerr;
  logic [$clog2(T+1)-1:0] out_iters;

  bch_decoder #(.M(M), .PRIM(PRIM), .T(T), .N(N), .P(P), .KAPPA(KAPPA)) dut (.*);

  logic [NB*P-1:0] sent_cw [NW];
  int              sent_e  [NW];
  int              exp_it  [NW];
  longint          cycle = 0;
  bit              sending = 1'b0;

  always @(posedge clk) cycle <= cycle + 1;
  always @(posedge clk) if (sending && in_valid && !in_ready) n_stall++;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL (GF(2^%0d), t=%0d): %s", M, T, what);
    end
  endtask

  initial begin
    finished = 0; checks = 0; failures = 0;
    n_early = 0; n_full = 0; n_stall = 0; n_fail = 0;
    in_valid = 0; in_data = '0;
    @(posedge go);
    init(M, int'(PRIM) | (1 << M));
    sending = 1'b1;
    fork
      begin : driver
        bit g[];
        bit w[];
        int pos[$];
        int s[];
        int rlam[];
        int dodd[];
        int len;
        generator(T, g);
        for (int x = 0; x < NW; x++) begin
          int e;
          logic [NB*P-1:0] cw;
          e = (x % 5 == 4) ? T + 1 + $urandom_range(2, 0) : $urandom_range(T, 0);
          if (x == 0) e = 0;
          if (x == 1) e = T;
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
            in_valid = 1;
            in_data  = P'(beat_of(w, k, NB, P));
            @(posedge clk);
            while (!in_ready) @(posedge clk);
          end
          @(negedge clk);
          in_valid = 0;
        end
      end
      begin : monitor
        int x, k;
        longint last_t;
        x = 0; k = 0; last_t = 0;
        while (x < NW) begin
          @(posedge clk);
          #1;
          if (out_valid) begin
            if (sent_e[x] <= T)
              check(out_data == sent_cw[x][(NB - 1 - k) * P +: P], $sformatf("word %0d beat %0d", x, k));
            check(out_last == (k == NB - 1), $sformatf("word %0d out_last at beat %0d", x, k));
            k++;
            if (out_last) begin
              check(int'(out_iters) == exp_it[x], $sformatf("word %0d iterations %0d expected %0d", x, out_iters, exp_it[x]));
              check(out_early_stop == (exp_it[x] < T), $sformatf("word %0d early_stop", x));
              if (sent_e[x] <= T) begin
                check(int'(out_nerr) == sent_e[x], $sformatf("word %0d nerr %0d expected %0d", x, out_nerr, sent_e[x]));
                check(!out_fail, $sformatf("word %0d flagged", x));
              end
              if (x >= 1)
                check(cycle - last_t == longint'(NB) + longint'(exp_it[x]) + 64'd2,
                      $sformatf("word %0d spacing %0d expected %0d", x, cycle - last_t, NB + exp_it[x] + 2));
              if (out_early_stop) n_early++;
              if (int'(out_iters) == T) n_full++;
              if (out_fail) n_fail++;
              last_t = cycle;
              x++; k = 0;
            end
          end
        end
      end
    join
    sending = 1'b0;
    finished = 1;
  end
endmodule
