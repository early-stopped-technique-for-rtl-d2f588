// tb_bch_decoder_codes -- the decoder on the two smaller codes of the
// analysis, run one after the other through bch_dec_runner:
//   GF(2^5),  n = 31,   t = 3,  KAPPA = 2 (the code of the failure-case
//             example, stopping after two zero discrepancies);
//   GF(2^10), n = 1023, t = 17, KAPPA = 4 (the smallest KAPPA advised);
//   GF(2^10), shortened to n = 1001, t = 17, KAPPA = 6, 5 bits per clock
//             (201 beats, 4 pad bits: a beat width that does not divide
//             the length and is not a power of two).
// Fields: x^5 + x^2 + 1 and x^10 + x^3 + 1. Each run sends 20 words back to
// back (12 for the third), every fifth with more than t errors. Early stop, a full t-iteration
// run and an input stall must occur in each; for the t = 17 codes the words
// beyond t must also be flagged at least once (for t = 3 such words are
// often miscorrected to another codeword, so no flag is required there).
module tb_bch_decoder_codes;
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic go_a = 1'b0, go_b = 1'b0, go_c = 1'b0, fin_a, fin_b, fin_c;
  int ca, fa, ea, la, sa, xa;
  int cb, fb, eb, lb, sb, xb;
  int cc, fc, ec, lc, sc, xc;
  int checks = 0, failures = 0;

  bch_dec_runner #(.M(5),  .PRIM(16'h0005), .T(3),  .N(31),   .KAPPA(2), .NW(20)) run_a (
    .clk, .rst_n, .go(go_a), .finished(fin_a), .checks(ca), .failures(fa),
    .n_early(ea), .n_full(la), .n_stall(sa), .n_fail(xa));
  bch_dec_runner #(.M(10), .PRIM(16'h0009), .T(17), .N(1023), .KAPPA(4), .NW(20)) run_b (
    .clk, .rst_n, .go(go_b), .finished(fin_b), .checks(cb), .failures(fb),
    .n_early(eb), .n_full(lb), .n_stall(sb), .n_fail(xb));
  bch_dec_runner #(.M(10), .PRIM(16'h0009), .T(17), .N(1001), .KAPPA(6), .NW(12), .P(5)) run_c (
    .clk, .rst_n, .go(go_c), .finished(fin_c), .checks(cc), .failures(fc),
    .n_early(ec), .n_full(lc), .n_stall(sc), .n_fail(xc));

  always #5 clk = ~clk;

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic need(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk) go_a = 1'b1;
    wait (fin_a);
    @(negedge clk) go_b = 1'b1;
    wait (fin_b);
    @(negedge clk) go_c = 1'b1;
    wait (fin_c);
    checks += ca + cb + cc;
    failures += fa + fb + fc;
    $display("GF(2^5)  t=3 : early %0d full %0d stall clocks %0d flagged %0d", ea, la, sa, xa);
    $display("GF(2^10) t=17: early %0d full %0d stall clocks %0d flagged %0d", eb, lb, sb, xb);
    $display("GF(2^10) t=17 n=1001 P=5: early %0d full %0d stall clocks %0d flagged %0d", ec, lc, sc, xc);
    need(ea > 0 && la > 0 && sa > 0, "GF(2^5) mechanisms");
    need(eb > 0 && lb > 0 && sb > 0 && xb > 0, "GF(2^10) mechanisms");
    need(ec > 0 && lc > 0 && sc > 0 && xc > 0, "GF(2^10) P=5 mechanisms");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
