// tb_bch_syndrome -- self-checking test of the syndrome calculator at the
// full code size (GF(2^14), N = 16383, T = 72, 8 bits per clock).
//
// Each word is a random systematic codeword plus e random bit errors, sent
// with random idle clocks between beats. Since a codeword has all
// syndromes zero, S_j must equal the sum of alpha^(j*p) over the error
// positions p, worked out with the table-based model. Also checked: done
// comes exactly one clock after the last beat is taken.
module tb_bch_syndrome;
  import bch_tb_pkg::*;

  typedef logic [13:0] gf_t;           // GF(2^14) element

  localparam int T  = 72;
  localparam int N  = 16383;
  localparam int P  = 8;
  localparam int NB = (N + P - 1) / P;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic in_valid, done;
  logic [P-1:0] in_data;
  gf_t syn [1:2*T];
  int checks = 0, failures = 0;

  bch_syndrome dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit g[];
    bit w[];
    int pos[$];
    int s[];
    int elist[] = '{0, 1, 6, 72, 100};
    init();
    generator(T, g);
    checks++;
    // some cyclotomic cosets are shorter than 14 (alpha^129 has order 127)
    if (g.size() - 1 > 14 * T || g.size() - 1 < 14 * (T - 1)) begin
      failures++; $display("generator degree %0d", g.size() - 1);
    end
    in_valid = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    foreach (elist[x]) begin
      encode_random(g, N, w);
      random_positions(N, elist[x], pos);
      foreach (pos[k]) w[pos[k]] = !w[pos[k]];
      syndromes(pos, T, s);
      for (int k = 0; k < NB; k++) begin
        @(negedge clk);
        in_valid = 0;
        while ($urandom_range(9, 0) == 0) @(negedge clk);
        in_valid = 1;
        in_data  = P'(beat_of(w, k, NB, P));
      end
      @(posedge clk);
      #1;
      in_valid = 0;
      checks++;
      if (!done) begin failures++; $display("done not one clock after the last beat"); end
      for (int j = 1; j <= 2 * T; j++) begin
        checks++;
        if (int'(syn[j]) != s[j]) begin
          failures++;
          if (failures < 10) $display("e=%0d S_%0d = %h, expected %h", elist[x], j, syn[j], s[j]);
        end
      end
      @(posedge clk);
      #1;
      checks++;
      if (done) begin failures++; $display("done longer than one clock"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
