// tb_bch_es3_check -- self-checking test of the ES version 3 stop rule.
//
// Feeds random streams of zero / non-zero discrepancies (zeros made likely,
// so long runs occur) with random idle clocks and clears, and compares the
// stop output every clock with a model that keeps the last KAPPA
// discrepancies of the current word in a queue: stop is expected exactly
// when the current one is zero and the KAPPA-1 before it in the same word
// were zero too.
module tb_bch_es3_check;
  localparam int KAPPA = 6;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic clear, step, d_zero, stop;
  logic [$clog2(KAPPA+1)-1:0] run;
  int checks = 0, failures = 0, stops = 0;

  bch_es3_check #(.KAPPA(KAPPA)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit hist[$];
    bit exp_stop;
    clear = 0; step = 0; d_zero = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 20000; n++) begin
      @(negedge clk);
      clear  = ($urandom_range(99, 0) < 2);
      step   = !clear && ($urandom_range(9, 0) < 8);
      d_zero = ($urandom_range(9, 0) < 8);
      #1;
      exp_stop = 1'b0;
      if (step && d_zero) begin
        int z;
        z = 1;
        for (int k = hist.size() - 1; k >= 0 && hist[k]; k--) z++;
        exp_stop = (z >= KAPPA);
      end
      checks++;
      if (stop !== exp_stop) begin
        failures++;
        if (failures < 10) $display("mismatch at %0d: stop=%0b expected %0b", n, stop, exp_stop);
      end
      if (stop) stops++;
      @(posedge clk);
      if (clear) hist = {};
      else if (step) hist.push_back(d_zero);
    end
    // a single non-zero discrepancy must restart the run
    checks++;
    if (stops == 0) begin failures++; $display("stop never seen"); end
    $display("stops seen: %0d", stops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
