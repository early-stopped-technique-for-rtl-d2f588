// bch_es3_check -- early-stop test of ES version 3.
//
// The Berlekamp-Massey solver reports one discrepancy d_j per iteration j.
// ES version 3 ends the solver at the first iteration j >= KAPPA at which
// d_j, d_(j-1), ..., d_(j-KAPPA+1) are all zero. This block keeps the length
// of the current run of zero discrepancies in a counter that saturates at
// KAPPA and restarts at zero on a non-zero discrepancy. Since the run can
// only reach KAPPA once KAPPA iterations have been made, "beginning from
// j = KAPPA" needs no separate iteration test.
//
// Interface: clear starts a new word (run length 0). step marks a clock in
// which the solver finishes an iteration whose discrepancy is zero exactly
// when d_zero is high. stop is combinational: high in the step clock whose
// discrepancy completes KAPPA zeros in a row, so that the solver can make
// that iteration its last. run is the run length before the current step.
//
// From the paper: the stopping rule and KAPPA = 6 (the value evaluated for
// the t = 72 code; the paper sets KAPPA to 4, 5 or 6). The saturating
// counter is this design's realisation of the rule.
module bch_es3_check #(
  parameter int unsigned KAPPA = bch_pkg::KAPPA_DEF
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         clear,
  input  logic                         step,
  input  logic                         d_zero,
  output logic                         stop,
  output logic [$clog2(KAPPA+1)-1:0]   run
);

  localparam int unsigned CW = $clog2(KAPPA + 1);

  initial assert (KAPPA >= 1) else $error("KAPPA must be at least 1");

  assign stop = step && d_zero && (run == CW'(KAPPA - 1) || run == CW'(KAPPA));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= '0;
    end else if (clear) begin
      run <= '0;
    end else if (step) begin
      if (!d_zero)                 run <= '0;
      else if (run != CW'(KAPPA))  run <= run + 1'b1;
    end
  end

endmodule
