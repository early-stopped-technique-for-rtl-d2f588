// bch_bm_es -- early-stopped Berlekamp-Massey solver for binary BCH codes.
//
// Finds the error-locator polynomial Lambda(x) from the syndromes S_1..S_2T,
// one iteration per clock. For a binary code every even-step discrepancy of
// the 2T-step algorithm is zero, so only the T odd steps are made: iteration
// j = r+1 (r = 0..T-1) uses S_(2r+1) and folds the skipped even step into
// the update of the correction polynomial B(x). The form is inversion-free:
//   d       = sum_i Lambda_i * S_(2r+1-i)
//   Lambda <= gamma * Lambda + d * x * B
//   if d != 0 and L <= r :  B <= x * Lambda,  L <= 2r+1-L,  gamma <= d
//   else                 :  B <= x^2 * B
// The window sw[i] = S_(2r+1-i) is a shift register that moves by two
// syndromes per iteration, so d needs T+1 general multipliers and the update
// 2(T+1) more. The syndromes are copied at start, so the producer may begin
// the next word at once.
//
// Early stop (ES version 3): bch_es3_check watches the discrepancies and the
// solver ends after the iteration that completes KAPPA zero discrepancies in
// a row, or after iteration T if that never happens. With e errors the
// discrepancies are normally non-zero up to iteration e and zero afterwards,
// so decoding ends after min(e + KAPPA, T) iterations instead of T.
//
// Interface: start (one clock, while idle) loads syn[] and begins. busy is
// high while iterating. done pulses for one clock after the last iteration;
// lambda, deg (the register length L), iters (iterations made) and
// early_stop (ended before iteration T) then hold until the next start.
// Latency: iters + 1 clocks from start to done.
//
// From the paper: the iterative BM decoding over the discrepancies d_j, the
// ES version 3 stopping rule and its e + KAPPA iteration count. The binary
// odd-step, inversion-free form and the one-iteration-per-clock datapath are
// this design's choices; the paper does not give the solver's insides.
module bch_bm_es
  import bch_pkg::*;
#(
  parameter int unsigned M     = M_DEF,
  parameter gfw_t        PRIM  = PRIM_DEF,
  parameter int unsigned T     = T_DEF,
  parameter int unsigned KAPPA = KAPPA_DEF
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  logic [M-1:0]                       syn [1:2*T],
  output logic                        busy,
  output logic                        done,
  output logic [M-1:0]                lambda [T+1],
  output logic [$clog2(2*T+2)-1:0]    deg,
  output logic [$clog2(T+1)-1:0]      iters,
  output logic                        early_stop
);

  `include "bch_gf.svh"

  localparam int unsigned LW = $clog2(2 * T + 2);
  localparam int unsigned RW = $clog2(T + 1);

  initial assert (T >= 2) else $error("T must be at least 2");

  gf_t          lam [T+1];
  gf_t          bb  [T+1];
  gf_t          sw  [T+1];
  gf_t          q   [2*T-1];      // S_2 .. S_2T still to enter the window
  gf_t          gamma;
  logic [LW-1:0] len;
  logic [RW-1:0] r;

  gf_t  d;
  logic d_zero;
  logic grow;
  logic es_stop;
  logic last;
  logic [$clog2(KAPPA+1)-1:0] zero_run;   // current run of zero discrepancies

  // Discrepancy of the current iteration.
  always_comb begin
    d = '0;
    for (int i = 0; i <= T; i++) d = d ^ mul(lam[i], sw[i]);
  end

  assign d_zero = (d == '0);
  assign grow   = !d_zero && (LW'(len) <= LW'(r));
  assign last   = es_stop || (r == RW'(T - 1));

  bch_es3_check #(.KAPPA(KAPPA)) u_es (
    .clk    (clk),
    .rst_n  (rst_n),
    .clear  (start),
    .step   (busy),
    .d_zero (d_zero),
    .stop   (es_stop),
    .run    (zero_run)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      done       <= 1'b0;
      gamma      <= '0;
      len        <= '0;
      r          <= '0;
      iters      <= '0;
      early_stop <= 1'b0;
      for (int i = 0; i <= T; i++) begin
        lam[i] <= '0;
        bb[i]  <= '0;
        sw[i]  <= '0;
      end
      for (int i = 0; i < 2 * T - 1; i++) q[i] <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy       <= 1'b1;
        gamma      <= gf_t'(1);
        len        <= '0;
        r          <= '0;
        early_stop <= 1'b0;
        for (int i = 0; i <= T; i++) begin
          lam[i] <= '0;
          bb[i]  <= '0;
          sw[i]  <= '0;
        end
        lam[0] <= gf_t'(1);
        bb[0]  <= gf_t'(1);
        sw[0]  <= syn[1];
        for (int i = 0; i < 2 * T - 1; i++) q[i] <= syn[i + 2];
      end else if (busy) begin
        // Lambda <= gamma*Lambda + d*x*B
        lam[0] <= mul(gamma, lam[0]);
        for (int i = 1; i <= T; i++)
          lam[i] <= mul(gamma, lam[i]) ^ mul(d, bb[i-1]);
        if (grow) begin
          bb[0] <= '0;
          for (int i = 1; i <= T; i++) bb[i] <= lam[i-1];
          len   <= LW'(2 * r + 1) - len;
          gamma <= d;
        end else begin
          bb[0] <= '0;
          bb[1] <= '0;
          for (int i = 2; i <= T; i++) bb[i] <= bb[i-2];
        end
        // Window moves on by S_(2r+2), S_(2r+3).
        sw[0] <= q[1];
        sw[1] <= q[0];
        for (int i = 2; i <= T; i++) sw[i] <= sw[i-2];
        for (int i = 0; i < 2 * T - 3; i++) q[i] <= q[i + 2];
        q[2*T-3] <= '0;
        q[2*T-2] <= '0;
        r <= r + 1'b1;
        if (last) begin
          busy       <= 1'b0;
          done       <= 1'b1;
          iters      <= RW'(r + 1'b1);
          early_stop <= es_stop && (r != RW'(T - 1));
        end
      end
    end
  end

  always_comb
    for (int i = 0; i <= T; i++) lambda[i] = lam[i];
  assign deg = len;

endmodule
