// bch_chien -- Chien search, P code positions per clock.
//
// Position p of the received word is in error when alpha^(-p) is a root of
// the error locator, Lambda(alpha^(-p)) = 0. Positions are visited in the
// order the word arrived: beat k = 0..NB-1 covers positions
// (NB-1-k)*P + b, b = 0..P-1, so beat k's bit b lines up with bit b of the
// k-th input beat. Register C_i holds Lambda_i * alpha^(-i*(NB-1-k)*P) for
// the current beat; bit b is then
//   Lambda(alpha^(-p)) = Lambda_0 + sum_i C_i * alpha^(-i*b),
// and moving to the next beat multiplies C_i by alpha^(i*P). Every product
// has a constant factor. Pad positions at or above N (first beat only) are
// never reported.
//
// Interface: start (while idle) loads lambda and deg. Each clock with step
// high and busy set evaluates one beat: err_mask shows its error bits in the
// same clock (combinational), err_last marks the final beat. After the final
// beat done pulses once and nroots (roots found) and fail (nroots differs
// from deg, so the word had more errors than the locator can describe) hold
// until the next start.
//
// From the paper: root search of the error locator (decoding outline,
// step 3). Parallel evaluation, beat order and failure test are this
// design's choices.
module bch_chien
  import bch_pkg::*;
#(
  parameter int unsigned M     = M_DEF,
  parameter gfw_t        PRIM  = PRIM_DEF,
  parameter int unsigned T     = T_DEF,
  parameter int unsigned N     = N_DEF,
  parameter int unsigned P     = P_DEF
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  logic [M-1:0]                lambda [T+1],
  input  logic [$clog2(2*T+2)-1:0]    deg,
  input  logic                        step,
  output logic                        busy,
  output logic [P-1:0]                err_mask,
  output logic                        err_last,
  output logic                        done,
  output logic [$clog2(N+1)-1:0]      nroots,
  output logic                        fail
);

  `include "bch_gf.svh"

  localparam int unsigned NB   = (N + P - 1) / P;
  localparam int unsigned BW   = $clog2(NB + 1);
  localparam int unsigned CW   = $clog2(N + 1);
  localparam int unsigned LW   = $clog2(2 * T + 2);
  localparam int unsigned TOPV = N - (NB - 1) * P;   // real bits in beat 0
  localparam longint unsigned BASE0 = 64'(NB - 1) * 64'(P);  // beat 0 position

  logic [BW-1:0] beat;
  logic [CW-1:0] count;
  logic [LW-1:0] deg_q;
  gf_t           lam0;
  gf_t           val [P];
  logic          adv;

  assign adv = step && busy;

  // Per-coefficient registers and their contributions to each bit.
  for (genvar i = 1; i <= T; i++) begin : g_c
    localparam gf_t CINIT = aneg(64'(i) * BASE0);
    localparam gf_t CSTEP = apow(64'(i) * 64'(P));
    gf_t c;
    gf_t part [P];

    for (genvar b = 0; b < P; b++) begin : g_bit
      localparam gf_t CBIT = aneg(64'(i) * 64'(b));
      assign part[b] = mul(c, CBIT);
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)                c <= '0;
      else if (start && !busy)   c <= mul(lambda[i], CINIT);
      else if (adv)              c <= mul(c, CSTEP);
    end
  end

  // Sum over the coefficients for every bit of the beat.
  for (genvar b = 0; b < P; b++) begin : g_sum
    gf_t parts [T+1];
    assign parts[0] = lam0;
    for (genvar i = 1; i <= T; i++) begin : g_i
      assign parts[i] = g_c[i].part[b];
    end
    always_comb begin
      gf_t v;
      v = '0;
      for (int i = 0; i <= T; i++) v = v ^ parts[i];
      val[b] = v;
    end
  end

  always_comb begin
    for (int b = 0; b < P; b++)
      err_mask[b] = adv && (val[b] == '0) && (beat != '0 || b < TOPV);
  end

  assign err_last = adv && (beat == BW'(NB - 1));

  // Population count of the current beat's errors.
  logic [CW-1:0] beat_roots;
  always_comb begin
    beat_roots = '0;
    for (int b = 0; b < P; b++) beat_roots = beat_roots + CW'(err_mask[b]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      beat   <= '0;
      count  <= '0;
      deg_q  <= '0;
      lam0   <= '0;
      done   <= 1'b0;
      nroots <= '0;
      fail   <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy  <= 1'b1;
        beat  <= '0;
        count <= '0;
        deg_q <= deg;
        lam0  <= lambda[0];
      end else if (adv) begin
        count <= count + beat_roots;
        if (beat == BW'(NB - 1)) begin
          busy   <= 1'b0;
          beat   <= '0;
          done   <= 1'b1;
          nroots <= count + beat_roots;
          fail   <= (count + beat_roots) != CW'(deg_q);
        end else begin
          beat <= beat + 1'b1;
        end
      end
    end
  end

endmodule
