// bch_syndrome -- syndrome calculator, P received bits per clock.
//
// Computes S_j = r(alpha^j), j = 1..2T, of one received word r(x) of N bits.
// The word arrives as NB = ceil(N/P) beats, highest position first. Beat k
// (k = 0..NB-1) carries positions (NB-1-k)*P + b in bit b, so the first beat
// starts with NB*P-N pad bits above position N-1; those must be zero, which
// leaves every syndrome unchanged (leading zeros of a Horner evaluation).
//
// Only the T odd syndromes are accumulated, each by a P-bit Horner step
//   A_j <= A_j * alpha^(jP) + sum_b in_data[b] * alpha^(jb),
// in which every product has a constant factor and becomes a fixed XOR
// network. The even ones follow from the binary-code identity S_2i = S_i^2,
// so S_j with j = 2^s * o (o odd) is A_o squared s times, with no chain
// between outputs.
//
// Interface: in_valid qualifies in_data; the block counts beats itself and
// the first beat of a word restarts the accumulators. done pulses for one
// clock together with the last beat's update becoming visible, i.e. in the
// clock after the last beat was accepted; syn[] then holds until the first
// beat of the next word is accepted.
//
// From the paper: the syndrome step of the decoding outline and the code
// (default GF(2^14), n = 16383, t = 72). The P-bit parallel Horner form,
// P = 8 and the beat format are this design's choices.
module bch_syndrome
  import bch_pkg::*;
#(
  parameter int unsigned M     = M_DEF,
  parameter gfw_t        PRIM  = PRIM_DEF,
  parameter int unsigned T     = T_DEF,
  parameter int unsigned N     = N_DEF,
  parameter int unsigned P     = P_DEF
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [P-1:0] in_data,
  output logic         done,
  output logic [M-1:0] syn [1:2*T]
);

  `include "bch_gf.svh"

  localparam int unsigned NB = (N + P - 1) / P;
  localparam int unsigned BW = $clog2(NB + 1);

  logic [BW-1:0] beat;
  logic          upd;        // accept a beat
  logic          first;      // the beat is the first of a word

  assign upd   = in_valid;
  assign first = (beat == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beat <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (upd) begin
        if (beat == BW'(NB - 1)) begin
          beat <= '0;
          done <= 1'b1;
        end else begin
          beat <= beat + 1'b1;
        end
      end
    end
  end

  // Horner update of every odd syndrome S_(2i+1); all factors are constants.
  for (genvar i = 0; i < T; i++) begin : g_acc
    localparam gf_t APOW = apow(64'((2 * i + 1) * P));
    gf_t acc;
    gf_t nxt;
    gf_t term [P];

    for (genvar b = 0; b < P; b++) begin : g_bit
      localparam gf_t ABIT = apow(64'((2 * i + 1) * b));
      assign term[b] = in_data[b] ? ABIT : '0;
    end

    always_comb begin
      nxt = first ? '0 : mul(acc, APOW);
      for (int b = 0; b < P; b++) nxt = nxt ^ term[b];
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)   acc <= '0;
      else if (upd) acc <= nxt;
    end
  end

  // S_j for j = 2^s * o: the odd accumulator A_o squared s times.
  for (genvar j = 1; j <= 2 * T; j++) begin : g_syn
    localparam int unsigned S = $clog2(j & -j);   // number of factors 2 in j
    localparam int unsigned O = j >> S;           // odd part of j
    assign syn[j] = sqn(g_acc[(O - 1) / 2].acc, S);
  end

endmodule
