// bch_decoder -- BCH decoder with early-stopped Berlekamp-Massey solver.
//
// Decodes the binary BCH code of length N correcting T errors over GF(2^M)
// (defaults: M = 14, N = 16383, T = 72), P bits per clock. A word passes two stages:
//   input stage   bch_syndrome accumulates S_1..S_2T while the word is
//                 written into one bank of bch_buffer;
//   output stage  bch_bm_es finds the error locator, stopping early after
//                 KAPPA zero discrepancies in a row (ES version 3), then
//                 bch_chien walks the positions in arrival order while the
//                 bank is read back, and every error bit is flipped.
// The stages overlap: the next word fills the other bank while the current
// one is corrected. A full word waits (in_ready low) until the output stage
// is idle, so a word takes NB + iters + 2 clocks of the output stage,
// where NB = ceil(N/P) and iters = min(e + KAPPA, T) for e errors.
//
// Input: NB beats per word, highest code position first; beat k bit b is
// position (NB-1-k)*P + b, and the NB*P-N pad bits at the top of the first
// beat must be zero. A beat is taken when in_valid and in_ready are high.
// Output: the corrected beats, same format, one per clock while out_valid
// (no back-pressure: the sink must take every beat). With the last beat
// (out_last) come the word's status: out_nerr errors corrected,
// out_fail (roots found differ from the locator degree: uncorrectable, the
// bits were flipped anyway), out_iters BM iterations made and
// out_early_stop (the solver ended before iteration T).
//
// From the paper: the decoding steps (syndromes, locator, roots,
// correction), the early-stop rule, the codes and KAPPA = 6. The two-stage
// pipeline, the ping-pong buffer, the beat format and the streaming
// interface are this design's choices.
module bch_decoder
  import bch_pkg::*;
#(
  parameter int unsigned M     = M_DEF,
  parameter gfw_t        PRIM  = PRIM_DEF,
  parameter int unsigned T     = T_DEF,
  parameter int unsigned N     = N_DEF,
  parameter int unsigned P     = P_DEF,
  parameter int unsigned KAPPA = KAPPA_DEF
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  output logic                      in_ready,
  input  logic [P-1:0]              in_data,
  output logic                      out_valid,
  output logic [P-1:0]              out_data,
  output logic                      out_last,
  output logic [$clog2(N+1)-1:0]    out_nerr,
  output logic                      out_fail,
  output logic [$clog2(T+1)-1:0]    out_iters,
  output logic                      out_early_stop
);

  `include "bch_gf.svh"

  localparam int unsigned NB = (N + P - 1) / P;
  localparam int unsigned AW = $clog2(NB);
  localparam int unsigned LW = $clog2(2 * T + 2);

  typedef enum logic [1:0] {B_IDLE, B_BM, B_CHIEN} back_state_e;

  // ---------------------------------------------------------------- input
  logic          accept;
  logic          full;        // a whole word is in the buffer and syndromes
  logic          wbank;
  logic [AW-1:0] waddr;
  logic          syn_done;
  gf_t           syn [1:2*T];

  assign in_ready = !full;
  assign accept   = in_valid && in_ready;

  bch_syndrome #(.M(M), .PRIM(PRIM), .T(T), .N(N), .P(P)) u_syn (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (accept),
    .in_data  (in_data),
    .done     (syn_done),
    .syn      (syn)
  );

  // --------------------------------------------------------------- output
  back_state_e   bstate;
  logic          handoff;
  logic          rbank;
  logic [AW-1:0] raddr;

  logic          bm_busy, bm_done, bm_early;
  gf_t           lambda [T+1];
  logic [LW-1:0] bm_deg;
  logic [$clog2(T+1)-1:0] bm_iters;

  logic          ch_busy, ch_last, ch_done, ch_fail;
  logic [P-1:0]  ch_mask;
  logic [$clog2(N+1)-1:0] ch_nroots;
  logic          ch_step;

  assign handoff = full && (bstate == B_IDLE);
  assign ch_step = (bstate == B_CHIEN);

  bch_bm_es #(.M(M), .PRIM(PRIM), .T(T), .KAPPA(KAPPA)) u_bm (
    .clk        (clk),
    .rst_n      (rst_n),
    .start      (handoff),
    .syn        (syn),
    .busy       (bm_busy),
    .done       (bm_done),
    .lambda     (lambda),
    .deg        (bm_deg),
    .iters      (bm_iters),
    .early_stop (bm_early)
  );

  bch_chien #(.M(M), .PRIM(PRIM), .T(T), .N(N), .P(P)) u_chien (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (bm_done),
    .lambda   (lambda),
    .deg      (bm_deg),
    .step     (ch_step),
    .busy     (ch_busy),
    .err_mask (ch_mask),
    .err_last (ch_last),
    .done     (ch_done),
    .nroots   (ch_nroots),
    .fail     (ch_fail)
  );

  logic         rd_en;
  logic [P-1:0] rd_data;
  logic [P-1:0] mask_q;

  assign rd_en = ch_step && ch_busy;

  bch_buffer #(.N(N), .P(P)) u_buf (
    .clk     (clk),
    .wr_en   (accept),
    .wr_bank (wbank),
    .wr_addr (waddr),
    .wr_data (in_data),
    .rd_en   (rd_en),
    .rd_bank (rbank),
    .rd_addr (raddr),
    .rd_data (rd_data)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full      <= 1'b0;
      wbank     <= 1'b0;
      waddr     <= '0;
      bstate    <= B_IDLE;
      rbank     <= 1'b0;
      raddr     <= '0;
      mask_q    <= '0;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
    end else begin
      // input stage
      if (accept) begin
        if (waddr == AW'(NB - 1)) begin
          waddr <= '0;
          full  <= 1'b1;
        end else begin
          waddr <= waddr + 1'b1;
        end
      end
      if (handoff) begin
        full  <= 1'b0;
        rbank <= wbank;
        wbank <= !wbank;
      end

      // output stage
      out_valid <= rd_en;
      out_last  <= rd_en && ch_last;
      mask_q    <= ch_mask;
      unique case (bstate)
        B_IDLE:  if (handoff) bstate <= B_BM;
        B_BM:    if (bm_done) begin
                   bstate <= B_CHIEN;
                   raddr  <= '0;
                 end
        B_CHIEN: if (rd_en) begin
                   raddr <= raddr + 1'b1;
                   if (ch_last) bstate <= B_IDLE;
                 end
        default: bstate <= B_IDLE;
      endcase
    end
  end

  assign out_data       = rd_data ^ mask_q;
  assign out_nerr       = ch_nroots;
  assign out_fail       = ch_fail;
  assign out_iters      = bm_iters;
  assign out_early_stop = bm_early;

  // The code must fit the field: positions are powers of alpha below 2^M - 1.
  initial assert (M <= MMAX && N <= (1 << M) - 1)
    else $error("N = %0d does not fit GF(2^%0d)", N, M);

  // The syndromes are final when the last beat is written, before the
  // syndrome block reports it.
  assert property (@(posedge clk) disable iff (!rst_n) syn_done |-> full || bstate == B_BM)
    else $error("syndrome word completed without a full buffer bank");
  // The output stage only starts a word that is complete.
  assert property (@(posedge clk) disable iff (!rst_n) bm_busy |-> bstate == B_BM);
  // Chien search and the buffer read proceed beat for beat.
  assert property (@(posedge clk) disable iff (!rst_n) ch_done |-> out_last);

endmodule
