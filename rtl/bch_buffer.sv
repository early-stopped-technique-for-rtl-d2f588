// bch_buffer -- two-bank codeword buffer.
//
// Holds received words while their error positions are being found. Each
// bank stores one word as NB = ceil(N/P) beats of P bits, so the input side
// can fill one bank while the correction side reads the other. It is a plain
// memory array with one write port and one read port; the read is
// registered (data appears the clock after the address), as in a block RAM.
//
// Interface: wr_en writes wr_data at {wr_bank, wr_addr}; rd_en reads
// {rd_bank, rd_addr} into rd_data one clock later.
//
// From the paper: the ECC engine corrects the data held in a data buffer.
// The two banks, the beat width and the read latency are this design's
// choices.
module bch_buffer
  import bch_pkg::*;
#(
  parameter int unsigned N = N_DEF,
  parameter int unsigned P = P_DEF,
  localparam int unsigned NB = (N + P - 1) / P,
  localparam int unsigned AW = $clog2(NB)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic          wr_bank,
  input  logic [AW-1:0] wr_addr,
  input  logic [P-1:0]  wr_data,
  input  logic          rd_en,
  input  logic          rd_bank,
  input  logic [AW-1:0] rd_addr,
  output logic [P-1:0]  rd_data
);

  logic [P-1:0] mem [2**(AW+1)];   // bank in the top address bit

  always_ff @(posedge clk) begin
    if (wr_en) mem[{wr_bank, wr_addr}] <= wr_data;
    if (rd_en) rd_data <= mem[{rd_bank, rd_addr}];
  end

endmodule
