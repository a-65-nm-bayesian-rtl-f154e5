`timescale 1ns/1ps
// cim_sram: storage of one compute-in-memory subarray, 64 rows of 8 words.
// In silicon each bit is an 8T SRAM cell with separate write (WLW/BLW) and read
// (WLR/BLR) ports; the read port is used only for in-memory computation, so here
// every cell is brought out in parallel on `cells` for the bitline models. The
// mu subarray uses WW = 16 (8 differential cell pairs per word), the sigma
// subarray WW = 4 (one cell per bit). Writes take one word per clock edge; the
// new value is on `cells` after that edge. Contents are not reset, as SRAM is not.
module cim_sram
  import bnn_pkg::*;
#(
  parameter int unsigned N_ROWS  = ROWS,
  parameter int unsigned N_WORDS = WORDS,
  parameter int unsigned WW      = 2 * MU_BITS
) (
  input  logic                                     clk,
  input  logic                                     wr_en,
  input  logic [$clog2(N_ROWS)-1:0]                wr_row,
  input  logic [$clog2(N_WORDS)-1:0]               wr_word,
  input  logic [WW-1:0]                            wr_data,
  output logic [N_ROWS-1:0][N_WORDS-1:0][WW-1:0]   cells
);

  logic [N_ROWS-1:0][N_WORDS-1:0][WW-1:0] mem;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_row][wr_word] <= wr_data;
  end

  assign cells = mem;

endmodule
