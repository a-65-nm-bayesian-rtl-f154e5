`timescale 1ns/1ps
// input_buffer: the register file that holds the tile's input vector X, 64 values
// of 4 bits, and drives the IDACs of both subarrays with the same vector.
// The host writes one entry per cycle (wr_en, wr_addr, wr_data); the value is
// visible on x from the next cycle. The source select picks what the IDACs see:
// the stored vector, all zeros (used to measure ADC offsets) or a one-hot vector
// with input 1 on row onehot_row (used to measure each GRNG's static offset, as
// the calibration procedure multiplies one row by 1 at a time).
// The paper names this buffer only; the write port and the source select are this
// design's own choices. The stored vector is cleared by reset.
module input_buffer
  import bnn_pkg::*;
#(
  parameter int unsigned N_ROWS = ROWS
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      wr_en,
  input  logic [$clog2(N_ROWS)-1:0] wr_addr,
  input  x_t                        wr_data,
  input  xsrc_e                     src,
  input  logic [$clog2(N_ROWS)-1:0] onehot_row,
  output x_t [N_ROWS-1:0]           x
);

  x_t [N_ROWS-1:0] mem;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     mem <= '0;
    else if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_comb begin
    for (int r = 0; r < int'(N_ROWS); r++) begin
      unique case (src)
        XSRC_BUFFER: x[r] = mem[r];
        XSRC_ONEHOT: x[r] = (r == int'(onehot_row)) ? x_t'(1) : '0;
        default:     x[r] = '0;
      endcase
    end
  end

endmodule
