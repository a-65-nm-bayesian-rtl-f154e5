`timescale 1ns/1ps
// output_buffer: holds the output vector of the latest MVM sample (8 signed
// 16-bit words) for the host to read one word at a time, so that the next sample
// can start while the host reads. `load` copies the whole vector on a rising edge
// and sets `ready`; rd_data is the word at rd_addr, registered, one cycle after
// rd_en. Reading the last word clears `ready`. If a new vector arrives while
// ready is still set, `overrun` is set until reset: the host missed a sample.
// The paper names this buffer only; everything here is this design's choice.
module output_buffer
  import bnn_pkg::*;
#(
  parameter int unsigned N_WORDS = WORDS
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       load,
  input  y_t [N_WORDS-1:0]           din,
  input  logic                       rd_en,
  input  logic [$clog2(N_WORDS)-1:0] rd_addr,
  output y_t                         rd_data,
  output logic                       ready,
  output logic                       overrun
);

  y_t [N_WORDS-1:0] buf_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_q   <= '0;
      rd_data <= '0;
      ready   <= 1'b0;
      overrun <= 1'b0;
    end else begin
      if (rd_en) rd_data <= buf_q[rd_addr];
      if (load) begin
        buf_q <= din;
        ready <= 1'b1;
        if (ready && !(rd_en && rd_addr == $clog2(N_WORDS)'(N_WORDS - 1))) overrun <= 1'b1;
      end else if (rd_en && rd_addr == $clog2(N_WORDS)'(N_WORDS - 1)) begin
        ready <= 1'b0;
      end
    end
  end

endmodule
