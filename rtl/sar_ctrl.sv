`timescale 1ns/1ps
// sar_ctrl: the synchronous controller shared by all 96 SAR ADCs of the tile.
// Sharing it keeps each ADC narrow enough to sit at the SRAM column pitch, so no
// column multiplexer is needed.
// Timing: `start` is sampled on a rising edge; the next cycle asserts `clear`;
// the following ADC_BITS cycles drive bit_sel = 100000, 010000, ..., 000001; the
// cycle after that asserts `done` for one cycle, with every ADC's code final.
// done therefore comes ADC_BITS + 2 edges after the edge that took `start`.
// `busy` is high from the cycle after start through the done cycle; a start
// while busy is ignored. The paper states only that the controller is shared and
// synchronous; the sequence is this design's choice.
module sar_ctrl
  import bnn_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  output logic                clear,
  output logic [ADC_BITS-1:0] bit_sel,
  output logic                busy,
  output logic                done
);

  typedef enum logic [1:0] {S_IDLE, S_CLEAR, S_BITS, S_DONE} state_e;
  state_e state;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      bit_sel <= '0;
    end else begin
      unique case (state)
        S_IDLE:  if (start) state <= S_CLEAR;
        S_CLEAR: begin
          state   <= S_BITS;
          bit_sel <= ADC_BITS'(1) << (ADC_BITS - 1);
        end
        S_BITS: begin
          bit_sel <= bit_sel >> 1;
          if (bit_sel[0]) state <= S_DONE;
        end
        S_DONE:  state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign clear = (state == S_CLEAR);
  assign done  = (state == S_DONE);
  assign busy  = (state != S_IDLE);

  // bit_sel is one-hot while converting and zero otherwise.
  a_onehot: assert property (@(posedge clk) disable iff (!rst_n)
                             (state == S_BITS) |-> $onehot(bit_sel));
  a_idle_zero: assert property (@(posedge clk) disable iff (!rst_n)
                                (state != S_BITS) |-> (bit_sel == '0));

endmodule
