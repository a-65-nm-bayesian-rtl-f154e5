`timescale 1ns/1ps
// sar_logic: the successive-approximation register of one 6-bit SAR ADC. There is
// one per word bit column (64 for the mu subarray, 32 for sigma-eps).
// All registers are driven by the shared SAR controller: `clear` empties the
// register, then bit_sel walks a single 1 from the MSB down to the LSB, one bit
// per clock. In each such cycle the register offers trial = result | bit_sel to
// the DAC and comparator, and on the clock edge keeps the trial bit if the
// comparator answered 1. After the LSB cycle, `code` holds the result converted
// from offset binary to two's complement (-32..31).
// The paper gives the ADC's resolution and its shared synchronous controller; the
// plain binary search is this design's choice.
module sar_logic
  import bnn_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear,
  input  logic [ADC_BITS-1:0] bit_sel,
  input  logic                cmp,
  output logic [ADC_BITS-1:0] trial,
  output adc_code_t           code
);

  logic [ADC_BITS-1:0] result;

  assign trial = result | bit_sel;
  assign code  = {~result[ADC_BITS-1], result[ADC_BITS-2:0]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  result <= '0;
    else if (clear)              result <= '0;
    else if (|bit_sel && cmp)    result <= trial;
  end

endmodule
