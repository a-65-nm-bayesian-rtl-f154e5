`timescale 1ns/1ps
// sar_comparator_model: behavioural model of the analog half of one 6-bit
// differential SAR ADC: the capacitive DAC and the comparator. It is analog
// circuitry, not synthesizable logic.
// The SAR register offers a trial code u (offset binary, 0..63). The DAC turns it
// into the threshold (u - 32 - 1/2) * LSB and the comparator reports whether the
// held differential bitline charge vin, plus the comparator's static offset,
// is at or above that threshold. A full binary search thus yields
//   code = clamp(round(vin / LSB + OFFSET_LSB), -32, 31).
// The comparison is combinational. The paper gives the 6-bit resolution and the
// differential input; the full-scale (LSB) and the offset values are this
// model's own choices. The reduction logic measures and removes OFFSET_LSB.
module sar_comparator_model
  import bnn_pkg::*;
#(
  parameter real LSB        = 8.0,
  parameter real OFFSET_LSB = 0.0
) (
  input  real                 vin,
  input  logic [ADC_BITS-1:0] trial,
  output logic                cmp
);

  real threshold;
  always_comb begin
    threshold = (real'(trial) - real'(2 ** (ADC_BITS - 1)) - 0.5) * LSB;
    cmp       = (vin + OFFSET_LSB * LSB) >= threshold;
  end

endmodule
