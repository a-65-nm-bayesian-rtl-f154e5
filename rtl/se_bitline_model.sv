`timescale 1ns/1ps
// se_bitline_model: behavioural model of the sigma-eps subarray's analog read
// path (IDACs, precharge, bitlines). This is analog circuitry, not synthesizable
// logic.
// A sigma word has one 8T cell per bit and shares the GRNG of its row and word.
// The cell current, proportional to the row input X_i, is gated by the GRNG pulse
// E through transmission gates and steered to BL_P when P fired first or to BL_N
// when N fired first. The charge on bit column b of word j is therefore
//   q[j*4+b] = GAIN_PER_NS * sum_i X_i * sigma_ijb * td_ij,
// where td_ij is the signed GRNG pulse width in ns. GAIN_PER_NS sets how much
// charge one ns of pulse moves relative to a mu cell's full window (UNIT_Q = 1
// in mu_bitline_model). The paper tunes this through the IDAC bias; its value
// here is this model's own choice. `pre` clears the bitlines and `sample` holds
// the charge for the ADCs, both on the rising clock edge.
module se_bitline_model
  import bnn_pkg::*;
#(
  parameter int unsigned N_ROWS      = ROWS,
  parameter int unsigned N_WORDS     = WORDS,
  parameter real         GAIN_PER_NS = 8.0
) (
  input  logic                                       clk,
  input  logic                                       pre,
  input  logic                                       sample,
  input  x_t [N_ROWS-1:0]                            x,
  input  logic [N_ROWS-1:0][N_WORDS-1:0][SIG_BITS-1:0] cells,
  input  real                                        td_ns [N_ROWS*N_WORDS],
  output real                                        q [N_WORDS*SIG_BITS]
);

  always @(posedge clk) begin
    if (pre) begin
      for (int k = 0; k < int'(N_WORDS * SIG_BITS); k++) q[k] = 0.0;
    end else if (sample) begin
      for (int j = 0; j < int'(N_WORDS); j++) begin
        for (int b = 0; b < int'(SIG_BITS); b++) begin
          real acc;
          acc = 0.0;
          for (int i = 0; i < int'(N_ROWS); i++)
            if (cells[i][j][b]) acc += real'(x[i]) * td_ns[i*N_WORDS+j];
          q[j*SIG_BITS+b] = GAIN_PER_NS * acc;
        end
      end
    end
  end

endmodule
