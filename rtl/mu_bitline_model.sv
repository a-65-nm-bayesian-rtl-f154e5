`timescale 1ns/1ps
// mu_bitline_model: behavioural model of the mu subarray's analog read path: the
// row IDACs, the bitline precharge and the discharge of each differential bitline
// pair (BL_P, BL_N) by the 8T cells' read ports. This is analog circuitry, not
// synthesizable logic.
// Each IDAC turns the 4-bit input X_i into a read wordline voltage that makes a
// cell's current proportional to X_i. A mu bit is a pair of cells: the P cell
// discharges BL_P (positive), the N cell BL_N (negative). After the evaluation
// window the differential charge of bit column b of word j is therefore
//   q[j*8+b] = UNIT_Q * sum_i X_i * (p_ijb - n_ijb),
// in charge units where one cell at X = 1 over the whole window gives UNIT_Q.
// `pre` (precharge) clears every pair to zero difference; `sample` holds the
// charge at the end of evaluation for the ADCs. Both act on the rising clock edge.
// The linear IDAC and the ideal bitlines follow the paper; the charge unit is
// this model's own.
module mu_bitline_model
  import bnn_pkg::*;
#(
  parameter int unsigned N_ROWS  = ROWS,
  parameter int unsigned N_WORDS = WORDS,
  parameter real         UNIT_Q  = 1.0
) (
  input  logic                                         clk,
  input  logic                                         pre,
  input  logic                                         sample,
  input  x_t [N_ROWS-1:0]                              x,
  input  logic [N_ROWS-1:0][N_WORDS-1:0][2*MU_BITS-1:0] cells,
  output real                                          q [N_WORDS*MU_BITS]
);

  always @(posedge clk) begin
    if (pre) begin
      for (int k = 0; k < int'(N_WORDS * MU_BITS); k++) q[k] = 0.0;
    end else if (sample) begin
      for (int j = 0; j < int'(N_WORDS); j++) begin
        for (int b = 0; b < int'(MU_BITS); b++) begin
          int acc;
          acc = 0;
          for (int i = 0; i < int'(N_ROWS); i++) begin
            mu_cells_t c;
            c = cells[i][j];
            acc += int'(x[i]) * (int'(c.p[b]) - int'(c.n[b]));
          end
          q[j*MU_BITS+b] = UNIT_Q * real'(acc);
        end
      end
    end
  end

endmodule
