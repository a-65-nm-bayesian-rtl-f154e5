`timescale 1ns/1ps
// reduction: the digital reduction logic after the ADCs. Each ADC converts one
// bit column of one word, so a word's dot product is rebuilt by shifting each
// column's code by its bit weight and adding:
//   y_mu[j] = sum_b 2^b (code_mu[j][b] - off_mu[j][b])      b = 0..7
//   y_se[j] = sum_b 2^b (code_se[j][b] - off_se[j][b])      b = 0..3
//   y[j]    = y_mu[j] + (y_se[j] <<< SE_SHIFT)
// off_* is each ADC's own offset. It is captured from the ADC codes of a
// conversion made with all inputs at zero (cap_off together with en), when every
// bitline pair carries no difference; offsets reset to zero.
// With mu_reuse high, the mu codes are ignored and the y_mu kept from the last
// full sample is used again: the mean part of a Bayesian layer does not change
// between samples, so repeated samples need only the sigma-eps subarray.
// Timing: with en high on a rising edge, y, y_mu and y_se take the new values on
// that edge and `valid` is high for the following cycle.
// The paper states that this logic shifts and adds the ADC outputs, corrects each
// ADC's offset and combines the mu and sigma-eps parts into one output vector.
// The reuse of y_mu follows the paper's remark that the static mean needs to be
// processed only once. Measuring offsets with zero input, and SE_SHIFT (default 0, equal weight), are
// this design's choices.
module reduction
  import bnn_pkg::*;
#(
  parameter int unsigned N_WORDS  = WORDS,
  parameter int unsigned SE_SHIFT = 0
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   en,
  input  logic                                   cap_off,
  input  logic                                   mu_reuse,
  input  adc_code_t [N_WORDS-1:0][MU_BITS-1:0]   code_mu,
  input  adc_code_t [N_WORDS-1:0][SIG_BITS-1:0]  code_se,
  output y_t        [N_WORDS-1:0]                y,
  output y_t        [N_WORDS-1:0]                y_mu,
  output y_t        [N_WORDS-1:0]                y_se,
  output logic                                   valid
);

  adc_code_t [N_WORDS-1:0][MU_BITS-1:0]  off_mu;
  adc_code_t [N_WORDS-1:0][SIG_BITS-1:0] off_se;
  y_t [N_WORDS-1:0] sum_mu, sum_se;

  always_comb begin
    for (int j = 0; j < int'(N_WORDS); j++) begin
      sum_mu[j] = '0;
      sum_se[j] = '0;
      for (int b = 0; b < int'(MU_BITS); b++)
        sum_mu[j] += (y_t'(code_mu[j][b]) - y_t'(off_mu[j][b])) <<< b;
      for (int b = 0; b < int'(SIG_BITS); b++)
        sum_se[j] += (y_t'(code_se[j][b]) - y_t'(off_se[j][b])) <<< b;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      off_mu <= '0;
      off_se <= '0;
      y      <= '0;
      y_mu   <= '0;
      y_se   <= '0;
      valid  <= 1'b0;
    end else begin
      valid <= en;
      if (en && cap_off) begin
        off_mu <= code_mu;
        off_se <= code_se;
      end
      if (en) begin
        for (int j = 0; j < int'(N_WORDS); j++) begin
          if (!mu_reuse) y_mu[j] <= sum_mu[j];
          y_se[j] <= sum_se[j];
          y[j]    <= (mu_reuse ? y_mu[j] : sum_mu[j]) + (sum_se[j] <<< SE_SHIFT);
        end
      end
    end
  end

endmodule
