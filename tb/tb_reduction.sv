`timescale 1ns/1ps
// tb_reduction: captures random ADC offsets with cap_off, then feeds random codes
// and checks y_mu, y_se and y against the shift-add formula with the offsets
// removed, plus the one-cycle valid. A second instance with SE_SHIFT = 2 checks
// the weighting of the sigma-eps part. Last, reductions with mu_reuse must keep
// y_mu and add only the new sigma-eps part.
module tb_reduction;
  import bnn_pkg::*;
  logic clk = 0, rst_n = 0, en = 0, cap_off = 0, mu_reuse = 0, valid, valid2;
  adc_code_t [WORDS-1:0][MU_BITS-1:0]  code_mu, off_mu;
  adc_code_t [WORDS-1:0][SIG_BITS-1:0] code_se, off_se;
  y_t [WORDS-1:0] y, y_mu, y_se, y2, y_mu2, y_se2;
  int checks = 0, failures = 0;

  reduction dut (.*);
  reduction #(.SE_SHIFT(2)) dut2 (.clk, .rst_n, .en, .cap_off, .mu_reuse, .code_mu, .code_se,
                                  .y(y2), .y_mu(y_mu2), .y_se(y_se2), .valid(valid2));
  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int j = 0; j < int'(WORDS); j++) begin
      for (int b = 0; b < int'(MU_BITS); b++) off_mu[j][b] = adc_code_t'($urandom_range(6) - 3);
      for (int b = 0; b < int'(SIG_BITS); b++) off_se[j][b] = adc_code_t'($urandom_range(6) - 3);
    end
    code_mu = off_mu; code_se = off_se;
    en = 1; cap_off = 1; @(negedge clk); en = 0; cap_off = 0;
    checks++; if (!valid) failures++;
    // the same codes again now reduce to zero
    en = 1; @(negedge clk); en = 0;
    for (int j = 0; j < int'(WORDS); j++) begin
      checks++; if (y[j] != 0) failures++;
    end
    @(negedge clk);
    checks++; if (valid) failures++;
    for (int t = 0; t < 200; t++) begin
      for (int j = 0; j < int'(WORDS); j++) begin
        for (int b = 0; b < int'(MU_BITS); b++) code_mu[j][b] = adc_code_t'($urandom);
        for (int b = 0; b < int'(SIG_BITS); b++) code_se[j][b] = adc_code_t'($urandom);
      end
      en = 1; @(negedge clk); en = 0;
      for (int j = 0; j < int'(WORDS); j++) begin
        int em, es;
        em = 0; es = 0;
        for (int b = 0; b < int'(MU_BITS); b++) em += (int'(code_mu[j][b]) - int'(off_mu[j][b])) * (1 << b);
        for (int b = 0; b < int'(SIG_BITS); b++) es += (int'(code_se[j][b]) - int'(off_se[j][b])) * (1 << b);
        checks++;
        if (int'(y_mu[j]) != em || int'(y_se[j]) != es || int'(y[j]) != em + es || int'(y2[j]) != em + 4 * es) begin
          failures++;
          if (failures < 10) $display("word %0d: y_mu=%0d/%0d y_se=%0d/%0d y=%0d y2=%0d", j, y_mu[j], em, y_se[j], es, y[j], y2[j]);
        end
      end
    end
    // mu reuse: y_mu stays as computed by the last full reduction
    begin
      y_t [WORDS-1:0] held;
      held = y_mu;
      mu_reuse = 1;
      for (int t = 0; t < 50; t++) begin
        for (int j = 0; j < int'(WORDS); j++) begin
          for (int b = 0; b < int'(MU_BITS); b++) code_mu[j][b] = adc_code_t'($urandom);
          for (int b = 0; b < int'(SIG_BITS); b++) code_se[j][b] = adc_code_t'($urandom);
        end
        en = 1; @(negedge clk); en = 0;
        for (int j = 0; j < int'(WORDS); j++) begin
          int es;
          es = 0;
          for (int b = 0; b < int'(SIG_BITS); b++) es += (int'(code_se[j][b]) - int'(off_se[j][b])) * (1 << b);
          checks++;
          if (y_mu[j] != held[j] || int'(y[j]) != int'(held[j]) + es || int'(y2[j]) != int'(held[j]) + 4 * es) begin
            failures++;
            if (failures < 10) $display("reuse word %0d: y_mu=%0d held=%0d y=%0d es=%0d", j, y_mu[j], held[j], y[j], es);
          end
        end
      end
      mu_reuse = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
