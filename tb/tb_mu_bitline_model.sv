`timescale 1ns/1ps
// tb_mu_bitline_model: random inputs and random cell pairs (including the
// unused 1 1 pattern); after `sample` every column charge must equal the
// integer dot product sum_i X_i (p - n), and after `pre` it must be zero.
module tb_mu_bitline_model;
  import bnn_pkg::*;
  logic clk = 0, pre = 0, sample = 0;
  x_t [ROWS-1:0] x;
  logic [ROWS-1:0][WORDS-1:0][15:0] cells;
  real q [WORDS*MU_BITS];
  int checks = 0, failures = 0;

  mu_bitline_model dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 20; t++) begin
      for (int i = 0; i < int'(ROWS); i++) begin
        x[i] = x_t'($urandom);
        for (int j = 0; j < int'(WORDS); j++) cells[i][j] = 16'($urandom);
      end
      @(negedge clk); sample = 1; @(negedge clk); sample = 0;
      for (int j = 0; j < int'(WORDS); j++)
        for (int b = 0; b < int'(MU_BITS); b++) begin
          int e;
          e = 0;
          for (int i = 0; i < int'(ROWS); i++)
            e += int'(x[i]) * (int'(cells[i][j][b]) - int'(cells[i][j][8+b]));
          checks++;
          if (q[j*MU_BITS+b] != real'(e)) begin
            failures++;
            if (failures < 10) $display("q[%0d][%0d]=%f exp %0d", j, b, q[j*MU_BITS+b], e);
          end
        end
      pre = 1; @(negedge clk); pre = 0;
      for (int k = 0; k < int'(WORDS*MU_BITS); k++) begin
        checks++;
        if (q[k] != 0.0) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
