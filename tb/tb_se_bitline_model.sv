`timescale 1ns/1ps
// tb_se_bitline_model: random inputs, sigma cells and signed pulse widths; each
// column charge must equal GAIN * sum_i X_i sigma_ijb td_ij, and zero after
// precharge.
module tb_se_bitline_model;
  import bnn_pkg::*;
  logic clk = 0, pre = 0, sample = 0;
  x_t [ROWS-1:0] x;
  logic [ROWS-1:0][WORDS-1:0][3:0] cells;
  real td_ns [ROWS*WORDS];
  real q [WORDS*SIG_BITS];
  int checks = 0, failures = 0;

  se_bitline_model dut (.*);
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
        for (int j = 0; j < int'(WORDS); j++) begin
          cells[i][j] = 4'($urandom);
          td_ns[i*WORDS+j] = (real'($urandom_range(2000)) - 1000.0) / 400.0;
        end
      end
      @(negedge clk); sample = 1; @(negedge clk); sample = 0;
      for (int j = 0; j < int'(WORDS); j++)
        for (int b = 0; b < int'(SIG_BITS); b++) begin
          real e, d;
          e = 0.0;
          for (int i = 0; i < int'(ROWS); i++)
            if (cells[i][j][b]) e += 8.0 * real'(x[i]) * td_ns[i*WORDS+j];
          d = q[j*SIG_BITS+b] - e;
          checks++;
          if (d > 1e-6 || d < -1e-6) begin
            failures++;
            if (failures < 10) $display("q[%0d][%0d]=%f exp %f", j, b, q[j*SIG_BITS+b], e);
          end
        end
      pre = 1; @(negedge clk); pre = 0;
      for (int k = 0; k < int'(WORDS*SIG_BITS); k++) begin
        checks++;
        if (q[k] != 0.0) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
