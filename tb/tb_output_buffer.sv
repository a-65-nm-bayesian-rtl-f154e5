`timescale 1ns/1ps
// tb_output_buffer: loads random vectors, reads them back word by word (data one
// cycle after rd_en), and checks ready and the overrun flag when a vector is
// loaded before the previous one was read out.
module tb_output_buffer;
  import bnn_pkg::*;
  logic clk = 0, rst_n = 0, load = 0, rd_en = 0, ready, overrun;
  y_t [WORDS-1:0] din;
  logic [2:0] rd_addr = '0;
  y_t rd_data;
  int checks = 0, failures = 0;

  output_buffer dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    y_t [WORDS-1:0] v;
    repeat (2) @(negedge clk);
    rst_n = 1;
    checks++; if (ready || overrun) failures++;
    for (int t = 0; t < 20; t++) begin
      for (int j = 0; j < int'(WORDS); j++) din[j] = y_t'($urandom);
      v = din;
      load = 1; @(negedge clk); load = 0;
      din = '0;
      checks++; if (!ready) failures++;
      for (int j = 0; j < int'(WORDS); j++) begin
        rd_en = 1; rd_addr = 3'(j); @(negedge clk); rd_en = 0;
        checks++;
        if (rd_data !== v[j]) begin
          failures++;
          $display("word %0d read %0d expected %0d", j, rd_data, v[j]);
        end
      end
      checks++; if (ready || overrun) failures++;
    end
    // two loads without reading: overrun
    load = 1; @(negedge clk); @(negedge clk); load = 0;
    checks++; if (!overrun || !ready) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
