`timescale 1ns/1ps
// tb_sar_logic: drives the SAR register with the controller's clear/bit_sel
// sequence and an ideal comparator written in the testbench (integer input v,
// thresholds at u - 32). After the sixth bit the code must be clamp(v, -32, 31),
// and the trial offered in each cycle must be result | bit_sel.
module tb_sar_logic;
  import bnn_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, cmp;
  logic [5:0] bit_sel = '0, trial;
  adc_code_t code;
  int v;
  int checks = 0, failures = 0;

  sar_logic dut (.*);
  always #5 clk = ~clk;
  assign cmp = (v >= int'(trial) - 32);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      int e;
      logic [5:0] acc;
      v = (t < 100) ? (t - 50) : $urandom_range(80) - 40;
      clear = 1; @(negedge clk); clear = 0;
      acc = '0;
      for (int k = 5; k >= 0; k--) begin
        bit_sel = 6'(1) << k;
        #1;
        checks++;
        if (trial !== (acc | bit_sel)) failures++;
        if (v >= int'(acc | bit_sel) - 32) acc = acc | bit_sel;
        @(negedge clk);
      end
      bit_sel = '0;
      e = (v > 31) ? 31 : (v < -32) ? -32 : v;
      checks++;
      if (int'(code) != e) begin
        failures++;
        if (failures < 10) $display("v=%0d code=%0d exp=%0d", v, code, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
