`timescale 1ns/1ps
// tb_sar_ctrl: starts conversions (also one while busy, which must be ignored)
// and checks the whole cycle-by-cycle sequence: clear one cycle after start,
// then bit_sel = 100000 ... 000001, then done, with done exactly
// ADC_BITS + 2 = 8 edges after the edge that took start.
module tb_sar_ctrl;
  import bnn_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  logic clear, busy, done;
  logic [5:0] bit_sel;
  int checks = 0, failures = 0;

  sar_ctrl dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_cycle(input logic c, input logic [5:0] bs, input logic d, input logic b);
    checks++;
    if (clear !== c || bit_sel !== bs || done !== d || busy !== b) begin
      failures++;
      $display("t=%0t clear=%b bit_sel=%b done=%b busy=%b, expected %b %b %b %b",
               $time, clear, bit_sel, done, busy, c, bs, d, b);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    expect_cycle(0, 0, 0, 0);
    for (int t = 0; t < 5; t++) begin
      start = 1; @(negedge clk); start = 0;
      expect_cycle(1, 0, 0, 1);
      for (int k = 5; k >= 0; k--) begin
        if (k == 3) start = 1;  // ignored while busy
        @(negedge clk);
        start = 0;
        expect_cycle(0, 6'(1) << k, 0, 1);
      end
      @(negedge clk);
      expect_cycle(0, 0, 1, 1);
      @(negedge clk);
      expect_cycle(0, 0, 0, 0);
      repeat (t) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
