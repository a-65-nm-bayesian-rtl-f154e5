`timescale 1ns/1ps
// tb_cim_sram: random writes to a 64 x 8 array of 16-bit words (the mu subarray
// shape), each followed by a full compare of every cell against a shadow copy.
module tb_cim_sram;
  import bnn_pkg::*;
  logic clk = 0;
  logic wr_en = 0;
  logic [5:0] wr_row = '0;
  logic [2:0] wr_word = '0;
  logic [15:0] wr_data = '0;
  logic [ROWS-1:0][WORDS-1:0][15:0] cells;
  logic [15:0] shadow [ROWS][WORDS];
  int checks = 0, failures = 0;

  cim_sram #(.WW(16)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    for (int r = 0; r < int'(ROWS); r++)
      for (int w = 0; w < int'(WORDS); w++) begin
        wr_en = 1; wr_row = 6'(r); wr_word = 3'(w); wr_data = 16'($urandom);
        shadow[r][w] = wr_data;
        @(negedge clk);
      end
    for (int k = 0; k < 300; k++) begin
      wr_en = ($urandom_range(3) != 0);
      wr_row = 6'($urandom); wr_word = 3'($urandom); wr_data = 16'($urandom);
      if (wr_en) shadow[wr_row][wr_word] = wr_data;
      @(negedge clk);
      for (int r = 0; r < int'(ROWS); r++)
        for (int w = 0; w < int'(WORDS); w++) begin
          checks++;
          if (cells[r][w] !== shadow[r][w]) failures++;
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
