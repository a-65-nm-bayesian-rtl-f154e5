`timescale 1ns/1ps
// tb_input_buffer: writes a random input vector, then checks the three source
// modes (stored vector, all zero, one-hot row with value 1) against a shadow copy.
module tb_input_buffer;
  import bnn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0;
  logic [5:0] wr_addr = '0, onehot_row = '0;
  x_t wr_data = '0;
  xsrc_e src = XSRC_BUFFER;
  x_t [ROWS-1:0] x;
  x_t shadow [ROWS];
  int checks = 0, failures = 0;

  input_buffer dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all(input xsrc_e s, input int row);
    for (int r = 0; r < int'(ROWS); r++) begin
      int exp_v;
      exp_v = (s == XSRC_BUFFER) ? int'(shadow[r]) :
              (s == XSRC_ONEHOT) ? ((r == row) ? 1 : 0) : 0;
      checks++;
      if (int'(x[r]) != exp_v) begin
        failures++;
        if (failures < 10) $display("mismatch src=%0d row=%0d x=%0d exp=%0d", s, r, x[r], exp_v);
      end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int r = 0; r < int'(ROWS); r++) shadow[r] = '0;
    check_all(XSRC_BUFFER, 0);
    for (int r = 0; r < int'(ROWS); r++) begin
      wr_en = 1; wr_addr = 6'(r); wr_data = x_t'($urandom_range(15)); shadow[r] = wr_data;
      @(negedge clk);
    end
    wr_en = 0;
    check_all(XSRC_BUFFER, 0);
    src = XSRC_ZERO; #1; check_all(XSRC_ZERO, 0);
    for (int k = 0; k < 8; k++) begin
      int row;
      row = $urandom_range(ROWS - 1);
      src = XSRC_ONEHOT; onehot_row = 6'(row); #1;
      check_all(XSRC_ONEHOT, row);
    end
    src = XSRC_BUFFER; #1; check_all(XSRC_BUFFER, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
