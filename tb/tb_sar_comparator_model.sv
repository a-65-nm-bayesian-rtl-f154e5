`timescale 1ns/1ps
// tb_sar_comparator_model: for random inputs and every trial code, the decision
// must be vin + OFFSET*LSB >= (u - 32.5) * LSB, here with LSB 8 and offset -1.
module tb_sar_comparator_model;
  real vin;
  logic [5:0] trial;
  logic cmp;
  int checks = 0, failures = 0;

  sar_comparator_model #(.LSB(8.0), .OFFSET_LSB(-1.0)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      vin = (real'($urandom_range(6000)) - 3000.0) / 10.0;
      for (int u = 0; u < 64; u++) begin
        logic exp_c;
        trial = 6'(u);
        #1;
        exp_c = ((vin - 8.0) >= (real'(u) - 32.5) * 8.0);
        checks++;
        if (cmp !== exp_c) begin
          failures++;
          if (failures < 10) $display("vin=%f u=%0d cmp=%b exp=%b", vin, u, cmp, exp_c);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
