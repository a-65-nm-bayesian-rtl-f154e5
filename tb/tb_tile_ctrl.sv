`timescale 1ns/1ps
// tb_tile_ctrl: runs MVMs against an ADC controller stand-in that answers
// adc_done a fixed 7 edges after adc_start (as sar_ctrl does) and checks the
// length and order of the phases: PRE_CYCLES of pre, EVAL_CYCLES of eval with
// sample on the last, adc_start, red_en, and 1 + 9 + 1 + 8 + 1 = 20 busy cycles
// per MVM at the defaults. A second instance checks other phase lengths.
module tb_tile_ctrl;
  logic clk = 0, rst_n = 0, start = 0, adc_done = 0;
  logic busy, pre, eval, sample, adc_start, red_en;
  logic busy2, pre2, eval2, sample2, adc_start2, red_en2;
  int checks = 0, failures = 0;
  int adc_cnt = -1;

  tile_ctrl dut (.*);
  tile_ctrl #(.PRE_CYCLES(3), .EVAL_CYCLES(4)) dut2 (.clk, .rst_n, .start, .adc_done,
    .busy(busy2), .pre(pre2), .eval(eval2), .sample(sample2), .adc_start(adc_start2), .red_en(red_en2));
  always #5 clk = ~clk;

  // ADC controller stand-in, answering the default instance
  always @(posedge clk) begin
    adc_done <= 1'b0;
    if (adc_start) adc_cnt <= 6;
    else if (adc_cnt > 0) adc_cnt <= adc_cnt - 1;
    else if (adc_cnt == 0) begin adc_done <= 1'b1; adc_cnt <= -1; end
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Records the phase trace of one MVM as a string of letters per cycle.
  task automatic run_one(input int pre_n, input int eval_n, input bit second);
    string trace, exp_t;
    int nbusy;
    trace = ""; nbusy = 0;
    start = 1; @(negedge clk); start = 0;
    for (int c = 0; c < 40; c++) begin
      logic b, p, e, s, a, r;
      b = second ? busy2 : busy;   p = second ? pre2 : pre;   e = second ? eval2 : eval;
      s = second ? sample2 : sample; a = second ? adc_start2 : adc_start; r = second ? red_en2 : red_en;
      if (b) nbusy++;
      if (p) trace = {trace, "P"};
      else if (s) trace = {trace, "S"};
      else if (e) trace = {trace, "E"};
      else if (a) trace = {trace, "A"};
      else if (r) trace = {trace, "R"};
      else if (b) trace = {trace, "w"};
      @(negedge clk);
    end
    exp_t = "";
    repeat (pre_n) exp_t = {exp_t, "P"};
    repeat (eval_n - 1) exp_t = {exp_t, "E"};
    exp_t = {exp_t, "SA"};
    repeat (8) exp_t = {exp_t, "w"};
    exp_t = {exp_t, "R"};
    checks++;
    if (trace != exp_t) begin
      failures++;
      $display("trace %s expected %s", trace, exp_t);
    end
    checks++;
    if (nbusy != pre_n + eval_n + 10) begin
      failures++;
      $display("busy for %0d cycles, expected %0d", nbusy, pre_n + eval_n + 10);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int t = 0; t < 3; t++) run_one(1, 9, 0);
    // the second instance waits on the same stand-in, so only its phase order
    // up to adc_start is checked here
    begin
      string trace;
      trace = "";
      start = 1; @(negedge clk); start = 0;
      for (int c = 0; c < 8; c++) begin
        trace = {trace, pre2 ? "P" : sample2 ? "S" : eval2 ? "E" : adc_start2 ? "A" : "-"};
        @(negedge clk);
      end
      checks++;
      if (trace != "PPPEEESA") begin
        failures++;
        $display("second trace %s", trace);
      end
      repeat (40) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
