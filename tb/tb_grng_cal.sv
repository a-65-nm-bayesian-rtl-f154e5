`timescale 1ns/1ps
// tb_grng_cal: runs the calibration against a tile stand-in. The stand-in answers
// each MVM request 6 cycles later; in one-hot mode word j of row i returns
// y_se = E0(i,j) +- 3, the noise alternating so that it cancels over the 16
// samples of a row. Checked: weight writes before calibration are stored
// uncorrected; the ADC-offset MVM comes first, with zero inputs and cap_off;
// sigma = 1 is written once to each of the 512 words; 64 x 16 one-hot MVMs walk
// the rows in order; host writes during calibration are ignored; the stored sums
// equal 16 E0; and after calibration every write stores
// mu' = sat255(mu - sigma * E0 * 8) (LSB_LOG2 = 3) as sign-magnitude cell pairs.
module tb_grng_cal;
  import bnn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cal_start = 0, w_en = 0;
  logic [5:0] w_row = '0;
  logic [2:0] w_word = '0;
  logic signed [8:0] w_mu = '0;
  sigma_t w_sigma = '0;
  logic cal_busy, calibrated, mvm_start, cap_off, mu_we, sig_we;
  logic mvm_done = 0;
  y_t [WORDS-1:0] y_se;
  xsrc_e xsrc;
  logic [5:0] onehot_row, wr_row;
  logic [2:0] wr_word;
  mu_cells_t mu_data;
  sigma_t sig_data;
  int checks = 0, failures = 0;

  grng_cal dut (.*);
  always #5 clk = ~clk;

  function automatic int e0(input int i, input int j);
    return ((i * 5 + j * 3) % 11) - 5;
  endfunction

  // tile stand-in
  int pend = -1, nmvm = 0, n_off = 0, n_onehot = 0, n_sigw = 0, bad_row = 0;
  xsrc_e req_src;
  int req_row;
  bit sig_written [ROWS][WORDS];
  always @(posedge clk) begin
    mvm_done <= 1'b0;
    if (mvm_start && pend < 0) begin
      pend    <= 5;
      req_src <= xsrc;
      req_row <= int'(onehot_row);
      nmvm    <= nmvm + 1;
      if (xsrc == XSRC_ZERO && cap_off) n_off <= n_off + 1;
      if (xsrc == XSRC_ONEHOT) begin
        n_onehot <= n_onehot + 1;
        if (int'(onehot_row) != n_onehot / 16) bad_row <= bad_row + 1;
      end
    end else if (pend > 0) pend <= pend - 1;
    else if (pend == 0) begin
      pend     <= -1;
      mvm_done <= 1'b1;
      for (int j = 0; j < int'(WORDS); j++)
        y_se[j] <= (req_src == XSRC_ONEHOT) ? y_t'(e0(req_row, j) + ((nmvm % 2) ? 3 : -3)) : y_t'(0);
    end
    if (rst_n && sig_we && cal_busy) begin
      n_sigw <= n_sigw + 1;
      if (sig_data != 1 || sig_written[wr_row][wr_word]) bad_row <= bad_row + 1;
      sig_written[wr_row][wr_word] = 1'b1;
    end
    if (rst_n && mu_we && cal_busy) bad_row <= bad_row + 1;
  end

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_check(input int r, input int w, input int mu, input int sg, input bit cal);
    int exp_mu;
    mu_cells_t exp_c;
    w_en = 1; w_row = 6'(r); w_word = 3'(w); w_mu = 9'(mu); w_sigma = sigma_t'(sg);
    @(negedge clk); w_en = 0;
    exp_mu = cal ? mu - sg * e0(r, w) * 8 : mu;
    if (exp_mu > 255) exp_mu = 255;
    if (exp_mu < -255) exp_mu = -255;
    exp_c.p = (exp_mu >= 0) ? 8'(exp_mu) : 8'd0;
    exp_c.n = (exp_mu < 0) ? 8'(-exp_mu) : 8'd0;
    checks++;
    if (!mu_we || !sig_we || wr_row != 6'(r) || wr_word != 3'(w) || mu_data != exp_c || sig_data != sigma_t'(sg)) begin
      failures++;
      if (failures < 10) $display("write r=%0d w=%0d mu=%0d sg=%0d: p=%0d n=%0d, expected mu'=%0d", r, w, mu, sg, mu_data.p, mu_data.n, exp_mu);
    end
  endtask

  initial begin
    for (int i = 0; i < int'(ROWS); i++)
      for (int j = 0; j < int'(WORDS); j++) sig_written[i][j] = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int k = 0; k < 20; k++)
      write_check($urandom_range(63), $urandom_range(7), $urandom_range(510) - 255, $urandom_range(15), 0);
    cal_start = 1; @(negedge clk); cal_start = 0;
    // a host write in the middle of calibration is ignored
    repeat (100) @(negedge clk);
    w_en = 1; @(negedge clk); w_en = 0;
    while (cal_busy) @(negedge clk);
    checks++; if (!calibrated) failures++;
    checks++; if (nmvm != 1 + 64 * 16 || n_off != 1 || n_onehot != 64 * 16) begin
      failures++; $display("nmvm=%0d n_off=%0d n_onehot=%0d", nmvm, n_off, n_onehot);
    end
    checks++; if (n_sigw != 512 || bad_row != 0) begin
      failures++; $display("n_sigw=%0d bad=%0d", n_sigw, bad_row);
    end
    for (int i = 0; i < int'(ROWS); i++)
      for (int j = 0; j < int'(WORDS); j++) begin
        checks++;
        if (int'(dut.eps_sum[i][j]) != 16 * e0(i, j)) failures++;
      end
    for (int k = 0; k < 400; k++)
      write_check($urandom_range(63), $urandom_range(7), $urandom_range(510) - 255, $urandom_range(15), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
