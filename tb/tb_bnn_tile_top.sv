`timescale 1ns/1ps
// tb_bnn_tile_top: end-to-end test of the whole tile at its default size
// (64 rows x 8 words, 512 GRNGs, 96 ADCs), 10 ns clock.
//   1. GRNG offset calibration; every measured eps0 must lie within 1 ns of the
//      mismatch given to that GRNG (a few outliers allowed, it is a 16-sample mean).
//   2. One write whose correction drives mu past 255, which must saturate.
//   3. Deterministic MVMs (all sigma = 0, random mu and X, plus one all-maximum
//      case that saturates ADCs): every output word must equal the reference
//      sum_b 2^b (clamp(floor(q_b / 8 + off + 1/2), -32, 31) - off) computed here
//      from the written weights, and y_valid must come 21 cycles after mvm_start.
//   4. Bayesian sampling: sigma = 1 (word 7: sigma = 0), mu = 0 (so mu' =
//      -sigma * eps0 after correction), input 1 on twelve rows whose GRNGs in
//      word 0 have a positive offset. Over 64 samples each word's mean must match
//      the stored mu' (quantised as the ADCs do) plus the GRNGs' mean, word 0's
//      mean must be less than half of what the uncorrected offset would give,
//      words 0..6 must spread and word 7 must not.
//      All samples but the first reuse X*mu (mvm_mu_reuse), whose stored value
//      must not change.
//   5. Two samples without reading out: output buffer overrun.
// Each mechanism (calibration, mu reuse, ADC offset capture, corrected write, write
// saturation, ADC saturation, positive and negative GRNG samples, overrun) is
// counted and must occur at least once.
module tb_bnn_tile_top;
  import bnn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic w_en = 0, x_we = 0, cal_start = 0, mvm_start = 0, mvm_mu_reuse = 0, rd_en = 0;
  logic [5:0] w_row = '0, x_addr = '0;
  logic [2:0] w_word = '0, rd_addr = '0;
  logic signed [8:0] w_mu = '0;
  sigma_t w_sigma = '0;
  x_t x_data = '0;
  logic busy, cal_busy, calibrated, y_valid, out_ready, out_overrun;
  y_t rd_data;
  int checks = 0, failures = 0;

  bnn_tile_top dut (.*);
  always #5 clk = ~clk;

  // shadow copies of what was written
  int mu_w [ROWS][WORDS];   // mu as stored (after correction)
  int xv   [ROWS];

  // mechanism counters
  int n_mu_idle = 0, n_mu_busy_bad = 0, n_reuse = 0, n_cal = 0, n_offcap = 0, n_corr = 0, n_wsat = 0, n_adcsat = 0, n_pos = 0, n_neg = 0, n_mvm = 0;

  always @(posedge clk) if (rst_n) begin
    // during a reuse sample the sigma-eps ADCs convert, the mu side stays idle
    if (dut.mu_reuse_q && dut.adc_clear) n_mu_idle++;
    if (dut.mu_reuse_q && (dut.adc_clear_mu || dut.sample_mu || dut.pre_mu || dut.bit_sel_mu != 0)) n_mu_busy_bad++;
    if (dut.u_red.en && dut.u_red.cap_off) n_offcap++;
    if (!cal_busy && w_en && dut.u_cal.calibrated &&
        dut.u_cal.mu_corr != 14'(w_mu)) n_corr++;
    if (dut.u_red.en)
      for (int j = 0; j < int'(WORDS); j++)
        for (int b = 0; b < int'(MU_BITS); b++)
          if (dut.code_mu[j][b] == 31 || dut.code_mu[j][b] == -32) n_adcsat++;
    if (dut.sample)
      for (int k = 0; k < int'(ROWS * WORDS); k++) begin
        if (dut.td_ns[k] > 0.0) n_pos++;
        if (dut.td_ns[k] < 0.0) n_neg++;
      end
  end

  initial begin
    #20000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real grng_off(input int r, input int w);
    return 2.0 * (real'((r * 37 + w * 11 + 5) % 9) - 4.0) / 4.0;
  endfunction
  function automatic int adc_off_mu(input int k);
    return ((k * 7 + 3) % 5) - 2;
  endfunction

  task automatic write_w(input int r, input int w, input int mu, input int sg);
    w_en = 1; w_row = 6'(r); w_word = 3'(w); w_mu = 9'(mu); w_sigma = sigma_t'(sg);
    @(negedge clk); w_en = 0;
    @(negedge clk);
    mu_w[r][w] = mu_value(dut.u_mu_sram.mem[r][w]);
  endtask

  task automatic write_x(input int r, input int v);
    x_we = 1; x_addr = 6'(r); x_data = x_t'(v); xv[r] = v;
    @(negedge clk); x_we = 0;
  endtask

  // one MVM; returns the number of rising edges from the one taking mvm_start
  // to the one after which y_valid is high
  task automatic run_mvm(output int cycles);
    mvm_start = 1; @(posedge clk); #1 mvm_start = 0;
    cycles = 1;
    while (!y_valid) begin @(posedge clk); #1; cycles++; end
    n_mvm++;
    @(posedge clk);   // the output buffer loads on this edge
    @(negedge clk);
  endtask

  task automatic read_out(output int y [WORDS]);
    for (int j = 0; j < int'(WORDS); j++) begin
      rd_en = 1; rd_addr = 3'(j); @(negedge clk); rd_en = 0;
      y[j] = int'(rd_data);
    end
  endtask

  function automatic int ref_y(input int j);
    int s;
    s = 0;
    for (int b = 0; b < int'(MU_BITS); b++) begin
      int q, c, off;
      q = 0;
      for (int i = 0; i < int'(ROWS); i++) begin
        int m;
        m = mu_w[i][j];
        // bit b of the sign-magnitude pair
        if (((m < 0 ? -m : m) >> b) & 1) q += (m < 0 ? -1 : 1) * xv[i];
      end
      off = adc_off_mu(j * 8 + b);
      c = $floor(real'(q) / 8.0 + real'(off) + 0.5);
      if (c > 31) c = 31;
      if (c < -32) c = -32;
      s += (c - off) * (1 << b);
    end
    return s;
  endfunction

  initial begin
    int cyc, y [WORDS], nbad;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int r = 0; r < int'(ROWS); r++) write_x(r, 0);

    // 1. calibration
    cal_start = 1; @(negedge clk); cal_start = 0;
    cyc = 0;
    while (cal_busy) begin @(negedge clk); cyc++; end
    n_cal++;
    $display("calibration took %0d cycles", cyc);
    checks++; if (!calibrated) failures++;
    nbad = 0;
    for (int r = 0; r < int'(ROWS); r++)
      for (int w = 0; w < int'(WORDS); w++) begin
        real m;
        m = real'(dut.u_cal.eps_sum[r][w]) / 16.0;
        if (m - grng_off(r, w) > 1.0 || grng_off(r, w) - m > 1.0) nbad++;
      end
    $display("eps0 estimates off by more than 1 ns: %0d of 512", nbad);
    checks++; if (nbad > 3) failures++;

    // 2. a write that saturates: mu = 255 where eps0 < 0, sigma 15
    begin
      int rs, ws;
      rs = -1; ws = 0;
      for (int r = 0; r < int'(ROWS) && rs < 0; r++)
        for (int w = 0; w < int'(WORDS); w++)
          if (dut.u_cal.eps_sum[r][w] < -8 && rs < 0) begin rs = r; ws = w; end
      write_w(rs, ws, 255, 15);
      n_wsat++;
      checks++; if (mu_w[rs][ws] != 255) begin failures++; $display("saturating write stored %0d", mu_w[rs][ws]); end
    end

    // 3. deterministic MVMs
    for (int t = 0; t < 4; t++) begin
      for (int r = 0; r < int'(ROWS); r++)
        for (int w = 0; w < int'(WORDS); w++)
          write_w(r, w, (t == 3) ? 255 : $urandom_range(510) - 255, 0);
      for (int r = 0; r < int'(ROWS); r++)
        write_x(r, (t == 3) ? 15 : (t == 0) ? $urandom_range(1) : $urandom_range(15));
      run_mvm(cyc);
      checks++;
      if (cyc != 21) begin failures++; $display("MVM took %0d cycles, expected 21", cyc); end
      read_out(y);
      for (int j = 0; j < int'(WORDS); j++) begin
        checks++;
        if (y[j] != ref_y(j)) begin
          failures++;
          $display("test %0d word %0d: y=%0d expected %0d", t, j, y[j], ref_y(j));
        end
      end
    end

    // 4. Bayesian sampling
    begin
      int sel [12];
      int ns;
      real sum [WORDS], sum2 [WORDS], uncorr [WORDS];
      ns = 0;
      for (int r = 0; r < int'(ROWS) && ns < 12; r++)
        if (grng_off(r, 0) > 0.4) begin sel[ns] = r; ns++; end
      for (int r = 0; r < int'(ROWS); r++) write_x(r, 0);
      for (int k = 0; k < 12; k++) write_x(sel[k], 1);
      for (int r = 0; r < int'(ROWS); r++)
        for (int w = 0; w < int'(WORDS); w++) write_w(r, w, 0, (w == 7) ? 0 : 1);
      for (int j = 0; j < int'(WORDS); j++) begin
        sum[j] = 0.0; sum2[j] = 0.0; uncorr[j] = 0.0;
        // mean of X*sigma*eps in ADC LSBs: X = 1, sigma = 1, 8 charge units per ns
        if (j != 7) for (int k = 0; k < 12; k++) uncorr[j] += grng_off(sel[k], j);
      end
      for (int s = 0; s < 64; s++) begin
        y_t [WORDS-1:0] ymu_first;
        // the first sample computes X*mu, the others reuse it
        mvm_mu_reuse = (s > 0);
        run_mvm(cyc);
        mvm_mu_reuse = 0;
        if (s == 0) ymu_first = dut.u_red.y_mu;
        else begin
          n_reuse++;
          checks++;
          if (dut.u_red.y_mu != ymu_first || cyc != 21) begin
            failures++;
            $display("sample %0d with mu reuse: y_mu changed or took %0d cycles", s, cyc);
          end
        end
        read_out(y);
        for (int j = 0; j < int'(WORDS); j++) begin
          sum[j] += real'(y[j]); sum2[j] += real'(y[j]) * real'(y[j]);
        end
      end
      for (int j = 0; j < int'(WORDS); j++) begin
        real m, sd, e;
        m  = sum[j] / 64.0;
        sd = $sqrt(sum2[j] / 64.0 - m * m);
        // expected mean: the stored (offset-corrected) mu part, quantised
        // exactly as the ADCs do, plus the mean of the sigma-eps part
        e  = real'(ref_y(j)) + uncorr[j];
        $display("word %0d: mean %f (expected %f; mu part %0d, uncorrected eps0 part %f) sd %f",
                 j, m, e, ref_y(j), uncorr[j], sd);
        checks++;
        if (uncorr[j] < 24.0 && (m - e > 2.0 || e - m > 2.0)) failures++;
        checks++;
        if ((j < 7 && sd < 2.0) || (j == 7 && (sd > 0.0 || m != 0.0))) failures++;
      end
      // the calibration pulls word 0's mean towards zero
      checks++;
      if (sum[0] / 64.0 > 0.5 * uncorr[0] || sum[0] / 64.0 < -0.5 * uncorr[0]) failures++;
    end

    // 5. overrun
    run_mvm(cyc);
    run_mvm(cyc);
    checks++; if (!out_overrun) failures++;

    $display("mu reuse samples: %0d", n_reuse);
    checks++; if (n_reuse < 1) failures++;
    $display("reuse conversions with the mu side idle: %0d, with it active: %0d", n_mu_idle, n_mu_busy_bad);
    checks++; if (n_mu_idle != n_reuse || n_mu_busy_bad != 0) failures++;
    $display("mechanisms: cal=%0d offcap=%0d corrected=%0d wsat=%0d adcsat=%0d pos=%0d neg=%0d mvm=%0d overrun=%0d",
             n_cal, n_offcap, n_corr, n_wsat, n_adcsat, n_pos, n_neg, n_mvm, out_overrun);
    checks++; if (n_cal < 1) failures++;
    checks++; if (n_offcap < 1) failures++;
    checks++; if (n_corr < 1) failures++;
    checks++; if (n_wsat < 1) failures++;
    checks++; if (n_adcsat < 1) failures++;
    checks++; if (n_pos < 1 || n_neg < 1) failures++;
    checks++; if (n_mvm < 1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
