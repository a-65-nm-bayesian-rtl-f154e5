`timescale 1ns/1ps
// tb_fc_workload: a Bayesian fully connected classifier layer run on the tile at
// its default size, as the tile would serve the final layer of a small image
// classifier: 1024 input features, 2 classes, 2-bit sigma.
//
// The layer is larger than the tile (64 rows), so it is cut into 16 blocks of 64
// inputs. For each block the testbench writes that block's weights into words 0
// and 1 (one per class; words 2..7 hold zero weights), writes the 64 inputs, and
// takes R = 32 samples: the first computes X*mu, the other 31 reuse it
// (mvm_mu_reuse). Partial logits of the 16 blocks are added here, per sample, as
// a host would.
//
// Layer sizes follow the usual MobileNet head (1024 features) and the two-class
// person / no-person task; the weights and inputs are random (mu in -64..64,
// sigma in 0..3, inputs in 0..3 so that the sigma-eps columns stay mostly inside
// the ADC range at the default analog scaling).
//
// Checks:
//   * per block and class, the X*mu part kept by the reduction equals the
//     reference sum_b 2^b (clamp(floor(q_b / 8 + off + 1/2), -32, 31) - off) from
//     the stored (offset-corrected) mu; it must stay unchanged over the reuse
//     samples, and every sample takes 21 cycles;
//   * per class, the mean logit over the samples lies within 4 standard errors
//     (+4 LSB) of the summed X*mu' parts plus sum X sigma eps0, where eps0 is the
//     static GRNG offset the tile is built with (1 ns = 1 LSB here) and mu' the
//     stored mu, which holds the calibration's -sigma*eps0 estimate; what the
//     two leave over is the calibration's own estimation error;
//   * per sample and class, the sigma-eps part equals the reference
//     sum_b 2^b (clamp(floor(q_b / 8 + off + 1/2), -32, 31) - off), with
//     q_b = 8 * sum_i X_i sigma_ib T_D(i) worked out here from the pulse widths
//     the GRNGs produced in that sample (a column within 1e-9 LSB of a rounding
//     step is not compared);
//   * the GRNG statistics behind it: over the 16 x 32 block samples, the ideal
//     sum_i X_i sigma_i (T_D(i) - eps0(i)), divided by sqrt(sum X^2 sigma^2),
//     must have mean within 0.2 of 0 and SD within 12 % of 1 ns.
// The logit spread is printed; it comes out below the ideal one when sigma-eps
// columns clip at the ADC limits, which happens because those columns also
// carry the uncorrected X*sigma*eps0 mean (the correction sits in mu). Clipped
// conversions are counted and printed.
// The fraction of samples whose decision differs from the mean decision is
// printed as the layer's uncertainty.
module tb_fc_workload;
  import bnn_pkg::*;
  localparam int NIN = 1024, NCLS = 2, NBLK = NIN / 64, R = 32;

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

  int mu_l  [NIN][NCLS];    // layer weights
  int sg_l  [NIN][NCLS];
  int x_l   [NIN];
  int mu_w  [ROWS][WORDS];  // mu as stored in the tile (after correction)
  int xv    [ROWS];
  int n_se_sat = 0, n_se_conv = 0;
  int sg_b [ROWS][NCLS];             // sigma of the block now in the tile
  int exp_se [NCLS];                 // expected sigma-eps word of this sample
  bit amb [NCLS];                    // a column sat on a rounding step
  real z_s1 = 0.0, z_s2 = 0.0;
  int  n_z = 0;

  // at the sampling edge, work out the sigma-eps words from the pulse widths
  always @(posedge clk) if (rst_n && dut.sample && !cal_busy)
    for (int c = 0; c < NCLS; c++) begin
      real ideal, mean, v;
      exp_se[c] = 0; amb[c] = 0;
      for (int b = 0; b < int'(SIG_BITS); b++) begin
        real a, f;
        int code, off;
        a = 0.0;
        for (int i = 0; i < int'(ROWS); i++)
          if ((sg_b[i][c] >> b) & 1) a += real'(xv[i]) * dut.td_ns[i * WORDS + c];
        off = ((((c * 4 + b) * 3 + 1) % 5) - 2);
        f = a + real'(off) + 0.5;
        code = int'($floor(f));
        if (f - $floor(f) < 1e-9 || $ceil(f) - f < 1e-9) amb[c] = 1;
        if (code > 31) code = 31;
        if (code < -32) code = -32;
        exp_se[c] += (code - off) * (1 << b);
      end
      ideal = 0.0; mean = 0.0; v = 0.0;
      for (int i = 0; i < int'(ROWS); i++) begin
        ideal += real'(xv[i] * sg_b[i][c]) * dut.td_ns[i * WORDS + c];
        mean  += real'(xv[i] * sg_b[i][c]) * grng_off(i, c);
        v     += real'(xv[i] * xv[i] * sg_b[i][c] * sg_b[i][c]);
      end
      if (v > 0.0) begin
        z_s1 += (ideal - mean) / $sqrt(v);
        z_s2 += (ideal - mean) * (ideal - mean) / v;
        n_z++;
      end
    end

  always @(posedge clk) if (rst_n && dut.u_red.en && !cal_busy)
    for (int c = 0; c < NCLS; c++)
      for (int b = 0; b < int'(SIG_BITS); b++) begin
        n_se_conv++;
        if (dut.code_se[c][b] == 31 || dut.code_se[c][b] == -32) n_se_sat++;
      end

  initial begin
    #50000000;
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

  task automatic run_mvm(output int cycles);
    mvm_start = 1; @(posedge clk); #1 mvm_start = 0;
    cycles = 1;
    while (!y_valid) begin @(posedge clk); #1; cycles++; end
    @(posedge clk);
    @(negedge clk);
  endtask

  task automatic read_word(input int j, output int y);
    rd_en = 1; rd_addr = 3'(j); @(negedge clk); rd_en = 0;
    y = int'(rd_data);
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
    int cyc, y, nflip, dec_mean;
    int logit [R][NCLS];
    int mu_sum [NCLS];
    real off_sum [NCLS];
    real var_pred [NCLS];
    real m [NCLS], sd [NCLS];

    for (int i = 0; i < NIN; i++) begin
      x_l[i] = $urandom_range(3);
      for (int c = 0; c < NCLS; c++) begin
        mu_l[i][c] = $urandom_range(128) - 64;
        sg_l[i][c] = $urandom_range(3);
      end
    end
    for (int s = 0; s < R; s++) for (int c = 0; c < NCLS; c++) logit[s][c] = 0;
    for (int c = 0; c < NCLS; c++) begin
      mu_sum[c] = 0; off_sum[c] = 0.0; var_pred[c] = 0.0;
      for (int i = 0; i < NIN; i++) var_pred[c] += real'(x_l[i] * x_l[i] * sg_l[i][c] * sg_l[i][c]);
    end

    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int r = 0; r < int'(ROWS); r++) write_x(r, 0);
    cal_start = 1; @(negedge clk); cal_start = 0;
    while (cal_busy) @(negedge clk);
    checks++; if (!calibrated) failures++;
    // calibration left sigma = 1 everywhere: clear the unused words once
    for (int r = 0; r < int'(ROWS); r++)
      for (int w = NCLS; w < int'(WORDS); w++) write_w(r, w, 0, 0);

    for (int k = 0; k < NBLK; k++) begin
      for (int r = 0; r < int'(ROWS); r++) begin
        for (int c = 0; c < NCLS; c++) begin
          write_w(r, c, mu_l[k * 64 + r][c], sg_l[k * 64 + r][c]);
          sg_b[r][c] = sg_l[k * 64 + r][c];
        end
        write_x(r, x_l[k * 64 + r]);
      end
      for (int s = 0; s < R; s++) begin
        mvm_mu_reuse = (s > 0);
        run_mvm(cyc);
        mvm_mu_reuse = 0;
        checks++;
        if (cyc != 21) begin failures++; $display("block %0d sample %0d took %0d cycles", k, s, cyc); end
        for (int c = 0; c < NCLS; c++) begin
          checks++;
          if (int'(dut.u_red.y_mu[c]) != ref_y(c)) begin
            failures++;
            $display("block %0d sample %0d class %0d: X*mu part %0d expected %0d",
                     k, s, c, int'(dut.u_red.y_mu[c]), ref_y(c));
          end
          if (!amb[c]) begin
            checks++;
            if (int'(dut.u_red.y_se[c]) != exp_se[c]) begin
              failures++;
              $display("block %0d sample %0d class %0d: sigma-eps part %0d expected %0d",
                       k, s, c, int'(dut.u_red.y_se[c]), exp_se[c]);
            end
          end
          read_word(c, y);
          logit[s][c] += y;
        end
        // read the remaining words so that the buffer is free again
        for (int j = NCLS; j < int'(WORDS); j++) read_word(j, y);
      end
      for (int c = 0; c < NCLS; c++) begin
        mu_sum[c] += ref_y(c);
        for (int r = 0; r < int'(ROWS); r++)
          off_sum[c] += real'(x_l[k * 64 + r] * sg_l[k * 64 + r][c]) * grng_off(r, c);
      end
    end
    checks++; if (out_overrun) begin failures++; $display("unexpected overrun"); end

    for (int c = 0; c < NCLS; c++) begin
      real s1, s2, se, sdp;
      s1 = 0.0; s2 = 0.0;
      for (int s = 0; s < R; s++) begin
        s1 += real'(logit[s][c]); s2 += real'(logit[s][c]) * real'(logit[s][c]);
      end
      m[c]  = s1 / R;
      sd[c] = $sqrt((s2 - s1 * s1 / R) / (R - 1));
      sdp   = $sqrt(var_pred[c]);
      se    = sdp / $sqrt(real'(R));
      $display("class %0d: mean logit %f (X*mu' %0d + X*sigma*eps0 %f, allowed +-%f), sd %f (predicted %f)",
               c, m[c], mu_sum[c], off_sum[c], 4.0 * se + 4.0, sd[c], sdp);
      checks++;
      if (m[c] - (mu_sum[c] + off_sum[c]) > 4.0 * se + 4.0 ||
          (mu_sum[c] + off_sum[c]) - m[c] > 4.0 * se + 4.0) failures++;
    end
    begin
      real zm, zsd;
      zm  = z_s1 / n_z;
      zsd = $sqrt(z_s2 / n_z - zm * zm);
      $display("normalised GRNG sum over %0d block samples: mean %f sd %f", n_z, zm, zsd);
      checks++; if (n_z != 2 * NBLK * R) failures++;
      checks++; if (zm > 0.2 || zm < -0.2) failures++;
      checks++; if (zsd < 0.88 || zsd > 1.12) failures++;
    end
    $display("sigma-eps conversions of the two words that clipped: %0d of %0d", n_se_sat, n_se_conv);
    dec_mean = (m[1] > m[0]) ? 1 : 0;
    nflip = 0;
    for (int s = 0; s < R; s++) if (((logit[s][1] > logit[s][0]) ? 1 : 0) != dec_mean) nflip++;
    $display("decision: class %0d; %0d of %0d samples disagree", dec_mean, nflip, R);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
