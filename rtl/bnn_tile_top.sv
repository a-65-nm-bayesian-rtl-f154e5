`timescale 1ns/1ps
// bnn_tile_top: one Bayesian compute-in-memory tile with its digital periphery.
// Each weight is stored as w = mu + sigma * eps: an 8-bit differential mean and a
// 4-bit standard deviation per word, and a Gaussian RNG inside every word draws
// a fresh eps for each matrix-vector multiplication (MVM). Two subarrays of 64
// rows x 8 words receive the same 4-bit input vector X: the mu subarray computes
// X*mu, the sigma-eps subarray X*sigma*eps. 96 six-bit SAR ADCs (one per word bit
// column) convert all columns at once under one shared controller, and the
// reduction logic rebuilds the 8 output words y = X*mu + X*sigma*eps. Repeating
// the MVM with the same X gives Monte-Carlo samples of the Bayesian layer's
// output, whose spread measures the model's uncertainty.
//
// Blocks: input_buffer -> (mu_bitline_model, se_bitline_model with 512
// grng_model) -> 96 x (sar_comparator_model + sar_logic) under sar_ctrl ->
// reduction -> output_buffer; tile_ctrl sequences an MVM; grng_cal runs the GRNG
// offset calibration and corrects every weight write. The *_model blocks are
// behavioural models of analog circuits; everything else is synthesizable.
//
// Host interface (all on clk):
//   w_en/w_row/w_word/w_mu/w_sigma  write one weight (signed mu -255..255, sigma
//                                   0..15); ignored while calibrating
//   x_we/x_addr/x_data              write one input of X
//   cal_start                       run the GRNG offset calibration once
//   mvm_start                       take one sample; y_valid pulses when the 8
//                                   output words are in the output buffer
//   mvm_mu_reuse                    with mvm_start: reuse X*mu of the previous
//                                   sample, run only the sigma-eps subarray and
//                                   its ADCs (same X and weights required)
//   rd_en/rd_addr -> rd_data        read an output word, one cycle later
// One MVM takes PRE_CYCLES + EVAL_CYCLES + ADC_BITS + 5 cycles from mvm_start to
// y_valid (19 cycles at the defaults). Sizes follow the paper's prototype; the
// analog scaling (ADC LSB, eps gain), the mismatch spreads given to the models
// and the cycle counts are this design's choices.
module bnn_tile_top
  import bnn_pkg::*;
#(
  parameter int unsigned N_ROWS           = ROWS,
  parameter int unsigned N_WORDS          = WORDS,
  parameter int unsigned PRE_CYCLES       = 1,
  parameter int unsigned EVAL_CYCLES      = 9,
  parameter int unsigned CAL_LOG2         = 4,
  parameter int unsigned LSB_LOG2         = 3,
  parameter int unsigned SE_SHIFT         = 0,
  parameter real         GRNG_LATENCY_NS  = 69.0,
  parameter real         GRNG_SIGMA_NS    = 1.0,
  parameter real         GRNG_MISMATCH_NS = 2.0,
  parameter int          ADC_OFFSET_MAX   = 2,
  parameter real         SE_GAIN_PER_NS   = 8.0
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        w_en,
  input  logic [$clog2(N_ROWS)-1:0]   w_row,
  input  logic [$clog2(N_WORDS)-1:0]  w_word,
  input  logic signed [MU_W-1:0]      w_mu,
  input  sigma_t                      w_sigma,
  input  logic                        x_we,
  input  logic [$clog2(N_ROWS)-1:0]   x_addr,
  input  x_t                          x_data,
  input  logic                        cal_start,
  input  logic                        mvm_start,
  input  logic                        mvm_mu_reuse,
  output logic                        busy,
  output logic                        cal_busy,
  output logic                        calibrated,
  output logic                        y_valid,
  input  logic                        rd_en,
  input  logic [$clog2(N_WORDS)-1:0]  rd_addr,
  output y_t                          rd_data,
  output logic                        out_ready,
  output logic                        out_overrun
);

  localparam real ADC_LSB = real'(2 ** LSB_LOG2);

  // ---------------- control ----------------
  logic  t_start, t_busy, pre, eval, sample, adc_start, red_en;
  logic  adc_clear, adc_busy, adc_done;
  logic  [ADC_BITS-1:0] bit_sel;
  logic  cal_mvm_start, cap_off, red_valid;
  xsrc_e xsrc;
  logic  [$clog2(N_ROWS)-1:0] onehot_row;

  assign t_start = cal_busy ? cal_mvm_start : mvm_start;
  assign busy    = t_busy || cal_busy;

  // mu reuse flag of the sample in progress, taken when the controller accepts
  // a start; calibration samples never reuse.
  logic mu_reuse_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  mu_reuse_q <= 1'b0;
    else if (t_start && !t_busy) mu_reuse_q <= mvm_mu_reuse && !cal_busy;
  end

  tile_ctrl #(.PRE_CYCLES(PRE_CYCLES), .EVAL_CYCLES(EVAL_CYCLES)) u_ctrl (
    .clk, .rst_n, .start(t_start), .adc_done, .busy(t_busy), .pre, .eval,
    .sample, .adc_start, .red_en
  );

  sar_ctrl u_sar_ctrl (
    .clk, .rst_n, .start(adc_start), .clear(adc_clear), .bit_sel,
    .busy(adc_busy), .done(adc_done)
  );

  // ---------------- weights and inputs ----------------
  logic       mu_we, sig_we;
  logic [$clog2(N_ROWS)-1:0]  wr_row;
  logic [$clog2(N_WORDS)-1:0] wr_word;
  mu_cells_t  mu_data;
  sigma_t     sig_data;
  y_t [N_WORDS-1:0] y, y_mu, y_se;

  grng_cal #(.N_ROWS(N_ROWS), .N_WORDS(N_WORDS), .CAL_LOG2(CAL_LOG2), .LSB_LOG2(LSB_LOG2)) u_cal (
    .clk, .rst_n, .cal_start, .w_en, .w_row, .w_word, .w_mu, .w_sigma,
    .cal_busy, .calibrated, .mvm_start(cal_mvm_start), .mvm_done(red_valid),
    .y_se, .xsrc, .onehot_row, .cap_off, .mu_we, .sig_we, .wr_row, .wr_word,
    .mu_data, .sig_data
  );

  logic [N_ROWS-1:0][N_WORDS-1:0][2*MU_BITS-1:0]  mu_cells;
  logic [N_ROWS-1:0][N_WORDS-1:0][SIG_BITS-1:0]   sig_cells;

  cim_sram #(.N_ROWS(N_ROWS), .N_WORDS(N_WORDS), .WW(2*MU_BITS)) u_mu_sram (
    .clk, .wr_en(mu_we), .wr_row, .wr_word, .wr_data(mu_data), .cells(mu_cells)
  );
  cim_sram #(.N_ROWS(N_ROWS), .N_WORDS(N_WORDS), .WW(SIG_BITS)) u_sig_sram (
    .clk, .wr_en(sig_we), .wr_row, .wr_word, .wr_data(sig_data), .cells(sig_cells)
  );

  x_t [N_ROWS-1:0] x;
  input_buffer #(.N_ROWS(N_ROWS)) u_inbuf (
    .clk, .rst_n, .wr_en(x_we), .wr_addr(x_addr), .wr_data(x_data),
    .src(xsrc), .onehot_row, .x
  );

  // ---------------- analog core (behavioural models) ----------------
  real td_ns [N_ROWS*N_WORDS];

  for (genvar r = 0; r < int'(N_ROWS); r++) begin : g_row
    for (genvar w = 0; w < int'(N_WORDS); w++) begin : g_word
      // Static mismatch spread over -GRNG_MISMATCH_NS..+GRNG_MISMATCH_NS.
      localparam real OFF = GRNG_MISMATCH_NS * (real'((r * 37 + w * 11 + 5) % 9) - 4.0) / 4.0;
      logic p, n, e, phi;
      grng_model #(.LATENCY_NS(GRNG_LATENCY_NS), .SIGMA_TD_NS(GRNG_SIGMA_NS), .OFFSET_NS(OFF)) u_grng (
        .en(eval), .p, .n, .e, .phi, .td_ns(td_ns[r*N_WORDS+w])
      );
    end
  end

  real q_mu [N_WORDS*MU_BITS];
  real q_se [N_WORDS*SIG_BITS];

  // When mu is reused, the mu subarray and its ADCs stay idle.
  logic                pre_mu, sample_mu, adc_clear_mu;
  logic [ADC_BITS-1:0] bit_sel_mu;
  assign pre_mu       = pre && !mu_reuse_q;
  assign sample_mu    = sample && !mu_reuse_q;
  assign adc_clear_mu = adc_clear && !mu_reuse_q;
  assign bit_sel_mu   = mu_reuse_q ? '0 : bit_sel;

  mu_bitline_model #(.N_ROWS(N_ROWS), .N_WORDS(N_WORDS)) u_mu_bl (
    .clk, .pre(pre_mu), .sample(sample_mu), .x, .cells(mu_cells), .q(q_mu)
  );
  se_bitline_model #(.N_ROWS(N_ROWS), .N_WORDS(N_WORDS), .GAIN_PER_NS(SE_GAIN_PER_NS)) u_se_bl (
    .clk, .pre, .sample, .x, .cells(sig_cells), .td_ns, .q(q_se)
  );

  // ---------------- ADCs ----------------
  adc_code_t [N_WORDS-1:0][MU_BITS-1:0]  code_mu;
  adc_code_t [N_WORDS-1:0][SIG_BITS-1:0] code_se;

  for (genvar k = 0; k < int'(N_WORDS * MU_BITS); k++) begin : g_adc_mu
    localparam real OFF = real'(((k * 7 + 3) % (2 * ADC_OFFSET_MAX + 1)) - ADC_OFFSET_MAX);
    logic [ADC_BITS-1:0] trial;
    logic cmp;
    sar_comparator_model #(.LSB(ADC_LSB), .OFFSET_LSB(OFF)) u_cmp (
      .vin(q_mu[k]), .trial, .cmp
    );
    sar_logic u_sar (
      .clk, .rst_n, .clear(adc_clear_mu), .bit_sel(bit_sel_mu), .cmp, .trial,
      .code(code_mu[k / MU_BITS][k % MU_BITS])
    );
  end

  for (genvar k = 0; k < int'(N_WORDS * SIG_BITS); k++) begin : g_adc_se
    localparam real OFF = real'(((k * 3 + 1) % (2 * ADC_OFFSET_MAX + 1)) - ADC_OFFSET_MAX);
    logic [ADC_BITS-1:0] trial;
    logic cmp;
    sar_comparator_model #(.LSB(ADC_LSB), .OFFSET_LSB(OFF)) u_cmp (
      .vin(q_se[k]), .trial, .cmp
    );
    sar_logic u_sar (
      .clk, .rst_n, .clear(adc_clear), .bit_sel, .cmp, .trial,
      .code(code_se[k / SIG_BITS][k % SIG_BITS])
    );
  end

  // ---------------- reduction and output ----------------
  reduction #(.N_WORDS(N_WORDS), .SE_SHIFT(SE_SHIFT)) u_red (
    .clk, .rst_n, .en(red_en), .cap_off, .mu_reuse(mu_reuse_q), .code_mu, .code_se, .y, .y_mu, .y_se,
    .valid(red_valid)
  );

  assign y_valid = red_valid && !cal_busy;

  output_buffer #(.N_WORDS(N_WORDS)) u_outbuf (
    .clk, .rst_n, .load(y_valid), .din(y), .rd_en, .rd_addr, .rd_data,
    .ready(out_ready), .overrun(out_overrun)
  );

endmodule
