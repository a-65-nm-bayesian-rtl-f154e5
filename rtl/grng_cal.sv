`timescale 1ns/1ps
// grng_cal: calibration of the GRNGs' static offsets, and the weight write path
// that applies it.
// Transistor mismatch gives every GRNG a fixed non-zero mean eps0(i,j). The
// procedure follows the paper: write 1 to every sigma word, drive the rows with
// input 1 one row at a time, measure the mean of each word's sigma-eps output,
// and from then on store mu' = mu - sigma * eps0 instead of mu. Calibration runs
// once, on cal_start:
//   1. one MVM with all inputs zero, whose ADC codes the reduction keeps as the
//      ADC offsets (cap_off);
//   2. sigma = 1 written to all ROWS x WORDS sigma words, one per cycle;
//   3. for each row i, 2^CAL_LOG2 MVMs with input 1 on row i only; the
//      sigma-eps outputs y_se[j] of word j are summed into eps_sum(i,j).
// The sum keeps CAL_LOG2 fraction bits of the mean, in ADC LSBs. One ADC LSB is
// 2^LSB_LOG2 units of mu, so the correction of a weight write is
//   mu' = sat255(mu - round(sigma * eps_sum * 2^LSB_LOG2 / 2^CAL_LOG2)).
// Host writes (w_en with row, word, signed mu, sigma) go through this block in
// every mode but calibration, which ignores them; before the first calibration
// no correction is applied. A write reaches the SRAM one cycle after w_en.
// MVM requests (mvm_start) are answered by mvm_done with y_se valid.
// The paper gives the procedure and the correction formula. The number of
// samples averaged, the ADC offset step and the on-chip write path are this
// design's choices.
module grng_cal
  import bnn_pkg::*;
#(
  parameter int unsigned N_ROWS   = ROWS,
  parameter int unsigned N_WORDS  = WORDS,
  parameter int unsigned CAL_LOG2 = 4,
  parameter int unsigned LSB_LOG2 = 3
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // host
  input  logic                        cal_start,
  input  logic                        w_en,
  input  logic [$clog2(N_ROWS)-1:0]   w_row,
  input  logic [$clog2(N_WORDS)-1:0]  w_word,
  input  logic signed [MU_W-1:0]      w_mu,
  input  sigma_t                      w_sigma,
  output logic                        cal_busy,
  output logic                        calibrated,
  // tile
  output logic                        mvm_start,
  input  logic                        mvm_done,
  input  y_t [N_WORDS-1:0]            y_se,
  output xsrc_e                       xsrc,
  output logic [$clog2(N_ROWS)-1:0]   onehot_row,
  output logic                        cap_off,
  // SRAM write ports (shared address)
  output logic                        mu_we,
  output logic                        sig_we,
  output logic [$clog2(N_ROWS)-1:0]   wr_row,
  output logic [$clog2(N_WORDS)-1:0]  wr_word,
  output mu_cells_t                   mu_data,
  output sigma_t                      sig_data
);

  localparam int unsigned RA = $clog2(N_ROWS);
  localparam int unsigned WA = $clog2(N_WORDS);
  localparam int unsigned EW = Y_W + CAL_LOG2;
  localparam int unsigned CW = EW + SIG_BITS + LSB_LOG2 + 1;

  typedef enum logic [2:0] {C_IDLE, C_OFF_REQ, C_OFF_WAIT, C_SIGW, C_ROW_REQ, C_ROW_WAIT} state_e;
  state_e state;

  logic signed [EW-1:0] eps_sum [N_ROWS][N_WORDS];
  logic signed [EW-1:0] acc [N_WORDS];
  logic [RA-1:0]        row;
  logic [WA-1:0]        word;
  logic [CAL_LOG2:0]    nsamp;

  // Correction of a host write.
  logic signed [CW-1:0] corr_raw, corr, mu_corr;
  always_comb begin
    corr_raw = CW'($signed({1'b0, w_sigma})) * CW'(eps_sum[w_row][w_word]);
    corr     = ((corr_raw <<< LSB_LOG2) + (CW'(1) <<< CAL_LOG2 >>> 1)) >>> CAL_LOG2;
    if (!calibrated) corr = '0;
    mu_corr  = CW'(w_mu) - corr;
    if (mu_corr > CW'(255))  mu_corr = CW'(255);
    if (mu_corr < -CW'(255)) mu_corr = -CW'(255);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= C_IDLE;
      calibrated <= 1'b0;
      row        <= '0;
      word       <= '0;
      nsamp      <= '0;
      mu_we      <= 1'b0;
      sig_we     <= 1'b0;
      wr_row     <= '0;
      wr_word    <= '0;
      mu_data    <= '0;
      sig_data   <= '0;
      for (int j = 0; j < int'(N_WORDS); j++) acc[j] <= '0;
    end else begin
      mu_we  <= 1'b0;
      sig_we <= 1'b0;
      unique case (state)
        C_IDLE: begin
          if (cal_start) begin
            state <= C_OFF_REQ;
          end else if (w_en) begin
            mu_we    <= 1'b1;
            sig_we   <= 1'b1;
            wr_row   <= w_row;
            wr_word  <= w_word;
            mu_data  <= mu_encode(MU_W'(mu_corr));
            sig_data <= w_sigma;
          end
        end
        C_OFF_REQ:  state <= C_OFF_WAIT;
        C_OFF_WAIT: if (mvm_done) begin
          state <= C_SIGW;
          row   <= '0;
          word  <= '0;
        end
        C_SIGW: begin
          sig_we   <= 1'b1;
          wr_row   <= row;
          wr_word  <= word;
          sig_data <= sigma_t'(1);
          word     <= word + 1'b1;
          if (word == WA'(N_WORDS - 1)) begin
            row <= row + 1'b1;
            if (row == RA'(N_ROWS - 1)) begin
              state <= C_ROW_REQ;
              row   <= '0;
              nsamp <= '0;
            end
          end
        end
        C_ROW_REQ: state <= C_ROW_WAIT;
        C_ROW_WAIT: if (mvm_done) begin
          state <= C_ROW_REQ;
          if (nsamp == (CAL_LOG2+1)'((1 << CAL_LOG2) - 1)) begin
            for (int j = 0; j < int'(N_WORDS); j++) begin
              eps_sum[row][j] <= acc[j] + EW'(y_se[j]);
              acc[j]          <= '0;
            end
            nsamp <= '0;
            row   <= row + 1'b1;
            if (row == RA'(N_ROWS - 1)) begin
              state      <= C_IDLE;
              calibrated <= 1'b1;
            end
          end else begin
            for (int j = 0; j < int'(N_WORDS); j++) acc[j] <= acc[j] + EW'(y_se[j]);
            nsamp <= nsamp + 1'b1;
          end
        end
        default: state <= C_IDLE;
      endcase
    end
  end

  assign cal_busy   = (state != C_IDLE);
  assign mvm_start  = (state == C_OFF_REQ) || (state == C_ROW_REQ);
  assign cap_off    = (state == C_OFF_REQ) || (state == C_OFF_WAIT);
  assign xsrc       = (state == C_OFF_REQ || state == C_OFF_WAIT) ? XSRC_ZERO :
                      (state == C_ROW_REQ || state == C_ROW_WAIT) ? XSRC_ONEHOT : XSRC_BUFFER;
  assign onehot_row = row;

endmodule
