`timescale 1ns/1ps
// tile_ctrl: the tile controller that sequences one matrix-vector multiplication
// (one Monte-Carlo sample of the Bayesian layer). All rows and all columns
// compute at once, so one MVM is one pass through:
//   PRE   PRE_CYCLES cycles: bitlines precharged (pre = 1), GRNG EN low so that
//         every GRNG sees a fresh rising edge next;
//   EVAL  EVAL_CYCLES cycles: eval = 1 (GRNG EN and read wordlines on); the
//         last cycle raises `sample`, which holds the bitline charge;
//   CONV  pulses adc_start for the shared SAR controller and waits for adc_done;
//   RED   red_en for one cycle: the reduction registers the output words.
// `start` is taken in IDLE only; `busy` is high from the next cycle until RED
// ends. A sample's result is valid one cycle after red_en.
// The paper labels this controller only; the phase order follows the read
// operation it describes (precharge, evaluate, convert, shift-add). The cycle
// counts are this design's choice: EVAL must cover the GRNG latency (69 ns mean
// at the paper's operating point), so 9 cycles at a 10 ns clock.
module tile_ctrl #(
  parameter int unsigned PRE_CYCLES  = 1,
  parameter int unsigned EVAL_CYCLES = 9
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  logic adc_done,
  output logic busy,
  output logic pre,
  output logic eval,
  output logic sample,
  output logic adc_start,
  output logic red_en
);

  typedef enum logic [2:0] {S_IDLE, S_PRE, S_EVAL, S_CONV, S_WAIT, S_RED} state_e;
  state_e state;
  logic [7:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cnt   <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_PRE;
          cnt   <= 8'(PRE_CYCLES - 1);
        end
        S_PRE: if (cnt == 0) begin
          state <= S_EVAL;
          cnt   <= 8'(EVAL_CYCLES - 1);
        end else cnt <= cnt - 1'b1;
        S_EVAL: if (cnt == 0) state <= S_CONV;
                else cnt <= cnt - 1'b1;
        S_CONV: state <= S_WAIT;
        S_WAIT: if (adc_done) state <= S_RED;
        S_RED:  state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy      = (state != S_IDLE);
  assign pre       = (state == S_PRE);
  assign eval      = (state == S_EVAL);
  assign sample    = (state == S_EVAL) && (cnt == 0);
  assign adc_start = (state == S_CONV);
  assign red_en    = (state == S_RED);

endmodule
