// migration_threshold: hill-climbing migration threshold (MTD).
//
// At the end of every quantum the total stall time of all applications is
// compared with that of the previous quantum. If it went down, the last
// threshold move helped and the threshold moves again in the same direction;
// otherwise the direction is reversed. The threshold then moves by STEP,
// held within 0..255.
//
// Follows the design: the rule, the 8-bit threshold, 23-bit current and
// previous total stall time and the 1-bit previous direction. Own choices:
// STEP = 1, the starting threshold INIT, the first move is upwards, an
// unchanged total counts as "not decreased", and the first quantum after
// reset (no previous total) keeps the starting direction.
//
// Timing: 'update' is a one-cycle pulse with the finished quantum's total;
// the new threshold is visible the next cycle.
module migration_threshold
  import ubm_pkg::*;
#(
  parameter int unsigned STEP = 1,
  parameter int unsigned INIT = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             update,
  input  logic [TOT_W-1:0] total_stall,
  output logic [THR_W-1:0] threshold,
  output logic             dir_up         // direction of the last move
);

  logic [TOT_W-1:0] prev_q;
  logic             have_prev_q;
  logic             dir_d;

  always_comb begin
    if (!have_prev_q || total_stall < prev_q) dir_d = dir_up;
    else                                      dir_d = !dir_up;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      threshold   <= THR_W'(INIT);
      prev_q      <= '0;
      have_prev_q <= 1'b0;
      dir_up      <= 1'b1;
    end else if (update) begin
      prev_q      <= total_stall;
      have_prev_q <= 1'b1;
      dir_up      <= dir_d;
      if (dir_d) threshold <= (int'(threshold) + STEP > (1 << THR_W) - 1) ? '1 : threshold + THR_W'(STEP);
      else       threshold <= (int'(threshold) < STEP) ? '0 : threshold - THR_W'(STEP);
    end
  end

endmodule
