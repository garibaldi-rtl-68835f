// threshold_unit: colour timer and dynamic protection threshold.
//
// The colour is an l-bit (COLOR_BITS = 3) coarse timer shared by the whole
// pair table. It advances by one after every PERIOD LLC accesses (100K in the
// paper). At the end of each period the threshold is adjusted from the
// counters of the performance counter block:
//   * P(D_miss|I_miss) = cond_miss/cond_total clearly below the LLC miss rate
//     llc_miss/llc_acc (below MARGIN_NUM/MARGIN_DEN of it): threshold - STEP,
//     so that more instruction lines are protected;
//   * P(D_miss|I_miss) above the LLC miss rate: threshold + STEP;
//   * otherwise, or with no conditional samples, unchanged.
// The comparisons are done by cross multiplication, without division. The
// direction of both adjustments and the initial threshold of 32 follow the
// paper; the margin (7/8), the step (1) and the clamping to the 6-bit cost
// range are this design's choices.
//
// Timing: the period counter counts accesses; in the cycle after the
// PERIOD-th access, period_end pulses, the threshold and colour change at the
// following edge, and `clear` (= period_end) restarts the counters.
module threshold_unit #(
  parameter int unsigned COLOR_BITS = 3,
  parameter int unsigned PERIOD     = 100000,
  parameter int unsigned COST_W     = 6,
  parameter int unsigned THR_INIT   = 32,
  parameter int unsigned STEP       = 1,
  parameter int unsigned MARGIN_NUM = 7,
  parameter int unsigned MARGIN_DEN = 8,
  parameter int unsigned CNT_W      = 32
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  acc_valid,
  input  logic [CNT_W-1:0]      cond_total,
  input  logic [CNT_W-1:0]      cond_miss,
  input  logic [CNT_W-1:0]      llc_acc,
  input  logic [CNT_W-1:0]      llc_miss,
  output logic                  period_end,
  output logic [COST_W-1:0]     threshold,
  output logic [COLOR_BITS-1:0] color,
  output logic                  thr_inc,
  output logic                  thr_dec
);
  localparam int unsigned PCNT_W = $clog2(PERIOD + 1);
  localparam int unsigned PROD_W = 2*CNT_W + 8;

  logic [PCNT_W-1:0] pcnt;
  logic [PROD_W-1:0] lhs, rhs;   // cond_miss*llc_acc , llc_miss*cond_total

  assign period_end = (pcnt == PCNT_W'(PERIOD));

  always_comb begin
    lhs = PROD_W'(cond_miss) * PROD_W'(llc_acc);
    rhs = PROD_W'(llc_miss)  * PROD_W'(cond_total);
    thr_inc = 1'b0;
    thr_dec = 1'b0;
    if (period_end && cond_total != '0) begin
      if (lhs > rhs)
        thr_inc = 1'b1;
      else if (lhs * PROD_W'(MARGIN_DEN) < rhs * PROD_W'(MARGIN_NUM))
        thr_dec = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pcnt      <= '0;
      threshold <= COST_W'(THR_INIT);
      color     <= '0;
    end else begin
      if (period_end) pcnt <= PCNT_W'(acc_valid);
      else if (acc_valid) pcnt <= pcnt + 1'b1;
      if (period_end) color <= color + 1'b1;
      if (thr_inc)
        threshold <= ({1'b0, threshold} + (COST_W+1)'(STEP) > (COST_W+1)'((1 << COST_W) - 1))
                     ? '1 : threshold + COST_W'(STEP);
      else if (thr_dec)
        threshold <= (threshold < COST_W'(STEP)) ? '0 : threshold - COST_W'(STEP);
    end
  end
endmodule
