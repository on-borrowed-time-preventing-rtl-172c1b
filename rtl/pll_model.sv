// pll_model -- behavioural model of a PLL clock manager with a LOCKED
// status output (MMCM CLKINSTOPPED / PLL_BASE LOCKED style).
//
// Behavioural model (not synthesizable logic): a real PLL is an analog
// block (phase detector, loop filter, VCO) delivered as a vendor
// primitive. This model only reproduces what the countermeasure uses:
//   * clk_out follows the reference clock, OUT_DELAY_PS late, while the
//     reference runs, and keeps ticking at the nominal period for
//     FREERUN_CYCLES further cycles after the reference stops (the brief
//     free-running output the PLL variant relies on to latch the clear).
//   * locked rises after LOCK_CYCLES consecutive reference periods within
//     TOL_PS of REF_PERIOD_PS (lock time), and falls when no reference edge
//     has arrived for more than 1.25 periods (checked every period/8), or
//     when a period outside the tolerance is seen (e.g. a glitch).
// The inverted lock flag is the alarm of the PLL-based countermeasure.
//
// Interface: clk_in (reference), clk_out (system clock), locked.
// The lock-loss behaviour (within one missed reference cycle) follows the
// design; lock time, tolerance, output delay and free-run length are this
// model's choices.
module pll_model #(
  parameter int unsigned REF_PERIOD_PS  = bt_pkg::T_CLK_PS,
  parameter int unsigned TOL_PS         = 1000,
  parameter int unsigned LOCK_CYCLES    = 16,
  parameter int unsigned FREERUN_CYCLES = 4,
  parameter int unsigned OUT_DELAY_PS   = 100
) (
  input  logic clk_in,
  output logic clk_out,
  output logic locked
);
  timeunit 1ps;
  timeprecision 1ps;

  longint          last_ref;
  int unsigned     good_cnt;
  bit              seen_ref;

  initial begin
    last_ref = 0;
    good_cnt = 0;
    seen_ref = 1'b0;
    locked   = 1'b0;
    clk_out  = 1'b0;
  end

  // lock acquisition and loss on a wrong period
  always @(posedge clk_in) begin
    longint dt;
    dt = $time - last_ref;
    if (seen_ref && dt >= longint'(REF_PERIOD_PS) - longint'(TOL_PS)
                 && dt <= longint'(REF_PERIOD_PS) + longint'(TOL_PS)) begin
      if (good_cnt < LOCK_CYCLES) good_cnt = good_cnt + 1;
    end else begin
      good_cnt = 0;
      locked   = 1'b0;
    end
    if (good_cnt >= LOCK_CYCLES) locked = 1'b1;
    last_ref = $time;
    seen_ref = 1'b1;
  end

  // lock loss on a missing reference edge
  initial begin
    forever begin
      #(REF_PERIOD_PS / 8);
      if (seen_ref && ($time - last_ref) > longint'(REF_PERIOD_PS + REF_PERIOD_PS / 4)) begin
        locked   = 1'b0;
        good_cnt = 0;
      end
    end
  end

  // output clock: aligned to the reference, free-running briefly after it stops
  initial begin
    forever begin
      @(posedge clk_in);
      #(OUT_DELAY_PS);
      while ((($time - last_ref) / longint'(REF_PERIOD_PS)) <= longint'(FREERUN_CYCLES)) begin
        clk_out = 1'b1;
        #(REF_PERIOD_PS / 2);
        clk_out = 1'b0;
        #(REF_PERIOD_PS - REF_PERIOD_PS / 2);
      end
    end
  end
endmodule
