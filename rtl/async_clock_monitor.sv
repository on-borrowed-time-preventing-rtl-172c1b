// async_clock_monitor -- asynchronous delay-based stopped-clock detector
// and clear-edge generator.
//
// How it works:
//   * The incoming clock runs down a chain of unit delays. Taps c0..cn
//     (every TAP_STRIDE-th element) hold the clock as it was over the last
//     t_n = NUM_TAPS*TAP_STRIDE*UNIT_DELAY_PS. With t_n above half a clock
//     period and tap spacing below a quarter period, a running clock
//     always leaves both levels among the taps.
//   * stop_detector raises stop_detect when all taps agree, i.e. t_n after
//     the clock's last transition. Its propagation delay is modelled by
//     DETECT_ELEMS unit delays.
//   * stop_detect runs down a secondary chain s1..sm (SEC_ELEMS elements,
//     t_m about half a clock period); its end is delayed_edge.
//   * clk_mux drives sys_clk from the clock delayed by clk_delay
//     (CLK_DELAY_ELEMS elements) while stop_detect is low, and from
//     delayed_edge while it is high. When the clock stops, sys_clk
//     therefore gets exactly one rising edge t_m after detection (stop
//     low: delayed_edge rises; stop high: sys_clk first falls to the
//     still-low delayed_edge, then rises with it).
//   * clk_delay must exceed the detector's delay: when the clock restarts
//     or an attacker injects a short pulse, stop_detect has already
//     dropped before the pulse reaches clk_mux, so the pulse reaches the
//     registers. CLK_DELAY_ELEMS = 0 gives the naive, glitch-sensitive
//     variant, kept for demonstration.
//
// Interface: input clk; outputs sys_clk (clock for the protected
// registers), stop_detect (alarm, also the data_mux select),
// delayed_edge and clk_taps (c0..cn, for observation).
// Timing: everything is asynchronous; the delays come from the
// behavioural delay_chain model. Structure, tap spacing and the sizing
// rules follow the design as published; the secondary-chain, clk_delay
// and detector-delay lengths are this design's choices.
module async_clock_monitor #(
  parameter int unsigned NUM_TAPS        = bt_pkg::NUM_TAPS,
  parameter int unsigned TAP_STRIDE      = bt_pkg::TAP_STRIDE,
  parameter int unsigned UNIT_DELAY_PS   = bt_pkg::UNIT_DELAY_PS,
  parameter int unsigned SEC_ELEMS       = bt_pkg::SEC_ELEMS,
  parameter int unsigned DETECT_ELEMS    = bt_pkg::DETECT_ELEMS,
  parameter int unsigned CLK_DELAY_ELEMS = bt_pkg::CLK_DELAY_ELEMS
) (
  input  logic              clk,
  output logic              sys_clk,
  output logic              stop_detect,
  output logic              delayed_edge,
  output logic [NUM_TAPS:0] clk_taps
);
  timeunit 1ps;
  timeprecision 1ps;

  logic chain_end;
  logic stop_raw;
  logic clk_delayed;
  logic [1:0] det_taps;
  logic [1:0] sec_taps;

  // c0..cn
  delay_chain #(
    .N_ELEMS      (NUM_TAPS * TAP_STRIDE),
    .TAP_STRIDE   (TAP_STRIDE),
    .UNIT_DELAY_PS(UNIT_DELAY_PS)
  ) u_clk_chain (
    .din (clk),
    .taps(clk_taps),
    .dout(chain_end)
  );

  stop_detector #(.N_TAPS(NUM_TAPS + 1)) u_detect (
    .taps       (clk_taps),
    .stop_detect(stop_raw)
  );

  // propagation delay of the all-equal logic
  if (DETECT_ELEMS > 0) begin : g_det_delay
    delay_chain #(
      .N_ELEMS      (DETECT_ELEMS),
      .TAP_STRIDE   (DETECT_ELEMS),
      .UNIT_DELAY_PS(UNIT_DELAY_PS)
    ) u_det_delay (
      .din (stop_raw),
      .taps(det_taps),
      .dout(stop_detect)
    );
  end else begin : g_det_nodelay
    assign stop_detect = stop_raw;
    assign det_taps    = {stop_raw, stop_raw};
  end

  // s1..sm -> delayed_edge
  delay_chain #(
    .N_ELEMS      (SEC_ELEMS),
    .TAP_STRIDE   (SEC_ELEMS),
    .UNIT_DELAY_PS(UNIT_DELAY_PS)
  ) u_sec_chain (
    .din (stop_detect),
    .taps(sec_taps),
    .dout(delayed_edge)
  );

  // clk_delay
  if (CLK_DELAY_ELEMS > 0) begin : g_clk_delay
    logic [1:0] cd_taps;
    delay_chain #(
      .N_ELEMS      (CLK_DELAY_ELEMS),
      .TAP_STRIDE   (CLK_DELAY_ELEMS),
      .UNIT_DELAY_PS(UNIT_DELAY_PS)
    ) u_clk_delay (
      .din (clk),
      .taps(cd_taps),
      .dout(clk_delayed)
    );
  end else begin : g_clk_nodelay
    assign clk_delayed = clk;
  end

  clk_mux u_clk_mux (
    .clk_in0(clk_delayed),
    .clk_in1(delayed_edge),
    .sel    (stop_detect),
    .clk_out(sys_clk)
  );
endmodule
