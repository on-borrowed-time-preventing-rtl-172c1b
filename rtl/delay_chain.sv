// delay_chain -- behavioural model of a chain of unit delay elements.
//
// Behavioural model (not synthesizable logic): each element is a buffer
// with a propagation delay of UNIT_DELAY_PS, written as a delayed
// continuous assignment. On silicon or an FPGA the elements are physical
// cells (LUT1s in the 7 Series build) whose delay is set by placement and
// routing, which no RTL can express; this model reproduces their timing
// for simulation only.
//
// The chain takes `din` and produces N_ELEMS time-shifted copies of it.
// Every TAP_STRIDE-th element is brought out on `taps`: taps[0] is the
// input itself (c0), taps[k] is element k*TAP_STRIDE (delay
// k*TAP_STRIDE*UNIT_DELAY_PS). `dout` is the last element.
// The same model is used for the clock-sampling chain (c0..cn), the
// secondary chain (s1..sm) that forms delayed_edge, the clk_delay buffer
// and the propagation delay of the all-equal logic.
// Unit delay, tap stride and tap count follow the 7 Series build
// described for the design; everything else is this model's own.
module delay_chain #(
  parameter int unsigned N_ELEMS       = bt_pkg::TAP_STRIDE * bt_pkg::NUM_TAPS,
  parameter int unsigned TAP_STRIDE    = bt_pkg::TAP_STRIDE,
  parameter int unsigned UNIT_DELAY_PS = bt_pkg::UNIT_DELAY_PS
) (
  input  logic                         din,
  output logic [N_ELEMS/TAP_STRIDE:0]  taps,
  output logic                         dout
);
  timeunit 1ps;
  timeprecision 1ps;

  logic [N_ELEMS:0] stage;

  assign stage[0] = din;

  for (genvar i = 0; i < int'(N_ELEMS); i++) begin : g_elem
    assign #(UNIT_DELAY_PS) stage[i+1] = stage[i];
  end

  for (genvar k = 0; k <= int'(N_ELEMS / TAP_STRIDE); k++) begin : g_tap
    assign taps[k] = stage[k*TAP_STRIDE];
  end

  assign dout = stage[N_ELEMS];
endmodule
