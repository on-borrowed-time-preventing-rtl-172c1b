// stop_detector -- combinational "all inputs equal" clock-stop detector.
//
// The taps of the clock delay chain are copies of the incoming clock
// sampled at different moments of the recent past. While the clock runs,
// the sampled span exceeds half a clock period, so at least one tap is 1
// and one is 0. If all taps read 0 the clock has stopped low; if all read
// 1 it has stopped high. In both cases stop_detect goes high.
//
// Interface: `taps` (N_TAPS bits, tap 0 = undelayed clock c0), output
// `stop_detect`. Purely combinational, no clock, no reset.
// The function is the one given for the design; writing it as an AND
// reduction ORed with a NOR reduction is this design's choice (the FPGA
// build maps it onto LUT6s).
module stop_detector #(
  parameter int unsigned N_TAPS = bt_pkg::NUM_TAPS + 1
) (
  input  logic [N_TAPS-1:0] taps,
  output logic              stop_detect
);
  timeunit 1ps;
  timeprecision 1ps;

  always_comb begin
    stop_detect = (&taps) | ~(|taps);
  end
endmodule
