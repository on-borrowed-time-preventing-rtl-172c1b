// clk_mux -- clock multiplexer feeding the protected registers.
//
// sel = 0 passes the (delayed) incoming clock, sel = 1 passes
// delayed_edge, a late copy of stop_detect that rises while the real
// clock is stopped and so provides the one active edge needed to latch
// random data into the sensitive registers. The FPGA builds use a
// BUFGCTRL / BUFGMUX primitive that switches between asynchronous
// clocks; here it is a plain combinational 2:1 multiplexer, which is what
// those primitives do at the logic level (their glitch suppression is a
// property of the physical cell and is not modelled).
//
// Interface: clk_in0, clk_in1, sel -> clk_out. Combinational.
module clk_mux (
  input  logic clk_in0,
  input  logic clk_in1,
  input  logic sel,
  output logic clk_out
);
  timeunit 1ps;
  timeprecision 1ps;

  always_comb begin
    clk_out = sel ? clk_in1 : clk_in0;
  end
endmodule
