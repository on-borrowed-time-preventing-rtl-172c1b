// masked_clear_reg -- the target's sensitive registers with the data_mux
// that performs the masked clear.
//
// Normally the registers load the target's own next-state value `d`
// (data_mux input 0). While `clear_sel` is high (the stopped-clock alarm,
// or an explicit end-of-operation wipe) they load the RNG output `rnd`
// instead (input 1). Overwriting with random data rather than zeros
// avoids a burst of data-dependent 1->0 transitions. The alarm is not
// wired to the registers' reset: the clear happens on an active edge of
// `clk`, which the clock monitor supplies even when the real clock has
// stopped.
//
// `cleared` is a sticky flag for the master circuit ("data invalid"): it
// is set by any edge that loads random data and cleared by `ack`.
//
// Interface: clk (sys_clk), rst_n (asynchronous power-up reset to zero),
// clear_sel, d, rnd -> q, cleared. One clock of latency from d / rnd to q.
// The data_mux and its select polarity follow the design; the power-up
// reset value and the data-invalid flag are this design's choices.
module masked_clear_reg #(
  parameter int unsigned WIDTH = bt_pkg::STATE_WIDTH
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear_sel,
  input  logic [WIDTH-1:0] d,
  input  logic [WIDTH-1:0] rnd,
  input  logic             ack,
  output logic [WIDTH-1:0] q,
  output logic             cleared
);
  timeunit 1ps;
  timeprecision 1ps;

  logic [WIDTH-1:0] data_mux;

  always_comb begin
    data_mux = clear_sel ? rnd : d;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q       <= '0;
      cleared <= 1'b0;
    end else begin
      q <= data_mux;
      if (clear_sel)  cleared <= 1'b1;
      else if (ack)   cleared <= 1'b0;
    end
  end
endmodule
