// borrowed_time_top -- stopped-clock countermeasure wrapped around the
// sensitive register bank of a target circuit.
//
// Static side-channel attacks (static power analysis, laser logic state
// imaging, impedance analysis) need the target's clock to stand still for
// hundreds of microseconds while secret data sits in flip-flops. This
// block watches the incoming clock and, as soon as it stops, overwrites
// the sensitive registers with fresh random bits, within about one clock
// period.
//
// Structure:
//   * clock monitor, chosen by MONITOR:
//       MON_ASYNC  async_clock_monitor (delay chain, all-equal detector,
//                  delayed_edge, clk_mux); alarm = stop_detect; works in
//                  clock-gated systems.
//       MON_PLL    pll_model; alarm = not LOCKED; sys_clk is the PLL
//                  output, whose brief free-running ticks latch the clear.
//   * trivium_rng, clocked by sys_clk, RNG_BITS = WIDTH random bits that
//     stay valid while the clock is stopped.
//   * masked_clear_reg: data_mux + the sensitive registers, clocked by
//     sys_clk; loads d normally, rnd while alarm or wipe is high.
// The target's combinational logic stays outside: it reads q and drives
// d, and it should clock its other (non-sensitive) registers from sys_clk.
//
// Interface: clk (incoming clock), rst_n (asynchronous power-up reset of
// registers and RNG; never driven by the alarm), d / q (target register
// inputs / outputs), wipe (target requests a masked clear, e.g. after an
// encryption, synchronous to sys_clk), ack (master acknowledges
// data_invalid), sys_clk, alarm, data_invalid (sticky: a clear has
// destroyed the current operation), rng_ready.
// Timing: q follows d one sys_clk edge later. In the async variant sys_clk
// is clk delayed by clk_delay (570 ps by default).
// The alarm-to-data_mux and alarm-to-clk_mux wiring follow the design;
// the wipe input, the sticky data_invalid flag and the rng_ready output
// realise recommendations of the design in this design's own way.
module borrowed_time_top #(
  parameter bt_pkg::monitor_e MONITOR = bt_pkg::MON_ASYNC,
  parameter int unsigned      WIDTH   = bt_pkg::STATE_WIDTH
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] d,
  input  logic             wipe,
  input  logic             ack,
  output logic [WIDTH-1:0] q,
  output logic             sys_clk,
  output logic             alarm,
  output logic             data_invalid,
  output logic             rng_ready
);
  timeunit 1ps;
  timeprecision 1ps;

  logic [WIDTH-1:0] rnd;

  if (MONITOR == bt_pkg::MON_ASYNC) begin : g_async
    logic                      delayed_edge;
    logic [bt_pkg::NUM_TAPS:0] clk_taps;
    async_clock_monitor u_monitor (
      .clk         (clk),
      .sys_clk     (sys_clk),
      .stop_detect (alarm),
      .delayed_edge(delayed_edge),
      .clk_taps    (clk_taps)
    );
  end else begin : g_pll
    logic locked;
    pll_model u_pll (
      .clk_in (clk),
      .clk_out(sys_clk),
      .locked (locked)
    );
    assign alarm = ~locked;
  end

  trivium_rng #(.RNG_BITS(WIDTH)) u_rng (
    .clk  (sys_clk),
    .rst_n(rst_n),
    .rnd  (rnd),
    .ready(rng_ready)
  );

  masked_clear_reg #(.WIDTH(WIDTH)) u_regs (
    .clk      (sys_clk),
    .rst_n    (rst_n),
    .clear_sel(alarm | wipe),
    .d        (d),
    .rnd      (rnd),
    .ack      (ack),
    .q        (q),
    .cleared  (data_invalid)
  );
endmodule
