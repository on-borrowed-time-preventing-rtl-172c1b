// tb_async_clock_monitor -- self-checking testbench for
// async_clock_monitor at its default sizes (29 taps of 66 x 190 ps,
// 8 MHz clock).
//
// Expected times are derived from the parameters, not from the DUT:
//   t_n   = 29*66*190 ps = 363.66 ns   (span of the clock taps)
//   t_det = 2*190 ps                  (modelled detector delay)
//   t_m   = 329*190 ps = 62.51 ns     (secondary chain)
//   t_cd  = 3*190 ps                  (clk_delay)
// Checks:
//   * running clock: sys_clk rises t_cd after every clk edge, stop_detect
//     never rises;
//   * clock stopped low: stop_detect rises t_n+t_det after the last fall,
//     sys_clk gets exactly one rising edge, t_m later;
//   * clock stopped high: same timing from the last rise, sys_clk falls at
//     detection and rises once, t_m later;
//   * restart: stop_detect drops t_det after the first edge, which reaches
//     sys_clk t_cd after it, with no extra edge;
//   * glitch pulse on a stopped clock: reaches sys_clk through clk_delay;
//     a second instance without clk_delay shows the pulse being lost.
module tb_async_clock_monitor;
  timeunit 1ps;
  timeprecision 1ps;

  localparam longint T     = bt_pkg::T_CLK_PS;
  localparam longint UD    = bt_pkg::UNIT_DELAY_PS;
  localparam longint T_N   = longint'(bt_pkg::NUM_TAPS * bt_pkg::TAP_STRIDE) * UD;
  localparam longint T_DET = longint'(bt_pkg::DETECT_ELEMS) * UD;
  localparam longint T_M   = longint'(bt_pkg::SEC_ELEMS) * UD;
  localparam longint T_CD  = longint'(bt_pkg::CLK_DELAY_ELEMS) * UD;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  logic sys_clk, stop_detect, delayed_edge;
  logic [bt_pkg::NUM_TAPS:0] clk_taps;
  logic nv_sys_clk, nv_stop, nv_de;
  logic [bt_pkg::NUM_TAPS:0] nv_taps;

  async_clock_monitor dut (.clk(clk), .sys_clk(sys_clk), .stop_detect(stop_detect),
                           .delayed_edge(delayed_edge), .clk_taps(clk_taps));
  async_clock_monitor #(.CLK_DELAY_ELEMS(0)) naive (.clk(clk), .sys_clk(nv_sys_clk),
                           .stop_detect(nv_stop), .delayed_edge(nv_de), .clk_taps(nv_taps));

  longint sys_rise[$];
  longint sys_fall[$];
  longint det_rise[$];
  longint det_fall[$];
  longint nv_rise[$];
  always @(posedge sys_clk)     sys_rise.push_back($time);
  always @(negedge sys_clk)     sys_fall.push_back($time);
  always @(posedge stop_detect) det_rise.push_back($time);
  always @(negedge stop_detect) det_fall.push_back($time);
  always @(posedge nv_sys_clk)  nv_rise.push_back($time);

  function automatic int count_in(ref longint q[$], input longint a, input longint b);
    int n = 0;
    foreach (q[i]) if (q[i] >= a && q[i] <= b) n++;
    return n;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  longint clk_rise[$];
  task automatic run_cycles(input int n);
    repeat (n) begin
      clk = 1'b1; clk_rise.push_back($time);
      #(T/2);
      clk = 1'b0;
      #(T - T/2);
    end
  endtask

  initial begin
    #100_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint t_last, t0;

  initial begin
    #1_000_000;                       // chain settles at the stopped-low level
    // ---- running clock
    t0 = $time;
    run_cycles(12);
    // rises after the chain has filled with a running clock
    foreach (clk_rise[i]) begin
      check(count_in(sys_rise, clk_rise[i] + T_CD, clk_rise[i] + T_CD) == 1,
            $sformatf("sys_clk did not rise t_cd after clk edge %0d", i));
    end
    check(count_in(det_rise, t0 + T_N + T_DET + 1, $time) == 0, "false stop_detect with a running clock");
    check(count_in(sys_rise, t0, $time) == 12, "sys_clk edge count while running");
    // ---- stop low (last fall was T/2 ago)
    t_last = $time - (T - T/2);
    #2_000_000;
    check(count_in(det_rise, t_last + T_N + T_DET, t_last + T_N + T_DET) == 1,
          "stop_detect did not rise t_n+t_det after the clock stopped low");
    check(count_in(sys_rise, t_last + 1, $time) == 1, "not exactly one clear edge (stopped low)");
    check(count_in(sys_rise, t_last + T_N + T_DET + T_M, t_last + T_N + T_DET + T_M) == 1,
          "clear edge not t_m after detection (stopped low)");
    check(delayed_edge === 1'b1 && stop_detect === 1'b1, "alarm levels while stopped low");
    // ---- restart
    t0 = $time;
    clk_rise.delete();
    run_cycles(1);
    check(count_in(det_fall, t0 + T_DET, t0 + T_DET) == 1, "stop_detect did not drop t_det after restart");
    check(count_in(sys_rise, t0, $time) == 1 && count_in(sys_rise, t0 + T_CD, t0 + T_CD) == 1,
          "first restart edge not passed to sys_clk exactly once");
    run_cycles(6);
    // ---- stop high
    clk = 1'b1;
    t_last = $time;
    #2_000_000;
    check(count_in(det_rise, t_last + T_N + T_DET, t_last + T_N + T_DET) == 1,
          "stop_detect did not rise t_n+t_det after the clock stopped high");
    check(count_in(sys_fall, t_last + T_N + T_DET, t_last + T_N + T_DET) == 1,
          "sys_clk did not fall to delayed_edge at detection (stopped high)");
    check(count_in(sys_rise, t_last + T_CD + 1, $time) == 1, "not exactly one clear edge (stopped high)");
    check(count_in(sys_rise, t_last + T_N + T_DET + T_M, t_last + T_N + T_DET + T_M) == 1,
          "clear edge not t_m after detection (stopped high)");
    clk = 1'b0;
    #2_000_000;
    // ---- glitch pulse of 300 ps on the stopped clock
    t0 = $time;
    clk = 1'b1;
    #300;
    clk = 1'b0;
    #1000;
    check(count_in(sys_rise, t0 + T_CD, t0 + T_CD) == 1, "glitch pulse did not reach sys_clk through clk_delay");
    check(count_in(nv_rise, t0, t0 + T_DET + 299) == 0, "naive variant passed the glitch pulse");
    #2_000_000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
