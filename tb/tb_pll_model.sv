// tb_pll_model -- self-checking testbench for the pll_model behavioural
// PLL (defaults: 125 ns reference, lock after 16 good periods, 4
// free-running cycles, 100 ps output delay).
//
// Checks: LOCKED rises on the 17th reference edge (16 good periods) and
// not before; the output follows every reference rising edge 100 ps
// late; after the reference stops LOCKED is still high at 1.125 periods
// and low by 1.5 periods after the last edge (within one missed edge);
// the output gives exactly 4 more rising edges, one period apart; after
// relocking, a reference edge arriving too early (a glitch) drops LOCKED.
module tb_pll_model;
  timeunit 1ps;
  timeprecision 1ps;

  localparam longint P = bt_pkg::T_CLK_PS;

  int checks = 0, failures = 0;
  logic ref_clk = 1'b0;
  logic clk_out, locked;

  pll_model dut (.clk_in(ref_clk), .clk_out(clk_out), .locked(locked));

  longint out_rise[$];
  always @(posedge clk_out) out_rise.push_back($time);

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

  longint ref_rise[$];
  task automatic cycle();
    ref_clk = 1'b1; ref_rise.push_back($time);
    #(P/2);
    ref_clk = 1'b0;
    #(P - P/2);
  endtask

  initial begin
    #100_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint t_last;

  initial begin
    #1000;
    check(locked === 1'b0, "locked before any reference");
    for (int i = 1; i <= 16; i++) cycle();
    check(locked === 1'b0, "locked after only 15 good periods");
    cycle();
    check(locked === 1'b1, "not locked after 16 good periods");
    for (int i = 0; i < 8; i++) cycle();
    foreach (ref_rise[i])
      check(count_in(out_rise, ref_rise[i] + 100, ref_rise[i] + 100) == 1,
            $sformatf("output edge missing 100 ps after reference edge %0d", i));
    // stop the reference (held low)
    t_last = ref_rise[$];
    #(t_last + P + P/8 - $time);
    check(locked === 1'b1, "LOCKED dropped before a reference edge was missed");
    #(t_last + P + P/2 - $time);
    check(locked === 1'b0, "LOCKED still high half a period after a missed edge");
    #(10 * P);
    check(count_in(out_rise, t_last + 101, $time) == 4, "free-running output did not give 4 edges");
    for (int k = 1; k <= 4; k++)
      check(count_in(out_rise, t_last + 100 + k * P, t_last + 100 + k * P) == 1,
            $sformatf("free-running edge %0d not one period apart", k));
    // relock, then a glitch (edge after a third of a period)
    for (int i = 0; i < 20; i++) cycle();
    check(locked === 1'b1, "did not relock");
    ref_clk = 1'b1; #(P/6); ref_clk = 1'b0; #(P/6);
    ref_clk = 1'b1; #1;
    check(locked === 1'b0, "LOCKED survived a glitched reference period");
    ref_clk = 1'b0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
