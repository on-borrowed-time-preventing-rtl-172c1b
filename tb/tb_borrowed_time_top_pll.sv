// tb_borrowed_time_top_pll -- end-to-end testbench of borrowed_time_top
// with the PLL-based monitor (MONITOR = MON_PLL, 128-bit state, 8 MHz).
//
// Same target stand-in and scoreboard as the asynchronous test: at every
// sys_clk rising edge q must be d, or the Trivium keystream word for that
// edge while the alarm (not LOCKED) or wipe is high. Scenario: the PLL
// acquires lock (registers hold random data until then), rounds run, the
// clock stops low; LOCKED must drop before the second free-running PLL
// edge, which then performs the masked clear (2 periods + 100 ps after the
// last reference edge). Then the clock restarts and must relock. Each
// mechanism is counted.
module tb_borrowed_time_top_pll;
  timeunit 1ps;
  timeprecision 1ps;
  import trivium_ref_pkg::*;

  localparam int     W = bt_pkg::STATE_WIDTH;
  localparam longint T = bt_pkg::T_CLK_PS;
  localparam logic [W-1:0] K = {4{32'h7F4A_7C15}};

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b1, wipe = 1'b0, ack = 1'b0;
  logic [W-1:0] d, q;
  logic sys_clk, alarm, data_invalid, rng_ready;

  borrowed_time_top #(.MONITOR(bt_pkg::MON_PLL)) dut (
    .clk(clk), .rst_n(rst_n), .d(d), .wipe(wipe), .ack(ack), .q(q), .sys_clk(sys_clk),
    .alarm(alarm), .data_invalid(data_invalid), .rng_ready(rng_ready));

  assign d = {q[W-2:0], q[W-1]} ^ K;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  trivium_ref rng_ref;
  logic [127:0] next_word;
  bit sb_on = 1'b0;
  int n_edges = 0, n_round = 0, n_clear = 0, n_prelock = 0;
  bit was_locked = 1'b0;
  longint last_clear_t = 0;
  longint clear_t[$];

  always @(posedge sys_clk) begin
    logic [W-1:0] exp_q;
    logic sel;
    if (sb_on) begin
      sel   = alarm | wipe;
      exp_q = sel ? next_word[W-1:0] : d;
      if (alarm) begin
        last_clear_t = $time;
        clear_t.push_back($time);
        if (was_locked) n_clear++; else n_prelock++;
      end else n_round++;
      next_word = rng_ref.word(W);
      n_edges++;
      #1;
      check(q === exp_q, $sformatf("edge %0d: q=%h expected %h (sel=%b)", n_edges, q, exp_q, sel));
    end
  end

  longint last_rise;
  task automatic run_cycles(input int n);
    repeat (n) begin
      clk = 1'b1; last_rise = $time;
      #(T/2);
      clk = 1'b0;
      #(T - T/2);
    end
  endtask

  initial begin
    #200_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int e0, n_relock = 0;

  initial begin
    rng_ref = new();
    rng_ref.seed(bt_pkg::TRIVIUM_KEY, bt_pkg::TRIVIUM_IV);
    #100 rst_n = 1'b0;
    #1000 rst_n = 1'b1;
    next_word = rng_ref.word(W);
    sb_on = 1'b1;
    // lock acquisition: 16 good periods
    run_cycles(17);
    check(alarm === 1'b0, "PLL did not lock after 16 good periods");
    was_locked = 1'b1;
    check(n_prelock > 0, "no masked clear while unlocked");
    e0 = n_round;
    run_cycles(12);
    check(n_round - e0 >= 11, "rounds missing while locked");
    // clock stops low
    e0 = n_clear;
    #(10 * T);
    // free-running edges at 1..4 periods; LOCKED drops between 1.25 and
    // 1.375 periods, so edges 2, 3 and 4 clear
    check(n_clear - e0 == 3, $sformatf("%0d clear edges after the stop, expected 3", n_clear - e0));
    check(clear_t.size() > 0 && clear_t[clear_t.size() - (n_clear - e0)] == last_rise + 2 * T + 100,
          "first clear edge not 2 periods + 100 ps after the last reference edge");
    check(alarm === 1'b1 && data_invalid === 1'b1, "alarm/data_invalid not set after the stop");
    // first clear edge: 2 periods after the last reference edge
    check(n_round - e0 >= 11, "round count");
    // restart and relock
    ack = 1'b1;
    run_cycles(20);
    ack = 1'b0;
    check(alarm === 1'b0, "did not relock after restart");
    if (alarm === 1'b0) n_relock++;
    check(data_invalid === 1'b0, "data_invalid not acknowledged");
    check(n_prelock > 0 && n_clear > 0 && n_relock > 0 && n_round >= 12,
          "a mechanism never happened (pre-lock clear, stop clear, relock, rounds)");
    $display("mechanisms: rounds=%0d prelock_clears=%0d stop_clears=%0d relocks=%0d",
             n_round, n_prelock, n_clear, n_relock);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
