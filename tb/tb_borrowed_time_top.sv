// tb_borrowed_time_top -- end-to-end testbench of borrowed_time_top at
// its default parameters (asynchronous monitor, 128-bit state, 8 MHz).
//
// A stand-in for the target's round logic (d = rotate-left(q) ^ K, the
// real AES/SKINNY datapath is outside this design) drives d from q. A
// scoreboard predicts q at every sys_clk rising edge: d when neither the
// alarm nor wipe is high, otherwise the Trivium keystream word for that
// edge, taken from an independent bit-serial reference.
// Scenario: reset with the clock stopped, RNG warm-up, rounds, an
// end-of-operation wipe, clock stopped low (gated clock), restart, clock
// stopped high (attacker), restart, a 300 ps glitch pulse on a stopped
// clock. Each mechanism is counted and must occur at least once; the time
// from the last clock edge to the clear edge must be t_n + t_det + t_m
// and below 1 us.
module tb_borrowed_time_top;
  timeunit 1ps;
  timeprecision 1ps;
  import trivium_ref_pkg::*;

  localparam int     W     = bt_pkg::STATE_WIDTH;
  localparam longint T     = bt_pkg::T_CLK_PS;
  localparam longint UD    = bt_pkg::UNIT_DELAY_PS;
  localparam longint T_N   = longint'(bt_pkg::NUM_TAPS * bt_pkg::TAP_STRIDE) * UD;
  localparam longint T_DET = longint'(bt_pkg::DETECT_ELEMS) * UD;
  localparam longint T_M   = longint'(bt_pkg::SEC_ELEMS) * UD;
  localparam longint T_CD  = longint'(bt_pkg::CLK_DELAY_ELEMS) * UD;
  localparam logic [W-1:0] K = {4{32'h9E37_79B9}};

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b1, wipe = 1'b0, ack = 1'b0;
  logic [W-1:0] d, q;
  logic sys_clk, alarm, data_invalid, rng_ready;

  borrowed_time_top dut (.clk(clk), .rst_n(rst_n), .d(d), .wipe(wipe), .ack(ack), .q(q),
                         .sys_clk(sys_clk), .alarm(alarm), .data_invalid(data_invalid),
                         .rng_ready(rng_ready));

  // target round logic stand-in
  assign d = {q[W-2:0], q[W-1]} ^ K;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---- scoreboard
  trivium_ref rng_ref;
  logic [127:0] next_word;
  bit  sb_on = 1'b0;
  bit  clk_high_at_stop;
  int  n_edges = 0, n_round = 0, n_wipe = 0, n_clear_low = 0, n_clear_high = 0;
  longint last_clear_t = 0;

  always @(posedge sys_clk) begin
    logic [W-1:0] exp_q;
    logic         sel;
    if (sb_on) begin
      sel   = alarm | wipe;
      exp_q = sel ? next_word[W-1:0] : d;
      if (alarm) begin
        last_clear_t = $time;
        if (clk) n_clear_high++; else n_clear_low++;
      end else if (wipe) n_wipe++;
      else n_round++;
      next_word = rng_ref.word(W);
      n_edges++;
      #1;
      check(q === exp_q, $sformatf("edge %0d: q=%h expected %h (sel=%b)", n_edges, q, exp_q, sel));
    end
  end

  longint clk_edge_t;
  task automatic run_cycles(input int n);
    repeat (n) begin
      clk = 1'b1; clk_edge_t = $time;
      #(T/2);
      clk = 1'b0; clk_edge_t = $time;
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

  longint t_stop, t0;
  int     n_glitch = 0, n_invalid = 0, n_ack = 0, n_restart = 0, n_ready = 0;
  int     e0;

  initial begin
    rng_ref = new();
    rng_ref.seed(bt_pkg::TRIVIUM_KEY, bt_pkg::TRIVIUM_IV);
    #100 rst_n = 1'b0;
    #1_000_000;                    // chain settles with the clock stopped
    rst_n = 1'b1;
    next_word = rng_ref.word(W);
    sb_on = 1'b1;
    check(q == '0, "q not zero after reset");
    // ---- RNG warm-up and rounds
    run_cycles(9);
    check(rng_ready === 1'b1, "RNG not ready after 9 clocks");
    if (rng_ready) n_ready++;
    run_cycles(10);
    // ---- end-of-operation wipe for one clock (the clock is low here)
    wipe = 1'b1; run_cycles(1); wipe = 1'b0;
    check(data_invalid === 1'b1, "wipe did not raise data_invalid");
    ack = 1'b1; run_cycles(1); ack = 1'b0;
    check(data_invalid === 1'b0, "ack did not clear data_invalid");
    if (!data_invalid) n_ack++;
    run_cycles(3);
    // ---- clock stopped low (gated)
    t_stop = clk_edge_t;
    e0 = n_clear_low;
    #2_000_000;
    check(n_clear_low == e0 + 1, "no single masked clear with the clock stopped low");
    check(last_clear_t == t_stop + T_N + T_DET + T_M, $sformatf("clear %0d ps after the stop, expected %0d",
          last_clear_t - t_stop, T_N + T_DET + T_M));
    check(last_clear_t - t_stop < 1_000_000, "clear later than 1 us");
    check(data_invalid === 1'b1 && alarm === 1'b1, "alarm/data_invalid not set while stopped low");
    if (data_invalid) n_invalid++;
    // ---- restart: the first edge must be a normal round
    e0 = n_round;
    run_cycles(1);
    check(n_round == e0 + 1 && alarm === 1'b0, "first edge after restart was not a normal round");
    if (n_round == e0 + 1) n_restart++;
    ack = 1'b1; run_cycles(1); ack = 1'b0;
    run_cycles(4);
    // ---- clock stopped high (attacker)
    clk = 1'b1; clk_edge_t = $time;
    t_stop = clk_edge_t;
    e0 = n_clear_high;
    #2_000_000;
    check(n_clear_high == e0 + 1, "no single masked clear with the clock stopped high");
    check(last_clear_t == t_stop + T_N + T_DET + T_M, "clear time wrong (stopped high)");
    // ---- restart with a falling edge, then rounds
    clk = 1'b0;
    #(T - T/2);
    e0 = n_round;
    run_cycles(3);
    check(n_round == e0 + 3, "rounds after restart from high");
    if (n_round == e0 + 3) n_restart++;
    // ---- glitch pulse on a stopped clock
    #2_000_000;
    e0 = n_edges;
    t0 = $time;
    clk = 1'b1; #300; clk = 1'b0;
    #(T_DET + T_CD + 1000);
    check(n_edges > e0, "glitch pulse gave the registers no edge");
    if (n_edges > e0) n_glitch++;
    #2_000_000;
    // ---- every mechanism must have happened
    check(n_ready > 0,      "mechanism never seen: RNG warm-up");
    check(n_round >= 20,    "mechanism never seen: normal rounds");
    check(n_wipe > 0,       "mechanism never seen: end-of-operation wipe");
    check(n_clear_low > 0,  "mechanism never seen: clear on clock stopped low");
    check(n_clear_high > 0, "mechanism never seen: clear on clock stopped high");
    check(n_restart >= 2,   "mechanism never seen: restart after a stop");
    check(n_invalid > 0,    "mechanism never seen: data_invalid to the master");
    check(n_ack > 0,        "mechanism never seen: data_invalid acknowledge");
    check(n_glitch > 0,     "mechanism never seen: glitch pulse passed through clk_delay");
    $display("mechanisms: rounds=%0d wipes=%0d clears_low=%0d clears_high=%0d restarts=%0d invalid=%0d acks=%0d glitches=%0d",
             n_round, n_wipe, n_clear_low, n_clear_high, n_restart, n_invalid, n_ack, n_glitch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
