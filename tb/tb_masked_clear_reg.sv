// tb_masked_clear_reg -- self-checking testbench for masked_clear_reg.
//
// Random target data and random "RNG" words are applied; a scoreboard
// predicts q (d when clear_sel is low, rnd when high) and the sticky
// cleared flag (set by a clear, dropped by ack). Also checks the reset
// value and that q holds while the clock is stopped.
module tb_masked_clear_reg;
  timeunit 1ps;
  timeprecision 1ps;

  localparam int W = bt_pkg::STATE_WIDTH;

  int checks = 0, failures = 0;
  logic clk = 1'b0, rst_n = 1'b1, clear_sel = 1'b0, ack = 1'b0;
  logic clk_run = 1'b1;
  logic [W-1:0] d, rnd, q;
  logic cleared;
  logic [W-1:0] exp_q;
  logic exp_c;
  int n_clear = 0;

  masked_clear_reg dut (.clk(clk), .rst_n(rst_n), .clear_sel(clear_sel), .d(d),
                        .rnd(rnd), .ack(ack), .q(q), .cleared(cleared));

  always #5000 if (clk_run) clk = ~clk;

  function automatic logic [W-1:0] rand_word();
    logic [W-1:0] v;
    for (int i = 0; i < W; i += 32) v[i +: 32] = $urandom;
    return v;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #100_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    d = '0; rnd = '0;
    #100 rst_n = 1'b0;
    #900;
    check(q == '0 && !cleared, "reset value");
    rst_n = 1'b1;
    exp_q = '0; exp_c = 1'b0;
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      d         = rand_word();
      rnd       = rand_word();
      clear_sel = ($urandom % 4) == 0;
      ack       = ($urandom % 5) == 0;
      exp_q     = clear_sel ? rnd : d;
      if (clear_sel) begin exp_c = 1'b1; n_clear++; end
      else if (ack) exp_c = 1'b0;
      @(posedge clk); #1;
      check(q === exp_q, $sformatf("cycle %0d q=%h exp %h sel=%b", i, q, exp_q, clear_sel));
      check(cleared === exp_c, $sformatf("cycle %0d cleared=%b exp %b", i, cleared, exp_c));
    end
    // with the clock stopped, changing inputs must not change q
    clk_run = 1'b0;
    exp_q = q;
    d = rand_word(); rnd = rand_word(); clear_sel = 1'b1;
    #50000;
    check(q === exp_q, "q changed without a clock edge");
    check(n_clear > 0, "no clear exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
