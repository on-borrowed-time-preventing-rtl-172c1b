// tb_delay_chain -- self-checking testbench for the delay_chain model.
//
// A rising and then a falling step are sent into the default chain
// (1914 elements of 190 ps, tapped every 66th element). Each tap k must
// still show the old level 1 ps before k*66*190 ps and the new level
// 1 ps after it; the chain end must switch at 1914*190 ps. A second,
// 5-element chain checks the unit delay on its own.
module tb_delay_chain;
  timeunit 1ps;
  timeprecision 1ps;

  localparam int STRIDE = bt_pkg::TAP_STRIDE;
  localparam int NT     = bt_pkg::NUM_TAPS;
  localparam int UD     = bt_pkg::UNIT_DELAY_PS;

  int checks = 0, failures = 0;
  logic din = 1'b0;
  logic [NT:0] taps;
  logic dout;
  logic small_in = 1'b0, small_out;
  logic [1:0] small_taps;

  delay_chain dut (.din(din), .taps(taps), .dout(dout));
  delay_chain #(.N_ELEMS(5), .TAP_STRIDE(5)) dut_small (.din(small_in), .taps(small_taps), .dout(small_out));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #10_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one step: sample every tap around its expected switching time
  task automatic step(input logic lvl);
    longint t0;
    #1000;
    t0 = $time;
    din = lvl;
    #0;
    check(taps[0] === lvl, "tap 0 must follow the input at once");
    for (int k = 1; k <= NT; k++) begin
      longint tk;
      tk = t0 + longint'(k * STRIDE * UD);
      #(tk - 1 - $time);
      check(taps[k] === ~lvl, $sformatf("tap %0d switched early", k));
      #2;
      check(taps[k] === lvl, $sformatf("tap %0d not switched at %0d ps", k, k * STRIDE * UD));
    end
    #(t0 + longint'(NT * STRIDE * UD) + 5 - $time);
    check(dout === lvl, "chain end not switched");
  endtask

  initial begin
    #100;
    step(1'b1);
    step(1'b0);
    // small chain: 5 * 190 ps
    small_in = 1'b1;
    #(5 * UD - 1);
    check(small_out === 1'b0, "small chain switched early");
    #2;
    check(small_out === 1'b1, "small chain not switched after 5 unit delays");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
