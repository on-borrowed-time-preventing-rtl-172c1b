// tb_clk_mux -- self-checking testbench for clk_mux.
//
// Two free-running clocks of different periods are applied; the select
// is switched at random times, and at every sample the output is
// compared with the selected input.
module tb_clk_mux;
  timeunit 1ps;
  timeprecision 1ps;

  int checks = 0, failures = 0;
  logic a = 1'b0, b = 1'b0, sel = 1'b0, y;

  clk_mux dut (.clk_in0(a), .clk_in1(b), .sel(sel), .clk_out(y));

  always #700 a = ~a;
  always #1100 b = ~b;

  initial begin
    #10_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 400; i++) begin
      #($urandom_range(50, 400));
      if (($urandom % 8) == 0) sel = ~sel;
      #1;
      checks++;
      if (y !== (sel ? b : a)) begin
        failures++;
        $display("FAIL: sel=%b a=%b b=%b y=%b", sel, a, b, y);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
