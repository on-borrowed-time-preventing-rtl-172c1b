// tb_stop_detector -- self-checking testbench for stop_detector.
//
// Drives all-zero and all-one tap vectors (clock stopped low / high),
// every one-hot and one-cold vector, and random mixed vectors; the
// expected output is computed by counting ones in the vector.
module tb_stop_detector;
  timeunit 1ps;
  timeprecision 1ps;

  localparam int N = bt_pkg::NUM_TAPS + 1;

  int checks = 0, failures = 0;
  logic [N-1:0] taps;
  logic         stop_detect;

  stop_detector dut (.taps(taps), .stop_detect(stop_detect));

  task automatic apply(input logic [N-1:0] v);
    int ones;
    bit exp;
    taps = v;
    #10;
    ones = $countones(v);
    exp  = (ones == 0) || (ones == N);
    checks++;
    if (stop_detect !== exp) begin
      failures++;
      $display("FAIL: taps=%b stop_detect=%b expected %b", v, stop_detect, exp);
    end
  endtask

  initial begin
    #1_000_000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    apply('0);
    apply('1);
    for (int i = 0; i < N; i++) begin
      apply(N'(1) << i);
      apply(~(N'(1) << i));
    end
    for (int i = 0; i < 200; i++) begin
      logic [N-1:0] v;
      v = N'({$urandom, $urandom});
      apply(v);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
