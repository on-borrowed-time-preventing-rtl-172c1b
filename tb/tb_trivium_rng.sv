// tb_trivium_rng -- self-checking testbench for trivium_rng.
//
// A bit-serial reference written from the cipher's three-register
// description (A: 93 bits, B: 84 bits, C: 111 bits) produces the expected
// keystream. Two instances are checked: 128 bits per clock (AES state
// clear) and 64 bits per clock (one SKINNY share). Checks: the warm-up
// length (9 and 18 clocks), every output word for 24 clocks, and that the
// output holds still while the clock is stopped.
module tb_trivium_rng;
  timeunit 1ps;
  timeprecision 1ps;

  localparam logic [79:0] KEY = bt_pkg::TRIVIUM_KEY;
  localparam logic [79:0] IV  = bt_pkg::TRIVIUM_IV;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  logic clk_run = 1'b1;
  logic rst_n = 1'b1;

  logic [127:0] rnd128;
  logic [63:0]  rnd64;
  logic         rdy128, rdy64;

  trivium_rng #(.RNG_BITS(128)) dut128 (.clk(clk), .rst_n(rst_n), .rnd(rnd128), .ready(rdy128));
  trivium_rng #(.RNG_BITS(64))  dut64  (.clk(clk), .rst_n(rst_n), .rnd(rnd64),  .ready(rdy64));

  always #5000 if (clk_run) clk = ~clk;

  // reference keystream, bit-serial
  bit A[1:93];
  bit B[1:84];
  bit C[1:111];

  function automatic bit ref_step();
    bit t1, t2, t3, z;
    t1 = A[66] ^ A[93];
    t2 = B[69] ^ B[84];
    t3 = C[66] ^ C[111];
    z  = t1 ^ t2 ^ t3;
    t1 = t1 ^ (A[91] & A[92]) ^ B[78];
    t2 = t2 ^ (B[82] & B[83]) ^ C[87];
    t3 = t3 ^ (C[109] & C[110]) ^ A[69];
    for (int i = 93; i > 1; i--)  A[i] = A[i-1];
    for (int i = 84; i > 1; i--)  B[i] = B[i-1];
    for (int i = 111; i > 1; i--) C[i] = C[i-1];
    A[1] = t3; B[1] = t1; C[1] = t2;
    return z;
  endfunction

  task automatic ref_seed();
    for (int i = 1; i <= 93; i++)  A[i] = 1'b0;
    for (int i = 1; i <= 84; i++)  B[i] = 1'b0;
    for (int i = 1; i <= 111; i++) C[i] = 1'b0;
    for (int i = 1; i <= 80; i++) begin
      A[i] = KEY[i-1];
      B[i] = IV[i-1];
    end
    C[109] = 1'b1; C[110] = 1'b1; C[111] = 1'b1;
    for (int i = 0; i < 1152; i++) void'(ref_step());
  endtask

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  logic [127:0] exp128;
  logic [63:0]  exp64a, exp64b;
  logic [127:0] hold;
  int n;

  initial begin
    // watchdog
    #(50_000_000);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_seed();
    #100 rst_n = 1'b0;
    #11900;
    rst_n = 1'b1;
    // warm-up: 128-bit instance ready after 9 edges, 64-bit after 18
    n = 0;
    while (!rdy128) begin @(posedge clk); #1; n++; end
    check(n == 9, $sformatf("128-bit warm-up took %0d clocks, expected 9", n));
    // 64-bit instance is 9 clocks behind in warm-up
    check(!rdy64, "64-bit instance ready too early");
    // 128-bit stream: rnd of 128 covers 128 steps, the 64-bit instance (after
    // its own warm-up) covers the same stream in halves
    for (int c = 0; c < 24; c++) begin
      for (int b = 0; b < 128; b++) exp128[b] = ref_step();
      check(rnd128 === exp128, $sformatf("128-bit word %0d: got %h exp %h", c, rnd128, exp128));
      @(posedge clk); #1;
      n++;
    end
    // 64-bit instance: restart both with a reset and compare against a fresh reference
    rst_n = 1'b0; #1; rst_n = 1'b1;
    ref_seed();
    n = 0;
    while (!rdy64) begin @(posedge clk); #1; n++; end
    check(n == 18, $sformatf("64-bit warm-up took %0d clocks, expected 18", n));
    for (int c = 0; c < 24; c++) begin
      for (int b = 0; b < 64; b++) exp64a[b] = ref_step();
      check(rnd64 === exp64a, $sformatf("64-bit word %0d: got %h exp %h", c, rnd64, exp64a));
      @(posedge clk); #1;
    end
    // output must hold while the clock is stopped
    clk_run = 1'b0;   // clock now held at its current level
    hold = rnd128;
    #200000;
    check(rnd128 === hold, "128-bit output changed with the clock stopped");
    clk_run = 1'b1;
    #20000;
    check(rnd128 !== hold, "128-bit output did not advance after the clock restarted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
