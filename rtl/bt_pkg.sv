// bt_pkg -- constants and types shared by the stopped-clock countermeasure.
//
// The numbers mirror the FPGA build described for the AES target: a chain
// of 190 ps unit delays, tapped every 66th element up to element 1914
// (29 taps, about 364 ns of clock history), an 8 MHz core clock and a
// 128-bit sensitive state cleared with 128 random bits per cycle.
// The secondary-chain length, the clk_delay length and the modelled delay
// of the all-equal logic are not given numerically and are this design's
// choices (secondary chain about half a clock period; clk_delay longer
// than the detector delay, as required).
package bt_pkg;
  timeunit 1ps;
  timeprecision 1ps;

  // Delay-chain timing (7 Series build)
  localparam int unsigned UNIT_DELAY_PS    = 190;
  localparam int unsigned TAP_STRIDE       = 66;
  localparam int unsigned NUM_TAPS         = 29;     // taps c1..cn; c0 is the clock itself
  // Secondary chain s1..sm: t_m close to half of the 125 ns clock period
  localparam int unsigned SEC_ELEMS        = 329;    // 329 * 190 ps = 62.5 ns
  // Modelled propagation delay of the all-equal logic and of clk_delay
  localparam int unsigned DETECT_ELEMS     = 2;      // 380 ps
  localparam int unsigned CLK_DELAY_ELEMS  = 3;      // 570 ps: above DETECT_ELEMS, below it plus a short pulse

  // Operating point
  localparam int unsigned T_CLK_PS         = 125_000; // 8 MHz

  // Sensitive state and randomness
  localparam int unsigned STATE_WIDTH      = 128;
  localparam int unsigned RNG_BITS         = 128;

  // Trivium
  localparam int unsigned TRIVIUM_WARMUP   = 4 * 288; // initialisation rounds
  localparam logic [79:0] TRIVIUM_KEY      = 80'h0F62_B5085_BAE0_154A_7C4;
  localparam logic [79:0] TRIVIUM_IV       = 80'h288F_F65D_C42B_92F9_60C7;

  // Clock-monitor variant
  typedef enum logic {
    MON_ASYNC = 1'b0,   // asynchronous delay-chain monitor
    MON_PLL   = 1'b1    // PLL LOCKED-based monitor
  } monitor_e;
endpackage
