// trivium_rng -- unrolled Trivium keystream generator used as the source
// of fresh random bits for the masked clear.
//
// Trivium keeps a 288-bit state s1..s288 in three shift registers. One
// step computes
//   t1 = s66 ^ s93,  t2 = s162 ^ s177,  t3 = s243 ^ s288,  z = t1^t2^t3
//   t1 ^= s91&s92 ^ s171,  t2 ^= s175&s176 ^ s264,  t3 ^= s286&s287 ^ s69
// and shifts t3 into s1, t1 into s94 and t2 into s178. The seed loads
// K1..K80 into s1..s80, IV1..IV80 into s94..s173 and ones into s286..s288;
// 4*288 steps are run before the keystream is used.
//
// This module performs RNG_BITS steps per clock (RNG_BITS = 128 for the
// AES state, 64 for one SKINNY share). `rnd` is the keystream of the next
// RNG_BITS steps computed combinationally from the current state
// (rnd[0] = first bit), so it stays valid while the clock is stopped,
// which the masked clear relies on. The warm-up takes
// ceil(1152 / RNG_BITS) clocks (9 for 128); `ready` is high afterwards.
//
// Interface: clk, rst_n (asynchronous, active low, loads the fixed seed;
// the stopped-clock alarm must never drive it), rnd, ready.
// Following the design: unrolled Trivium, fixed seed, RNG_BITS per cycle.
// This design's choices: the seed values, K_i = KEY[i-1] and
// IV_i = IV[i-1] bit order (no claim of matching published byte-ordered
// test vectors), and the ready flag.
module trivium_rng #(
  parameter int unsigned RNG_BITS = bt_pkg::RNG_BITS,
  parameter logic [79:0] KEY      = bt_pkg::TRIVIUM_KEY,
  parameter logic [79:0] IV       = bt_pkg::TRIVIUM_IV
) (
  input  logic                clk,
  input  logic                rst_n,
  output logic [RNG_BITS-1:0] rnd,
  output logic                ready
);
  timeunit 1ps;
  timeprecision 1ps;

  localparam int unsigned WARMUP_CYCLES =
      (bt_pkg::TRIVIUM_WARMUP + RNG_BITS - 1) / RNG_BITS;
  localparam int unsigned CW = $clog2(WARMUP_CYCLES + 1);

  typedef logic [288:1] tstate_t;

  function automatic tstate_t seed_state();
    tstate_t s;
    s = '0;
    for (int i = 1; i <= 80; i++) begin
      s[i]      = KEY[i-1];
      s[93 + i] = IV[i-1];
    end
    s[286] = 1'b1;
    s[287] = 1'b1;
    s[288] = 1'b1;
    return s;
  endfunction

  tstate_t         state_q, state_d;
  logic [CW-1:0]   warm_q;

  always_comb begin
    tstate_t s;
    logic    t1, t2, t3;
    s   = state_q;
    rnd = '0;
    for (int b = 0; b < int'(RNG_BITS); b++) begin
      t1 = s[66]  ^ s[93];
      t2 = s[162] ^ s[177];
      t3 = s[243] ^ s[288];
      rnd[b] = t1 ^ t2 ^ t3;
      t1 = t1 ^ (s[91]  & s[92])  ^ s[171];
      t2 = t2 ^ (s[175] & s[176]) ^ s[264];
      t3 = t3 ^ (s[286] & s[287]) ^ s[69];
      s[93:1]    = {s[92:1], t3};
      s[177:94]  = {s[176:94], t1};
      s[288:178] = {s[287:178], t2};
    end
    state_d = s;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= seed_state();
      warm_q  <= CW'(WARMUP_CYCLES);
    end else begin
      state_q <= state_d;
      if (warm_q != '0) warm_q <= warm_q - 1'b1;
    end
  end

  assign ready = (warm_q == '0);
endmodule
