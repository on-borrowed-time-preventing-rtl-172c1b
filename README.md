# Borrowed Time: wiping secrets when the clock stops

Static side-channel attacks read secrets out of a chip that is standing still. Examples are
static (leakage) power analysis, laser logic state imaging and impedance analysis. The attacker
stops the clock of a cryptographic core while a key-dependent value sits in its flip-flops. After
a wait for the transient "memory effect" to die down, they measure for hundreds of microseconds
to milliseconds. The clock may be stopped through an exposed clock pin, or the core may simply
be clock-gated by its master between operations. Masking does not help much: the measurements
are so clean that higher-order attacks become cheap.

The countermeasure in this RTL removes one of the two conditions those attacks need. It watches
the incoming clock. As soon as the clock has stopped, it overwrites the sensitive registers with
fresh random bits. Random data, rather than zeros, avoids a burst of data-dependent 1→0
transitions during the wipe itself. With the default sizes the registers hold random data
427 ns after the last clock transition. That is about three orders of magnitude below the
≥200 µs after which a static power measurement becomes usable. The price is that a stopped clock
destroys the operation in progress. The block therefore raises a `data_invalid` flag for the
master circuit.

Two clock monitors are provided:

| variant | alarm | clear edge comes from | works in clock-gated logic |
|---|---|---|---|
| asynchronous delay-based (`MON_ASYNC`, default) | `stop_detect` from a tapped delay chain | `delayed_edge`, a delayed copy of the alarm, switched onto the register clock | yes |
| PLL-based (`MON_PLL`) | inverted `LOCKED` of a PLL | the PLL's free-running output after it loses lock | no, a PLL needs a long stable clock to lock |

## Block diagram (asynchronous variant)

```
              clk_delay (3 x 190 ps)
 clk ──┬──────[>]──────────────────────────────────┐
       │                                           ├─0┐
       │  c0  c1     c2          cn               │   clk_mux ── sys_clk ──> sensitive regs, RNG
       └──┬──[>]─┬──[>]─┬ ... ─[>]─┐             ┌┴─1┘   (sel = stop_detect)
          │      │      │          │             │
        ┌─┴──────┴──────┴──────────┴─┐           │ delayed_edge
        │ all taps equal?  (&t | ~|t)│           │
        └─────────────┬──────────────┘           │
                      │ stop_detect              │
                      └──[>]─[>]─ ... ─[>]───────┘
                         s1  s2        sm   (secondary chain, t_m)

 data_mux (per sensitive register):  D = stop_detect | wipe ? rnd : d
 rnd = unrolled Trivium, RNG_BITS per sys_clk edge, valid while the clock is stopped
```

`borrowed_time_top` contains the clock monitor, `trivium_rng` and `masked_clear_reg`.
`masked_clear_reg` holds the data_mux and the sensitive register bank. The target's own
combinational logic (an AES or SKINNY round, for instance) stays outside. It reads `q`, drives
`d`, and clocks any other registers from `sys_clk`.

## How a stopped clock is detected

The clock runs down a chain of 1914 unit delays of 190 ps each. Every 66th element is a tap,
which gives 29 taps plus `c0`, the undelayed clock. Together they show the clock as it was at
30 moments spread over the last

* t_n = 29 × 66 × 190 ps = 363.7 ns, with one sample every 12.54 ns.

A running clock always leaves both levels somewhere among the taps, provided two conditions
hold:

* **Enough history:** t_n > T_clk/2. Otherwise the taps all read 0 during a low phase and the
  monitor reports a false stop. This sets the lowest clock frequency, 1/(2·363.7 ns) ≈ 1.4 MHz.
* **No aliasing:** the tap spacing must be below half a clock period. Otherwise every tap can
  land on the same phase of different cycles. This sets the highest frequency,
  1/(2·12.54 ns) ≈ 39.9 MHz.

The nominal clock is 8 MHz. The published operating range for these numbers is 2.5–40 MHz, which
is tighter than the 1.4 MHz bound above. The extra margin covers jitter and variation along the
chain.

`stop_detector` is the all-equal function `(&taps) | ~(|taps)`. It fires t_n after the clock's
last transition, for a clock stopped low or high alike. The chain and this function cost a fixed
overhead that does not depend on how many registers are protected.

## How the clear is clocked

Selecting random data is not enough: the registers also need an active clock edge, and the real
clock has stopped. The alarm therefore does two things at once:

1. It flips every data_mux to the RNG.
2. It switches `clk_mux` from the incoming clock to `delayed_edge`. `delayed_edge` is the alarm
   after a second delay chain of 329 elements, t_m = 62.5 ns, which is half a clock period.

When the switch happens, `delayed_edge` is still low. What follows depends on how the clock
stopped:

* **Clock stopped low:** `sys_clk` stays low. It rises once, t_m later, and that edge latches the
  random word.
* **Clock stopped high:** `sys_clk` first falls to the low `delayed_edge`, which has no effect.
  It then rises t_m later, exactly as in the stopped-low case.

Before the edge arrives, the data_mux output has been stable for t_m, which covers any hold-time
requirement. The RNG is clocked by `sys_clk` as well. Its output is computed combinationally from
its state, so the random word stays valid while the clock is stopped. The alarm is deliberately
kept away from the reset pins of both the registers and the RNG. A reset would clear to zero,
and it would not leave fresh randomness behind.

Timeline with the default parameters, measured from the last clock transition:

| event | time |
|---|---|
| all taps agree | 363.66 ns |
| `stop_detect` (after the modelled 380 ps detector delay) | 364.04 ns |
| `delayed_edge` rises, registers load random data | 426.55 ns |

At the 8 MHz nominal clock this is about 3.4 periods. At 2.5 MHz, the lowest published
frequency, detection (364 ns) falls within one 400 ns period, and the clear edge follows t_m
later. Either way it is far below the attack window.

## Restarting and glitches: why the clock is delayed

The clock reaches `clk_mux` through a small delay, `clk_delay`, of 3 × 190 ps. This delay is
longer than the delay through the detector, modelled as 2 × 190 ps. When the clock restarts, its
first edge reaches `c0` immediately. That edge drops `stop_detect`, and the clock mux is back on
the real clock before the delayed edge arrives. A clock-gated core therefore computes from its
very first edge after a gated period, with no lost cycle.

The same delay defeats a glitch attack. Suppose an attacker stops the clock and then injects
short pulses. Without `clk_delay`, a pulse reaches the mux while `stop_detect` is still high,
so it is never passed to the registers. The attacker could then drive the detector while no edge
reaches the target. With the delay, the pulse arrives inside the window in which the detector has
dropped, so it reaches the registers. Setting `CLK_DELAY_ELEMS = 0` builds the naive variant.
`tb_async_clock_monitor` shows the naive variant losing a 300 ps pulse that the default variant
passes.

For this to work, `clk_delay` must exceed the detector delay by less than the width of the
shortest pulse to be passed. This RTL uses a 190 ps margin. A narrow pulse on a stopped clock
makes `stop_detect` drop briefly each time the pulse passes a tap. Each such drop produces an
extra `sys_clk` edge, and while the alarm is high that edge loads random data. The end-to-end
test shows about 30 such edges after one glitch, and every one of them loads fresh random data.

The cost of `clk_delay` is a small, fixed skew (570 ps) between the master's clock and the
target's `sys_clk`, which system timing must account for.

## PLL-based variant

`MONITOR = MON_PLL` replaces the chain with a PLL:

* `sys_clk` is the PLL output.
* The alarm is `~LOCKED`.
* PLLs drop LOCKED within one missed reference cycle.
* Many PLLs keep ticking briefly after losing their reference. The first of those ticks that
  sees the alarm high performs the clear.

Vendor PLLs are analog primitives, so `pll_model` is a behavioural model with the following
choices:

* It locks after 16 reference periods that fall within ±1 ns of the nominal period.
* It drops LOCKED more than 1.25 periods after the last reference edge.
* It drops LOCKED at once on a wrong period, for example a glitch.
* It free-runs for 4 cycles after the reference stops.

At 8 MHz, the register clear happens 2 periods + 100 ps = 250.1 ns after the last reference
edge. Until lock, the registers are fed random data on every edge. This variant draws far more
power than the chain, and it cannot sit inside a clock-gated domain.

## Randomness

`trivium_rng` is the Trivium stream cipher, unrolled to produce `RNG_BITS` keystream bits per
clock:

* 128 bits clear a whole AES state in one edge.
* 64 bits clear one share of a first-order masked SKINNY state. For a masked core, one share is
  enough: clearing it removes all information about the shared value.

Details of the generator:

* **Seed:** fixed, in `bt_pkg::TRIVIUM_KEY` and `TRIVIUM_IV`.
* **Warm-up:** the standard 4 × 288 steps, which take 9 clocks at 128 bits per clock. `ready`
  rises afterwards. The countermeasure does not wait for it: a clear during warm-up still writes
  keystream, just from the warm-up phase.
* **Key and IV bit order:** K_i = `KEY[i-1]`, IV_i = `IV[i-1]`. There is no attempt to match
  published, byte-ordered test vectors.

## Modules

| file | what it is |
|---|---|
| `rtl/bt_pkg.sv` | shared constants (chain timing, widths, seed) and the `monitor_e` variant enum |
| `rtl/delay_chain.sv` | **behavioural model**: chain of unit delays with taps (clock chain, secondary chain, clk_delay, detector delay) |
| `rtl/stop_detector.sv` | all-taps-equal detector |
| `rtl/clk_mux.sv` | 2:1 clock mux (a BUFGCTRL / BUFGMUX on an FPGA) |
| `rtl/async_clock_monitor.sv` | the asynchronous monitor: chains, detector, clk_delay, clk_mux |
| `rtl/pll_model.sv` | **behavioural model** of a PLL with LOCKED |
| `rtl/trivium_rng.sv` | unrolled Trivium |
| `rtl/masked_clear_reg.sv` | data_mux and sensitive registers, sticky `data_invalid` flag |
| `rtl/borrowed_time_top.sv` | top: monitor + RNG + registers |

Top-level ports: `clk`, `rst_n` (asynchronous power-up reset), `d`/`q` (register inputs and
outputs of the target), `wipe`, `ack`, `sys_clk`, `alarm`, `data_invalid`, `rng_ready`.

* **`wipe`:** the target raises it for one clock to perform the recommended masked clear at the
  end of every operation. This also covers attacks that need no stopped clock, where a finished
  core simply leaves its state in the flip-flops.
* **`data_invalid`:** set by every clear, cleared by `ack`.

Parameters of the top:

* `MONITOR`: `bt_pkg::MON_ASYNC` (default) or `bt_pkg::MON_PLL`.
* `WIDTH`: 128 by default, 64 for one SKINNY share.

The chain sizes live in `bt_pkg` and as parameters of `async_clock_monitor`:

* `NUM_TAPS`, `TAP_STRIDE`, `UNIT_DELAY_PS`
* `SEC_ELEMS`, `DETECT_ELEMS`, `CLK_DELAY_ELEMS`

The 6 Series build of the design used 620 ps elements tapped every 3rd element up to the 90th.
In this RTL that is `UNIT_DELAY_PS=620, TAP_STRIDE=3, NUM_TAPS=30`. SEC_ELEMS would need to be
re-chosen to match that design's clock.

## What is modelled and what is not

* **Delays are behavioural.** On silicon or an FPGA, the chains are physical cells: LUT1s at
  about 190 ps, or long routed wires, placed and tuned for one technology. Synthesis of this RTL
  reduces the chains to wires. A real build must instantiate and constrain technology cells in
  their place (keep / dont_touch, fixed placement), then check the delays after place and route.
  The logic that is synthesizable as written: the detector, the muxes, Trivium and the registers.
* **`clk_mux` is a plain combinational mux.** The real clock buffers switch without runt
  pulses; that behaviour belongs to the cell and is not modelled.
* **Detector delay.** The all-equal logic is modelled with a fixed 380 ps delay. A real LUT tree
  has its own delay, and `clk_delay` must be tuned against it.
* **Not contained here.** The protected cores themselves (a round-based AES-128 and a
  first-order masked SKINNY-128-128) are existing designs and are not part of this RTL. The
  SKINNY build's trick of saving unused first-round randomness is not modelled either.
* **Numbers chosen by this design:**
  * the secondary-chain, detector and clk_delay lengths
  * all PLL model timings
  * the seed
  * the `wipe` / `ack` / `data_invalid` handshake
  * the zero power-up reset value

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and has a watchdog. All of them use
`timeunit 1ps`, and they need Verilator's timing support. For example:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    --top-module tb_borrowed_time_top rtl/bt_pkg.sv tb/trivium_ref_pkg.sv \
    tb/tb_borrowed_time_top.sv -o sim && obj_dir/sim
```

| testbench | checks |
|---|---|
| `tb_borrowed_time_top` | Full default size, asynchronous variant, end to end (about 15 s of simulation). A scoreboard predicts `q` at every `sys_clk` edge from a bit-serial Trivium reference. The scenario covers warm-up, rounds, a wipe with its data-invalid handshake, the clock stopped low and stopped high, restarts, and a glitch pulse. It checks the 426.55 ns clear time and counts every mechanism. |
| `tb_borrowed_time_top_share64` | the same scenario with `WIDTH = 64`, one share of a masked 64-bit state (18-clock warm-up) |
| `tb_borrowed_time_top_pll` | PLL variant: clears before lock, lock, rounds, exactly three clear edges after the reference stops (the first one 2 periods + 100 ps after the last edge), relock |
| `tb_async_clock_monitor` | detection and clear-edge timing to the picosecond, stopped low and high, restart, glitch with and without `clk_delay` |
| `tb_delay_chain` | the switching time of every tap |
| `tb_stop_detector`, `tb_clk_mux`, `tb_masked_clear_reg` | exhaustive or random comparison with reference expressions |
| `tb_trivium_rng` | 128- and 64-bit instances against the serial reference, warm-up length, output held while the clock is stopped |
| `tb_pll_model` | lock time, output alignment, LOCKED loss within one missed edge, free-run count, glitch |

`tb/trivium_ref_pkg.sv` is the reference model shared by the testbenches. It is written from the
three-register description of the cipher (A: 93 bits, B: 84 bits, C: 111 bits) rather than the
288-bit vector form used in the RTL.

Compiling `delay_chain` at full size takes Verilator about two minutes, because of the 1914
individually delayed assignments. Simulation itself is fast.
