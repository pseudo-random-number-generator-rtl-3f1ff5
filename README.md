# Three-model pseudo-random number generator for a portable FPGA board

This design is a random-number source for a small, battery-powered FPGA
board. It runs three generators of very different cost side by side:

- a bank of XOR-combined linear feedback shift registers (LFSRs);
- a fixed-point logistic map whose output is shaped towards a Gaussian;
- a numerical solver for a chaotic double pendulum.

A selector picks one of them, or the XOR of all three, and prints the chosen
numbers as decimal text on a serial line for a PC terminal. Only the chosen
generator runs. Words from an environmental sensor can be stirred into the
state of all three generators as extra entropy. A
cycle counter reports how many clocks the selected generator needs per
number. That count is the main figure of merit when the three models are
compared: about 1 clock for the LFSRs, 8 for the logistic map and 82 for the
pendulum.

The RTL follows a published comparison of these three models on a Xilinx
Cmod A7 board. That publication gives the generators' equations, their
measured latencies and resource counts, and a screenshot of the serial
terminal. It gives no widths, number formats, tap positions or
microarchitecture. So everything below the level of the equations is this
design's own. The sections below and the opening comment of each file say
which parts are which.

## Block structure

```
 sensor_data/valid ─► (to all three generators)
                     ┌────────────┐ rnd (16b, every clock)
                     │ multi_lfsr │────────────────────────┐
                     └────────────┘                        │
                     ┌──────────────┐ x  ┌──────────────┐  │   ┌──────────┐ rnd/rnd_valid
                     │ logistic_map │───►│ clt_gaussian │──┼──►│ selector │──────┬──────────►
                     └──────────────┘    └──────────────┘  │   │ + XOR mix│      │
 dp_seed/seed_load ─►┌─────────────────┐                   │   └──────────┘      │
                     │ double_pendulum │───────────────────┘     gen_sel ─┘      │
                     │ 3×cordic 2×seq_div                                        │
                     └─────────────────┘        ┌─────────────────┐ latency      │
                                                │ latency_counter │◄─────────────┤
                                                └─────────────────┘              │
                                  uart_txd ◄─ uart_tx ◄─ dec_formatter ◄─────────┘
```

All blocks share one clock (100 MHz assumed) and a synchronous active-low
reset. Shared types and constants are in `prng_pkg`: the generator select
enum, the pendulum's fixed-point format and its seed struct.

## Generator 1: multi-LFSR (`lfsr`, `multi_lfsr`)

Each `lfsr` is a Fibonacci register that uses the two-tap recurrence
`X(n) = X(n-WIDTH) xor X(n-TAP)`. With a primitive trinomial
`x^WIDTH + x^TAP + 1` it cycles through all `2^WIDTH − 1` non-zero states.
`multi_lfsr` holds four of them, with the trinomials `x^15+x+1`, `x^17+x^3+1`,
`x^23+x^5+1` and `x^31+x^3+1`. Because the lengths are pairwise co-prime, the
joint state repeats only after about 2^86 clocks.

A single-step LFSR would make successive output words overlap in 15 of their
16 bits. To avoid that, each register is unrolled to advance 15 places per
clock (parameter `STEP`). The 16-bit word is
`{s17[16], s15} ^ s17[15:0] ^ s23[15:0] ^ s31[15:0]`. It is registered, so a
fresh word appears on every clock: a latency of 1 clock. The published design
reports 1–2 clocks.

Sensor entropy: on a `sensor_valid` clock the sensor word is XORed into all
four next states, with a different bit arrangement for each register. A
register that would become all-zero is set to 1 instead. The published work
says only that environmental sensors add randomness. The injection scheme is
this design's own, and so are the number of registers and their lengths.

## Generator 2: logistic map with CLT shaping (`logistic_map`, `clt_gaussian`)

The map is `x ← r·x·(1−x)`. `x` is an unsigned Q0.32 fraction and `r` an
unsigned Q2.30 number, with r = 3.99 by default (chaos sets in beyond about
3.57). One multiplier is used twice per iterate:

| clock | operation |
|---|---|
| phase 0 | `p ← x·(1−x)` (33-bit `1−x`, product truncated to Q0.32) |
| phase 1 | `x ← r·p` (truncated back to Q0.32) |

If `x` reaches exactly zero, the map would stay there for ever, so it is
reloaded with the seed `X0`. A sensor word (`inject`) is XORed into the low
16 bits of the next iterate. The map's sensitivity to initial conditions
spreads that change to every bit within a few dozen iterates. Finite precision also means the orbit becomes
periodic at some point. The period is not analysed here.

`clt_gaussian` adds `N = 4` consecutive iterates that do not overlap. By the
central limit theorem the sum moves towards a normal distribution. The top
keeps the upper 16 bits of the 34-bit sum. With two clocks per iterate this
gives one shaped sample every 8 clocks, inside the 5–10 clocks reported for
the published implementation. Four terms is a small number for a CLT. Because
the logistic map's own density is U-shaped (arcsine), the sum is visibly
non-Gaussian in its tails. Successive iterates are also strongly dependent,
so over 8000 samples the histogram is lumpy, with peaks near 0.4 and 0.65 of
full scale. Its mean is about 0.53 of full scale rather than 0.5. A
real-valued run of the same map shows the same shape, so this comes from the
map rather than the fixed-point arithmetic. Raising `CLT_N` improves the shape
and costs 2 clocks per extra term.

## Generator 3: double pendulum (`double_pendulum`, `cordic`, `seq_div`)

This generator is the most involved block. It integrates the equations of
motion of two rigid rods hanging one below the other. Angles are measured
from the downward vertical and are positive counter-clockwise:

```
den = 2·m1 + m2 − m2·cos(2θ1 − 2θ2)
α1  = [ −g(2m1+m2)·sinθ1 − m2·g·sin(θ1−2θ2)
        − 2·sin(θ1−θ2)·m2·(ω2²·L2 + ω1²·L1·cos(θ1−θ2)) ] / (L1·den)
α2  = 2·sin(θ1−θ2)·[ ω1²·L1·(m1+m2) + g(m1+m2)·cosθ1
        + ω2²·L2·m2·cos(θ1−θ2) ] / (L2·den)
```

**Seed.** The seed is the starting angles, the two masses and the two rod
lengths (`dp_seed_t`). The starting velocities are zero. The seed loads at
reset and on `seed_load`. Masses and lengths must be positive, so that
`den ≥ 2·m1 > 0`.

**Number format.** All quantities are signed Q11.20 in 32 bits, a range of
±2048 with a resolution of about 1e-6. Products go through 64 bits and are
truncated (`qmul` in the package). Angles are wrapped into [−π, π).
Velocities are clamped to ±256 rad/s, far above anything this pendulum
reaches, so that no intermediate value can overflow.

**Integration.** The block uses semi-implicit Euler with `dt = 2^-8 s`:
`ω ← ω + α·dt`, then `θ ← θ + ω_new·dt`. Both multiplications by `dt` are
arithmetic shifts. Explicit Euler would steadily pump energy into the system.
The semi-implicit form keeps the energy bounded, which the testbench sees as
the swing staying within physical limits over 1500 steps.

**One step, 82 clocks:**

1. *Trigonometry, 23 clocks.* Three CORDIC units run in parallel and give
   sin/cos of θ1, of θ1−θ2 and of θ1−2θ2. `cos(2θ1−2θ2)` is then formed as
   `cos²−sin²` of (θ1−θ2), so no fourth unit is needed. Each `cordic`
   resolves one angle bit per clock over 21 iterations. Angles beyond ±π/2
   are first turned by π and the results negated. The gain is compensated by
   starting from `x = 1/K`. The error is below about 1.5e-5.
2. *Forces, 1 clock.* Numerators and denominators are evaluated in one
   combinational step and registered. This takes about 15 multipliers.
3. *Division, 53 clocks.* Two `seq_div` units run in parallel. Each is a
   restoring shift-subtract divider over the 52-bit scaled dividend
   `|n|·2^20`. The sign is applied at the end and the result saturates.
4. *Update, 1 clock.* The new state and the output word are written.

A sensor word (`inject`) is XORed into the low 16 bits of θ2 at the next
update, a change of at most 1/16 rad.

The output word is the low 16 bits of `θ1 xor θ2`. These are fractional-angle
bits that change by thousands of LSBs per step. The published work reports
20–50+ clocks for its pendulum. This design's 82 clocks fall inside that
open-ended range. A two-bit-per-clock divider would bring the step close to
55 clocks.

The published resource table lists only 126 LUTs, 143 flip-flops and no DSP
blocks for the pendulum. No solver of these equations fits in that. The
published implementation must therefore have differed in ways it does not
describe, for example much narrower words or table-based trigonometry. This
design does not try to match those numbers.

## Selection, mixing and latency measurement (`prng_top`, `latency_counter`)

`gen_sel` (type `gen_sel_e`) chooses the output:

- `GEN_LFSR`: the multi-LFSR word, every clock;
- `GEN_LOGISTIC`: the CLT sample, every 8 clocks;
- `GEN_PENDULUM`: the pendulum word, every 82 clocks;
- `GEN_MIXED`: the pendulum word XORed with the latest LFSR and logistic
  words, emitted with each pendulum word.

`gen_sel` is registered, and the choice reaches `rnd` two clocks after it
changes. Generators that are not selected are held through their `en`
inputs. They keep their state and draw no dynamic power. The mixed mode runs
all three. Sensor words are delivered to all three even while a generator is
held. A held generator applies the word at its next update.

`latency_counter` measures the clocks between successive `rnd_valid` pulses
and publishes each interval on `latency`. A change of `gen_sel` restarts it,
so that no interval mixes two generators.

## Serial output (`dec_formatter`, `uart_tx`)

A sample that arrives while the printer is idle is converted to decimal. The
conversion uses shift-and-add-3 (double dabble), one input bit per clock. The
printer then sends the digits without leading zeros, followed by CR and LF.
`uart_tx` sends 8N1, LSB first, at `CLK_HZ/BAUD` clocks per bit. It accepts
the next byte in the last clock of the stop bit, so bytes leave with no gap.

At 9600 baud a five-digit line takes about 7.3 ms. That is far slower than
any generator, so most samples are not printed: `print_take` marks the
samples that are printed and `print_skips` counts the others. The 9600 baud,
8N1 setting is taken from the terminal configuration visible in the
published screenshot. The 100 MHz clock is inferred from the published
statement that 1–2 clocks last 10–20 ns. The Cmod A7's own 12 MHz oscillator
would need a clock generator in front of the design. In that case, set
`CLK_HZ` to match.

## Timing summary

| generator | clocks per number (this RTL) | published figure |
|---|---|---|
| multi-LFSR | 1 | 1–2 |
| logistic map + CLT (N = 4) | 8 | 5–10 |
| double pendulum | 82 | 20–50+ |
| mixed | 82 (paced by the pendulum) | — |

## Departures and open points

- The published work compares the three models one at a time. Running them
  together behind a selector, and the XOR mixed mode, are this design's
  reading of its statement that the generator is fed by several chaotic
  models and sensor entropy.
- Sensor entropy reaches every generator, in the way each block's section
  describes. The published work gives no mechanism for this. The
  environmental sensor itself, the vendor logic analyser used for
  measurements and the PC terminal are outside the RTL. The top exposes a 16-bit sensor word with a
  valid strobe, plus the latency output that a logic analyser would probe.
- The top's ports are far more than a board has pins: the 192-bit pendulum
  seed, for instance. On hardware, a wrapper would tie the seed to constants
  or registers and bring out only `uart_txd`, the sensor interface and
  `gen_sel`.
- Randomness quality has not been measured. The testbenches check that each
  block computes what it is specified to compute. They do not run
  statistical suites such as NIST SP 800-22. None of these generators is
  cryptographically secure as built.
- Power and resource figures were not reproduced.

## Verification

Each block has a self-checking testbench in `tb/`. Each testbench prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog.

| testbench | what it establishes |
|---|---|
| `tb_lfsr` | the bit stream obeys the two-tap recurrence; a 7-bit register has period 127; leap-forward equals repeated single steps; hold, injection and the zero guard work |
| `tb_multi_lfsr` | 3000 words match an integer model of the four registers, including sensor injection; a word every clock |
| `tb_logistic_map` | 2000 iterates, 40 of them with a sensor word, match an exact integer model and stay within 4e-9 of the real-valued map; 2 clocks per iterate |
| `tb_clt_gaussian` | exact group sums under random gaps; the mean and variance of sums of uniform inputs match the CLT |
| `tb_double_pendulum` | every one of 1500 steps matches a real-valued evaluation of the equations, with `$sin`/`$cos` and one Euler step, within 2e-4, with a sensor word injected every 37th step; constant step time ≥ 20 clocks; wrapping, output word and reseeding |
| `tb_cordic` | sin/cos over the whole angle range within 2e-5 of `$sin`/`$cos`; fixed latency; start ignored while busy |
| `tb_seq_div` | 2000 random quotients truncate correctly; saturation; division by zero; fixed latency |
| `tb_uart_tx` | an independent line decoder reads 200 frames; exactly 10 bit times per frame |
| `tb_dec_formatter` | 513 numbers, edge cases included, print as `%0d` plus CR LF under a randomly stalling sink |
| `tb_latency_counter` | reported intervals equal the strobe spacing; saturation; restart |
| `tb_prng_top` | end to end at 10 clocks per UART bit: every printed line equals a taken sample; latencies 1, 8, 82, 82; logistic samples match a model; unselected generators hold; sensor words change the LFSR stream; reseeding changes the pendulum stream; each mechanism occurs at least once |
| `tb_prng_histogram` | histogram and time-series tests of each mode at the top: the LFSR, pendulum and mixed words pass a 16-bin chi-square test (limit 37.7), every bit is balanced to 5 sigma, lag-1 correlation is below 0.1; the logistic/CLT samples match a real-valued run of the same map, bin for bin within 3 % and in mean within 2 % |
| `tb_prng_top_full` | the top at its default parameters (100 MHz, 9600 baud): for each of the four modes, a full decimal line is decoded from the pin and checked, including its duration |

To run one with Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/prng_pkg.sv tb/tb_prng_top.sv --top-module tb_prng_top -Mdir obj -o sim
./obj/sim
```

Every testbench finishes in seconds. The full-size one simulates about 6
million clocks in roughly ten seconds.

## Changing the design

- **Generator parameters**: the `prng_top` parameters set the LFSR seed, the
  logistic `r` and `x0` (as Q2.30 and Q0.32 integers), the CLT length (a
  power of two) and the pendulum time step (`DT_SHIFT`).
- **Serial rate**: set `CLK_HZ` and `BAUD` on `prng_top` to the board clock
  and the terminal rate.
- **Number format**: the pendulum format is fixed by `DP_W`/`DP_FRAC` in
  `prng_pkg`. The CORDIC angle table there is given for 20 fractional bits
  (entry i is `round(atan(2^-i)·2^20)`), as are π, g and the CORDIC gain
  `1/K = 0.6072529`. A new format must regenerate these constants.
- **Output width**: `RND_W` in the package. The multi-LFSR output expression
  assumes 16 bits.
