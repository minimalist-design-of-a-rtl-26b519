# A minimalist quantum random number generator: RTL

Photons from a weak, continuously lit LED hit a single-photon detector at
random times. For a Poisson process the waiting times between clicks are
independent and exponentially distributed, so they are a good raw source of
quantum randomness. The problem is turning them into bits that are exactly
unbiased and independent. It must also keep working when the light level
drifts, without estimating the source's entropy and without a random seed.

The design does this with a deterministic extractor, the Elias permutation
method, in its simplest possible form:

1. measure each waiting time in 16 ns clock cycles;
2. throw away waiting times under 160 ns, where the detector is not
   Poissonian (dead time, afterpulsing);
3. map each remaining waiting time onto one of four letters A, B, C, D;
4. collect 10 letters into a 20-bit word;
5. look the word up in a 2^20-entry table (2 MB) whose entry holds the
   random bits that the word yields. That is 0 to 14 bits, 12 on average.

A detector clicking at 1.2 MHz thus gives about 1.0 MHz of letters and
1.2 Mbit/s of random output. The only arithmetic is a counter, a comparison
and a table read. A slow feedback loop holds the click rate steady by
adjusting the LED current.

This repository contains synthesizable SystemVerilog for the digital part
(everything between the detector output and the random bit stream, and the
rate loop), a detector model and self-checking testbenches.

## Signal chain

```
 spd_click ─► time_counter ─► pre_conversion ─► symbol_buffer ─► elias_lut ─► bit_unpacker ─► rnd_bit
 (detector)   waiting time    filter + letter    10 letters =     2^20 x 16     strip padding,   rnd_valid
              in 16 ns        A..D              20-bit address    table         serialise
                 │
                 └─ click ─► rate_control ─► led_level (to the LED current DAC)
```

| module | what it does | latency |
|---|---|---|
| `qrng_pkg` | shared constants, the letter type, and `elias_code()`, the rule that fills the table | – |
| `time_counter` | 2-flop synchroniser, rising-edge detector, cycle counter between clicks | 3 cycles from the detector edge |
| `pre_conversion` | dead-time filter (< 10 cycles discarded), up-down letter mapping | 1 cycle |
| `symbol_buffer` | shifts in 10 letters, issues the address | 1 cycle after the 10th letter |
| `elias_lut` | the table: memory array, filled after reset, pipelined read | 6 cycles |
| `bit_unpacker` | removes the `0…01` padding, sends the k data bits one per cycle | first bit 1 cycle after the entry |
| `rate_control` | counts clicks per 1 s window, integrates the error into the LED setting | once per window |
| `qrng_top` | wires the chain together | – |

## From waiting times to letters

A waiting time T (in cycles) below `CUTOFF = 10` is dropped. Waiting times
of 10 cycles and more are mapped by their offset `o = (T − 10) mod 8`:

| T | 10 | 11 | 12 | 13 | 14 | 15 | 16 | 17 | 18 | 19 | … |
|---|---|---|---|---|---|---|---|---|---|---|---|
| o | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 0 | 1 | … |
| letter | A | B | C | D | D | C | B | A | A | B | … |

The letters run up and then back down, not `T mod 4`. The waiting-time
density falls steadily. With `T mod 4`, A would always get the earliest and
thus most likely value of each group of four. Running the sequence back and
forth makes the small differences cancel over each pair of groups, which
gives a flatter letter distribution. Letter flatness never affects the
*correctness* of the output. It only changes how many bits are extracted.

In hardware this is three bits of subtraction and a conditional inversion:
`letter = o[2] ? ~o[1:0] : o[1:0]`, with A = 00 … D = 11.

The interval counter is 16 bits wide and wraps. Because 2^16 is a multiple
of the period 8, the low bits stay exact for waiting times of any length.
A separate flag (`interval_long`) tells the filter that such a waiting time
is long, not short. The first click after reset starts the count but
produces no waiting time.

## Extraction by numbering permutations

This is the part of the design that needs explaining. It all lives in
`qrng_pkg::elias_code()`, which defines every table entry.

**Why permutations.** Take a block of N letters drawn independently from
*any* fixed distribution p(A)…p(D). The probability of a block depends only
on how many of each letter it contains, not on their order. So, given the
letter counts, all arrangements of those letters are exactly equally
likely. For example, AABC, ABAC, …, CBAA are 12 equally likely outcomes. If
the generator numbers the arrangements and outputs the number of the one it
saw, the output is uniform *whatever* p is. The counts themselves carry
the bias and are discarded.

**Numbering.** Arrangements are numbered in lexicographic order, A < B <
C < D. The first letter of the block sits in the top address bits, so this
is also the numeric order of the 20-bit addresses. The rank of a block w is
the number of arrangements that come before it:

```
rank(w) = Σ over positions i, Σ over letters l < w[i]:
              (arrangements of the letters left at position i, with l placed there)
```

This is a sum of multinomial coefficients. The RTL evaluates it with one
running quantity q, the number of arrangements of the letters not yet
visited. Of those, `q · rem[l] / nrem` begin with letter l.

**Turning a rank into bits.** A count P of equally likely arrangements
gives whole bits only if P is a power of two. So the P arrangements are
split into groups following the binary digits of P, largest group first.
For P = 12 = 8 + 4, ranks 0–7 give 3 bits (their rank) and ranks 8–11 give
2 bits (rank − 8). Within each group every bit pattern is equally likely,
and which group was hit says nothing about the bits. The worked example for
4-letter blocks:

| letters | arrangements | output |
|---|---|---|
| AAAA | 1 | nothing |
| BBBC, BBCB, BCBB, CBBB | 4 | 00, 01, 10, 11 |
| AACC … CCAA | 6 = 4 + 2 | 00, 01, 10, 11, then 0, 1 |
| ABBD … DBBA | 12 = 8 + 4 | 000 … 111, then 00 … 11 |
| ABCD … DCBA | 24 = 16 + 8 | 0000 … 1111, then 000 … 111 |

**Table entries.** The k output bits `b(k−1)…b0` of a block are stored in
16 bits as `0…0 1 b(k−1)…b0`: the highest set bit marks the length. Every
block with all letters equal gives `16'h0001` (no bits). The largest count
for ten letters is 10!/(3!·3!·2!·2!) = 25200 = 16384 + 8192 + 512 + 64 +
32 + 16, so k ≤ 14.

**What the full table yields.** Over all 2^20 addresses the entries hold
12,574,016 bits, a mean of 11.99 bits per block or 1.199 bits per letter.
16 entries are empty: one per letter pattern whose count of arrangements is
odd. 229,376 entries carry the full 14 bits. Longer blocks would extract
more (about 1.5 bits per letter at 20 letters), but the table grows as 4^N.
The source must also stay stationary over roughly 4^N clicks, since the
method relies on the arrangements being equally likely.

## The table in hardware

In the original system the table is calculated offline and programmed into
a 2 MB flash chip next to the FPGA. This RTL keeps a memory array
of 2^20 × 16 bits (`elias_lut.mem`) with a synchronous read port. A fill
sequencer writes it after reset, one entry per clock cycle, with
`elias_code()` evaluated on the fill address. The fill takes 2^20 cycles
(16.8 ms at 62.5 MHz). `ready` rises when it is done. Letters that arrive
before then are discarded, so the first block starts cleanly after `ready`.

This differs from the original in two ways, and they matter for a real
build:

* An array initialised in an `initial` block would also be possible, but
  elaboration tools evaluate such a loop as a constant expression and give
  up long before 2^20 entries. With the fill sequencer there is also no data
  file to ship.
* `elias_code()` is one large combinational function: a few dozen
  multiply/divide-by-small-constant steps. It is used only during the fill.
  Closing timing at 62.5 MHz would need a pipelined or multi-cycle fill.
  Alternatively, the array can be replaced by the external flash, with its
  own bus controller in front of `rd_en/rd_addr/rd_valid/rd_data`. The read
  latency `READ_LATENCY = 6` (96 ns) stands in for a flash access time; the
  flash bus itself is not modelled.

## Output and rate budget

`bit_unpacker` finds the marker bit of each entry and sends the k bits below
it, most significant first, one per cycle (`rnd_valid`, `rnd_bit`). There
is no backpressure, and none is needed. Each letter takes at least 10
cycles, so a block takes at least 100 cycles, while an entry takes at most
14 cycles to send. An assertion checks that no entry arrives while the
previous one is still being sent. A consumer that needs flow control should
put a FIFO after the unpacker.

At 1.2 MHz of clicks, about 84 % of the waiting times exceed 160 ns
(e^(−1.2 MHz · 144 ns)), giving 1.0 MHz of letters, 100 k blocks/s and 1.2
Mbit/s. The full-size simulation measures 1.156 MHz of clicks (the model's
dead time removes a few), 1.019 MHz of letters, 1.195 bits per letter and
1.218 Mbit/s.

## Count-rate loop

The extractor assumes the letter distribution does not drift during about
4^10 ≈ 10^6 letters, roughly one second. `rate_control` therefore adjusts
the LED current only slowly. It counts raw clicks over `WINDOW_CYCLES`
(62.5 M cycles = 1 s) and updates the level at each window end:

```
level ← clamp(level + ((TARGET_COUNT − clicks) >>> GAIN_SHIFT), 0, 2^LEVEL_W − 1)
```

`TARGET_COUNT = 1,200,000` gives 1.2 MHz. The loop should have a 16 s time
constant. For a pure integrator that is 2^GAIN_SHIFT / G windows, where G
is the number of extra clicks per second per level step. G depends on the
LED, its driver DAC and the optics, which are not specified. So
`GAIN_SHIFT = 4` gives 16 s only for G = 1 and must be tuned on the real
hardware. The window length, the integral law and the 16-bit level are this
design's choices.

## Top-level interface (`qrng_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | 62.5 MHz (16 ns) clock |
| `rst_n` | in | 1 | asynchronous active-low reset; starts the table fill |
| `spd_click` | in | 1 | detector output, asynchronous; a click is a rising edge, pulses ≥ 1 cycle high and low |
| `led_level` | out | `LEVEL_W` | LED current setting for an external DAC |
| `ready` | out | 1 | table loaded, generation running |
| `rnd_valid`, `rnd_bit` | out | 1 | random bit stream |
| `click_seen` | out | 1 | pulse per detected click (monitor) |
| `interval_dropped` | out | 1 | pulse per waiting time removed by the filter (monitor) |
| `block_valid`, `block_word` | out | 1, 16 | each table entry read, still coded (monitor) |
| `rate_update` | out | 1 | pulse at each rate-loop update (monitor) |

Parameters and defaults: `CNT_W = 16`, `CUTOFF = 10`, `N = 10`,
`READ_LATENCY = 6`, `WINDOW_CYCLES = 62_500_000`, `TARGET_COUNT =
1_200_000`, `LEVEL_W = 16`, `GAIN_SHIFT = 4`, `LEVEL_INIT = 2^(LEVEL_W−1)`.
Of these, the 16 ns clock, the cutoff of 10 cycles, N = 10 letters, the
16-bit entries and the 1.2 MHz target come from the original design. The
others are this implementation's own. `N` may range from 2 to 12; the
table has 4^N entries.

## What is not in the RTL

The LED and its current driver, the single-photon detector, the
temperature-stabilised chamber (LED and detector at +25 °C), the crystal
oscillator, the flash chip's bus and whatever consumes the random bits.
They are analog or external parts. `tb/spd_model.sv` is a behavioural
stand-in for the LED and detector. It gives Bernoulli-per-cycle photon
arrivals with a probability set by `led_level`, a dead time and
afterpulses.

## Verification

Each block has a self-checking testbench that compares against values
computed independently of the RTL:

| testbench | checks |
|---|---|
| `tb_time_counter` | 455 clicks at known cycles, including waiting times around and far beyond 2^16; interval values, wrap flag, 3-cycle latency, no interval for the first click |
| `tb_pre_conversion` | intervals 1–300, long and random ones against a literal A B C D D C B A table and the cutoff |
| `tb_symbol_buffer` | 300 random blocks: address contents and order, one pulse per 10 letters |
| `tb_elias_lut` | N = 4: all 256 entries against brute-force enumeration and the worked-example entries; N = 10: all 2^20 entries read, total 12,574,016 bits, 16 empty, 229,376 of 14 bits, 3000 entries against a multinomial reference, fill time, read latency |
| `tb_bit_unpacker` | every k from 0 to 15 and 2000 random entries, bit order and timing |
| `tb_rate_control` | level after each window against the clamp formula, saturation at both ends, closed loop through a simple plant |
| `tb_qrng_top` | whole chain at reduced size (N = 4, 8-bit counter, 2000-cycle window): every entry and bit against a reference model fed by the detector model's click times; requires that filtering, counter wrap, both halves of the letter map, letters lost during the fill, empty blocks and rate-loop moves in both directions all occur |
| `tb_qrng_top_full` | whole chain at the default parameters: full table fill, 400 blocks checked bit by bit, click, letter and output rates |

The reference for the table (`tb/tb_ref_pkg.sv`) computes the rank from
64-bit factorials, not from the RTL's running-quotient form. For short
blocks it is checked by plain enumeration.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/qrng_pkg.sv tb/tb_ref_pkg.sv tb/tb_qrng_top_full.sv --top-module tb_qrng_top_full
./obj_dir/Vtb_qrng_top_full
```

Each testbench prints `TB_RESULT checks=<n> failures=<m>` and stops. None
takes more than a few seconds. The full-size run takes about a second, most
of it the table fill.

## How far to trust it

* The chain was checked bit-exactly against an independent model, at the
  default size and at a reduced size. The table's statistics match the
  expected 1.2 bits per letter.
* Where the original leaves details open, the choices are this
  implementation's own: the letter codes and their order in the address,
  the order of the output bits, and the exact numbering of arrangements
  beyond the worked example. Any consistent choice is equally random, but
  it will not reproduce the original device's output sequence bit for bit.
* Not done: timing closure on an FPGA (see the fill function above), a
  flash bus controller, tuning of the rate loop's gain, and statistical
  testing of long output runs.
