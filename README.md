# PRBS link tester for the JUNO back-end card

The back-end card (BEC) of the JUNO readout connects 48 underwater
electronics boxes to the trigger system. Each box has one Ethernet cable,
and the card uses all four pairs of it. Before a card goes into the
experiment, every pair must be shown to carry data without bit errors. The
method, described in "Automatic test system of the back-end card for the
JUNO experiment" (Clerbaux et al.), is:

- loop the card's ports back to each other through real cables;
- send a pseudo-random bit sequence (PRBS) out of every transmit pair and
  check it on every receive pair, all at the same time;
- keep counting errors for days.

This repository holds synthesizable SystemVerilog for the firmware of that
test. It runs on the FPGA of the card's trigger-and-timing mezzanine (TTIM).
It tests 96 channels at once: 48 ports with two receive pairs each. For each
channel it records:

- how many bits were wrong;
- when the first wrong bit came;
- how long the cable delays the signal;
- for every error, whether the data was already wrong when it was sent, or
  was corrupted on the way.

The paper describes what the firmware does, not its internals. Everything
below the level of "a PRBS generator, a checker, an error register, a
first-error time stamp" is this design's own choice. Each is marked as such
below.

## Test setup and channel numbering

```
      port 2k                                   port 2k+1
   Tx 1-2 ──────────── cable, pair 1-2 ───────────► Rx 3-6    (channel 2(2k+1))
   Rx 3-6 ◄─────────── cable, pair 1-2 ──────────── Tx 1-2    (channel 2(2k))
   Tx 4-5 ──────────── cable, pair 4-5 ───────────► Rx 7-8    (channel 2(2k+1)+1)
   Rx 7-8 ◄─────────── cable, pair 4-5 ──────────── Tx 4-5    (channel 2(2k)+1)
```

In normal operation, pairs 1-2 and 4-5 go from the BEC to the underwater
box. Pair 1-2 carries a 62.5 MHz clock and pair 4-5 carries 125 Mbit/s
data. Pairs 3-6 and 7-8 carry 125 Mbit/s data back. For the test, both
outgoing pairs carry the PRBS. A cable between two ports of the same card
makes four channels. Channel `c = 2*port + lane` is the receive side:
lane 0 is pair 3-6 and lane 1 is pair 7-8. The firmware does not need to
know which port is cabled to which.

There is **one** pattern generator, and its bit drives all 96 transmit
pairs. There are **96** checkers, one per receive pair. Because every
transmitter sends the same sequence, every checker can check against it,
and a single injected error reaches every channel at once.

## Clock and bit rate

Everything runs on one 250 MHz system clock: 4 ns per run-counter step, the
resolution at which the original firmware reported run time. `rate_strobe`
divides the clock by `2^rate_sel`:

| rate_sel | bit period | rate |
|---|---|---|
| 0 | 1 cycle | 250 Mbit/s (the paper's 72-hour run) |
| 1 | 2 cycles | 125 Mbit/s (the link's nominal rate) |
| 2 | 4 cycles | 62.5 Mbit/s |
| 3 | 8 cycles | 31.25 Mbit/s |

It gives two strobes:

- `tx_stb` fires in the first cycle of each bit period.
- `rx_stb` fires `rx_phase` cycles later, modulo the period.

Moving `rx_phase` moves the point where the checkers sample the received
line. The original setup reached error-free runs by adjusting the sample
point after looking at the eye diagram of each channel, whose eye was about
6.5 ns wide over 100 m of CAT5E. Here the sample point can only move in
whole clock cycles. There is no finer delay line.

## Pattern generator and error injection (`prbs_gen`)

The generator is a Fibonacci LFSR with four selectable polynomials:

- PRBS-7, x^7+x^6+1, the pattern used in the paper;
- PRBS-15, x^15+x^14+1;
- PRBS-23, x^23+x^18+1;
- PRBS-31, x^31+x^28+1.

It is seeded with all ones after reset and after every pattern change. It
steps on `tx_stb`, and the new bit appears on `tx_bit` one cycle later.

A rising edge on `inject` arms a request. The next emitted bit is inverted,
and the LFSR is left alone, so exactly one bit of the stream is wrong.
`inj_mark` pulses in the first cycle that the inverted bit is on the line.
That mark is the start of the cable-latency measurement.

## Checker (`prbs_chk`)

Each receive line passes through a two-flop synchroniser and is sampled on
`rx_stb`. The checker has two states.

- **Seeding.** The sampled bits are shifted straight into the LFSR. After
  as many bits as the polynomial order (7 for PRBS-7), the LFSR holds the
  transmitter's state and the checker declares lock.
- **Locked.** The LFSR runs on its *own predictions*, and each sampled bit
  is compared with the prediction. A mismatch raises `err` for one cycle,
  the cycle after the sample strobe.

Because the checker's LFSR never takes received bits while it is locked,
one corrupted bit is counted as one error. A self-synchronising checker,
which predicts each bit from received bits, would count three errors for
PRBS-7. The original firmware showed an error count of exactly 1 after one
injected error, and this checker matches that.

**Loss of lock.** The checker counts errors in windows of 128 checked
bits. If 16 errors fall in one window, it goes back to seeding. Both
numbers are this design's choice. Random data gives about 64 errors per
window, so lock is dropped quickly. A few isolated noise hits never drop
it.

**After a pattern change**, bits of the old pattern are still travelling
through the cables. A checker can seed from them and lock to a wrong
state. The errors that follow are sparse at first: the difference of two
sequences from the same LFSR is itself such a sequence, started from a
state with few ones. The loss rule catches this after a few hundred bits,
and the checker then seeds from good data. Allow about 3000 cycles after a
pattern or rate change before pulsing `clear`.

## Per-channel results (`link_monitor`)

Each channel keeps a `chan_stats_t` record (see `ttim_pkg`):

| field | meaning |
|---|---|
| `locked` | checker state |
| `error_count` (48 b) | wrong bits since `clear` |
| `first_seen`, `event_count` (48 b) | run-counter value at the first error since `clear` |
| `latency_valid`, `cable_latency` (14 b) | cycles from an injected bit leaving to its error being flagged |
| `source_count`, `noise_count` (48 b) | errors classed as "sent wrong" or "corrupted on the way" |

The widths of `error_count`, `event_count`, `cable_latency` and the run
counter are those of the original firmware.

### Cable latency

The original firmware showed a cable latency of 0 before an injection and
157 cycles (0x9D) after it. Here the latency is therefore measured from the
injected error. `inj_mark` starts a counter, and the next `err` on the
channel stops it and stores the count. If no error comes within 2^14−1
cycles, the measurement is dropped and any earlier value is kept. The
latency is the sum of:

- the cable delay `D`;
- 2 synchroniser cycles;
- the wait for the next sample strobe;
- 1 cycle for the registered `err`.

For a bit period of `N` cycles, the latency is `1 + k`, where `k` is the
smallest number at or above `D+2` with `(1+k) mod N == rx_phase mod N`.
The top-level testbench checks exactly this formula on every channel.

### Source or noise

The paper's rule for finding where an error came from:

- compare the received data with the original data, delayed so the two
  line up;
- if they agree, the data was already wrong at the source;
- if they differ, the cable or its surroundings corrupted it.

The paper applied this rule by eye, on an oscilloscope. Here it is done for
every error.

`tx_history` keeps the transmit line of the last 256 cycles: `hist[k]` is
the line `k+1` cycles ago. Let `L` be the measured latency. When `err`
fires, the bit the checker flagged left the transmitter in the cycle that
`hist[L-1]` shows. This holds for every bit, not only the injected one,
because the sample strobe always falls at the same place in the bit. The
monitor then classifies the error:

- the flagged bit equals `hist[L-1]`: `source_count` (the transmitter sent
  it wrong, as an injected error does);
- it differs: `noise_count`.

An error is left unclassified in two cases: no latency has been measured
yet, or `L` is more than 256 cycles (about 1 µs). `clear` zeroes the counts
and the first-error stamp but keeps the latency, since the latency belongs
to the cable. To classify errors on a new cabling, inject once after reset.

## Run counter, readout and probes

`run_timer` is the 48-bit run counter (`live_counter`). It counts every
cycle and restarts on `clear`. At 4 ns per count it wraps after 13.0 days,
so a run longer than that (the paper's ran 28 days) must be read out
periodically, as the original host script did once a second.

`probe_mux` registers the record of the channel chosen by `rd_sel` onto
`rd_stats`. It also drives three one-bit probes for an oscilloscope, the
three traces the paper used to find error sources:

- `probe_err`: the channel's error pulse;
- `probe_rx`: the channel's synchronised receive line;
- `probe_orig`: the transmit line delayed by `scope_delay + 1` cycles.

`probe_rx` lags the transmit line by `D + 3` cycles and `probe_orig` by
`scope_delay + 2`. The two line up when `scope_delay = D + 1`. The paper
used a fixed 500 ns, 125 cycles here.

## Top level (`ttim_prbs_top`)

| port | dir | width | |
|---|---|---|---|
| `clk` | in | 1 | 250 MHz system clock |
| `clk_locked` | in | 1 | clock PLL lock; low holds the design in reset (two-flop synchronised release) |
| `pattern` | in | 2 | `pattern_e`: PRBS-7/15/23/31 |
| `rate_sel`, `rx_phase` | in | 2, 3 | bit rate and sample point |
| `inject` | in | 1 | rising edge: invert one transmitted bit |
| `clear` | in | 1 | one-cycle pulse: zero counts, first-error stamps, run counter |
| `rd_sel` | in | 7 | channel to show on `rd_stats` and the probes |
| `scope_delay` | in | 8 | delay of `probe_orig` |
| `tx_pair12`, `tx_pair45` | out | 48 each | transmit pairs of each port |
| `rx_pair36`, `rx_pair78` | in | 48 each | receive pairs of each port, asynchronous |
| `live_counter` | out | 48 | run counter |
| `rd_stats` | out | `chan_stats_t` | selected channel's record |
| `err_vec`, `locked_vec` | out | 96 each | per-channel error pulses and lock flags, for a logic analyser |
| `probe_err`, `probe_rx`, `probe_orig` | out | 1 each | scope probes |

In the original system, the control inputs and the readout are connected
to the FPGA vendor's debug cores: a virtual-I/O core for settings and
values, and a logic analyser that captures 1024 consecutive cycles. A host
script reads both over JTAG and writes them to files. Those cores, the
clock PLL, and the line drivers, receivers and equalizers on the card's
mezzanines are not part of this RTL. Their signals are the top's ports.

Parameters: `NUM_PORTS = 48` (giving 96 channels) and `HIST_DEPTH = 256`.
The widths in `ttim_pkg` are `CNT_W = 48` and `LAT_W = 14`. Synthesis gives
roughly 27,500 flip-flops. Most of them are the 96 result records of 209
bits each, plus the checkers' 31-bit LFSRs.

## Where this design departs from, or adds to, the paper

- The paper names PRBS-7 only. The three other polynomials are added to
  provide the "different data patterns" it mentions.
- The speed is a power-of-two divider of the 250 MHz clock. The paper
  gives only the rates of 250 and 125 Mbit/s.
- The sample point moves in whole clock cycles.
- Error-source classification is in hardware, with counters. The paper
  judged it from scope traces.
- The checker's seeding, its loss-of-lock rule, the synchroniser, the
  reset scheme, the channel numbering and the readout multiplexer are all
  this design's own.
- The original firmware also showed a 6-bit value called `duty_state`.
  Its meaning is not known, and it is not implemented.

## Simulating

Each module has a self-checking testbench in `tb/` named `<module>_tb`.
Each prints `TB_RESULT checks=N failures=M` and stops itself with a
watchdog. With Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -y rtl \
    rtl/ttim_pkg.sv tb/ttim_prbs_top_tb.sv --top-module ttim_prbs_top_tb \
    --Mdir obj -o sim && obj/sim
```

`ttim_prbs_top_tb` runs the full-size design (96 channels) end to end. It
takes under a second of simulation time after about 20 s of compilation.
It models the cables, with a random delay of 10–200 cycles per channel,
single-bit noise hits and bursts of random data. It then checks:

- lock on all channels, and clean runs at 250, 125 and 62.5 Mbit/s;
- clean runs on PRBS-7 and PRBS-31;
- one injected error: counted once on every channel, classed as source,
  with the exact predicted latency, and with first-error time stamps that
  differ between channels exactly as the latencies do;
- noise hits: classed as noise, only on the hit channels;
- a burst: loss of lock and relock;
- probe alignment and the probe error pulse.

The block testbenches check against independent references. The generator
and checker are checked against the PRBS recurrences, and the strobes,
history, monitor and multiplexer against models written in the testbench.

`long_term_tb` replays the shape of the published 28-day test in 400,000
cycles, on 48 channels of the full-size design at 125 Mbit/s:

- channel 26 (the faulty cable) gets 40 isolated noise hits spread over the
  run;
- channels 11, 17, 22, 24, 28 and 38 each get a short cluster of hits at
  one random moment;
- a host loop reads all 48 records every 20,000 cycles and checks that no
  count ever goes down.

At the end, each channel's count must equal its hits, all of them classed
as noise, and the 41 clean channels must read zero. `ttim_pkg_tb` checks
that the feedback functions give maximal-length sequences.
