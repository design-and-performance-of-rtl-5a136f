# Electromagnetic Calorimeter Trigger (EMT) for a Level 1 trigger

The EMT takes the whole electromagnetic calorimeter of a collider detector and
decides, 7.4 million times a second, where energy has arrived, how large it
is, and when it arrived. Its output is a 60-bit word per 7.4 MHz time bin: for
each of 20 azimuthal (phi) positions, three bits saying whether the energy
there passes a low, a medium and a high threshold. The bits are set only in
the bins around the measured time of a deposit. A global trigger downstream counts and
compares these bits to make its accept decision.

The main idea is that the time of a deposit comes from the shape of the
calorimeter pulse and not from a comparator edge. The shaped pulse is sampled
only every 269 ns. An 8-tap FIR filter turns this pulse into a signal that
goes from positive to negative a fixed time after the particle arrived. The
sample where the sign changes, refined by linear interpolation to half a
sample, gives the time. The energy thresholds are then gated by that time.

This repository holds synthesizable SystemVerilog for the complete trigger:
- the per-phi algorithm;
- the ten processor boards with their readout, playback, spy and VME logic;
- the top level that wires the 280 input lines to the boards.

It also holds self-checking testbenches for every module.

## Input data and clocking

- The design runs on one 59.5 MHz clock.
- The calorimeter electronics sum about 24 crystals into a "tower" and send
  its 16-bit energy every 3.7 MHz sample period. That is 16 clocks, so each
  sample is one 16-bit serial word.
- There are 280 such lines, 7 towers for each of 40 phi strips.
- Every line is resynchronised by two flip-flops (`tower_rx`). It then passes
  a per-line programmable delay of 0 to 15 clocks, which makes up for
  different cable lengths. Then it enters a shift register.
- Words are sent MSB first. A word is taken when `word_strobe` is high.
  `word_strobe` is phase 15 of a 0..15 phase counter in `fast_control`. A SYNC
  command resets that counter, so the whole system agrees on where a sample
  starts.
- Energies are unsigned counts. The design assumes 1 count = 1 MeV, so the
  default thresholds are 120, 300 and 800.

## From phi strips to phi sums

- A phi strip is the 7 towers at one azimuth.
- Phi sum *k* adds strips *k* and *k*+1 (mod 40). Each strip is therefore
  counted twice, and a shower that spreads across a strip boundary is fully
  contained in one sum.
- Each of the 14 towers in a sum can be masked out. The 14-bit masks are held
  per processor. This is how noisy towers are removed.
- The sum is 20 bits wide and is registered once per sample (`phi_sum`).

## Finding the time: FIR filter and interpolated zero crossing

This is the heart of the design and the part that needs care.

**The filter.** `fir_filter` computes

    y[n] = w0*x[n] + w1*x[n-1] + ... + w7*x[n-7]

- `x[n]` is the newest phi sum.
- The weights are signed 4-bit values, programmable through one register
  (`REG_WEIGHT`, nibble *i* = `w_i`).
- The default is `w0 = +1`, `w2 = -2` and all others 0, so y[n] = x[n] - 2 x[n-2].
- The calorimeter pulse is shaped by a CR-RC-RC circuit (0.8, 0.25 and
  0.25 µs). Its rising edge makes y positive. Shortly before the peak, x[n]
  falls below 2 x[n-2], so y turns negative. For the published pulse shape
  (peak about 1.45 µs after the deposit), the crossing comes about 1.15-1.2 µs
  after the deposit, independent of the pulse height.
- The output is 27 bits signed, wide enough for any weight set.

**The crossing.** `zero_cross` keeps the previous output *p* and looks at the
current output *c*. A crossing is `p > 0 && c <= 0`. The straight line from
*p* to *c* reaches zero at the fraction f = p / (p - c) of the sample period.
Two bins of 7.4 MHz fit in each sample:
- if f <= 1/2, the crossing belongs to the early bin;
- otherwise it belongs to the late bin.

Since p - c > 0, the test f <= 1/2 is the same as `p + c <= 0`. So the
interpolation needs one adder and a sign bit, with no division. The result
is a 2-bit one-hot `xbin` per sample: `01` for early, `10` for late.

**The gate.** `time_gate` keeps a history of crossing bins at 7.4 MHz
resolution. A bin is open if there was a crossing between `gate_delay` and
`gate_delay + gate_width - 1` bins earlier. The defaults are delay 0 and
width 2, so the open bins are the crossing bin and the next one. The three
threshold bits of the current sample are ANDed with the gate of each of its
two bins. The result is two 3-bit words per sample, one for each 7.4 MHz bin.

`algorithm_fpga` delays the threshold bits by one pipeline stage so that
they line up with the crossing result. The bits gated with a crossing are
the threshold bits of the sample in which the crossing was seen. With the
default weights, that sample is close to the pulse peak.

## Energy thresholds and the pair OR

- `energy_thresholds` sets bit *k* when the phi sum is strictly greater than
  threshold *k* (20-bit registers).
- After gating, the bits of phi sums 2m and 2m+1 are ORed (`primitive_or`).
  This gives 20 positions × 3 thresholds = 60 bits per 7.4 MHz bin, about
  444 Mbit/s to the global trigger.

## Boards

The 40 algorithm processors sit on ten Trigger Processor Boards (`tpb`),
four per board.
- Board *t* receives the 35 lines of strips 4t .. 4t+4, so it covers phi sums
  4t .. 4t+3. Strip 4t+4 is the overlap with the next board. For board 9 this
  strip is strip 0: `emt_top` wraps the azimuth around.
- On the board, processor *a* uses lines 7a .. 7a+13.
- Each board drives 6 of the 60 output bits (`glt_bits[6t +: 6]`). The bits
  of a sample are shown as its early bin for 8 clocks, then its late bin for
  8 clocks.

Fixed latency, from the clock that samples a frame's last serial bit to the
first clock of that frame's early output bin:
- 2 clocks for the synchroniser;
- the line delay;
- 7 clocks of pipeline (receiver, sum, FIR, crossing, gate, OR, output
  register).

All boards and processors run independently. They share only the clock and
the broadcast commands.

## Readout: latency buffer, event buffers and formatter

Every sample, each board writes a 104-bit record into a 64-deep circular
latency buffer. Per processor, the record holds the phi sum, the early gated
bits and the late gated bits.

On a Level 1 accept (L1A), the `formatter` does the following:
- It copies `window` records into the next free event buffer, starting
  `offset` samples back from the current write pointer. The defaults are 52
  back (14 µs) and 16 records (4.3 µs, about ±2 µs around the event).
- There are four event buffers. Each read request sends out the oldest
  stored event on `ro_data` with `ro_valid`, `ro_first`, `ro_last` and a
  16-bit event number.
- If all four buffers are full, or a copy is still running, the accept is
  dropped and a 16-bit counter (`dropped`) counts it. The number of full
  buffers and the drop count appear in the VME status word.

An assertion checks that a copy never writes the buffer being read out.

## Playback and spy memories

**Playback.** Two playback memories can replace live data (`playback_memory`).
- Front-end playback: 8192 words × 35 bits, one word per clock. It stands in
  for the serial input lines in front of the processors.
- Back-end playback: 1024 words × 6 bits, one word per 7.4 MHz bin. It stands
  in for the board's output bits.
- Both are loaded through commands (`FE_LOAD`, `BE_LOAD`) and switched on
  through `REG_MODE`.
- Both restart at address 0 on SYNC and cycle continuously. Each holds
  137.7 µs of data.

**Spy memories.** These capture the data path, once per `SPY_ARM` command,
until full (`spy_memory`):
- mem 0: the 35 raw input lines after the front-end multiplexer,
  8192 × 35;
- mem 1-4: {FIR output, phi sum} of each processor, 512 × 47;
- mem 5: the 6 output bits, 1024 × 6.

All of them hold about 138 µs.

**VME.** They are read over a read-only VME slave (`vme_interface`) while the
trigger keeps running. The address on A[23:1] is:
- A[23:20]: board number;
- A[19:16]: memory (0-5 as above, 15 = status);
- A[15:2]: entry;
- A[1]: which 32-bit half of the entry.

The status word is:
- half 0: `{spy_done[7:0], n_full[4:0], 3'b0, dropped[15:0]}`. Only
  `spy_done` bits 5:0 are used, one per spy memory;
- half 1: the board number.

The slave answers only reads to its own board number. It asserts `drive` and
`dtack_n` until the master releases DS*. Writes are never acknowledged.

## Commands and registers

The command stream from the data-acquisition system is given as a parallel
word `cmd_t {valid, board, op, addr[15:0], data[63:0]}`, one per clock.
Board 15 (`BOARD_ALL`) addresses every board.

| op | meaning |
|---|---|
| SYNC | reset the sample phase and playback addresses |
| L1A | Level 1 accept |
| READ | read out the oldest event |
| CFG_WR / CFG_RD | write / read back register `addr`; the read-back appears on `rb_data` one clock later |
| SPY_ARM | start one capture in all spy memories |
| FE_LOAD / BE_LOAD | write playback word `addr` |

| register | contents | default |
|---|---|---|
| 0x00 | FIR weights, nibble i = w_i | +1, 0, -2, 0 … |
| 0x01-0x03 | thresholds 0-2 | 120, 300, 800 |
| 0x04-0x07 | tower masks of processors 0-3 | 0 |
| 0x08 | [3:0] gate delay, [6:4] gate width (bins) | 0, 2 |
| 0x09 | [5:0] readout offset, [12:8] window (samples) | 52, 16 |
| 0x0A | [0] front-end playback, [1] back-end playback | 0 |
| 0x10-0x32 | per-line input delay (clocks) | 0 |

## What follows the original design and what is new here

These follow the original design:
- the system structure (40 processors on 10 boards of 4);
- the 280 lines at 59.5 MHz carrying 16-bit samples at 3.7 MHz;
- 40 overlapping phi sums;
- the 8-tap FIR with weights +1, 0, -2 and zero crossing;
- interpolation to 7.4 MHz;
- three thresholds around 120/300/800 MeV;
- the pair OR to 20 positions and 60 bits per bin;
- time gating;
- a latency buffer covering 12 µs;
- four event buffers with a configurable window of about ±2 µs;
- front-end and back-end playback;
- spy memories on the raw input, intermediate stages and output, each
  holding about 140 µs;
- a read-only VME interface;
- a fast-control decoder.

These are choices made for this RTL. The original leaves them open:
- 7 towers per strip and the MSB-first serial word;
- the per-line delay range;
- the 4-bit weight width;
- how crossings are assigned to half-sample bins;
- the gate's delay/width form;
- 1 MeV per count;
- the record format;
- the buffer depths;
- the drop-when-full policy;
- the command word and register map (the real system uses the experiment's
  serial command protocol over fibre);
- which intermediate values are spied;
- the VME address map and status word;
- the mapping of lines to boards.

These parts are not modelled:
- the fibre links, optical transition board and readout module;
- the ECL/PECL line drivers;
- the global trigger;
- the tower summation in the calorimeter electronics.

At the top level, their signals are plain ports:
- `ser_in` is the calorimeter lines;
- `cmd` is the command stream;
- `glt_bits` goes to the global trigger;
- `ro_*` and `rb_*` are the readout towards the data-acquisition system;
- `vme_*` is the VME bus. `vme_data` is the OR of the selected board, and
  `vme_dtack_n` the AND of all boards.

## Files

| module | role |
|---|---|
| `emt_pkg` | sizes, `cfg_t` configuration struct, command type, register map |
| `tower_rx` | serial line receiver: synchroniser, delay, shift register |
| `phi_sum` | masked sum of 14 towers |
| `fir_filter` | 8-tap FIR |
| `zero_cross` | crossing detection with half-sample interpolation |
| `energy_thresholds` | three comparators |
| `time_gate` | crossing-time gate of the threshold bits |
| `algorithm_fpga` | one processor: the six blocks above in sequence |
| `primitive_or` | pair OR of phi sums |
| `playback_memory` | playback RAM with multiplexer |
| `latency_buffer`, `event_buffer`, `formatter` | readout path |
| `fast_control` | command decoder, registers, sample phase |
| `spy_memory` | single-shot capture memory |
| `vme_interface` | read-only VME slave |
| `tpb` | one board |
| `emt_top` | ten boards and the input line mapping |

Each file begins with a comment describing its interface and timing.

## Simulation

Every module has a self-checking testbench, `tb/tb_<module>.sv`. Each one
prints `TB_RESULT checks=N failures=M` and stops by a watchdog if it hangs.
The reference values are computed in the testbench itself, not taken from
the RTL.

Two testbenches cover whole assemblies:
- `tb_algorithm_fpga` drives one processor with pulses of the shape
  t²·exp(−t/τ), τ = 0.725 µs. This pulse peaks at 1.45 µs, like the
  published shaped pulse. It
  checks the output against a behavioural model, the fixed latency, and that
  the crossing falls 0.9-1.5 µs after the deposit.
- `tb_tpb` (one board) and `tb_emt_top` (the full 280-line, 10-board trigger
  with every parameter at its default) run the full chain:
  - deposits (also across the board boundary and the 0/360° wrap);
  - masks, gating and the pair OR;
  - front-end and back-end playback;
  - Level 1 accepts with exact readout records, and a dropped accept;
  - VME reads of the status and spy memories;
  - register read-back.

  They count each of these mechanisms and fail if one never happens.

`tb_deposit_timing` measures the timing quality. It sends 300 isolated
deposits of random size (150 to 20000 counts), random phase and random
split over two towers through one processor. It takes the first gated bin
of each deposit as the time estimate and prints a histogram of the time
offsets. All offsets fall between 0.98 and 1.12 µs after the deposit,
about one 135 ns bin wide. This is well inside the 1 µs window a Level 1
trigger allows. The test has no noise or pile-up, so real data spread
wider.

With Verilator 5, for example:

    verilator --binary --timing --assert --timescale 1ns/1ps \
        -Irtl -Itb -y rtl -y tb +libext+.sv \
        --top-module tb_emt_top rtl/emt_pkg.sv tb/tb_emt_top.sv
    obj_dir/Vtb_emt_top

Any other testbench runs the same way with its own name. The
testbenches give delays in nanoseconds. The full-size top-level test builds
and runs in well under a minute.

## Known limits

- Thresholds compare the registered phi sum of the crossing sample. If the
  FIR weights are changed so that the crossing comes much later than the
  pulse peak, `gate_delay` can widen the gate, but the energy used is still
  that of the crossing sample.
- The stated shaper time constants (0.8, 0.25 and 0.25 µs) would give a
  pulse that peaks at about 0.73 µs, not the published 1.45 µs. The tests
  follow the published pulse. With other shapes the weights may need
  retuning; they are registers.
- Input delays are limited to 15 clocks. The readout window is 1 to 16
  samples; a register value of 0 or above 16 gives 16.
- A Level 1 accept that arrives during a copy (less than 17 clocks after the
  previous one) is dropped and counted.
