# ETA back-end: FPGA beamformer and recorder for a transient-pulse radio array

The Eight-meter-wavelength Transient Array (ETA) looks for short, dispersed
radio pulses at around 38 MHz with twelve dual-polarisation dipoles. Its
digital back end has to do one of two things with the 24 digitised antenna
signals. It either records the raw voltages of some antennas, or it forms
beams across the whole array so that every beam can be written to disk and
dedispersed offline. This RTL is that back end. It is a cluster of sixteen
FPGA nodes:

* **Twelve outer nodes.** Each takes the two antennas of one receiver board.
* **Four inner nodes.** Each combines the streams of six outer nodes and feeds
  one recording PC.

The difficult part is not any one arithmetic block. It is keeping 24
independent sample streams aligned through buffers, serial links and optional
FFTs, so that a sum taken in an inner node really adds samples taken at the
same instant. Most of the design's structure serves that goal.

## System organisation

```
 receiver board n (2 antennas) --LVDS--> outer node n (n = 0..11)
 outer node 6h+k, link l   ==Aurora==>   inner node 2h+l, input k   (h = 0,1)
 inner node i              --16-bit LVDS--> recording PC i
 control PC  --UART-->  every node
```

Outer nodes 0-5 carry one polarisation and 6-11 the other. Each outer node
forms eight beams and sends beams 1-4 on link 0 and beams 5-8 on link 1. So
inner nodes 0 and 1 together hold all eight beams of one polarisation, each
summed over the six outer nodes (twelve antennas). `eta_backend` instantiates
the sixteen nodes. The serial links themselves are vendor transceiver cores
and are not part of the RTL. The top therefore exposes each outer node's
LocalLink transmit port and each inner node's LocalLink receive port. The
intended wiring is `rx[2h+l][k] <- tx[6h+k][l]`, which is exactly what the
testbenches do through a latency-and-pause channel model.

## Word format and vector alignment

Every 32-bit word on an inter-node link has two parts:

* a 4-bit flag `{seq[2:0], vstart}`;
* a 28-bit payload.

A *vector* is 1024 consecutive samples, which is one FFT block. `vstart`
marks a vector's first word and `seq` counts vectors modulo 8. The
numbering starts in the receiver-board decoder, which locks to the board's
frame counter. Because of that, all outer nodes give the same vector the same
number, even though their links have different latencies.

Payloads by mode:

| mode | payload (28 bits) | words per sample |
|---|---|---|
| RAW (0) | A.re, A.im, B.re, B.im, each rounded 8 -> 7 bits | 1 per link (same on both) |
| BEAM (1) | {I14, Q14} of one partial beam | 4 per link |
| FFT (2) | {I14, Q14} of one partial beam for one bin | 4 per link per enabled bin |
| LINKTEST (3) | 28-bit counter | 1 per link |

All rounding in the design is round-half-to-even followed by saturation
(`eta_pkg::round_sat`). A 5-bit shift register in each node chooses which
bits of a sum are kept.

## Outer node

```
S25 LVDS -> s25_input_decode --+--> pattern_checker
test_input_gen ----------------+--> fft_input_buffer -> fft1024 x2 -> beam_bank x2
                                \-----------------------------------------> output_select
                                         -> aurora_tx_buffer x2 -> LocalLink
```

* **`s25_input_decode`** works in the receiver board's 60 MHz LVDS clock.
  - A sample pair arrives as eight 4-bit nibbles: A.re hi/lo, A.im hi/lo,
    B.re, B.im.
  - A counter line is high on nibble 0 of every 1024th frame. The decoder
    locks on it and counts a sync error for a misplaced or missing mark.
  - Each frame crosses into the 62.5 MHz node clock through a Gray-pointer
    asynchronous FIFO, carrying its sample index and vector number.
* **`test_input_gen`** replaces the receiver with a counter pattern or a
  two-antenna NCO tone. It paces its samples at 3/25 of the node clock
  (7.5 MSPS) and numbers its vectors the same way.
* **`pattern_checker`** counts words, word errors and bit errors against the
  counter pattern. It is used for receiver-link and internal tests.
* **`fft_input_buffer`** collects a whole vector while samples trickle in at
  7.5 MSPS. It then releases the vector as one 1024-cycle burst, because the
  FFT needs consecutive samples. Bursts start at least 2048 cycles apart. A
  vector that arrives too early sets the sticky `overrun` flag.
* **`fft1024`** is a radix-2 single-path delay-feedback pipeline in
  decimation-in-frequency form.
  - It has ten stages of 25 bits: 18 output bits plus 5 guard bits below the
    LSB. The twiddles are computed at elaboration from `$cos`/`$sin`.
  - A bit-reversal RAM puts the bins in natural order.
  - Latency from `in_sync` to bin 0 is 2058 cycles.
  - Output = DFT / 1024.
  - In basic beamforming mode the FFT is bypassed: samples are widened to
    18 bits and go straight to the beamformer.
* **`beam_bank`** (two per node, beams 1-4 and 5-8) holds eight
  `coeff_table`s: one per (beam, antenna), 1024 complex 16-bit coefficients
  each. The two banks hold 16 x 1024 = 16384 coefficients, as in the paper.
  - Each beam is `sum over antennas of c[beam][ant][bin] * x[ant]`, using
    eight 3-stage `cmult`s.
  - The result is rounded to 14 bits. Its latency is 6 cycles.
  - In basic mode every sample uses coefficient 0 of each table, i.e. one
    complex weight per antenna and beam.
* **`output_select`** turns the active mode into link words.
  - It holds a per-link queue of 1024 entries.
  - A 1024-bit bin mask (32 x 32-bit words) decides which FFT bins are sent.
    The first bin sent in a vector carries `vstart`, so masking never loses
    the alignment mark.
* **`aurora_tx_buffer`** is a 64-word FIFO. It presents words to LocalLink
  and gives back-pressure to the queue. Pauses of the transceiver (for
  example for clock correction) are absorbed here. Overflow at either level
  is sticky and readable.

## Inner node

```
LocalLink x6 -> pattern_checker x6 -> inner_sync -> inner_combine -> edt_encode -> PC
```

* **`inner_sync`** is the alignment engine. Each input has a 4096-word FIFO.
  - *Unlocked:* every enabled input drops words until its head is a vector
    start. When all heads are vector starts but their vector numbers differ,
    every input except the least-filled one drops its head and searches
    again. The least-filled input holds the newest data, so the others catch
    up to it.
  - *Locked:* one word of every enabled input is popped per step. A
    disagreement in `vstart` or `seq` raises `sync_err` and unlocks.
  - Disabled inputs are drained and discarded.
* **`inner_combine`** works by mode.
  - RAW/LINKTEST: it forwards two selected inputs as recording streams A and
    B. Two outer nodes give four antennas per PC, and sixteen antennas across
    the system.
  - BEAM: it sums the six partial beams to a full twelve-antenna beam and
    rounds it to 7+7 bits. It packs beams 1+2 into one word of stream A and
    beams 3+4 into one word of stream B.
  - FFT: it keeps 14+14 bits and alternates beams between A and B.
* **`edt_encode`** buffers A and B and sends them over the PC's 16-bit
  interface. It strictly alternates A and B words, upper half first, so the
  PC can split the two streams with no extra framing.

## Control

`control_interface` is a UART, 115200 baud at 62.5 MHz (`CLKS_PER_BIT` =
543).

* Write: `'W' a1 a0 d3 d2 d1 d0`.
* Read: `'R' a1 a0`, answered with four bytes, MSB first.

Outer-node registers:

* `0x0000` MODE: [1:0] mode, [2] use test generator, [3] NCO, [4] pattern
  check, [5] generator enable.
* `0x0001` SHIFT.
* `0x0002` TEST: NCO step and antenna-B phase offset.
* `0x0003` STATUS: {channel up[1:0], link buffer overflow[1:0], queue
  overflow, FFT overrun, decoder overflow, decoder locked}.
* `0x0010-0x0013`: sync errors, checked words, word errors, bit errors.
* `0x0100-0x011F`: bin mask.
* `0x8000 + 1024*t + bin`: coefficient table t (t = 8*bank + 2*beam +
  antenna), data {re16, im16}.

Inner-node registers:

* MODE: [1:0] mode, [6:4]/[10:8] raw inputs A/B, [21:16] input enable mask
  (0 = all).
* SHIFT.
* STATUS.
* Error counters: `0x0010` sync errors, `0x0011-0x0016` bit errors and
  `0x0017-0x001C` words per input in link-test mode.

The register map and the UART byte protocol are this design's own. The paper
only says that modes, coefficients and masks are loaded and that status and
error counts are read back over a serial link.

## Where this design departs from or extends the paper

* **Chosen here.** The node clock (62.5 MHz), the FFT architecture and
  widths, and the coefficient format (16-bit complex) were chosen here. So
  were the 14-bit partial-beam format on the links, every FIFO depth, the
  register map and the alignment algorithm of `inner_sync`. The paper gives
  the block structure, the modes, the 4-bit flag plus 28-bit data word, 8-bit
  samples, 7+7-bit recorded beams, the beam split over two links, 1024-point
  FFTs, 16384 coefficients and the bin mask.
* **Sample rate.** The paper quotes both 7.5 MSPS per antenna and an 18 MHz
  FFT passband split into 17.6 kHz channels. These do not agree. The design
  follows 7.5 MSPS, which gives 7.3 kHz bins and 136.5 us per spectrum.
* **Serial links and receiver boards.** The Aurora/RocketIO links, the
  receiver boards' analogue side and A/D converters, the recording PCs and
  the control PC are outside the RTL. Testbenches model the links and
  receiver boards behaviourally.
* **Raw-mode samples** are rounded from 8 to 7 bits per component so that two
  complex antenna samples fit one 28-bit payload.

## Verification

Every RTL module has a self-checking testbench in `tb/` that compares it with
an independent model. The checks include:

* the FFT against a direct DFT within 4 LSB, with its 2058-cycle latency;
* the beams against exact complex arithmetic with round-half-to-even;
* the link word formats and bin masking in `output_select`;
* alignment, loss and re-lock in `inner_sync`;
* the UART protocol.

`tb_eta_backend` runs the whole 16-node system with a short UART bit time.
It covers:

* raw recording;
* inner-node lock;
* link-test counters with zero bit errors;
* coefficient write and read-back;
* beam mode;
* FFT mode with a bin mask;
* clock-correction stalls on every link;
* a forced link-buffer overflow.

It counts each of these mechanisms and fails if one never occurred.
`tb_eta_backend_full` runs the same system with every parameter at its
default, including the real 115200-baud UART. All nodes start in raw mode
after reset, so it checks that data flows from all twelve receivers to all
four recording streams, and that every inner node reports lock with no
overflow.

To simulate, for example:

```
verilator --binary --timing -y rtl -y tb rtl/eta_pkg.sv tb/tb_eta_backend.sv --top tb_eta_backend
./obj_dir/Vtb_eta_backend
```

Each testbench prints `TB_RESULT checks=N failures=M`.
