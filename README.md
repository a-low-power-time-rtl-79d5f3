# A low-power delay-line TDC for LGAD timing

This is RTL for a time-to-digital converter (TDC) that timestamps hits from a
silicon timing detector. It was designed for the per-pixel readout of the CMS
Endcap Timing Layer. For each hit it measures two times:

- **TOA** (time of arrival): from the discriminator's leading edge to the next
  edge of the 40 MHz bunch clock.
- **TOT** (time over threshold): the width of the discriminator pulse. It is
  used offline to correct time walk.

The hard constraint is power: less than 200 µW per pixel at 1 % hit
occupancy. The design meets it with one cheap trick. There is no DLL and no
tuned delay line. Each hit starts a free-running ring oscillator made of 63
plain NAND gates. Snapshots of that ring give the fine time, and a 3-bit
counter of its turns gives the coarse time. Nothing toggles in a 25 ns cycle
without a hit.

An untuned gate delay drifts with process, supply and temperature (the
fabricated chip reported about 17.8 ps per gate at nominal conditions). So
every hit also carries its own calibration. The TOA snapshot is taken twice,
the second time a known 3.125 ns later, and the difference in bins measures
the current gate delay.

## How one hit is measured

```
CLK40M    ____/‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾\____
CLK320M   ____/‾\___/‾\______________________     two pulses, 3.125 ns apart
PULSE   _/‾‾‾‾‾‾‾‾\_________________________     discriminator output
START   __/‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾\___________     ring runs while high
TOTCLK  ‾‾‾‾‾‾‾‾‾‾‾\_/‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾     strobe at PULSE trailing edge
TOACLK  ‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾\_/‾‾‾‾\_/‾‾‾‾‾‾‾‾‾‾‾     TOA strobe, then CAL strobe
TOALATCH‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾\_/‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾‾     copy of the first TOACLK strobe
```

(The time axis of this sketch is not to scale. It shows the order of events.)

1. The PULSE leading edge raises **START**, and the ring begins to oscillate.
2. The PULSE trailing edge fires **TOTCLK**. The *TOT recorder* stores the
   32 even taps of the ring and both turn counters.
3. The next CLK40M rising edge fires the first **TOACLK** strobe. The
   *TOA/CAL recorder* stores all 63 taps and both counters. Right after that,
   **TOALATCH** copies this snapshot into the *TOA recorder*.
4. The second CLK320M pulse, 3.125 ns later, fires the second TOACLK strobe.
   The TOA/CAL recorder is overwritten with the calibration snapshot.
5. Once both the calibration and the TOT strobes are done, START falls and the
   ring settles back to rest.
6. At the following CLK40M edge the *encoder* turns the three snapshots into
   `TOA_Code[9:0]`, `TOT_Code[8:0]`, `CAL_Code[9:0]` and `hitFlag`.

All strobes are active low for about 400 ps, and the DFFs capture on the
rising (trailing) edge. Keeping the pulse short limits how long the DFFs stay
transparent. All measured times therefore carry the same constant offset of
one strobe width. That offset cancels in the CAL code and is a fixed pedestal
in TOA and TOT.

## Reading the ring: phase and turns

This is the part of the design that most needs explaining.

**The ring.** Stage 0 computes `NAND(START, D62)`. Stages 1 to 62 are NAND
gates with one input tied high, so they act as inverters. At rest
(START = 0) the taps alternate `D0=1, D1=0, D2=1, …, D62=1`. When START
rises, a transition runs down the line. The ring has 63 inversions, an odd
number, so the transition wraps from D62 back to D0 and keeps going. Each tap
flips once on the first pass and flips back on the second. One full turn is
therefore **126 gate delays**, which is why the TOA DNL repeats every 126 codes.

**Fine phase.** XOR the snapshot with the rest pattern. The taps that have
flipped form one run of ones:

| gate delays since START (`p` within a turn) | flipped taps           | phase            |
|---------------------------------------------|------------------------|------------------|
| 1 … 63                                      | D0 … D(p−1)            | count of ones    |
| 64 … 125                                    | D(p−63) … D62          | 126 − count      |
| 0                                           | none                   | 0                |

The encoder *counts* ones rather than searching for the edge of the run.
A snapshot DFF that goes metastable can only sit at the edge of the run, so
it changes the count by at most one LSB. That is the required property: one
metastable DFF per recorder may affect only the least significant bits.

**TOT phase.** The TOT recorder sees only the even taps, so the same rule
gives 64 codes per turn (`count` or `64 − count`). Most TOT bins are two gate
delays wide. Two bins per turn are only one gate delay wide: code 32 (all
even taps flipped, which lasts until D0 flips back) and code 0, which is 64,
128, … in the full code. The measured TOT DNL of the fabricated chip shows
exactly these narrow bins at 32, 64, 96, …. The average TOT bin is 126/64
gate delays, about 35.0 ps.

**Turns.** Tap D31 goes through a latch whose enable is tied high. It is
there only to give D31 the same load as the other taps. D31 then clocks two
3-bit ripple counters:

- Counter A counts the rising edges of D31, at phase 32 of each turn.
- Counter B counts the falling edges, at phase 95.

A strobe can catch either counter while it ripples. It can never catch both,
because they step half a turn apart. The encoder therefore chooses from the
fine phase:

- phase 0 … 63: use B. It last stepped at phase 95 of the previous turn, so it
  equals the number of completed turns.
- phase 64 … 125: use A − 1. A stepped at phase 32 of this turn and is one
  ahead.

Each recorder stores both counters (CAx/CBx). Both counters are cleared while
START is low, so every hit counts from zero.

**Codes.** `TOA = 126·turns + phase` runs from 0 to 1007. That is 17.9 ns at
17.8 ps, and the range must cover TOA + 3.125 ns + the strobe width.
`TOT = 64·turns + TOT phase` runs from 0 to 511. A larger TOA code means an
earlier hit, because the TOA measures from START up to the clock edge.

## Calibration

`CAL_Code = (calibration timestamp − TOA timestamp) mod 1008`. This is the
strobe spacing measured in gate delays. At the default 3.125 ns and 17.8 ps
it is 175 or 176. The spacing is set by `cal_dly` in 781.25 ps steps, and
`cal_dly = 4` gives 3.125 ns. Offline, the bin size of each hit is
`spacing / CAL`. A more careful form scales by the ratio of the measured TOA
bin to the CAL bin at one reference condition, which absorbs the small
systematic difference seen between the two in silicon. The gate delay changes
by about 23 % over the supply range and 6 % over temperature. With the
calibration applied, the bin size holds to a fraction of a percent.

## Readout: encoder and DMRO

The encoder registers its outputs on the CLK40M rising edge. A hit whose TOA
strobe follows edge *k* appears after edge *k+1* with `hit_flag = 1`. In
cycles without a hit, all codes are 0. The TOA recorder flips a toggle bit on
every TOALATCH, and the encoder sees a hit as a change of that bit since the
previous cycle.

The diagnostic-mode readout (DMRO) sends one 32-bit frame per 25 ns over a
1.28 Gb/s serial line:

```
bit 31..30   29..20     19..11     10..1      0
    1 0    | TOA_Code | TOT_Code | CAL_Code | hitFlag |   (bits 29..0 scrambled)
```

The frame is sent header first and MSB first. The 30 payload bits pass
through a self-synchronizing scrambler with polynomial x⁵⁸ + x³⁹ + 1: each
bit is XORed with the scrambled bits sent 39 and 58 bits before it. The header
is not scrambled, so a receiver can align to the constant `10` and descramble
with the same taps and no shared state. The DMRO takes the encoder's word
half a 40 MHz period after the encoder updates it.

## Clocks

`tdc_clock_divider` makes everything from a 1.28 GHz input with a 5-bit
counter:

- CLK40M: high for counts 0–15.
- CLK320M: pulses at counts 0–1 and at `cal_dly`…`cal_dly+1`. The first
  pulse coincides with the CLK40M rising edge.
- The DMRO frame strobe at count 16.

`cal_dly` must be between 3 and 29.

## Modules

| file | what it is | kind |
|------|------------|------|
| `tdc_pkg.sv` | sizes (63 taps, 3-bit counters, code widths), phase decoding and turn selection functions | package |
| `tdc_clock_divider.sv` | 1.28 GHz → CLK40M, CLK320M double pulse, frame strobe | synthesizable |
| `tdc_controller.sv` | START, TOACLK, TOALATCH, TOTCLK generation | behavioural model |
| `tdc_delay_line.sv` | 63-stage NAND ring, separate rise/fall delays | behavioural model |
| `tdc_ripple_counter.sv` | two 3-bit ripple counters on D31 and its inverse | synthesizable (ripple clocks) |
| `tdc_tot_recorder.sv` | TOTCLK snapshot: T0…T31, CAT, CBT | synthesizable |
| `tdc_toacal_recorder.sv` | TOACLK snapshot: C0…C62, CAC, CBC | synthesizable |
| `tdc_toa_recorder.sv` | TOALATCH copy: A0…A62, CAA, CBA, hit toggle | synthesizable |
| `tdc_encoder.sv` | snapshots → TOA/TOT/CAL codes and hitFlag | synthesizable |
| `tdc_dmro.sv` | scrambler, 2'b10 header, 32:1 serializer | synthesizable |
| `tdc_gro.sv` | gated copy of the ring, for frequency calibration | behavioural model |
| `tdc_top.sv` | the TDC block wired together | structural |

The ring, the GRO and the strobe controller are analog-timed circuits in
silicon. They are modelled with `#` delays, which makes them simulation
models and not netlists. The ring models use transport delays, so every
transition propagates. In silicon, the recorder DFFs on the odd taps of the
TOT side have their clock tied high and exist only to balance the load. They
are left out of the RTL.

Top-level ports: `clk1g28`, `rst_n`, `pulse`, `cal_dly[4:0]` and `gro_en`
(slow-control settings), `toa_code`, `tot_code`, `cal_code`, `hit_flag`,
`dmro_sout` and `gro_out`. The top has two parameters, `TD_RISE_PS` and
`TD_FALL_PS`, which set the gate delays of the ring models.

## What follows the original design and what is filled in

Taken from the published description of the TDC:

- the 63-NAND ring with START on the first gate;
- the tap assignment of the recorders (all taps for TOA/CAL, even taps for TOT);
- the 3-bit ripple counters on D31, duplicated with an inverted clock;
- the three recorders and their signal names;
- the double-strobe calibration and the ~400 ps active-low strobes;
- TOALATCH copying the first timestamp;
- the code widths;
- the DMRO frame content, its 2'b10 header and its 1.28 Gb/s rate;
- the 1.28 GHz clock division and the programmable 3.125 ns spacing.

This implementation's own choices, where the description gives the function
but not the circuit:

- **Encoder arithmetic**: the ones-count phase decoding, the phase-based
  counter choice (B in the first half-turn, A − 1 in the second), and CAL
  defined as the difference of the two timestamps. The description does say
  that the fine time picks the stable counter. It also mentions a TOT "offset
  of 1", which is not applied here: without it, the narrow TOT bins already
  fall at 32, 64, 96 as measured.
- **START release**: START falls when *both* the calibration strobe and the
  TOT strobe are done. One description of START ends it at the second
  CLK320M pulse, but that would cut the TOT of pulses longer than
  TOA + 3.125 ns.
- **Counter clear**: the counters are cleared while START is low and during
  reset. No reset is shown in the original schematic.
- **Hit flag** transport through a toggle bit, and codes forced to zero
  without a hit.
- **DMRO details**: the scrambler polynomial, the bit order and the load timing.
- **Divider details**: the CLK320M pulse width (1.5625 ns) and the
  `cal_dly` encoding.
- **Controller gate delays** (30 ps, 60 ps), and the rule that pulses arriving
  during a measurement are ignored.

Not included: the I²C slow-control block (a generic block from elsewhere),
the differential I/O cells, and the analog front end. Their signals are
plain top-level ports. Power consumption and radiation effects are outside
what RTL can show.

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog. Expected values come
from `tb_tdc_model_pkg.sv`, an independent model of the ideal ring. It gives
tap levels, counter values and the TOA/TOT code as functions of the time
since START.

| testbench | what it checks |
|-----------|----------------|
| `tb_tdc_clock_divider` | periods, pulse spacing at `cal_dly` 4 and 8, frame strobe |
| `tb_tdc_controller` | strobe times and widths, START release for long pulses, no strobes without a hit |
| `tb_tdc_delay_line` | tap snapshots against the ideal ring, 126-delay period, return to rest |
| `tb_tdc_ripple_counter` | counts of rising/falling D31 edges, clear |
| `tb_tdc_*_recorder` | capture on the strobe, hold otherwise, hit toggle |
| `tb_tdc_encoder` | 3000 random snapshots, including a metastable fine DFF and garbage in the rippling counter |
| `tb_tdc_dmro` | header, descrambled payload against the words sent |
| `tb_tdc_gro` | gating, 126-delay period |
| `tb_tdc_top` | end to end at default size: TOA/TOT/CAL against pulse timing, serial stream against parallel outputs, `cal_dly` switch, and a count of each mechanism |
| `tb_tdc_toa_sweep` | arrival time swept in 5 ps steps on three rings (17.8 ps, 21.0 ps, 16.8/18.8 ps): fitted bin, CAL, self-calibrated bin within 1 %, flat DNL, even/odd effect |
| `tb_tdc_tot_sweep` | a pulse in every 40 MHz cycle, width 0.4–10.2 ns in 5 ps steps: TOT codes, average bin 126/64 gate delays, narrow bins at multiples of 32 |

To simulate one of them with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/tdc_pkg.sv tb/tb_tdc_model_pkg.sv tb/tb_tdc_top.sv --top-module tb_tdc_top
./obj_dir/Vtb_tdc_top
```

All files declare `timeunit 1ps; timeprecision 1fs;` because the ring delays
are fractions of a picosecond apart. Verilator is a two-state simulator, so
each testbench pulses its asynchronous resets explicitly instead of relying
on X propagation. The sweep testbenches take up to about a minute. The others
take seconds.

**How far to trust it.** The digital part (encoder, recorders, counters,
divider, DMRO) is checked against an independent model, including the
metastability cases the encoder is meant to absorb. The timing behaviour
depends on the behavioural ring and controller models. These are idealized:
every gate has the same delay, there is no jitter or supply coupling, and the
gate delays of the controller are guesses. Codes near a coarse-counter step
are correct here by construction of the model, while in silicon they rely on
the ripple settling within about 30 gate delays.
