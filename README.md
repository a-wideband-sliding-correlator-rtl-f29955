# Sliding-correlator channel sounder baseband: RTL model

A sliding-correlator channel sounder measures how a radio channel smears one
transmitted chip into echoes (the power delay profile, PDP). The transmitter
sends a maximal-length pseudo-noise (PN) sequence at chip rate alpha. The
receiver multiplies what it hears by the *same* sequence, generated at a
slightly lower rate beta. The receiver's copy therefore slides past the
received code by one chip every

    gamma = alpha / (alpha - beta)

chips. Whenever the copy lines up with one echo, the low-pass filtered product
shows a peak. The whole delay axis is swept once per code period, stretched in
time by gamma. A 1 ns echo spacing becomes gamma ns at the filter output, so
slow, cheap converters can record a 1 GHz-wide measurement.

The design here is the baseband chip of such a sounder, after the 65 nm CMOS
chip by Wu, Rappaport, Knox and Shahrjerdi ("A Wideband Sliding
Correlator-Based Channel Sounder with Synchronization in 65 nm CMOS"). One
chip serves as either the transmitter or the receiver. In receiver mode it also
produces a *synchronization* output: the product of its own fast-clock copy of
the transmitted code with the slow-clock copy. That output peaks at zero
delay, so absolute echo delays can be read from it instead of being measured
from the strongest echo.

## Chip organisation

```
            S<2:0>, SW<12:1> (shared)                 Mode_control
                   |                                        |
clk_fast --> [ PNSG 1 ] -- s(t) --> [ mode_switch ] --0--> pn_tx            (TX)
                                          |1 (differential)
                                          v
                                    [ mixer: sync ] ----> sync_p/n  -> board LPF
clk_slow --> [ PNSG 2 ] -- r(t) -----+--> LO of all three mixers
                                     |
if_i_p/n ------------------> [ mixer: I ] ------------> rs_i_p/n  -> board LPF
if_q_p/n ------------------> [ mixer: Q ] ------------> rs_q_p/n  -> board LPF
reset_n  --> /SET of every flip-flop in both PNSGs
```

| Module | File | What it is |
|---|---|---|
| `sounder_pkg` | `rtl/sounder_pkg.sv` | N range (5..12), `mode_e`, millivolt type `mv_t`, supply level |
| `tspc_dff` | `rtl/tspc_dff.sv` | flip-flop with asynchronous active-low set (logic function of the TSPC cell) |
| `pnsg` | `rtl/pnsg.sv` | programmable PN sequence generator: 12-stage modular LFSR, stage multiplexer, Sync-DFF |
| `mode_switch` | `rtl/mode_switch.sv` | Mode_control routing of PNSG 1 |
| `gilbert_mixer` | `rtl/gilbert_mixer.sv` | **behavioural model** of the double-balanced Gilbert-cell mixer |
| `sounder_top` | `rtl/sounder_top.sv` | the chip: two PNSGs, the switch and three mixers |

The low-pass filters are passive RC filters on the test board (100 kHz
cut-off in the original set-up), so they are not part of the RTL. The chip's
outputs are the raw mixer products. The testbenches use a moving-sum filter
(`tb/corr_lpf_model.sv`) in their place.

## The programmable PN generator

This block is the digital heart of the chip. It is also where the published
description leaves the most to interpretation, because the generator's
schematic was not available.

**Structure.** Twelve set-able flip-flops form a modular shift register
generator (MSRG, also called a Galois LFSR). Stage 1 feeds stage 2, and so on
up to stage 12. A multiplexer selects the output of stage N as the feedback
bit `fb`. The feedback bit:

* is loaded into stage 1;
* is XORed into the input of stage k+1 wherever `SW<k>` = 1.

```
d[1]   = fb
d[k+1] = q[k] XOR (SW<k> AND fb)        k = 1..11
fb     = q[N],  N = 5 + S<2:0>
pn     = fb delayed by one more flip-flop (Sync-DFF)
```

Every adder sits between two stages, so the loop delay is one flip-flop plus
one XOR, whatever the number of taps. That is why the modular form was chosen
over the simple (Fibonacci) shift register for a 1 Gchip/s generator.

**Programming.** Read as a polynomial, the register implements

    p(x) = x^N + sum over k of SW<k> x^k + 1.

The output is an m-sequence of 2^N - 1 chips exactly when p(x) is primitive.
The published example is S<2:0> = `110` with SW = `00010010010`, which gives
an 11-stage code with feedback taps [11, 8, 5, 2]. Under this design's
encoding:

* N = 5 + 6 = 11;
* the printed word has 11 digits. It is read as SW<11:1> with SW<1> on the
  right, so SW<8>, SW<5> and SW<2> are set;
* tap 11 is the loop closed by the multiplexer.

So p(x) = x^11 + x^8 + x^5 + x^2 + 1, which is primitive. The resulting
sequence has exactly the published run-length histogram:

* runs of ones of lengths 1..11: 256, 128, 64, 32, 16, 8, 4, 2, 1, 0, 1;
* runs of zeros of lengths 1..11: 256, 128, 64, 32, 16, 8, 4, 2, 1, 1, 0.

`tb_pnsg` checks this histogram chip for chip. That agreement supports the
encoding, but the encoding is still an inference. The schematic may number
the stages or switches differently.

`SW<12>` has no effect here. No stage follows stage 12, and the x^N term is
always provided by the multiplexer. Stages above N keep shifting but never
reach the output. Any SW bits at or above N are therefore don't-cares.

Some primitive tap sets (not from the publication; standard tables), with SW
written as SW<12:1>:

| N | S | taps | SW<12:1> |
|---|---|---|---|
| 5 | 000 | [5,3] | `0000_0000_0100` |
| 6 | 001 | [6,5] | `0000_0001_0000` |
| 7 | 010 | [7,6] | `0000_0010_0000` |
| 8 | 011 | [8,6,5,4] | `0000_0011_1000` |
| 9 | 100 | [9,5] | `0000_0001_0000` |
| 10 | 101 | [10,7] | `0000_0100_0000` |
| 11 | 110 | [11,8,5,2] | `0000_1001_0010` |
| 12 | 111 | [12,6,4,1] | `0000_0010_1001` |

**Reset.** /SET (the chip's `reset_n`, active low) asynchronously sets every
flip-flop to 1, Sync-DFF included. The all-ones state can never lock up the
register the way all-zeros would.

**Timing.** Both the stages and the Sync-DFF load on the rising clock edge:

* one chip per clock;
* `pn` lags the multiplexer output by one cycle;
* the first chip after reset is the 1 held by the Sync-DFF.

The Sync-DFF is there so that only one flip-flop's clock-to-output jitter
reaches the pin, not that of the whole chain. In RTL it shows up only as this
one-cycle latency.

## Modes and mixers

`Mode_control` = 0 (transmitter):

* `pn_tx` carries s(t);
* the sync mixer's RF pair is held at zero differential, so its output is 0.

`Mode_control` = 1 (receiver):

* `pn_tx` is held low;
* s(t) is applied to the sync mixer as rail levels (0 / 1100 mV on each leg);
* PNSG 2 runs in both modes and drives the LO pair of all three mixers with
  r(t) and its complement.

`gilbert_mixer` is a behavioural model of an analog cell. In the real cell,
M1/M2 turn the RF voltage into a current and four LO-driven switches steer it
into one load resistor or the other. The model keeps exactly that sign-switch
behaviour:

    v_if = +GAIN * v_rf   (LO = 1/0)
    v_if = -GAIN * v_rf   (LO = 0/1)
    v_if = 0              (LO legs equal)

Voltages are signed 16-bit millivolts (`mv_t`). The output is split evenly
across `if_p` and `if_n` and clipped. Gain, noise, bandwidth, biasing and LO
feed-through of the real circuit are not modelled. The model is
synthesizable only by accident. It stands for analog hardware.

## From clocks to delays

With T_alpha and T_beta the two clock periods, gamma = T_beta / (T_beta -
T_alpha). At the receiver:

* sync peaks repeat every (2^N - 1) * gamma fast-clock periods;
* an echo delayed by t0 appears gamma * t0 after the preceding sync peak.

For the published measurement:

* clocks of 1 GHz and 999.95 MHz give gamma = 20000;
* the 2047-chip code then gives a sync period of 2047 * 20000 ns = 40.94 ms;
* a 20 ns echo appears 0.4 ms after each sync peak.

The receiver's PNSG 1 must run on a clock of the same frequency as the
transmitter's, and both codes must be started together (common reset).
Otherwise the sync peak does not mark zero delay. In the field this means
disciplined reference clocks and a code restart at the beginning of each
measurement. The RTL does not do either of these itself.

## Verification

| Testbench | Checks |
|---|---|
| `tb_tspc_dff` | capture on the rising edge, hold between edges, asynchronous set, set dominating the clock |
| `tb_pnsg` | N = 5..12: chip-by-chip agreement with a polynomial reference, exact period 2^N - 1, no shorter period, balance, SW bits >= N ignored, first chip after set. N = 11 published configuration: full run-length histogram |
| `tb_mode_switch` | all mode / input combinations |
| `tb_gilbert_mixer` | sign switching, balanced LO, leg balance, clipping (with gain 2) |
| `tb_sounder_top` | four full measurements side by side (see below) |
| `tb_sounder_full` | the published measurement, see below |

Every testbench prints `TB_RESULT checks=<n> failures=<m>` and has a watchdog.

`tb/sounder_bench.sv` is a complete measurement set-up:

* a transmitter chip;
* a two-path channel: in-phase paths at D1 and D2 chips, quadrature path at
  D2, amplitudes in mV;
* a receiver chip that starts in TX mode and is switched to RX mode;
* moving-sum filters on the three mixer outputs.

It checks, in order:

* the transmitted m-sequence and its run histogram;
* that the receiver branch is silent in TX mode and `pn_tx` is silent in RX
  mode;
* the spacing of the sync peaks against (2^N - 1) * gamma;
* that every peak of I^2 + Q^2 sits D * gamma after a sync peak, with the
  path's I and Q amplitudes.

Each of these mechanisms is counted, and one that never happens is a failure.

`tb_sounder_top` runs four benches:

| N | alpha | gamma | filter window (chips) |
|---|---|---|---|
| 5 | 1 GHz | 101 | 31 |
| 7 | 1 GHz | 401 | 127 |
| 8 | 1 GHz | 1001 | 255 |
| 11 | 400 MHz | 501 | 128 |

`tb_sounder_full` uses the published settings: N = 11, taps [11,8,5,2],
1 GHz / 999.95 MHz (gamma = 20000), and a full 2047-chip filter window. It
measures 40,942,047 ns between sync peaks and finds the 20 ns and 50 ns echoes
0.4 ms and 1.0 ms after each sync peak. It simulates about 94 ms and takes
about two minutes. `tb_sounder_top` takes about half a minute.

Running a testbench with Verilator 5. The RTL has no `timescale` of its own
and the benches use 1 ns / 1 fs:

```
verilator --binary --timing --assert --timescale 1ns/1ps \
  -y rtl -y tb +libext+.sv -Irtl -Itb \
  --top-module tb_sounder_top rtl/sounder_pkg.sv tb/tb_sounder_top.sv
./obj_dir/Vtb_sounder_top
```

Replace `tb_sounder_top` with any other testbench name. The sliding factor,
code length, channel delays and filter window are parameters of
`sounder_bench`.

## What follows the original design and what does not

Taken from the published chip:

* the block structure: two programmable PNSGs on a fast and a slow clock, the
  Mode_control switch, three mixers (sync, I, Q), filters off chip;
* the MSRG generator with stage-select multiplexer, tap switches and Sync-DFF;
* the set-to-one initialisation;
* N from 5 to 12;
* the meaning of Mode_control;
* the example programming word and its run histogram;
* the 40.94 ms sync period.

Choices of this design:

* the S-to-N mapping (N = 5 + S) and the SW bit positions. Both are inferred
  from one published example, and the generator schematic was not available;
* SW<12> having no effect;
* one set of programming inputs shared by both generators;
* active-low reset wired straight to /SET;
* which mixer port r(t) drives (the LO side);
* the differential, zero-when-open form of the switch's receiver branch;
* holding the unselected outputs low;
* PNSG 2 running in both modes;
* the millivolt representation and unity gain of the mixer model.

Not modelled:

* the transistor-level TSPC flip-flop (dynamic nodes, minimum clock rate,
  device sizes);
* the 1 Gchip/s speed and the 1 ns resolution, which are properties of the
  65 nm circuit;
* all analog detail of the mixers;
* the RC filters;
* pads and decoupling capacitance;
* the RF front end and clock references.
