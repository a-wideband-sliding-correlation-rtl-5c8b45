# Sliding-correlation channel sounder baseband

A channel sounder measures how a radio channel spreads a transmitted signal
in time: the line-of-sight arrival and every reflection show up as peaks in
a power delay profile (PDP). A sliding-correlation sounder does this without
a fast digitiser. The transmitter sends a pseudorandom noise (PN) sequence at
a fast chip rate α. The receiver multiplies what arrives by an identical
sequence running at a slightly slower rate β. The replica slips past the
received signal by one chip every

    γ = α / (α − β)          (the slide factor)

fast chips, so after a low-pass filter the product traces the channel's
correlation, that is its impulse response, stretched in time by γ. A 1 ns
delay becomes γ ns at the output. That is slow enough for an ordinary
oscilloscope or acquisition card, and the time resolution is still one chip.

This repository is a SystemVerilog description of such a baseband. The
design follows the 65 nm CMOS channel-sounder IC and its evaluation board
described in *A Wideband Sliding Correlation Channel Sounder in 65 nm CMOS:
Evaluation Board Performance* (Shakya, Wu, Knox, Rappaport). One chip serves
as either end of the link:

* **TX mode**: it emits a maximal-length PN sequence at α (1 Gcps on the
  board, giving a 2 GHz null-to-null RF bandwidth).
* **RX mode**: it correlates the demodulated I and Q signals with the slow
  replica and also produces a *Sync* signal, a pulse train that marks each
  realignment of the two sequences.

The digital parts, which are the two PN generators and the mode switch, are
synthesizable RTL. The parts that are analog on the real hardware are
written as simple behavioural models so that the whole chain can be
simulated. These are the mixers that take analog I/Q voltages and the board's
low-pass filters.

## Structure

```
                 S<2:0>, SW<12:1>                 Mode Control (1 = TX, 0 = RX)
                        |                                   |
 fast clock α --> [ PNSG1 ] --pn_fast-------------> [ switch ]--1--> pn_out (PN sequence)
                        |                                   0
                        |                                   v
 slow clock β --> [ PNSG2 ] --pn_slow--+-----------> [ Sync mixer ] --> [ LPF ] --> sync_out
                                       |
 i_in ---------------------------------+-----------> [ I mixer ] -----> [ LPF ] --> i_pdp
 q_in ---------------------------------+-----------> [ Q mixer ] -----> [ LPF ] --> q_pdp
                                       '--> pn_replica
 reset --> both PNSGs and all filters
```

| File | Module | What it is |
|---|---|---|
| `rtl/chsnd_pkg.sv` | package | stage count, S-word encoding, `mode_e`, sample width |
| `rtl/pnsg.sv` | `pnsg` | programmable 12-stage LFSR PN generator (used twice) |
| `rtl/sync_mixer.sv` | `sync_mixer` | Mode Control switch and Sync mixer |
| `rtl/iq_mixer.sv` | `iq_mixer` | behavioural model of one correlator mixer (used for I and Q) |
| `rtl/lpf.sv` | `lpf` | behavioural model of a board low-pass filter (used three times) |
| `rtl/chsnd_ic.sv` | `chsnd_ic` | the IC: two PNSGs, the switch and Sync mixer, the I/Q mixers |
| `rtl/chsnd_evb.sv` | `chsnd_evb` | **top level**: the board baseband, IC plus three filters |

The IC boundary (`chsnd_ic`) matches the chip's block diagram. The filters are
outside it, on the board, because the chip diagram draws none inside. The
published board was built to replace "the PNSG, mixers, filters and
amplifiers" of an older rack-mounted baseband.

## The programmable PN generator

`pnsg` is a Fibonacci LFSR with stages numbered 1 to 12. On each rising clock
edge, stage 1 takes the feedback bit and every stage k takes stage k−1. Two
static words program it. On the board these are DIP switches.

* **S<2:0>** picks the register length `N = 5 + S`, so N runs from 5 to 12.
  The output chip is stage N, and the sequence length is 2^N − 1. S = `111`
  gives N = 12 (4095 chips) and S = `110` gives N = 11 (2047 chips). Both of
  these settings are used on the published board.
* **SW<12:1>** picks the feedback taps. Stage N always feeds back. Each set
  bit SW<k> with k < N adds stage k to the XOR. Bits at or above N are
  ignored. The published TX measurement uses `SW = 000000101001`, which
  sets SW6, SW4 and SW1. That gives taps [12,6,4,1], a primitive polynomial
  and hence the full 4095-chip m-sequence.

Other maximal tap sets follow standard LFSR tables, for example [11,9]
(`SW = 000100000000` with N = 11), [10,7], [9,5], [8,6,5,4], [7,6], [6,5] and
[5,3]. A non-primitive tap set gives a shorter sequence. Nothing in the
hardware prevents that, as on the real board.

Reset is asynchronous and active high. It loads all ones, a state that is
non-zero for every N. Both PNSGs share the reset, so they leave reset in
phase. The Sync signal therefore has a peak right after reset, and the
receive timing is referenced to it. Change S or SW only while reset is
held. A length change on the fly can leave the register in a state from
another sequence, although it is never stuck at zero.

The generator produces one chip per clock cycle: the chip rate is the clock
rate. Nothing else constrains speed. A concurrent assertion in `pnsg` flags
the all-zero lock-up state of the active stages.

## Modes and the Sync signal

`sync_mixer` is the single-pole switch of the chip diagram followed by the
Sync mixer. Chips are treated as bipolar values (1 → +1, 0 → −1).

* TX (`mode_ctrl = 1`): `pn_out` carries PNSG1. The Sync product is 0.
* RX (`mode_ctrl = 0`): `pn_out` is held low. The Sync product is +1 when
  the PNSG1 and PNSG2 chips agree and −1 when they differ, which is an XNOR.

In RX mode the two generators run the same sequence at α and β. While they
are more than a chip apart the product averages to −1/(2^N−1), which is
essentially zero. Once per slip of a whole sequence they line up and the
filtered product rises to full scale. The spacing of these Sync peaks is

    T_sync = (2^N − 1) / α × γ

For N = 12, α = 1 GHz and β = 999.95 MHz (γ = 20000), that is
4095 × 20000 ns = 81.9 ms. This is the published measured value, and the
full-size testbench reproduces it. No counter sets γ. It comes purely from
the two clock frequencies, so the RTL has no parameter for it.

## The correlator outputs and the filter model

`iq_mixer` multiplies the I or Q input by the slow replica: it passes the
sample for a 1 chip and negates it for a 0 chip. Its output is one bit wider
so that negating the most negative input cannot overflow. On the chip this
is an analog mixer. Here the analog voltage is a signed 12-bit sample
(`SAMPLE_W`), which is this design's own representation.

`lpf` is a first-order IIR filter clocked by the fast clock:

    acc <= acc + x − (acc >>> SHIFT);   y = acc >>> SHIFT

It has one real pole with a time constant of 2^SHIFT samples. The -3 dB
cutoff is about f_s / (2π·2^SHIFT). The default, SHIFT = 11 at f_s = 1 GHz,
gives about 78 kHz, the power of two nearest the 100 kHz filter used in the
published measurements. The accumulator has SHIFT+1 guard bits, so it cannot
overflow for any input.

How to read the outputs: a channel path of delay d chips and amplitude a
shows up in `i_pdp`/`q_pdp` at d·γ fast cycles after a Sync peak, with height
a times the input scale. The published board aligns its PDPs the same way,
from the Sync signal. In RX, an arrival delayed by d chips matches the
replica once the replica has slipped d chips, which takes d·γ fast cycles.

**Peak shape.** On the real board the mixer output is continuous and the
analog filter integrates it. The correlation of rectangular chips then gives
a triangle two chips of slip wide at the base. This model samples the
product once per fast clock edge. At each sample the replica chip either is
the matching chip or is not, so a single path gives a *flat-topped* pulse one
chip of slip wide, starting where the slip equals the delay, smoothed by the
filter. Peak heights, positions (to within one chip) and the Sync period are
unaffected. Only the shape of the rising and falling flanks differs from the
analog hardware. Two paths 1 chip apart still read their own amplitudes at
the middle of their intervals. This is how the testbenches verify 1 ns
resolution.

The Sync product is scaled to ±(2^(W−1)−1) before its filter, standing for the
board's output level, so all three outputs share one scale.

## Clocks

There are two clock domains, α (PNSG1 and the filters) and β (PNSG2). By
design, signals from the two domains meet without synchronisers: the Sync
and I/Q mixers are analog multipliers on the chip, and their products are
meant to be averaged, not latched. In this model the mixers are
combinational and the products are sampled by the filters on the fast clock.
A sample taken while the slow chip changes is just one more sample of an
averaging filter, not a functional hazard. Only the behavioural filter model
crosses domains. The synthesizable generators do not.

## Sizes and operating points

| Item | Value here | Source |
|---|---|---|
| LFSR stages | 12 | published |
| Sequence lengths | 2^N − 1, N = 5…12 | published |
| S-code to N | N = 5 + S | published for 111 and 110; linear in between is assumed |
| Chip rate | 1 chip per clock; 1 Gcps at 1 GHz | published |
| Slide factor | set by the clocks (20000 in the published RX tests) | published |
| Filter | first order, time constant 2048 samples (≈78 kHz at 1 GHz) | published cutoff 100 kHz; form assumed |
| I/Q sample width | 12-bit signed, mixer and filter outputs 13-bit | assumed |

Every published operating point fits the design at its defaults:

* The 4095-chip TX sequence at N = 12.
* The 81.9 ms Sync period at γ = 20000.
* The 2047-chip (N = 11) multipath test with paths at 100, 101 and 103 ns.
  Every delay is shorter than the sequence, so each path appears once per
  period.
* The two-board 142 GHz link, with one board in each mode.

## Where this departs from, or goes beyond, the published design

* **Mode Control polarity.** The chip diagram labels the switch
  "1 (TX Mode)" and "0 (RX Mode)", and the RX measurement set the switch to
  0. One text description says the opposite (TX for a low pin). This design
  follows the diagram: `MODE_TX = 1`, `MODE_RX = 0`.
* **LFSR details.** These are not published and were chosen here: the
  Fibonacci form, XOR feedback, the implicit tap at stage N, the all-ones
  reset state, and that SW bits at or above N are ignored. The implicit tap
  is consistent with the published SW example, which lists stage 12 among
  the taps without setting SW12.
* **Shared programming.** Both generators take the same S and SW words. The
  board has one set of switches.
* **Unused outputs.** `pn_out` is held low in RX mode and the Sync product is
  0 in TX mode. The published material does not say what these outputs carry
  when unselected.
* **`pn_replica`.** This output brings PNSG2 out for monitoring. The
  published RX test captured the slow sequence, but does not name the pin.
* **Analog parts.** The mixers and filters are behavioural, as described
  above, with the flat-topped peak shape as the visible consequence. The
  board's output amplifiers (±300 mV), 50 Ω interconnect and power supply are
  not modelled. Neither are the external frequency synthesizers, RF stages
  and data acquisition.

## Verification

Every testbench is self-checking and ends with a line
`TB_RESULT checks=<n> failures=<m>`. Each has a watchdog.

| Testbench | Checks |
|---|---|
| `tb/tb_pnsg.sv` | For N = 5…12 with primitive taps, every chip against a reference LFSR, the exact period 2^N−1, 2^(N−1) ones per period, and that SW bits ≥ N are ignored. |
| `tb/tb_sync_mixer.sv` | The full truth table of the switch and mixer in both modes. |
| `tb/tb_iq_mixer.sv` | Extreme and 2000 random samples, both chip values. |
| `tb/tb_lpf.sv` | The step response at the default coefficient against the exact exponential, and random input at SHIFT = 4 against a real-valued recursion. |
| `tb/tb_chsnd_ic.sv` | The IC with a 1.8 ns / 2.0 ns clock pair, against reference LFSRs on each clock, at every clock edge. It covers TX at N = 12 with taps [12,6,4,1] (a full 4095-chip period), an on-the-fly switch to RX, then N = 11. |
| `tb/tb_chsnd_evb.sv` | Two boards (TX and RX) with a three-path channel emulator at 100/101/103 chips and −4.5/−6/−10.5 dB, N = 11, γ reduced to 4000 and the filter to SHIFT = 9. It checks the TX period, the RX board's mode switch, the Sync period L·γ, and the I and Q PDP at each delay from 96 to 107 chips (path amplitude or zero). It counts each mechanism: TX output, mode switch, Sync peak, I and Q PDP peaks. |
| `tb/tb_chsnd_evb_full.sv` | The same two-board setup with every board parameter at its default, at the published operating point: N = 12, taps [12,6,4,1], α : β = 1 GHz : 999.95 MHz (γ = 20000). It checks the 4095-chip TX period, the Sync period of 81.9 × 10^6 fast cycles (81.9 ms at 1 GHz), and the PDP. It runs about 84 million fast cycles, roughly a minute. |

To simulate one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/chsnd_pkg.sv tb/tb_chsnd_evb.sv --top-module tb_chsnd_evb
./obj_dir/Vtb_chsnd_evb
```

Replace the testbench name to run another. Every RTL file also passes
`verilator --lint-only -Wall` with the package. Two kinds of warning remain.
Some package constants are unused by a given module. Verilator also notes
that `pnsg` uses its asynchronous reset in the lock-up assertion's
`disable iff` as well as in the flip-flops.

The design has no latches, memories or combinational loops. After coarse
synthesis the board top has 99 flip-flops: 2 × 12 LFSR stages and
3 × 25 filter accumulator bits.

## Changing the design

* **Longer sequences.** Set `LFSR_STAGES` in the package and widen S if
  needed (`SEL_W`, `N_MIN`). `pnsg` is written for any stage count.
* **Different filter bandwidth.** `LPF_SHIFT` on `chsnd_evb`. Keep 2^SHIFT
  well below γ, or adjacent 1-chip paths blur together.
* **Input resolution.** `W` on `chsnd_evb` or `chsnd_ic`.
* **Slide factor.** Change the clock frequencies, not the RTL. In a testbench,
  fast and slow periods in the ratio (γ−1) : γ give slide factor γ exactly.
