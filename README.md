# Digital active feedback for a single ion in a Penning trap — FPGA RTL

A trapped ion oscillating along the trap axis induces a tiny image current in a
pickup electrode. A superconducting LC resonator turns it into a voltage, and a
cryogenic amplifier brings it out of the cryostat. If that signal is shifted in
phase, scaled, and fed back onto a trap electrode, the loop acts on the ion's
motion. Fed back at 0° or 180°, it changes the damping of the axial mode,
γ_fb = γ(1 − Re G). This can cool the ion, hold it in a self-excited
oscillation, or, when coupled into the resonator, shift the resonator's
frequency and change its Q.

This repository holds synthesizable SystemVerilog for the digital version of
such a loop. It follows the system described in *A Digital Feedback System for
Advanced Ion Manipulation Techniques in Penning Traps* (Herkenhoff et al.),
which runs on a Zynq-based board with 14-bit, 125 MS/s converters. The core
idea is to replace the analog phase shifter and amplifier with an exact
digital IQ phase shifter. Its gain and phase can be switched on a clock edge by
a small sequencer that is synchronized to the experiment's trigger. The same
FPGA also runs a narrow-band acquisition chain, so the CPU can watch the ion
and close slow control loops.

The RTL is a reconstruction, not the authors' source. The block structure,
the word widths printed in the published block diagram, and all the numbers
the publication gives are kept:

- 14-bit samples.
- Mixer outputs of 24 bits.
- 32-bit filter paths.
- CIC decimation from 64 to 4096.
- 309 FIR taps.
- A 2048 × 64-bit FIFO.
- Eight parameter sets.
- Two feedback paths.
- Three DDS oscillators.

Everything else was chosen here. That includes the register map, the fixed-point
formats, the handshakes and the pipeline depths. The section
[Departures and own choices](#departures-and-own-choices) lists those choices.

## Signal flow

```
             +-------------------- acquisition -------------------------------+
             |  LO DDS (sin,cos)                                             |
             |     |                                                          |
 adc_i --reg-+--> IQ mixer --24--> CIC ÷R --32--> FIR 309 --32--+            |
  (14)       |   (I=x·cos, Q=x·sin)  (×2, I and Q paths)         +--> FIFO --64--> DMA --> m_axi (memory)
             |                                                    |   2048×64    (capture window)
             +----------------------------------------------------+
             |
             +--> mux A --> phase shifter A --+
             |      ^           ^             +--> dac_if --> dac_a_o, dac_b_o (offset binary)
             +--> mux B --> phase shifter B --+
                    ^           ^
     DDS1, DDS2 ----+           |
                                |
 trig_i --> sync/edge --> parameter sequencer (8 sets) --> acquisition start
                                ^
 s_axi (CPU) --> register bank -+--> DDS frequencies, delays D, CIC rate, FIR taps,
                                     DMA address/length, PWM duties, relay bits
```

All logic runs on one 125 MHz clock (`clk`) with an active-low asynchronous
reset (`rst_n`). In the real system that clock is derived from a 10 MHz
rubidium reference by an external PLL.

## The IQ phase shifter (`phase_shifter`, `frac_delay`)

This is the heart of the design and the part most worth understanding.

**Principle.** A phase shift φ of a narrow-band signal at the axial frequency
ν_z can be built from two copies of it:

- the signal itself, I;
- a copy shifted by −90°, Q.

Then y = A·cos φ·I + A·sin φ·Q. If x = cos ωt, this gives y = A·cos(ωt − φ).

**The −90° copy.** An exact Hilbert transform is non-causal. Around ν_z it is
replaced by a pure time delay of a quarter period:

    D = f_clk / (4 ν_z)     clock cycles (ν_z = 740 kHz → D = 42.23)

D is not an integer. The delay line therefore has two taps, at ⌊D⌋ and ⌊D⌋+1,
and blends them linearly with δ = D − ⌊D⌋:

    Q[n] = (1 − δ)·x[n − ⌊D⌋] + δ·x[n − ⌊D⌋ − 1]

The whole shifter then has the impulse response

    h[n] = A · [ cos φ, 0, …, 0, (1−δ) sin φ, δ sin φ ]
                 n=0            n=⌊D⌋        n=⌊D⌋+1

At ν_z this is exactly a gain of A and a phase of φ. Away from ν_z:

- The phase error grows with the slope of the delay, about 0.12°/kHz at
  740 kHz.
- The magnitude error stays below about 0.01 dB/kHz.
- The interpolation acts as a low-pass filter whose worst-case cut-off, at
  δ = 0.5, is f_clk/4, about 31 MHz.

The resonator bandwidth is a few hundred Hz, so both errors are negligible.

**Number formats.**

- x, I and Q are 14-bit two's complement.
- δ is a 16-bit unsigned fraction (`d_frac` = round(δ·65536)).
- ⌊D⌋ is 8 bits, and the line has 256 cells, so ν_z down to about 123 kHz is
  covered.
- Software writes the products A·cos φ and A·sin φ, each a signed Q2.14
  number (16384 = 1.0).
- The sum is shifted back by 14 bits, rounding toward −∞, and saturated to
  14 bits.

**Timing.** The phase shifter has four register stages, x → y:

1. The delay-line input.
2. The aligned I/Q output register.
3. The two multipliers.
4. The adder and saturation stage.

New weights act from the next clock. The whole feedback path from ADC pins to
DAC pins takes 7 clocks, 56 ns, plus the quadrature delay D. The stages are:

- the ADC register;
- the input multiplexer;
- the four phase-shifter stages;
- the DAC register.

Any loop delay rotates the phase by 360°·ν·t_delay. That rotation is
calibrated out through φ.

**Examples at 740 kHz** (`d_int = 42`, `d_frac = 15056`):

| purpose | A | φ | w_cos | w_sin |
|---|---|---|---|---|
| damping / cooling ("180°") | 0.178 (−15 dB) | 180° | −2914 | 0 |
| pass-through | 1 | 0° | 16384 | 0 |
| resonator shift (φ = ±90°) | 0.5 | 90° | 0 | 8192 |

## The parameter sequencer (`param_sequencer`)

Measurement schemes need the feedback to change at precise moments. The
self-cooling → detune → excite → free evolution → read-out cycle of
phase-sensitive axial detection is one example. The sequencer holds eight sets
(`fbs_pkg::param_set_t`). Each set contains:

- For each feedback path: `w_cos` and `w_sin`, and the input `src`. The source
  can be the ADC, DDS generator 1, DDS generator 2, or zero.
- `cond`, the condition that ends the set:
  - `COND_DELAY`: after `delay` clocks.
  - `COND_RISE` / `COND_FALL`: on an edge of the synchronized trigger.
  - `COND_HOLD`: never.
- `acq_trig`: start an acquisition when the set is loaded.

A start, through bit 0 of `REG_CTRL`, applies set 0 in the next clock. A
delay set with `delay = N` is active for exactly N clocks; with 32 bits, the
longest is 34.4 s. A trigger set ends one clock after the edge strobe. The
edge strobe itself comes three clock edges after the first clock edge that
sees the new trigger level, through a two-flop synchronizer and an edge
register. An asynchronous trigger therefore has one clock (8 ns) of jitter. The
original system removes that jitter by generating the trigger in step with the
10 MHz reference.

After set `len−1`, the sequencer either wraps to set 0 (`loop`) or stops and
keeps the last set applied. A stop command freezes the current set. Before the
first start, all weights are zero, so both outputs are silent.

## The acquisition chain

- **Local oscillator and mixer** (`dds`, `iq_mixer`). A 32-bit phase
  accumulator drives a 1024-entry full-wave sine table. The table is computed
  at elaboration from `$sin`, and the cosine reads 256 entries ahead. The
  products x·cos and x·sin (14 × 14 → 28 bits) keep their top 24 bits.
- **CIC** (`cic_decimator`). It has three integrators at 125 MHz and three
  combs after decimation, with differential delay 1. R = 2^log2r, with
  log2r = 6..12, i.e. 64..4096. Only powers of two are supported, so the gain
  R³ can be removed by a shift. The output is (comb >> (3·log2R − 8)), which
  gives unit DC gain with 8 fractional bits in a 32-bit word. Integrator
  wrap-around is harmless, as usual for CIC filters.
- **FIR** (`fir_filter`). 309 taps of 18-bit Q2.16 coefficients, one filter
  each for I and Q. The two filters share the coefficient table, which software
  writes through `REG_FIR_ADDR` / `REG_FIR_DATA` (auto-increment).
  - The coefficients are not part of the hardware. After reset the table is a
    unit impulse, so the filter passes data through.
  - At the fastest output rate a new sample arrives every 64 clocks. Five
    multiply-accumulate lanes therefore process 62 taps each, one tap per
    clock. The output is ready 64 clocks after the input strobe.
  - A sample that arrives while the filter is busy is dropped and sets
    `fir_overrun`.
- **Packing and FIFO** (`sync_fifo`). Each 64-bit word is {Q[31:0], I[31:0]}.
  The FIFO is 2048 deep with a show-ahead read, and it has a sticky overflow
  flag.
- **DMA** (`dma_engine`). A start, either through bit 2 of `REG_CTRL` or from a
  sequencer set, opens a capture window. The window admits exactly
  `REG_ACQ_COUNT` filter outputs into the FIFO. The engine writes them to
  `REG_DMA_BASE + 8·i` as single-beat AXI4 writes (`AWLEN = 0`, 8-byte size).
  `acq_done` and `REG_DMA_COUNT` report completion. The engine needs a few
  clocks per word, while samples arrive at most every 64 clocks, so the FIFO
  only absorbs memory stalls.

## Register map (AXI4-Lite, 32-bit, byte addresses)

| addr | name | contents |
|---|---|---|
| 0x000 | CTRL (W) | b0 start sequencer, b1 stop sequencer, b2 start acquisition (one-clock strobes) |
| 0x004 | SEQ_CFG | b3:0 number of sets (1..8), b8 loop |
| 0x008 | STATUS (R) | b0 running, b3:1 set index, b4 acq busy, b5 acq done, b6 FIFO overflow, b7 FIR overrun, b8 DMA error, b9 trigger level |
| 0x00C | LO_FTW | local oscillator, f = FTW·125 MHz/2³² |
| 0x010 / 0x014 | DDS1_FTW / DDS2_FTW | signal generators |
| 0x018 | CIC_LOG2R | 6..12 |
| 0x01C | ACQ_COUNT | samples per acquisition |
| 0x020 | DMA_BASE | byte address of the buffer |
| 0x024 / 0x028 | DELAY_A / DELAY_B | b23:16 ⌊D⌋, b15:0 δ·65536 |
| 0x02C..0x034 | PWM0..2 | 10-bit duty: input VGA, output VGA A, output VGA B |
| 0x038 | RELAY | b3:0 relay drives |
| 0x040 | FIR_ADDR | tap index for the next coefficient write |
| 0x044 | FIR_DATA (W) | 18-bit coefficient; FIR_ADDR increments |
| 0x048 | DMA_COUNT (R) | words written by the current/last acquisition |
| 0x100 + 0x10·k | set k, +0 | path A {w_sin[31:16], w_cos[15:0]} |
| … +0x4 | | path B {w_sin, w_cos} |
| … +0x8 | | b1:0 src A, b3:2 src B, b5:4 cond, b6 acq_trig |
| … +0xC | | delay in clocks |

Source codes are 0 ADC, 1 DDS1, 2 DDS2 and 3 zero. Condition codes are
0 delay, 1 rising edge, 2 falling edge and 3 hold. Writes are accepted when
AWVALID and WVALID are both high, and the response follows one clock later.
Reads answer one clock after ARVALID.

## Board-level parts outside the RTL

The converters (LTC2145 ADC, AD9767 DAC), the analog front-end, the reference
clock chain and the power supplies are not digital logic. The front-end
comprises an instrumentation pre-amplifier, VGAs, attenuators and relays. The
reference clock chain is an isolation transformer, a clock buffer and a PLL.
The ARM CPU with its software and the DRAM sit behind the two AXI ports. The
CPU software covers the Python driver, EPICS, and the FFT/PID loop for the
self-excited oscillator. The RTL's interfaces to these parts are:

- `adc_i`, sampled in two's complement;
- `dac_a_o` and `dac_b_o`, in offset binary;
- `trig_i`;
- `pwm_o`, to be RC-filtered into VGA control voltages;
- `relay_o`;
- `s_axi_*`;
- `m_axi_*`.

## Departures and own choices

- **Phase-shifter weights.** Software writes A·cos φ and A·sin φ directly; no
  sine table turns φ into weights in the FPGA.
- **Weight range.** The Q2.14 weights allow |A| up to 2. The published gain range, A from 0 to 1, is a subset of it.
- **Input multiplexer.** A fourth "zero" input was added.
- **CIC.** Only powers of two are supported as decimation factors. The stage
  count (3) and the output scaling are chosen here.
- **FIR.** The coefficient format (Q2.16, 18 bit), the time-multiplexed
  structure and the reset-time pass-through are chosen here. No
  droop-compensation coefficients are supplied.
- **I/Q packing.** I goes in the low half of the 64-bit word.
- **Memory bus.** The bus protocol (AXI4 single beats) and the capture-window
  control of the DMA are chosen here.
- **Sequencer.** The set format, `len`, `loop`, `COND_HOLD` and the
  acquisition flag are chosen here. The design description only says that
  acquisitions can be triggered in step with the sequencer.
- **Relays.** The block diagram draws switches at the input and at both outputs. Four relay bits are provided.
- **PWM.** Resolution is 10 bits. There are three channels: the block diagram
  shows one VGA per output, while the text speaks of two VGAs per output.
- **DAC.** Offset-binary coding for the DAC follows the converter's data sheet.

## Verification

Every module has a self-checking testbench in `tb/`, with a reference
computed independently of the RTL. Each one ends with a
`TB_RESULT checks=N failures=M` line.

- `tb_dds`: sine and cosine within 1 LSB of a floating-point model for several tuning words; the zero-crossing count over 100000 clocks matches 740 kHz.
- `tb_iq_mixer`: bit-exact products.
- `tb_cic_decimator`: bit-exact against a boxcar³ FIR model at R = 64 and
  R = 128; unit DC gain at R = 4096; output strobe spacing of exactly R.
- `tb_fir_filter`: bit-exact for random 309-tap kernels; 64-clock latency;
  saturation; overrun.
- `tb_sync_fifo`: random traffic against a queue model; full and overflow.
- `tb_dma_engine`: two acquisitions into a stalling memory model, with
  handshake-rule checks.
- `tb_frac_delay`: bit-exact interpolation; a measured −90.0 ± 0.5° at
  740 kHz.
- `tb_phase_shifter`: the impulse response h[n] above, term by term; a
  bit-exact random test; measured gain and phase at 740 kHz for
  φ = −90…90° (within 0.5° and 1 %).
- `tb_param_sequencer`: exact set durations, edge steps, wrap, stop, and the
  acquisition pulse.
- `tb_trigger_sync`, `tb_pwm_gen`, `tb_dac_if`, `tb_fb_input_mux` and
  `tb_axi_lite_regs`: interface-level checks.
- `tb_feedback_system_top`: the whole system at its default sizes. It loads
  309 FIR taps, runs a four-set sequence (180° feedback, DDS output,
  trigger-stepped sets, a unity set that starts the acquisition, silence) and
  checks the DAC words sample by sample against the ADC input. It then checks
  the 32 acquired I/Q words in memory against the tone amplitude, and the
  PWM and relay pins. During the acquisition the memory refuses writes for
  3000 clocks. The FIFO must fill to at least 8 words, and every word must still arrive. It counts every mechanism and fails if one never
  occurred.
- `tb_acq_droop` measures the passband of the acquisition chain at decimation 64, up to 500 kHz from
  the LO. With the reset FIR, the gain follows the three-stage CIC response to 0.2 %; it falls to
  0.72 at 500 kHz. A 309-tap droop-compensating kernel is computed in the testbench, as the
  windowed inverse transform of 1/C(ν). Loaded through the register port, it makes the gain flat,
  1.000 ± 0.2 %.
- `tb_workload_apnp` runs the phase-sensitive axial (AxPnP) cycle on the full
  system with shortened times. The cycle is cooling, detuning, a DDS
  excitation pulse, free evolution, and read-out with an acquisition started
  by the sequencer.
- `tb_workload_seo` runs the self-excited-oscillator acquisition: decimation
  4096 and 2048 samples, as the feedback loop in the original system uses.

The behavioural helpers are `axi_mem_model`, a memory with random stalls, and
`axi_lite_bfm`, a CPU bus master.

Simulate any testbench with Verilator 5, for example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl rtl/fbs_pkg.sv rtl/*.sv \
    tb/axi_lite_bfm.sv tb/axi_mem_model.sv tb/tb_feedback_system_top.sv \
    --top-module tb_feedback_system_top -o sim
./obj_dir/sim
```

For the other testbenches, replace the top module; the unused helper files do
no harm. Verilator is a two-state simulator, and every register that is read
is reset.

## Sizing against the reported experiments

- **Axial frequency.** The delay needs taps 42 and 43 at 740 kHz; 256 cells
  are built.
- **Resonator modification scan.** Gains of −26…−10 dB mean A = 0.05…0.32.
  With Q2.14 weights these are 821…5181 LSB, and a 128-step phase grid (2.8°)
  is easily resolved.
- **Feedback cooling.** −15 dB and −5 dB at 180° give w_cos = −2914 and
  −9213.
- **AxPnP.** Evolution times of 82 ms to 2.4 s are 1.0·10⁷ to 3.0·10⁸ clocks,
  well inside the 32-bit set delay (34.4 s).
- **Self-excited oscillator.** R = 4096 with 2048 samples fills the FIFO's
  depth exactly, if the DMA were stalled. One block lasts 67 ms, which fits the
  roughly 80 ms control interval.

## Changing the design

- **Sizes.** The module parameters carry the published sizes as defaults:
  `fir_filter.TAPS`, `sync_fifo.DEPTH`, `frac_delay.DEPTH` and
  `cic_decimator.MAX_LOG2R`. When `TAPS` grows, keep
  `LANES ≥ TAPS / min_decimation`.
- **Widths.** Shared widths, the set format and the register addresses live in
  `rtl/fbs_pkg.sv`.
- **A third feedback path** needs another mux, phase shifter and DAC channel
  in `feedback_system_top`, plus a `path_cfg_t` field in `param_set_t`.
