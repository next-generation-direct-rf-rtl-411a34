# NG-LLRF programmable logic: pulse control and capture for a direct-RF-sampling LLRF system

A low-level RF (LLRF) system sets the amplitude and phase of the RF that drives
an accelerating structure and measures what comes back from it. Traditionally
each RF input and output needs its own analog mixer chain to get between RF and
baseband. The NG-LLRF design drops those chains. An RF system-on-chip (RFSoC)
samples the RF directly: the ADCs run at 2.4576 GS/s in a higher Nyquist zone,
and a DAC at 5.89824 GS/s generates the drive in the second Nyquist zone. Its
hardened converter blocks do the mixing with a numerically controlled
oscillator (NCO), the decimation and the interpolation. Everything from
baseband I/Q onward is ordinary logic in the programmable fabric. For a C-band
structure (5.712 GHz) that logic measures the cavity signals, computes a new
drive I/Q from user set points, multiplies it by a user-defined pulse shape,
and hands the result back to the converter. For S-band (2.856 GHz) the same
front end records the forward, reflected and cavity-probe signals of every
pulse into processor memory.

This repository holds synthesizable SystemVerilog for that programmable-logic
part:

- the amplitude/phase feedback block;
- the pulse-waveform modulator and the block RAM that holds the waveform;
- the trigger master/slave logic;
- the AXI4-Lite parameter and waveform ports;
- one capture DMA per input channel.

It also holds self-checking testbenches for each block and for the whole design.

## Where the logic sits in the signal chain

```
 RF in ──BPF──ADC──NCO mixer──decimate x10──►  rx_iq[c]  (I/Q, 245.76 MS/s)
   (analog)  (RFSoC converter hard blocks)        │
                                                  ├──► capture_dma[c] ──AXI4──► DDR (processor)
                                                  └──► fb_ctrl ──drv_iq──► pulse_mod ──► tx_iq
                                                          ▲                    ▲            │
 processor ──AXI4-Lite──► llrf_regs (set values,          │               wave_bram ◄──AXI4-Lite── processor
                          gains, limits, ...)  ───────────┘                                │
 trig_in ──► trig_ctrl ──► trig (to fb_ctrl, pulse_mod, DMAs), trig_out                   ▼
                                       tx_iq ──► interpolate──NCO mixer──DAC──BPF──► SSA
```

`ngllrf_top` contains everything between `rx_iq` and `tx_iq`. These parts stay
outside it:

- the converters, NCO mixers, decimators and interpolators: they are hard IP of
  the RFSoC;
- the analog filters;
- the processor and its DDR;
- the reference PLL.

The converter side is seen here as one 16-bit I/Q sample per clock in each
direction. The clock is the decimated sample clock, 245.76 MHz: 2.4576 GS/s
divided by 10. In the C-band set-up the receive NCO runs at 798.6 MHz, and in
the S-band set-up at 2.856 GHz. Both are settings of the hard blocks, not of
this RTL.

The default build has two inputs and one output. That matches the basic
single-structure set-up: two cavity signals in, one drive out. `N_RX` can be
raised to 16 inputs and `N_TX` to 16 outputs, the largest configuration of
the platform. The S-band measurement set-up uses three inputs: forward,
reflection and probe.

With several outputs, each one has its own waveform RAM and modulator and its
own enable bit, so outputs can be switched on individually and given
different pulse shapes. All outputs are multiplied by the same drive I/Q,
because there is one feedback loop per RF station.

## The pulse-to-pulse amplitude and phase loop (`fb_ctrl`)

This is the part that needs the most explanation. The user gives four numbers
for amplitude and four for phase:

- a set value;
- a correction gain;
- an upper limit;
- a lower limit.

The block turns them into one complex drive value per pulse. That value scales
and rotates the whole user waveform. The loop law implemented here is the
simplest one that uses exactly those parameters. It is an integral correction
in polar form, applied once per RF pulse.

1. **Measure.** `win_start` samples after the trigger, the block sums
   `2**win_log2` samples (at most 1024) of the channel chosen by `fb_sel`. It
   then shifts the sum to get the mean I and Q. Put the window on the flat top
   of the cavity signal.
2. **Convert to polar.** An iterative CORDIC in vectoring mode turns the mean
   into amplitude `A_m` (in sample counts) and phase `P_m`. The CORDIC
   (`cordic.sv`) runs 16 micro-rotations, one per clock. Phase is a 16-bit
   number with 65536 counts per turn, so it wraps naturally. The CORDIC gain
   of 1.6468 is removed by a multiply by 39797/65536.
3. **Correct (only when `fb_en` = 1).**

   ```
   A_d <= clamp(A_d + gain_A * (set_A - A_m), lo_A, hi_A)     (also kept within 0..32767)
   P_d <= clamp(P_d + gain_P * wrap(set_P - P_m), lo_P, hi_P) (signed 16-bit)
   ```

   The gains are unsigned Q4.12, so 0x1000 is a gain of 1. With the loop open
   (`fb_en` = 0) the drive simply equals the set values, and it follows them
   continuously. Closing the loop starts from there.
4. **Convert back.** The same CORDIC in rotation mode gives
   `drv_iq = A_d * exp(j P_d)`. The pulse modulator uses this value from the
   next pulse on.

**Convergence.** Let the path from the drive to the measured channel have gain
`g` and phase offset `phi`. The amplitude error then shrinks by a factor of
`(1 - gain_A * g)` per pulse, and the phase error by `(1 - gain_P)` per pulse.
For example, gain 1 on a loopback with `g` = 0.5 halves the amplitude error on
every pulse and cancels the phase error in one pulse. The loop is stable for
`0 < gain_A * g < 2` and `0 < gain_P < 2`. The limits bound the drive. When a
limit is reached, the drive stays there and the measurement stays short of the
set value.

**Timing.** `meas_valid` is set by the clock edge `win_start + 2**win_log2`
after the edge that samples the trigger. The new drive follows about 40 clocks
later: 18 for vectoring, 1 for the update, 18 for rotation, plus the hand-over.
`fb_update` marks the moment it changes. A pulse at 1 kHz leaves about 245,000
clocks for this, so the sequential CORDIC is not a bottleneck.

## Pulse shaping (`pulse_mod`, `wave_bram`)

The waveform RAM holds 4096 samples (16.7 us), one `{Q, I}` word per sample,
in Q1.15 format: 0x7FFF is full scale. On every trigger the modulator plays
samples 0 to `pulse_len-1`. Each one is multiplied as a complex number by the
drive from the loop:

```
tx = drv * wave / 2^15     (truncated, saturated to 16 bits)
```

Between pulses `tx_iq` is zero and `rf_gate` is low. Each output `t` has its
own copy of the RAM and the modulator. It plays only when bit `t` of TX_EN is
set, and its RAM is the one the waveform port reaches while WAV_SEL = `t`. Because the waveform is
complex, any amplitude or phase modulation can be written into the RAM. One
example is the 1 us pulse with a 360 degree linear phase ramp that was used to
drive a structure deliberately off resonance. The modulation keeps that shape
and only scales and rotates it as a whole. Latency: the first sample leaves 3
clocks after the internal trigger (address, RAM read, multiply).

## Capturing pulses (`capture_dma`)

Each input channel has its own write-only AXI4 master. On a trigger, if the
channel is enabled, the DMA takes `cap_len` consecutive samples, starting with
the sample in the clock after the trigger. The length is rounded down to a
multiple of 64. Four samples are packed into each 128-bit beat, oldest in the
low 32 bits, so sample k lands at byte `base + 4k`. The beats are written in
INCR bursts of 16 beats (256 bytes) through a 32-beat FIFO. Each trigger
overwrites the channel's buffer, and the processor reads it from DDR between
pulses.

A burst costs about 20 clocks and carries 64 samples. The write side therefore
has more than three times the bandwidth of the input stream and can ride out
memory stalls. A 32-bit port would not keep up with one sample per clock once
the burst overhead is counted. If the memory holds off long enough for the
FIFO to fill:

- the incoming beat is dropped and the channel's overflow flag is set;
- once the capture has ended, the bursts still owed are abandoned and `done` is
  set.

A trigger that arrives while a capture is still running or being written out
is ignored.

## Triggering (`trig_ctrl`)

The unit can act as a slave or as the master:

- **Slave** (`trig_master` = 0): the front-panel trigger is synchronised with
  two flip-flops, and each rising edge gives one internal trigger 3 clocks
  later.
- **Master**: an internal counter gives a trigger every `trig_period` clocks.
  The default is 245760 clocks, which is 1 kHz.

In both modes a register write can issue a soft trigger. Every internal trigger
is also sent out on `trig_out` as a 32-clock pulse, so the unit can start other
equipment or repeat the trigger it received. From an external edge to the
first RF sample takes 6 clocks (about 24 ns).

## Register map (parameter port, byte addresses)

| addr | name | contents |
|------|------|----------|
| 0x00 | CTRL | [0] fb_en, [1] trig_master (reset 1), [7:4] fb_sel, [8] soft trigger (write 1, self-clearing) |
| 0x04 | TRIG_PER | master-mode period in clocks (reset 245760), 0 stops |
| 0x08 | PULSE_LEN | waveform samples per pulse, 0 = no RF |
| 0x0C–0x18 | AMP_SET, AMP_GAIN, AMP_HI, AMP_LO | amplitude set value (counts), gain (Q4.12), upper and lower limit |
| 0x1C–0x28 | PH_SET, PH_GAIN, PH_HI, PH_LO | phase set value (65536/turn), gain (Q4.12), upper and lower limit (signed) |
| 0x2C | WIN_START | feedback window start, samples after trigger |
| 0x30 | WIN_LOG2 | feedback window length = 2^n samples (n ≤ 10) |
| 0x34 | CAP_LEN | samples captured per channel per trigger |
| 0x38 | DMA_EN | capture enable, one bit per channel |
| 0x3C | TX_EN | pulse enable, one bit per output (reset: output 0 only) |
| 0x40+4c | DMA_BASE[c] | DDR byte address of channel c's buffer |
| 0x80 | MEAS (RO) | {phase, amplitude} of the last measurement |
| 0x84 | DRIVE (RO) | {phase, amplitude} of the current drive |
| 0x88 | PULSES (RO) | trigger counter |
| 0x8C | FB_UPD (RO) | number of closed-loop updates |
| 0x90 | DMA_STAT (RO) | [15:0] done, [31:16] overflow, one bit per channel |
| 0x94 | WAV_SEL | output whose waveform RAM the waveform port writes and reads |

The registers take byte strobes. Unmapped reads return 0xDEADBEEF. The
waveform port is a separate AXI4-Lite slave: word n at byte address 4n of
the output chosen by WAV_SEL. Both slaves handle one write and one read at
a time. A write is answered one clock after both AW and W have been
accepted, and read data returns three clocks after the AR handshake.

## Files

| file | content |
|------|---------|
| `rtl/llrf_pkg.sv` | I/Q, loop-parameter, configuration and status types; register addresses; CORDIC table |
| `rtl/ngllrf_top.sv` | top level, all ports plain signals and arrays |
| `rtl/fb_ctrl.sv`, `rtl/cordic.sv` | amplitude/phase loop and its CORDIC |
| `rtl/pulse_mod.sv`, `rtl/wave_bram.sv` | waveform playback and complex modulation; waveform RAM |
| `rtl/capture_dma.sv`, `rtl/sync_fifo.sv` | per-channel pulse capture to DDR |
| `rtl/trig_ctrl.sv` | trigger master/slave |
| `rtl/axil_slave.sv`, `rtl/llrf_regs.sv` | AXI4-Lite front end and register bank |
| `tb/tb_<block>.sv` | one self-checking testbench per block |
| `tb/tb_ngllrf_top.sv` | end-to-end test at the default size |
| `tb/tb_sband_capture.sv` | three-channel S-band capture at three drive levels |
| `tb/tb_pulse_stability.sv` | 60 consecutive pulses through a drifting RF chain, loop open and closed |
| `tb/tb_multi_io.sv` | the largest configuration: 16 inputs and 16 outputs |

All logic is on one clock with an active-low asynchronous reset. The capture
DMAs and the AXI4-Lite slave carry concurrent assertions for the AXI rule that
a raised VALID is held, with a stable payload, until READY.

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself. It also
has a watchdog that counts a failure if the test hangs. With Verilator 5, from
the repository root:

```
verilator --binary --timing --assert -Wno-fatal -y rtl rtl/llrf_pkg.sv \
          tb/tb_ngllrf_top.sv --top-module tb_ngllrf_top -Mdir obj_top
./obj_top/Vtb_ngllrf_top
```

Substitute any other `tb/tb_*.sv` the same way. The package has to come first
on the command line; `-y rtl` finds the other modules. All tests finish in a
few seconds. What they cover:

- **`tb_ngllrf_top`** runs the design at its default parameters. The testbench
  plays the processor, a DDR model per channel and an RF plant that returns
  the drive delayed, scaled and rotated. It takes the design through:
  - an open-loop pulse from the external trigger, with latency, level and
    word-by-word capture checks;
  - closed-loop convergence under the internal trigger;
  - a limit clamp;
  - a capture overflow under a stalled memory;
  - soft triggers;
  - a pulse with a 360 degree phase ramp.

  It counts each of these and fails if one never happens.
- **`tb_sband_capture`** builds the top with three inputs. It captures
  synthetic forward, reflection and probe envelopes of a 2 us pulse at drive
  levels 6 dB apart, and checks every captured word and the 2x amplitude
  steps.
- **`tb_pulse_stability`** runs 60 consecutive pulses through a plant whose
  phase random-walks and ramps, and whose gain wanders by 3%. It runs them
  once with the loop open, then with the loop closed at drive amplitudes
  2000, 4000, 8000 and 12000. The first three span the range used in the
  published jitter measurement. At every level, closing the loop must cut the
  RMS deviation of the measured phase and amplitude by at least four times.
  Typical result: 7 to 9 degrees and 2.2% open; 0.3 degrees and 0.3–0.4%
  closed.
- **`tb_multi_io`** builds the top with 16 inputs and 16 outputs. It loads a
  different waveform into each output's RAM and reads some back. Then it
  enables only the odd outputs and gives one trigger. Each enabled output must
  play its own waveform, scaled by the drive, for exactly the pulse length.
  Each disabled output must stay silent. All 16 capture DMAs must record their
  own input word for word.

## Fidelity: what follows the published system and what is this design's own

**Follows the published system:**

- the split between converter hard blocks and fabric logic;
- 10x decimation to 245.76 MS/s;
- the feedback block reading cavity I/Q and computing a new drive I/Q from user
  parameters;
- the parameter names (set value, correction gain, upper and lower limit, for
  amplitude and phase);
- the drive modulated by a user pulse held in a BRAM loaded over AXI4-Lite;
- the AXI4-Lite links for parameters and waveform;
- a DMA per measured channel writing over AXI4 to DDR;
- trigger input and output with master or slave operation;
- up to 16 inputs.

**This design's own choices.** The published feedback loop is described only
by what it does, and was still under development. Everything inside it is
therefore a choice made here:

- the pulse-to-pulse polar integral law;
- the measurement window;
- CORDIC conversion;
- Q4.12 gains;
- phase in 65536ths of a turn.

The following are also choices made here:

- 16-bit samples, at one per clock;
- the register map and reset values;
- the 4096-sample waveform depth;
- the Q1.15 waveform format;
- zero output between pulses;
- the DMA's 128-bit beats, 16-beat bursts, FIFO depth and overflow policy;
- the trigger synchroniser and the 32-clock trigger-out width;
- a single clock for everything;
- the per-output waveform banks, selected through WAV_SEL, and the shared
  drive for all outputs.

**Not covered here:**

- **Independent drives per output.** Up to 16 outputs are built, each with
  its own waveform and enable. They all share one drive I/Q from one
  feedback loop. Nothing is said about separate loops per output, so none are
  built.
- **Intra-pulse (real-time) feedback.** The loop corrects between pulses; it
  is not a real-time loop within the pulse.
- **Converter interface width.** One sample per clock is an idealisation. A
  real converter interface delivers several samples per fabric clock, and the
  datapath would have to be widened to match.
- **Buffering of consecutive pulses.** Captures overwrite a single buffer per
  channel, so keeping a series of pulses depends on software.
