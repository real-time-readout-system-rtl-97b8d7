# Frequency-multiplexed KID readout and online trigger — RTL

Kinetic inductance detectors (KIDs) are superconducting resonators. A particle
that deposits energy in the silicon under a detector shifts that detector's
resonance, and so changes the amplitude and phase of a microwave tone driven
at the resonance frequency. Many resonators share one coaxial line. The
readout therefore sends a *frequency comb*, one tone per resonator, down
each line. It digitises what comes back, separates the tones again, and
watches every tone for pulses.

This repository holds synthesizable SystemVerilog for the programmable-logic
part of such a readout, sized for 16 lines. Per line it provides:

- a comb generator that replays a stored waveform to the DAC;
- a built-in network analyser (VNA) that finds the resonances;
- a calibration mixer;
- a channelizer that turns the 250 MSps ADC stream into one 195.3125 kSps
  complex stream per tone.

All detector streams then go through one shared online trigger. The trigger
packs pulses, with the samples that led up to them, into tagged packages. A
switch picks packages or raw detector data, and a DMA engine writes the
chosen stream to external DDR4 memory.

The RF converters, the DDR4 controller, the processor and its software are
not here. `daq_top` brings out their signals as plain ports.

## Data flow and clocking

```
          +-- comb_generator --+                                 
 cfg -->  |                    +--> cal_mixer (TX, e^{+j phi}) --> dac_data[l]
          +-- vna -------------+          ^ mode.b0 selects VNA or comb
                                           
 adc_data[l] --> cal_mixer (RX, e^{-j phi}) --+--> vna (S21)        (VNA mode)
                                              +--> channelization_stage (readout mode)
                                                     |
   16 x readout_chain ------------------------------+
          |  (tone, sample) per line, 195.3125 kSps per tone
          v
   stream_combiner --> trigger --> axis_switch --> dma_writer --> mem_* (DDR4)
          \________________ raw data _____^
```

Everything runs on one 500 MHz clock (`clk`). The converter side works at
250 MSps complex baseband, so ADC and DAC samples move on `adc_valid`, which
is high on every other clock. The channelizer's interleaved 128-channel
stream, the tone select, the DDCs and the trigger use every clock.

A sample is `dsp_pkg::cplx_t`: 16-bit signed I in bits [31:16] and 16-bit
signed Q in bits [15:0].

## Channelization: two critically sampled banks, offset by half a channel

This is the least obvious part of the design (`channelization_stage`).

**The banks.** `pfb_channelizer` is a critically sampled polyphase filter
bank with 64 channels. Each channel is 3.90625 MHz wide and decimated by
64. So the bank's output is one TDM stream at the input rate: in each
64-sample frame, slot k carries channel k.

- **Prototype filter:** a Hann-windowed sinc, 8 taps per branch (512
  coefficients). It is computed at elaboration by `dsp_pkg::lowpass_coefs`.
- **Channel separation:** a 64-point DFT does this. It runs as running
  complex sums, so one branch output is folded into all 64 bins per clock.
- **Where channels sit:** channel k is centred at k·fs/64. Channels 32..63
  are the negative frequencies.
- **Latency:** one frame plus one clock.

**Why two banks.** A critically sampled bank has a weak spot at the edge
between two channels: a tone there is attenuated and aliased. So a second
bank runs on a copy of the input that `spectrum_shift` has moved down by
fs/128 = 1.953125 MHz, half a channel. A tone that falls on an edge of bank
A falls at the centre of a bank-B channel.

**Interleaving.** `interleaver` merges the two streams. Merged channel 2k is
bank A channel k and 2k+1 is bank B channel k, so merged channel j is
centred at j·fs/128 (modulo fs). The merged stream is 128 channels at
500 MHz, one channel per clock. The unshifted path is delayed one clock so
the two banks stay in lock step. Assertions in the interleaver check this.

**Tone selection.** `bin_select` holds a tone table, tone t → merged
channel. Each 128-clock frame is written into one bank of a
double-buffered memory while the previous frame is read out in tone order.
This drops empty channels and repeats channels that contain several tones.
Up to 128 tones are served per line. `out_last` marks the last tone of a
frame.

**Down-conversion.** `ddc` treats each tone as its own slow stream at
3.90625 MSps (one sample per frame). For each tone it:

1. Mixes the tone to 0 Hz with a per-tone NCO. The frequency word is the
   tone's offset from its channel centre.
2. Adds a per-tone phase offset to the NCO phase. This rotates the
   resonance circle so that a pulse shows mainly in one component; the
   trigger can then look at I or Q alone.
3. Low-pass filters with a 40-tap FIR (cut-off ≈ 98 kHz) and decimates by
   20, giving 195.3125 kSps.

The FIR is computed as two running partial sums per tone: taps 0..19 and
20..39 of the 40-tap response. So no history memory is needed. One output
per tone appears every 2560 clocks.

With these numbers the trigger receives 16 × 128 = 2048 samples per 2560
clocks. That is within its one-sample-per-clock budget of 2560 detectors.

## Stimulus, network analyser and calibration mixer

**`comb_generator`.** The comb is computed off-line as one period of the sum
of all tones. It is written into `comb_generator` through the configuration
port and then replayed cyclically. Only tones with a whole number of periods
in the buffer are allowed. With `COMB_DEPTH` = 2 500 000 samples at 250 MSps
the tone grid is 100 Hz. `LREG_COMB_LEN` sets a shorter period for a coarser
grid.

The memory is an array. At full depth it is far larger than the on-chip
RAM of an RF-SoC part (80 Mbit per line). In hardware it belongs in DDR4,
behind the same write/read pattern.

**`vna`.** The analyser steps a single tone from `f_start` in `npts` steps of
`f_step`. At each point it:

1. waits `settle` samples;
2. accumulates 2^`avg_log2` products of the received signal with the
   conjugated reference tone;
3. reports the averaged complex S21 × amplitude as (`res_point`, `res_data`).

Finding the resonance dips in that sweep is left to software.

**`cal_mixer`.** The calibration mixer shifts the whole transmitted band by
a programmable frequency, multiplying by e^{+jφ}. It shifts the received
band back by the same frequency, multiplying by e^{−jφ}. Stepping that frequency
sweeps every comb tone across its resonance at the same time, which
characterises all resonators of a line at once. Because the receive side is
shifted back, the channelizer and tone table need no change during the
sweep. When disabled it passes samples through
unchanged.

**Mode bit.** One mode bit per line (`LREG_MODE`.b0) moves both path
switches together:

- TX: VNA tone instead of comb;
- RX: samples go to the VNA, and the channelizer gets no samples.

## Trigger and packages

`stream_combiner` gives each line a FIFO (128 entries by default). A
round-robin arbiter merges the FIFOs into one stream tagged with the
detector number `det = line·128 + tone`. An overflow sets a sticky flag
(`comb_overflow`); at the nominal rates it never happens.

`trigger` keeps per-detector state in memories indexed by `det`. It uses
one component (I, or Q if `use_q`), negated if `invert` is set, and one of
three algorithms:

| `algo`      | trigger statistic s[n]                                    |
|-------------|-----------------------------------------------------------|
| `TRIG_DIFF` | x[n] − x[n−1]                                             |
| `TRIG_MA`   | (x[n] − x[n−4]) / 4, the step of a 4-sample moving average |
| `TRIG_IIR`  | x[n] − b[n−1], with baseline b += (x − b)/2^k, k = `iir_k`  |

**Firing.** A detector fires when s > `threshold` and it is not already
recording. It also must have seen enough samples since reset to fill its
delay lines.

**Packages.** A per-detector delay line of `PRE_LEN` = 128 samples supplies
the pre-trigger samples. From the firing sample on, the trigger emits the
delayed samples for `pkg_len` (≤ 1024) samples. Each package therefore
starts 128 samples before the pulse.

- Every detector is evaluated on every sample, so there is no dead time
  between detectors.
- Packages of different detectors interleave beat by beat.

**Beats.** Every output word is a 128-bit `daq_pkg::beat_t`:

| bits      | field                                                   |
|-----------|---------------------------------------------------------|
| 127:102   | zero                                                    |
| 101       | `raw`: raw-data beat, not a package beat                |
| 100       | `first`: first beat of a package                        |
| 99        | `last`: last beat of a package                          |
| 98:97     | `algo`: trigger type                                    |
| 96:85     | `det`: detector number                                  |
| 84:37     | `ts`: 48-bit timestamp in clock cycles (firing sample for packages) |
| 36:32     | zero                                                    |
| 31:0      | sample, I[31:16] Q[15:0]                                |

`axis_switch` forwards packages (`GREG_SW_SEL` = 0) or every raw detector
sample (1). It changes over only when no package is open.

`dma_writer` writes one beat per memory word from `GREG_DMA_BASE`. It has
two modes:

- **Snapshot:** stops after `GREG_DMA_WORDS` words, or after
  `GREG_DMA_TIME` clocks if that is non-zero.
- **Continuous:** runs as a ring of `GREG_DMA_WORDS` words until stopped,
  counting wraps.

When `mem_ready` is low, the beat is dropped and counted. The design never
stalls the detector stream.

## Configuration map

Registers are write-only 32-bit words on `cfg_we/cfg_addr/cfg_wdata`. The
constants are in `rtl/daq_pkg.sv`.

| address                              | target                                           |
|--------------------------------------|--------------------------------------------------|
| `addr[31]=1`, `addr[7:0]`            | global registers `GREG_*`: trigger control, threshold, IIR k, package length, switch, DMA |
| `addr[31]=0`, `addr[30:27]` = line   | per line, region `addr[26:24]`:                   |
| region 0 `REG_CTRL`, offset `LREG_*` | mode, mixer frequency, comb length, number of tones, VNA sweep |
| region 1 `REG_COMB`                  | comb sample memory, offset = sample index         |
| region 2 `REG_TONE`                  | tone table, offset = tone, data = merged channel  |
| region 3 `REG_DFREQ`                 | DDC frequency word per tone                       |
| region 4 `REG_DPOFF`                 | DDC phase offset per tone                         |

**Mode register** (`LREG_MODE`):

| bit | meaning      |
|-----|--------------|
| b0  | VNA mode     |
| b1  | mixer on     |
| b2  | comb on      |

**Trigger control register** (`GREG_TRIG_CTRL`):

| bits | meaning           |
|------|-------------------|
| b0   | enable            |
| b2:1 | algorithm         |
| b3   | use Q             |
| b4   | invert            |

**DMA control register** (`GREG_DMA_CTRL`):

| bit | meaning    |
|-----|------------|
| b0  | start      |
| b1  | stop       |
| b2  | continuous |

**Frequency words.** Frequency and phase words are 32-bit fractions of a
turn per sample:

- mixer and VNA: at 250 MSps;
- DDC: at the 3.90625 MSps per-channel rate.

**Reset and initial state.** Reset clears control state, the global
registers and all counters. The contents of the comb, tone-table and DDC
memories are not reset. Software must write every tone's frequency and
phase words before use.

## Where this design departs from the published system

- **Two filter banks, not three.** Only the two-bank, 128-channel
  channelizer is built. The full experiment has about 145 resonators per
  line and needs a third bank (192 channels); that is not built. At the
  defaults the design carries 128 tones per line, 2048 detectors in all.
  The trigger itself is sized for 2560.
- **Comb memory on chip.** The comb memory is an on-chip array. The
  published system keeps high-resolution combs in DDR4.
- **Simple configuration port.** The processor interface is a plain
  register write port, not an AXI slave. There is no read-back; VNA results
  and DMA counters are ports.
- **Single-sample datapath.** One 500 MHz clock with a 250 MSps strobe
  replaces the converter's multi-sample-per-clock interface.
- **Simplest structures.** Filter lengths and windows, the DFT by running
  sums, and the algorithm formulas are the simplest that do the described
  job. They are not taken from a published netlist.
- **No coincidence trigger.** Coincidence triggering between detector
  layers is not implemented.

## Files

| module | role |
|---|---|
| `dsp_pkg`, `daq_pkg` | sample type, sine and filter constant functions; beat type, register map |
| `sincos_lut` | 1024-point cosine/sine table (computed at elaboration) used by the NCOs |
| `comb_generator`, `vna`, `cal_mixer` | stimulus and calibration |
| `spectrum_shift`, `pfb_channelizer`, `interleaver`, `bin_select`, `ddc` | channelization parts |
| `channelization_stage`, `readout_chain` | one line |
| `stream_combiner`, `trigger`, `axis_switch`, `dma_writer` | shared back end |
| `daq_top` | 16 lines plus back end |

Every `rtl/` file begins with a description of its interface and timing.
Each module has a self-checking testbench `tb/tb_<module>.sv`. Each
testbench computes its expected values independently, for example by
direct DFT sums, reference filters and a model of the tone table.

`tb_daq_top` runs the whole design at reduced size (2 lines, 4 tones). It
covers VNA sweeps, mixer use, comb replay, tone duplication, packages,
raw acquisition, snapshot and ring DMA. It counts how often each of these
happened. `tb_daq_full` runs `daq_top` at its default size (16 lines,
2.5 M-sample combs, 128 tones, 2560 detectors). Lines 0 and 15 loop a
one-tone comb from DAC to ADC. The test takes a raw snapshot of both
detectors, then removes one line's signal and checks that the difference
trigger stores one package, with its pre-trigger samples, for that
detector only.

## Simulating

Verilator 5 is enough. The packages must come first:

```
verilator --binary --timing -Wno-fatal -Irtl -y rtl \
    rtl/dsp_pkg.sv rtl/daq_pkg.sv tb/tb_ddc.sv --top-module tb_ddc
./obj_dir/Vtb_ddc
```

`-y rtl` lets Verilator find the modules by name. Every testbench ends by printing
`TB_RESULT checks=<n> failures=<m>` and has a cycle watchdog. Block
testbenches run in seconds. `tb_daq_full` takes a couple of minutes,
mostly to build the full-size memories.

Verilator is two-state. Memories that the design does not reset start at
random values unless the testbench writes them. The testbenches do so.
