# FPGA logic for controlling and reading out superconducting qubits

A superconducting quantum processor is driven by shaped microwave pulses and
read out by probing a resonator and deciding, from the returned signal,
whether each qubit was in its ground or excited state. The electronics that
does this has three hard requirements. Many boards must play their pulses in
step with each other. Pulses must be generated and readout signals digested
fast, inside FPGAs. And a measurement result must be turned into a
conditional pulse (feedback, or feed-forward) in much less time than the
qubit needs to decohere.

This repository holds synthesizable SystemVerilog for the FPGA side of such a
system, which is built as a PXIe-style chassis:

| board | role | in this RTL |
|-------|------|-------------|
| TCM, timing control module | the chassis hub: distributes level-1 triggers to up to 17 slots, relays them down a daisy chain to further chassis, and routes feedback lines | `tcm_top` |
| AWG, arbitrary waveform generator | four 2 GSa/s, 14-bit DAC channels that play stored pulse envelopes, with a trigger sequencer per channel and a feedback pulse | `awg_top` |
| DAQ, data acquisition | four 1 GSa/s, 12-bit ADC channels forming two I/Q readout lines; it demodulates, integrates and discriminates the state in real time and raises the feedback line | `daq_top` |
| BVG, bias voltage generator | six 20-bit DC bias DACs over SPI | `bvg_top` |

`qc_system_top` joins one of each board, plus a second AWG, into the smallest
complete system: enough to control and read out two qubits, with the feedback
loop closed through the TCM.

All logic runs on one 250 MHz clock (4 ns). Each board derives this clock
from the TCM's distributed reference, so all boards see the same edges. Each
pipeline stage costs 4 ns, so latencies below are given in clocks.

## Samples per clock

The converters are much faster than the FPGA fabric, so each clock carries
several samples side by side. The serialisers, which are not part of this
RTL, put them on the wire.

* AWG: 2 GSa/s / 250 MHz = **8 samples of 14 bits per channel per clock**
  (a 112-bit "envelope word"). Lane 0 is the earliest sample.
* DAQ: 1 GSa/s / 250 MHz = **4 samples of 12 bits per ADC channel per clock**.
  Lane 0 is the earliest sample.

Sample formats are two's complement throughout.

## Two levels of triggers

Experiments on qubits are repeated shots. Each shot is a short, precisely
timed sequence: a few control pulses, a readout pulse and an acquisition
window. Timing is split in two levels:

1. **Level-1 trigger: one per shot, for the whole system.**
   * `tcm_trigger_gen` produces it. In master mode it sends triggers
     `PERIOD` clocks apart, `COUNT` of them or until stopped.
   * It reaches every slot on its own backplane line (a star). Every slot
     therefore sees it on the same clock edge.
   * Between chassis the trigger travels on a daisy chain. Each hop adds one
     clock. So every TCM also delays its slot triggers by a programmable
     0..63 clocks.
   * In a chain of *n* TCMs, giving hop *i* the delay *n−1−i* makes the
     slots of all chassis fire on the same edge. `tb_tcm_top` checks this
     with two chained TCMs.
   * The delay is a tap on a 64-stage shift register. It is a setting of
     the chain, made once: increasing it within 64 clocks of a trigger can
     make that trigger appear twice.
2. **Level-2 trigger: per channel, within the shot.**
   * `l2_trigger_seq` holds a table of entries `{start, addr, len}`,
     ordered by start time. No two entries may share a start time: the
     sequencer fires at most one entry per clock.
   * A level-1 trigger restarts its time counter. When the counter reaches
     an entry's `start`, it fires a level-2 trigger carrying that entry's
     `addr` and `len`.
   * In an AWG this plays the envelope stored at `addr`, `len` words long.
   * In the DAQ it opens an acquisition window `len` clocks long.
   * A long gate sequence is thus stored as a few envelopes, each replayed
     at chosen times. It is not stored as one long waveform.

Timing of the sequencer: a level-1 trigger sampled at edge *k* gives the
level-2 trigger of an entry with start *s* after edge *k+1+s*. Entries may
fire on consecutive clocks. Each channel has 256 entries. Start times are
32 bits wide, which reaches 17 s.

## The readout path and the feedback loop

This is the heart of the design. The aim is to get from the end of a readout
window to a conditional pulse leaving an AWG in as few clocks as possible.

### The state decision

Each DAQ readout line receives the I and Q outputs of an analog IQ
down-mixer. These are centred on an intermediate frequency of exactly
fs/4 = 250 MHz.

**1. `daq_fs4_mixer`: remove the intermediate frequency (1 clock).**
* At fs/4 the local-oscillator samples are only 1, 0, −1, 0 (cosine) and
  0, 1, 0, −1 (sine).
* Each of the 4 lanes of a clock always sees the same coefficients. So the
  mixer needs no multipliers, only sign changes and swaps:

  | lane | I' | Q' |
  |------|----|----|
  | 0 | I | Q |
  | 1 | Q | −I |
  | 2 | −I | −Q |
  | 3 | −Q | I |

* This assumes the window starts on a clock boundary, which the sequencer
  guarantees.

**2. `daq_accumulator`: integrate (3 clocks).** This is a three-stage adder:
* two pipelined adder-tree levels reduce the 4 lanes to one sum per clock;
* the third stage adds that sum into the window's accumulator. The first
  word of a window reloads the accumulator.
* The window's integrated point (I, Q) is ready one clock after its last
  word has been added.

**3. `daq_state_disc`: decide (1 clock).**
* Ground and excited states leave two separate clouds in the I/Q plane.
* The block shifts the origin to a reference point (X0, Y0) and projects
  onto the axis that separates the clouds (cos θ, sin θ in Q1.15). It then
  compares with a threshold:

      p = ((I − X0)·cos θ + (Q − Y0)·sin θ) >>> 15,    state = p > THRESHOLD

* An excited result raises the feedback line for `FB_WIDTH` clocks. A ground
  result leaves it low.
* Subtraction, two multiplications, comparison and the pulse start all
  share one clock.

### Latency, clock by clock

The DAQ samples the last ADC word of a window at edge *k*. Then:

| edge | stage |
|------|-------|
| k | fs/4 mixer registers the last word |
| k+1, k+2 | adder tree |
| k+3 | accumulator holds the window's (I, Q) |
| k+4 | discriminator: `fb_out` of the DAQ goes high |
| k+5 | TCM feedback router (`tcm_fb_router`): `fb_trig` to the chosen AWG slot |
| k+6 | AWG: feedback pulse address registered |
| k+7, k+8 | AWG: envelope memory (2-clock block RAM read) |
| k+9 | AWG: precompensation register; first feedback sample on `dac_data` |

* DAQ: 5 clocks (20 ns).
* TCM: 1 clock.
* AWG: 4 clocks (16 ns).
* Total: **10 clocks = 40 ns** from the last ADC word to the first DAC
  sample.

The readout window itself comes on top of this: 12 clocks for a 48 ns
readout.

The rest of the measured loop of the real system, about 125 ns beyond the
readout, is outside this RTL:
* DAC serialisers and ADC deserialisers;
* converter pipelines;
* backplane and cables;
* analog chains.

`tb_qc_system_top` measures the 10 clocks in the assembled system. Each
block's testbench checks its own share.

### Routing a result to the right AWG

The DAQ has one feedback line to the TCM. `FB_SEL` picks which readout line
drives it.

The TCM router has one entry per slot: `{enable, source slot}`. Output *j*
copies feedback input `source` to slot *j*, one clock later. Any DAQ can
therefore trigger any AWG.

Inside the AWG:
* the feedback trigger starts, on every channel whose `FB_EN` bit is set,
  that channel's pre-selected feedback pulse (`FB_PULSE`: address and
  length);
* it overrides a level-2 trigger in the same clock;
* only its rising edge counts, so a feedback level several clocks wide plays
  the pulse once;
* a new start cuts off a pulse that is still playing. The old pulse's words
  already read from memory still come out, so it ends exactly where the new
  pulse begins. The same rule lets the pulses of a gate sequence follow
  each other without a gap.

### Multiplexed readout of several qubits

One readout line usually carries several qubits, each at its own frequency.
`daq_multich_demod` demodulates up to **8** of them in parallel over the
same window:

1. **Decimate by 2.** After the fs/4 mixer, keep lanes 0 and 2, so 2 samples
   per clock.
2. **Multiply by a local oscillator.** Each channel's `dds_sincos` supplies
   it:
   * a 32-bit phase accumulator steps by that channel's frequency word `FW`;
   * two phases per clock;
   * a 1024-entry, 16-bit cosine table computed while elaborating, as
     `round(32767·cos(2π i/1024))`;
   * the sine is read a quarter turn back.
3. **Complex multiply and sum.** Each product is `(I + jQ)·(cos − j sin)`,
   scaled by 2^-15 and summed over the window.

The phase of every DDS restarts at the first word of each window, so results
are repeatable shot to shot. This path only produces results for the host,
3 clocks after the window ends. It does not feed the fast loop.

### Uploading results and raw samples

The host cannot poll the board after every shot: shots come every few
microseconds. So each readout line records into two block-RAM buffers
(`daq_capture_buf`), which the host empties after a run:

* **Result buffer**, 1024 entries. One entry per shot: the integrated I and
  Q, the projection and the decided state.
* **Raw buffer**, 4096 words. The ADC words of every acquisition window, 4 I
  and 4 Q samples per word (16 µs of signal). This is what to look at when
  setting up the window position, the reference point and the threshold.

Writing the arm register clears a buffer and starts recording. Each buffer
keeps the first words of the run and stops when full. The host then writes a
word address and reads the word in the next bus cycle.

## Waveform generation

Each AWG channel (`awg_wave_player` around `awg_env_mem`) has:
* a 65536 × 112-bit envelope memory, 4 × 29.4 Mb per board;
* a player that streams `len` words starting at `addr`;
* zeros whenever it is idle.

The memory has a 2-clock read latency, as a registered block RAM output
has.

Channels 0/1 and 2/3 are I/Q pairs for analog IQ mixers. Each pair passes
through `awg_precomp`, which corrects mixer imbalance and carrier leakage:

    I' = sat((c11·I + c12·Q) >>> 14) + off_i,    Q' = sat((c21·I + c22·Q) >>> 14) + off_q

* Coefficients are Q2.14. Reset gives the identity and zero offsets.
* The offsets are present even when nothing plays, which is what cancels
  carrier leakage.
* Its output register is the last stage of the AWG pipeline.

## Converter and clock configuration

The DACs, ADCs, PLLs and bias DACs are set up over SPI. `spi_master` shifts
frames of up to 32 bits:
* MSB first;
* SCLK = clk / (2·CLK_DIV);
* CPHA selects the data edge;
* one chip-select line per device;
* it reads MISO back at the same time.

Users:
* AWG: one master with 5 chip selects (4 DACs and the PLL).
* DAQ: one master with 3 chip selects (2 ADCs and the PLL).
* BVG: six independent masters, one per AD5791 bias DAC, so all biases can
  change together.
  * A frame is the part's own 24-bit `{R/W, register[3], data[20]}`.
  * Register 1 is the DAC code and register 2 the control register.
  * At 250 MHz and CLK_DIV 4, SCLK is 31.25 MHz and a frame takes 193
    clocks.

## Host registers

Each board has a simple word-addressed register bus: `host_req_t`
{we, re, addr[15:0], wdata[31:0]} and `host_rsp_t` {rvalid, rdata}. Read
data arrives one clock after `re`. In the real system this is the board's
PCIe/PXIe link.

### AWG (`awg_top`)

| address | register |
|---------|----------|
| 0x0000 | FB_EN: bit c enables the feedback pulse on channel c |
| 0x0001 | ENV_COMMIT: write the staged 112-bit word to {channel [17:16], word address [15:0]} |
| 0x0002 | SEQ_COMMIT: write the staged sequence entry to {channel [9:8], index [7:0]} |
| 0x0004–0x0007 | ENV_STAGE: the staged envelope word, 32 bits each, lowest first |
| 0x0008 | SEQ_START: staged entry start time (clocks after the level-1 trigger) |
| 0x0009 | SEQ_ADDRLEN: staged entry {len [31:16], addr [15:0]} |
| 0x0010+c | FB_PULSE of channel c: {len, addr} |
| 0x0018+c | SEQ_N: number of entries of channel c |
| 0x0020+8p+k | precompensation of pair p: k = 0 c11, 1 c12, 2 c21, 3 c22, 4 off_i, 5 off_q |
| 0x0040 | SPI_DATA (read: last frame read back) |
| 0x0041 | SPI_GO: write {chip select [10:8], length [5:0]}; read bit 0 = busy |

### DAQ (`daq_top`)

| address | register |
|---------|----------|
| 0x0000 | FB_SEL: readout line that drives the feedback line |
| 0x0001–0x0003 | SEQ_COMMIT {line [8], index [7:0]}, SEQ_START, SEQ_ADDRLEN {len, tag} |
| 0x0100·(L+1) + 0 … 5 | line L: X0, Y0, {sin θ, cos θ}, THRESHOLD, FB_WIDTH, SEQ_N |
| 0x0100·(L+1) + 0x10+c | line L: frequency word of demodulation channel c |
| 0x0100·(L+1) + 0x20 … 0x25 | read: result count, state, sum I, sum Q, projection, multi-channel count |
| 0x0100·(L+1) + 0x40+2c, +0x41+2c | read: sum I / sum Q of channel c |
| 0x0100·(L+1) + 6 / + 7 | write: arm the raw / result buffer; read: that buffer is full |
| 0x0100·(L+1) + 8 / + 9 | RAW_RADDR / RES_RADDR: word to read back |
| 0x0100·(L+1) + 0x26 / + 0x27 | read: raw words / results stored |
| 0x0100·(L+1) + 0x28 … 0x2A | read: bits [31:0], [63:32], [95:64] of raw word RAW_RADDR |
| 0x0100·(L+1) + 0x2B … 0x2E | read: sum I, sum Q, projection, state of result RES_RADDR |
| 0x0F00, 0x0F01 | SPI_DATA, SPI_GO (chip selects 0–1 ADCs, 2 PLL) |

### TCM (`tcm_top`)

| address | register |
|---------|----------|
| 0x0000 | MASTER: 1 = own generator (reset), 0 = follow the daisy chain |
| 0x0001 / 0x0002 | START / STOP |
| 0x0003 | PERIOD in clocks (reset 1000 = 4 µs) |
| 0x0004 | COUNT (0 = until STOP) |
| 0x0005 | DELAY of the slot triggers, 0..63 clocks |
| 0x0006 | SLOT_MASK |
| 0x0010+j | ROUTE of slot j: {enable [8], source slot [4:0]} |
| read 0x0007 / 0x0008 | triggers sent / running |

### BVG (`bvg_top`)

| address | register |
|---------|----------|
| 0x0000+ch | write: send a 24-bit AD5791 frame on channel ch |
| 0x0010 | read: busy bit per channel |
| 0x0020+ch | read: last 24 bits read back on channel ch |

## Files

`rtl/`:

| file | content |
|------|---------|
| `qc_pkg.sv` | constants (channel counts, sample widths, lanes) and the bus and sequence-entry types |
| `qc_system_top.sv` | two-qubit system: TCM, AWG1 (slot 0), AWG2 (slot 1), DAQ (slot 2), BVG (slot 3) |
| `tcm_top.sv`, `tcm_trigger_gen.sv`, `tcm_fb_router.sv` | timing control module |
| `awg_top.sv`, `awg_env_mem.sv`, `awg_wave_player.sv`, `awg_precomp.sv` | waveform generator |
| `l2_trigger_seq.sv` | level-2 trigger sequencer (AWG channels and DAQ lines) |
| `daq_top.sv`, `daq_fs4_mixer.sv`, `daq_accumulator.sv`, `daq_state_disc.sv`, `daq_multich_demod.sv`, `dds_sincos.sv`, `daq_capture_buf.sv` | acquisition board |
| `spi_master.sv`, `bvg_top.sv` | configuration links and the bias board |

Each file opens with a description of its interface, timing and choices.
`tb/` has one self-checking testbench per module, `tb_<module>.sv`, and five
`tb_workload_*.sv` testbenches that run measurements of the kind the system
is built for (see the end of the next section).

## Simulating

Each testbench prints one line `TB_RESULT checks=N failures=M` and ends. A
watchdog stops it if it hangs. Stimuli are drawn with `$urandom` where
random.

With Verilator 5, from the repository root:

    verilator --binary --timing --assert -Wno-fatal -y rtl -y tb --top-module tb_daq_top \
        rtl/qc_pkg.sv tb/tb_daq_top.sv -Mdir obj_tb_daq_top
    ./obj_tb_daq_top/Vtb_daq_top

The same works for every `tb_*`. `-Wno-fatal` keeps the width warnings of the
testbenches' register-access helpers (which pass 16-bit address constants to
32-bit task arguments) from stopping the build; the RTL itself builds without it.

`tb_qc_system_top` runs the full system at its default sizes, 2 × 4 × 64 K
envelope words included, in a few seconds. It closes the loop like a bench
setup:
* AWG1 channels 2/3 play a readout tone at the DAQ's fs/4;
* a model of the analog path feeds every second sample, reduced to 12 bits
  and delayed two clocks, into DAQ line 0;
* a "qubit" model inverts that signal in the shots where the qubit is
  excited;
* the DAQ's feedback reaches AWG2 channel 2 through the TCM.

The testbench checks that:
* the feedback pulse comes exactly in the excited shots, 10 clocks after the
  last ADC word;
* the result counters and integrated values match;
* the daisy-chain output follows the triggers;
* the bias DAC receives its frame;
* the per-shot results read back from the DAQ's result buffer match the
  qubit's state in every shot;
* the offset correction holds on an idle channel;
* every one of these mechanisms happened at least once.

`tb_workload_8ch_demod` repeats the evaluation of multiplexed readout on a
DAQ board at default sizes:
* eight tones, at fs/4 ± up to 109 MHz, reach one ADC line together;
* their phases turn by 40° from shot to shot;
* every channel must return its own tone's phase within 1° and its
  amplitude within 2 %.

The worst errors seen are 0.13° and 0.1 %.

`tb_workload_gate_sequence` plays a randomized-benchmarking-style sequence
on an AWG board at default sizes:
* 256 random gates, drawn from four stored envelopes (17 words in all);
* mostly back to back, with a few idle gaps;
* about 1100 output words in total.

Every output word is checked.

`tb_workload_multi_chassis` joins four timing modules (17 slots each) in a
daisy chain, one master and three followers:
* with every delay at 0, follower *i* fires *i* clocks after the master,
  one clock per hop;
* with delay 3 − *i* on module *i*, all 68 slot lines fire on the same
  clock, for every trigger of the run;
* slots outside each module's mask stay silent.

`tb_workload_envelope_storage` fills the whole envelope storage of an AWG
board, 4 × 65 536 words (29.4 Mb), with a pattern that depends on channel,
address and lane. It then plays all of it back on the four channels at
once, as four 16 384-word entries per channel, and checks every output
word.

`tb_workload_t1_sweep` runs a relaxation-time (T1) measurement on the whole
system at default sizes:
* each point is a π pulse, a delay τ, and a readout;
* τ is swept from 0 to 180 clocks in steps of 20;
* between triggers the host moves the start times of the readout pulse and
  of the acquisition window;
* the qubit model relaxes if the readout starts 100 clocks or more after
  the pulse.

Every point checks the following:
* the pulse-to-readout time on the DAC outputs is exactly 4 + τ clocks;
* the DAQ's decision follows the model;
* the DAQ's sum has the full magnitude.

Block testbenches that need less memory override a module's depth through
its parameters. Every module keeps the sizes of the real system as its
defaults.

## Where this design departs from, or goes beyond, its source

The published system describes the architecture, the data rates and the
latencies. It does not give its firmware. The following are this design's
own choices:

* **Register maps and host bus.** All register addresses, and the host bus
  in place of the PCIe DMA link.
* **One clock domain.** A single 250 MHz clock for every board. The source
  states 250 MHz for the DAQ pipeline and 4 ns per stage. The AWG fabric
  clock is not stated unambiguously.
* **Sequence table.** The format `{start, addr, len}`, 256 entries, 32-bit
  start times.
* **Envelope memory size.** 65536 words per channel, chosen to fit the
  stated 30 Mb of block RAM per board.
* **Discriminator.** The projection onto a rotated axis with a reference
  point, its Q1.15 format and the width of the feedback pulse. The source
  only says the state is decided by a threshold on the demodulated data.
* **TCM routing.** A routing table, and one clock of routing delay. The
  source only says the TCM forwards the feedback to the AWGs.
* **Chain delay.** Its range: 64 clocks.
* **Multi-channel demodulation.** The decimation by 2 and the DDS widths
  (32-bit phase, 1024 × 16-bit table).
* **AWG feedback trigger behaviour.** Rising-edge triggering, priority over
  level-2 triggers, and how a new pulse cuts off one in progress.
* **Upload buffers.** Their sizes (4096 raw words, 1024 results per line)
  and the arm / keep-the-first-words protocol. The source only says that
  results or raw data can be uploaded.
* **Precompensation.** The 2×2 matrix plus offsets, in Q2.14.

The latencies match the source's figures:
* DAQ processing: 5 clocks = 20 ns;
* AWG: 4 clocks = 16 ns.

The TCM's one clock is this design's estimate.

Not in the RTL, because they are vendor primitives, analog or board
hardware:
* the LVDS serialisers and deserialisers for the converters;
* the PCIe/DMA core and the chassis interconnect between chassis;
* the clock tree and the synchronisation of the DACs' internal dividers;
* the converters themselves, except as models in testbenches;
* the analog front ends.

The ports of `qc_system_top` stop where those parts begin: parallel samples,
SPI pins and trigger lines.
