# HiRIS acquisition logic: 1024 synchronously sampled PDM microphones

HiRIS is an in-air ultrasound imaging sonar built around a 32 × 32 array of
MEMS microphones (3.9 mm pitch). Each microphone has a sigma-delta ADC built in
and outputs a 1-bit PDM stream at 4.5 MHz. The imaging method (MVDR
beamforming over the whole aperture) only works if all 1024 channels are
sampled on the same clock edge and start recording in the same clock period.
The sensor gets there with a distributed design rather than one large
acquisition device:

* One **primary node** makes the microphone clock and the trigger. Its timer
  drives four identical 4.5 MHz square waves, and four 1:8 buffers turn them
  into 32 copies. A host command or an external trigger becomes one short
  pulse on 16 trigger lines, and each line reaches two nodes. The same event
  can start a DAC waveform for pulse-echo operation.
* **32 identical subordinate nodes** each serve one 8 × 4 group of 32
  microphones. Two microphones share each of the node's 16 data lines in
  stereo mode. A node keeps sampling, and once it sees the trigger it copies
  one 32-bit word per clock period (18 MB/s) into its 64 MB SDRAM until the
  requested number of words is stored. It then sends the recording to the
  host over its own USB link.

This RTL gives the digital part of that system: both node types and the
wiring that ties them together. It is written as dedicated logic. The
original sensor uses a microcontroller in every node and does these jobs in
firmware, so what follows models each node's function, not the firmware's
structure. The microphones, the SDRAM chips, the USB PHYs and bridges, the
RS-485 driver, the clock buffers and the host-side image formation (PDM
filtering, matched filter, STFT, MVDR) are not in the RTL. Their digital
sides are ports of `hiris_top`.

```
                 uart_rxd   ext_trig_in          ext_trig_out  dac_data
                    │           │                     ▲            ▲
          ┌─────────┴───────────┴─────────────────────┴────────────┴───┐
clk_sys ─►│ primary_node   uart_rx → primary_cmd ─┬─ trigger_ctrl ─► dac_sequencer
180 MHz   │                mic_clock_gen ─fall_next┘      │              │
          └──────┬───────────────────────────────────────┼──────────────┘
                 │ mclk_out[3:0] (4.5 MHz)               │ trig_out[15:0]
          1:8 fan-out (wiring)                     each line → 2 nodes
                 │ mic_clk[31:0]                         │
     ┌───────────┴─────────────┬────────────── ... ──────┴──────┐
     ▼                         ▼                               ▼
 subordinate_node 0      subordinate_node 1      ...    subordinate_node 31
  pdm[0][15:0] ─► pdm_stereo_capture ─► sample_recorder ─► SDRAM write port
                                         readout_streamer ◄─ SDRAM read port
                                               └─► USB byte stream
```

## Clocks and the synchronous trigger

There are two clock domains, and a single place where they meet.

* `primary_node` runs on `clk_sys`. By default that is 180 MHz, and
  `mic_clock_gen` divides it by 40. One counter drives four output flops, so
  the four outputs switch on the same `clk_sys` edge.
* Every `subordinate_node` runs on its copy of the microphone clock. All its
  flops are clocked by it: capture, recording and readout alike. The
  microphones on the node's data lines are clocked by the same copy
  (`mic_clk[n]`). The node therefore needs no synchronisers for its data.

The trigger crosses from the primary domain to the nodes. It does so without
synchronisers and without any uncertainty between nodes, because the primary
node changes the trigger lines only on a **falling** edge of the microphone
clock. `mic_clock_gen` raises `fall_next` in the `clk_sys` cycle just before a
falling edge. `trigger_ctrl` then sets `trig_out` on that same `clk_sys` edge.
The nodes sample the trigger on the **rising** edge, half a period (111 ns)
later. Every node therefore sees the trigger in the same period, as long as
the trigger lines and the clock copies reach the nodes with less than about
100 ns of relative skew.

The pulse is `PULSE_MCLK` = 2 microphone periods long. A node starts on the
pulse's rising edge, so the length only has to exceed one period. Requests
that arrive while a pulse is waiting or being sent are dropped. Each dropped
request gives a one-cycle `trig_dropped` pulse. `n_trig` counts the pulses
sent.

The DAC sequencer gets its start pulse on the edge that raises the trigger
lines. Sample *k* of the waveform reaches `dac_data` 2 + *k*·`DAC_DIV`
primary cycles after that edge. The emitted pulse and the recordings are
therefore a fixed, known delay apart.

## Stereo PDM capture (`pdm_stereo_capture`)

On each data line, one microphone puts its bit out after the rising clock
edge and the other after the falling edge. Each bit is read on the edge
opposite the one that launched it:

```
mclk        ‾‾‾‾‾‾\______/‾‾‾‾‾‾\______/‾‾‾
pdm[p]       ==A(k)==X==B(k)==X==A(k+1)=X==B(k+1)
                     ↑ falling: rise_mics[p] <= A(k)
                              ↑ rising: word[2p] <= A(k), word[2p+1] <= B(k)
```

The falling-edge flop bank holds the "rising-edge" microphones. On the next
rising edge it is copied, together with the line values at that moment (the
"falling-edge" microphones), into `word`. Each rising edge thus presents one
word with one PDM bit from every microphone of the node, for the period that
began one rising edge earlier. Bit 2p is the rising-edge microphone on line p
and bit 2p+1 the falling-edge microphone. Which physical microphone gets which
channel number is this design's choice.

## Recording (`sample_recorder`)

`trig` is tested on every rising edge. On the first edge that sees it high,
the word present at that edge goes to address 0. The next words follow, one
per edge, until `num_samples` words are written. This is 18 MB/s, and the
design assumes the SDRAM controller takes one word per 222 ns without
back-pressure.

* `num_samples` is taken when the recording starts. 0 records nothing.
* A count above the SDRAM's 2^24 words (64 MiB, 3.73 s) is cut to 2^24 and
  sets `clipped`.
* A trigger during a recording is ignored and pulses `retrig`.
* `done` rises the period after the last write and stays high until the next
  recording starts. `rec_words` says how many words were written.

The 70 ms measurement the sensor normally takes is 315,000 words, or 1.26 MB
per node and 40 MB for the whole array.

## Readout (`readout_streamer`)

A request on `rd_start` reads words 0 … n−1 from the SDRAM, where n is the
smaller of `num_samples` and the words the last recording wrote. Reads are
pipelined: `rd_re` may ask for a word every cycle, and `rd_valid` brings the
words back in order after any latency. Words in flight plus words waiting in
a 4-word prefetch FIFO never exceed 4. Each word leaves as four bytes, least significant
first, on a valid/ready byte stream meant for the node's USB CDC device. A
byte, once offered, is held until it is taken; an assertion checks this.

The node ignores a request that arrives during a recording. With the SDRAM
answering within about 4 cycles and the USB side always ready, the stream
sends one byte every microphone clock (4.5 MB/s); the testbench checks this.
At that rate, a 70 ms recording takes 280 ms to read out. A full
record-and-read cycle is then 350 ms, which is a 20 % duty cycle.

## Host commands to the primary node (`uart_rx`, `primary_cmd`)

The primary node's host link is a UART behind a USB bridge, running at
115200 baud 8N1 by default (`CLKS_PER_BIT` = 1563 at 180 MHz). The byte
protocol is this design's own:

| bytes | effect |
|---|---|
| `'T'` | start a measurement (trigger pulse + DAC start) |
| `'C' b` | microphone clocks on (`b[0]`=1, the reset state) or off |
| `'L' nh nl` | DAC sequence length = {nh,nl} samples, cut to 4096 |
| `'W' ah al dh dl` | store DAC code {dh,dl}[11:0] at address {ah,al}[11:0] |
| `'S' b` | DAC source: predefined chirp (`b[0]`=1) or uploaded sequence (0, the reset state) |

Any other first byte is dropped and pulses `cmd_error`, as does a UART frame
with a low stop bit. The external trigger input (`ext_trig_in`, from the
RS-485 receiver or a TTL input) is synchronised, and its rising edge acts
like `'T'`. `ext_trig_out` copies the trigger pulse so that external
equipment can be started with the nodes.

`dac_sequencer` plays one of two sources at 1 MS/s (`DAC_DIV` = 180), then
returns to mid-scale (2048). The first source is the first `len` samples of
its 4096 × 12-bit memory. The second is the predefined waveform, made by
`chirp_gen`.

## The predefined chirp (`chirp_gen`)

Active measurements emit a broadband hyperbolic chirp. In such a chirp the
*period*, not the frequency, changes linearly with time. That makes it cheap
to produce without a stored table:

* `period` holds P(n), the period of sample n in samples, with 16 fraction
  bits. It starts at 1 MHz / 100 kHz = 10 and grows by a constant DP each
  sample, reaching 40 (25 kHz) at sample 1999.
* The phase is a 24-bit fraction of a cycle and advances by 1/P(n) per
  sample. A restoring divider computes 2^40 / P(n), one quotient bit per
  clock: 41 cycles, well inside the 180 cycles between DAC samples.
* The sine uses a parabola with one correction term. For the phase as
  u ∈ [−1, 1) half-cycles, p = 4u(1 − |u|) and y = p + 0.225(p|p| − p).
  This is within about 0.1 % of a true sine. The code is 2048 + 2047·y.

Against a double-precision model of the same chirp, every one of the 2000
samples is within 3 codes. The chirp's numbers are this design's own: a
100 kHz to 25 kHz sweep (the band the sensor targets), 2 ms long, full scale
and with no window. Change them through the `chirp_gen` parameters;
`dac_sequencer` fixes the length at 2000 samples.

## Top level (`hiris_top`)

`hiris_top` instantiates `primary_node` and `NODES` = 32 `subordinate_node`s.
Node *n* is wired as follows:

* clock: `mclk_out[n/8]` (the 1:8 buffers are plain wiring); the same copy is
  brought out as `mic_clk[n]` for microphone group *n*;
* trigger: `trig_out[n/2]`;
* data lines: `pdm[n]`.

Each node also has its own SDRAM port set (`sd_*`) and USB-side port set
(`num_samples`, `rd_start`, `usb_t*`, status). All these are arrays indexed
by node.

| parameter | default | meaning |
|---|---|---|
| `NODES` | 32 | subordinate nodes (1024 microphones) |
| `MCLK_DIV` | 40 | primary cycles per microphone clock period |
| `CLKS_PER_BIT` | 1563 | UART bit time in primary cycles |
| `ADDR_W` | 24 | SDRAM word address width per node |

Shared constants are in `rtl/hiris_pkg.sv`.

## Where this design departs from the sensor, and what is assumed

From the sensor description:
* the array size, grouping and stereo pairing;
* 4.5 MHz, 16 data lines and 16 trigger lines;
* 4 clock outputs × 1:8 fan-out;
* 64 MB per node and 18 MB/s;
* trigger-started recording of a preset number of samples;
* external trigger in and out;
* a host-loadable or predefined DAC sequence started with the trigger;
* a hyperbolic chirp as the emitted waveform;
* UART host link to the primary and USB readout from each node.

Own choices:
* the 180 MHz primary clock;
* the trigger's pulse length and its alignment to the falling edge;
* dropping overlapping triggers, ignoring retriggers, clipping;
* the word bit order;
* the SDRAM port protocol and the absence of back-pressure;
* the readout byte order and handshake;
* the command protocol and baud rate;
* the DAC's 12 bits, 4096-sample depth, 1 MS/s rate and mid-scale idle;
* the chirp's band, length, amplitude and the way it is computed;
* the trigger-line and buffer-to-node mapping;
* running a node entirely on the microphone clock.

The sensor's firmware could start each node's USB transfer differently; here
the host asks each node with `rd_start`.

Not modelled:
* predefined waveforms other than the one chirp;
* readout concurrent with recording, so a 100 % duty cycle cannot be reached;
* the USB, SDRAM, bridge and line-driver chips;
* all host-side signal processing.

The description of the sensor names its UART bridge FT231X in one place and
FT230X in another. Since only the UART line is modelled, this makes no
difference here.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. Expected values never
come from the design. Microphone bits come from a hash function of (node,
channel, period) in `tb/pdm_ref_pkg.sv`. The model `tb/pdm_mic_model.sv`
drives those bits 2 ns after the clock edges, and the checkers recompute them.
`tb/sdram_model.sv` is a sparse word memory that accepts a read every cycle
and returns the words in order after a random latency.
`tb/uart_tx_model.sv` plays the host.

| testbench | what it establishes |
|---|---|
| `tb_mic_clock_gen` | 40-cycle period, 20-cycle high time, identical outputs, strobes exactly one cycle ahead, stop when disabled |
| `tb_uart_rx` | random bytes, timing of `valid`, frame error and recovery |
| `tb_primary_cmd` | every command, length clipping, bad opcode and resynchronisation |
| `tb_trigger_ctrl` | pulse on all lines, aligned to falling edges, 2 periods long, DAC start, external trigger, dropped requests |
| `tb_chirp_gen` | all 2000 chirp samples against a double-precision reference (within 6 codes; 3 seen), 41 cycles per sample, restart |
| `tb_dac_sequencer` | every sample value and its cycle, idle level, ignored restart, zero length; the whole chirp with its timing |
| `tb_primary_node` | the above through the UART, including the 'S' switch between chirp and uploaded sequence |
| `tb_pdm_stereo_capture` | 2000 periods of 32 channels against the reference |
| `tb_sample_recorder` | counts, first-word timing, one write per period, retrigger, zero length, clipping |
| `tb_readout_streamer` | byte order and content under random back-pressure and latency; one byte per cycle when the USB side is always ready |
| `tb_subordinate_node` | 700-word recording checked word by word, refused readout, read-back bytes |
| `tb_hiris_top` | all 32 nodes end to end with a 1024-word SDRAM; also counts that each mechanism happened: host and external trigger, dropped trigger, ignored retrigger, clipping, refused readout, DAC playback, clock stop, bad command, same-period start of all nodes, predefined chirp |
| `tb_longest_recording` | one node at default size asked for more than 2^24 words: clipped to 2^24 (3.73 s), every address written once, one word per period |
| `tb_duty_cycle` | one node at default size through a 70 ms recording and its full readout: all 1,260,000 bytes checked, 280 ms readout at 4.5 MB/s, 20 % duty cycle |
| `tb_hiris_full` | `hiris_top` at its defaults: one 70 ms measurement on all 32 nodes (315,000 words each, every write checked), with duration and 18 MB/s per node measured, then a 256-word read-back per node |

To run one with Verilator 5 (example for the end-to-end test):

```
verilator --binary --timing --assert --timescale 1ns/1ps \
  -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/hiris_pkg.sv tb/pdm_ref_pkg.sv tb/tb_hiris_top.sv \
  --top-module tb_hiris_top -Mdir obj_tb_hiris_top -o sim
./obj_tb_hiris_top/sim
```

`tb_hiris_full` and `tb_hiris_top` take about a minute and `tb_longest_recording`
about 20 seconds. The others take a few seconds.
Assertions guard the recorder's write range, the readout stream rule and
that each chirp sample is ready when the DAC needs it.
All files are plain SystemVerilog-2017 and lint clean of structural warnings.
The only remaining warnings are unused package constants and signal bits,
and the reset that also gates the recorder's assertion.
