# Pulse-sequencer logic for a 32-channel DDS rf instrument

Trapped-ion experiments steer their qubits with trains of rf pulses. Many tones run at
once: qubit drives, cooling, detection. Each pulse must start on a precise clock edge
with a known frequency, amplitude and, most importantly, phase. The experiment also
needs to change what comes next from a measurement result while the sequence is
running. This RTL is the digital control for such an instrument, following the system
described by Keitch, Negnevitsky and Zhang in "Programmable and scalable radio frequency
pulse sequence generator for multi-qubit quantum information experiments" (2017). The
instrument has one master card and up to eight channel cards of four direct digital
synthesis (DDS) channels each, 32 rf outputs in all, joined by a backplane.

The main idea is that a channel does not stream samples. It plays a short program of
*edges*. An edge is a moment when the DDS gets a new frequency, phase and amplitude and
the pulse envelope changes. After an edge comes a wait, counted in clocks, until the
next one. The program is stored on the card. The master only sends the program, a
global start trigger and, when needed, small real-time rewrites.

This is not the authors' firmware. The paper describes what the firmware does, not how.
Everything below that the paper does not state is this design's own choice, and the
section "Where this design goes beyond the paper" lists those choices.

## The shelf

```
           processor port (words, trigger, detection gate/threshold/results)
                                  |
                          +---------------+        photon counters (8 TTL inputs)
                          | mch_controller|<------
                          |  link_tx      |
                          |  trigger gen  |
                          |  photon_counter
                          +---------------+
      point-to-point command lanes |  | ... |            shared trigger lane (TCLK_A)
            +----------------------+  |     +-----------------+------------------+
            v                         v                       v                  v
     +--------------+          +--------------+        (up to 8 channel cards, slot = k)
     | channel_card | slot 0   | channel_card | slot 1
     |  link_rx     |          |  ...         |
     |  trigger sync|
     |  4 x rf_channel --> 4 x AD9910 pins, 4 x VGA DAC code, 4 x TTL
     +--------------+
```

`rf_system` is the top level. It holds one `mch_controller` and `NUM_CARDS` (default
8) `channel_card`s. The master drives one serial command lane per card slot and one
shared trigger lane. Card *k* answers to geographical address *k*. Channel *c* of card
*k* is index `4*k + c` on the top-level arrays.

Each `channel_card` contains a `link_rx`, a trigger synchroniser and four `rf_channel`s.
Each `rf_channel` contains `sequence_memory`, `channel_sequencer`, `dds_spi_writer`,
`phase_tracker` and `pulse_shaper`. Shared types live in `rf_pkg`.

Outside this logic, and present only as ports: the master's ARM processor and its
software, the AD9910 DDS chips, the DAC5672A control DACs and ADL5330 variable-gain
amplifiers, the 1 GHz clock distribution, the analog rf chain, the microwave
up-converters and the Ethernet/USB/PCIe interfaces.

## Clock and units

Everything runs on one clock, taken as 125 MHz, so the time step is 8 ns. That matches
the 8 ns pulse-length step the authors quote. The DDS chips run from a 1 GHz clock, so
one logic clock is 8 DDS clocks. This factor appears in the phase arithmetic
(`DDS_CLK_PER_CYCLE`).

## Command words

The master and the cards talk only in 48-bit words. The 48-bit width is the published
one; the field layout is this design's:

| bits    | field   | meaning |
|---------|---------|---------|
| 47:44   | slot    | card address; `4'hF` = every card |
| 43      | all_ch  | 1 = every channel of the card |
| 42:41   | ch      | channel 0..3 (ignored if all_ch) |
| 40:39   | sel     | 0 event table, 1 sequence list, 2 shape table, 3 control |
| 38:32   | addr    | word address in the selected memory |
| 31:0    | data    | |

Control register, address 0: bit 0 arms the channel, bit 1 halts it.

On a lane a word is sent MSB first, one bit per clock, while the lane's `frame` line is
high. One idle clock separates words. There is no line coding. A word takes 49 clocks,
0.39 µs at 125 Mb/s. The published link runs at up to 166 Mb/s; a faster link clock is a
matter of the lane clock alone. A unicast word is driven only on its card's lane. A
broadcast is driven on all lanes at once, so every card writes it in the same clock.
The receiving card issues the write on the clock after the last bit, 8 ns, which is
inside the "below 20 ns" the authors give.

## Events and the sequence list

Each channel has two small dual-port memories (`sequence_memory`).

**Event table**: 32 entries of four 32-bit words.

| word | contents |
|------|----------|
| 0 | `ftw`: 32-bit frequency tuning word |
| 1 | `[29:16]` 14-bit DDS amplitude, `[15:0]` phase offset |
| 2 | wait: clocks from this edge to the next |
| 3 | `[13:0]` VGA level, `[16]` shaped, `[17]` spi (load ftw/amplitude), `[18]` TTL level |

**Sequence list**: 128 entries of 32 bits: `[31:30]` opcode, `[29:8]` count, `[7:0]`
event index.

| opcode | action |
|--------|--------|
| `OP_PLAY` (0) | play event `idx` |
| `OP_LOOP` (1) | the entries up to the next `OP_ENDL` run `count` times |
| `OP_ENDL` (2) | end of loop body |
| `OP_END`  (3) | stop after the last edge's wait |

A sequence with thousands of pulses but a handful of pulse types takes a few hundred
bytes: the events are stored once and the list refers to them. One channel holds 1 kB
of program plus a 128-sample shape table. There is one loop level, with counts up to
2^22−1.

Because the memories are dual-port, the host can write entries the sequencer has not
reached yet. This is how a running sequence is changed.

## How an edge is made (`channel_sequencer`)

This is the core of the design and the part with the tightest timing.

**Arm and trigger.** Writing 1 to the control register arms a channel. The sequencer
resets its list pointer and prepares the first edge, including its SPI load. Nothing
comes out until the trigger. The master raises the shared trigger lane for `TRIG_W`
clocks. Each card synchronises it with two flip-flops and turns its rising edge into a
one-clock start pulse for all four channels. On the next clock each channel's sequence
clock `t` starts at 0. Every card sees the same lane through the same logic, so all 32
channels count the same `t`.

**Schedule.** Edge 0 is due at `t = 0`. Edge *n+1* is due `wait_n` clocks after edge
*n* was *due*, not after it actually fired. A late edge therefore does not move any
later edge.

**Per-edge pipeline.** After an edge fires, the sequencer goes through these steps:

1. `FETCH`/`DECODE` (2 clocks): read the next list entry. Loop entries adjust the
   pointer and loop counter and fetch again, 2 clocks each.
2. `LOAD` (1 clock): read the event. If its `spi` flag is set, start an SPI transfer
   of frequency and amplitude into the DDS profile register. A transfer is 72 bits at
   62.5 MHz SCLK, about 146 clocks (1.16 µs). The AD9910 holds the transferred values
   in buffer registers until IO_UPDATE, so the load runs while the current pulse
   plays.
3. `WAIT`: the edge fires in the first clock with all of these true:
   - `t ≥ due`;
   - the SPI transfer has finished;
   - the coherent phase for that clock has been computed. It is registered one clock
     ahead, so `WAIT` lasts at least 2 clocks.

On the fire clock the sequencer registers all of these outputs:
- an IO_UPDATE pulse, which makes the buffered frequency and amplitude active;
- the phase word, driven on the AD9910 parallel port with destination code `F = 01`;
- the start of the VGA shaper;
- the new TTL level.

All pins of all channels change one clock after their edge fires.

**Minimum waits.** Two edges without an SPI load can be 5 clocks (40 ns) apart. Each
loop entry between them adds 2 clocks. An edge that loads a new frequency needs about
150 clocks (1.2 µs) after the previous edge. If a wait is shorter, the edge fires as
soon as it can, `late_count` counts it, and the rest of the schedule is kept. The end
of a sequence (`OP_END`) is reached when the last edge's wait has elapsed; `done` is
then set.

**Halt.** A halt write drops the channel back to idle at once. The outputs keep their
last values.

## Phase coherence (`phase_tracker`)

For every edge the DDS phase is set to "frequency × time since the start of the
sequence". So when a tone comes back after other tones, it has the phase it would have
had if it had never stopped. This is what lets pulses on one transition be combined
coherently across a long sequence. With a 32-bit tuning word and 8 DDS clocks per logic
clock:

```
phase32 = ftw * (t * 8)   mod 2^32
pow     = phase32[31:16] + phase_offset   mod 2^16
```

The product is registered from `t_next`, the value `t` will have on the next clock, so
the word is ready on the fire clock. The frequency used is the one the DDS plays after
the edge. That is the event's own `ftw` if the edge loads it over SPI; otherwise it is
the frequency already playing. The `ftw` field of an event without the `spi` flag is
ignored.

This relies on the AD9910 being set up to clear its phase accumulator on IO_UPDATE, so
that the phase offset written is the absolute output phase. That set-up is a register
write made once at start-up; it is not part of this logic. The phase offset of an event
also gives fixed relations between channels, for example the 90° pair (`0x4000`) that
drives an I/Q single-sideband mixer.

## Amplitude shaping (`pulse_shaper`)

A square pulse excites neighbouring transitions. Ramping the power smoothly avoids
that. The DDS amplitude sets the coarse level. The shape comes from a variable-gain
amplifier driven by a 14-bit DAC, and `pulse_shaper` produces that DAC code. A
host-written table of `SHAPE_LEN` = 128 samples holds one normalised ramp from 0 to
16383. The host pre-distorts the table for the amplifier's logarithmic gain curve. On a
shaped edge the output moves from the present level L0 to the event's level L1 as

```
dac = L0 + ((L1 - L0) * shape[k]) >>> 14,   k = 0..127,  each held SAMPLE_HOLD = 2 clocks
```

and then takes L1 exactly. One table serves rising and falling edges. The ramp lasts
256 clocks (2.05 µs). The 2-clock hold updates the DAC at 62.5 MHz. An unshaped edge
steps to L1 on the next clock.

## Detection and feedback

`photon_counter`, in the master, counts rising edges on up to 8 synchronised TTL
inputs while a gate is high. When the gate falls it latches the counts, sets
`outcome[i] = count[i] > threshold` and pulses `done`. In the end-to-end test the gate
is one channel's TTL output. The processor reads the outcome and sends one word that
rewrites a sequence entry of another channel. If that entry lies behind an edge that
has not fired yet, the new pulse plays in the same run. The hardware part of this
path is short:
- 1 clock from gate to result;
- 49 clocks to send the word;
- 1 clock to write it.

The processor's own reaction time is not part of this logic.

## Parameters

| parameter | default | where | meaning |
|-----------|---------|-------|---------|
| `NUM_CARDS` | 8 | rf_system | channel cards (4 channels each) |
| `EVT_DEPTH` | 32 | rf_channel | events per channel |
| `SEQ_DEPTH` | 128 | rf_channel | list entries per channel |
| `SHAPE_LEN` | 128 | rf_channel | shape-table samples |
| `SAMPLE_HOLD` | 2 | rf_channel | clocks per shape sample |
| `SCLK_HALF` | 1 | dds_spi_writer | clocks per SCLK half period |
| `DDS_CLK_PER_CYCLE` | 8 | phase_tracker | DDS clocks per logic clock |
| `TRIG_W` | 4 | mch_controller | trigger pulse width |
| `NUM_PMT`, `CNT_W` | 8, 16 | photon_counter | inputs, counter width |

Word-field widths limit `EVT_DEPTH` and `SEQ_DEPTH` to 32 and 128 unless the layout in
`rf_pkg` changes. At the defaults the whole shelf is about 320 kbit of memory and 15
kbit of flip-flops.

## Where this design goes beyond the paper

Taken from the paper:
- four channels per card and up to eight cards;
- the 48-bit command word, point-to-point lanes, geographical and broadcast addressing;
- a global trigger from the master;
- events as an edge (frequency, phase, amplitude) plus a wait counted in clocks;
- SPI for frequency and amplitude within 1.4 µs, and the parallel bus for phase;
- phase = frequency × elapsed time;
- amplitude shaping through a VGA driven by a 14-bit DAC at 62.5 MHz;
- eight photon-counter inputs with a threshold decision;
- running sequences that can be changed in real time.

This design's own choices:
- the field layout of the command word and the register map;
- unencoded frame-plus-data signalling at one bit per clock;
- the event-table / sequence-list split, the loop opcodes and the memory sizes;
- arm-then-trigger, the prefetch order and the late-edge policy;
- truncation of the phase to its top 16 bits, plus a per-event offset;
- linear interpolation through one shared shape table of fixed length;
- where the photon counters sit and how their gate is made;
- the processor interface (a plain valid/ready port, no bus);
- use of `TCLK_A` for the trigger.

The register address and layout of the AD9910 profile come from the chip's
documentation, not from the paper. The `par_f[1]` outputs are constant, since only the
phase destination is used.

Known gaps:
- The shaped-ramp length is fixed at build time. The published oscilloscope traces show
  ramps of roughly 4 µs; set `SAMPLE_HOLD = 4` to match.
- There is one loop level.
- Status cannot be read back over the link; the published system describes no return
  path.

## Simulation

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. `tb/ad9910_model.sv` is a behavioural model of the
DDS's SPI, IO_UPDATE and parallel port, for testbenches only. `tb/tb_util_pkg.sv` builds
command words and gives the reference phase. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_rf_system \
    -Irtl -Itb -y rtl -y tb rtl/rf_pkg.sv tb/tb_util_pkg.sv tb/tb_rf_system.sv \
    --Mdir obj_rf_system -o sim && obj_rf_system/sim
```

Replace `tb_rf_system` by any other testbench name. `tb_rf_system` runs the full
default shelf, 32 channels, through two complete runs. It checks:
- the edge times of every channel;
- identical start clocks on all cards;
- the frequency and coherent phase every DDS ends with;
- a conditional pulse inserted, or left out, after a photon-count decision;
- a late edge and a halted card.

It counts each of these mechanisms and fails if one never happens: broadcast, unicast,
channel-addressed writes, loops, shaped ramps, SPI loads, late edges, detections,
real-time rewrites and halts. Building it takes under a minute; it runs in well under a
second.

`tb_workloads` drives one card at its default sizes with three kinds of use:
- A four-channel, two-species sequence of about 220 µs, in the style of a typical
  cooling / gate / detection experiment. It has shaped pulses and looped short pulses.
  Every edge of every channel must land on the clock that the testbench expands from the
  same program.
- A quadrature pair for single-sideband mixing. Two channels share a frequency and
  carry phase offsets of 0 and `0x4000` (90°). After every edge, including frequency
  changes, their phase words must differ by exactly `0x4000`.
- 2000 repetitions of one pulse, 4000 edges over 800 µs. The program is 2 events and
  4 list entries, 48 bytes, and no edge may be late.

How far to trust it: every block is checked against values computed independently in
its testbench, including exact clock counts for link latency, SPI length, ramp timing
and edge times. Each testbench was also shown to fail on a deliberately broken copy of
its block. What is *not* verified is behaviour against real AD9910 silicon. The SPI
timing, the parallel-port protocol and the accumulator clearing that the phase scheme
relies on are taken from the chip's documentation and modelled only behaviourally.
