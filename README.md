# Pulsed-mode firmware for a 16-channel RFSoC qubit controller

This is the programmable-logic part of an instrument that controls and reads
out superconducting qubits. It sits directly on an RF system-on-chip. The
chip's data converters provide 16 output and 16 input streams of complex
samples at 1 GS/s. Its ARM processor uploads waveforms, tables and a timed
list of events, then starts a run. From then on this logic does all the
real-time work alone:

- it synthesizes pulses from stored templates, a numerically controlled
  carrier and a gain;
- it records input windows and adds them into SDRAM, so that the averaging
  happens inside the instrument;
- it matches input traces against reference waveforms (a matched filter);
- it turns those results into a feedback mask within 10 ns, so that a
  pulse can be played or suppressed depending on the qubit state it just
  measured.

The clock is 500 MHz. Every stream carries two complex samples per clock
(one *word* = two IQ pairs of 16-bit I and Q). The sequencer grid is
therefore 2 ns, and all sizes below are counted in IQ pairs or in words.

```
 processor ──events──► event_sequencer ──commands──┬─► signal_generator ×16 ──► dac_out
          ──config───► (templates, tables, …)      ├─► store_ctrl ─┐
                                                   ├─► match_unit ×128 ─► feedback_unit ─┐
                                                   └─► markers, DC bias, trigger sync    │
 adc_in ×16 ─┬─► sample_buffer (2^19 pairs) ◄──────────────────┘                         │
             │        └─► transfer_accum ──read-add-write──► SDRAM port                  │
             └─► match_unit inputs                       fb_mask ─► signal_generator ◄───┘
```

The RF converters with their interpolation, mixers and NCOs, the processor,
the SDRAM, the clocking and the analog boards are outside this RTL. They
appear as ports.

## Time and events

`event_sequencer` holds two counters:

- a 48-bit sequence timer, restarted at 0 for every repetition of the
  experiment;
- a 64-bit counter of all clocks in the run.

The processor pushes events of the form `{time[47:0], opcode[3:0],
arg[159:0]}`. Each event class has its own time-controlled FIFO (`timed_fifo`),
so events of different classes can fire in the same clock. The classes are
template start/stop, table select, store window, matching window, and
marker/bias. An event fires in the clock where the timer equals its time.
Its command reaches the target block, registered, one clock later.

`OP_END` closes a repetition. The timer returns to 0, and after `nrep`
repetitions the run is `done`. Each queued event carries a 4-bit repetition
tag, which is the number of `OP_END` events pushed before it. So the
processor can queue the next repetitions while the current one runs, and
those events wait for their turn. If an event becomes the head of its queue
after its time has passed, it fires at once and sets the sticky `err_late`.
This happens when events of one class are pushed out of time order.

| opcode | argument (`presto_pkg` struct) | effect |
|---|---|---|
| `OP_TEMPLATE` | `tmpl_arg_t`: channel mask, template mask, stop, loop, envelope, cond, cond_bit | start or stop templates |
| `OP_SELECT` | `sel_arg_t`: channel mask, group mask, three table indices with enables | new carrier frequency / phase / gain |
| `OP_STORE` | `store_arg_t`: input mask, length in clocks, first SDRAM line | open a store window |
| `OP_MATCH` | `match_arg_t`: 128-bit unit mask | start matching windows |
| `OP_MARKER` | `io_arg_t`: marker mask and values | masked write of the 4 markers |
| `OP_BIAS` | `io_arg_t`: bias channel and 16-bit value | set one DC-bias value, with a strobe |
| `OP_END` | — | end of repetition |

The four trigger inputs only pass through two-flop synchronizers
(`trig_sync`). No event acts on them yet.

## Pulse synthesis

Each output (`signal_generator`) has 16 templates (`template_player`). Each
template holds 511 words, i.e. 1022 IQ pairs or 1022 ns. A template start
event plays it from word 0 up to its programmed length. With `loop` set it
keeps repeating until a stop event.

The templates form two groups of eight (templates 0–7 and 8–15). Each group
has:

- a carrier generator (`carrier_gen`);
- three 512-entry tables: frequency, phase, and gain.

A template plays in one of two modes. In *raw* mode its samples go straight
to the group sum. In *envelope* mode they are first multiplied by the
group's carrier: a complex product, scaled by 2^-15 and saturated. Each
group sum is multiplied by the group's signed 17-bit gain, a fraction with 16
fractional bits (range -1 to 1 - 2^-16; 0x8000 is 0.5). The
two groups are then added and saturated to 16 bits. Because there are two
groups with independent carriers and gains, an output can hold two
independently rotated and scaled pulses at the same time.

The carrier generator is a 40-bit phase accumulator. The 40-bit frequency
word is the phase step per sample, and the accumulator advances two samples
per clock. I and Q have separate 40-bit phase offsets: I = cos(φ + φ_I),
Q = sin(φ + φ_Q). The sine and cosine come from a 16-stage CORDIC
(`cordic_sincos`) fed with the top 20 phase bits.

The accumulator restarts at every `start`, so pulses keep a fixed phase
from run to run. Within a run it keeps counting across repetitions: a pulse
repeats with the same phase only if the repetition length times the
frequency is a whole number of turns. Otherwise a phase entry must be
selected in each repetition to realign it. A select event loads new entries from the tables.
Frequency sweeps and virtual-Z phase steps therefore need no new templates.

Feedback gating: a start with `cond` set is carried out only if bit
`cond_bit` of the feedback mask is 1 in the clock the command arrives.

Latency, from the clock a start command reaches the generator to its first
sample on `dac_out`, is 5 clocks. It is the same for raw and envelope
templates, because the 19-clock carrier pipeline runs all the time.

## Store path: buffer, windows, accumulation in SDRAM

`sample_buffer` holds 2^18 words (2^19 IQ pairs), and any number of the 16
inputs may write to it in the same clock. The words of one clock are packed
at consecutive addresses in channel order. Word *a* lives in bank *a* mod 16,
so a clock's words always fall into different banks. One write port per bank
is therefore enough, and the whole buffer is usable whether 1 or 16 inputs
are streaming.

The buffer is a ring. If a clock's words do not fit in the free space,
none of them is written: the clock is dropped as a whole and `err_overflow`
stays set.

`store_ctrl` opens a window when an `OP_STORE` event fires. The window
records the selected inputs for the given number of clocks. When it closes,
a job `{first buffer word, word count, SDRAM line}` goes into an 8-deep job
queue. A window that opens while another is open is refused and sets
`err_store_collision`.

`transfer_accum` works through the jobs at one buffer word per clock. One
word is one SDRAM line of 128 bits, holding I0, Q0, I1, Q1 as 32-bit values
from the low end. For each word it:

1. reads the target line;
2. adds the four sign-extended samples;
3. writes the line back.

Up to 16 lines may be in flight, so SDRAM read latency costs nothing while
the memory keeps up. A job starts only once every write of the previous job
has been accepted, so two windows aimed at the same lines cannot race. Aim
every repetition's window at the same lines and you get an average. Step
the line with a parameter and you get interleaved averaging.

The words of one window are interleaved by clock and then by input. Line
`L + n*k + i` holds the clock-*k* word of the *i*-th selected input, where
*n* is the number of inputs selected.

The sums are 32 bits and wrap. With N averages they are exact while the
mean |sample| stays below 2^31/N: about 2147 LSB for 10^6 shots.

## Template matching and feedback

Each of the 128 `match_unit`s has:

- a 511-word reference template τ;
- a length;
- an input channel, chosen by configuration.

On `OP_MATCH` a unit computes Re{Σ τ* s} = Σ (τ_I s_I + τ_Q s_Q) over its
window. Two clocks after the last sample it presents a 48-bit result with
a one-clock `match_done` pulse. A start that arrives while the unit is busy
is ignored.

`feedback_unit` works in three registered stages:

1. add the results in pairs (0+1, 2+3, …);
2. compare each of the 64 pair sums with its own 49-bit signed threshold
   (strictly greater);
3. map the 64 Booleans to the 8-bit mask.

The mapping is the design's "configurable operator". Each mask bit *k* is a
product term with a care vector `care[k]` and a value vector `val[k]`:

```
mask[k] = AND over p with care[k][p] of ( r[p] == val[k][p] )
```

A mask bit whose care vector is zero is constantly 1. Matching takes 2
clocks and feedback 3, so a template start can see the new mask 5 clocks
(10 ns) after the last input sample. Converter latency comes on top of
that.

The earliest useful conditional start has an event time 5 clocks after the
clock of the last window sample. Its first sample then reaches `dac_out` 12
clocks (24 ns) after that last input sample. Those 12 clocks are:

- 5 clocks of matching and feedback;
- 1 clock of event dispatch;
- 1 clock for the start command to reach the player;
- 5 clocks of generator pipeline.

Example: qubit active reset.

1. Load unit 0 with τ_e and unit 1 with −τ_g, both on the readout input.
2. Set threshold 0 to (‖τ_e‖² − ‖τ_g‖²)/2.
3. Set `care[0] = val[0] = 1` (bit 0 = r[0]).
4. Schedule the π pulse as a conditional start on mask bit 0, at least 5
   clocks after the last window sample.

For a qutrit (three pairs R_eg, R_fe, R_gf), use:

- bit 0 = R_eg ∧ ¬R_fe, which enables π_eg;
- bit 1 = R_fe ∧ ¬R_gf, which enables π_fg.

## Configuration map

`cfg_we`, `cfg_addr[31:0]` and `cfg_wdata[127:0]` form one write port.
`cfg_addr[31:28]` selects the target:

| region | target | address fields | data |
|---|---|---|---|
| 0 | output template word | ch [27:24], template [23:20], word [8:0] | word in [63:0]: pair 0 in [31:0] (I high, Q low), pair 1 in [63:32] |
| 0 with [19]=1 | template length | ch, template | length in words, [9:0] |
| 1 | generator table | ch [27:24], group [20], table [17:16] (0 frequency, 1 phase, 2 gain), entry [8:0] | frequency [39:0]; phase I [79:40], Q [39:0]; gain [16:0] |
| 2 | matching template word | unit [22:16], word [8:0] | word, as region 0 |
| 3 | matching set-up | unit [22:16] | input channel [3:0], length in words [25:16] |
| 4 | threshold | pair [5:0] | signed θ [48:0] |
| 5 | feedback operator | mask bit [2:0] | care [63:0], value [127:64] |

Match results, the mask and the 64 comparison bits are outputs of the top,
for the processor to read.

## Files

Every file starts with a comment on what it does, its interface and timing,
and what in it is this design's own choice.

| file | contents |
|---|---|
| `rtl/presto_pkg.sv` | word, event and command types, sizes, configuration regions |
| `rtl/presto_top.sv` | the whole pulsed-mode design |
| `rtl/event_sequencer.sv`, `rtl/timed_fifo.sv` | timers, repetitions, timed event queues, markers, bias |
| `rtl/signal_generator.sv`, `rtl/template_player.sv`, `rtl/carrier_gen.sv`, `rtl/cordic_sincos.sv` | pulse synthesis |
| `rtl/sample_buffer.sv`, `rtl/store_ctrl.sv`, `rtl/transfer_accum.sv` | store path |
| `rtl/match_unit.sv`, `rtl/feedback_unit.sv` | matching and feedback |
| `tb/tb_*.sv` | one self-checking bench per block; `tb_presto_top`, `tb_presto_full`, `tb_qutrit_reset` and `tb_freq_sweep` run the whole design |
| `tb/sdram_model.sv` | behavioural SDRAM: any latency, random back-pressure |

## Simulating

Each bench prints `TB_RESULT checks=N failures=M` and ends. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal \
    rtl/presto_pkg.sv $(ls rtl/*.sv | grep -v presto_pkg) tb/sdram_model.sv \
    tb/tb_presto_top.sv --top-module tb_presto_top -Mdir obj -o sim && obj/sim
```

- `tb_presto_top` runs the whole design at reduced size. It uses 4
  channels, 8 matching units, 32-word templates and a 256-word buffer.
- `tb_presto_full` runs the same scenario with every parameter at its
  default size. It takes under two minutes to build and run.

The scenario is an active-reset experiment over four repetitions in which
the qubit alternates between ground and excited. It checks:

- the matching results;
- the conditional π pulse, which is played exactly in the excited
  repetitions, sample by sample;
- the 3-clock step from result to mask;
- the SDRAM holding the sum of all four store windows;
- a looped envelope pulse;
- markers and bias.

A second run makes the buffer overflow and an event execute late. The bench
counts each of these mechanisms and fails if one never happened.

`tb_qutrit_reset` runs the qutrit-reset set-up on the reduced design: three
matching pairs, the two product terms above, and the ground, first- and
second-excited responses in turn. Each repetition must output exactly the
right reset pulse, or none.

`tb_freq_sweep` steps the carrier frequency from repetition to repetition
through four table entries. It loops output 0 back to input 0 and stores
each point into its own block of SDRAM lines, three times over. Every
stored value must equal the bench's own sum of what the input saw.

The block benches also check the cycle timing given above: carrier latency 19,
generator 5, matching 2 plus feedback 3, and one SDRAM line per clock.

## Where this departs from, or goes beyond, the published description

The published description gives the block structure, the sizes and the
arithmetic (the first list below). The rest is this design's own choice.

Taken from the description:

- 16 templates of 1022 pairs per output, in two groups of eight;
- 40-bit carrier frequency and separate 40-bit I/Q phase offsets;
- 512-entry frequency, phase and gain tables;
- signed 17-bit gain, and the raw or envelope modes;
- 2^19-pair shared buffer;
- transfer at 1 GS/s with 32-bit summing in SDRAM;
- 128 matching units computing Re{Σ τ* s};
- pairwise sums and thresholds giving 64 Booleans and an 8-bit mask;
- 5 clocks of logic latency;
- 48-bit sequence time and 64-bit run time.

This design's own choices:

- **The feedback operator.** It is only called "configurable". The
  product-term form covers both published examples (qubit and qutrit reset),
  but not every Boolean function of 64 inputs.
- **Threshold comparison.** It is strictly greater. One part of the
  description says "greater than" and another writes ≥. The difference is
  one LSB of θ.
- **Reaction time.** The description states 5 clocks of logic latency in the
  feedback path. Here matching plus feedback take exactly those 5 clocks, up
  to the mask. Gating a pulse with the mask adds the sequencer and generator
  pipeline, 12 clocks in all from input sample to output sample. How the
  original firmware splits its latency is not described.
- **Carrier resolution.** 40 bits at 1 GS/s give 0.91 mHz steps. The
  description quotes 0.5 mHz, which would need the accumulator to step once
  per 2 ns clock instead of once per sample.
- **Sine resolution.** The sine is computed from 20 of the 40 phase bits.
  This limits spur level, not frequency or phase resolution.
- **Event format and interface.** The event format, the per-class queues,
  the repetition tags, the late flag, the configuration map and the SDRAM
  port protocol are all inventions.
- **Store-path policies.** The store-buffer bank layout, the drop-on-overflow
  rule, the 8-deep job queue and the refusal of overlapping store windows are
  inventions.
- **Triggers.** Trigger inputs are synchronized but no event waits on them.
  How triggers affect a sequence is not described.
- **Direct-sampling mode.** The converters can bypass their mixers and
  carry real samples at 2 GS/s. That mode has no special support here. Raw
  templates, the store path and matching are lane-wise, so they treat a
  word as four real samples unchanged (Re{τ* s} is then the real dot
  product). The carrier generator, however, produces only a complex
  carrier.
- **Not here.** The continuous-wave lock-in firmware, the RF converter
  blocks (NCO, mixers, interpolation and decimation filters), the processor
  software that generates events, and the DC-bias DAC protocol are not part
  of this RTL.
