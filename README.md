# LUX trigger: digital filters, trigger state machine and Trigger Builder in SystemVerilog

LUX is a two-phase xenon time projection chamber. A particle interaction gives
two light flashes:
- **S1**: a short primary flash, tens of nanoseconds long.
- **S2**: a much wider secondary flash, about a microsecond long. It arrives
  after the electrons have drifted up to the gas, up to a few hundred
  microseconds later.

The photomultipliers are summed in analog into 16 *trigger groups*: eight of
the top array and eight of the bottom array. Each group is sampled at 64 MHz
with 14 bits. The trigger has to recognise S1-like and S2-like pulses in these
16 streams in real time. It decides from which groups fired, and where the
largest signal sat, whether the event is worth recording. It then sends one
trigger pulse, with a timestamp and a record of why, to the data acquisition
system.

This RTL implements the trigger's digital part. It covers two digitiser
boards, each handling 8 groups, and the Trigger Builder that combines them.

```
 ADC x8 ─► ddc8dsp (board 0) ─┬─ fast link (4 lanes, records) ──►┐
 ADC x8 ─► ddc8dsp (board 1) ─┤                                  │ trigger_builder ─► daq_trigger
                              └─ slow link (flags, state) ◄─────►┘   ├─► xlm_lanes (decision record)
                                                                     └─► rate (triggers per 10 s)
```

Top module: `lux_trigger_top` (`rtl/lux_trigger_top.sv`). Shared types and
constants: package `lux_trig_pkg`.

## 1. Pulse-shape filters

Each channel runs two FIR filters of the same three-lobe shape. There are two
side lobes of `n` samples and a main lobe of `m` samples between them:

```
 h(t) = B·Σ(older side lobe) − A·Σ(main lobe) + B·Σ(newer side lobe)
```

The weights sum to zero, so a constant baseline gives zero output. The PMT
pulses go negative, so a dip that fills the main lobe gives a positive output.

| filter | A | B   | main lobe | n range | tuned for |
|--------|---|-----|-----------|---------|-----------|
| S1     | 1 | 0.5 | m = n     | 1..16   | narrow pulses |
| S2     | 1 | 2   | m = 4n    | 1..64   | wide pulses  |

`lobe_filter` implements the shape for any integer weights. It does not
multiply and add each tap. Instead it keeps one running sum per lobe over a
circular delay line of `(2+M_MUL)·N_MAX` samples. Each clock adds the sample
entering a lobe and subtracts the one leaving it.
- Samples before reset count as zero.
- The output is forced to 0 until the line has been filled (2n+m samples).
  This avoids a false pulse at start-up or after `n` is changed.

`s1_filter` uses weights (1, 2) and shifts right by one extra bit to get the
0.5 side weight. `s2_filter` uses weights (2, 1). Both then shift right by the
programmed truncation (0..6 bits), clamp to 0..65535 and register the 16-bit
result. The output for sample *i* appears on the clock edge after the one
that takes sample *i+1*.

`threshold_disc` compares a filter output with a lower and an upper 16-bit
threshold, one clock later.
- The lower-threshold crossing means "pulse found".
- The upper crossing marks the event as *bad*, i.e. too large. Bad events can
  be vetoed later.

### The "S1 = S1 not S2" rule (`s1_not_s2`)

The narrow S1 filter also responds to the sharp edges of an S2 pulse. With
the rule on, an S1 crossing is first delayed by `D = 5·n2 − n1` clocks, which
lines it up with the peak of the S2 filter's response to the same light. The
S1 is then accepted only if the S2 filter is not above its lower threshold at
that moment, and has not been in the last `6·n2` clocks (the S2 filter length).

The second condition removes the S1 flag produced at the *trailing* edge of a
wide pulse, which would otherwise arrive just after the S2 response has fallen.
As a side effect, S1 Found arrives about D clocks late when the rule is on.

`ddc_channel` bundles the two filters, their two discriminators and this rule.

## 2. The board trigger state machine (`trigger_fsm`)

Each board runs one FSM over its 8 channels. The slow link ORs each flag over
all boards and hands the result back to every board, so all boards see the
same flags. Their FSMs therefore step in lockstep:
- `g_s1_raw`: any S1 lower-threshold crossing.
- `g_s1`: any S1 Found.
- `g_s2`: any S2 crossing.

```
 QUIET ─► ARMED ─► S1_WIN ─► LOOKUP ─► WAIT_TB ─► HOLDOFF ─► QUIET      S1Mode
              └──► S2_WIN ─► LOOKUP ─► ...                              S2Mode
 ARMED ─► S1_WIN ─► DRIFT ─► S2_WIN ─► LOOKUP ─► ...                    S1&S2Mode
                       └──(drift limit)──► QUIET
```

- **Quiet time** (0..65535 µs): the detector must be free of S1 crossings for
  this long before a search starts. Any crossing restarts it. It can be
  bypassed.
- **Coincidence windows**: the first S1 Found (or S2 crossing, in S2Mode) opens
  the window. During it, every channel that crosses its lower threshold sets
  its bit in the 8-bit S1 or S2 *hit vector*, and any upper-threshold crossing
  sets `bad`.
  - S1 and S2 windows are set separately, in units of 2 clocks (31.25 ns).
  - The window includes the clock that opened it.
  - In the S2 window the FSM also records which channel had the largest S2
    output, and its value.
- **Drift time** (S1&S2Mode only): after the S1 window the FSM waits up to
  `max_drift+1` clocks (15.625 ns .. 1.024 ms) for an S2. If none comes, it
  drops the cycle and pulses `drift_timeout`.
- **Look-up**: the two hit vectors form the 16-bit address `{S1 hv, S2 hv}` of
  the board's `trigger_map`, a 2^16 × 1 bit table that the host fills before
  the run.
  - A board working standalone triggers on its own when the map bit is 1 and
    the event is not bad.
  - A board connected to the Trigger Builder sends its record and waits for
    the builder's `done`/`trig` reply.
- **Hold-off** (µs, at least 4 µs): after a trigger no new cycle starts until
  it expires. A cycle that ends without a trigger goes straight back to the
  quiet time.

## 3. Board to builder

`ddc8dsp` is one digitiser board. It holds:
- 8 channels, registered once before the FSM;
- the FSM and its trigger map;
- the timestamp counter;
- a trigger-sweep engine;
- a fast-link transmitter.

When a connected cycle ends, the board sends a `ddc_rec_t` record of 85 bits:
- 48-bit timestamp;
- S1 and S2 hit vectors;
- maximum channel and its value;
- the bad flag;
- the board's own map bit.

**Fast link** (`fast_link_tx`/`fast_link_rx`): four lanes carry one nibble per
clock. A frame is:
1. the header nibble `A`;
2. the payload nibbles, least significant first;
3. an XOR check nibble.

An idle link sends 0. An 85-bit record takes 24 clocks. The receiver flags a
frame whose check nibble is wrong, and the builder counts such frames in
`link_errors` and discards them.

**Timestamps** (`ts_counter`): a 48-bit counter runs on the DAQ's 100 MHz clock
and can be cleared by the DAQ. Its value crosses into the 64 MHz domain as a
Gray code through two flops, so the value read is never torn.

**Trigger sweep** (`trigger_sweep`): runs in the background without disturbing
triggering. It steps a threshold over a selected channel's S1 or S2 output.
At each step it counts the rising edges of (output > threshold) for a set
dwell time, and stores the count per step for the host to read. That gives
pulse rate against threshold, a quick noise diagnostic.

## 4. Trigger Builder (`trigger_builder`)

The builder serves up to seven boards, 56 bits per hit vector. A table of
2^56 bits is out of the question, so the decision takes the following steps.

1. **Collection**: the builder waits until every enabled link has delivered a
   record, or 64 clocks have passed since the first one.
2. **Hit translation** (`hit_translator`): the builder programs each of the
   112 hit bits (56 S1 and 56 S2) to one of 16 *hit counters*, or to none.
   - The scan goes one S1 bit and one S2 bit per clock, over the enabled
     boards only: 16 clocks for two boards.
   - Each counter is then compared with its own threshold. Threshold 0 turns
     the counter off.
   - The result is a 16-bit global hit vector.

   This stage is a freely programmable multiplicity discriminator. For
   example, "S2 bits of all 16 groups to counter 0, threshold 2" means "at
   least two S2 groups".
3. **Builder trigger map**: the global vector addresses a second 2^16 × 1 map.
4. **Maximum detector** (`max_detector`): finds the group with the largest S2
   response over all boards, and checks it against a 56-bit *allowed* mask.
   This lets a trigger demand, for example, that the largest S2 lies in the
   top groups above the fiducial volume. It improves edge efficiency more than
   plain thresholds do.
5. **Decision** (`trigger_decision`): the event is accepted when all of these
   hold:
   - the map bit is 1;
   - the maximum is allowed, if that option is enabled and the event has S2
     hits;
   - no board reported a bad event, if the veto is enabled;
   - every board's own map bit was 1, if that option is enabled.

   The builder then pulses `daq_trigger` for 8 clocks, latches the timestamp,
   returns done/trigger to the boards over the slow link, and sends an
   `xlm_rec_t` record to the DAQ logic module on a fourth fast link. The
   record holds: timestamp, global vector, both 56-bit vectors, maximum index
   and value, bad flag and the decision.

`slow_link_hub` combines the flags, passes the reply back, and raises `desync`
when two connected boards report different states. `rate_meter` counts DAQ
triggers over consecutive 10 s periods (640 million clocks) and reports each
count.

### Latency

With a 2 µs S2 window and two boards, the time from the S2 window opening to
`daq_trigger` is 179 clocks (2.8 µs):
- 128 clocks of window;
- 24 clocks to send the record;
- 17 clocks of translation;
- a few clocks each for the map, the decision and the register stages.

This matches the roughly 3 µs the real system shows.

## 5. Configuration summary

Every setting is a port of the top, normally driven by configuration
registers.

| setting | field | range |
|---------|-------|-------|
| S1 / S2 filter length | `ch_cfg.s1_n`, `s2_n` | 1..16, 1..64 |
| truncation | `s1_trunc`, `s2_trunc` | 0..6 bits |
| thresholds | `s1_lo/hi`, `s2_lo/hi` | 16 bit |
| mode | `fsm_cfg.mode` | S1, S2, S1&S2 |
| quiet time | `quiet_us` (+`bypass_quiet`) | 0..65535 µs |
| windows | `s1_cw`, `s2_cw` | 0..511 × 31.25 ns |
| drift limit | `max_drift` | (value+1) × 15.625 ns |
| hold-off | `holdoff_us` | 4..65535 µs |
| builder in use | `connected_tb` | — |
| S1-not-S2 | `s1_not_s2` | — |
| translator | `tr_assign[112]` = {enable, counter}, `tr_thr[16]` | — |
| maximum mask | `max_allow[56]` (bit = board·8 + channel) | — |
| decision options | `dec_cfg.use_max`, `veto_bad`, `need_ddc_map` | — |
| maps | `tm_sel` (board index, or NUM_DDC for the builder), 16-bit words | — |

The map address puts the S1 vector in the upper byte, with channel 0 at bit 0
of each byte.

## 6. Where this design chooses for itself

The source description gives the filter equation, the states and their
ranges, the maps and the translation scheme. It does not give the following,
which are this design's own choices:
- the running-sum filter structure and how its start-up is handled;
- the alignment delay of the S1-not-S2 rule and its S2 stretch;
- the slow-link flag set;
- the fast-link frame format and record layouts;
- the builder's collection time-out;
- the 48-bit timestamp width;
- the sweep's dwell-based counting;
- the exact decision options.

Further departures:
- The board configuration panel lists shorter filter ranges (S1 1–15, S2 1–31)
  than the text (1–16, 1–64). The text's ranges are built.
- The builder is drawn with eight board inputs but described with seven.
  Seven are built.
- Not built:
  - waveform spy/capture buffers (named, never specified);
  - the external-trigger mode;
  - the analog front end and the link physical layers.

## 7. Simulating

Each module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/lux_trig_pkg.sv \
          tb/tb_lux_trigger_top.sv --top-module tb_lux_trigger_top
./obj_dir/Vtb_lux_trigger_top +verilator+rand+reset+2
```

- `tb_lux_trigger_top` runs the whole system with the rate period shortened to
  100,000 clocks. It counts and requires each mechanism at least once:
  - quiet-time restart;
  - S2Mode trigger and its latency (128..224 clocks);
  - an event ignored during hold-off;
  - rejection by the maximum detector;
  - bad-event veto;
  - S1Mode trigger;
  - S1 suppressed by the S1-not-S2 rule;
  - drift time-out;
  - S1&S2Mode trigger;
  - an S1&S2 event with the S1-not-S2 rule on, where S1 Found comes
    86 clocks after the pulse (76 of alignment delay plus the filter);
  - standalone board trigger;
  - rate report, with no board desynchronisation.
- `tb_lux_full` runs the same sequence at the exact default parameters. It
  takes well under a second, but cannot reach the 10 s rate report.
- `tb_wimp_search` runs the dark-matter search setting at the default size.
  The setting is S2Mode with at least 2 of 16 groups in a 2 µs window and a
  1 ms hold-off. Random events fire 1 to 4 groups. Events with 2 or more
  groups must trigger 2.3 to 3.5 µs after the S2 window opens (176 clocks,
  2.75 µs, is typical). Single-group events and events inside the hold-off
  must not trigger.
- The filter testbenches compare every output sample with Eq. 1 computed
  directly from the sample history.
- The other testbenches cover each block's rules in isolation, with random
  stimulus from `$urandom`.

Synthesis size of the top at the defaults is about 4,800 cells, 12,600 flip-flop
bits and 310,000 memory bits. The memory is the three trigger maps (196,608
bits) and the filter delay lines.
