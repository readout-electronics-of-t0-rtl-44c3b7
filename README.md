# T0 detector time digitization module: FPGA logic in SystemVerilog

The T0 detector of the CSR external-target experiment (HIRFL) provides the start
time for every other detector. It is built from multi-gap resistive plate
chambers (MRPCs). A NINO-based front end turns each MRPC signal into an LVDS
pulse whose leading edge carries the time and whose width (time over
threshold, TOT) carries the charge. The time digitization module (TDM) must
therefore timestamp **both edges** of every pulse with a resolution of about
25 ps RMS. It must also:

- tell the trigger system when a valid event has occurred (self-trigger);
- keep only the measurements that fall inside a window set by the external
  trigger;
- deliver those measurements to the readout crate.

This repository holds synthesizable SystemVerilog for that FPGA logic of one
TDM, plus a behavioural model of the FPGA carry-chain delay line. The module
has 24 TDC channels in 3 banks of 8. The numbers that define the design come
from the published design:

| Parameter | Value |
|---|---|
| Delay line | 70 CARRY4 primitives |
| Coarse clock | 240 MHz |
| Coarse counter | 36 bits |
| Fine time | 8 bits |
| Channels | 24, in 3 banks of 8 |
| Trigger latency | 200 ns (maximum 2000 ns) |
| Matching window | 100 ns |

Everything the published design leaves open was chosen here. Those choices
are listed in "Where this RTL departs from, or fills in, the original design"
below.

## Signal path

```
hits[23:0] ─► tdl_carry_chain ×24 ─► tdc_channel ×24 ──(pulse detectors)──► trigger_preproc ─► event_flag
                                     │ channel FIFO
              ┌──────────── tdc_bank ×3 (channels 0-7, 8-15, 16-23) ─────────────┐
              │ 8 channel FIFOs ─► token_ring (level 1) ─► trigger_match ─► bank FIFO │
              └─────────────────────────────────────────────────────────────────┘
                                     │ 3 bank FIFOs
                                     ▼
                         token_ring (level 2) ─► readout FIFO ─► ro_rd / ro_dout / ro_empty
trig_front ─┐
trig_back  ─┴─ trig_sel ─► trigger_match of every bank
```

`t0_tdm_top` also holds the 36-bit coarse counter. All channels and the
trigger-time capture share this one counter.

## Measuring both edges in one carry chain

This is the least obvious part of the design. The hit pulse enters a
280-tap delay line: 70 CARRY4 primitives with four taps each, CO1 to CO4. At
every 240 MHz clock edge a row of flip-flops takes a snapshot of the line.
Three flip-flops are attached to each CARRY4:

| sample | tap | purpose |
|---|---|---|
| LE1 | CO1 | leading-edge code |
| LE2 | CO3 | leading-edge code |
| TE1 | CO3 XOR 1 (inverted) | trailing-edge code |

The leading code is 140 bits wide. After a rising edge it holds a run of ones
whose length grows with the time since that edge. The trailing code is 70
bits wide. Because it is inverted, a falling edge also shows up as a growing
run of ones. A single chain thus measures both edges.

`tdc_channel` detects an edge when the first bit of a code changes from 0 to 1
between two snapshots. It then routes that code through a multiplexer into a
single encoder, `thermo_encoder`. The encoder counts the ones, which also
copes with bubbles. The result is written as one word into the channel FIFO:

| field | bits |
|---|---|
| channel | 5 |
| edge (leading or trailing) | 1 |
| coarse | 36 |
| fine | 8 |

How to read a word:

- `coarse` is the value the counter took at the clock edge that sampled the
  line.
- `fine` is the number of taps the edge had passed by then.
- So the edge happened `fine × τ` before that clock edge, where τ is the
  spacing of the sampled taps (two CARRY4 taps for the leading code, four for
  the trailing code).
- The edge time is `coarse × 4.167 ns − fine × τ`.

On real silicon τ varies from bin to bin. Software calibrates it with a code
density test. This RTL does not do that.

Timing: the word is in the FIFO two clocks after the sampling edge.
`hit_pulse` is high for one clock on every leading edge. The line is longer
than one clock period (280 × 16 ps = 4.48 ns in the model, against 4.17 ns),
so every edge is caught in exactly one snapshot. The front end stretches
every pulse by 10 ns, to at least 12 ns. Both edges of one pulse can
therefore never fall in the same clock cycle. If that happened anyway, the
leading edge would be kept.

The delay line itself is process-specific, so `tdl_carry_chain` is a
behavioural model with a uniform 16 ps tap, not logic to synthesize. On the
FPGA it is replaced by the placed carry chain.

## Self-trigger (`trigger_preproc`)

Each channel's leading-edge pulse is widened by an expander to 6 clocks
(25 ns). That width is the coincidence window. `ext_mode` selects how a valid
event is recognised:

- **Internal MRPC (`ext_mode = 0`):** any hit is a valid event, so the
  expanded hits are ORed.
- **External MRPC (`ext_mode = 1`):** channels 2k and 2k+1 are the two ends of
  strip k. A strip with hits at both ends is a valid event, so each pair is
  ANDed and the results are ORed.

A final pulse detector and expander turn the start of the condition into a
24-clock (100 ns) `event_flag`, which goes to the sub-trigger module.
`event_flag` goes high at the second clock edge after the hit pulse that
completes the condition.

## Trigger matching with a CAM (`trigger_match`)

Each bank keeps a circular buffer of its last 64 measurements. The address
accumulator (`addr_accum`) gives the write address, which is shared by two
memories:

- the `dpram` holds the whole measurement;
- the `cam` (content-addressed memory) holds only its 36-bit coarse time.

`trigger_info` synchronises the trigger input. For each trigger it queues
three values:

- the trigger time (coarse counter);
- the bunch ID (a 40 MHz count, made by dividing the 240 MHz clock by 6);
- the event ID (the trigger number).

For the oldest queued trigger, the control state machine then does the
following:

1. It computes `low = T − latency` and `high = low + window − 1`, in coarse
   clocks. A window reaching below time 0 is clipped.
2. It waits until the coarse time has passed `high` by 16 clocks. That margin
   covers measurements still travelling through the channel FIFOs and the
   token ring.
3. It searches the CAM once for every time point from `low` to `high`. A
   search takes one clock. It returns a one-hot map of matching entries, plus
   MATCH, SINGLE_MATCH and MULTI_MATCH.
4. For a matching point, `cam_encoder` walks the map lowest address first.
   Each address is read from the DPRAM, and the word is sent to the bank FIFO
   together with the bunch ID and event ID.
5. It drops a word whose buffer entry has been overwritten in the meantime,
   detected because its coarse time no longer matches the point.

A CAM entry holds only the coarse time, so several measurements can share one
time point. This is the multiple-match case, and it is why the map is walked.
The cost per trigger is:

- 2 clocks per time point;
- plus 2 clocks per matched word;
- plus about 3 clocks of set-up.

An empty 100 ns window takes about 50 clocks (0.2 µs). Triggers arrive at
less than 10 kHz, so they are far apart in comparison.

The output port of `trigger_match` is valid/ready. The control holds a word
until the bank FIFO can take it.

## Token rings (`token_ring`, `token_ring_ctrl`, `token_node`)

Data moves from many FIFOs onto one path through a token ring:

1. The control (`token_ring_ctrl`) watches the sources' Empty flags and
   releases a token to node 0 when any source holds data.
2. A node (`token_node`) that holds the token pops its FIFO, one word per
   clock, until the FIFO is empty.
3. The node then passes the token to the next node. The last node returns it
   to the control.

A full channel cannot lock out the others: each source gets the path once per
round. Timing is one clock per hop. A round with no back-pressure takes
`words + N + 1` clocks.

The same module serves two levels:

- **Level 1:** 8 channel FIFOs → trigger matching, inside each bank.
- **Level 2:** 3 bank FIFOs → readout FIFO, in the top. Here the readout
  FIFO's full flag applies back-pressure.

## Configuration and ports of `t0_tdm_top`

| port | meaning |
|---|---|
| `clk`, `rst` | 240 MHz coarse clock; synchronous active-high reset |
| `hits[23:0]` | TOT pulses from the front end (asynchronous) |
| `trig_front`, `trig_back`, `trig_sel` | trigger from the front-panel LEMO (`trig_sel=0`) or the PXI star trigger line (`trig_sel=1`); asynchronous levels, rising edge = trigger |
| `ext_mode` | self-trigger mode, see above |
| `latency[9:0]`, `window[7:0]` | trigger latency and matching window in coarse clocks (48 and 24 give 200 ns and 100 ns; up to 1023 clocks = 4.26 µs of latency) |
| `event_flag` | to the sub-trigger module |
| `ro_rd`, `ro_dout`, `ro_empty`, `ro_overflow` | readout FIFO (first-word-fall-through) towards the CPLD |
| `coarse_time` | the time base, for monitoring |

A readout word (`match_word_t`, 82 bits) holds these fields:

| field | bits |
|---|---|
| event ID | 16 |
| bunch ID | 16 |
| channel | 5 |
| edge | 1 |
| coarse | 36 |
| fine | 8 |

Every matched measurement carries its event ID and bunch ID, so no header or
trailer words are sent. An event with no hits in its window produces no
words.

Two other module configurations run on the same logic:

- **16-channel module for the internal MRPCs:** leave bank 2 idle, or build
  with `N_BANKS = 2`.
- **24-channel module for the external MRPCs:** the default.

## Where this RTL departs from, or fills in, the original design

Taken from the original design:

- the delay-line length and the LE1/TE1/LE2 sampling scheme;
- the 36-bit coarse and 8-bit fine widths, and the 240 MHz clock;
- 3 banks of 8 channels, and the two token-ring levels;
- the blocks of the trigger matching (Trigger Info with its three counters and
  FIFOs, address accumulator, DPRAM, CAM with its match flags, CAM encoder,
  latency and window registers);
- the two self-trigger modes;
- the trigger-source choice.

Chosen here:

- **Clocking.** Everything runs on one 240 MHz clock. The original design
  runs the FIFOs, DPRAM and CAM at 96 MHz and the bunch counter at 40 MHz,
  from the FPGA clock manager. Here the bunch counter is a divide-by-6 count.
- **Time base.** One coarse counter serves all channels and the trigger-time
  capture.
- **Taps.** LE2 is taken from CO3. The line has a uniform 16 ps tap.
- **Encoder.** A ones-counter.
- **Edge detection.** Based on the first tap of each code.
- **Sizes.**

  | Item | Value |
  |---|---|
  | CAM/DPRAM depth per bank | 64 |
  | Channel FIFO | 16 |
  | Bank FIFO | 64 |
  | Readout FIFO | 256 |
  | Trigger FIFOs | 8 |
  | Bunch ID and event ID | 16 bits each |

- **Matching.** The 16-clock wait margin, the lowest-first walk of multiple
  matches, and the per-word output format.
- **CAM map numbering.** Map bit i stands for buffer address i. The worked
  example of the original design numbers the map positions from 1.
- **Self-trigger details.** The expander lengths (25 ns and 100 ns) and the
  pairing of channels 2k and 2k+1 as the two ends of a strip.
- **Full FIFOs.** Writes into a full FIFO are dropped and flagged
  (`ro_overflow`).
- **Metastability.** The first sampling stage is not modelled or protected
  beyond what the FPGA flip-flops give.

Outside this RTL:

- the NINO front end;
- the PLL and VCXO;
- the FPGA clock manager;
- the CPLD with the PXI interface;
- USB, SDRAM and FLASH;
- the master and slave trigger and clock modules.

The top exposes the signals where these connect.

## Files

`rtl/` holds one module or package per file:

- **Package:** `t0_tdm_pkg` (widths, `hit_t`, `match_word_t`).
- **Top:** `t0_tdm_top`.
- **Bank level:** `tdc_bank`, `token_ring`, `token_ring_ctrl`, `token_node`,
  `sync_fifo`.
- **Channel:** `tdc_channel`, `thermo_encoder`, and the behavioural model
  `tdl_carry_chain`.
- **Trigger:** `trigger_preproc`, and `trigger_match` with `trigger_info`,
  `addr_accum`, `dpram`, `cam` and `cam_encoder`.

`tb/` holds one self-checking testbench per module. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

- `tb_t0_tdm_top` runs the whole module at its default size: 24 channels and
  the full 70-CARRY4 lines. It places pulses on all three banks and uses both
  trigger inputs and both self-trigger modes. It checks every readout word
  against edge times, coarse stamps and fine counts worked out independently.
  It also counts that each mechanism happened: both edge types, internal
  flag, external coincidence and rejection, both trigger inputs, the
  unselected input ignored, multiple match, data outside the window left out,
  and events spanning several banks.
- `tb_t0_tdm_internal_maxlat` also runs at the default size. It uses the
  module as the 16-channel internal-MRPC unit, with bank 2 idle, at the
  largest latency the original system allows: 2000 ns, or 480 clocks. Two of
  its triggers arrive 8 clocks apart, so the second waits in the trigger FIFOs
  and the two windows overlap. It checks each event's readout against the
  measurements in that event's window.
- `tb_tdc_channel` and `tb_tdc_bank` do the same for one channel and one bank.
- The other testbenches compare their module with a reference model written
  in the testbench.

Simulate with plain Verilator 5, for example:

```
verilator --binary --timing --assert -Wno-fatal -y rtl +libext+.sv -Irtl \
    rtl/t0_tdm_pkg.sv tb/tb_t0_tdm_top.sv --top-module tb_t0_tdm_top -o sim
./obj_dir/sim
```

`--timing` is needed because the delay-line model and the testbenches use
delays, at a 1 ps resolution. Every file sets `` `timescale 1ps/1ps ``. The
full-size test builds in about 20 s and runs in a few seconds. To synthesize
for an FPGA, replace `tdl_carry_chain` with a placed CARRY4 chain that has
the same ports.
