# Parallel interval-matching waveform trigger at 10 GS/s

Side-channel measurements of real devices need to know *when* the operation of
interest (for example one AES encryption) happens inside a long, noisy
signal. A waveform-matching trigger finds it by comparing the incoming signal
with a stored template of the operation's shape. The comparison runs in real time.
Earlier matchers take one sample per clock. They are therefore limited to a few hundred
MS/s. This design takes **D samples per clock**. It scores **D overlapping candidate
windows every cycle**, so its sample rate is D times the FPGA clock: 32 × 312.5 MHz = 10 GS/s
with 14-bit samples from an ADC pair.

The similarity measure is *interval matching*. For every template position
`i` there is a corridor `[lower_i, upper_i]`, normally the template value ± an offset. The score of a
window is the number of positions whose sample lies inside the corridor. A window matches when its
score exceeds a threshold. The score only sums single bits, so it is bounded by the template length.
It cannot overflow, and one outlier costs at most one point.

This RTL implements the matcher, which is the logic that sits between the ADC and the
acquisition path of an FPGA digitizer. The samples pass through it unchanged and delayed. A
trigger bit travels next to them and marks the samples of each detected
operation.

## Block structure

```
in_data[D] ─► wm_srg (N_STAGES × D samples) ───────────────────────────► out_data[D]
                 │ taps (all samples, newest first)
                 ├─► wm_matcher_module  j = 0      ─ valid[0]   ┐
                 ├─► wm_matcher_module  j = 1      ─ valid[1]   ├─► wm_trigger_logic ─► trigger_o
                 │        …                                     │
                 └─► wm_matcher_module  j = D-1    ─ valid[D-1] ┘
                              ▲ lower/upper/threshold         ▲ trig_len/holdoff
cfg_i ─────────► wm_config_regs ──────────────────────────────┘
```

| file | role |
|---|---|
| `rtl/wm_pkg.sv` | default sizes, register map, `cfg_req_t`, and the latency and SRG-length functions |
| `rtl/wm_srg.sv` | the sample shift register (SRG), D samples per stage |
| `rtl/wm_comparator.sv` | `lower <= sample <= upper` for one template position |
| `rtl/wm_adder_tree.sv` | pipelined popcount of the comparator hits |
| `rtl/wm_matcher_module.sv` | N_CMP comparators, adder tree, `score > threshold` |
| `rtl/wm_trigger_logic.sv` | ORs the D valid bits, trigger duration, hold-off |
| `rtl/wm_config_regs.sv` | limit, threshold and trigger-timing registers behind a write port |
| `rtl/wm_waveform_matcher.sv` | top level: wiring, window selection, stride |

## Why D matchers: the windows

The stream arrives in beats of D samples, and an operation can start at any of
them. If the matcher scored only one window per beat, it would test only one alignment in D.
Every D-th possible start would be missed. So D matchers run side by side.

Name the SRG contents with a flat index `SRG[k]`, where `k = 0` is the newest
sample and `k` grows towards older samples (`taps_o[k]` of `wm_srg`, i.e. stage
`k / D`, lane `D-1-(k mod D)`; lane 0 of a beat is its earliest sample).
Matcher `j` (0 ≤ j < D) scores the window that ends at `SRG[j]`. Its template
position `i` (0 = earliest in time) reads

```
SRG[ j + (N_CMP - 1 - i) * STRIDE ]
```

Over one beat the newest sample of the window moves through all D positions.
Together the D matchers therefore test every alignment exactly once. They read
`SRG[0 : span + D - 2]` with `span = (N_CMP - 1) * STRIDE + 1`.

**Stride (template sub-sampling).** The matcher logic (comparators and adder trees)
costs about `D × N_CMP` comparators, and the number of comparators is what limits the size. The SRG
costs little. With `STRIDE = s` only every s-th sample of a window that is
`(N_CMP-1)·s + 1` samples long is compared. The SRG still keeps and outputs every sample.
A template that covers 2800 samples can then be matched with 700 comparators at stride 4.

## Timing and trigger alignment

Latencies, counted in clock cycles:

| step | cycles |
|---|---|
| comparators | 0 (combinational, read directly from the SRG registers) |
| adder tree | `ceil(log2 N_CMP)`, one register per level (11 for 1400) |
| `score > threshold` | 0 (combinational after the tree) |
| trigger register | 1 |
| total `l` (`wm_pkg::match_latency`) | `ceil(log2 N_CMP) + 1` (12 at the defaults) |

The SRG has to be long enough that a matched window is still inside it
when the trigger comes out. The trigger then accompanies the very samples that matched.
The length is

```
N_STAGES = ceil((span + D - 1) / D) + l + ceil(POS_BUF / D)          (wm_pkg::srg_stages)
```

This means the part the matchers read, plus `l` beats that cover the latency, plus an
optional *positional buffer*. The positional buffer is for a template that covers only the end of an operation.
It keeps `POS_BUF` samples ahead of the template in the SRG, and they leave under the same
trigger. At the defaults (D = 32, N_CMP = 1400, stride 1, POS_BUF = 0)
N_STAGES = 45 + 12 = 57 stages, i.e. 1824 samples. Each sample leaves exactly
N_STAGES cycles after it entered.

Result: when a window matches, `trigger_o` rises on the output beat that holds
the window's first template sample, or on the beat just before it. It rises
`ceil(POS_BUF/D)` beats earlier when a positional buffer is configured. The uncertainty of one beat comes from
the trigger being one bit per beat. The lane `j` of `valid_o` at match time gives the exact
sample.

`trigger_o` then stays high for `trig_len` cycles, which should be set to the length of the operation
in beats. After a match is accepted, further matches are ignored for `holdoff` cycles. Overlapping
windows of the same operation, or several matches within it, therefore give one trigger.
`suppressed_o` pulses for every ignored match. With `holdoff = 0` every match is
accepted, and it extends a running trigger.

## Configuration

All run-time settings go through one write port, `cfg_i` (`wm_pkg::cfg_req_t`:
`we`, 16-bit `addr`, 32-bit `wdata`), which is written in a single cycle:

| address | register |
|---|---|
| `0x0000` | threshold: a window matches when score > threshold |
| `0x0001` | trigger length, in cycles |
| `0x0002` | hold-off, in cycles |
| `0x8000 + i` | template position i: `wdata[15:0]` = lower limit, `wdata[31:16]` = upper limit (two's complement, low P bits used) |

The limits are precomputed off-line: `lower_i = c_i − o`, `upper_i = c_i + o`
for template value `c_i` and offset `o`. Per-position limits also allow corridors of
different widths. The test is inclusive at both ends. A position can be made
"don't care" with `lower = most negative`, `upper = most positive`. This lets a shorter template
run on a wider matcher: add the number of don't-care positions to the threshold.
After reset nothing can match: every corridor is empty and the threshold equals N_CMP.
Write all limits first, then the threshold.

Limits and threshold are shared by all D matchers, since they all test the same
template. Samples and limits are signed.

## Interface of the top (`wm_waveform_matcher`)

| port | dir | width | |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; synchronous active-low reset (clears SRG, pipeline, counters, registers) |
| `in_data` | in | D × P signed | one beat per clock, lane 0 earliest; no flow control |
| `cfg_i` | in | `cfg_req_t` | register writes |
| `out_data` | out | D × P signed | the input, N_STAGES cycles later |
| `trigger_o` | out | 1 | trigger, aligned with `out_data` |
| `valid_o` | out | D | per-lane match flags, `l − 1` cycles after the beat entered |
| `accepted_o`, `suppressed_o` | out | 1 | a match started a trigger / was held off |

Parameters: `D` (32), `P` (14, at most 16 for the register map), `N_CMP` (1400),
`STRIDE` (1), `POS_BUF` (0).

## Sizes and what fits

* 10 GS/s: D = 32 lanes at 312.5 MHz, one beat each clock, with no stalls.
* Template of 1400 comparators: the default. On the Kintex UltraScale KU85 of the reference
  digitizer, a LUT-mapped implementation of this size takes about 68 % of the LUTs (about 244 LUTs per
  template position for all 32 matchers). 2800 positions would need about 137 % and do not fit. 700 positions need
  about 34 %.
* A 2800-sample template of an AES-128 encryption on a 1 GHz ARM core, compared at
  every 4th sample: `N_CMP = 700, STRIDE = 4` (span 2797 samples, 100 SRG stages).
  This is not the default. Instantiate the top with those parameters.
* The SRG can also be made long (a large `POS_BUF`), because on an FPGA its untapped tail
  maps to LUT shift registers. The reference platform would allow up to about 30,000 samples.

## Choices of this implementation

The source description gives the structure of the SRG, the matcher, the comparator and the
sizes. The following are this implementation's own decisions:

* **Inclusive interval test.** The defining equation is `c_i + o ≥ t_i ≥ c_i − o`. The block
  diagram draws strict `>` boxes. The equation is used.
* **`score > threshold`** for a match (the diagram's `>` box); a score equal to
  the threshold does not match.
* **Window orientation and lane order** as described above. SRG index 0 is the
  newest sample.
* **Adder tree** registered after every level. Only a clocked adder tree is
  specified.
* **SRG length** widened from `n` to `n + D − 1` samples so that all D windows
  fit. The trigger alignment above depends on this.
* **Trigger logic** as two down-counters (duration, hold-off) with run-time
  lengths. The source only names the two functions.
* **Shared limit registers.** There is one copy for all matchers, where the diagram draws
  registers inside every comparator.
* **Configuration port** and register map, reset values, signed samples.
* The SRG is written as plain registers. The reference implementation uses LUT
  shift-register primitives. Synthesis can infer them only for the part that no matcher
  reads.

The surrounding digitizer datapath is not part of this RTL: ADCs, vendor trigger, sample skip,
level trigger, acquisition, packetiser, DRAM FIFO, PCIe and soft CPU.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog:

| testbench | what it checks |
|---|---|
| `tb_wm_comparator` | all 2^18 (sample, lower, upper) triples at P = 6 |
| `tb_wm_adder_tree` | popcount and the exact 6-cycle latency for N = 37; N = 1 |
| `tb_wm_srg` | output delay of N_STAGES beats; every tap against the time-ordered stream |
| `tb_wm_matcher_module` | score and valid against a software count, 4-cycle latency, score = threshold case |
| `tb_wm_trigger_logic` | trigger and hold-off against a software model for four length/hold-off settings |
| `tb_wm_config_regs` | reset values, random writes, unmapped addresses |
| `tb_wm_waveform_matcher` | end to end at D = 4, N_CMP = 12, stride 3, POS_BUF = 6 |
| `tb_wm_full_size` | end to end at the defaults (D = 32, P = 14, N_CMP = 1400) |
| `tb_wm_aes_subsampled` | end to end at D = 32, N_CMP = 700, stride 4 |
| `tb_wm_template700` | end to end at the defaults with a 700-sample template, the rest don't-care |

The four end-to-end tests share `tb/wm_top_tb_body.svh`. It generates a random
template and a noise stream, plants events in the stream, and recomputes from scratch the score of every
lane for every beat. From those scores it predicts `valid_o`, `trigger_o`, `out_data` and the trigger alignment.
The events are: exact template copies on different lanes, a second copy inside the hold-off,
a near miss scoring exactly the threshold, and a copy while matching is disabled
by a run-time threshold change. A test fails if any of these never happens. The
template data are random: no measured trace is included.

Running a test with plain Verilator, from the directory above `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_wm_full_size \
    -y rtl -y tb +libext+.sv -Irtl -Itb rtl/wm_pkg.sv tb/tb_wm_full_size.sv
./obj_dir/Vtb_wm_full_size
```

The full-size test compiles in about 1.5 minutes and runs in a few seconds. To try another size, copy
`tb_wm_waveform_matcher.sv` and change its localparams. The test body derives
all expected latencies from them.
