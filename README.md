# ASAP-FE: a sparsity-aware, parallel IIR filter-bank front end for keyword spotting

A keyword-spotting system spends most of its front-end time on the filter bank.
For every short frame of audio it runs dozens of band-pass filters and takes the
log energy of each band. To serve many microphones (channels) with one front
end, each one-second clip must be turned into features in a small fraction of
the 32 ms audio period. This design gets there in three ways:

1. **Half-overlapped framing.** Frames are 256 samples (16 ms at 16 kHz) and
   start every 192 samples, instead of every 128. A 16000-sample clip gives
   83 frames instead of 124.
2. **Sparsity-aware strides.** Each frame is looked at before it is filtered:
   - Near-silent frames are skipped.
   - "Quiet and smooth" frames are low-pass filtered, halved in length
     (stride 2) and filtered at half rate.
   - The rest are filtered at full rate (stride 1).

   Half-rate features sit on a different scale from full-rate ones. They are
   corrected afterwards against a full-rate neighbour that was also measured at
   half rate.
3. **A cluster of M identical IIR filter modules.** A priority scheduler feeds
   them one frame task at a time, so frames are filtered in parallel. M sets
   the trade between latency and area/energy; the default is 15.

The RTL is a complete, bus-attached accelerator:
- a host writes the coefficients and a clip;
- starts a pass;
- waits for an interrupt;
- reads back an 83 × 40 map of Q8.8 log2 band energies.

## One pass, end to end

```
 host (AXI4-Lite) ─► SPM raw bank ──► filter 0 (pre-emphasis stream) ──► SPM pre bank
                                          │
                                          └──► stride calculator ──► strides[83]
                                                                        │
                                               filter scheduler ◄───────┘
                                                  │ one task / cycle
                            ┌─────────────────────┼──────────────────────┐
                        filter 0   filter 1  ...  filter M-1     (read SPM via arbiters)
                            └────────── result arbiter ──────────────────┘
                                                  │ band energy
                                            log2 operator ──► SPM feature bank
                                                                        │
                                               stride-2 realignment ◄───┘
 host (APB): coefficients, CTRL.start, STATUS, CYCLES, counters; irq = done
```

The top (`asap_fe`) steps through four phases. `CYCLES` counts all of them.

| Phase | What happens | Time |
|---|---|---|
| PRE | Filter 0 streams the whole raw clip through the pre-emphasis filter (1, −0.97) into the pre-emphasized bank. The stride calculator measures every frame from the same stream. When the last sample is in, it decides all strides at one frame per cycle. | NUM_SAMPLES + NF cycles |
| RUN | The scheduler builds its queue and hands tasks to free filters. Every band energy passes through the log2 operator into the feature bank. | depends on M and the clip |
| ALIGN | Stride-2 features are realigned and skipped frames are zeroed. | NF + NB·(skips) + 4·NB·(stride-2 frames) |
| DONE | `STATUS.done` and `irq` stay high until the next start. | |

## Choosing a stride

The stride calculator works on the pre-emphasized signal. For each frame it computes:

- short-time energy: STE = Σx²
- zero-crossing count: ZCC, the number of sign changes between neighbouring samples
- amplitude spread: A_diff = max − min

Their combination is S = ZCC + ½·A_diff. It is kept exactly as 2S = 2·ZCC + A_diff.

Once all frames are measured, the largest STE and the largest S over the clip
set the thresholds:

| Condition | Stride |
|---|---|
| STE < max STE / 64 | 0: skip; no filtering, features forced to 0 |
| otherwise, S < max S / 2 | 2: low-pass, keep even samples, filter 128 samples |
| otherwise | 1: filter all 256 samples |

Both comparisons are shifts (`TH1_SHIFT = 6`, `TH2_SHIFT = 1`). A sample falls
in at most two frames, so the calculator uses only two sets of accumulators,
chosen by frame parity.

## Tasks, priorities and why calibration exists

A stride-2 frame's energies come from a low-passed, decimated signal and a
different (stride-2) filter set, so their log values are offset from stride-1
values. Correcting them needs a frame that has been measured both ways. The
scheduler therefore builds one queue in three priority levels. Within a level,
frames are in index order.

| Priority | Frames | Tasks queued |
|---|---|---|
| P1 | stride-1 frames with a stride-2 neighbour | `S2CAL(f)`, then `S1(f)`. S2CAL runs frame f the stride-2 way and writes its features into a separate calibration plane. |
| P2 | stride-2 frames | `S2(f)` |
| P3 | remaining stride-1 frames | `S1(f)` |

Example with strides `0 0 0 1 1 2 2 2 1 1 0 0`:

```
S2CAL4 S1 4  S2CAL8 S1 8  S2 5 S2 6 S2 7  S1 3 S1 9
```

Dispatch overlaps with building. While the queue holds a task and some filter
is free, the head task goes to the first free filter at or after a rotating
pointer, one task per cycle. The three passes are appended in priority order,
so the overlap never reorders tasks.

After the cluster drains, the realignment unit walks the frames:

- **Skipped frame:** all bands are written as 0.
- **Stride-2 frame f:** it uses the stride-1 frame that bounds f's stride-2
  run on the left. If there is none, it uses the one on the right. Every band
  becomes `F[f][b] + F1[ref][b] − F2cal[ref][b]`, clamped to 0…65535. A run
  with no stride-1 neighbour at all (fenced in by skips or the clip edge) gets
  +1.0 (+256 in Q8.8) instead.
- **Stride-1 frame:** left untouched.

## The filter module

Each filter module holds one frame in a local 256-word buffer and runs a
4th-order direct-form-I IIR filter:

```
y[n] = Σ_{k=0..4} b_k x[n−k] − Σ_{k=1..4} a_k y[n−k]
```

It processes one sample per clock in a five-stage pipeline:

1. **Load:** read from the buffer, or from the scratchpad during pre-emphasis.
2. **LShift:** `x <<< 8`.
3. **Filtering:** one complete IIR step in a single cycle, so the recursion
   closes inside the stage.
4. **RShift:** `>>> 8`, saturated to 16 bits.
5. **Store:** square and accumulate into the band energy; write back
   (low-pass); or stream out (pre-emphasis).

Number formats: coefficients are Q4.28 (32 bits) and the internal result is
40 bits, saturating. The IIR history is cleared at the start of every band,
so any frame can go to any module and results do not depend on M.

| Task | Work | Cycles (no waiting) |
|---|---|---|
| `S1` | copy 256 pre-emphasized samples, then 40 bands × 256 | 256 · 41 = 10 496 |
| `S2`, `S2CAL` | copy 256 raw samples, low-pass 256 keeping even outputs in place, then 40 bands × 128 | 256 + 256 + 40 · 128 = 5 632 |
| `PRE` | stream the whole clip | NUM_SAMPLES |

A module is free for the next task once its last sample has entered the
pipeline. Band energies leave through a one-entry result register. The
cluster's round-robin result arbiter serves every module within M cycles,
which is much less than the shortest band (128 cycles). An assertion checks
that a result is never overwritten.

**Coefficient sets.** Sets are held in a shared register bank, one read port
per module, and the host writes them. The RTL does not fix the filter design;
the testbenches use squared RBJ biquads with mel-spaced centres between 100 Hz
and 7 kHz and a 3.4 kHz low-pass; a stride-2 centre above 0.45·8 kHz is pulled down to 3.6 kHz.

| Set | Contents |
|---|---|
| 0…39 | stride-1 band-pass filters |
| 40…79 | stride-2 band-pass filters (same bands, designed for 8 kHz) |
| 80 | anti-alias low-pass |
| 81 | pre-emphasis |

## Sharing inside the cluster

The M modules share three things, each behind a round-robin arbiter:

- **The raw-bank read port.** Used by stride-2 loads.
- **The pre-emphasized-bank read port.** Used by stride-1 loads. A read grant
  is held while the owner keeps requesting, so a 256-sample frame load is one
  burst. The others wait, and that waiting is part of the measured latency.
- **The result path** into the single log2 operator.

## Log2 features

`feature = 256·p + LUT[m]` (Q8.8), where:

- p is the position of the energy's leading one;
- m is the next 4 bits;
- `LUT[i] = round(256·log2(1 + i/16))`, that is
  `0 22 44 63 82 100 118 134 150 165 179 193 207 220 232 244`.

Zero energy gives feature 0. The result is registered, one cycle after the
input.

## Host interface

**AXI4-Lite scratchpad port** (18-bit byte address, one beat per access):

- bits [17:16] choose the bank and bits [15:2] the word;
- writes take the low 16 bits, and reads return them sign-extended;
- bank 3 answers DECERR.

| Bank | Contents | Depth |
|---|---|---|
| 0 | raw clip | 16000 |
| 1 | pre-emphasized clip | 16000 |
| 2 | features | 2·83·40. Plane 0 holds the features; plane 1 holds the calibration values. |

Feature address: `plane·NF·NB + frame·NB + band`.

**APB control port:**

| Address | Register |
|---|---|
| 0x00 | CTRL: write bit 0 = start. Ignored while busy. |
| 0x04 | STATUS {done, busy} |
| 0x08 | CYCLES: latency of the last pass |
| 0x0C / 0x10 / 0x14 | number of skip / stride-1 / stride-2 frames |
| 0x18 | tasks queued |
| 0x1C | frames realigned |
| 0x20 | CONFIG {NF, NB, M} |
| 0x2000 + set·64 + k·4 | coefficient k of a set: k = 0…4 are b0…b4, k = 5…8 are a1…a4, in Q4.28 |

## Latency against the number of filters

These are measured in simulation at full size: 40 bands and one 16000-sample
clip. The clip mixes silence, loud and quiet tones, and gives 21 skipped,
46 stride-1 and 16 stride-2 frames, i.e. 74 tasks. Times assume a 50 MHz
clock. Channels = ⌊32 ms / latency⌋.

| M | cycles | latency | channels | published latency |
|---|---|---|---|---|
| 1 | 660 172 | 13.20 ms | 2 | 11.97 ms |
| 2 | 340 648 | 6.81 ms | 4 | 6.21 ms |
| 4 | 184 982 | 3.70 ms | 8 | 3.35 ms |
| 8 | 105 867 | 2.12 ms | 15 | 1.92 ms |
| 15 | 69 000 | 1.38 ms | 23 | 1.25 ms |
| 23 | 54 663 | 1.09 ms | 29 | 0.99 ms |
| 30 | 49 541 | 0.99 ms | 32 | 0.88 ms |

The curve has the published shape and is about 10 % slower at every point. The sweep testbench fails if any point is more than 20 % away from the published value.
Three things explain the gap: the serial pre-emphasis phase (16 000 cycles,
which does not scale with M), the shared read ports, and a clip whose sparsity
differs from real speech. At M = 15 this design therefore serves 23 channels
in real time on this clip, against the 25 reported. The 32-channel point needs
M = 30 here, against 23 reported.

## Where this RTL departs from, or fills in for, the published design

The published description gives:
- the block structure and the frame geometry;
- the stride features, thresholds and codes;
- the priority rules with their example;
- the filter pipeline stages and the 4th-order IIR;
- the log2 feature;
- the filter counts and measured latencies.

The following are this design's own choices:

- **Frame hop.** The hop of 192 samples is taken from the framing figure and
  the 83-frame count. The text only says frames are half-overlapped.
- **Threshold maxima.** The thresholds are relative to the maxima of the
  clip being processed, as published. Skipped frames are included when taking
  the maximum of S; that detail is chosen here.
- **Realignment.** The published design boosts stride-2 energies by a factor
  derived from adjacent stride-1 frames. Here that factor is the ratio of a
  neighbour's stride-1 energy to its own stride-2 energy (the calibration
  task). In the log2 domain it becomes the additive offset F1 − F2cal. The
  reference rule is chosen here: left neighbour first, then right, and +1.0
  (a factor of 2, undoing the halved sample count) when there is none.
- **Widths and arithmetic.** All widths, the fixed-point formats and the floor
  shifts with saturation are chosen here. Energy is the plain sum of squares.
- **Memory, buses and control.** The local frame buffers, the arbitration, the
  task kinds, the bus protocols, the register and address maps, and the
  phase sequencing are chosen here.
- **Pre-emphasis on filter 0.** Pre-emphasis runs on filter 0 as a separate
  first phase.
- **Host system not included.** The host CPU, its memory and interconnect, and
  the design-time search that picks M are not part of the RTL. The top exposes
  the AXI and APB slave ports they would drive.
- **Coefficient values.** The testbench filter bank is an assumption; any
  4th-order sets can be loaded.

## Files

| File | Contents |
|---|---|
| `rtl/asap_fe_pkg.sv` | shared widths, task/result types, coefficient-set numbering |
| `rtl/asap_fe.sv` | top: scratchpad banks, cluster, calculator, scheduler, log2, realignment, bus ports, phase sequencer |
| `rtl/filter_cluster.sv`, `rtl/filter_module.sv`, `rtl/coef_bank.sv`, `rtl/rr_arbiter.sv` | the filter cluster |
| `rtl/stride_calculator.sv`, `rtl/filter_scheduler.sv`, `rtl/stride2_realign.sv`, `rtl/log2_operator.sv` | stride decision, priority queue, realignment, log2 |
| `rtl/spm_bank.sv`, `rtl/axi_spm_port.sv`, `rtl/apb_ctrl.sv` | memory banks and host ports |
| `tb/fe_ref_pkg.sv` | bit-exact reference model: coefficient design, IIR, energy, log2, strides, priority queue, full pass |
| `tb/tb_<block>.sv` | one self-checking test per block |
| `tb/tb_asap_fe.sv` | end-to-end test at reduced size (3 filters, 4 bands, 32-sample frames), two passes; counts every mechanism |
| `tb/tb_asap_fe_full.sv` | one full-size pass at the default parameters |
| `tb/tb_fe_latency_sweep.sv` | seven full-size tops, M = 1 … 30, with the latency table above |

Every testbench:
- compares against values worked out independently of the block, mostly in
  `fe_ref_pkg`;
- ends by printing `TB_RESULT checks=<n> failures=<n>`;
- has a watchdog.

The end-to-end tests read every pre-emphasized sample and every feature back
over AXI and compare them with the reference. They count failures for:
- any mechanism that never occurred: skip, stride 1, stride 2, calibration
  task, realignment left, right or without a reference, read-arbitration wait,
  dispatch stall, result conflict;
- a CYCLES register that differs from the measured latency.

### Simulating

With Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/asap_fe_pkg.sv tb/fe_ref_pkg.sv rtl/spm_bank.sv rtl/rr_arbiter.sv \
  rtl/coef_bank.sv rtl/filter_module.sv rtl/filter_cluster.sv \
  rtl/stride_calculator.sv rtl/filter_scheduler.sv rtl/log2_operator.sv \
  rtl/stride2_realign.sv rtl/axi_spm_port.sv rtl/apb_ctrl.sv rtl/asap_fe.sv \
  tb/tb_asap_fe_full.sv --top-module tb_asap_fe_full -o sim
./obj_dir/sim
```

Any other testbench runs the same way, with its own top module. Block tests
need only the package files and the block's own modules. Run times:

| Testbench | Run time |
|---|---|
| full-size pass | a few seconds |
| latency sweep | about a minute to build and run |

The simulator is two-state, so every register that is read is reset. The
testbenches drive a falling reset edge at time 1.

### Changing the design

- **Number of filters.** `M` on `asap_fe` is the only knob the design is
  meant to scale by; nothing else depends on it.
- **Other parameters.** `NUM_BANDS`, `FRAME_LEN`, `HOP` and `NUM_SAMPLES` are
  parameters too. The frame index is 8 bits, so NF must be at most 255. The
  scratchpad word index is 14 bits, so a bank holds at most 16384 words.
- **Thresholds.** The thresholds are `TH1_SHIFT`/`TH2_SHIFT` on the stride
  calculator.
