# A neural z-vertex trigger board for Belle II, in SystemVerilog

At the SuperKEKB collider most tracks seen by the Belle II drift chamber (CDC)
do not come from the electron–positron interaction point. They come from beam
background, mostly Touschek scattering, and start somewhere along the beam
pipe. The first-level (L1) trigger has only 2D information from the CDC: the
transverse momentum pT and azimuth φ of a track. It cannot tell where along the
beam (z) the track started. A z estimate made within the L1 latency budget
would let the trigger reject background tracks whose vertex is far from the
interaction point.

The design here estimates z with small neural networks (multi-layer
perceptrons, MLPs). Each MLP is an "expert" for one narrow sector of track
phase space. Its inputs are the drift times, and optionally the ids, of a few
"relevant" track segments (TS) chosen for that sector. Because the right
sector is not known in advance, the board runs a **prediction chain**:

1. From the 2D track it picks a step-0 sector covering the whole θ range and
   z ∈ [−50, 50] cm. It predicts z and θ with that sector's MLPs.
2. That prediction picks one of 7 overlapping θ sectors with
   z ∈ [−15, 15] cm. It predicts again.
3. That prediction picks one of 13 overlapping θ sectors with
   z ∈ [−8, 8] cm. It predicts the final z and θ.

After the last step, the output bit `z_trig` says whether |z| ≤ 6 cm.
If a step predicts a z outside the next step's z range, the track is
rejected at once. No later MLP is then run for it.

The RTL is one trigger board. The board's logic is written in SystemVerilog,
from the TS hit inputs to the z output. The parts around it (serial
transceivers, DDR3 memory and controller, 2D fitter, and the other trigger
subsystems) arrive and leave as plain ports.

## Block structure

```
TS hits ──> ts_hit_store ──(drift times of the sector's relevant TS)──┬─> topo_formatter ─> mlp (20-60-2)
                 ^                                                   └─> sl_formatter   ─> mlp (18-60-2)
                 | rel_id                                                                     |      |
external memory <─> weight_loader ──(TS list, weights of both MLPs)─────────────────────────+------+
                                                                                              v
2D tracks ──> track_fifo ──> chain_ctrl [sector_select, pred_combine] ──> result (z, θ, z_trig)
```

| module | role |
|---|---|
| `nt_pkg` | widths, number formats, the sector tables and the record layout |
| `ts_hit_store` | one entry per TS (2336): valid flag and fastest drift time of the event; 5 write ports, 20 combinational read ports |
| `track_fifo` | queue of 2D tracks; the chain takes them one at a time |
| `sector_select` | maps (step, 2D track, previous prediction) to a sector record, or rejects |
| `weight_loader` | reads the sector's record from memory; hands out the TS list and writes the weight words into both MLPs |
| `topo_formatter` | "topological" inputs: one per relevant TS, its drift time scaled to [−1, 1] |
| `sl_formatter` | two inputs per superlayer (SL): drift time and TS id of the fastest relevant hit |
| `mlp` | fully parallel 3-layer MLP with bias nodes; weights in registers |
| `tanh_lut` | the activation function, a 1024-entry table |
| `pred_combine` | averages the two MLPs' outputs and scales them to the sector |
| `chain_ctrl` | state machine that runs the three steps and makes the z-cut decision |
| `neurotrigger_top` | the board |

## Sectors and how they are numbered

The step-0 sectors are 2D bins: 1° in φ and 0.1 GeV⁻¹ in 1/pT, with 20 bins
(so pT > 0.5 GeV). A board covers 180° of φ, starting at the `PHI0`
parameter, which gives 3600 step-0 sectors. A track outside the board's φ
range or the 1/pT range is rejected in step 0, and so is a φ code of
360° or more. In the full system it belongs
to a neighbouring board, whose 180° ranges overlap this one's.

Steps 1 and 2 split θ ∈ [35°, 123°] (centre 79°) into overlapping sectors.

| step | θ sector width | centre spacing | number of sectors | z range |
|---|---|---|---|---|
| 0 | 88° | – | 1 | ±50 cm |
| 1 | 30.5° | 15.25° | 7 | ±15 cm |
| 2 | 17.0° | 8.5° | 13 | ±8 cm |

The overlap is made by spacing the centres half a sector width apart. The
result is two interleaved binnings, displaced by half a bin. A track goes to
the sector whose centre is nearest its predicted θ. A tie goes to the higher
centre. A θ beyond the outermost centre selects the outermost sector.

Each step-0 bin has its own 1 + 7 + 13 records. The records of a step are
stored one after another:

```
index = SEC_OFF[step] + s2d * N_THETA[step] + (k + (N_THETA[step]-1)/2)
        SEC_OFF = {0, 3600, 3600*8},  s2d = phi_bin * 20 + invpt_bin,  k = signed theta bin
```

This gives 75600 records in total.

## Number formats

| quantity | format |
|---|---|
| MLP inputs, weights, outputs | signed 16 bit, 12 fraction bits (1.0 = 4096) |
| drift time, event time | unsigned 8 bit; 255 is the maximal drift time |
| TS id | 12 bit, 1..2336, numbered SL by SL from the inside out; 0 = unused slot |
| z | signed 16 bit in 1/16 cm |
| θ, φ | 1/16 degree (θ signed 16 bit, φ unsigned 13 bit) |
| 1/pT | unsigned 11 bit in 1/640 GeV⁻¹ (64 LSB per 0.1 GeV⁻¹ bin) |

The SL sizes are 160, 160, 192, 224, 256, 288, 320, 352 and 384 TS, 2336 in
total.

**Input scaling.**
- The drift time is first corrected by the event time: t = max(drift − event_time, 0).
  The raw TS drift times carry a random offset.
- The scaled drift time is x = (2t − 255)·16, about (2t/255 − 1) in Q.12.
- A relevant TS without a hit, or an SL without a relevant hit, gets t = 255.
  Such a track is treated as far from the wire.
- The TS id input of SL s is local·⌊8192·1024/(n_s − 1) + ½⌋ ≫ 10 − 4096.
  Here local = 0 … n_s − 1 is the position inside the SL, so the id input runs
  from −1 to +1 across the SL like an azimuth. Its default is 0.
- Where several relevant TS of one SL have hits, the fastest corrected time is
  used. A tie goes to the earlier list slot.
- In `ts_hit_store`, a TS hit twice in one event keeps its smaller raw drift time.

**MLP arithmetic.**
- Each neuron's sum is exact: 16 × 16-bit products with a wide accumulator.
  The sum is shifted right by 12 (rounding towards −∞).
- It is then clamped to [−4, 4) and looked up in the tanh table.
- The table has 1024 entries of 1/128 each. Entry e holds tanh at the centre of
  its interval, rounded to Q.12. It is computed by an `initial` block with
  `$tanh`, so no data file is needed.

**Combining.**
- The z and θ outputs of the two MLPs are averaged: (a + b) ≫ 1.
- z = avg_z · z_half ≫ 12.
- θ = θ_centre + (avg_θ · θ_half ≫ 12).

## The parameter memory and its record

Every sector record is a block of 85 words of 512 bits. Each word holds 32
values of 16 bits, value k in bits [16k+15:16k].

| words | contents |
|---|---|
| 0 | the 20 relevant TS ids (slots 20..31 unused) |
| 1..44 | topological MLP, 20-60-2: 1382 weights |
| 45..84 | TS-id MLP, 18-60-2: 1262 weights |

Inside each MLP the weights are ordered as follows:
- Hidden neuron j: its bias at j·(NIN+1), then its NIN input weights.
- Output k: its bias at NHID·(NIN+1) + k·(NHID+1), then its NHID hidden weights.

A record starts at word `MEM_BASE + index*85`. The word address is 27 bits
wide, which covers 8 GB in 64-byte words. All 75600 records take 411 MB.

The memory port is a single burst read:
- `mem_req_valid/ready` carry `mem_req_addr` and `mem_req_len` (= 85).
- The words come back on `mem_rd_valid/mem_rd_data`, in order.
- Gaps are allowed between words.

This port is where a DDR3 controller would attach. A 64-bit DDR3-1600
interface delivers about one 512-bit word per 5 ns.

## Timing

Call D the number of clocks from the loader's start to its `done`. For a
memory that gives its first word LAT clocks after accepting the request, and
then one word per clock, D = LAT + 85 + 2.

A step takes D + 10 clocks: the sector select, the load, one clock for the
formatters to see the new TS list, the 5-clock MLP, the combination, and the
hand-over to the next step.

A track that passes all three steps gives its result **3·D + 32 =
3·(LAT + 85) + 38** clocks after leaving the queue. With LAT = 20 that is
353 clocks, 1.77 µs at 200 MHz. A track rejected in step s reports one clock
after that step's sector select.

The MLP is fully parallel: every weight other than a bias has its own multiplier. Its latency is
5 clocks whatever its size:
1. input register;
2. hidden sums;
3. hidden tanh;
4. output sums;
5. output tanh.

Most of a step's time goes into loading the record (85 words). The chain
handles one track at a time. There is no overlap between the loading of one
step and the computation of another.

## Board interface and event protocol

| port | meaning |
|---|---|
| `event_start`, `event_time[7:0]` | start of an event: empties the hit store and latches the event time |
| `ts_valid[NWR]`, `ts_hit[NWR]` | TS hits (id, drift time), NWR = 5 per clock: four stereo TSF links and the axial TS |
| `track_valid/ready`, `track` | 2D tracks (φ, 1/pT) into the queue (8 deep) |
| `mem_*` | parameter memory, as above |
| `res_valid`, `result` | one result per track: `rejected`, `last_step`, `z_trig`, `z`, `theta` |
| `busy` | tracks are queued or in the chain |

Events are handled as follows:
- Hits may arrive in the same clock as `event_start`, or after it.
- Tracks of the event may come at any time after its hits.
- The hit store holds one event. The next `event_start` must wait until
  `busy` is low, so events do not overlap on one board.
- Results come in track order.

## How this departs from the source description, and what is assumed

Taken from the description of the trigger:
- the three-layer tanh MLP with bias nodes;
- the 20-60-1 network size used for the latency estimate (the `mlp` defaults);
- the two input schemes (topological, and two inputs per SL) and their default values;
- the fastest-hit rule;
- averaging the two MLPs;
- scaling to the sector interval;
- the three-step chain with 7 and 13 overlapping θ sectors and z ranges 50/15/8 cm;
- the 6 cm z cut;
- 2336 TS in 9 SL;
- 180° per board;
- an 8 GB parameter memory.

Choices of this design, where the description is silent:
- all number formats and the tanh table;
- the SL sizes;
- the 1°/0.1 GeV⁻¹ step-0 binning and its 20 1/pT bins;
- the θ centre of 79°;
- the record layout and the memory port;
- the event-time correction and its clamp at 0;
- the per-TS hit store and its 5 write ports;
- the track queue;
- the controller FSM and the event protocol;
- the clock (200 MHz assumed for the times above).

Known differences:
- **Latency per step.** The source estimates under 400 ns per processing
  cycle for one 20-60-1 network (136 ns MLP, 223 ns parameter transfer). A
  step here loads two MLPs with two outputs each, 2644 weights. That is about
  twice the transfer, 585 ns per step at 200 MHz. The MLP itself is faster
  (5 clocks) because it is fully parallel. The source also says that latency
  grows linearly with the number of nodes. That sentence does not fit a fully
  parallel design and was not followed.
- **Event overlap.** The L1 trigger must accept events 200 ns apart. One board
  as built holds one event and processes its tracks serially (about 1.8 µs
  each). Overlapping events would need a second hit store or a second chain;
  the source does not say how.
- **Number of MLPs.** The source extrapolates to about 10⁶ MLPs. The built
  numbering has 75600 records, 151200 MLPs. A finer binning would need wider
  record numbers (`SEC_W`) and the corresponding `sector_select` rule.
- **Trained weights.** No trained weights exist here. The testbenches fill
  the memory with pseudo-random weights. The design's arithmetic is checked
  exactly; its physics resolution is not.

## Simulating

Everything simulates with plain verilator 5 (two-state, `--timing` for the
testbenches' delays). For a unit testbench:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/nt_pkg.sv rtl/<module and its submodules>.sv \
    tb/nt_ref_pkg.sv tb/tb_<module>.sv --top-module tb_<module>
./obj_dir/Vtb_<module>
```

The whole board is tested like this:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/*.sv tb/nt_ref_pkg.sv tb/ddr_model.sv tb/tb_neurotrigger_top.sv \
    --top-module tb_neurotrigger_top
```

Each testbench prints `TB_RESULT checks=<n> failures=<m>` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_ts_hit_store` | random writes on all ports against a model; fastest kept; clear together with writes |
| `tb_track_fifo` | random valid/ready against a queue model; full and empty |
| `tb_sector_select` | all steps against an independent nearest-centre model; the 80° example (step 1: 63.75°–94.25°, step 2: 70.5°–87.5°); rejections |
| `tb_topo_formatter`, `tb_sl_formatter` | random hits, missing hits, multiple hits per SL, hits before the event time |
| `tb_tanh_lut` | every input region against `$tanh`; saturation; 1-clock latency |
| `tb_mlp` | 20-60-1 and 18-60-2 against a reference MLP; back-to-back starts; 5-clock latency |
| `tb_weight_loader` | record layout, address, burst with gaps, beat routing |
| `tb_pred_combine` | averaging and scaling against a model |
| `tb_chain_ctrl` | the chain with model MLPs and loader; early rejection; latency 3·D + 32 |
| `tb_neurotrigger_top` | the full board at its default parameters |

`tb_neurotrigger_top` runs 30 events with about 40 % of all TS hit and 1–11
tracks each, against the reference model in `tb/nt_ref_pkg.sv`. That model
computes the whole chain independently of the RTL, from the same hits and
memory image. `tb/ddr_model.sv` is a behavioural burst memory with latency
and gaps. It generates every record from a hash of its address.

The testbench checks:
- every result bit by bit;
- the 3·(LAT + 85) + 38 latency of every full-chain track.

It fails if any of the following never happened:
- rejection in step 0, 1 and 2;
- a final z inside and outside the cut;
- a relevant TS without a hit;
- an SL with several hits;
- a hit before the event time;
- the outermost θ sector being selected;
- a TS hit twice;
- a full track queue.

It finishes in seconds.

## Changing it

- The sizes live in `nt_pkg`:
  - `N_REL`, `N_HID`, the SL sizes, and the θ and z tables;
  - `MEM_W`, from which the record layout follows.
- The reference model in `tb/nt_ref_pkg.sv` repeats the tables on purpose. A
  change there must be made in both places.
- `mlp` takes `NIN`, `NHID` and `NOUT` as parameters. Its default is the
  20-60-1 network; the board uses 20-60-2 and 18-60-2.
- The number of MLP multipliers grows as NIN·NHID + NHID·NOUT.
