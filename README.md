# J-PET controller: real-time timeslot processing on one FPGA

The J-PET scanner is a PET barrel made of plastic scintillator strips, with a
photomultiplier at each end of every strip. Each photomultiplier signal is
digitized at four thresholds by TDCs on TRB readout boards. The boards do no
triggering: every hit is sent, cut into **timeslots** of 20 µs. Eight boards each
send one UDP packet per timeslot over Gigabit Ethernet.

This RTL is the processing chain that receives those eight streams and works out, in
real time and without a CPU in the loop, which timeslots contain a possible
**line of response (LOR)**. A LOR is the pair of back-to-back 511 keV photons from one
positron annihilation. For each candidate LOR the chain computes the 3D point where
the annihilation most likely took place, called the **ROR point**. The result leaves
in one of two forms:

- raw: the original TRB packets;
- list-mode: one compact packet per timeslot, holding only the reconstructed points.

ROR points also leave on a separate stream for a host processor to histogram.

The central idea is to cut each timeslot into 32 **timebins** of 625 ns, so each
question can be asked of all timebins at once:

- Does a timebin hold coincident hits? This is a wide bit-array operation that takes a
  fixed 5 clock cycles per timeslot.
- Where did the annihilation happen? Each timebin has its own small processor, and all
  32 run at the same time.

## Detector segmentation

Each input stream ("decomposition channel") carries one segment of the detector.

| stream | layer | side | strips | array pair |
|---|---|---|---|---|
| 0, 1 | 1 (R = 425 mm, 48 strips) | A, B | 1–48 | segment 0 |
| 2, 3 | 2 (R = 467.5 mm, 48 strips) | A, B | 1–48 | segment 1 |
| 4, 5 | 3 (R = 575 mm, 96 strips) | A, B | 1–48 | segment 2 |
| 6, 7 | 3 | A, B | 49–96 | segment 3 |

A stream holds four TDC endpoints. Each endpoint has 48 hit channels plus reference
channel 0, which makes 192 TDC channels per stream, or 48 strip ends × 4 thresholds.
The channels are mapped as follows:

- TDC channel `n = endpoint*48 + channel − 1`;
- local strip `n/4`;
- threshold `n%4`, where 0 is the lowest threshold.

Only lowest-threshold hits are used by the coincidence and ROR pipelines. All words
still reach the raw output. Strip X/Y come from `rtl/geo_xy.hex`. That file is a
192-entry ROM of `{x[15:0], y[15:0]}` in mm, holding R·cos a and R·sin a:

- layer 1 steps 7.5° from 0°;
- layer 2 steps 7.5° from 3.75°;
- layer 3 steps 3.75° from 1.875°.

## Word formats

Input packet (UDP payload), 32-bit big-endian words:

```
word 0              timeslot number
subevent header     {device_id[15:0], n_words[15:0]}
n_words data words  TDC words of that endpoint
... more subevents up to the last word of the packet
```

Device IDs are `DEV_BASE + stream*16 + endpoint` (default `DEV_BASE = 0x0100`). Any
other ID is removed by the endpoint filter and counted.

TDC words (TRB3 layout):

```
hit    [31]=1  [28:22] channel  [21:12] fine  [11] edge (1 = leading)  [10:0] coarse (5 ns)
epoch  [31:29]=011             [27:0] epoch (coarse counter wraps every 10.24 us)
```

List-mode output packet, sent only for timeslots that produced at least one point:

```
{8'hA5, 8'h00, n_points[15:0]}
timeslot number
per point: {x[15:0], y[15:0]}, {z[15:0], 16'h0}      signed mm
```

## Hit time

`tdc_parser` keeps the last epoch of each endpoint and forms `{epoch, coarse}`. It
measures every hit against the reference channel of the same endpoint, where the TDC
records the start of the timeslot:

```
t_ps = ({ep,coarse} − {ep,coarse}_ref) * 5000 − fine_ps + fine_ps_ref + offset[n]
fine_ps = ((fine − fine_min) * fine_scale) >> 12          (default scale 49113 ≈ 12 ps/bin)
```

A hit whose leading edge falls outside 0 … 20 µs is dropped. The leading edge of a
channel is held until its trailing edge arrives. The hit then leaves with
`t = t_lead` and `width = t_trail − t_lead`. The parser streams one word per cycle
with no back-pressure, so it adds no dead time. The timebin of a hit is `t / 625 ns`,
computed with 31 comparators (`jpet_pkg::timebin_of`).

## Timeslot flow

1. The eight **derandomizing buffers** (`derand_fifo`) do two things:
   - cross from the 125 MHz receiver clock to the 200 MHz core clock, using gray-coded
     pointers;
   - pack bytes into 32-bit words.
2. The **data combiner** waits until every buffer holds data and the ROR side can
   take another timeslot. It then pulses `go` to all channels, so that they parse the
   same timeslot side by side.
3. Each channel runs its words through this chain:
   - the **TRB parser**, which also copies each word into the **raw data buffer**;
   - the **endpoint filter**;
   - the **TDC parser**;
   - the **geometry mapper**.
4. The combiner registers the eight hit outputs onto one eight-lane bus. When every
   channel has ended its packet, the combiner raises `ts_end`.
   - If the channels reported different timeslot numbers, `mismatch_count` counts it.
5. The bus feeds both pipelines at once.

## Coincidence search (`coinc_search`)

Each stream has a 32 × 48 bit array (timebin × strip). A lowest-threshold hit sets
bit `[timebin][local strip]` as it passes. After `ts_end` the search takes exactly
five edges:

| cycle | work |
|---|---|
| 1 | Copy the arrays and clear them. The next timeslot can fill them at once. |
| 2 | AND side A with side B for each segment. This gives every single-strip coincidence: 4 × 32 × 48 AND gates. |
| 3 | For each timebin, test whether two or more strips fired across the four segments (`v & (v−1) ≠ 0`). |
| 4 | Build the result: LOR flag, 32-bit timebin mask, strip coincidence arrays. |
| 5 | Register the output. |

`res_valid` is raised for every timeslot, including ones with no candidate. At
200 MHz the five edges take 25 ns.

## ROR pipeline

**Dispatcher** (`ror_dispatcher`):

- While the timeslot streams past, every lowest-threshold hit is also written into
  one of eight hit buffers (one per stream, 256 entries each).
- An end marker is then written to each buffer.
- Once the coincidence result is queued and all processors are idle, the buffers are
  read one after another:
  - a hit whose timebin bit is set in the mask goes to the processor of that timebin;
  - every other hit is noise and is counted.
- After the last marker, `flush` starts all 32 processors.

**Processor** (`ror_processor`, one per timebin, up to 16 hits) works in three steps:

1. **Side pairing.** Each side-A hit is matched to the first side-B hit on the same
   layer and strip. Together they form a strip hit:
   - `t = (tA+tB)/2`;
   - `z = (tB−tA)·v/2`, with v = 126 mm/ns. Side A lies at +z. In fixed point this is
     `(tB−tA)·129 >>> 11`.
2. **Strip pairing.** Each strip hit is paired with each later one on another strip,
   if their times differ by less than 10 ns. The point lies on the segment between
   the two strip hits Pi and Pj. It is moved away from the middle, towards the strip
   that fired first, by the time-of-flight distance:
   ```
   d = Pi − Pj,   L = |d|   (12-step bit-serial square root)
   s = c·(tj − ti)/2         ((tj−ti)·307 >>> 11, mm)
   q = s / L                 (11-step bit-serial division, Q12, clamped to ±1/2)
   point = (Pi + Pj)/2 + d·q
   ```
   Each pair takes about 30 cycles. A 16-hit timebin finishes well inside the 4000
   cycles of one timeslot.
3. **Output.** Points go into a 16-entry output FIFO. When it is full, the processor
   waits, so no point is lost.

**Packagers** (`ror_packager` × 4) each own eight processor FIFOs and visit them
round-robin, one per cycle.

**List-mode builder** (`listmode_builder`) does three things:

- gathers the points of the timeslot, up to 512;
- also streams each point out on `ror_valid` / `ror_point`;
- writes the packet when the dispatcher reports the timeslot finished (`ts_done`).
  That report comes only after every processor and packager has drained.

## Output select and registers

`output_select` sends whole packets, one at a time, with valid/ready handshaking. The
mode is sampled only between packets.

| mode | what is sent | what is discarded | `out_src` |
|---|---|---|---|
| raw | raw packets, round-robin over the eight raw buffers | list-mode packets | 0–7 |
| list-mode | list-mode packets | raw buffers | 8 |

Control writes use `cfg = {we, addr[15:0], data[31:0]}`:

| address | register |
|---|---|
| `0x0000` | mode: 0 raw, 1 list-mode |
| `0x1000 + ch*0x200 + n` (n < 192) | time offset of TDC channel n, ps, signed |
| `0x1000 + ch*0x200 + 0x100` | fine_min |
| `0x1000 + ch*0x200 + 0x101` | fine_scale (Q12 ps per fine bin) |

## Module list

| module | role |
|---|---|
| `jpet_pkg` | constants, `hit_t`, `ror_point_t`, `cfg_wr_t`, `timebin_of` |
| `jpet_top` | whole chain |
| `decomp_channel` | one input stream: `derand_fifo`, `raw_data_buffer`, `trb_parser`, `endpoint_filter`, `tdc_parser`, `geo_mapper` |
| `data_combiner` | start and end of a timeslot, eight-lane bus |
| `coinc_search` | 5-cycle coincidence search |
| `ror_dispatcher`, `ror_processor`, `ror_packager`, `listmode_builder` | ROR pipeline |
| `output_select` | raw or list-mode output |
| `sync_fifo` | first-word-fall-through FIFO helper |

Outside the RTL, with their signals on the top's ports:

- the Ethernet/UDP receivers;
- the host processor and its memory path;
- the optical transceivers;
- the TRB boards. The end-to-end testbench contains a behavioural packet generator
  for them.

## Simulation

Run from the project root. `geo_mapper` loads `rtl/geo_xy.hex` by that relative path.

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/jpet_pkg.sv tb/tb_jpet_top.sv --top-module tb_jpet_top
./obj_dir/Vtb_jpet_top
```

Every block has a self-checking testbench, `tb/tb_<module>.sv`, which ends with a line
`TB_RESULT checks=N failures=M`. `tb_jpet_top` runs the top at its default sizes:

- A behavioural model of the eight boards builds every packet with reference hits,
  epoch words, both edges of all hits and a subevent from a foreign device.
- Each timeslot holds either one annihilation or only side-A noise. An annihilation
  fires both sides of two strips on different layers, at all four thresholds.
- Streams start at random offsets. The output is throttled at random.
- The test switches the output from list-mode to raw.
- It checks every ROR point against a real-valued evaluation of the formulas above,
  within 4 mm. It checks list-mode headers and contents, and raw packets word for word.
- It counts each mechanism and fails if one never happened:
  - LOR timeslots and empty timeslots;
  - list-mode and raw packets;
  - an epoch wrap inside a timeslot;
  - rejected foreign words;
  - noise hits;
  - output stalls.

Decomposition channels are tested through `tb_jpet_top`.

## Departures from the paper and limits

- **Word and packet layouts.** The TRB3 word format, the packet layout and the
  list-mode layout are this design's. The source names the fields but not their
  positions.
- **Calibration.** Fine-time calibration is linear per channel (`fine_min`,
  `fine_scale`), not a per-bin table for differential non-linearity. Channel offsets
  are implemented.
- **Thresholds.** Only the lowest threshold takes part in the search and the ROR
  computation.
- **"Two or more strips".** This is counted over all four segments of a timebin.
- **ROR formulas.** The z and time-of-flight formulas, their constants (v = 126 mm/ns,
  c/2) and the integer-mm, Q11/Q12 fixed point are this design's. The source says only
  that timing along the strip and time of flight between strips are used.
  - A pair farther apart than 10 ns is not paired.
  - A point is never placed beyond either strip.
- **Sizes.** These buffer sizes are chosen, not given:
  - 256-entry hit buffers;
  - 16 hits and 8 strip hits per timebin processor;
  - 16-entry output FIFOs;
  - 512 points per packet;
  - 2048-byte derandomizing buffers;
  - 4096-word raw buffers.

  Overflows are counted, not signalled upstream. There is one exception: the combiner
  does not start a timeslot while the hit buffers are more than half full.
- **Dispatcher serialization.** The dispatcher reads the eight hit buffers one after
  another. It starts the next timeslot only when every processor is idle. The timeslot
  after a busy one therefore waits in the derandomizing buffers.
- **Point stream.** ROR points are streamed on `ror_valid` / `ror_point`. The source
  sends them to shared host memory through a vendor bridge, which is not modelled.
- **Reference hits.** A timeslot without a reference-channel hit on an endpoint yields
  no hits from that endpoint.
