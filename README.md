# PRM track-reconstruction unit in SystemVerilog

This design reconstructs charged-particle tracks for a hardware trigger. Each event is a set of
clusters: hits on the eight detector layers, one pixel layer followed by seven strip layers.
The unit works in three stages:

- Each cluster is reduced to a coarse position, its super-strip ID (SSID). Associative-memory
  (AM) chips compare the SSIDs with a bank of stored patterns, each pattern being one SSID per
  layer. Every pattern that fires is a *road*.
- For each road, the FPGA fetches the road's pattern record from high-bandwidth memory (HBM).
  It then collects the real clusters behind the road's eight SSIDs.
- Every combination of one cluster per layer is fitted with a linearised track fit. The
  constants of the fit are looked up per detector *sector*, also in HBM.

The fit is a matrix product. The chi2 of a candidate is

    chi2 = sum_i ( sum_j S_ij x_j + h_i )^2        i = 1..4, j = 1..9

with x the nine coordinates (two from the pixel layer, one from each strip layer). A candidate
that passes a chi2 cut gets five track parameters:

    p_i = sum_j C_ij x_j + q_i                      i = 1..5 (eta, phi, pT, d0, z0)

The RTL is one processing unit of a Pattern Recognition Mezzanine (PRM) FPGA. Such a unit serves
one group of five AM chips. It is built in the stand-alone form used to test that firmware
without AM chips and without the host board:

- Five small AM emulators stand in for the chips.
- A Data Generator loads the memories, injects events and checks the fitted tracks against
  expected values.
- An IPbus register slave, reached over Ethernet in the real system, controls all of this.

The top module is `prm_top`.

## Event flow

```
 IPbus ──► ipbus_regs ──► data_generator ──(SSID words)──► asic_emu_group ──roads──┐
   │                        │  ▲                             5 emulators,          │
   │                        │  │ tracks                      3 daisy chains        ▼
   │                        │  └─────────── track_fitter ◄── data_organiser ◄──────┘
   │                        │ (clusters per layer) ▲   │        │     ▲
   │                        └──────────────────────┼───┼────────┘     │ pattern records
   │                                                │   │ constants    │
   └──► ipbus_to_apb ──► HBM controller (APB)       │   ▼              │
                                               hbm2tf (6 PC)     hbm2do (2 PC)
```

(PC = HBM pseudo-channel.)

One event goes through the unit as follows:

1. The Data Generator sends `CMD_INIT` to the emulators.
2. It sends every cluster twice:
   - as `{layer, SSID}` to the emulators;
   - as `{SSID, cluster}` to the Data Organiser queue of that layer.
3. Optionally, it adds one random fake cluster per layer.
4. It sends an end-of-event word to all eight layers, then `CMD_END` to the emulators.
5. The emulators report the matched roadIDs.
6. The Data Organiser fetches each road's pattern record through `hbm2do` and attaches the
   stored clusters.
7. The Track Fitter fits every combination. It fetches the sector's chi2 constants, and for the
   survivors the parameter constants, through `hbm2tf`.
8. The tracks return to the Data Generator's comparator.

All blocks use valid/ready handshakes, so any stage may stall any other.

## Pattern matching: `asic_emulator`, `asic_emu_group`

Each emulator holds 16 patterns, written at run time through a configuration port. Every SSID
data word is compared, in one cycle, against the SSID of its layer in all 16 patterns and sets a
per-pattern, per-layer match flag. `CMD_END` freezes the patterns whose eight flags are all set.
Their roadIDs are read out one per cycle, then an end-of-event word follows.

- **RoadID numbering.** A roadID is `emulator*16 + slot`.
- **Chains.** The five emulators form three daisy chains: 1→0, 3→2 and 4. Inside each emulator,
  a `road_merge` arbiter merges its own roads with those coming up the chain.
- **Final merge.** A last `road_merge` combines the three chain heads.
- **End of event.** `road_merge` forwards one end-of-event word only once every input has
  delivered its own, so roads of two events never mix.
- **Input blocking.** An emulator refuses new input words from `CMD_END` until its readout is
  done.
- **Match rule.** Only full 8-of-8 matches are reported. Real AM chips can also accept a
  majority of layers; that option is not modelled.

## Finding a road's clusters: `data_organiser`

This is the least obvious block. Its job is a content-addressed lookup: given the SSID of a road
on a layer, return the clusters that arrived under that SSID in the current event. This has to
happen at road rate and with no per-event clearing.

Each layer has three memories:

| Memory | Indexed by | Holds |
|---|---|---|
| Cluster List Memory (CLM, 2048 entries) | arrival order | `{SSID, cluster}` |
| Cluster List Pointer (2^16 entries) | SSID | CLM address of the first cluster of that SSID |
| Cluster Counter (2^16 entries) | SSID | number of clusters of that SSID |

**Write phase.** Clusters of one SSID must arrive as one uninterrupted run; the Data Generator
and `ssid_encoder` guarantee this. The first cluster of a run writes the pointer. Every cluster
of the run writes the running count.

**Why nothing is cleared.** The pointer and counter memories are never cleared between events.
The CLM entry stores its SSID, so a lookup trusts a pointer only if both hold:

- the pointer is below this event's CLM write pointer;
- the CLM entry there carries the same SSID.

A pointer left over from an older event cannot pass this test. If the SSID occurred in this
event, its run rewrote the pointer. If it did not, no CLM entry of this event carries it.

**Read phase.** The phase begins once all eight layers have seen their end-of-event.

1. Each roadID from the emulators is sent to `hbm2do` with an 8-bit requestID. The roadID is
   remembered under that requestID.
2. For each returned record (sectorID and eight SSIDs), the lookup reads the pointer and count
   of all eight layers in parallel.
3. It then reads up to `MAXCL = 4` clusters per layer, one per cycle.
4. The road is handed to the Track Fitter. With one cluster per layer this takes 4 cycles per
   road.
5. When the road stream's end-of-event has been seen and every request has been answered, the
   write pointers reset.

Clusters of the next event wait meanwhile in 64-deep per-layer queues. This is how input of event
n+1 overlaps the read-out of event n. Records may return out of order, because two HBM
pseudo-channels serve them; the requestID sorts this out.

## Pattern and constant memory: `hbm2do`, `hbm2tf`

The HBM is outside the RTL. Each pseudo-channel is seen as an AXI read port: one 32-byte beat
per read, in order per channel, with AXI IDs. Reads of 32 bytes match the HBM's burst length 4
on a 64-bit pseudo-channel.

**Address map:**

| Data | Address | Size |
|---|---|---|
| pattern record of road r | `r*32` | 18 bytes used: 8×16-bit SSID + 16-bit sectorID |
| chi2 set of sector s (S, h: 40 words) | `0x800_0000 + s*512` | 5 chunks |
| parameter set of sector s (C, q: 50 words) | `0x800_0000 + s*512 + 256` | 7 chunks |

Words are 32 bits. A set is laid out as the matrix row by row (`i*9 + j`) followed by the offset
vector. Chunk k holds words `8k .. 8k+7`, low word in the low bits.

**`hbm2do`** (2 pseudo-channels) handles one read per road:

- A request FIFO feeds Road2AXI, which forms the address.
- The request scheduler assigns a free AXI ID and records the requestID under it. It issues to
  the pseudo-channels round-robin.
- The data scheduler merges the returns and maps the ID back to the requestID.

**`hbm2tf`** (6 pseudo-channels) handles one *set* per request:

- A request carries a sectorID, the set kind and a requester tag.
- The scheduler sends each request whole to one pseudo-channel that is not busy.
- That channel's Sector2AXI issues the 5 or 7 consecutive reads.
- A Last Chunk counter marks the final chunk, since reads return in order per channel.
- Chunks leave as `{tag, index, last, data}`. The Track Fitter can write each chunk straight
  into the buffer of the requester that asked.

## The linearised fit: `track_fitter`, `chi_square_unit`, `parameter_calculator`

**Track Distributor.** It takes one road at a time and steps an odometer over the per-layer
cluster indices, layer 0 fastest. It produces one candidate per cycle and hands each to one of
four lanes, round-robin among lanes with room. A road with an empty layer yields nothing;
tracks with a missing layer are not fitted.

**Lanes.** Each lane has a 4-deep candidate FIFO and works on one candidate at a time:

1. It requests the chi2 set of the candidate's sector.
2. It waits for the last chunk.
3. It issues the candidate to its `chi_square_unit`.

The unit is fully pipelined:

- Stage 1 forms all 36 products.
- Stage 2 forms the four sums plus h.
- Stage 3 squares them.
- Stage 4 adds the squares.

Latency is 4 cycles. Candidates with `chi2 <= thresh` wait in a small pass FIFO together with
their chi2.

**Parameter stage.** It merges the pass FIFOs round-robin. For each survivor it requests the
parameter set, then runs `parameter_calculator`:

- Stage 1 forms the 45 products.
- Stage 2 forms the sums plus q.
- Stage 3 scales to 16 bits with saturation.

Latency is 3 cycles. Parameter constants are fetched only for tracks that passed the cut.

**Track output.** `{roadID, 5 parameters, 16-bit chi2, 8 clusters}`.

**Number formats.** The original firmware uses single-precision floating point. This RTL uses
fixed point:

| Quantity | Format |
|---|---|
| coordinates `x_j` | signed 16-bit integers (pixel layer: x then y) |
| constants | signed 32-bit Q16.16 |
| inner sums | exact |
| chi2 | Q16.16 in 64 bits, saturating; the cut `thresh` has the same format |
| chi2 in the track word | integer part, saturated to 16 bits |
| parameters | `floor((q_i + sum C_ij x_j) / 2^12)`: 4 fraction bits, saturated to signed 16 bits |

## Test source and checker: `data_generator`, `ssid_encoder`

The Data Generator holds three RAMs of 32-bit words (1024 words each), written over IPbus.

**Constants RAM.** Groups of 9 words: a chunk address (byte address / 32), then 8 data words.

**Input RAM.** One entry per cluster, then one word per event end:

- Cluster header: bits `[30:28]` layer, `[15:0]` SSID.
- The next word is the cluster, `{y, x}`.
- A header with bit 31 set ends the event.

**Extended Input RAM.**

- From word 0: patterns of 10 words (roadID, sectorID, SSID of layers 0..7).
- From word 512: expected tracks of 4 words (`roadID`, `{chi2, p0}`, `{p1, p2}`, `{p3, p4}`).

**Commands.**

- `start_init` writes every constant chunk to the HBM (`hbm_wsel = 1`). Then, for each pattern,
  it writes the pattern's SSIDs into the emulators and its record to the HBM (`hbm_wsel = 0`).
- `start_inject` plays `n_events` events in the order given under Event flow.
  - Fake clusters use a 16-bit LFSR, with SSID MSB set so they never match a stored pattern.
  - Consecutive events are separated by `gap` idle cycles.

**Comparator.** It looks up each incoming track, by roadID, in the expected list and counts
match, mismatch (road listed, values differ) or unexpected (road not listed).

**Encoder mode.** The alternative mode, `USE_ENCODER = 1` (an elaboration parameter), ignores
the RAM's SSIDs. Clusters go through `ssid_encoder` instead:

- SSID = coordinate / super-strip size. Strips use 40; the pixel layer uses 33 × 402 and gives
  `{x/33, y/402}` in 8+8 bits.
- Each layer sorts its event by SSID with a 32-entry selection sort, ties in arrival order.
  This produces the contiguous runs the Data Organiser needs.

## Control and monitoring: `ipbus_regs`, `ipbus_to_apb`, `axi_latency_hist`, `avst_axis_converter`

The IPbus bus (strobe, write, word address, data, ack/err) is split by address:

| Words | Destination |
|---|---|
| `0x000-0xFFF` | the registers |
| `0x1000-0x1FFF` | the IPbus-to-APB bridge |
| `0x2000-0x201F` | the HBM read-latency histograms |

All three answer with a one-cycle ack.

**Registers:**

| Address | Register |
|---|---|
| 0x00 | control: bit 0 `start_init`, bit 1 `start_inject` (pulses), bit 2 fake clusters |
| 0x01 | status: bit 0 busy |
| 0x02-0x06 | constant chunks, patterns, expected tracks, events, gap |
| 0x07/0x08 | chi2 cut, low and high word |
| 0x09 | RAM select `[17:16]` and address `[15:0]` |
| 0x0A | RAM data, auto-incrementing |
| 0x10.. | counters: match, mismatch, unexpected, injected events, Data Organiser events, dropped clusters, fit candidates, fits passing the cut, lane-cycles spent waiting for constants |

**APB bridge.** It runs the APB SETUP/ACCESS sequence with wait states. The IPbus word address,
times 4, becomes the APB byte address.

**Read-latency histograms.** `axi_latency_hist` watches the AXI handshakes of a group of
pseudo-channels. It never stalls them.

- When a read address is accepted, the current cycle count goes into a per-channel ring of 16
  time stamps.
- When a data beat is accepted, the ring's oldest stamp is taken out. Returns are in order per
  channel, so that stamp belongs to this beat.
- The difference selects a bin, 4 cycles wide. There are 16 bins, and the last one holds
  everything from 60 cycles up.

Words `0x2000+bin` hold the two `hbm2do` channels and `0x2010+bin` the six `hbm2tf` channels. A
write anywhere in the window clears both histograms.

**Stream converter.** It joins the Ethernet MAC's Avalon-ST stream to the IPbus core's
AXI-Stream in both directions. It reverses the byte order and converts `empty` to and from
`tkeep`.

## Timing measured in simulation

The HBM model has 20-cycle read latency and a refresh of 88 cycles every 975 cycles.

- The latency is deliberately short. Most reads of the real HBM take 250-300 ns, about 60-75
  cycles.
- Longer latency does not change the results, only the time constant reads wait. With a
  64-cycle latency all checks still pass. The two runs below then take about 3780 and 3710
  cycles: about 95 cycles per single-track event and 1240 per 16-track event.
- To try it, change the `LAT` default of `hbm_pc_model`. The histogram check that no read is
  faster than 20 cycles still holds.

Under this model, `tb_prm_top` measures:

- 40 single-track events with fake clusters in about 1970 cycles, about 49 cycles per event.
  The original firmware was exercised at 886 kHz, which is 282 cycles per event at 250 MHz.
- Three 16-track events in about 1940 cycles, about 650 cycles per event. This is slower than
  the 541 kHz (462 cycles) used for the original firmware.

The limit is the single parameter stage. It waits for one 7-chunk set per track, about 40 cycles.

The throughput targets for one unit are 77 MHz roads, 41 MHz constant sets and 57 MHz tracks
at a 250 MHz clock. This RTL does not reach them:

- 4 cycles per road, 62.5 MHz.
- One outstanding constant request per lane.
- One track at a time in the parameter stage.

The pipelined arithmetic units would allow one candidate per cycle per lane. Prefetching or
caching constants is the obvious next step.

## Departures from the original firmware

- Fixed-point arithmetic instead of floating-point DSPs (formats above).
- The printed parameter formula puts q_i inside the sum over j; it is added once here.
- One clock domain. The HBM side runs on the core clock, and the clock-crossing FIFOs are
  ordinary synchronous FIFOs.
- The Data Organiser needs 4 cycles per road instead of 3.
- Stale pointers are rejected by an SSID tag in the CLM, not by clearing memories.
- Field widths are this design's own: 16-bit SSID, sectorID and coordinates; 21-bit roadID,
  enough for the ~1.97 M patterns of five AM chips.
  - A 16-bit sectorID addresses 65,536 constant slots (32 MB per pseudo-channel). That is less
    than the volume of constants estimated for the full system.
- Track candidates need a cluster on every layer. At most 4 clusters per layer and road are
  used.
- AM input-bus word format, emulator chain grouping, register map, RAM formats and the
  comparison rule are this design's own.
- The latency histograms sit beside the HBM interfaces, on their AXI ports, rather than inside
  them. Their bin layout is this design's own.
- The output formatter towards the host board and the majority-match logic of real AM chips
  are not implemented.

## Outside the RTL

These parts appear only as ports of `prm_top`:

- the HBM itself and its controller: AXI read ports, a write port and APB;
- the Ethernet PHY/MAC: Avalon-ST;
- the IPbus protocol core: the IPbus bus and AXI-Stream;
- real AM chips and their LVDS links;
- transceivers and PLLs;
- the board controller.

In the test benches, `hbm_pc_model` is a behavioural model of one pseudo-channel: latency,
queue depth, refresh blackout and a write port.

## Verification

Every module has a self-checking test bench in `tb/` (`tb_<module>`). Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. Reference values come from
`prm_ref_pkg`, which recomputes chi2 and parameters with wide integers, or from
behavioural scoreboards.

`tb_prm_top` runs the whole unit at default parameters, through its external ports only. It
uses IPbus register accesses, eight HBM pseudo-channel models and an APB slave:

- It loads 8 sectors of constants and 48 patterns spread over all five emulators.
- It runs a 1-track-per-event vector (40 events) and a 16-tracks-per-event vector (3 events),
  with fake clusters and some two-cluster layers.
- It sets the chi2 cut so that about 30% of the candidates fail.
- It requires every expected track, no mismatch and no unexpected track, and candidate and
  pass counts equal to the reference.
- It requires each mechanism at least once:
  - a chi2 rejection;
  - several roads in one event;
  - several candidates from one road;
  - fake clusters;
  - an HBM refresh stall;
  - a lane waiting for constants;
  - next-event clusters queued during a read phase;
  - all eight pseudo-channels used;
  - an APB access;
  - both converter directions.
- It reads both latency histograms and requires:
  - their totals to equal the reads served;
  - no read below the 20-cycle model latency;
  - a refresh tail at 40 cycles or more;
  - a working clear.

To simulate with Verilator 5, from the directory holding `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_prm_top \
  -y rtl -y tb +libext+.sv -Irtl rtl/prm_pkg.sv tb/prm_ref_pkg.sv tb/tb_prm_top.sv
./obj_dir/Vtb_prm_top
```

Replace `tb_prm_top` by any other test bench to run a single block.
