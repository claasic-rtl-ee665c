# A cortex of columnar cores on a spike network

This design runs a cortical learning algorithm for anomaly detection. The
algorithm is a spatial pooler followed by temporal memory. The design splits the
cortex into many small, identical **columnar cores** and lets them talk only by
short **multicast spike packets** on a 2-D mesh. The algorithm's memories are
huge but each is used locally. The hard part is communication: every decision a
column makes (am I among the winners? which of my cells fire? which cells
predict the next input?) depends on spikes from columns anywhere in the cortex.
The design therefore turns the algorithm into a fixed sequence of stages. Every
stage that sends spikes ends with a **network drain**. That is a point at which
each core knows that no spike of the stage is still travelling towards it. The
drain uses no central controller or global wires: special *broom* packets
sweep the mesh behind the last spikes of the stage.

A stream of integers goes in, one value per *epoch*. An **anomaly score** comes
out for each epoch: the fraction of active columns the cortex failed to predict.

## 1. What one epoch computes

- **Encoding.** The value becomes a sparse distributed representation (SDR).
  This is a K-bit word with W bits set (2048 and 40 by default). Nearby values
  share most of their bits.
- **Spatial pooling.** Each column watches a window of D = 32 input bits. It
  keeps a 4-bit permanence per watched bit and counts its *overlap*: the active
  input bits whose permanence is at or above threshold. About 2% of the columns
  win (ACTIVE_K = 40 of 2048). These are the ones with the largest overlaps;
  ties go to the smaller column id. Winners raise the permanence of the bits
  that were active, and rarely lower that of the others.
- **Temporal memory.** Each column has T = 32 cells. Each cell has up to
  SEGS = 128 distal segments of SYNS = 40 synapses, each pointing to some cell
  of the cortex. An active column that had a *predictive* cell activates just
  those cells. A column with no predictive cell *bursts*: all its cells turn
  on, and one becomes the *learning cell*. That cell grows a new segment
  towards the learning cells of the previous epoch. Segments that predicted
  correctly are reinforced.
- **Prediction.** A segment with at least SEG_TH connected synapses onto
  currently active cells makes its cell predictive for the next epoch.
- **Score.** score = 256 × bursting columns / active columns.

## 2. Organisation

```
 sample ──► sdr_encoder ──► core 0 injection queue
                                │
            ┌──────┬──────┬─────┴┬──────┐
            │ CC   │ CC   │ CC   │ ...  │   X × Y mesh of columnar_core
            ├──────┼──────┼──────┼──────┤   (16 × 16, 8 columns each)
            │ CC   │ CC   │ ...  │      │
            └──────┴──────┴──────┴──────┘
                 per-core report wires
                                │
                        anomaly_classifier ──► score
```

- **Numbering.** Core *n* sits at x = n mod X, y = n div X. It owns global
  columns n·B … n·B+B−1.
- **Contents of a core** (`columnar_core`):
  - the spatial pooler for its B columns (`spatial_pooler`);
  - the temporal memory for their B·T cells (`temporal_memory`);
  - a coalescing injection queue (`coalescing_injector`);
  - a 5-port router (`mesh_router`, 10-flit FIFOs from `pkt_fifo`).
- **Encoder.** The encoder (`sdr_encoder`) injects its spikes through core 0.
  This core accepts a new value only when it has returned to the input stage.
- **Reports.** Each core reports three counts per epoch on dedicated wires:
  active, bursting and predicted columns. The classifier (`anomaly_classifier`)
  adds them and divides.

## 3. The nine stages

Each core runs the stages of an epoch in order. A stage that sends traffic
(S1, S4, S7) is followed by a drain (S2, S5, S8). The core's own processing
(S3, S6, S9) starts only after that drain.

| stage | state(s) in `columnar_core` | what happens |
|---|---|---|
| S1/S2 | `ST_PROX` | Input spikes arrive and raise the overlaps. The input drain follows. |
| S3/S4 | `ST_INH_SEND` | Each column with a non-zero overlap broadcasts {overlap, id}. Each column counts how many remote columns beat it. |
| S5 | `ST_INH_WAIT` | Drain of the inhibition traffic. |
| S6 | `ST_LC0..2` | Winners decided; spatial learning; active and bursting cells chosen; distal learning. |
| S7 | `ST_DST_SEND` | One lateral spike {learn, column, cell} per active cell, to the whole cortex. |
| S8 | `ST_DST_WAIT` | Drain of the lateral traffic. |
| S9 | `ST_PRED0/1`, `ST_REPORT` | Prediction from the collected activations; report to the classifier. |

Items are handled one per cycle. A packet carrying n items therefore occupies
the core's intake for n cycles.

## 4. Packets and multicast routing

A packet is one 109-bit flit, which fits a 16-byte link. It has:

- a 2-bit type: input, inhibition, lateral or broom;
- a destination *rectangle* {x0, x1, y0, y1} of four 4-bit coordinates;
- a 3-bit item count;
- up to four 22-bit items.

Item formats:

- input: the bit index;
- inhibition: {overlap[10:0], column[10:0]};
- lateral: {learn, column[10:0], cell[4:0]}.

Routing is dimension-ordered and replicates packets inside the network:

- **Local core or a west/east port.** A packet is in its X phase. It is copied
  east while x < x1 and west while x > x0. If the router's column lies inside
  [x0, x1], it is also copied into the Y phase: north while y > y0 and south
  while y < y1.
- **North/south port.** A packet moves on only in Y, away from where it came
  from.
- **Ejection.** A router inside the rectangle ejects a copy to its own core.

An input packet leaves its FIFO only when all its copies have been sent.
Outputs are granted round-robin. A hop takes two cycles: into the input FIFO,
then from the FIFO head into the output register.

The router has **one ejection register per packet type**. The next stage's
spikes can start arriving at a core before the core has finished the current
stage. With a single ejection register, such a spike could block the last
spikes of the current stage, which the core is still waiting for. That would
deadlock; separate registers make it impossible.

## 5. Draining the network with brooms

This is the mechanism the rest depends on.

**Brooms are per link.** When a core has finished a stage and its injection
queue is empty, its router may send a *broom* packet on each of its output
links. A broom on an output is sent only when brooms have already arrived on
every input that can feed that output:

| output | waits for brooms on |
|---|---|
| E | W |
| W | E |
| S | W, E, N |
| N | W, E, S |

These dependencies contain no cycle: X traffic never turns back into X, and a
Y packet never reverses. So the brooms start at the edges of the mesh and
sweep inwards. For example, the west-most core needs no west broom before it
sends east.

**Brooms stay in order.** Brooms travel inside the same FIFOs as the spikes, so
everything in a FIFO ahead of a broom belongs to the finished stage.

**Early next-stage packets wait.** A core that has already moved on may send
next-stage packets. These can sit behind the broom. Such a packet is not
allowed onto an output whose own broom has not yet gone, so it can never
overtake a broom.

**When the stage is drained.** A router reports `drain_done` for the stage when
all of these hold:

- brooms have arrived on all of its existing inputs;
- brooms have been sent on all of its existing outputs;
- its core has finished;
- its injection queue is idle;
- the ejection register of the stage's packet type is empty.

Then no spike of the stage can still reach this core. Each input keeps a small
count of pending brooms, because the next stage's broom can arrive before the
current one has been used.

The broom idea comes from the published design. There, brooms are two
broadcast packets injected at the corner cores. The per-link form and the rules
above are this implementation's own, and so are the per-type ejection
registers.

## 6. Coalescing injection

Inhibition and lateral spikes are small (22 bits) compared with a 16-byte
link. So the injection queue (`coalescing_injector`, 8 entries) looks for a
waiting packet with the same type and destination that has room. If it finds
one, it appends the new item there instead of starting a new packet. A packet
holds at most four items. The head entry, which the router may be copying out,
is never changed. Each merge pulses `coalesced`.

## 7. The encoder

Let L be the input value, q = L div W and r = L mod W.

- Seed the generator with q. Draw distinct indices (mod K) to form R1, the
  first W of them.
- Seed it with q+1. Draw indices not in R1 to form R2.
- The code is the last W−r indices of R1 plus the first r of R2.

As L steps up by one, one bit moves from the R1 part to the R2 part. Neighbours
therefore share W−1 bits. Values more than W apart share almost nothing, and
the same value always gives the same code. No table is stored.

The generator is a 32-bit xorshift (shifts 13, 17, 5). Its start state is
seed·0x9E3779B1 xor 0x85EBCA6B.

Read literally, the published description keeps r bits of R1, not W−r. That
reading does not give a smooth code, so this design keeps W−r.

Each bit leaves as one spike addressed to the rectangle of cores that may own
a column whose window holds that bit. Column c's window starts at
clamp(c·K/NCOL − D/2, 0, K−D).

## 8. Inside the spatial pooler and the temporal memory

### Spatial pooler

**Permanence table.** The table has ENTRIES = 64 entries per column. It is
direct-mapped by input-bit index and filled at reset with the column's window.
Initial permanences are the threshold (8) or one below. The choice comes from
the hash c·40503 + bit·2654435.

**Inhibition.** This is a counter per column. Each inhibition item from another
column with a larger overlap (or the same overlap and a smaller id) adds one.
A core also receives the broadcasts of its own columns, so local rivals are
counted the same way. A column is active if its overlap is non-zero and fewer
than ACTIVE_K columns beat it.

**Learning.** Active columns apply +1 to synapses from active inputs and −1,
with probability 1/16, to the rest. The 1/16 comes from an LFSR.

### Temporal memory

**Storage.** Segments are kept per cell, SEGS per cell, as register arrays.
When a cell has used all its segments, new growth overwrites its oldest one.

**Activation list.** This is a bitmap with one bit per cell of the cortex. It
is filled from the lateral spikes. Alongside it the memory keeps a reservoir
sample of up to SYNS learning cells, which is the pool new segments grow from.

**Learning.** New synapses start exactly at the connection threshold. A
segment that predicted correctly gets +1 on synapses to previously active
cells and −1 on the rest.

**Prediction.** Prediction reads every used segment, one per cycle. It takes
B·T + (used segments) + 1 cycles.

## 9. Parameters

Defaults of `claasic_top`:

| parameter | default | meaning |
|---|---|---|
| X, Y | 16, 16 | mesh size |
| B | 8 | columns per core (2048 columns) |
| T | 32 | cells per column |
| SEGS, SYNS | 128, 40 | distal segments per cell, synapses per segment |
| K, W | 2048, 40 | SDR width, active bits |
| ENTRIES, D | 64, 32 | proximal table entries, receptive-field width |
| ACTIVE_K | 40 | inhibition limit (about 2%) |
| SEG_TH | 13 | active synapses for a segment to predict |
| DEPTH | 10 | flits per router input FIFO (160 bytes) |
| Q | 8 | injection queue entries |

Widths of ids and coordinates are fixed in `claasic_pkg`:

- 11-bit column ids;
- 5-bit cell ids;
- 4-bit mesh coordinates, which limit the mesh to 16 × 16.

The reference configuration is a 45 × 45 cortex of 2025 columns with a 2045-bit
encoder. It is held here as 2048 columns and 2048 bits, so that columns divide
evenly among 256 cores.

## 10. Where this departs from the published design

- **Topology.** A mesh, not a torus. The published drain works on the mesh, and
  the evaluation names a torus; the mesh was followed.
- **Router.** Valid/ready links with 10-flit input FIFOs and two cycles per hop.
  The published router has a 4-cycle pipeline, virtual cut-through and bubble
  flow control.
- **Broom drain.** The drain is per link, and there are per-type ejection
  registers (section 5).
- **Stage overlap.** Stages run strictly in sequence. The pipelined schedule,
  in which stages of consecutive epochs overlap, is not built.
- **Scale-out zones.** Not built: there is a single encoder and one zone.
- **Segment memory.** Written as register arrays, not as an on-chip SRAM.
- **Learning rules.** Thresholds, step sizes and the choice of learning cell
  are this design's own, in 4-bit arithmetic. No boosting.
- **Anomaly score.** Computed on chip from report wires, with a 24-cycle
  restoring divider. The score comes out 25 cycles after the last report.
- **Encoder.** Keeps W−r bits of R1 (section 7).
- **Encoder attachment.** The published block diagram puts the encoder beside
  the whole west column of cores. Here it injects through core 0 only, and the
  mesh multicasts its spikes from there.
- **Overlap stage.** Overlaps are counted while input spikes arrive, so the
  separate overlap-computation stage (S3) takes no time of its own.

## 11. Verification and use

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=… failures=…` and stops itself through a watchdog.

| testbench | what it shows |
|---|---|
| `tb_sdr_encoder` | Codes equal an independent model. Exactly W items, one marked last. Every destination rectangle holds the owning cores. Neighbours overlap; codes repeat; sink stalls are handled. |
| `tb_coalescing_injector` | Merging by type and destination in arrival order, the four-item limit, the head never extended, a full queue refusing items; all against a model. |
| `tb_mesh_router` | Copies for several rectangles and arrival ports; two-cycle hop. Broom order on each output; a packet behind a broom follows it; one `drain_done` only after all brooms. |
| `tb_spatial_pooler` | Overlaps, tie-breaking and the ACTIVE_K limit, and learning, all against a model table. |
| `tb_temporal_memory` | Bursting, segment growth, prediction, reinforcement and prediction cycle counts. |
| `tb_columnar_core` | A lone core learns a repeating three-value sequence until nothing bursts. Counts coalescing and drains. |
| `tb_anomaly_classifier` | Sums, the score division and its latency. |
| `tb_claasic_top` | A 2 × 2 mesh (16 columns, 4 cells) learns a repeating four-value sequence. Checks every score and the counters. Requires drains, coalescing, bursts and correct predictions all to have happened. |

**Largest size simulated.** The largest simulated configuration of the whole
cortex is 2 × 2 cores. The defaults (16 × 16 cores, 8192 cells per core with
128 × 40 synapses each) hold several hundred megabytes of segment state per
simulation. Linting the full-size top alone takes about 8 GB of memory and two minutes.
A simulation build is larger still, so no testbench runs the defaults.

**Running a testbench.** With plain Verilator, the package goes first:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/claasic_pkg.sv $(ls rtl/*.sv | grep -v claasic_pkg) \
  tb/tb_claasic_top.sv --top-module tb_claasic_top
./obj_dir/Vtb_claasic_top
```

The design uses an asynchronous active-low reset and resets every register it
reads.
