# Topological second-level trigger for a 2048-pixel Cherenkov camera

A Cherenkov telescope camera records very short flashes of light. Its first-level
(L1) trigger fires when enough pixels in a small area go above a threshold. At
low trigger thresholds, most of these L1 events come from the night-sky
background, from muons, or from small showers that are useless for a
single-telescope analysis. The camera cannot afford to read all of them out.

The second-level (L2) trigger described here decides, within a few
microseconds, whether to keep or drop each L1 event. It looks only at the
*shape* of the triggered pixels, as a binary image:

* **map1**: the pixels above the L1 threshold δ1;
* **map2**: the pixels above a second, higher threshold δ2.

An event is **accepted** in two cases:

* it was seen by several telescopes at once (a *stereo* event, flagged by the
  central trigger); or
* its image has at least one compact cluster of three or more pixels, and the
  weighted centre of gravity of that image lies closer than a set distance to
  a target point (for example, where the source should appear).

Every other event is **rejected**. Decisions leave in the same order as the L1
events that caused them.

All of the logic is synthesizable SystemVerilog. The decision is made by a
fixed pipeline of about 175 clock cycles, with no processor.

## Decision rule

For a monoscopic (single-telescope) event the steps are:

1. **Cluster test.** Keep only the map1 pixels that belong to a connected group
   of three or more pixels. If none are left, reject (`DEC_NO_CLUSTER`).
2. **Denoise.** Remove the isolated map1 pixels, meaning those with no set
   neighbour. This gives the cleaned map *m̂1*.
3. **Weighted image.** Form `I = δ1·m̂1 + (δ2−δ1)·map2`. A pixel above both
   thresholds therefore weighs δ2, a rough estimate of its charge.
4. **Moments.** Compute `m = ΣI`, `mx = ΣI·x`, `my = ΣI·y`, and the second-order
   moments `mxx`, `myy` and `mxy`.
5. **Centre of gravity.** `cx = 32·mx/m` and `cy = 32·my/m`, in 1/32 of a
   coordinate unit, rounded toward zero.
6. **Distance cut.** Compute `Δ² = (cy − yc)² + 3·(cx − xc)²`. The factor 3
   appears because the x unit of the pixel grid is √3 times the y unit (see
   below).
   * If `Δ² < τ²`, accept (`DEC_COG_NEAR`).
   * Otherwise, reject (`DEC_COG_FAR`).

`xc`, `yc`, `τ²`, `δ1` and `δ2` are slow-control registers. They are sampled
with each L1 strobe, so a register write never changes the rule for an event
that is already queued.

The second-order moments are computed and passed along with the result. They
are not used in the cut. They are there for cuts on the image's width, length
or orientation.

## Pixel grid and coordinates

The pixels lie on a hexagonal grid. This design uses skewed integer
coordinates in which **a pixel exists only where `x + y` is even**. The six
nearest neighbours of a pixel are at `(0, ±2)` and `(±1, ±1)`. One x unit is
√3 times one y unit, which is where the `3·dx²` in the distance comes from.

The coordinates are built up in three nested frames:

| Frame | Contents | Position of the parts |
|---|---|---|
| FE board | 8 pixels: one byte of a map | bit `b` is at `(b & 1, b)` |
| Drawer pair | 4 FE boards, 32 pixels: one 32-bit word | board `k` is shifted by `(2·(k>>1), 8·(k&1))`, so a drawer pair covers x = 0..3, y = 0..15 |
| Camera | 64 drawer pairs | pair `d` sits in slot `(d % 8, d / 8)` of an 8 × 8 grid, origin `(4·(d%8) − 16, 16·(d/8) − 64)` |

As a result, byte `k` of every drawer word is FE board `k`, and bit `8k + b` is
pixel `b` of that board.

In this layout each drawer pair has 26 first neighbours and 32 second
neighbours outside itself. The filters must see those pixels, so they work on
an 8 × 24 window that reaches two steps beyond the drawer pair on every side
(`l2_pkg::win_t`).

**Simplification:** the 8 × 8 slot grid is rectangular. A real camera places
its drawer pairs on a roughly circular outline, so the outer slots of the grid
have no counterpart in a real camera. Changing the layout only requires
changing `drawer_x0`, `drawer_y0` and the in-camera test in `neighbor_window`.

## Moments in three steps

Adding up `I·x²` over 2048 pixels one at a time would be slow. Instead, the
moments are built up through the three frames:

1. **Per FE board.** `moment_lut` maps a map byte to the six moments of those
   8 pixels in the board's own frame.
2. **Per drawer pair.** `drawer_moments` moves the four board results into the
   drawer frame with `moment_transform` and adds them up.
3. **Camera.** `moment_accumulator` moves each drawer result into the camera
   frame and accumulates it. m̂1 and map2 go into separate accumulators.
   When the last drawer pair is in, the two sums are combined with δ1 and
   δ2 − δ1.

Moving a set of moments by `(tx, ty)` needs only the moments themselves:

```
m'   = m
mx'  = mx + tx·m
my'  = my + ty·m
mxx' = mxx + 2·tx·mx + tx²·m
myy' = myy + 2·ty·my + ty²·m
mxy' = mxy + tx·my + ty·mx + tx·ty·m
```

This is why a 256-entry table per board is enough. It is also why δ1 and δ2
can be applied once at the end instead of per pixel.

All statistics are 32-bit signed values. The largest one, `myy` with every
pixel set and δ2 = 255, reaches 255 × 2 732 032 < 2³¹, so it cannot overflow.

## Cluster and noise filters

Both filters look at map1 only. For each pixel `c`, let `n` be its six
neighbours:

* **Denoise** keeps the pixel if any neighbour is set: `den = c & |n`.
* **Cluster of three** keeps the pixel if either of these holds:
  * at least two of its neighbours are set; or
  * one neighbour is set and that neighbour has a set neighbour of its own
    (other than `c`).

  This covers every connected group of three, including a straight line in
  which `c` is at one end. It therefore needs the second neighbours.

`neighbor_window` gathers the 8 × 24 window of one drawer pair from the whole
map1 image (zeros outside the camera and where no pixel exists).
`cluster_filter` applies both rules to all 32 pixels of the pair at once. The
processor runs the filters over the 64 drawer pairs, one pair per cycle.

## Front-end links

After each L1 trigger, every drawer pair sends its 64 map bits on its own
serial link. There are 64 links in total, one per drawer pair. A link carries
4 words, and each word is:

* a start bit;
* 2 ID bits (the word number);
* 16 data bits.

A symbol lasts 45 ns, and words are at least 270 ns apart. An event therefore
takes 4 × 19 × 45 ns + 3 × 270 ns ≈ 4.2 µs.

`fe_link_deser` receives the 64 lines as one bus with a common symbol timing.
Its steps are:

1. Synchronise the lines with two flip-flops.
2. Start a word when any line goes high, and confirm the start bit at
   mid-symbol.
3. Sample every following symbol at its middle, `OVS` clock cycles apart.
4. Check the ID bits: they must agree on all links and must be the next word
   number. A word that fails is counted as an error.

Each data symbol, sampled on all 64 links, becomes one 64-bit row of a 64 × 64
bit matrix.

`matrix_transpose` stores the rows in two banks (ping-pong) and reads the
matrix out column by column. Each column becomes one drawer pair's map1 and
map2 words. Within a link:

* word `w` belongs to FE board `w`;
* its low byte is map1, and its high byte is map2;
* data bits are sent MSB first.

An event that arrives while both banks are still full is dropped and reported
on `data_overflow`.

## Block structure and event flow

```
lines_i[63:0] ─► fe_link_deser ─► matrix_transpose ─► sync_fifo (data, 50 events × 64 words)
                                                                 │
ct_valid, ct_stereo ─► sync_fifo (info, 50 entries) ─────────────┤
   slow_ctrl_regs ──► params captured with each ct_valid         │
                                                                 ▼
                                                          l2_processor
                                          (neighbor_window, cluster_filter,
                                           moment_accumulator ◄ drawer_moments ◄ moment_lut
                                                              ◄ moment_transform,
                                           cog_cut ◄ seq_divider × 2)
                                                                 │
                                               dec_valid, dec_accept, dec_reason
```

The top module is `l2_trigger_top`. The **info FIFO** gets one entry per
`ct_valid` strobe, holding the stereo flag and a snapshot of the parameters.
The **data FIFO** gets the 64 drawer words of each event. Both FIFOs are
first in, first out, so event *n*'s data always meets event *n*'s info, and
the decisions come out in L1 order. The depth of 50 events matches the
front-end buffers, which limit how far the L2 decision may lag behind.

`l2_processor` handles one event at a time:

| Phase | Cycles | Work |
|---|---|---|
| S_IDLE | 1 | pop the info entry |
| S_LOAD | 64 | move the event's 64 drawer words into local map1/map2 arrays (from the FIFO head) |
| — | — | stereo: accept (`DEC_STEREO`) immediately |
| S_FILTER | 64 | one drawer pair per cycle: window → cluster and denoise filters → moments of m̂1 and map2; record whether any cluster pixel was seen |
| — | — | no cluster: reject (`DEC_NO_CLUSTER`) |
| S_FINISH / S_WAITM | 2–3 | combine the two accumulators with δ1, δ2 |
| S_COG | 42 | two 40-bit restoring dividers (32·mx/m, 32·my/m) in lockstep, then Δ² and compare |

A monoscopic event therefore takes about 175 cycles. At the 88.9 MHz clock
implied by `OVS = 4` (11.25 ns per sample), that is about 2 µs, below the
4.2 µs each event needs on the links. The processor works on event *n* while
event *n + 1* is being received.

The moments are accumulated during the cluster pass. They are only used if a
cluster was found, which gives the same result as filtering first.

Decisions are one-cycle pulses on `dec_valid`, with `dec_accept` and the
reason code (`l2_pkg::dec_reason_t`). There is no back-pressure.

### Top-level ports

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `lines_i` | in | 64 | FE serial links, asynchronous |
| `ct_valid`, `ct_stereo` | in | 1, 1 | one strobe per L1 event from the central trigger, in L1 order, with the stereo flag |
| `sc_wr_en`, `sc_addr`, `sc_wr_data` | in | 1, 2, 32 | slow-control write: addr 0 `xc`, 1 `yc` (1/32 units, signed 16 bit), 2 `τ²` (1/1024 units), 3 `{δ2[15:8], δ1[7:0]}` |
| `sc_rd_data` | out | 32 | read-back of `sc_addr` |
| `dec_valid`, `dec_accept`, `dec_reason` | out | 1, 1, 2 | decision |
| `rx_error` | out | 1 | pulse per received word whose ID bits disagree between links or are not the next word number (the event is still processed) |
| `data_overflow`, `info_overflow` | out | 1, 1 | an event or info entry was dropped |
| `busy` | out | 1 | processor working on an event |

Reset values are `xc = yc = 0`, `τ² = 1024` (a radius of one unit), `δ1 = 3`
and `δ2 = 7`.

## Files

| File | Contents |
|---|---|
| `rtl/l2_pkg.sv` | constants, structs, reason enum, pixel geometry functions |
| `rtl/fe_link_deser.sv` | 64-link receiver, row writes into the event matrix |
| `rtl/matrix_transpose.sv` | two-bank 64 × 64 matrix, column read-out as drawer words |
| `rtl/sync_fifo.sv` | generic first-word-fall-through FIFO (type and depth parameters) |
| `rtl/slow_ctrl_regs.sv` | parameter registers |
| `rtl/neighbor_window.sv` | 8 × 24 neighbourhood of one drawer pair |
| `rtl/cluster_filter.sv` | denoise and cluster-of-three filters for 32 pixels |
| `rtl/moment_lut.sv` | moments of one FE byte |
| `rtl/moment_transform.sv` | translation of a moment set |
| `rtl/drawer_moments.sv` | moments of one drawer pair |
| `rtl/moment_accumulator.sv` | camera-frame accumulation and δ weighting |
| `rtl/seq_divider.sv` | signed restoring divider |
| `rtl/cog_cut.sv` | centre of gravity and distance cut |
| `rtl/l2_processor.sv` | per-event controller and datapath |
| `rtl/l2_trigger_top.sv` | top level |
| `tb/tb_<block>.sv` | self-checking testbench of each block |
| `tb/tb_l2_ref_pkg.sv` | reference model of the whole decision rule on camera images |
| `tb/fe_link_tx_model.sv` | behavioural model of the 64 front-end link transmitters |

## Simulating

Every testbench checks itself and ends with a line
`TB_RESULT checks=N failures=M`. Each one has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/l2_pkg.sv rtl/*.sv tb/tb_l2_ref_pkg.sv tb/fe_link_tx_model.sv \
    tb/tb_l2_trigger_top.sv --top-module tb_l2_trigger_top
./obj_dir/Vtb_l2_trigger_top
```

Replace the last testbench and top-module name to run any other block's test.

`tb_l2_trigger_top` runs the complete design at its default parameters (64
links, 50-event FIFOs, `OVS = 4`). It sends 24 random events through the
serial links and compares every decision, in order, against the reference
model. It counts each mechanism and fails if one never happens:

* stereo accept;
* no-cluster reject;
* centre of gravity far and near;
* a corrupted ID bit;
* events at the camera edge;
* a parameter change between events;
* several events queued at once.

`tb_l2_workloads` runs the complete design at two loads, with events sent
back to back, one every 4.8 µs (about 208 kHz):

* the worst case, in which every pixel is above both thresholds and
  δ2 = 255;
* typical small images.

In both cases it checks every decision, checks that nothing is dropped, and
checks that each decision comes 175 cycles after its event has been received.
A third phase fills the buffers on purpose, to show how they overflow:

* It sends 53 events without any central-trigger strobe. 50 of them fill the
  data FIFO, the two transpose banks take two more, and the 53rd is dropped
  with `data_overflow`.
* It then sends a burst of 55 strobes, which overflows the 50-entry info FIFO
  (`info_overflow`).

After an overflow, the data and info FIFOs are no longer paired. The design
has no way to resynchronise them other than a reset. This matches the role of
the 50-event limit as a hard latency bound.

The block testbenches compare against independent models. Examples:

* moments summed pixel by pixel;
* a bounded breadth-first search for clusters;
* integer division in the testbench.

The divider and cut testbench also checks the 42-cycle latency. The link
testbench checks the event duration of 4·19·OVS + 3·gap cycles.

## Where this design departs from the published system

* **Processor.** The original runs the filters, moments and cut as software
  on an embedded processor, using look-up tables in external memory. It takes
  a mean of tens of µs per event, and about 100 µs in the worst case. Here the
  same rule is a fixed-latency hardware pipeline. The processor, its bus, the
  DDR memory, the PCI configuration bridge and the variant that shares events
  over several FPGAs (round-robin) are not included.
* **Zero bytes.** The software version skipped FE bytes that were all zero,
  so its run time grew with the image size. The hardware always spends one
  cycle per drawer pair, so its time per event is fixed.
* **Camera outline.** The camera is modelled as an 8 × 8 grid of drawer pairs,
  not the real outline (see above).
* **Bit mapping.** The bit order on the links and the split of each link word
  into a map1 byte and a map2 byte are choices of this design.
* **Column spacing.** The moment translation uses a column pitch of 1 in x
  (`moment_transform` parameter `SX = 1`), consistent with the skewed grid.
  Other drawings of the grid use a different pitch. Changing it only rescales
  x, and τ² and xc with it.
* **Clock and sampling.** The serial receiver samples 4 times per 45 ns symbol
  and shares one symbol timing across all links. Real links with skew between
  them would need per-link alignment (for example, I/O serialisers and
  deserialisers), which is not modelled.
* **Stereo events.** These are accepted without running the filters, but their
  data is still read out of the FIFO so that the data and info FIFOs stay
  paired.
* **Bad ID bits.** A word with bad ID bits is flagged on `rx_error`, and its
  event is still processed. It is not discarded.
