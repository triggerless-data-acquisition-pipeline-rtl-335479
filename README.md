# Trigger-less drift-tube reconstruction front end

A small muon telescope built from drift-tube (DT) chambers is read out without
any trigger: every hit of every channel is digitised and streamed to a server,
where GPU software looks for statistical anomalies in the data. Before the data
leave the FPGA, the stream is *enriched*: a local reconstruction finds muon track
segments in each chamber and appends them to the hits. Nothing is thrown away;
the segments are simply extra words in the same stream.

This RTL implements that FPGA stage: the segment reconstruction (grouping of
hits into macro-cells, two small neural networks, a mean-timer and a line fit)
for four chambers, and the merger that packs hits and segments into one stream
for a DMA engine. It follows the published description of an existing system,
which gives the structure of the algorithm, the detector size and the network
latency, but not the trained networks, the number formats or the exact
equations. Where this design had to choose, the choice is stated below and in
the opening comment of each file.

## The detector and the data

* A chamber has 4 layers of 16 cells (64 channels). Odd layers are shifted by
  half a cell, so the layers form a brick pattern.
* A cell measures the drift time of the ionisation from the muon track to the
  wire. With a constant drift velocity the drift time is a distance from the
  wire, but it does not say on which side of the wire the muon passed: the
  *left-right ambiguity*.
* Two TDC boards, 128 channels each, timestamp the hits; their streams arrive
  deserialised at the back-end FPGA, one hit per clock per board at most, at
  40 MHz. So the back end serves 2 links and 4 chambers.

Units used throughout (`dtreco_pkg`):

| quantity | unit | value |
|---|---|---|
| time | TDC count | 25/32 ns, 32 counts per 40 MHz clock |
| position | drift unit | distance drifted in one TDC count, ~42.6 um |
| cell width `CELL_W` | drift units | 984 (42 mm) |
| layer pitch `LAYER_H` | drift units | 305 (13 mm) |
| maximum drift | TDC counts | 492 (~384 ns, 15.4 clocks) |

Choosing the position unit this way makes the drift velocity exactly 1, so a
drift time becomes a position without a multiplier. The cell size, drift
velocity and TDC bin are typical values for chambers of this type. They are not
part of the system description. Change them in `dtreco_pkg` if your chambers
differ.

## Reconstruction chain of one chamber

```
hit stream ─► initial grouping ─► filtering NN ─► disambiguation NN ─► t0 finder ─► line fit ─► segment
                     │                                                    ▲             ▲
                     └──────────────── macro-cell (delay line) ───────────┴─────────────┘
```

`chamber_reco` chains the blocks below. One chain serves all macro-cells of a
chamber, one macro-cell per clock.

### Initial grouping (`hit_grouping`)

A *macro-cell* is a 4 x 4 window of cells (4 layers x 4 neighbouring cells),
large enough to hold every hit pattern a straight muon can leave. Macro-cells
start every 2 cells, so 7 overlapping macro-cells cover a 16-cell chamber, and a
track near a boundary is still fully contained in one of them.

Each macro-cell has a window register. Its first hit opens a time window and sets
the reference time `t_ref`. Hits arriving within the next 20 clocks are stored
with their time relative to `t_ref` (11 bits). The window is longer than the
maximum drift time, so all hits of one muon fall in one window. A cell keeps the
first hit it sees. When the window ends, a macro-cell with at least 3 hits waits
to be sent on, otherwise it is cleared. Waiting macro-cells leave one per clock,
lowest index first. While a macro-cell waits, a new hit for it is lost and
`drop_o` pulses. At cosmic-ray rates this almost never happens.

Hits are expected in non-decreasing time order per chamber. A hit earlier than
`t_ref` gets relative time 0.

### Filtering and disambiguation networks (`hit_filter_nn`, `laterality_nn`, `mlp_dense`)

Two neural networks replace the classic brute-force search over hit subsets and
laterality combinations:

* the **filtering** network decides, for each of the 16 cells, whether its hit
  belongs to the muon (keep) or is noise;
* the **disambiguation** network predicts, for each kept hit, whether the muon
  passed left or right of the wire.

Each network sees one feature per cell: 0 for an empty (or, for the second
network, rejected) cell, otherwise `1 + (relative time >> 4)`, saturated at
127. `mlp_dense` is the network: 16 inputs, 8 hidden ReLU neurons, 16 outputs,
8-bit signed weights and biases. Each hidden sum is shifted right by 4 and
clamped to 0..127. A cell is kept when its filter score is positive, and a hit
is "right" when its disambiguation score is positive.

Each network takes 2 clocks (50 ns), with a new macro-cell accepted every clock.
These two numbers are those of the original system. The networks there were
trained offline, quantised and pruned, and their topology and weights are not
published. The topology here is therefore a stand-in of plausible size. The
weights are written at run time through a configuration port (address map in
`mlp_dense.sv`; a pruned weight is a zero), and the reset value of every weight
is zero. **Without trained weights the chain does not reconstruct real data.**
The testbenches use hand-made weights (see below).

### t0 finder: the generalised mean-timer (`t0_finder`)

From the kept hits the finder takes at most one per layer (the lowest column)
and needs hits in at least 3 layers. For a straight track `x = x0 + m z`, with
laterality `s_l` (+1 right, -1 left), the wire position `w_l` and the time
`rt_l` relative to `t_ref`, each hit gives one linear equation:

```
w_l + s_l * rt_l  =  x0 + m * l + s_l * tau          tau = t0 - t_ref
```

The unknowns are `x0`, `m` and the crossing time `tau`. With three hits the
system is exact: this is the mean-timer relation. With four hits it is solved
by least squares. Once the layer mask and the laterality are known, `tau` is a
fixed linear combination of the left-hand sides, so there is one equation per
hit pattern. A constant function computes the coefficients of all 256
(mask, laterality) patterns at elaboration time with Cramer's rule (14 fraction
bits). At run time the finder only needs four multiply-adds and a table lookup.
Patterns with all hits on the same side leave `t0` undetermined (the
laterality column is then a multiple of the constant column). They are flagged
`ok_o = 0`, and no segment is produced for them.

The finder takes one clock. `t0_o = t_ref + round(tau)`.

### Line fit (`track_fitter`)

With `tau` known, each hit has a definite position
`x_l = w_l + s_l (rt_l - tau)`. The fitter puts a least-squares line through
those positions. The denominators depend only on the layer mask, so their
reciprocals are again constants, one per mask. The outputs are:

* `x0`: position at layer 0 in the chamber frame, in drift units;
* `m`: dx/dz, signed with 12 fraction bits, saturated at |m| < 8;
* `t0` (passed on), the layer mask and the laterality of the hits used.

The fitter takes two clocks. Fitting the line with `tau` fixed gives the same
result as solving all three unknowns at once, apart from rounding `tau` to a
whole TDC count.

### Latency

A macro-cell leaving grouping in cycle n is filtered by n+2, disambiguated by
n+4, has its t0 by n+5 and its segment by n+7. From the first hit of a muon,
the segment appears about 28 clocks later (20-clock window, 1 clock of
grouping output, 7 of chain), plus a clock of queueing for each other macro-cell
leaving at the same time.

## Back end (`dt_reco_top`) and output stream (`stream_merger`)

`dt_reco_top` takes `N_LINKS = 2` link hit streams. Bit 6 of the 7-bit channel
number selects one of the board's two chambers, bits 5:4 the layer and bits 3:0
the cell. The top feeds `N_CHAMBERS = 4` chamber chains. The weights are shared
by all chambers: `cfg_sel` picks the network. Every raw hit is also forwarded
unchanged.

`stream_merger` gives each source (2 hit links, 4 chambers) a 16-word FIFO and
serves the non-empty FIFOs round robin, one 128-bit word per clock, over a
valid/ready interface towards the DMA engine. The word stays stable while
`dma_ready` is low. The sources cannot be stalled, so a word that meets a full
FIFO is lost and reported on `fifo_drop_o`.

Word formats (`pack_hit`, `pack_segment` in `dtreco_pkg`):

| bits | hit word (tag 01) | segment word (tag 10) |
|---|---|---|
| 127:126 | tag | tag |
| 121:120 | chamber | chamber |
| 118:116 | | macro-cell index |
| 115:112 | | layer mask |
| 111:108 | | laterality (1 = right) |
| 95:64 | | t0, TDC counts |
| 49:32 | | x0, signed, drift units |
| 41:40, 35:32 | layer, cell | |
| 31:0 | hit time, TDC counts | |
| 15:0 | | slope m, signed, 12 fraction bits |

## What lies outside this RTL

The TDCs on the readout boards, the optical links with their serialiser and
deserialiser, and the PCIe DMA engine are FPGA vendor or third-party blocks.
The top's ports stand where they connect: `link_hit_i` and
`dma_word`/`dma_valid`/`dma_ready`. The event building and the anomaly
detection run as software on a GPU and are not hardware.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints one
`TB_RESULT checks=N failures=M` line and has a watchdog. `tb_ref_pkg` holds the
reference models. They are written independently of the RTL: the network in
plain integers, the mean-timer and the line fit in floating point by Gaussian
elimination, and a track generator that places straight muons in the staggered
geometry.

| testbench | what it shows |
|---|---|
| `tb_mlp_dense` | exact network outputs for random (partly pruned) weights; latency 2, one input per clock |
| `tb_hit_filter_nn`, `tb_laterality_nn` | exact per-cell decisions for random weights and macro-cells; latency 2, II = 1 |
| `tb_hit_grouping` | contents and output cycle of every macro-cell for 300 tracks with noise; fixed-priority order; the lost-hit case |
| `tb_t0_finder` | t0 within 1 count of the floating-point least-squares solution for random patterns; within 2 counts of the true crossing time for generated tracks; hit selection; unsolvable patterns |
| `tb_track_fitter` | x0 and m against a floating-point fit; true track parameters recovered |
| `tb_stream_merger` | no word lost, reordered or invented except where a drop is reported; stable output under back-pressure; round robin |
| `tb_chamber_reco` | whole chain: 200 tracks, some missing a hit: t0, x0 and m match the truth; latency; overlapping macro-cells; a flooded macro-cell rejected by the filter |
| `tb_dt_reco_top` | whole back end at its default size: tracks on both links and all chambers, every hit delivered or reported lost, every segment matches a generated track. It also makes each of these happen at least once: DMA back-pressure, FIFO overflow, a lost grouping hit, filter rejection, duplicate segments |

The end-to-end tests need working weights, and trained ones are not available.
They use hand-made ones instead (`filter_weights`, `lat_weights` in
`tb_ref_pkg`). The filter keeps every hit unless the sum of features of a
macro-cell is very large (a noise flood). The disambiguation network always
answers left, right, left, right for layers 0 to 3. The generators therefore
produce only tracks with that true laterality. This exercises every datapath
with correct laterality. It does not test the quality of a trained network.

Running a testbench with plain Verilator, from the directory that holds `rtl/`
and `tb/`:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/dtreco_pkg.sv tb/tb_ref_pkg.sv tb/tb_dt_reco_top.sv --top-module tb_dt_reco_top -o sim
./obj_dir/sim
```

All testbenches run in well under a second of simulation time. `tb_dt_reco_top`
uses the top with its default parameters.

## Departures and open points

* Network topology, feature encoding, number formats and weights are this
  design's own. Drop in trained weights through the configuration port. A
  different topology needs changes to `mlp_dense` and the two wrappers, keeping
  the 2-clock latency.
* The mean-timer equations are derived here as least-squares solutions per
  hit pattern. For 3 hits they coincide with the classic mean-timer. The
  original system's exact equations are not published.
* The grouping window rule, the macro-cell stride of 2, the one-hit-per-layer
  selection, the drop policies, the channel map, the FIFO sizes and the output
  formats are all choices made here.
* Overlapping macro-cells can report the same track twice. Duplicates are
  left in the stream, like everything else; removing them is left to the
  software stage.
* The geometry constants (cell size, drift velocity, TDC bin) are assumed.
* Verilator reports `rst_n` as used both synchronously and asynchronously in
  `sync_fifo`, `stream_merger` and `dt_reco_top`. The synchronous use is only the
  `disable iff` of the assertions. The flip-flops are all reset asynchronously.
