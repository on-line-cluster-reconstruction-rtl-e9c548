# On-line cluster reconstruction for a GEM pad detector

A GEM detector with a 10 cm x 10 cm readout has hundreds of electrodes, and a
single X-ray or charged particle fires only a few neighbouring ones. Sending
every electrode's ADC value to storage for every trigger wastes most of the
bandwidth, and the slow transfer is what limits the count rate. This RTL
compresses each frame in the FPGA as the frame streams in. It thresholds every
electrode, groups fired electrodes that touch (including diagonally) into
clusters, and sends one short record per cluster:

| field  | meaning                        | bits |
|--------|--------------------------------|------|
| sum_xq | sum of X * Q over the cluster  | 36   |
| sum_yq | sum of Y * Q                   | 36   |
| sum_q  | sum of Q                       | 28   |
| sum_x  | sum of X                       | 24   |
| sum_y  | sum of Y                       | 24   |
| xmin, xmax, ymin, ymax | bounding box   | 8 each |

Downstream, the centre of gravity is `sum_xq / sum_q` and `sum_yq / sum_q`. X
is the column and Y the row, both counted from 0. Q is the raw 12-bit ADC value.

The method comes from "On-Line Cluster Reconstruction Of GEM Detector Based
On FPGA Technology" (Wu et al.). That paper describes the algorithm in prose
and one figure, not as hardware. Everything below the algorithm is this
design's own: memories, handshakes, clocking, sizes and cycle schedule. The
last section lists the differences.

## Data path

```
 adc_* (adc_clk)                                 clk
   |                                               |
 async_fifo ──> hit_discriminator ──> cluster_reco ──> sync_fifo ──> out_*
 (12-bit,        sample > threshold    label_line_buffer   (cluster
  1024 deep)                           equiv_table          records,
                                       cluster_acc_table    64 deep)
```

* `cluster_reco_top` holds the whole chain. A sample enters on `adc_clk` through a
  valid/ready port (`adc_ready` low = input FIFO full). Cluster records leave on
  `clk` through `out_valid/out_ready/out_rec`. `frame_done` pulses once per
  frame, after the frame's last record has entered the output FIFO. It comes
  with `frame_clusters` and `frame_overflow`.
* A frame is `COLS x ROWS` electrodes (default 167 x 167: 600 µm pitch over
  100 mm). They arrive in raster order: row 0 first, each row from column 0
  upwards. The frame position is counted inside, so there is no frame marker.
  After reset the first sample is electrode (0, 0), and frames follow back to
  back.
* `threshold` belongs to the `clk` domain. Change it only between frames.

## The labelling rule

When an electrode arrives, the four neighbours that have already been checked
are its left neighbour and the three below it:

```
   row y   :  L   *          * = electrode being checked
   row y-1 :  LL  LO  LR
```

* None of the four fired: the electrode starts a new cluster and gets the next
  free label.
* At least one fired: the electrode joins a fired neighbour's cluster. The
  first fired one in the order L, LL, LO, LR is taken.

Two clusters that grew apart can meet at a later electrode, as a "V" shape
does. Of all neighbour pairs, only L (or LL) with LR can still carry different
clusters, and only when LO is unfired. Every other pair touch each other, so
they were already joined when the later one was checked. In that case the
controller marks the two labels as one cluster. It does not relabel anything
already stored.

`label_line_buffer` holds one row of labels (`COLS` entries, 0 = unfired).
Entry x is overwritten with the new electrode's label once the electrode is
done. Entry x-1 therefore already holds the *left* neighbour. Its old value,
the *lower-left* neighbour, is kept in a register at the moment it is
overwritten. Neighbours outside the frame read as 0.

## Merge marks and the end-of-frame sweep

This is the least obvious part of the design.

`equiv_table` keeps a parent pointer per label. A label is the root of its
cluster when `parent[L] == L`. A new label becomes its own root. To mark two
labels as one cluster, the controller enters state `UNION`. It walks both
labels towards their roots in parallel, one step per cycle, on the table's two
read ports. Then it links the two roots, the larger under the smaller. No
electrode is accepted meanwhile. As a result **`parent[L] <= L` always holds**.

`cluster_acc_table` keeps one record per label. An electrode is added to the
record of the label it was given, never to the root's record. So after the
scan a cluster's quantities are spread over all of its labels.

After the last electrode of a frame, state `MERGE` visits the labels from the
highest down, one per cycle:

* non-root `L`: fold record L into record `parent[L]`. This is a
  read-modify-write in one cycle: sums added, box widened.
* root `L`: offer record L as a finished cluster on the output. Wait while the
  output FIFO is full.

The sweep is correct because every child has a higher label than its parent.
A label's children are all visited, and have folded themselves in, before the
label itself is visited. Records reach their root through chains of folds.
One pass is enough, with no search for roots. Clusters come out in descending
order of their smallest label.

The sweep reads the accumulator memory but never clears it. Each new label
starts its record with an `ACC_INIT` write, so no clearing pass is needed
between frames.

### Worked example (the paper's Fig. 1 pattern, 10 x 10)

Electrodes 1–19 in arrival order, with y = 0 the bottom row:

* 1–3 and 6–7 get label 1.
* 4–5 get label 2.
* 8–9 get label 3.
* 10–11 get label 4.
* Electrode 12 (6, 4) joins label 4 through its left neighbour. Its
  lower-right neighbour is 8 (label 3) and its lower neighbour is unfired, so
  roots 4 and 3 are linked: `parent[4] = 3`.
* 13–14 get label 5. Electrode 15 (3, 5) finds 10 at its lower-right:
  root(5) = 5 and root(4) = 3, so `parent[5] = 3`.
* 16–17 get label 6. 18 joins label 6 through its lower-left neighbour 17,
  and 19 follows.

The sweep folds 5 into 3 and 4 into 3. It then emits labels 6, 3, 2 and 1:
four clusters, as the colours of the paper's figure show. `cluster_reco_tb`
runs exactly this pattern and checks the two links.

## Timing

All of the following is in `clk` cycles, with `out_ready` held high:

* one cycle per electrode in `SCAN`, fired or not;
* plus one cycle per union step (at least one per merge);
* plus one cycle per label in `MERGE`, plus one more, then one cycle in `DONE`.

A frame of P electrodes with L labels and U union cycles takes `P + U + L + 1`
cycles, from its first electrode to `frame_done`. Measured on 167 x 167 random
frames (`cluster_reco_timing_tb`):

| fired | labels | union cycles | cycles / electrode |
|-------|--------|--------------|--------------------|
| 2 %   | 512    | 0            | 1.018 |
| 10 %  | 1830   | 59           | 1.068 |
| 33 %  | 1918   | 1338         | 1.117 |
| 40 %  | 1507   | 2697         | 1.151 |
| 100 % | 1      | 0            | 1.000 |

The paper reports 4.1 to 8 input periods per electrode for its implementation,
and about 5 at 20–30 % occupancy. This design is faster because its memories
have combinational read ports. That is natural for LUT RAM or registers but
would need restructuring for block RAM with registered reads (see "Sizes and
cost").

During `UNION`, `MERGE` and `DONE` the reconstruction takes no input. The
dual-clock input FIFO absorbs the ADC stream in those cycles, and it lets the
reconstruction run on a faster clock than the ADC. Running `clk` at about
1.2x `adc_clk` or more keeps up with the cases above on average. How deep the
FIFO must be depends on how many labels a frame uses, since the sweep is
`L + 1` cycles long.

## Labels and overflow

Labels 1 to `NLABELS - 1` are available per frame. The default of 8192 covers
the worst case of a 167 x 167 frame: isolated electrodes on every other row
and column, 84 x 84 = 7056 labels. So the default build never runs out. With
a smaller `NLABELS`, a fired electrode that would need a new label when none
is left is dropped. Its neighbours may still join clusters that already have
labels. `frame_overflow` is then reported with `frame_done`.

## Files

| file | content |
|------|---------|
| `rtl/cluster_pkg.sv` | record type, widths, per-electrode and merge arithmetic, accumulator opcodes |
| `rtl/hit_discriminator.sv` | `sample > threshold` |
| `rtl/async_fifo.sv` | dual-clock FIFO, Gray pointers, two-flop synchronisers, first-word fall-through |
| `rtl/label_line_buffer.sv` | one row of labels, neighbour window |
| `rtl/equiv_table.sv` | parent pointers, two read ports, alloc / link |
| `rtl/cluster_acc_table.sv` | per-label records, INIT / ADD / MERGE in one cycle |
| `rtl/cluster_reco.sv` | controller: SCAN, UNION, MERGE, DONE |
| `rtl/sync_fifo.sv` | single-clock FIFO for cluster records |
| `rtl/cluster_reco_top.sv` | the chain above |
| `tb/cluster_ref_pkg.sv` | reference model: flood fill over 8 neighbours, 64-bit sums |

Every testbench checks itself and ends by printing `TB_RESULT checks=N failures=M`:

* `hit_discriminator_tb`, `sync_fifo_tb`, `async_fifo_tb` (10 ns / 7 ns clocks),
  `label_line_buffer_tb`, `equiv_table_tb` and `cluster_acc_table_tb` each test
  one block against a model.
* `cluster_reco_tb` runs 10 x 10 frames: the Fig. 1 pattern, an exact cycle
  count, and 60 random frames with input gaps and output stalls.
* `cluster_reco_top_tb` tests the whole chain on 27 x 27 frames: a complex case
  with square, strip, diagonal, X and L shapes, a frame that exhausts a
  128-entry label table, and random frames. It counts new clusters, joins,
  merges, folds, output stalls, full input FIFO and overflow, and requires each
  at least once.
* `cluster_reco_top_full_tb` runs the top at its default size: two 167 x 167
  frames, about 3 s of simulation.
* `cluster_reco_timing_tb` produces the table above.
* `cluster_reco_strip_tb` covers the strip case: 1 x 167 frames holding X-ray
  hits of 3–4 strips.

To simulate with Verilator 5, from the folder that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb \
  +libext+.sv --top-module cluster_reco_top_tb rtl/cluster_pkg.sv tb/cluster_reco_top_tb.sv
./obj_dir/Vcluster_reco_top_tb
```

The simulator has only two states, so the memories start with random
contents. The design never reads a label or record before writing it.

## Changing it

* Frame size: `COLS` up to 256 and `ROWS` from 1 to 256 are accepted. The limit
  comes from `cluster_pkg::CW` = 8. Raise `CW` for larger frames; the sum
  widths follow from it. `ROWS = 1` gives the strip readout, where one plane of
  167 strips is a 1 x 167 frame.
* `NLABELS` should be a power of two. For a guarantee against overflow, use at
  least `ceil(COLS/2) * ceil(ROWS/2) + 1`.
* `IN_DEPTH` and `OUT_DEPTH` must be powers of two.

## Sizes and cost

At the defaults, the accumulator table is 8192 x 180 bits (1.47 Mbit), with
two asynchronous read ports and one write port. The parent table is
8192 x 13 bits, also with two read ports. The line buffer is 167 x 13 bits. On
an FPGA these asynchronous reads map to LUT RAM or registers. For block RAM,
the controller would need a pipeline stage for every table read. That would
raise the cycles per electrode towards what the paper measured, and it is not
done here. If the worst case need not be covered, a much smaller `NLABELS`
(for example 512) is enough for sparse X-ray frames.

## Where this departs from the paper or fills its gaps

* The paper lists separate sums of Qx and Qy. With a pad readout each
  electrode has one charge, so both are the same sum and appear once, as `sum_q`.
* The paper does not say which charge is summed. Here it is the raw ADC value,
  with no threshold or pedestal subtracted.
* The paper cuts each sample to one bit "for saving up chip resources". Here
  the line buffer stores each checked electrode's label (13 bits), not its
  fired bit. Labels are what a join or a merge needs, and the 12-bit charge
  still travels with each electrode into the sums.
* The threshold test is strict (`>`), following "larger than the noise
  threshold". The threshold is one run-time value for all electrodes.
* The paper does not say which neighbour's cluster is taken when several are
  fired, how the merge marks are stored, or how the re-merge is done. The
  parent-pointer table and the single downward sweep are this design's choices.
* The paper asks for a "large-capacity FIFO" and a "frequency FIFO" in front.
  These are read as one dual-clock FIFO of 1024 words.
* The paper does not describe the cluster FIFO (64 records here), the reset
  (asynchronous, active low), the handshakes (valid/ready), the frame format
  (counted raster order, bottom row first, as Fig. 1 numbers the electrodes)
  or the label budget (8192).
* The schedule of one cycle per electrode is not the paper's. Its module takes
  4–8 input periods per electrode.
* The detector, the front-end electronics with its ADCs, and the link that
  reads the records out are not part of this RTL. They meet it at the `adc_*`
  and `out_*` ports.
