# Event-by-event object categorisation and detection for event cameras (PCA-RECT / vPCA-RECT hardware)

An event camera does not send frames. Each pixel reports, on its own, an
event `(x, y, t)` when its log intensity changes. This RTL classifies the
scene and locates one target object from that stream, **one event at a
time**. It has no frame buffer and no multipliers in the per-event path.
Every event that survives noise filtering gives, a few tens of clock
cycles later:

* a **dictionary word**: the leaf of a k-d tree that the event's local
  activity pattern falls into;
* a **class decision**: a linear SVM score over the last S = 100 000
  events, kept up to date by one addition and one subtraction per event;
* once every S events, a **location**: the mean position of the most
  active pixels among the events whose word is one of the object's
  "landmark" words.

The design follows the FPGA architecture of the PCA-RECT paper (Ramesh,
Ussa, Della Vedova, Yang, Orchard). In its FPGA version (vPCA-RECT) the PCA
projection is dropped: the k-d tree itself picks the few descriptor elements
that matter. The sizes used here are the ones that paper reports for its
in-house N-SOD task: a 240 x 180 DAVIS sensor, 5000-event count window,
dictionary of 950 words, 4 classes, 10^5-event decision windows and
20 landmarks. Where the paper leaves something open, the choice made here
is listed in "Departures and choices" below.

## The main idea: never build the descriptor

The feature of an event is a patch of cell counts around the event's
position. The counts are the number of recent events per 2 x 2-pixel cell.
In software the patch would be copied out, normalised and projected with
PCA, and the result then searched in a k-d tree. Here the patch is never
copied. The count matrix is **frozen** while the tree is walked. The tree
receives only the address of the patch centre. Each tree node names one
patch element, the split dimension, and only that element is read from the
count-matrix RAM. A path of D nodes therefore costs D single-word reads and
D comparisons. There is no distance computation and no backtracking. The
tree's unused dimensions are never read, which is the "virtual PCA".

Because the matrix is frozen during a walk, new events must wait. A small
address buffer sits between the sub-sampler and the count matrix for that.
It releases the next event only once the tree has delivered the current
leaf and the back ends have taken it.

## Pipeline

```
 camera event (x,y,t)
        |
  event_filter ----- refractory (own pixel quiet > 1 ms) and
        |            nearest-neighbour (a neighbour fired < 5 ms ago)
  subsample  ------- {y/2+2, x/2+2} -> 14-bit cell address
        |
  addr buffer ------ 16-deep sync_fifo, holds addresses while the matrix is locked
        |
  count_matrix ----- +1 new cell, -1 cell leaving the 5000-event window; then lock
        |  ^ read port (one descriptor element per node)
  kdtree_search <--> kd_node_rom (1899 x 49-bit nodes)
        |
   leaf index --------------------------+
        |                               |
  svm_classifier                 landmark_detector (950-bit map)
  running sums over last S              |
  -> class_id, class_sums         heat_map (2^16 counts, running maximum)
                                        |
                                  mean_calc (FIFO of max pixels, 2 dividers)
                                        -> det_x, det_y every S events
```

`pcarect_top` wires these together and counts the S-event windows.
Shared sizes and types are in `pcarect_pkg`.

## Event filtering (`event_filter`)

One memory holds, for every pixel, the time of its last event and a valid
bit. It has 2^16 words, addressed by `{y, x}`. For each incoming event nine
words are read, one per cycle: the event's own pixel and its eight
neighbours.

* **Refractory filter.** The event is dropped if its own pixel fired at most
  `THETA_REF` = 1000 µs ago.
* **Noise filter.** A surviving event is kept only if some neighbour fired
  less than `THETA_NOISE` = 5000 µs ago.

Every raw event then writes its own time stamp, whether it was kept or not.
The refractory rule compares against all earlier events at the pixel.
Neighbours outside the 240 x 180 array count as silent. Timestamps are
32-bit microseconds, and wrap-around is not handled. Polarity is ignored.
A decision takes 12 cycles from acceptance.

## The cell-count matrix and its window (`subsample`, `count_matrix`)

`subsample` halves each 8-bit coordinate, adds the pad offset 2 and
concatenates the two 7-bit results into `{y_sub, x_sub}`. One cell is one
2 x 2 pixel block. Counting events per cell is therefore the same as the
2 x 2 equal-weight pooling of the per-pixel counts, so no separate
convolution is needed.

The RAM has 2^14 words of 13 bits (log2 of the 5000-event window). The
sensor uses cells 2..121 (x) and 2..91 (y). The arithmetic wraps modulo 128,
so a patch that reaches past the top or left edge reads cells 126-127.
Those cells are never written, so they read as the zero padding.

`count_matrix` keeps a 5000-entry FIFO of the cell addresses of the last
5000 filtered events. An update first pops the oldest address and
decrements its cell, but only once the window is full. It then increments
the new cell and pushes its address. Each step is a two-cycle
read-modify-write. `upd_done` comes 2 cycles after acceptance, or 4 with a
full window. The matrix then locks until `release_i`.

## The k-d tree walk (`kd_node_rom`, `kdtree_search`)

Node word, 49 bits, most significant field first:

| field | type | left node | right node | index output | threshold | desc. index |
|---|---|---|---|---|---|---|
| bits | 1 | 12 | 12 | 12 | 6 | 6 |
| range | 48 | 47:36 | 35:24 | 23:12 | 11:6 | 5:0 |

`type = 1` marks a leaf, whose `index output` is the dictionary word. The
root is node 0. The descriptor is the 7 x 7 cell patch around the centre
cell. Element `d` is at row `d / 7 - 3` and column `d % 7 - 3`.

Each internal node takes three cycles:

1. **FETCH**: the node address goes to the ROM.
2. **TEST**: the word arrives. A leaf ends the walk. Otherwise the address
   of element `desc. index` goes to the count matrix.
3. **CMP**: the count arrives. If `count <= threshold` the walk goes to
   `left node`, otherwise to `right node`.

With D comparisons on the path, the leaf is valid 3·D + 3 cycles after
`start`. It is valid 3·D + 5 cycles after the address leaves the buffer, or
3·D + 7 when the window is full. A 950-leaf balanced tree has D ≤ 10, so
the worst case is 37 cycles, 370 ns at 100 MHz. The paper measured 550 ns
per event for its worst tree path. The paper calls its 950-word tree
"10 layers"; a binary tree with 950 leaves needs at least 10 comparison
levels on its deepest path, which is what the latency above assumes.

Split values are only 6 bits, so a cell count above 63 always goes right.

## Sliding-window linear classifier (`svm_classifier`)

The SVM score of a window is W·h. Here h is the histogram of dictionary
words over the last S events. Moving the window by one event changes h by
+1 at the new word and -1 at the word that leaves. The classifier keeps the
four class scores as running sums:

* add the weight row of the new word (4 x 16-bit signed, all classes in
  parallel);
* push the word into an S-deep FIFO;
* once the FIFO is full, subtract the row of the word popped from it.

`class_id` is the largest sum, with the lower class winning a tie. The
result is valid every event, 3 cycles after acceptance or 4 with a full
FIFO. The sums are 34 bits wide, enough for 10^5 x 16-bit weights. No bias
term is added.

## Detection: landmarks, heat map, mean (`landmark_detector`, `heat_map`, `mean_calc`)

For each window of S events (counted in the top; `class_flag` marks the
last one):

1. `landmark_detector` looks the word up in a 1-bit-per-word map of the
   object's landmark words, which is loaded offline. It forwards
   `{hit, {y, x}, last}`.
2. `heat_map` increments `D(y, x)` for landmark events. The map has 2^16
   words of 17 bits. It also keeps the running maximum `threshold`:
   * if the new count exceeds it, threshold grows by one and the mean FIFO
     is emptied;
   * if the count equals the (possibly new) threshold, the pixel is pushed.

   The FIFO therefore always holds exactly the pixels at the current
   maximum. A pixel that reaches the maximum twice, at two different levels,
   is pushed once per level; the reset in between removes the old entry.
3. At the window's last event, `mean_calc` drains the FIFO. It counts the
   entries and sums x and y, then divides with two sequential restoring
   dividers (19-bit, 20 cycles). The result is `det_x`, `det_y`, or
   `det_valid = 0` if no landmark was seen.
4. `heat_map` then clears itself with a 65 536-cycle sweep. Its input stalls
   during the sweep, and the stall backs up through the tree into the
   address buffer and the filter.

The mean FIFO holds 1024 entries. Further ties are dropped and flagged with
`det_overflow`.

## Top-level interface (`pcarect_top`)

| port | dir | meaning |
|---|---|---|
| `ev_valid`, `ev_ready`, `ev` | in/out/in | camera event, `event_t` = {x 8, y 8, t 32} |
| `node_ld_*` | in | write one `kd_node_t` word into the node ROM |
| `w_ld_*` | in | write one weight row (4 x 16-bit) of one dictionary word |
| `lm_ld_*` | in | write one landmark bit |
| `init_busy` | out | memories are being cleared after reset (65 536 cycles) |
| `leaf_valid`, `leaf_index` | out | dictionary word of the current event |
| `class_valid`, `class_id`, `class_sums`, `class_flag` | out | per-event scores, with a flag at each window end |
| `det_done`, `det_valid`, `det_x`, `det_y`, `det_overflow` | out | per-window object location |
| `n_ref_drop`, `n_noise_drop`, `n_buf_stall` | out | filter drops, cycles the filter was stalled by a full buffer |
| `window_full`, `class_fifo_full` | out | the 5000- and 10^5-event windows are full |

Load the three tables after reset and before sending events. They come
from offline training, which this RTL does not include. All 950 weight
rows and landmark bits must be written, because nothing else initialises
them. `ev_ready` stays low until the filter's clear sweep is over.

The filter decides one event in about 12 cycles. The tree path takes
3·D + 5 to 3·D + 7 cycles plus the hand-over, so at D = 10 the pipeline
sustains about one filtered event per 40 cycles, or 2.5 M events/s at
100 MHz.

## Memory budget at the default sizes

| memory | words x bits | bits |
|---|---|---|
| filter time stamps | 65 536 x 33 | 2.16 M |
| class index FIFO | 100 000 x 12 | 1.20 M |
| heat map | 65 536 x 17 | 1.11 M |
| count matrix | 16 384 x 13 | 0.21 M |
| node ROM | 1899 x 49 | 0.09 M |
| event window FIFO | 5000 x 14 | 0.07 M |
| SVM weights | 950 x 64 | 0.06 M |
| mean FIFO, landmarks, buffer | | 0.02 M |

The total is about 4.9 Mbit. The paper does not say where its filtering
runs. Without the on-chip filter memory the total is about 2.7 Mbit.

## Departures and choices

Taken from the paper:
* filter equations and thresholds (5 ms, 1 ms);
* 8-bit coordinates, the shift-and-add sub-sampler, the 14-bit address;
* log(s)-wide count RAM and the 5000-event FIFO with pop-before-push;
* the locking buffer;
* the 49-bit node word and its field widths;
* the three-step tree cycle that reads only the split dimension;
* no normalisation;
* the add/subtract classifier with an S-deep index FIFO;
* the landmark bit memory, the heat map and the threshold/FIFO-reset rule
  of the detection algorithm;
* the mean by hardware division.

Choices of this design:
* **7 x 7 patch instead of 9 x 9.** The paper's software uses a 9 x 9
  patch, but its hardware node has a 6-bit descriptor index, which can
  name at most 64 elements. 7 x 7 (49 elements) is the nearest square
  patch that fits.
* **Pad offset 2 with 7-bit wrap** gives the zero padding; no extra border
  memory is needed.
* **Field order** in the node word (left-most field = MSB), leaf encoding
  `type = 1`, root at node 0, and **`<=` goes left**.
* **Tables are loaded through ports.** The paper's ROMs are "previously
  initialised" with trained data that is not available.
* **Filter placement.** The filter is built on-chip, with one time-stamp
  memory for both filters, sequential neighbour reads and timestamps of all
  raw events.
* **Window counting.** Detection windows are consecutive blocks of S
  events. The classifier's sums are sliding. Both are counted from reset.
* **Heat-map clearing** is a sweep that stalls the pipeline for 65 536
  cycles per window.
* **Sizes and formats** of the buffer (16) and mean FIFO (1024), 16-bit
  signed weights, no SVM bias, argmax with the lowest class winning ties,
  truncating division.
* **Memory depths.** Heat map and filter memories are 2^16 deep, addressed
  by the concatenated `{y, x}`, rather than 240 x 180.

## Verification

Every module has a self-checking testbench in `tb/` that compares against
a model written independently in the testbench:

| testbench | what it checks |
|---|---|
| `tb_sync_fifo` | random push/pop/clear traffic, including push with clear and push+pop when full, against a queue |
| `tb_subsample` | all 65 536 inputs |
| `tb_event_filter` | random bursts at the sensor corner vs. a filter model; passes, both drop kinds, back-pressure |
| `tb_count_matrix` | counts after each update vs. a window model (s = 12), update latency, locking |
| `tb_kd_node_rom` | load and read-back of random node words, field order |
| `tb_kdtree_search` | random unbalanced tree, random counts, wrap-around centres; leaf and 3·D + 3 latency |
| `tb_svm_classifier` | running sums vs. explicit window sums (S = 6), argmax, flag, latency |
| `tb_landmark_detector` | hit bit, `{y, x}` address, order under back-pressure |
| `tb_heat_map` | FIFO reset/push commands vs. the detection algorithm over three windows, clearing |
| `tb_mean_calc` | mean of the FIFO contents incl. resets, empty FIFO and overflow (depth 8) |
| `tb_seq_divider` | random and corner-case division, latency |
| `tb_pcarect_top` | **whole design at its default sizes** (see below) |

`tb_pcarect_top` runs with no parameter overrides. It loads a random
950-leaf tree (10 comparisons deep), random weights and 20 landmarks, then
feeds a moving blob of events plus scattered noise until 100 600 events
have passed the filters.

A complete reference model repeats every stage. It checks for every event:
* the leaf index;
* the four class sums, `class_id` and `class_flag`;
* the buffer-to-leaf latency, which must equal 3·D + 5 (+2) and never
  exceed 55 cycles.

It also checks the detected location at the window end and the drop
counters. It fails unless each mechanism occurs at least once:
* refractory drops and noise drops;
* address-buffer stalls;
* count-window pops;
* classifier subtraction;
* new heat-map maxima (FIFO resets) and ties;
* a window end with a detection;
* the heat-map clear stall.

The run takes about 3.8 M cycles, a few seconds with Verilator.

Run any testbench with Verilator 5 from the repository root, for example:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -y rtl +libext+.sv \
    rtl/pcarect_pkg.sv tb/tb_pcarect_top.sv --top-module tb_pcarect_top -o sim
./obj_dir/sim
```

Each testbench prints `TB_RESULT checks=N failures=M` and stops; a
watchdog ends a hung run with a failure.

What is not verified: behaviour with a real trained tree, real weights or
real camera data. None of these is available, so the tests use random
tables of the right shape. Detection accuracy and classification accuracy
are therefore not reproduced. Only bit-exact agreement with the algorithm
is shown.

## Changing sizes

The defaults live in `pcarect_pkg`: window size, patch, dictionary and node
counts, classes, weight width, S, mean FIFO depth and thresholds. Most
modules also take them as parameters, which the unit testbenches override.

Limits:
* A patch larger than 8 x 8 needs a wider descriptor index (`DIM_W`).
* More than 4096 nodes or words needs wider pointers (`PTR_W`, `IDX_W`).
* Another sensor size needs `COORD_W` and the sub-sampler offsets reviewed.

## Not included

* The event camera itself.
* The host processor and camera interface of the original FPGA board.
* The offline learning:
  * k-d tree construction and dimension selection;
  * dictionary clustering;
  * SVM training;
  * landmark selection by the balanced match ratio.

These enter the design only as the event port and the three table-load
ports.
