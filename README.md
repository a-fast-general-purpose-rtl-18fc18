# Sliding-window pixel clustering in linear time

A pixel detector delivers a list of hit pixels per module. To turn it into
particle positions, touching hits must be grouped into clusters and each
cluster summarised, for example by its charge-weighted centre. Done in
software, grouping means comparing hits with each other, so the time grows
faster than the number of hits. That is a problem when the occupancy is high.

This RTL implements a hardware clustering scheme in which the time is linear
in the number of hits: **2 clocks per hit plus 2 clocks per cluster**. The
scheme was published by A. Annovi and M. Beretta ("A Fast General-Purpose
Clustering Algorithm Based on FPGAs for High-Throughput Data Processing") as
the pixel clustering stage of the ATLAS Fast Tracker. This is an independent
RTL version of it. The published description covers the cell, the grid, the
control sequence and the block diagram. The interfaces, encodings and flow
control here are this design's own choices; they are listed at the end.

The main idea is that a 2-D grid of small logic cells mirrors the pixel
matrix. Hits are written into the grid. The grouping is then done by the grid
itself, which spreads a "selected" flag from one seed hit to every hit it
touches, one neighbour step per clock. No loop over hit pairs is needed.
While the flag spreads, the selected hits are read out one per clock. That
readout is one cluster. A second, separate stage computes each cluster's
centre. That stage can be replaced without touching the grouping logic.

## Data flow

```
 32-bit hit words        +--------------------+     +---------------------------------------+
 (one per clock) ------->| module_dispatcher  |---->| clustering_engine 0                   |--+
                         | whole modules      |     |  hit_fifo -> core_logic -> average_   |  |  +----------------+
                         | alternate between  |     |             (cluster_fsm   calculator |  +->| cluster_merger |--> clusters
                         | the windows        |---->|              + processing_grid)       |  +->| round robin    |
                         +--------------------+     |  tot_ram (ToT per grid cell)          |  |  +----------------+
                                                    +---------------------------------------+  |
                                                    | clustering_engine 1  (same)           |--+
                                                    +---------------------------------------+
```

One engine is one sliding window, the block diagram of the algorithm. The
input FIFO holds the hits of a module. The core regroups them cluster by
cluster: the FSM steers a 328 x 8 grid of cells. The ToT RAM keeps each hit's
time over threshold (ToT, a measure of its charge) while the hit sits in the
grid. The average calculator turns each cluster into a centre. Two engines
run side by side, because one window does not quite follow the 40 MHz hit
rate of an input link (see *Throughput*).

## The clustering cell (`cluster_cell`)

Each cell stands for one pixel. It has three states held in two flip-flops:

| state    | `hit` | `selected` | meaning                                   |
|----------|-------|------------|-------------------------------------------|
| EMPTY    | 0     | 0          | no hit, or the hit was already read out   |
| HIT      | 1     | 0          | hit waiting to be clustered               |
| SELECTED | 1     | 1          | hit belongs to the cluster being read out |

The state changes as follows:

* **write**: `row_sel AND col_sel`, from the grid's row and column decoders. EMPTY becomes HIT.
* **seed**: the cell won the "first HIT" priority chain while the FSM selects a seed. HIT becomes SELECTED.
* **join**: the cell is HIT and the cluster definition holds for its 8 neighbours' SELECTED flags. HIT becomes SELECTED on the next clock.
* **readout**: the cell won the "first SELECTED" chain while the FSM reads. The cell becomes EMPTY.

The cluster definition is the function `joins_cluster()` in `clus_pkg`. By
default, contact along a side or a corner joins a cluster. With
`DIAGONAL = 0` only sides count. The point of keeping it in one function is
that it can be redefined without touching the rest of the design.

## Why reading while spreading is safe

Spreading and readout run in the same clocks. One might fear that the readout
empties the set of SELECTED cells before the flag reaches the whole cluster.
It cannot. A cell turns SELECTED at some clock *t*. From that clock on, its HIT
neighbours see it and turn SELECTED at *t + 1*. The earliest the cell itself
can be read is clock *t*, and after the read its neighbours are SELECTED in
the next clock anyway. So whenever a clock finds **no** SELECTED cell, every
hit connected to the seed has been read. That clock is therefore the exact
end of the cluster, and the FSM needs no counter or extra pass. The only
overhead is the one clock that selects the seed.

## Priority order (`priority_chain`)

The first hit is found in the readout order of the pixel module:
the **column index is most significant, the row index least significant**.
So the winner is the lowest row of the lowest column that holds a candidate.
The grid has two identical chains:

* one over HIT cells that are not SELECTED, which finds the seed and the column the window aligns to;
* one over SELECTED cells, which picks the next cell to read.

In each column a chain from row 0 upward drives the winning row onto that
column's 9-bit row-address bus. A chain over the columns then picks the first
column with a candidate. The chain outputs are combinational. In the FPGA
study behind the published design, this chain was the critical path and set
the clock period.

## The sliding window (`processing_grid`, `cluster_fsm`)

A grid as large as the module (328 x 144 cells) would be far too large. Yet
only hits close to the current seed matter. The readout of the ATLAS module
is sorted by *double column* (pairs of columns), and scrambled only inside a
double column. So a window of 328 rows x 8 columns is enough. The 328 rows
are the full module height: two front-end chips of 164 rows each. The 8
columns are four double columns, which covers clusters of up to 5 columns
after alignment.

The window slides along the module without moving any data:

* **Circular columns.** Module column *m* is always stored in physical column *m mod 8*.
* **Relabelling.** To slide the window, the FSM only changes `base_col`, the register that holds the window's first module column. The chains start their column scan at physical column `base_col mod 8` and wrap around.
* **The seam.** Physical columns `base_col mod 8` and the one before it hold module columns 7 apart. The grid therefore cuts the neighbour links between them (`link_left`), so no cluster can grow across the seam.
* **Why it is safe.** Every hit still in the grid lies inside the new window. The window moves only forward, to the first remaining hit. So two live hits never share a physical cell.

**Alignment.** The window starts at the double column of the first hit. When
that hit sits in the second (odd) column of a pair, the window starts one
column to its left. This leaves room for the scrambled hits of that double
column.

**Loading.** Hits are taken from the FIFO head while their column lies in
`base_col .. base_col+7`. Loading stops at the first hit beyond the window.
That hit stays in the FIFO and is loaded after a later slide. A cluster
longer than 8 columns is therefore cut into pieces, as in the published
design.

## Control sequence and clock budget (`cluster_fsm`)

For every cluster the FSM does this:

1. **align**: set `base_col` to the double column of the first hit left in the grid, or of the FIFO head if the grid is empty.
2. **load**: one hit per clock into the grid and the ToT RAM.
3. **select**: mark the first HIT cell SELECTED.
4. **read out**: read one SELECTED cell per clock until none is left.
5. Start over.

The FSM has three states (`S_ALIGN`, `S_LOAD`, `S_READ`). Two steps are merged
into clocks that would otherwise be idle:

* The seed is selected in the clock that finds nothing more to load.
* The alignment for the next cluster is done in the clock that finds no SELECTED cell left.

So a cluster of *h* hits costs *h* load clocks, one select clock, *h* readout
clocks and one align clock. A module with *n* hits in *k* clusters takes
**2n + 2k clocks**, plus one clock for the very first alignment after idle.
The core testbench checks this count exactly. When the FIFO runs empty before
the module's last hit has arrived, the FSM waits in `S_LOAD`.

Worked example, one hit at column 13, row 5:

* clock 0: align, `base_col = 12`
* clock 1: load
* clock 2: seed
* clock 3: read
* clock 4: no SELECTED cell left, so the cluster ends

`out_valid` is high after clock 3, and `out_clus_end` with `out_mod_end` after clock 4.

`hold` freezes the FSM. There is then no load, seed or readout. The spreading
of the flag may continue, which is harmless. The engine raises `hold` when its
output FIFO is nearly full.

## ToT store and cluster centre (`tot_ram`, `average_calculator`)

The grid holds only flags. The ToT of each hit is written into a
328 x 8 x 8-bit RAM (20,992 bits) at the hit's physical cell when the hit is
loaded. It is read at the same address when the cell is read out. The RAM
output arrives one clock later, together with the core's registered
(row, column) output.

The average calculator adds up the following for each cluster:

* the number of hits;
* the sums of the columns and of the rows;
* the sum of the ToTs;
* the ToT-weighted sums of the columns and of the rows.

On the cluster-end pulse it divides, in one clock, and registers the result:

* `x = (sum ToT*col << 4) / sum ToT`, along z, format 8.4;
* `y = (sum ToT*row << 4) / sum ToT`, along r-phi, format 9.4.

The results are truncated. With `USE_TOT = 0`, or when all the ToTs of a
cluster are 0, the plain average of the positions is used instead. The
published design evaluates both options: the plain average and the ToT
weighting.

## Throughput: two windows per link

Per hit, one window needs 2 clocks plus 2 per cluster. For 2-hit clusters
that is 3 clocks per hit. The published FPGA study reports a 15 ns clock, so
one window needs 45 ns per hit. That is slower than the 25 ns at which the
link delivers hits. Two windows, each clustering a different module, bring
this to 22.5 ns per hit.

`module_dispatcher` sends each whole module to the windows in turn. A module
is the words up to and including one with the `last` bit set.
`cluster_merger` takes finished clusters from both windows by round robin and
tags each one with its window number (`out_win`). Clusters of one module keep
their order. Clusters of two modules may interleave. Each module's last
cluster carries `mod_end`.

## Interfaces

Input word, `in_word[31:0]`, accepted when `in_valid && in_ready`:

| bits    | field                                 |
|---------|---------------------------------------|
| [31]    | `last`: last hit of the pixel module  |
| [30:25] | zero                                  |
| [24:17] | column, 0..143 (z)                    |
| [16:8]  | row, 0..327 (r-phi)                   |
| [7:0]   | ToT                                   |

Within a module, hits must arrive in the detector's order: double columns in
increasing order, any order inside a double column. A module must hold at
least one hit.

Output `out_cluster` (`cluster_t`), accepted when `out_valid && out_ready`:

| field     | width | meaning                               |
|-----------|-------|---------------------------------------|
| `mod_end` | 1     | last cluster of its module            |
| `nhits`   | 12    | hits in the cluster                   |
| `x`       | 12    | centre column, 4 fractional bits      |
| `y`       | 13    | centre row, 4 fractional bits         |

Reset is synchronous and active high. It empties the grid, the FIFOs and the FSMs.

## Parameters

| parameter    | default | where                        | note                                   |
|--------------|---------|------------------------------|----------------------------------------|
| `ROWS`       | 328     | grid, chains, FSM, ToT RAM   | published window height                |
| `COLS`       | 8       | same                         | published window width                 |
| `N_WIN`      | 2       | top, dispatcher, merger      | published: two windows per link        |
| `DIAGONAL`   | 1       | cell, grid                   | 1 = side or corner contact             |
| `USE_TOT`    | 1       | average calculator           | 1 = ToT-weighted centre                |
| `HIT_DEPTH`  | 256     | input FIFO of each window    | own choice                             |
| `CLUS_DEPTH` | 16      | output FIFO of each window    | own choice                             |
| `FRAC_BITS`  | 4       | `clus_pkg`                   | own choice                             |

## What follows the published design, and what is this design's own

These parts follow the published design:

* the three-state cell with two flip-flops;
* the write decoding by row AND column;
* 8-neighbour spreading of the SELECTED flag, with a replaceable cluster definition;
* two identical priority chains in column-major order with a 9-bit row bus;
* the 328 x 8 sliding window aligned to the double column of the first hit;
* loading until the first hit beyond the window;
* the 2-clocks-per-hit plus 2-clocks-per-cluster budget;
* the 328 x 8 x 8-bit ToT RAM written during load and read during readout;
* the ToT-weighted centre, with the plain average as an option;
* two windows per input link.

These parts are this design's own:

* The circular column storage with the cut seam. This is how the "virtual" alignment is realised.
* The merging of the align and select steps into otherwise idle clocks.
* The even/odd pairing of columns into double columns.
* The input word bit layout and the `last` marker. The published text says only that a 32-bit word carries the row, column and ToT.
* The FIFO depths.
* The output back-pressure (`hold`).
* The fixed-point format and the single-clock divider.
* The strict module rotation in the dispatcher and the round-robin merger.

The published offline-style ToT algorithm is not specified beyond "ToT
weighted average", so the plain weighted mean is used.

Not covered: the optical link receiver that delivers the words. FPGA timing
and area cannot be judged from simulation. The published study reports the
328 x 8 window at about 15 to 17 ns on a Virtex-5.

## Files

`rtl/`: one module or package per file.

* `clus_pkg.sv`: types, word format, cluster definition.
* `cluster_cell.sv`, `priority_chain.sv`, `processing_grid.sv`: the grid.
* `cluster_fsm.sv`, `core_logic.sv`: the FSM and the core.
* `hit_fifo.sv`, `tot_ram.sv`, `average_calculator.sv`, `clustering_engine.sv`: the rest of one window.
* `module_dispatcher.sv`, `cluster_merger.sv`, `clustering_top.sv`: the two-window device.

`tb/`: one self-checking testbench per module (`tb_<module>.sv`), plus
`tb_ref_pkg.sv`. That package holds a random module generator (clusters of up
to 3 x 5 pixels, some 10 columns long, hits in detector order) and a plain
software model of the sliding-window clustering, using a breadth-first flood
fill. The models compare each cluster through order-independent sums, because
the order of hits inside a cluster is not defined.

`tb_clustering_top` runs the whole device at its default size: six full
328 x 144 modules, about 3,300 hits and 1,200 clusters. It checks every
centre and counts each mechanism at least once:

* window realignment;
* loads stopped by a hit beyond the window;
* clusters cut at the window length;
* input stall;
* output back-pressure;
* both windows busy at once;
* merger arbitration.

`tb_link_rate` tests throughput against one input link. It also runs at the
default size. The link rate is 40 MHz. Against a 15 ns clock that is 0.6
words per clock, so the test offers 3 words in every 5 clocks. The data are
eight full modules of isolated 2-hit clusters, the case behind the
3-clocks-per-hit figure. The test checks three things:

* the link is never stalled;
* every centre is right;
* the device finishes within the backlog time of the last module.

It then preloads one module and checks that a single window takes exactly
2n + 2k + 1 clocks. That is 3.00 clocks per hit for these data.

Every testbench prints `TB_RESULT checks=N failures=M`.

Simulating with Verilator 5, for example the end-to-end test:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/clus_pkg.sv tb/tb_ref_pkg.sv $(ls rtl/*.sv | grep -v clus_pkg) tb/tb_clustering_top.sv \
    --top-module tb_clustering_top -Mdir obj_top -j 8
./obj_top/Vtb_clustering_top
```

Building takes a few minutes at full size; the run itself takes seconds. For
the other testbenches, replace the top module and the testbench file. The
testbenches use no randomisation constraints, only `$urandom`.
