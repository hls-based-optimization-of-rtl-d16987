# Tau-trigger front end: streaming top-16 seed sorter and neighbourhood preselection

This RTL implements the first two steps of a hadronic-tau trigger for LHC
event data, following the architecture published in "HLS-based Optimization
of Tau Triggering Algorithm for LHC: a case study" (Cherezova, Mihhailov,
Devadze, Jutman, 2022). That work was done in Vivado HLS. This is an
independent SystemVerilog rendering of the same architecture. Where the
publication leaves a detail open, this design makes its own choice, and
every such choice is listed below.

An event arrives as a stream of 36 detector regions, one per clock. The
front end has three jobs:

1. Buffer the whole event.
2. While the event is still streaming in, find the 16 seeds: the
   highest-pT objects among 144 seed candidates (4 per region).
3. For every seed, gather the data of the 2x2 block of regions around it
   (its *neighbourhood*) into candidate arrays for the later steps.

Two ideas carry the design:

* **Sorting.** The 4 candidates of a region arrive already sorted, and
  only the best 16 of 144 are needed. A full sorter is therefore
  unnecessary. A chain of 8 small merge cells does the job. Each cell
  keeps two values and passes the rest on, and the 16 seeds are ready 45
  cycles after the first region.
* **Neighbourhoods.** A neighbourhood is described by one even row, one
  odd row, one even column and one odd column, not by four arbitrary
  region numbers. The buffer is laid out to match. Reading a
  neighbourhood then needs only 4-to-1 and 2-to-1 multiplexers instead of
  four 36-to-1 multiplexers.

## Event format and the region grid

| item | value |
|---|---|
| regions per event | 36, arranged as 9 rows x 4 columns; id = 4*row + col |
| tracks per region | 22 charged, 13 photon, 10 neutral (`region_t`, 2160 bits) |
| track | `track_t`: pt[15:0], eta[7:0] (signed), phi[7:0] (signed), aux[15:0] |
| seed candidates | first 4 charged tracks of every region, 36 x 4 = 144 |
| seed | `seed_t`: 8-bit index (4*region + slot) plus the track |
| seeds kept | 16, in descending pT |

Rows wrap around: the grid is an unrolled cylinder, so row 8 neighbours
row 0, and region 0 touches regions 32 and 33. Columns do not wrap.

Only `pt` takes part in sorting. `eta` and `phi` are the track's position
inside its region and only their signs are used (see *Neighbourhoods*).
`aux` stands for the remaining fields of a candidate and is carried
unchanged. The publication says a candidate has six members but names
only pT. The other fields and all widths except pT (16 bits) and the
index (8 bits) are this design's.

All types and constants are in `rtl/tau_pkg.sv`.

## Seed sorting: the two-register insertion cell

`spatial_sorter` is an input register followed by 8 `sort_cell2` cells in
a chain. Each cell owns two consecutive seed positions: cell k holds seeds
2k and 2k+1.

```
 region r (4 sorted candidates)
      |
   [in reg] -> cell 0 -> cell 1 -> ... -> cell 7 -> (dropped)
               REG0/1    REG0/1           REG0/1
                 |         |                |
               Seeds[0,1] Seeds[2,3] ...  Seeds[14,15]
```

### What one cell does in one cycle

A cell holds REG0 >= REG1 and receives IN[0..3], which are also sorted
(largest first). That is two sorted lists of 6 values in total. Their
merge gives positions out1..out6:

* out1 and out2 go back into REG0 and REG1;
* out3..out6 leave as OUT[0..3], still sorted, and become the next
  cell's IN.

Nothing is lost and nothing is duplicated. Cell k therefore keeps the two
largest values it has ever been offered. Cell k+1 is offered everything
except cell k's final pair. By induction the chain ends the event holding
the 16 largest of the 144 candidates, in order.

The merge is one level of logic, with no iterative insertion. Eight
comparators form a comparison matrix `ge[i][j] = REG[i] >= IN[j]`.

* The output position of REG[i] is i plus the number of IN[j] strictly
  larger than it.
* The output position of IN[j] is j plus the number of REG[i] larger or
  equal.

Each output is a one-hot OR of the values whose position equals its own.
The structure of the sorted inputs limits which values can reach each
output:

* out1 can only be REG0 or IN[0];
* out2 can be REG0, REG1, IN[0] or IN[1];
* the other outputs follow the same pattern.

The publication states the first two of these rules. The comparison
matrix derives all six.

**Ties.** A register wins against an input of equal pT, and REG0 wins
against REG1. The publication's rules use strict comparisons and leave
ties open. With this rule the set and order of the pT values is always
the exact top 16. Among equal pT values, however, the order is the
chain's own: it is not strictly arrival order.

### Event framing

The sorter needs to know where events begin and end:

* `in_first` marks region 0. For that beat a cell treats REG0/REG1 as
  empty (pT 0), so a new event can follow the previous one with no gap.
* `in_last` marks region 35. When a cell has absorbed it, the cell's pair
  is final. On the next edge the pair is copied into the sorter's `seeds`
  output array.
* Because the cells finish one after another, the array fills cell by
  cell. `seeds_valid` pulses when the last cell's pair is in.

The publication does not describe this framing; it is this design's own.

### Latency: 36 + 1 + 8 = 45

Count the clock edge that samples region 0 as edge 1:

| edge | what happens |
|---|---|
| 1 | region 0 enters the input register |
| 2 | region 0 reaches cell 0 ("second cycle") |
| 36 | region 35 enters the input register |
| 37 .. 44 | region 35 passes cells 0 .. 7 |
| 45 | last cell's pair copied, `seeds_valid` rises |

This matches the publication's 45-cycle sorting latency for the modified
sorter. That is 8 cycles faster than the 53 cycles of its one-register
precursor (16 cells) and well inside the 56-cycle budget set by its
buffering. The testbenches check the 45 exactly.

## Neighbourhoods on the grid

A seed's neighbourhood is a 2x2 block: the seed's own region plus:

* the next or previous row, depending on the sign of the seed's local
  `phi` (>= 0 selects the next row; the row index wraps);
* the next or previous column, depending on the sign of local `eta`
  (>= 0 selects the next column; at the outer columns the block always
  extends inwards).

The publication says only that the three extra regions depend on where
the seed lies in its region. This sign rule is this design's choice, and
it is isolated in `region_locator`.

### Row/column form

Two adjacent rows are always one even and one odd row, and two adjacent
columns one even and one odd column. `region_locator` therefore
describes the block as an `nbhd_t`:

| field | meaning |
|---|---|
| `even_row` | 0..3: grid row 0, 2, 4 or 6 |
| `odd_row` | 0..3: grid row 1, 3, 5 or 7 |
| `last_used` | grid row 8 is part of the block |
| `last_is_odd` | row 8 replaces the odd row (block 8/0) rather than the even row (block 7/8) |
| `even_col` | 0..1: column 0 or 2 |
| `odd_col` | 0..1: column 1 or 3 |

Row 8 is the awkward case: 9 rows cannot be split evenly into pairs. Row
8 touches row 7 (odd) and, through the wrap, row 0 (even). It therefore
stands in for whichever parity its partner lacks.

**Parity naming.** Even and odd here follow the grid index (row 0 is
even), which is also what the storage layout uses. The publication's grid
figure labels rows and columns the other way round (row 0 "odd"), and
one of its examples uses that naming. Its storage figure and its lists
of selectable rows use index parity. Both namings describe the same
neighbourhoods.

## Buffer layout and the small multiplexers

`event_buffer` stores an event in the layout that makes neighbourhood
reads cheap:

```
track[k][0..3] = grid row 2k   (even rows, left half)      k = 0..3
track[k][4..7] = grid row 2k+1 (odd rows,  right half)
last_row[0..3] = grid row 8
```

For example, `track[0]` holds regions 0 1 2 3 | 4 5 6 7 and `last_row`
holds regions 32..35.

`cand_preselect` reads a neighbourhood in two levels:

1. **Rows.** `tRowEven` is the left half of `track[even_row]` and
   `tRowOdd` the right half of `track[odd_row]`; each is a 4-to-1 mux
   over the array rows. If the last row is used, it replaces one of them
   through a 2-to-1 mux.
2. **Columns.** Each half is viewed as a 2x2 array [column pair][even,
   odd]. For example, `tRowOdd` for grid row 1 is [[4,5],[6,7]]. A 2-to-1
   mux per output picks column pair `even_col` or `odd_col`.

No multiplexer in the path has more than 4 inputs, where a
select-by-region-id design would need four 36-to-1 multiplexers of 2160
bits each.

The output order of the four regions is:

* (even row, even col)
* (even row, odd col)
* (odd row, even col)
* (odd row, odd col)

The grid ids of the four regions are output alongside.

### Two banks

The buffer has two banks: one event can be read by the candidate step
while the next event is being written.

* `done_bank` names the bank of the most recently completed event.
* `cand_select` latches `done_bank` together with the seeds and reads
  that bank while it walks the seeds.
* A bank is overwritten only two events later, 72 cycles after its event
  began. By then the candidate step has long finished: it ends 63 cycles
  after the event began.

## One event through the design

Times are in clock edges; edge 1 samples region 0. The table assumes no
idle cycles inside the event.

| edge | event |
|---|---|
| 1..36 | regions written to the buffer; seed candidates enter the sorter |
| 37 | `event_done`; the buffer bank is complete |
| 45 | `seeds_valid`; `seeds[0..15]` valid until the next event's seeds |
| 46 | `cand_select` latches the seeds and the bank |
| 47..62 | `cand_valid` beats for seeds 0..15 (`cand_last` on the 16th) |

The next event may start at edge 37, right after region 35. The sorter,
buffer and candidate step all sustain one event per 36 cycles.
`region_valid` may drop for any number of cycles inside an event; every
stage simply waits.

## Top-level interface (`tau_trigger_top`)

| port | dir | type | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; synchronous active-low reset |
| `region_valid` | in | 1 | `region_in` carries the next region (ids 0..35 in order) |
| `region_in` | in | `region_t` | the region's tracks; `charged[0..3]` sorted by pT, largest first |
| `seeds` | out | `seed_t [16]` | seeds, descending pT |
| `seeds_valid` | out | 1 | pulse: `seeds` holds a new complete event |
| `event_done` | out | 1 | pulse: event fully buffered |
| `cand_valid` | out | 1 | one seed's candidate arrays |
| `cand_last` | out | 1 | last (16th) seed of the event |
| `cand_seed_num` | out | 4 | position of the seed in `seeds` |
| `cand_seed` | out | `seed_t` | the seed |
| `cand_region_id` | out | 6 x 4 | grid ids of the four regions |
| `cand_regions` | out | `region_t [4]` | the four regions' data |

The two assertions in the design state its input rules:

* `sort_cell2` requires each region's four candidates to arrive sorted.
* `cand_select` requires that no new seed set arrives while it is still
  busy with the previous one.

## Where this design departs from the publication or goes beyond it

* **Scope.** Two later steps are not built: selecting up to 30 tau
  candidates per neighbourhood, and reconstructing tau objects. The
  publication names them but gives no algorithm. The candidate-array
  outputs are where they would attach.
* **Alternatives not built.** The publication's other sorters are not
  built: the original bubble sort, the merge-sorter tree, and the
  16-cell one-register spatial sorter. Only the modified two-register
  sorter, its final design, is built.
* **Buffering latency.** The HLS implementation's buffering takes 56
  cycles for reasons the publication does not give. Here an event is
  complete one cycle after its last region.
* **Seed candidates** are taken as the first four *charged* tracks of
  each region. The publication says only "first 4 tracks".
* **Neighbour rule** (signs of local eta/phi) and **column clamping** at
  the outer columns are this design's own.
* **Storage.** The buffer holds whole regions (all 45 tracks) in the
  track/last-row layout. The publication shows that layout for tracks
  only. The two-bank organisation is also this design's own.
* **Framing and handshakes.** `in_first`/`in_last`, the Seeds capture
  register, `seeds_valid`, one seed per cycle in the candidate step, and
  the reset are all this design's own.
* **Tie handling** in the sorter is defined here; the publication leaves
  it open.

## Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_sort_cell2` | each cycle, REG0/REG1 and OUT[4] against a stable 6-element sort; the published out1/out2 rules literally; events, gaps, ties |
| `tb_spatial_sorter` | 10 events (back to back, with gaps, ties, best candidates first/last) against the top 16 of 144; latency 45 |
| `tb_event_buffer` | seed-candidate stream, framing, placement of every region in the layout, bank alternation, bank kept intact while the next is written |
| `tb_region_locator` | all 36 regions x 4 directions against a grid-coordinate reference; the wrap case 0/1/32/33 |
| `tb_cand_preselect` | every legal row/column selection against a flat copy of the event |
| `tb_cand_select` | 16 beats per seed set, order, timing, 2x2 adjacency, data from the right bank |
| `tb_tau_trigger_top` | 12 full-size events end to end: seeds, 45-cycle latency, all candidate arrays and region ids |

`tb_tau_trigger_top` runs with every parameter at its default. It also
counts and requires each of these to occur:

* back-to-back events and idle gaps;
* reads from both banks;
* row 8 as the odd row and as the even row;
* column clamping;
* pT ties.

To run a testbench with Verilator 5 from the directory holding `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Wno-fatal -y rtl +libext+.sv \
    rtl/tau_pkg.sv tb/tb_tau_trigger_top.sv --top-module tb_tau_trigger_top
./obj_dir/Vtb_tau_trigger_top
```

For another testbench, replace both names. The top-level build takes
about 20 seconds and the simulation under a second.

## Changing the design

* **Grid and track counts.** These are in `tau_pkg`. The buffer and
  preselect layouts assume 9 x 4 regions (4 x 8 array plus one last
  row). The region counter, first/last flags and track counts follow the
  package.
* **Number of seeds.** This is `spatial_sorter`'s `N_OUT` (even; cells =
  `N_OUT/2`). `cand_select` walks `N_SEEDS` seeds from the package.
* **Neighbour rule.** To use a different criterion for which three
  regions join the seed's own, change only `region_locator`. Keep its
  `nbhd_t` output and `cand_preselect` is unaffected.
