# MLET: a multistage-TCAM IP lookup engine

A router forwards each IPv4 packet by finding, among its routes, the longest
prefix that matches the packet's 32-bit destination address (longest-prefix
match, LPM). Ternary CAMs (TCAMs) do this in one memory access, because every
row compares itself with the address in parallel. The cost is power: a normal
TCAM enables every cell of every row on every search.

This design saves that power in two independent ways:

1. **A smaller table.** Before the routes are stored, a minimiser removes
   routes that cannot change any forwarding decision. It then splits the table
   by output port and logic-minimises each part. Fewer rows means fewer cells to
   enable.
2. **A multistage TCAM (MSTCAM).** The 32 cells of each row are cut into K
   column stages, searched one stage per clock cycle. Stage 1 is enabled for
   every row. Stage i+1 of a row is enabled only if stage i of that row matched.
   Most rows fail in their first few bits, so most cells of the table are never
   enabled. This enabling scheme is what the name MLET (Multilevel Enabling
   Technique) refers to.

The RTL is SystemVerilog (IEEE 1800-2017) and synthesizable, except for the
files in `tb/`. Default parameters give the main configuration:

| parameter | default | meaning |
|---|---|---|
| `NUM_STAGES` (K) | 4 | stages of the MSTCAM |
| `STAGE_W` | `'{8,8,8,8}` | width of each stage. Stage 1 holds the most significant address bits. The widths must add up to 32. |
| `ROWS` (S) | 12372 | rows of the minimised table |
| `ENTRIES` | 31000 | routes the minimiser can take in |
| `PORT_W` | 8 | bits of an output-port number (`mlet_pkg`) |

The row count and the route count come from the evaluation this design follows.
There, a 31000-route backbone table shrank to 12372 rows after minimisation.
The default table fits exactly that. A larger or less compressible table needs a
larger `ROWS`. `overflow` tells when the cubes did not fit. The
choice of 4 equal stages is discussed under "Choosing the stages".

## Block diagram

```
 table build (mlet_minimizer)                       lookup path
 ----------------------------                       -----------
 routes --> overlap elimination                     IPv4 header
              |                                        |
            splitter (one PRT per output port)      separator unit --> DR1..DRk
              |                                        |
            [ Espresso minimisation units,          MSTCAM: stage 1 -> ... -> stage K
              external: emu_req_* / emu_rsp_* ]        |  match lines ML
              |                                     LPM selector (longest row)
            merger --- row writes --------------->  next-hop SRAM --> output port
                      (TCAM row, length, port)
```

| module | role |
|---|---|
| `mlet_pkg` | Shared constants, the `route_t` (prefix, length, port) and `cube_t` (value, care, length, port) types, and the prefix-to-cube conversion. |
| `mlet_top` | The whole engine. |
| `mlet_minimizer` | The table-build chain. |
| `mlet_overlap_elim` | Removes redundant routes. |
| `mlet_splitter` | Partitions the routes by output port. |
| `mlet_merger` | Writes the cubes into table rows and records where each partition lies. |
| `mlet_separator` | Separator unit: extracts the destination address and fills the stage data registers. |
| `mlet_mstcam` | Multistage TCAM: the enable chain between stages and the stage sequencing. |
| `mlet_tcam_stage` | One stage: ROWS x W ternary cells with a per-row enable. |
| `mlet_lpm_selector` | Picks the longest matching row. |
| `mlet_nexthop_sram` | Row -> output port. |

## The multistage search (`mlet_mstcam`, `mlet_tcam_stage`)

Each cell holds a value bit and a care bit. A row of stage i matches when every
cell with care=1 equals the corresponding bit of the stage's data register DR_i.
The stage's enable line ES(i,j) gates the row: a disabled row reports no match.
It stands for a row whose cells are not driven at all.

The enables follow three rules:

* `ES(1,j)` = row j is valid. Unused and deleted rows are never searched.
* `ES(i+1,j) = Match(i,j)`. The matches of one stage are registered in `es_q`.
  That register enables the next stage in the following cycle.
* `ML_j = Match(K,j)`. The last stage's matches are the match lines.

A stage not being searched has all its enables low. The match lines are
therefore always those of a plain one-stage TCAM. Only the number of cells
switched on changes. The testbenches check this equality, and they measure the
enabled cells per search (EPS) from the `es_stage` signals.

Timing: `start` is sampled with `key`. Stage 1 is searched in the next cycle,
stage K in the K-th cycle, and `ml_valid` pulses at the end of that cycle. Only
one search is in flight. A row write during a search is a protocol error, caught
by an assertion.

The power saving is reported as POF, the percentage of cells not enabled:

    POF = 100 * (1 - sum of EPS over m searches / (m * ROWS * 32))

### Choosing the stages

More stages enable fewer cells, but they cost more enable registers and more
latency. The evaluation this design follows found, on a real backbone table,
mean POF values of:

* 65% for the best 2-stage split;
* 76% for the best 3-stage split;
* 79% for the best 4-stage split;
* 83% for 32 one-bit stages.

It recommended 4 stages as the trade-off. The widths of that best 4-stage split
are not known except for its first stage (2 or 3 bits). The equal split 8/8/8/8
is therefore the default. Any split can be set through `STAGE_W`.
`tb/tb_mlet_stage_sweep.sv` compares splits on a synthetic 256-row table, where
it measures 0% POF for one stage, 73% for 4x8 and 92% for 32x1. Real routing
tables give different numbers.

## Longest-prefix selection (`mlet_lpm_selector`)

A conventional TCAM stores routes sorted by length and takes the first match.
Here the merger stores rows grouped by output port, so the first match is not
the longest. Each row therefore also stores a priority, its prefix length, in
the selector. A balanced tree of compare-and-select nodes picks the matching row
with the largest length. On equal lengths it picks the lower row index. The tree
is ceil(log2 ROWS) levels deep and feeds a register. The winning row addresses
the next-hop SRAM.

This is the design's own way of doing the selection. For a minimised cube, the
stored length is whatever the minimisation unit returns with the cube. An
unminimised cube carries its prefix length.

## Building the table (`mlet_minimizer`)

**Overlap elimination.** The parent of route Pb is the longest route Pa that is
strictly shorter than Pb and agrees with Pb on all of Pa's bits. If Pb's parent
leads to the same port, Pb is redundant: an address matching Pb also matches
Pa, and Pa sends it to the same place. Redundant routes are dropped.

Parents are always searched in the complete original table, so the order of
removal cannot matter. The engine scans the table once per route, one candidate
per cycle: about n^2 cycles for n routes. Two routes with the same prefix and
length are not each other's parent, and both are kept.

**Splitting.** The routes that remain are grouped into one partial routing
table (PRT) per output port. A PRT can be minimised without looking at any other
PRT, because all its routes lead to the same port. The splitter collects the
routes and counts them per port. It then emits the PRTs in increasing port
order, with a `last` flag on each PRT's final route.

**Minimisation (external).** Each PRT is logic-minimised into a cover of
ternary cubes by an Espresso-II style minimisation unit (EMU). The EMUs are an
existing on-chip minimiser design and are not part of this RTL. The PRT stream
leaves on `emu_req_*`, and the cubes come back on `emu_rsp_*`, PRT by PRT, in
the same order. Any unit that returns each route as its own cube is a correct,
unminimised stand-in. The testbenches use such a model, `tb/mlet_emu_model.sv`.

**Merging.** The merger writes the cubes into consecutive rows after a
one-cycle table clear. Each row write goes to the MSTCAM (value, care), the LPM
selector (length) and the next-hop SRAM (port) at once. The merger records the
first and last row of every PRT; `prt_query` reads them. Cubes beyond `ROWS` are
dropped and set `overflow`.

## Top level (`mlet_top`)

* **Build:** load routes with `ld_en/ld_addr/ld_route`. Then pulse
  `build_start` with `num_entries` while `build_ready` is high. `build_done`
  pulses at the end. `num_kept` and `rows_used` report the table size.
* **Lookup:** offer a 20-byte IPv4 header on `hdr` (byte 0 in bits
  159:152) with `hdr_valid`. The destination address, header bytes 16..19, is
  split into the data registers. Headers are taken every K+1 cycles at most, and
  never during a build.
* **Result:** `res_valid` arrives K+3 cycles after the header is taken, with
  `res_hit`, `res_port` and `res_row`. A miss gives `res_hit = 0` and port 0.

## Verification

Every module has a self-checking testbench, `tb/tb_<module>.sv`. Each prints
`TB_RESULT checks=N failures=M`. With plain Verilator:

```
verilator --binary --timing --assert rtl/mlet_pkg.sv $(ls rtl/*.sv | grep -v mlet_pkg) \
          tb/mlet_emu_model.sv tb/tb_mlet_top.sv --top-module tb_mlet_top -o sim && obj_dir/sim
```

The package has to come first and must not be listed twice. Each other
testbench needs only its module, the modules that module instantiates, and
`mlet_pkg`. Replace `tb_mlet_top` with `tb_mlet_top_full` to run the
default-size engine. That compiles in seconds and runs in a few seconds.
Synthesis of the default size is slow. The MSTCAM alone has
12372 x 32 x 2 storage bits plus comparators.

* `tb_mlet_top` runs the whole engine with 64 rows. It builds two random nested
  tables through the minimiser and looks up 500 addresses. Every result is
  compared with a reference longest-prefix match over the *original*,
  unminimised table, including the K+3 cycle latency. It also requires that each
  of these happened at least once:
  * a route removed by overlap elimination;
  * a row disabled before the last stage;
  * a multiple match;
  * a miss;
  * a header held off by a busy MSTCAM;
  * a header refused during a build;
  * EMU back-pressure.
* `tb_mlet_top_full` is the same test at the default size (12372 rows).
* `tb_mlet_mstcam` checks the enable of every row in every stage and every
  cycle against the rules above, using an unequal 2/6/8/16 split.
* `tb_mlet_stage_sweep` runs nine stage configurations side by side. It checks
  that they agree on every match and that finer equal splits never enable more
  cells.

## What this RTL does not cover

* **Incremental updates.** Route insertion and withdrawal confined to one PRT
  are not implemented: send the PRT through an EMU again and rewrite only its
  rows. A withdrawal also has to expand every cube covering the withdrawn
  prefix. In this RTL a change is made by editing the route memory and
  rebuilding the whole table. Rebuilding only one PRT in place would also need
  spare rows per PRT, or moving the PRTs behind it.
* **The EMUs** (see above).
* **Circuit-level power.** Disabled cells are modelled by gating the compare
  result. The actual saving depends on a TCAM circuit that can leave match-line
  precharge and search lines idle per row segment. No such circuit is modelled
  here.
* **Throughput.** One search is in flight at a time. The MSTCAM could accept a
  new address every cycle if each stage kept its own enable register and data
  register, but this design does not do that.
* **Two width choices.** The 8-bit port number and the 6-bit length field are
  this design's own choices.
