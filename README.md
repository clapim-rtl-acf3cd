# ClaPIM search chip in SystemVerilog

ClaPIM classifies DNA reads by approximate matching. It compares each 64-base piece of a
read (a *query*) with a reference database of 64-mers, tolerating sequencing errors. Each
64-mer sits in one row of a 128 x 512 memristive crossbar. A query is written into every
row of a crossbar, and all 128 rows then compare it with their own 64-mer at the same
time. The comparison uses only MAGIC NOR gates evaluated inside the array.

A query base counts as an *edit* when it equals none of three 64-mer bases: the one at the
same position, its left neighbour and its right neighbour. Looking at the neighbours is
what makes the count roughly tolerant of insertions and deletions. The edits of a row are
left as a 64-bit *Edits Vector*. A current sense amplifier then reads all 64 cells at once
and decides whether the number of ones is at most a threshold. Per crossbar, the rows
within the threshold are counted. Per query, the chip adds these counts up for each taxon
and names the taxon with the most hits.

A software filter on the host keeps the chip from searching everything. A 64-mer can only
be within `eth` edits of a query if their base histograms (#A, #T, #G, #C) differ by at
most `2*eth` in total. The database is stored so that each crossbar holds 64-mers of few
histograms. The host therefore sends each query only to the crossbars holding nearby
histograms. It also batches queries whose crossbar sets cannot overlap, and the chip
searches a whole batch in one pass.

This RTL gives one chip: the crossbars, the search program, the sense and count
periphery, the result network and the controller. The host filter is not part of it; the
testbench models it.

## Crossbar layout (`magic_crossbar`)

| columns  | content |
|----------|---------|
| 0-127    | the stored 64-mer, two bits per base |
| 128-255  | the query (the same in every row) |
| 256-447  | 192 scratch cells for the gates |
| 448-511  | the Edits Vector, one cell per query base |

Bases are coded A=00, T=01, G=10, C=11. Base `i` uses columns `2i` (low bit) and `2i+1`.
The bit order inside a base is a choice made here.

The array is a plain register array. It accepts one micro-operation per clock
(`xb_uop_t`):
- write a 64-mer into one row;
- write the query into all rows;
- initialise a column range to 1;
- a 1-, 2- or 3-input NOR;
- read one row (for tests).

A MAGIC gate is modelled as it behaves physically. Its output cell must first be set to 1,
and evaluation can then only pull it to 0: `out &= ~(a | b | c)`. A NOR whose output was
not initialised therefore gives a wrong result. The sequencer must get the
initialisations right, and the tests would catch it if it did not.

## The comparison program (`search_sequencer`)

One sequencer drives every crossbar of the chip through a broadcast micro-operation bus.
Only crossbars that hold a query take the operations. For each query base `i`, and for each
of the 64-mer bases `i` (C), `i-1` (L) and `i+1` (R):

1. XOR the low bits and the high bits of the two bases, each with five NORs:
   `a'`, `b'`, `(a'+b')'`, `(a+b)'`, then `((a'+b')' + (a+b)')'`.
2. Compute `M = NOR(XOR_low, XOR_high)`, which is 1 when the bases are equal.

Then `Edits[i] = NOR(M_L, M_C, M_R)`, a three-input NOR. Base 0 has no left neighbour and
base 63 has no right neighbour. Those comparisons are skipped, and their last NOR has two
inputs.

Each comparison uses 11 scratch cells, so one base needs 33. The 192 scratch columns
therefore hold five bases' worth. Before each group of five bases, one initialisation
cycle sets all 192 scratch columns back to 1. Before the first group, the same cycle also
clears the Edits Vector.

This placement is a choice made here. It is the one that reproduces the paper's cycle
count:

    NOR cycles  : 64 bases x 34 NORs - 2 x 11 (missing L of base 0, R of base 63) = 2154
    init cycles : ceil(64 / 5)                                                   =   13
    total       :                                                                  2167

The paper gives 2167 MAGIC cycles including initialisation. One MAGIC cycle is 3 ns, for
about 6.5 us.

After the gates come four sense phases, described in the next section. Each phase is
12 clocks long (the 36 ns sense-amplifier latency). The sequencer is busy for
2167 + 48 + 2 clocks and pulses `done` at the end.

## Counting edits at the sense amplifiers (`current_sense_amp`, `read_compute_periphery`)

The real sense amplifier grounds all bit lines of a row and compares the summed cell
current with a reference set for the threshold. `current_sense_amp` is a behavioural model
of it: on the latch clock it stores `popcount(Edits Vector) <= thr`, and OUTN is the
complement. Device variation is not modelled. The paper's Monte Carlo study shows such
errors near the threshold.

Each crossbar has 32 amplifiers behind 4:1 multiplexers, so the 128 rows are sensed in
four phases. In phase `p`, amplifier `j` reads row `4j+p`. The 32 outputs of a phase feed
two paths:
- a 32-input OR whose result is ORed into a flip-flop. It gives the 1-bit `hit` used for
  detection.
- a ones counter whose sum is added to a 7-bit `count` used for classification.

With all 128 rows within the threshold, the count saturates at 127. The paper prints the
7-bit width but does not say what happens on overflow.

## Crossbar tile (`crossbar_tile`)

A tile holds one crossbar, its periphery, and the state that ties it to the rest of the
chip:
- the taxon of its 64-mers (set when the database is loaded);
- the batch slot of its current query;
- an `active` flag.

Writing a query makes the tile active. While active, it executes the broadcast program.
When the search ends it offers `{slot, taxon, count, hit}` on a valid/ready port, and it
goes idle once that packet is taken. Inactive tiles see only no-ops, so their cells do not
switch. This matters for write endurance, one of the reasons the filter exists.

## Gathering results (`hit_gather_tree`, `noc_merge_node`)

The paper only says that a tree-shaped on-chip network collects the hits. Here it is a
binary tree of merge nodes, with the leaf count padded to a power of two. Each node picks
one of its two children round-robin and holds the packet in a one-entry output register.
A packet from any leaf reaches the root after log2(N) clocks. The root then delivers one
packet per clock.

## Chip controller and command set (`chip_controller`)

The host talks to the chip through one command port (valid/ready):

| command       | effect |
|---------------|--------|
| `LOAD_KMER`   | write `cmd_data` into row `cmd_row` of crossbar `cmd_xb_first` (one clock) |
| `SET_TAXON`   | crossbars `cmd_xb_first..cmd_xb_last` belong to taxon `cmd_taxon` (one clock each) |
| `SET_THR`     | edit threshold for all sense amplifiers (4 after reset) |
| `ASSIGN`      | write query `cmd_data` of batch slot `cmd_slot` into crossbars `first..last`, one per clock |
| `SEARCH`      | run the search in all assigned crossbars, collect, classify, report |

A query whose nearby histograms span several crossbar ranges is sent as several `ASSIGN`
commands.

If a crossbar is assigned a second query in the same batch, the host's batching rule has
been broken. The controller then keeps the first query and sets the sticky `conflict`
output.

After `SEARCH` the controller:
1. waits for the sequencer;
2. takes one packet per active crossbar, adding its count into a hit table indexed by
   (slot, taxon) and ORing its hit bit into a per-slot `detected` flag;
3. for each slot that got a query, in slot order, scans the taxa. It reports the taxon
   with the most hits (the lowest index wins a tie), the hit total and `detected`;
4. clears the tables, after which the next batch can be assigned.

The command set, the result format, the tie rule and the conflict check are choices made
here. The paper says only that queries are written serially, that all crossbars then
search at once, and that the controller sums hits per organism and classifies.

## Whole chip (`clapim_top`)

The top instantiates the controller, one sequencer, `N_XBAR` tiles and the tree. Its
ports are the controller's command and result ports, plus `search_busy`.

Latency of one batch:
- one clock per crossbar written;
- 2217 clocks of search;
- log2(N_XBAR) clocks plus one clock per active crossbar to gather;
- N_TAXA + 1 clocks per reported query.

## What stays on the host

The base-count filter, the tracing table (histogram to crossbar range) and the batching
step all run in software on the host. The paper runs them on a server CPU, examining 350
queries per batch and getting 29 per batch on average. They have no hardware here.

`tb_clapim_top` contains a small model of all three:
- it computes the crossbars within `2*thr` histogram distance;
- it admits a query to a batch only if its histogram is at least `2*2*thr` from every
  query already in the batch and none of its crossbars is taken;
- it defers the other queries to later batches.

## Sizes and departures from the paper

| parameter | here | paper |
|-----------|------|-------|
| crossbar | 128 x 512 | 128 x 512 |
| sense amplifiers per crossbar | 32, 4:1 mux | 32, 4:1 mux |
| MAGIC cycles per search | 2167 | 2167 |
| SA phase | 12 clocks | 36 ns at a 3 ns clock |
| count width | 7 bits, saturating | 7 bits |
| crossbars per chip (`N_XBAR`) | 1024 | 2^20 (8 GB) |
| batch slots (`N_SLOTS`) | 32 | 29 on average |
| taxa (`N_TAXA`) | 16 | not given |

`N_XBAR` is reduced because the front end of the simulator needs about 11 GB for 1024
crossbars and grows about linearly. Nothing else in the RTL depends on it: the parameter
can be raised where memory allows. The 1024-crossbar chip holds 131,072 64-mers. That is
enough for a SARS-CoV-2 database with a few variants, but not for a human chromosome.

Other points where this RTL departs from, or adds to, the paper:
- The sense amplifier is ideal.
- MAGIC devices are ideal. Endurance and the resistance levels are not modelled.
- The scratch-cell placement and the handling of bases 0 and 63 are choices made here.
- The paper does not specify the tree network or the command interface.
- Per-crossbar counts saturate at 127.
- Classification ties go to the lowest taxon index.
- The paper counts 7 writes per cell for one search, spread by wear levelling. With the
  scratch placement used here, each scratch cell is initialised 13 times and is written
  by about 11 gates per search. There is no wear levelling: the same columns are used
  every time.
- The paper trades the number of sense amplifiers against latency (1 to 128 amplifiers;
  its table gives 288 ns of sensing for 16 and 36 ns for 128). Here `NUM_SA` is a
  parameter of the sequencer and the periphery, and the sense time is
  `ROWS/NUM_SA x 12` clocks. The sequencer test also runs with 16 amplifiers, which gives
  96 clocks.

## Testbenches and simulation

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|-----------|----------------|
| `tb_magic_crossbar` | writes, init, 1/2/3-input NOR truth tables, the need for initialisation |
| `tb_search_sequencer` | NOR/init/sense cycle counts (2154/13/48, busy 2217) and every row's Edits Vector against a reference |
| `tb_current_sense_amp` | threshold decision and latching for thresholds 1-9 |
| `tb_read_compute_periphery` | multiplexing, detection OR, count and saturation |
| `tb_crossbar_tile` | full load-search-report cycle in two tiles, inactive tile untouched |
| `tb_hit_gather_tree` | every packet exactly once under random stalls, root latency and rate |
| `tb_chip_controller` | command handling, serial writes, conflict flag, sums, argmax and tie rule |
| `tb_clapim_top` | end to end on 8 crossbars, 4 taxa and 4 slots: database, host filter and batching model, two thresholds (4 and 9) |

`tb_clapim_top` also counts the chip's mechanisms and fails if any never happened:
- a batch of several queries;
- a query deferred to a later batch;
- an undetected query;
- a search with idle crossbars;
- a saturated count;
- a threshold change;
- the conflict flag.

`tb_ref_pkg` holds the reference model: the edit count, histograms and mutation.

The largest chip simulated end to end has 8 crossbars. No test runs the top at its
default of 1024 crossbars, because building that model takes a long time and a lot of
memory. The 8-crossbar run uses the same tile, sequencer and controller code.

To run one test with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb --top-module tb_clapim_top \
        rtl/clapim_pkg.sv tb/tb_ref_pkg.sv rtl/*.sv tb/tb_clapim_top.sv
    ./obj_dir/Vtb_clapim_top +verilator+rand+reset+2
