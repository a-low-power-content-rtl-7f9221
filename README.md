# A content-addressable memory that compares only where a small neural network points

A binary content-addressable memory (CAM) answers "which stored entry holds
this tag?" in one search. A conventional CAM compares the search tag with every
stored tag at once, so each search charges every matchline and every
searchline. That is where its energy goes.

This design puts a small classifier in front of the CAM. The classifier is a
clustered neural network (CNN) with binary weights. It is trained with a short
slice of every stored tag, and for a search it names the few entries that
could hold the tag. The CAM is cut into sub-blocks that can be enabled one by
one. Only the sub-blocks that hold a named entry compare; all others stay
idle. The network never leaves out the entry that really matches. A wrong
guess only enables more sub-blocks: it costs energy, never correctness.

The RTL follows the architecture in H. Jarollahi, V. Gripon, N. Onizawa and
W. J. Gross, "A Low-Power Content-Addressable-Memory Based on
Clustered-Sparse-Networks". Its reference point is 512 entries of 128 bits in
64 sub-blocks of 8 rows, with a 9-bit slice of the tag feeding the network.
At that point a search enables about two sub-blocks out of 64. The paper
reports the energy and delay of a 0.13 µm circuit. This RTL is a functional,
cycle-accurate, synthesizable version of the architecture. It says nothing
about circuit energy or delay.

## The network

Symbols used throughout (RTL parameter names in brackets):

| symbol | meaning | default |
|---|---|---|
| M [`M`] | CAM entries, and neurons of the output part P_II | 512 |
| N [`N`] | tag and data width in bits | 128 |
| q [`Q`] | bits of the reduced-length tag | 9 |
| c [`C`] | clusters of the input part P_I | 3 |
| κ [`KAPPA`] | bits per cluster, q / c | 3 |
| l [`L`] | neurons per cluster, 2^κ | 8 |
| ζ [`ZETA`] | CAM rows per sub-block | 8 |
| β [`BETA`] | sub-blocks, M / ζ | 64 |

**Reduced tag.** Only q bits of the tag go to the network. They are the tag
bits whose positions are set in the build-time mask `TAG_MASK`, taken lowest
position first. The default mask selects the q least significant bits. The
q bits are cut into c fields of κ bits. Cluster 0 takes the most significant field. Each field
switches on exactly one of the l neurons of its cluster: the neuron whose
index equals the field's value. This is the "local decoding" step, and
`onehot_decoder` does it.

**Weights.** Every neuron of every cluster has a binary connection to each of
the M output neurons, one output neuron per CAM entry. Cluster i keeps its
connections in an l × M bit array (`weight_sram`). Row j is neuron j and
column a is entry a. Storing a tag at entry a writes column a of each
cluster's array with the one-hot code of that cluster's field. The
connection from the active neuron to entry a becomes 1, and the other
connections of that column become 0. So each column always holds exactly one
1 per cluster, or none if the entry was never written.

**Global decoding.** For a search, each cluster reads only the row of its
active neuron. These are the only weights that can matter, so the AND with the
neuron value in the decoding equation is done by the read itself. Output
neuron a is active when all c rows have a 1 in column a:

    v'[a] = row_0[a] AND row_1[a] AND ... AND row_{c-1}[a]

Because of how the columns are written, v'[a] = 1 exactly when entry a was
written with a tag whose q-bit slice equals the search's slice. The true
match always meets this condition. Other entries meet it only when their
slices are equal by chance.

**Grouping.** Entries a = kζ … kζ+ζ−1 form sub-block k. Its compare-enable is
the OR of their ζ neuron values (`global_decoder`). With ζ = 1, each entry is
its own sub-block, and only the candidate entries compare. That needs the most
enable wiring.

Worked example, with c = 2 and q = 6. A tag whose reduced slice is `101110`
stored at entry 4 sets weight (cluster 0, neuron 5, entry 4) and weight
(cluster 1, neuron 6, entry 4). A search with the same slice reads row 5 of
cluster 0 and row 6 of cluster 1. Both rows have bit 4 set, so entry 4 is a
candidate and sub-block 4/ζ is enabled.

## How many entries are compared

If the reduced slices are uniformly random, each of the other M − 1 entries
shares the searched slice with probability 2^−q. A search for a stored tag
therefore activates on average

    1 + (M − 1) / 2^q

candidate entries. For M = 512 and q = 9 this is 2.0: the matching entry plus
about one false candidate. Each candidate enables its whole sub-block, so
about 2 × ζ = 16 rows compare, instead of 512. A larger q lowers the count but
makes the weight arrays larger (c arrays of 2^κ × M bits). A smaller ζ makes
the enable finer but needs more sub-blocks. The paper picked q = 9, ζ = 8 as
its reference point.

If the tags are not uniform in the chosen bits, more entries share a slice.
Then more sub-blocks compare, but the result is still exact. `TAG_MASK`
chooses the slice, and the bits do not have to be adjacent. A design whose
tags are correlated in some bits, for example the fixed high bits of page
numbers in a TLB, can point the mask at the bits that vary.

Measured with the testbenches (2000 searches of stored tags per point, and
512 for the full-size run):

| M | q | expected 1 + (M−1)/2^q | measured |
|---|---|---|---|
| 512 | 3 | 64.9 | 64.3 |
| 512 | 6 | 9.0 | 8.7 |
| 512 | 9 | 2.0 | 1.9 (2000 searches), 2.0 (full-size run) |
| 512 | 12 | 1.12 | 1.10 |
| 128 | 3 | 16.9 | 16.6 |
| 128 | 6 | 3.0 | 2.9 |
| 128 | 9 | 1.25 | 1.25 |
| 128 | 12 | 1.03 | 1.08 |

The paper's plot of this quantity agrees for M = 512. For M = 128 it shows
about 2 from q = 7 up, which is above the formula. This RTL matches the
formula.

## The CAM side

`cam_subblock` holds ζ rows of N bits, each with a valid bit. A row's
matchline is high when the sub-block is enabled, the row is valid, and every
stored bit equals the search bit. This is the logic of an XOR-type CAM cell
with a NOR-type matchline: any mismatching bit pulls the line down. In a
disabled sub-block every matchline reads 0. In silicon, those matchlines and
their searchlines would not toggle.

`cam_array` holds β sub-blocks and the M matchlines. It also makes the Miss
flag, which is high when no matchline is high. `data_sram` (M × N) uses the
matchlines as wordlines: the word of the matching entry is read out. The
wordlines are encoded to an address inside the block, so a synthesis tool
sees an ordinary memory.

## Pipeline and timing

Everything runs on one clock, `clk`. A search is accepted on any rising edge
with `srch_valid = 1`, one per cycle, back to back. Counting the accepting
edge as edge 1:

| edge | block | what is registered |
|---|---|---|
| 1 | `cnn` / `weight_sram` | one weight row per cluster; the full tag enters a side pipeline |
| 2 | `cnn` | compare-enables `cmp_en` and candidate vector `cand`, with `cmp_en_valid` |
| 3 | `cam_array` | matchlines of the enabled sub-blocks, Miss |
| 4 | `data_sram` | data word; `rsp_valid`, `rsp_miss`, `rsp_data` |

So the response is valid after the 4th edge (`cscam_pkg::CSCAM_LATENCY`). In
the paper, the CNN and the CAM are joined by wave pipelining. Two tuned clocks,
clk1 and clk2, time the weight read and the enable gating. That technique
depends on analog path delays, so it has no RTL form. The paper names
registered pipelining as an alternative, and that is what is built here: edge
1 plays clk1 and edge 2 plays clk2.

**Writing.** One edge with `wr_en = 1` stores one entry completely. The CAM
row gets `wr_tag` and becomes valid. The data SRAM gets `wr_data`. The
network's weight columns are retrained from `wr_tag`. Rewriting an address
replaces the old entry, including its old weights.

Rules the user must keep (this design's, not the paper's):

- A search sees a write only if it is accepted after the write edge, and no
  write happens during its four edges. A write during a search in flight may
  mix old and new state for that one search.
- A tag may be stored at only one address. Otherwise two matchlines rise, the
  data read is undefined, and an assertion in `data_sram` fires.

Reset (`rst_n`, asynchronous, active low) invalidates all CAM rows and clears
all weights. Data words and stored tag bits are not reset.

## Top-level interface (`cscam_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset |
| `wr_en`, `wr_addr`, `wr_tag`, `wr_data` | in | 1, log2 M, N, N | store one entry |
| `srch_valid`, `srch_tag` | in | 1, N | search request |
| `rsp_valid`, `rsp_miss`, `rsp_data` | out | 1, 1, N | response, 4 edges later |
| `cmp_en_valid`, `cmp_en` | out | 1, β | compare-enables of the search (after edge 2) |
| `cand` | out | M | candidate entries (active output neurons) of the same search |

`cmp_en` and `cand` are not needed for using the CAM. They show how many
sub-blocks and entries each search touched, which is the quantity the
architecture minimises.

## Where this RTL departs from the paper, or fills gaps

- **Circuits.** The 9-transistor XOR CAM cell, the NOR matchline sensing and
  the SRAM macros are modelled by their logic function only. Energy and delay
  numbers of the paper do not carry over.
- **Timing.** A 4-stage registered pipeline replaces wave pipelining.
- **Training.** The paper says a weight is 1 where a tag slice and an entry
  are associated. It does not say how entries are replaced. Here a write
  rewrites the entry's whole weight column, so stale connections disappear.
  The search and training paths have separate decoders, so a write and a
  search can share a cycle.
- **Valid bits.** Each CAM row has a valid bit, so an unwritten row in an
  enabled sub-block cannot match. The paper does not mention one.
- **Reset** clears the weight arrays, which a real SRAM macro would not do.
- **Tag slice.** The bit pattern is fixed when the design is built
  (`TAG_MASK`), not programmable at run time. The default, the q lowest
  bits, is this design's choice.
- **Data SRAM.** The paper only names it and its size. The write port, the
  synchronous read and the wordline encoder are this design's.
- Neurons and entries are numbered from 0. Cluster 0 takes the most
  significant field of the slice, which reproduces the paper's worked example.

## Files

`rtl/` (one module or package per file):

- `cscam_pkg.sv`: reference sizes and pipeline depth
- `onehot_decoder.sv`: κ-to-l local decoder
- `weight_sram.sv`: one cluster's l × M weight array
- `global_decoder.sv`: AND over clusters, OR per sub-block
- `cnn.sv`: tag slice, c decoders, c weight arrays, global decoder, enable register
- `cam_subblock.sv`: ζ rows with compare-enable
- `cam_array.sv`: β sub-blocks, matchline and Miss register
- `data_sram.sv`: M × N data memory read through matchlines
- `cscam_top.sv`: the whole CAM

`tb/`: one self-checking testbench per module (`<module>_tb.sv`), plus
`cscam_top_full_tb.sv` and `fig3_workload_tb.sv`. `cscam_top_full_tb.sv` runs
the default 512 × 128 design: it fills all entries, searches them all back to
back, then searches 512 absent tags. `fig3_workload_tb.sv` sweeps q and M,
using the helper `fig3_point.sv`. Each testbench prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

`cscam_top_tb.sv` runs a 64-entry version with a 6-bit slice, so that all
behaviours happen often. It checks every response and both latencies against a
model. It counts, and requires at least once: hits, misses with no sub-block
enabled, misses after an enabled compare (equal slice, different tag), several
candidates, several enabled sub-blocks, a rewritten entry whose old tag is no
longer found, back-to-back searches and searches right after reset. A twin
with one entry per sub-block (ζ = 1, the finest grouping) runs beside it, and
its responses must be the same.

Simulate with Verilator 5, from the folder that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Wno-fatal --top-module cscam_top_full_tb \
      -y rtl -y tb +libext+.sv rtl/cscam_pkg.sv tb/cscam_top_full_tb.sv
    ./obj_dir/Vcscam_top_full_tb

Replace the top module name to run another testbench. The full-size model
builds in about 10 s and runs in well under a second. Lint with
`verilator --lint-only -Wall -y rtl +libext+.sv rtl/cscam_pkg.sv rtl/cscam_top.sv`.
At the default size, coarse synthesis gives about 15.7 k flip-flop bits: the
weight arrays, the CAM and the pipeline. It also gives 131 k memory bits:
the CAM tag rows and the data SRAM.

To change the geometry, override `M`, `N`, `ZETA`, `Q`, `C` and `TAG_MASK` on
`cscam_top`. Q must be a multiple of C, M a multiple of ZETA, and ZETA a power
of two. `TAG_MASK` must have exactly Q bits set.
