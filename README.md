# SparseZipper matrix unit: sorting and merging key-value streams on a systolic array

Sparse-sparse matrix multiplication (SpGEMM) done row by row (Gustavson's
method) turns each output row into a *stream* of (column index, value)
tuples: every non-zero `A[i][k]` scales row `k` of `B`. Those tuples then
have to be sorted by column index, and tuples with the same index added
together. On a CPU this sort/merge step dominates the runtime, and it is
full of data-dependent branches that neither scalar nor SIMD code handle
well.

The design here reuses the hardware a CPU matrix extension already has: an
N x N systolic array of processing elements (PEs) and a file of N x N
matrix registers. A few changes let that array sort and merge **N streams
at once**, one stream per register row:

* each PE compares the key arriving from the west with the key arriving
  from the north and routes the larger one east and the smaller one south;
* equal keys are *combined*: one copy goes on, the other is marked as a
  duplicate;
* a second trip through the same array, the *compressing pass*, squeezes
  out the duplicates and excluded keys;
* the routing decisions are recorded, so that a following value
  instruction moves (and adds) the values exactly the way the keys went.

The default configuration has N = 16 PEs per side, 32-bit keys and values,
and 16 physical matrix registers of 16 rows x 512 bits.

## Instructions

| instruction | operands | effect per stream row `i` |
|---|---|---|
| `mlxe.t td, base, off, len` | byte offsets and lengths (vectors) | load `len[i]` words from `base+off[i]` into row `i` of `td` (rest zero) |
| `msxe.t ts, base, off, len` | same | store the first `len[i]` words of row `i` |
| `mssortk td1, td2, l1, l2` | two key chunks per row | sort the `l1[i]+l2[i]` keys of row `i`, combine equal keys, write the result back into `td1` (first part) and `td2` (second part) |
| `mssortv td1, td2, l1, l2` | the matching value chunks | move the values the way the keys moved, adding the values of combined keys |
| `mszipk td1, td2, l1, l2` | two *sorted* key chunks per row | merge them. Keys of one chunk that are larger than every key of the other chunk are held back for the next merge step |
| `mszipv td1, td2, l1, l2` | the matching value chunks | move and add the values as the keys went |
| `mmv.vi vd, c` / `mmv.vo vd, c` | | read the input counter IC*c* or the output counter OC*c* |

The counters carry the variable lengths back to software:

* OC0[i] and OC1[i] give how many valid keys row `i` left in `td1` and in
  `td2`;
* IC0[i] and IC1[i] give how many keys of each input chunk were consumed.
  For a merge this tells software how far to advance in each input stream.

## Where data sits in the array

Register `td1` enters from the west edge and `td2` from the north edge:

* element `e` of a `td1` row goes to array row `N-1-e`;
* element `e` of a `td2` row goes to array column `e`.

The N rows of a register enter in N consecutive cycles. Skew buffers
delay lane `k` by `k+1` cycles, so that row `r` of a register meets
PE(a,b) in cycle `r+a+b`. Each row of the register is one wave of data
moving diagonally through the array. Different rows never interact; they
just follow each other one cycle apart.

Results leave the array at the east edge, which holds the smaller keys,
and at the south edge, which holds the larger keys:

* east row `a` goes to element `N-1-a` of `td1`;
* south column `b` goes to element `b` of `td2`.

Deskew buffers (lane `k` delayed by `N-k` cycles) line each result row up
again before it is written back. With this placement the sorted output of
a row is `td1` (OC0 keys, ascending) followed by `td2` (OC1 keys,
ascending).

## The processing element

Each PE is given a west item and a north item, both belonging to the same
stream row and pass. An item is 32 bits of data plus three tag bits:

* **source**: which input chunk the key came from (west chunk = 0);
* **duplicate**: the slot holds no valid key (padding, a combined copy, or
  an excluded key). Such a slot behaves as larger than any valid key;
* **merge**: the key has met a key of the other chunk that is at least as
  large, so it is certain to belong in this merge step's output.

For key instructions the PE picks one of three routes and stores it, two
bits per route, at `[pass][stream row]`:

| route | condition | east output | south output |
|---|---|---|---|
| forward | west key larger | west | north |
| switch | north key larger | north | west |
| combine | equal valid keys | west copy, tagged duplicate | north |

The checks are made in this order:
* an invalid west key forwards (it is "largest");
* otherwise an invalid north key switches;
* otherwise the comparison decides.

PEs on the main diagonal (array row = column) always switch in the
first pass of `mssortk` and in every compressing pass. This is what turns
the grid of compare-exchange cells into a sorting network for the two
chunks that meet there.

For value instructions the PE ignores the data and replays the stored
route for that stream row and pass. On *combine* it adds the two values
into the south output, in IEEE single precision (`spz_fp32_add`), and
sends a zero duplicate east. The PE's output
registers are its pipeline stage: every PE adds one cycle.

### The merge bit, which is the subtle part

A merge step combines the next N keys of two sorted streams. A key of
chunk A that is larger than the last key of chunk B cannot be emitted yet,
because the next chunk of B may still contain smaller keys. Such keys are
found by the merge bit. In the first pass of `mszipk`, a valid key gets
its merge bit set when it meets a key of the *other* chunk that is larger
or equal.

That rule alone is not enough. In a merge, two keys of the *same* chunk
can meet at a PE, and when they do, the one that ends up south never sees
the other chunk's larger key. This design adds a second rule: when two
valid keys of the same chunk meet, the smaller one inherits the larger
one's merge bit. That is correct because a sorted chunk's keys below a
merged key are merged too. Random tests of up to a million rows found no
error with both rules, and dropped keys with the first rule alone.

Sort instructions set the merge bit of every valid key, because a sort
excludes nothing.

## Two passes and the loop-back paths

Items leaving the east and south edges in the first pass are sent
straight back in:

* east → west and south → north, through one pipeline register on each
  path;
* the items are re-tagged as pass 1;
* a key whose merge bit is still clear is turned into a duplicate here,
  which is how exclusion happens.

In the compressing pass the diagonal switches unconditionally and
every valid key wins against every duplicate. Valid keys therefore pack
towards the front of each output half, and duplicates collect at the end.

Timing of one stream row `i` whose first pass starts at PE(0,0) in cycle
`t_i`:

| event | cycle |
|---|---|
| first pass at PE(a,b) | `t_i + a + b` |
| compressing pass at PE(a,b) | `t_i + a + b + N + 1` |
| result of edge lane `a` leaves the array | `t_i + a + 2N` |
| whole result row written back, after deskew | `t_i + 3N` |

For `N = 16`, a key instruction accepted alone in cycle `c` has its last
row written back so that the unit is idle again 4N+3 cycles after `c`.
The testbench checks this exactly.

## Counters

A popcount stage watches the edges of the array:

* **IC0 / IC1** count the first-pass edge items with the merge bit set,
  split by the source bit. These are the keys consumed from `td1` and
  from `td2`;
* **OC0 / OC1** count the valid compressing-pass items at the east and
  south edges.

Each counter is 5 bits wide (it counts up to 16). Counters are cleared
when a key instruction starts; value instructions leave them alone.

## Overlapping key and value instructions

A value instruction needs only the routes that its key instruction
recorded. PE(0,0) holds the last of those once the key instruction's last
row has finished its compressing pass there. The sequencer therefore lets
a value instruction start reading its rows 2N+1 cycles after the key
instruction's first row, while the key instruction is still draining.
The next *key* instruction waits until everything has been written back.

## Register file and memory

Each matrix register is a 1-read 1-write bank of N rows. Two crossbars
give the file two read ports and two write ports, as long as the two ports
of one cycle name different registers. The array instructions use:
* read ports 0 and 1 for `td1` and `td2`;
* write ports 0 and 1 for the east and south results.

The load/store unit uses port 0.

`mlxe.t` and `msxe.t` are split into one memory request per row:
* request address = `base + off[i]`;
* one byte-enable bit per 32-bit element, set for the elements below
  `len[i]`.

Requests go out one at a time on a valid/ready port, and each gets one
in-order response. Lengths above N are clamped to N.

## Top-level interface (`spz_matrix_unit`)

* **Command port:** `cmd_valid`/`cmd_ready`, `cmd_op`, `cmd_td1`,
  `cmd_td2` (physical register numbers), `cmd_base`, and two N-element
  vector operands `cmd_va` and `cmd_vb`:
  * loads and stores take offsets in `va` and lengths in `vb`;
  * sort and merge instructions take the two chunk lengths.

  `cmd_cimm` picks the counter for `mmv`.
* **Response:** `rsp_valid` and `rsp_vd` carry the `mmv` result one cycle
  after it is accepted.
* **Memory port:** `mem_req_*` / `mem_rsp_*`.
* **`idle`:** nothing is in flight.
* **Reset:** synchronous, active-low `rst_n`.

Acceptance rules:
* a load, a store or an `mmv` is accepted only when the array is idle;
* a sort or merge instruction is accepted only when no load or store is
  running;
* a value instruction may overlap its key instruction as described above.

## Files

| file | contents |
|---|---|
| `rtl/spz_pkg.sv` | token, tag and opcode types |
| `rtl/spz_pe.sv` | processing element |
| `rtl/spz_fp32_add.sv` | single-precision adder for the values |
| `rtl/spz_systolic_array.sv` | N x N PEs, loop-back registers |
| `rtl/spz_skew_buf.sv`, `rtl/spz_deskew_buf.sv` | staggering and re-aligning buffers |
| `rtl/spz_popc.sv` | input/output counters |
| `rtl/spz_mreg_bank.sv`, `rtl/spz_mrf.sv` | matrix register bank and 2R/2W file |
| `rtl/spz_array_ctrl.sv` | row sequencer for sort/merge instructions |
| `rtl/spz_mem_uop.sv` | row-wise indexed load/store |
| `rtl/spz_matrix_unit.sv` | top level |
| `tb/tb_*.sv` | one self-checking testbench per module |
| `tb/tb_spz_array_harness.sv` | reusable array test (figure examples, random sort/merge against a reference) |
| `tb/spz_mem_model.sv` | behavioural memory used by the testbenches |

## Verification

Every testbench prints `TB_RESULT checks=<n> failures=<m>` and has a
watchdog. Run one with plain Verilator, for example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/spz_pkg.sv tb/tb_spz_matrix_unit.sv --top-module tb_spz_matrix_unit
./obj_dir/Vtb_spz_matrix_unit
```

The adder testbench compares 200,000 random single-precision sums, plus
zeros, infinities, NaNs and rounding ties, with a reference computed in
double precision.

The array testbench covers three things:
* it reproduces the 3 x 3 sort and merge examples cell by cell: every
  PE's key in every cycle, and the counter values;
* it runs thousands of random sorts and merges at N = 3, 4 and 8
  against a software reference;
* it checks the edge timing above.

The top-level testbench runs at the full default size (N = 16,
16 registers). It first checks one sort directly:
* the register contents;
* the counters;
* the 2N+1-cycle key-to-value overlap;
* the 4N+3-cycle latency.

Then it multiplies a random 96 x 96 sparse matrix by itself the way
software would drive the unit:
* expand each row into tuples in memory;
* sort chunk pairs;
* repeatedly merge the partitions, using IC to advance and OC to size the
  output;
* compare the product with a reference.

It also counts, and requires at least once each:
* combined duplicate keys;
* excluded (held-back) keys;
* key/value overlap;
* a key instruction waiting for the array to drain;
* length clamping;
* memory back-pressure.

## Departures and limits

* **Values are single-precision numbers** added by a stand-alone fp32
  adder in each PE. The original reuses the adder of the PE's
  multiply-accumulate unit, which is not part of this design. The adder
  rounds to nearest-even and flushes subnormals to zero. Any NaN gives the
  quiet NaN `0x7fc00000`. An exact zero sum is `+0`.
* **The merge-bit rule is extended** with the same-chunk inheritance
  described above. Without it, keys are lost in some merges.
* **Counter width** is 5 bits, i.e. `log2(N)+1`. That is enough to hold
  the count 16, where a `log2(N)`-bit counter would not.
* **IC1 in the merge example:** the published 3 x 3 merge example shows a
  final IC1 value (1) that contradicts both its own earlier cycle and the
  counting rule (3). The design follows the rule.
* **Not built:** everything that belongs to the host core.
  * The out-of-order pipeline, register renaming of matrix registers,
    the issue queue, speculation and the reorder buffer are not built.
  * The vector register file is not built: vector operands arrive on the
    command port.
  * The caches and DRAM are not built: the memory port stands in for the
    core's load/store unit.
  * The dense-GEMM multiply-accumulate datapath of the baseline matrix
    engine is not built.
* **Serialisation:** loads and stores do not overlap with array
  instructions, and memory requests are issued one at a time. The
  throughput of the memory side is therefore far below what a real core
  would provide. The array itself runs at full rate: one stream row per
  cycle.
* Matrix registers are flop arrays here; a real implementation would use
  SRAM macros.
