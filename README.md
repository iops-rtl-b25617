# IOPS: a sparse matrix multiplier built on an inner-outer hybrid product

This is synthesizable SystemVerilog for an accelerator that computes
C = A x B in IEEE double precision. Two modes share the same hardware:

- **SSMM**: both operands are sparse.
- **SDMM**: A is sparse and B is dense, as in a graph-convolution layer
  A x (X W).

## The idea

There are two classic ways to map sparse matrix multiplication onto a
grid of processing elements (PEs).

- **Inner product.** Each row of A goes to a PE row and each column of B
  to a PE column, so the inputs are reused across the whole grid. The
  cost is that most index pairs a PE sees do not match, and those cycles
  do no useful work.
- **Outer product.** Column k of A is multiplied with row k of B. Every
  product is useful. The cost is that each PE needs its own input stream,
  and the partial sums (*psums*) land all over C.

The hybrid product takes the reuse of the first and the efficiency of
the second.

- **Grouping.** A is cut into G_NA groups of M_t rows and B into G_NB
  groups of N_t columns; the default configuration has an 8 x 8 grid, so
  G_NA = G_NB = 8. PE(g,h) owns output block (group g of A) x (group h of B).
- **Shared index walk.** One scheduler walks the non-empty columns of the
  A block and the non-empty rows of the B block. Where a column index k
  of A equals a row index of B, every PE row receives the nonzeros of its
  A group in column k, and every PE column receives those of its B group
  in row k.
- **Reuse and no waste.** The A elements are shared along a PE row and
  the B elements down a PE column, which is the inner product's reuse.
  Inside a PE, the elements are combined as an outer product, so nothing
  is computed for a zero.

The psums of one PE are kept in a buffer indexed by output row. The
address-mapping unit later sorts each row's psums by column and adds
equal columns to form the finished elements of C.

## Data formats

### Input in DRAM

The input is ordinary CSC for A and CSR for B. For each, the three
arrays of the tile's slice are stored as 64-bit words:

- pointers: K_t + 1 entries;
- locations: a 32-bit row index (A) or column index (B);
- values: doubles.

Pointers and locations use the low bits of their word.

### RP-CSC: A re-encoded, row-partitioned

The encoder turns one K slice of an A row-block into RP-CSC. For each
group g, it stores:

- `value` and a 16-bit local `row_idx` for every nonzero;
- an 8-bit `col_len` for every column in which group g has nonzeros.

Shared by all groups:

- a list of the non-empty columns (`col_idx`, 16 bit);
- a G-bit `group_bitmap` per list entry, saying which groups have
  elements in that column.

### CP-CSR: B re-encoded, column-partitioned

CP-CSR is the mirror image: per column group, `value`, a local `col_idx`
and `row_len`; shared, a list of non-empty rows with a bitmap.

### A worked example

Take a 4 x 4 A with 2 groups of 2 rows. Its nonzeros are a1 at (0,0),
a3 at (1,1), a2 at (0,2), a4 at (2,2) and a5 at (3,3). The encoding is:

    group 0: value a1 a3 a2   row_idx 0 1 0   col_len 1 1 1
    group 1: value a4 a5      row_idx 0 1     col_len 1 1
    shared : col_idx 0 1 2 3  bitmap  01 01 11 10

Row indices are local to the group. The global row is
block base + g * M_t + local row.

### Encoder timing

Encoding costs one cycle per stored element, one per column end, and one
to finish. Elements outside the A row-block are skipped. In SDMM mode the
dense B goes through the same CP-CSR encoder: every row is present and
every group is N_t long.

## The three stages and how they overlap

The accelerator takes a stream of **tile commands** (`tile_cmd_t` in
`iops_pkg`). Each command describes one tile:

- the mode;
- M_t, N_t and K_t;
- the number of nonzeros in each slice;
- the first row of the A block and the first column of the B block;
- the DRAM addresses of the six arrays;
- `max_row_len`;
- `last_k`.

A tile passes through three stages.

1. **Load/encode.** The DMA copies the six arrays into the two encoders.
   The encoders then fill one bank of Buffer A and of Buffer B.
2. **Psum calculation.** The scheduler streams that buffer bank through
   the PE array into one bank of the PE buffers.
3. **Address mapping.** The eight address-mapping units, one per PE row,
   turn that PE bank into elements of C, then clear it. A round-robin
   arbiter merges their outputs into the DMA's store port.

**Ping-pong banks.** Buffers A and B have two banks, and so do all PE
buffers. The top controller keeps one full/empty flag per bank and lets
the three stages work on three consecutive tiles at once.

**Accumulating over K.** A K dimension longer than one tile is split into
several tiles with the same A and B blocks. All but the last have
`last_k = 0`. Such tiles leave their psums in the PE bank, and the next K
slice adds onto them. Only the `last_k` tile hands the bank to address
mapping.

**Who plans the tiles.** Choosing the tiling (block sizes, K slices,
which operand to reuse) is done in software before the run. The
hardware just executes the commands.

## Scheduling: what happens in each cycle

The scheduler holds two list pointers: one into the column list of A,
one into the row list of B.

- **Unequal indices (SSMM).** Only the pointer with the smaller index
  moves. This costs one cycle.
- **Equal indices.** Every A group whose bitmap bit is set holds
  `col_len[g]` elements of that column, and every B group holds
  `row_len[h]` elements of that row. The scheduler spends
  max_g(col_len) x max_h(row_len) cycles on the pair. The loop over A
  elements is outside and the loop over B elements inside, and all PE
  rows and columns step together. A PE multiplies only when both its row
  input and its column input are valid. Both pointers then advance.
- **SDMM.** Only the A list is walked. Row k of the dense B is read
  directly at address k * N_t + j of each B group. Each A column costs
  max_g(col_len) x N_t cycles.

**Examples.** The 4 x 4 example above, multiplied by a 4 x 4 B with 8
nonzeros, takes exactly 5 compute cycles on a 2 x 2 array. A 2 x 4
sparse A times a dense 4 x 2 B takes 6 cycles on one PE. Both cases are
checked in `tb_iohp_scheduler`.

**Forwarding and skew.** Data travel through the grid in registers: A to
the right, B downwards. So that the pair issued together meets in every
PE, row g's A input is delayed g cycles and column h's B input h cycles.
PE(g,h) therefore sees a pair g + h cycles after issue.

## Inside a PE

A PE holds an FP multiplier and an FP adder, and two banks of these
buffers:

- `value`: 256 entries of 64 bits;
- `col_idx`: 256 entries of 16 bits;
- `vc_addr`: 256 entries of 8 bits;
- `row_len`: 256 entries of 8 bits.

**SSMM: append and link.** Product number `id_psum` is written to
`value[id_psum]`, with its column in `col_idx[id_psum]`. The link
`vc_addr[row * max_row_len + row_len[row]] = id_psum` is then written,
and `row_len[row]` is incremented. So each output row owns a fixed
segment of `max_row_len` slots in `vc_addr`. Its psums can be found
without searching, though they are not in column order.

**SDMM: dense accumulation.** The psum at `row * N_t + col` is read,
added to and written back. `col_idx`, `vc_addr` and `row_len` are unused
in this mode. Their storage is taken as a second 256-entry value region,
so a PE can hold a dense block of up to 512 psums. A per-entry written
bit makes untouched psums read as zero, so no clearing pass is needed.

**Timing.** The multiplier is followed by one register. The write, or
the read-add-write, happens in the next cycle.

**Overflow.** A psum that does not fit is dropped, and a sticky overflow
flag is raised. This happens when `id_psum`, the row's segment or the
dense address is out of range.

## Address mapping

For each PE of its row and each local output row i, an address-mapping
unit does the following.

1. Read `row_len[i]`.
2. Walk the row's `vc_addr` segment. For each slot, fetch `col_idx`, and
   insert the pair (column, vc_addr) into an **insertion sorter**. The
   sorter is a chain of Z = 32 register pairs. Every register compares
   its column with the new one. The first register holding a larger
   column takes the new pair, and all registers after it shift right.
   One insertion happens per cycle. Equal columns keep their arrival
   order.
3. Walk the sorted pairs. For each, fetch `value` and compare its column
   with the one held in an output register. If they are equal, the FP
   adder accumulates the value. If not, the held element is emitted.

Take a 2-row PE that holds four psums in arrival order:

| psum  | row | column |
|-------|-----|--------|
| a1*b2 | 0   | 1      |
| a3*b4 | 1   | 1      |
| a2*b6 | 0   | 0      |
| a2*b7 | 0   | 1      |

It yields (a2*b6, 0, 0), (a1*b2 + a2*b7, 0, 1) and (a3*b4, 1, 1).

In SDMM mode, the dense block is simply read out in row-major order.

**Output order and format.** Within one PE, rows come out in ascending
order, and columns in ascending order within a row. Coordinates are
global. The output of C is a stream of (value, row, column) triples; a
CSR/CSC encoder for C is not part of this design.

## Top-level interface (`iops_top`)

| port | direction | meaning |
|------|-----------|---------|
| `cmd_valid/cmd_ready/cmd` | in/out/in | tile commands (`tile_cmd_t`), valid/ready |
| `rd_req_valid/rd_req_ready/rd_req_addr` | out/in/out | DRAM read requests, one 64-bit word each |
| `rd_resp_valid/rd_resp_data` | in | read data, in request order, any latency |
| `wr_valid/wr_ready/wr_addr/wr_data` | out/in/out/out | DRAM writes |
| `c_base` | in | word address where C is stored |
| `c_count` | out | number of C elements written so far |
| `idle` | out | no tile in flight, all banks empty |
| `overflow` | out | a nonzero, psum or sorted row was dropped |

**How C is stored.** Element n of C goes to `c_base + 2n` as its value,
then to `c_base + 2n + 1` as `{row[31:0], col[31:0]}`. The order is by
tile, then by PE row, which the arbiter interleaves, then as described
above.

**Choosing `max_row_len`.** In SSMM mode, `max_row_len` must be at least
the largest number of psums any output row of a PE receives over all K
slices of the tile. M_t x `max_row_len` must not exceed 256. In SDMM
mode, `max_row_len` is not used.

## Parameters

| name | default | where |
|------|---------|-------|
| `NA`, `NB` (`GNA`, `GNB`) | 8, 8 | PE array rows/columns, groups of A/B |
| `DATA_W` | 64 | double precision |
| `IDX_W`, `LEN_W` | 16, 8 | location and length in the re-encoded formats |
| `OIDX_W`, `OPTR_W` | 32, 16 | location and pointer in the original CSC/CSR |
| `ENC_DEPTH` | 256 | encoder input entries per array |
| `GRP_DEPTH` | 256 | Buffer A/B entries per group per bank (2K per bank in all) |
| `LIST_DEPTH` | 8192 | shared index list entries per bank |
| `PSUM_DEPTH` | 256 | PE buffer entries per bank (SDMM: 512 values) |
| `SORT_DEPTH` | 32 | insertion sorter registers |

At 0.8 GHz the 8 x 8 array peaks at 64 multiply-accumulates per cycle.

## Where this RTL departs from or goes beyond the original design

- **Buffer sizes.** The published buffer-size table is read as the size
  of one bank, with a second bank added for ping-pong.
  - That table also gives the shared index list as 32-bit and the bitmap
    as 16-bit. This RTL uses 16-bit indices, as the text's format
    description says, and one bitmap bit per group.
- **PE row_len and vc_addr buffers are smaller.** They are listed as
  2 x 256 and 4 x 256 entries. Here they have 256 entries, like `value`
  and `col_idx`. This limits an SSMM tile to 256 output rows per PE, and
  to M_t x `max_row_len` <= 256. Several of the published SSMM tilings
  (for example M_t = 442, or M_t = 201 with rows of 2 psums) need the
  larger buffers. The SDMM tilings fit.
- **Encoder capacity.** Each encoder holds one whole K slice: at most
  255 columns or rows and 256 nonzeros. The published tilings use K_t of
  thousands. Here such a tile runs as many K sub-slices that accumulate
  in the PEs, so it computes the same result with more commands.
- **Spill to DRAM.** When a buffer would overflow, the original design
  stops and spills psums to DRAM. This RTL drops the element and raises
  `overflow`.
- **Output format.** C leaves as coordinate triples, not re-encoded as
  CSR/CSC.
- **Local group indices.** The encoding flow stores group-local
  indices, as the worked example does. One line of the published
  pseudo-code writes the original index instead.
- **Index comparison.** The published scheduling pseudo-code prints the
  same comparison for both unequal cases. The intended "advance the
  smaller index" was built.
- **Floating point.** The FP units round to nearest, ties to even.
  Subnormals are flushed to zero, and NaN/Inf are not handled.
- **Our own choices.** The data layouts in DRAM, the tile command, the
  handshakes and the sorter depth were all chosen for this design.
- **Not built.** The tiling optimiser (software) and the DRAM itself.

## Verification

Every block has a self-checking testbench in `tb/`. Each ends with a line
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

| testbench | what it checks |
|-----------|----------------|
| `tb_fp64_mul`, `tb_fp64_add` | bit-exact against the simulator's `real` arithmetic, random and corner operands |
| `tb_rp_csc_encoder` | the 4 x 4 example above, cycle count, a second block offset |
| `tb_cp_csr_encoder` | the mirror example for B, then random slices against a software encoder |
| `tb_group_buffer` | both banks written and read independently |
| `tb_iohp_scheduler` | every (A, B) pair that meets in each PE, with its coordinates; 5- and 6-cycle examples; random SSMM |
| `tb_iops_pe` | append-and-link contents, forwarding, SDMM accumulation into the merged region, overflow and clear |
| `tb_pe_array` | 3 x 3 array: skewed forwarding, dense and sparse psum contents per PE |
| `tb_psum_sorter` | stable sort of random rows, full detection |
| `tb_addr_map` | the 4-psum example above, random rows, dense readout, back-pressure |
| `tb_iops_dma` | all six arrays reach the encoders under DRAM stalls; C word pairs in DRAM |
| `tb_top_ctrl` | tile order, bank hand-over, K accumulation, stage overlap |
| `tb_iops_top` | the whole accelerator at default size, described below |

**The end-to-end test.** `tb_iops_top` runs the complete accelerator at
its default parameters (8 x 8 PEs) against a DRAM model with latency and
random stalls. It runs two workloads:

- **SSMM:** a 32 x 12 sparse matrix times a 12 x 16 sparse matrix. This
  is 2 row blocks x 2 K slices, so it exercises K accumulation.
- **SDMM:** a 288 x 16 sparse matrix times a dense 16 x 64 matrix, as
  4 K slices. The 288 psums per PE use the merged second value region.

It compares every element of C with a software product. It also counts
that each mechanism actually happened:

- SSMM and SDMM tiles, and the mode switch between them;
- K accumulation;
- overlap of the stages;
- scheduler mismatch steps;
- encoder skips;
- use of the merged SDMM buffer;
- arbiter conflicts;
- DRAM read and write stalls;
- equal-column accumulation.

**Running a test.** To run one testbench with plain Verilator:

    verilator --binary --timing --assert -Irtl -Itb rtl/iops_pkg.sv \
        tb/tb_iops_top.sv --top tb_iops_top -Mdir obj_top -j 8
    ./obj_top/Vtb_iops_top

The other testbenches build the same way; replace the testbench name.
Modules are found through `-Irtl`, one module per file.

## Implementation notes

- **Memories are arrays.** All memories are plain arrays with
  combinational reads. A synthesis flow will therefore build them from
  flip-flops unless they are mapped to SRAM macros. Mapping them to
  synchronous SRAM adds one read cycle in the scheduler and in the
  address-mapping units.
- **Synthesis size.** The PE buffers dominate: 64 PEs x 2 banks x
  (512 x 64 + ...) bits. Generic synthesis of the full top therefore
  takes a long time.
- **Reset.** Reset is asynchronous and active low. Assertions use
  `disable iff (!rst_n)`, so lint notes that `rst_n` is used both
  synchronously and asynchronously. This is expected.
