# A heterogeneous sparse matrix-multiplication accelerator

No single sparse accelerator is best across workloads. A dense systolic array
wastes most of its work on a matrix that is 0.01 % nonzero. An
intersection-based sparse engine spends most of its area on control when both
operands are dense. Every dataflow also caps its parallelism by one matrix
dimension (M, N or K), and that dimension is sometimes small. This design does
not build one flexible engine. It puts several small, simple engines side by
side, each with its own dataflow and its own compressed input format, and lets
software spread the work over them:

* **many-kernel scheduling**: independent kernels run at the same time, each on
  the engine that suits its shape and sparsity;
* **single-kernel scheduling**: one kernel is cut along M, N or K into parts,
  and each part is stored in the format of the engine that computes it. Parts
  split along K produce partial outputs, which are added together in the
  scratchpad.

The architecture follows *Enabling Flexibility for Sparse Tensor Acceleration
via Heterogeneity* (Qin et al.), which calls the template AESPA. That paper
describes the engines' dataflows and the chip-level organisation, but not their
micro-architecture. All widths, handshakes, timing and data layouts in this RTL
are choices made for this implementation. Each is listed under
[Departures and choices](#departures-and-choices).

## Formats and the four engines

A matrix dimension is either **U**ncompressed (every position is stored) or
**C**ompressed (only nonzeros are stored, each with its coordinate). The
subscript gives the dimension, outermost first. With A of size M×K and B of size
K×N:

* `U_M C_K` is CSR-like (a list of nonzeros for each row);
* `U_K C_M` is CSC-like (a list of nonzeros for each column);
* `U_M U_K` is dense.

A *fibre* is one such list: one row or one column of nonzeros.

| cluster | CCF (A, B) | engine | dataflow | PEs cover |
|---|---|---|---|---|
| 0 TPU-like | U_M U_K, U_K U_N | `tpu_core` | output-stationary systolic array (4×4 PEs) | an M×N block |
| 1 EIE-like | U_M U_K, U_N C_K (mode 0) or U_M C_K, U_K U_N (mode 1) | `eie_core` | A broadcast on a bus; index match in each PE; MAC queue | N (one PE per column of B) |
| 2 ExTensor-like | U_M C_K, U_N C_K | `extensor_core` | inner product with coordinate intersection | N |
| 3 OuterSPACE-like | U_K C_M, U_K C_N | `outerspace_core` | outer product, K spread over the PEs | K |

Every engine has 16 int32 PEs. It computes one 16×16×16 tile product,
O = A·B, out of a local buffer that holds one tile of each operand. Larger
matrices are handled as many tile tasks.

## Tile images: how operands are laid out

The same layout is used by the engines' local buffers and by the global
scratchpad, so loading a tile is a plain word copy. Each operand takes three
*regions*, each starting at a multiple of 256 words:

| offset | region | content |
|---|---|---|
| +0   | VAL | dense: element (r,c) at r·16+c. Compressed: the i-th nonzero of fibre f at f·16+i |
| +256 | CRD | compressed only: coordinate of that nonzero, at the same place |
| +512 | CNT | compressed only: number of nonzeros of fibre f, at +512+f (16 words) |

An engine's local buffer therefore has six regions, `LB_A_VAL` to `LB_B_CNT`
(see `aespa_pkg.sv`). A task's 6-bit `regions` mask names the regions to load.
Each fibre has 16 fixed slots, so a compressed tile always takes 528 words
whatever its density. Empty tiles need not be stored at all. What each engine
reads:

| engine | A image | B image |
|---|---|---|
| TPU-like | dense, fibre = row m | dense, row-major B[k][n] |
| EIE-like mode 0 | dense | fibre = column n, CRD = k |
| EIE-like mode 1 | fibre = row m, CRD = k | dense |
| ExTensor-like | fibre = row m, CRD = k | fibre = column n, CRD = k |
| OuterSPACE-like | fibre = column k, CRD = m | fibre = row k, CRD = n |

## The engines

All four engines share one interface. Writes arrive through `lb_wr` (region,
index, data). A `start` pulse starts the computation. Then the 256 output
words O[m][n] stream out in index order on `out_valid`/`out_ready`, and `done`
pulses after the last word. "Cycles to first output" below counts from the
start pulse.

**TPU-like (`tpu_core`, `tpu_array`, `tpu_pe`).** Sixteen PEs form a 4×4
grid. A values enter from the left edge and move right. B values enter from
the top and move down. Each PE multiplies the pair it sees, adds the product
to a partial sum that it keeps, and passes the pair on. The feeds are skewed,
so row i starts i cycles late and column j starts j cycles late. With that
skew, PE(i,j) sees A[i][k] and B[k][j] together in cycle k+i+j. A 4×4 output
block then takes 22 cycles. In one more cycle the block's 16 sums move to the
output buffer and the PEs are cleared. The 16 blocks of a tile take 370 cycles
to the first output. Zero operands are multiplied like any others.

**EIE-like (`eie_core`, `eie_pe`).** PE n holds column n of B. One row of A is
broadcast per pass, one (position k, value) pair per cycle.
* In mode 0, A is dense. The bus carries all 16 positions, and PE n walks a
  pointer through the row ids of its column. When `row_id[ptr] == k`, the
  product is pushed into the PE's MAC queue (`sync_fifo`, depth 4) and the
  pointer advances.
* In mode 1, A is compressed. Only A's nonzeros travel on the bus, and every
  PE reads B[k][n] directly from its dense column.

The MAC pops one entry per cycle and accumulates into the PE's output
register. When the row has been broadcast and all queues are empty, the 16
registers go to the output buffer. A row costs 17 or 18 cycles in mode 0, and
its nonzero count plus 2 in mode 1. The queue cannot fill at one bus word per
cycle. Its full flag still stops the bus, so a slower MAC could be used.

**ExTensor-like (`extensor_core`, `intersect_pe`).** The engine works on one
row of A at a time. PE n intersects that row's column ids with the row ids of
column n of B by a two-pointer merge, one step per cycle:
* equal coordinates give a product, and both pointers advance;
* otherwise the pointer at the smaller coordinate advances.

The row is finished when every PE has used up one of its two lists. A row
costs its slowest PE's merge length plus one cycle. All work is effectual, and
time is spent only on walking the lists.

**OuterSPACE-like (`outerspace_core`, `outerspace_pe`).** PE k holds row k of
B and receives column k of A. It forms every product A[m][k]·B[k][n] of that
outer product, one per cycle, and adds it into its own 16×16 accumulation
buffer at (m, n). When all PEs are done, the 16 partial matrices are summed by
a 16-input adder while the result streams out. The multiply phase takes the
largest nnz(A col k)·nnz(B row k) over k, plus 3 cycles. Because K is spread
over the PEs, a tile with few nonzero k leaves PEs idle. This is the
parallelism bound the paper points out for this dataflow.

## Around the engines

```
 HBM fibre stream ──► per slice: decompressor (bypass) | U_MC_K→U_KC_M converter
                                   │ fill bank
             ┌──────── gbuf_slice ×4 (two banks each, swap) ────────┐
             │ compute bank: read port      │ compute bank: write/accumulate port
        read NoC (noc_xbar)            write NoC (noc_xbar)
             │                               ▲
   sub_accel_cluster ×4: load engine ─► core ─► output stream
             ▲
        task_ctrl (task queue, in-order dispatch)
```

**Global scratchpad (`gbuf_slice`).** There is one slice per cluster, and each
slice has two banks of 2^21 int32 words. Four slices of 16 MB make the
paper's 64 MB. `sel` names the *compute* bank: cluster reads and output
writes go there. The other bank is the *fill* bank, where the memory side
writes the next operands while the engines work. A `swap` pulse exchanges the
two banks. An output write can be an accumulation (read, add, write in one
cycle), which is how the partial outputs of a kernel split along K are added
together. A host port reads either bank, and its data arrives one cycle later.

**NoC (`noc_xbar`, `rr_arbiter`).** This is a full crossbar with a round-robin
arbiter at each slice port, used twice:
* slices to clusters, for tile loads (read data returns one cycle after the
  grant);
* clusters to slices, for results.

Any cluster can reach any slice, so operands can be shared and partial outputs
can meet in one slice. When two clusters want the same slice port, one of
them waits. The top reports these waits as `ev_rd_wait` and `ev_wr_wait`.

**Memory side (`decompressor`, `format_converter`).** Each slice has both
units on its fill port. They take a stream of compressed fibres, in which each
item is (value, coordinate, end-of-fibre, nonzero) and an empty fibre is a
single item with nonzero = 0.
* The decompressor writes the dense image, one word per cycle.
* With bypass, the decompressor writes the compressed image, one write per
  value, per coordinate and per count.
* The converter takes a tile compressed by rows (`U_M C_K`) and writes it
  compressed by columns (`U_K C_M`), for the outer-product engine. It uses a
  counting-sort scatter: each column has a fill counter, and each nonzero goes
  to slot `cnt[k]` of its column. Because rows arrive in order, the row ids in
  each column come out sorted.

Each stream item names its slice, its path and the base address of the image.

**Clusters (`sub_accel_cluster`) and the task queue (`task_ctrl`).** A task
(`task_t`) describes one tile product:
* the cluster that runs it, and the EIE-like mode;
* the regions to load;
* the slice and base of A, of B and of the output;
* whether the output is written or accumulated.

Tasks wait in an 8-entry queue and are issued in order. The head task starts
as soon as its cluster is idle. If that cluster is busy, the queue waits
(`ev_hol_stall`), because issue is in order. The cluster's load engine copies
the named regions word by word over the read NoC. It then starts the core and
sends each output word over the write NoC. The partition search that builds
the task list runs off-line in software, as in the paper.

## Running kernels

*Many kernels.* Load each kernel's operands in its engine's format, swap, and
push one task per cluster. The kernels run side by side, and contend only
where they share a slice.

*One kernel split along K.* This is the paper's split-K partitioning, done
here at tile granularity:
1. Zero the output region by sending an all-zero tile through the decompressor
   into the fill bank.
2. Store each K-part in the format of the engine that will compute it.
3. Swap the banks.
4. Push one task per part, each with `o_accum = 1` and the same output
   address.

Accumulation is order-independent, so the parts may finish in any order.
Parts split along M or N are simply tasks with disjoint output addresses.

Double buffering: while one set of tasks runs on the compute banks, the next
operands stream into the fill banks. After the swap, results of the previous
round are in the fill banks and can be read through the host port with
`host_rd_bank` set to the fill bank.

## Sizes

| quantity | value | origin |
|---|---|---|
| PEs per engine | 16, int32 | paper |
| tile | 16×16 per operand in the local buffer | paper |
| engines | 4 types × 1 | the paper's four-type, 16-PE-each example |
| scratchpad | 4 slices × 2 banks × 2^21 words = 64 MB | paper (64 MB), split this design's |
| task queue | 8 | this design |
| EIE MAC queue | 4 | this design |

The chip the paper evaluates fills 600 mm² and has thousands of PEs. The paper
builds it by replicating 16-PE cores in proportions found by a search it does
not publish. This RTL is the four-core configuration. More clusters of a kind
means raising `N_CL` and choosing kinds per cluster. The paper's scratchpad
bandwidth (8.192 TB/s) and HBM bandwidth (1 TB/s) belong to that full chip.
Here each slice port moves one word per cycle, and the memory side takes one
fibre item per cycle.

For the workloads of the paper's evaluation, only the smallest
(`journals`, 124×124×62) fits in one bank set of the scratchpad at once, in
this layout. The others run as sequences of tile tasks, with operands streamed
through the fill banks. `aespa_workloads_tb` runs journals whole. For the others it
runs one output tile at the workload's densities.

## Departures and choices

* **Micro-architecture is this design's.** The paper generated its engines
  with HLS and reports initiation intervals of 1 (TPU-like), 17 (EIE- and
  ExTensor-like) and 6 (OuterSPACE-like). These engines are hand-written and
  fully pipelined at one step per cycle, so their cycle counts do not match
  those figures.
* **ExTensor-like.** The paper has one intersection unit whose values are
  distributed to the PEs through a NoC. Here each PE has its own intersection
  unit, reading a shared A row buffer. The matches are the same, and there is
  no separate NoC.
* **OuterSPACE-like.** The paper says both that each PE owns part of the
  output and that its generated design spreads K over the PEs. This design
  follows the second, so each PE keeps a full partial output tile, and the 16
  tiles are summed at the end.
* **EIE-like parallelism.** The description of the EIE-like dataflow has one
  PE per column of B (N PEs), while the many-kernel example speaks of
  unrolling M onto its PEs. This design follows the dataflow description.
* **TPU-like.** The 4×4 arrangement of the 16 PEs is a choice; the paper gives
  only the count.
* **Not built:**
  * the MatRaptor-like (Gustavson) engine, which the paper generates but uses
    only as a baseline;
  * floating-point units (the paper's engines are int32, with FP cost only
    estimated);
  * format conversions other than `U_M C_K → U_K C_M`;
  * the HBM, its PHY and the host, which are ports of `aespa_top`;
  * the off-line scheduler.
* **Storage overhead.** The compressed layout gives each fibre 16 fixed slots.
  This wastes space on very sparse tiles, and the paper gives no layout.
* **Ordering rules.** Swapping a slice while its memory-side unit is still
  writing is not allowed, and an assertion checks it. Merging partial outputs
  needs the output zeroed first.

## Simulating

All files are plain SystemVerilog (IEEE 1800-2017). `rtl/aespa_pkg.sv` must
come first; `tb/tb_pkg.sv` holds the testbench reference models. For example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/aespa_pkg.sv tb/tb_pkg.sv $(ls rtl/*.sv | grep -v aespa_pkg) \
    tb/aespa_top_tb.sv --top-module aespa_top_tb
./obj_dir/Vaespa_top_tb
```

The simulator must initialise variables randomly or to zero. The testbenches
reset and write everything they read. Each testbench prints
`TB_RESULT checks=N failures=F`.

| testbench | what it checks |
|---|---|
| `tpu_core_tb`, `eie_core_tb`, `extensor_core_tb`, `outerspace_core_tb` | random tiles from empty to dense against a reference product, output order, `done`, and the exact cycle count to the first output from each engine's timing model; EIE in both modes |
| `gbuf_slice_tb` | random fill/read/write/accumulate/host traffic with swaps against a two-bank model (1024-word banks) |
| `noc_xbar_tb` | grants, payload and response routing, work conservation, round-robin starvation bound under contention |
| `decompressor_tb`, `format_converter_tb` | written images, write counts and stray writes, with random stream gaps |
| `task_ctrl_tb` | in-order issue, no launch on a busy cluster, head-of-line stall and full-queue behaviour |
| `aespa_top_tb` | full-size design end to end: five many-kernel tasks (one per cluster plus a queued second TPU task), then one 16×64×16 kernel split along K over all four engines and merged. It counts NoC waits, queue stalls, swaps, fill/compute overlap, every memory-side path, merges and both EIE modes, and fails if any never happened |
| `aespa_workloads_tb` | full-size design, one output tile of each of the nine evaluated workloads (chem97ZtZ, journals, m3plates, synthetic dense, bibd_81_3, speech, GNMT, Transformer, Citeseer): a 16×64×16 product with operands drawn at the workload's A and B densities, split along K over the four engines and merged; EIE-like mode chosen by which operand is sparser. Then journals at its full size (124×124×62, 256 tile tasks split along K over the four clusters, about 119,000 cycles), with all 32 output tiles checked |

To change the design: engine sizes are in `aespa_pkg` (`TILE`, `NPE`) and in
the `tpu_core` parameters (`ROWS`, `COLS`). The testbenches and image layout
assume 16×16 tiles. Scratchpad depth is the `BANK_WORDS` parameter of
`aespa_top`.
