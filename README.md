# NEM-GNN: a near-memory GCN engine built into a CPU core's L1 cache

A graph convolutional layer computes `relu(D^-1 A H W)`: every node's feature
vector `H[n]` is multiplied by a weight matrix (*combination*), and the
results are summed over each node's neighbourhood (*aggregation*), normalised
by node degree and passed through an activation. Done on a CPU, both halves
are memory-bound: combination is a dense matrix product, aggregation is an
irregular gather over a very sparse adjacency matrix.

This design moves both halves next to the memory of one CPU core:

* **Combination runs inside the L1 data cache.** The cache's 8T SRAM banks
  have a separate read port whose read bit line computes `stored_bit AND
  read_word_line`. With a weight row stored in the cells and one bit of an
  input feature on the read word line, one read gives one bit-plane of the
  product `W * h`. Eight reads (or fewer, see *early termination*) plus a
  shift-add give the full 8-bit x 8-bit products for a whole weight row.
  256 banks work in parallel on 256 feature elements; an adder tree per
  output column sums them.
* **Aggregation is driven by the combination result, not by the
  neighbours.** While node `n` is being combined, the aggregation engine
  reads `n`'s adjacency row and collects the list of nodes that need `n`'s
  result. When the combination vector is ready it is *broadcast*: added once
  into every listed node's row of the aggregation array. Only non-zero
  adjacency entries cost work, and no combination result is ever written back
  and re-fetched.
* **Degree normalisation is computed on the fly.** The same adjacency reads
  count each node's degree; only the diagonal of `D^-1` is stored.

The L1 banks stay ordinary cache memory in *normal mode*; one configuration
command switches them to *compute mode*.

## Block map

```
                 +-------------------- nem_gnn_core ---------------------+
 cmd_* --------->| nem_ctrl  (commands, sweeps, event counters -> perf)  |
                 |    |                                                  |
 w_*, l1_rd_* -->| comb_engine                                           |
 h_* ----------->|   256 x pim_slice -- pim_bank (8T array, AND read)    |
                 |       |             ect_unit (NEM-C2 only)            |
                 |       |             pp_array (partial products)       |
                 |       |             128 x shift_add                   |
                 |   128 x adder_reduction (256 -> 1)                    |
                 |   comb_array (128 x 32-bit accumulators)              |
                 |        | combination vector                          |
 adj_* --------->| adj_buffer (CSR) <-> agg_engine --> d_generator       |
                 |                        | broadcast row ops           |
                 |                  agg_array (+ nm_alu_row) <-> aux_control
 agg_rd_* <------|                                                       |
                 +-------------------------------------------------------+
```

`nem_pkg` holds the shared widths, the adjacency entry struct, the ALU and
command encodings and the `perf_t` counter struct.

## Combination: bit-serial products in the cache bank

A weight row of a bank holds 128 signed 8-bit weights (`pim_bank`, 32 rows,
4 KB per bank). Feature element `j` of a node goes to bank `j % 256`, and
weight row `j` of the matrix is stored in that bank at row `j / 256`. One
*H slot* is therefore 256 feature elements, one per bank, all using the same
bank row; a node with `F` features needs `ceil(F/256)` slots.

For each bank, the product of its weight row and its 8-bit feature element
`h` is built in a *partial-products array* (`pp_array`): row `k` holds the
weight row ANDed with bit `k` of `h`. A shift-add unit per column
(`shift_add`) then forms `sum_k pp[k] << k`. Because the weights are signed
and `h` is unsigned, each partial product is sign-extended before shifting.
Two ways of filling the array are built, selected by the `C3` parameter.

### NEM-C3, pre-compute and broadcast (default)

The bank is read once with the read word line forced to 1, which returns the
weight row itself: the result for every H bit that is 1 is now known, and
for every bit that is 0 it is zero. This row is latched and written into all
eight partial-product rows in one cycle, each row ANDed with its own H bit.
`pim_slice` pipelines the four steps (read, latch, broadcast write,
shift-add), so a new slot enters every cycle. Through the adder tree and the
accumulator a node of `s` slots takes `s + 5` cycles from its start to the
finished combination vector.

### NEM-C2, early compute termination

The H bits are applied one per cycle, least significant first, and each read
is stored in its partial-product row. The `ect_unit` watches the bits: as
soon as a bit is 1, the read in flight returns the weight row itself. That
row is loaded into the ECT register, the compute stops, and a single
broadcast write fills the remaining rows through a 3:1 multiplexer per row:

| row state | condition | written value |
|---|---|---|
| already read | `~Valid` when it was read | the bank read (BR) |
| still to compute, H bit 1 | `Valid & H` | ECT register |
| still to compute, H bit 0 | `Valid & ~H` | `0` |

A zero feature element takes all eight reads and no broadcast. A slot ends
when the slowest of the 256 banks has finished, so latency depends on the
data: element with first '1' at bit `k` needs `k + 4` cycles in the slice,
an all-zero element 10.

### Bank-level reduction and the combination array

`adder_reduction` is a balanced adder tree per output column that sums the
256 bank products (16-bit) into 32 bits. Its result is registered and added
into `comb_array`, 128 accumulators of 32 bits, once per slot. After the last
slot the vector is offered to aggregation and held until taken; only then can
the next node start. This hold is the one back-pressure point of the design
(counted as a *stall*).

## Aggregation: broadcast from the producer

### Adjacency buffer

`adj_buffer` stores the graph in CSR form: a row-pointer table of 257
entries and 4096 entries of `{node[16], dir, weight[8]}`. For directed
graphs each edge `u -> v` is stored twice: in `u`'s row with `dir = 0`
(outgoing) and in `v`'s row with `dir = 1` (incoming). Reads are
synchronous, one entry per cycle.

### Aggregation engine

`agg_engine` takes a node (*NodeProc*) as soon as its combination starts and,
while the combination runs,

1. reads the node's adjacency row, one entry per cycle;
2. keeps the entries whose node needs this result: all of them for an
   undirected graph, only `dir = 0` entries for a directed one; dropped
   entries are counted;
3. fills the *Update Index* register, self-loop first with weight 1, then the
   kept neighbours with their edge weights.

When the combination vector arrives it is latched (freeing the combination
array for the next node at once) and broadcast: one aggregation row per
cycle, `agg[m] += vec` for unweighted graphs (UWC engine) or
`agg[m] += weight * vec` (WC engine). If a row holds more kept entries than
the register has places (64), the engine broadcasts the register, then
resumes reading the row; the latched vector is reused, so overflow costs
time but never correctness.

Combination of node `n+1` runs while node `n` is being broadcast
("compute as soon as ready"); the controller accepts the next `MACC` as soon
as the combination engine is free.

### Aggregation array and the shared ALU row

`agg_array` holds 256 rows of 128 x 32-bit sums. Every row operation is a
read-modify-write in one cycle through `nm_alu_row`, a row of 128
multiplier/adders:

| op | result | used by |
|---|---|---|
| PASS | `b` | CLEAR, ReLU/softmax write-back |
| ADD | `a + b` | unweighted broadcast |
| MAC | `a + s*b` | weighted broadcast (`s` = edge weight) |
| SCALE | `(a*s) >>> 16` | `D^-1` scaling (`s` in Q0.16) |

### Degree generator

`d_generator` listens to the engine's adjacency reads: `row_start` loads a
counter with 1 (the self-loop), every entry adds 1 (for directed graphs only
`dir = 1` entries, i.e. in-degree), and `row_end` stores `65536 / count` for
that node. Only the diagonal is kept, one 17-bit Q0.16 value per node. The
generator is enabled for the first layer and gated afterwards; later layers
reuse the stored values.

### Auxiliary control

`aux_control` works on one aggregation row at a time. ReLU reads the row,
zeroes negative elements and writes it back (2 cycles). Softmax reads the row
into a buffer, finds the maximum, computes `e_i = exp(x_i - max)` and their
sum, and writes `e_i / sum` in Q0.16 (3 x 128 + 3 cycles). Inputs are read
with 8 fraction bits. The exponential uses `2^(x * log2 e)`: the integer part
of the exponent is a right shift and `2^f` is linearised as `1 + f`, which is
exact at the maximum and within about 6 % elsewhere.

## Control and command set

`nem_ctrl` accepts commands on `cmd_valid/cmd_ready`:

| command | `cmd_arg` | action | accepted when |
|---|---|---|---|
| LCONF | bit0 compute mode, bit1 weighted, bit2 directed, bit3 build `D^-1` | configure | all idle |
| MACC | number of H slots | combine node `cmd_node`, then aggregate it | combination engine free (refused and counted in normal mode) |
| CLEAR | rows | `agg[0..arg-1] = 0` | all idle |
| DSCALE | rows | `agg[n] *= D^-1[n]` | all idle |
| RELU | rows | ReLU on the rows | all idle |
| SOFTMAX | rows | softmax on the rows | all idle |

A GCN layer is: `LCONF`, `CLEAR`, one `MACC` per node (each followed by its
H slots on `h_*`), `DSCALE`, then `RELU` (hidden layer) or `SOFTMAX`
(output layer). The `perf` port counts accepted and refused MACCs, H slots,
early terminations, stalls, combination/aggregation overlap cycles,
broadcast updates, Update Index overflows, dropped entries, `D^-1` writes,
and the DSCALE, ReLU and softmax rows.

Weights are loaded through `w_*` (one 1024-bit bank row per cycle) and can
be read back through the normal-mode port `l1_rd_*` (data one cycle later).
The host CPU, L2 and DRAM are outside this block: H slots, weight rows and
the adjacency arrive on ports.

## Sizes and parameters

| parameter | default | meaning |
|---|---|---|
| `C3` | 1 | 1 = NEM-C3 pre-compute, 0 = NEM-C2 early termination |
| `N_TILES` x `BANKS_PER_TILE` | 32 x 8 | L1 banks used for compute (256) |
| `ROWS` x `COLS` | 32 x 128 | weight rows per bank x 8-bit weights per row (4 KB) |
| `BANK_NODES` x `AGG_BANKS` | 256 x 1 | aggregation rows (nodes held at once) |
| `ADJ_EDGES` | 4096 | adjacency entries |
| `UPD_MAX` | 64 | Update Index register places |
| `SM_IN_FRAC` | 8 | fraction bits of the softmax input |

Data widths: 8-bit signed weights, 8-bit unsigned features, 16-bit products,
32-bit accumulators and aggregates, 8-bit edge weights, 16-bit node numbers.

One core holds a weight matrix of up to 8192 x 128 (enough for the first
layer of Cora, Citeseer, Pubmed and Nell with 128 hidden units) but only 256
aggregation rows and 4096 adjacency entries, so full benchmark graphs must be
split into node ranges by the host; that partitioning is not part of this
RTL.

## Where this RTL departs from the published design

* One core only. Replication over several cores, the CPU, the L2 and DRAM
  traffic are not modelled; their data are ports.
* The NEM-C1 scheme (replicating H bits across tiles) is an alternative the
  design is compared with and is not built.
* GAT attention coefficients are not built; softmax exists only as a row
  operation on the aggregation array.
* The SRAM bank is a register array with the logical `S AND RWL` read; bit
  line precharge, sense amplifiers and timing are not modelled.
* The exponential, reciprocal and fixed-point formats, the command set, the
  handshakes, the Update Index size and the aggregation array's single bank
  and one-row-per-cycle port are this design's choices.
* NEM-C3 is pipelined one slot per cycle; the published text describes the
  steps but not their overlap.

## Verification

Every module has a self-checking testbench in `tb/` that compares against
values computed independently in the testbench (integer matrix products, a
software CSR aggregation, floating-point softmax):

| testbench | what it covers |
|---|---|
| `tb_pim_bank` ... `tb_comb_array` | leaf blocks, random stimulus |
| `tb_pim_slice` | both schemes; NEM-C3 3-cycle latency back to back, NEM-C2 latency `k+4` |
| `tb_comb_engine` | 2 x 2 banks; matrix-vector products, `s+5` cycles for NEM-C3 |
| `tb_agg_engine` | engine + buffer + array; three graph types, overflow and drops |
| `tb_aux_control` | ReLU exact, softmax within 6 % of a float reference |
| `tb_nem_ctrl` | random command streams against behavioural engines |
| `tb_nem_gnn_core` | two-layer GCN on 8-node graphs, NEM-C3 and NEM-C2 cores; each mechanism must occur |
| `tb_nem_gnn_full` | the core at default size, one GCN layer on a 6-node graph |

`tb_nem_gnn_core` counts each mechanism and fails if one never occurs:
pipelined slots, early termination, stalls, overlap, broadcast updates,
Update Index overflow, direction drops, `D^-1` writes and gating in the
second layer, DSCALE, ReLU, softmax, refused MACC in normal mode, and L1
mode switches.

To run one with Verilator:

```
verilator --binary --timing --assert -Itb rtl/nem_pkg.sv -y rtl -y tb \
    tb/tb_nem_gnn_core.sv --top-module tb_nem_gnn_core
./obj_dir/Vtb_nem_gnn_core
```

Each testbench ends with a line `TB_RESULT checks=<n> failures=<m>`.
