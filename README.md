# D-com decomposer array: SystemVerilog for a Lanczos co-accelerator

Low-rank decomposition of a transformer layer's *activations* (not only its
weights) saves compute and memory, but only if the decomposition itself is
fast, because it has to run at inference time on every prompt. The
decomposition used here is Lanczos bidiagonalisation. Most of its time goes
into one vector kernel: re-orthogonalising a new vector `z` against the
basis vectors `V_0 .. V_{k-1}` found so far,

    for j in 0 .. k-1:   c_j = V_j . z ;   z = z - c_j * V_j

Each step is a long dot product (a reduction over thousands of elements)
followed by a broadcast and an element-wise multiply-subtract. On a GPU this
is memory-bound and dominated by the reduction. The array in this
repository is a co-processor for that kernel. It sits next to a GEMM engine
(a GPU or a GEMM accelerator). The GEMM engine computes `A v` and `A^T u`.
The array keeps the Lanczos basis in distributed local buffers and does the
re-orthogonalisation, the squared norms and the scaling.

Its central idea is **computation expansion**. The array does not reduce each
dot product over the whole chip and broadcast one coefficient. It reduces
only within groups of clusters. It then broadcasts every group's partial
coefficient and lets every processing element (PE) repeat the element-wise
multiply-subtract once per group. The sum over groups therefore happens in
each PE's accumulator, and the global reduction disappears. The expansion
factor `f` (the number of groups) trades reduction depth for duplicated
multiplies. The default is `f = 8`.

The organisation follows the D-com paper (Tahmasebi, Pellauer, Kwon):
- 16 x 16 clusters.
- 8 x 8 FP16 multiply-accumulate PEs per cluster.
- A shared buffer in each cluster.
- Row-wise and column-wise binary reduction trees, plus a scatter network.
- One memory bank per column of clusters.
- A small global memory for broadcast.
- Expansion factor 8.

The paper leaves the rest unspecified: command set, pipeline, memory sizes,
number format details and the exact mapping of the expansion. Those parts are
this design's own and are marked as such below and in each file's header.

## 1. Division of labour in one Lanczos step

Line 4 of the Lanczos loop (line 5 is the same with `U` and `u`) runs like this:

| step | where |
|---|---|
| `z = A^T u` | GEMM engine; the result is written into the memory banks through the host port |
| copy `z` (and, once, the basis) into the cluster buffers | array, `OP_LOAD` |
| `z = z - sum_j (V_j . z) V_j` | array, `OP_REORTH` |
| `beta^2 = z . z` | array, `OP_NORM2` |
| `s = 1 / sqrt(beta^2)` | host: the array has no divider or square root |
| `V_k = s * z` | array, `OP_SCALE` |
| copy results back to the banks | array, `OP_STORE` |
| SVD of the small bidiagonal matrix, `U U_h`, `V V_h^T` | outside the array |

Each cluster holds its slice of every vector in its own buffer, so a whole
iteration touches no global memory except the broadcast memory.

## 2. Array organisation (`dcom_top`)

```
            col 0        col 1              col 15
          +--------+   +--------+         +--------+
 host <-> | bank 0 |   | bank 1 |   ...   | bank15 |   one memory bank per column
          +---+----+   +---+----+         +---+----+
              |            |                  |
          [cl 0,0]     [cl 0,1]    ...    [cl 0,15]     16 x 16 clusters,
          [cl 1,0]     [cl 1,1]           [cl 1,15]     all executing the same
            ...          ...                ...         command each cycle
          [cl15,0]     [cl15,1]           [cl15,15]
              \___________/  ...   \___________/
             group tree 0            group tree 7       one 32-input FP16 tree
                   |                       |            per group of 32 clusters
                   +--> broadcast memory <-+            8 entries, read out as
                              |                         one scalar to every PE
                          sequencer (dcom_ctrl)
```

- Clusters are numbered column-major, `id = c*NR + r`. Group `g` is clusters
  `g*GS .. g*GS+GS-1`, with `GS = NR*NC/EXPANSION` (32 at the defaults, that
  is two cluster columns).
- Data layout: buffer slot `s = v*T + t` holds tile `t` of vector `v`.
  `T` is the number of 64-lane tiles per vector per cluster. Lane `l` of that
  tile in cluster `id` is element `(id*T + t)*64 + l` of the vector. The host
  writes slot `s` of cluster `(r, c)` at address `r*BUF_DEPTH + s` of bank `c`.
- Parameters: `NR = NC = 16`, `EXPANSION = 8`, `BUF_DEPTH = 64`.
  `EXPANSION` must divide `NR*NC`. `GS` must be 1 or a power of two.

## 3. Inside a cluster (`dcom_cluster`)

A cluster contains:
- 64 PEs (`dcom_pe`), each an FP16 multiplier followed by an FP16 adder on
  its accumulator.
- A 64-word x 64-lane buffer (`cluster_buffer`).
- A scatter unit (`scatter_unit`) that chooses each PE's second operand.
- Eight row trees and eight column trees (`reduction_tree`, three registered
  adder levels each).

A command moves through the cluster in two stages:

- **Stage 0:** the command arrives and its buffer word is read.
- **Stage 1:** the PEs act on the word `a`. The second operand `b` comes from
  the scatter unit, which can supply:
  - a broadcast scalar;
  - a row sum per PE row, or a column sum per PE column (sums kept from
    earlier reductions);
  - the PE's own accumulator;
  - the buffer word itself.

| command | PE action | used for |
|---|---|---|
| `C_LOAD`  | `acc = a` | bring a tile of `z` into the accumulators |
| `C_DOT`   | `prod = a*b`, sent to the trees | dot products, norms |
| `C_MAC`   | `acc = acc - a*b` (or `+`) | the expanded update |
| `C_MUL`   | `acc = a*b` | scaling |
| `C_STORE` | buffer word `= acc` | write `z` back |

How the products are reduced depends on the reduction mode:
- **`RED_ROW` / `RED_COL`:** give eight row or column sums 5 cycles after the
  command. The sums are also kept for scatter back along the rows or columns.
- **`RED_ALL`:** forms a full 64-lane dot product. The eight row sums are fed
  into column tree 0, so no extra tree is needed. A per-cluster adder
  accumulates these over the tiles between `dot_first` and `dot_last`.
  `dot_valid` rises 9 cycles after the last tile's command.

A command issued right after a `C_STORE` to the same word would read the old
data. The sequencer therefore leaves one idle cycle after each store.

## 4. Computation expansion as built (`dcom_ctrl`)

`OP_REORTH` runs two phases for each basis vector `V_j`:

1. **Dot phase:** `2T` command cycles. For each tile, `C_LOAD z_t` and then
   `C_DOT V_j,t` with `b` = the accumulators, in mode `RED_ALL`. Each cluster
   ends with its partial dot product. The eight group trees reduce these
   (5 levels at 32 clusters per group). Every group writes its partial
   `c_j,g` into its own entry of the broadcast memory in the same cycle.
   Nothing is reduced across groups.
2. **Update phase:** `T*(EXPANSION+3)` cycles. For each tile:
   - `C_LOAD z_t`;
   - then `EXPANSION` passes of `C_MAC V_j,t`, one per broadcast value
     `c_j,g`, with `acc = acc - V_j,t * c_j,g`;
   - `C_STORE z_t`;
   - one idle cycle.

   Together the passes subtract `(sum_g c_j,g) V_j`. The sum over groups is
   the second, PE-local part of the reduction.

At the defaults (`T = 1`, `f = 8`, 32 clusters per group) one basis vector
costs about 2 + 16 + 11 = 29 cycles. A step with `k` basis vectors costs
about `29k` cycles.

Raising `f` shortens the group trees. It also shrinks the part of the
reduction that must finish before the broadcast. The cost is `f`
multiply-subtract passes per tile. At `f = NR*NC` nothing is reduced at all
(full expansion); at `f = 1` the array does one global reduction and one
pass.

This reading of the paper's expansion factor is an interpretation: the paper
describes the idea and names `f = 8` as optimal for this array size, but gives
no formula. Because the groups' partials are added in the PE accumulators one
after another, the FP16 rounding differs from that of a single global
reduction. The testbenches model this order exactly.

`OP_NORM2` uses `C_DOT` with `b = a` (`T` cycles) and the same group trees.
The sequencer then adds the `f` group values in order `g = 0..f-1`.
`OP_SCALE` is `C_MUL` by a host scalar, then `C_STORE` into the destination
vector. `OP_LOAD` and `OP_STORE` copy slots `[0, nslots)` between the banks
and the cluster buffers. All 16 banks work in parallel, one word per bank per
cycle, taking `16*nslots + 2` cycles.

## 5. Number format

Everything is IEEE binary16. Multiplier and adders round to nearest even.

Subnormal inputs and results are flushed to zero. Overflow gives infinity;
invalid operations give the quiet NaN `0x7E00`.

A MAC rounds twice (product, then sum); there is no fused rounding.

The reduction trees, the per-cluster accumulator and the group trees all
work in FP16. The paper specifies FP16 multipliers and nothing about
accumulation width. An FP32 accumulator would be the first thing to change
for long vectors.

## 6. Host interface

`dcom_top` ports:
- **`cmd_valid`, `cmd` (`hcmd_t`), `cmd_ready`, `done`:** a command is taken
  when `cmd_valid && cmd_ready`. `done` pulses once when it has finished.
- **`cmd` fields:**
  - `op`;
  - `k`: the number of basis vectors;
  - `tiles`: `T`;
  - `zvec`: the vector index of `z`;
  - `dstvec`: the destination for `OP_SCALE`;
  - `nslots`: the slot count for `OP_LOAD` / `OP_STORE`;
  - `scalar`.
- **`result`, `result_valid`:** the last `OP_NORM2` value.
- **`host_en`, `host_we`, `host_col`, `host_addr`, `host_wdata`,
  `host_rdata`:** one 64-lane word of the bank of column `host_col`.
  Reads return data one cycle later. This is where the GEMM engine delivers
  `A v` / `A^T u` and collects the basis.

## 7. Where this departs from the paper, and what is not here

- **The paper's own numbers:** 16 x 16 clusters, 8 x 8 FP16 PEs, one bank per
  column, binary row and column trees, a broadcast memory, expansion factor 8.
- **This design's choices:**
  - buffer and bank sizes (64 and 1024 words);
  - the command set and two-stage pipeline;
  - the full-reduction path through column tree 0;
  - the meaning of `f` as the number of groups, and the grouping of clusters.
    The paper draws its example groups as squares of neighbouring cores.
    Here a group is a strip of whole cluster columns (two columns at the
    defaults), because that keeps a group next to its own banks.
    Either way the array computes the same thing;
  - flush-to-zero FP16 with FP16 accumulation;
  - SIMD control of all clusters;
  - leaving `1/sqrt` to the host.
- **Not built:**
  - the GEMM engine;
  - the small bidiagonal SVD at the end of Lanczos;
  - the channel-wise outlier extraction, which the paper describes as an
    algorithmic step without placing it in hardware;
  - standard-cell or memory-macro specifics (memories are plain arrays).
- **Unused path:** the row/column reduction and scatter modes (`RED_ROW`,
  `RED_COL`, `SC_ROW`, `SC_COL`) are built and tested at cluster level, but
  the sequencer's commands do not use them.
- **Performance not modelled:** the paper's latency results come from a
  performance model of memory bandwidth. This RTL has no bandwidth model of
  the banks or of the link to the GEMM engine.

## 8. Capacity against the evaluated workloads

The evaluation decomposes activations of Llama-2-7b (embedding 4096). The
sequence length is up to 4096, Lanczos runs 10 iterations, and ranks are
1, 10 and 20.

A vector of 4096 elements is 16 elements per cluster, one tile (`T = 1`).
Rank 20 needs 21 `U` plus 21 `V` basis vectors plus three working vectors:
45 of the 64 buffer words. Every evaluated configuration fits.

Vectors up to 16384 elements stay at one tile per cluster. Longer ones need
more tiles, within `(2(k+1)+3)T <= 64`. Batches are processed one prompt
after another.

## 9. Verification

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. The reference arithmetic is in
`tb/fp16_ref_pkg.sv`. It is written independently of the RTL: it computes
exactly in double precision and rounds once to FP16.

- **`tb_fp16_mul`, `tb_fp16_add`:** 20k and 30k random operands plus special
  values, bit-exact.
- **`tb_dcom_pe`, `tb_reduction_tree`, `tb_scatter_unit`,
  `tb_cluster_buffer`, `tb_memory_bank`, `tb_global_bcast_mem`:** random
  traffic against models. The trees are also checked for their `log2 N`
  latency.
- **`tb_dcom_cluster`:** every command and every reduction and scatter mode,
  bit-exact, with the 5- and 9-cycle latencies.
- **`tb_dcom_ctrl`:** the exact command streams of all five host commands.
- **`tb_dcom_top`** (2 x 4 clusters, `f = 4`, two tiles) and
  **`tb_dcom_top_mid`** (8 x 8 clusters, `f = 8`, vectors of 4096, `k = 10`)
  run one complete Lanczos step through `dcom_top_harness`. The step is:
  load, norm, re-orthogonalise, norm, scale, store, and read back. The
  harness checks the following:
  - Every stored word and both norms match a bit-exact model of the array's
    rounding order.
  - The new basis vector has unit length. Its largest `|cos|` to the old
    basis is 0.0008 at 2 x 4 clusters (vectors of 1024). At 8 x 8 clusters
    (vectors of 4096) it is 0.135. This is the cost of FP16 accumulation over
    long vectors, and the reason section 5 recommends a wider accumulator.
  - Each mechanism happens the expected number of times: bank fill and drain,
    full dot reductions, group reductions into the broadcast memory,
    duplicated multiply-subtract passes, scaling.

**Largest size simulated:** 8 x 8 clusters. The default 16 x 16 array was
not simulated here. Verilator's lint alone needs about 14 GB for it
(roughly 56 MB per cluster), and a simulation build needs more than 16 GB of
memory. The 8 x 8 build needs 3.7 GB and about two
minutes, and the run takes under two seconds.

## 10. Simulating and changing it

Files are one module, package or interface each. `rtl/dcom_pkg.sv` holds the
shared types and must be read first. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/dcom_pkg.sv tb/fp16_ref_pkg.sv tb/tb_dcom_top.sv --top-module tb_dcom_top -o sim
./obj_dir/sim
```

Any testbench works the same way: replace `tb_dcom_top`. To change the array
size, override `NR`, `NC`, `EXPANSION` and `BUF_DEPTH` on `dcom_top`; see
`tb_dcom_top_mid.sv`.
