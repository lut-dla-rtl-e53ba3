# A lookup-table matrix engine: RTL of the LUT-DLA core

A layer of a neural network spends almost all of its time in one product,
`C(M x N) = A(M x K) * B(K x N)`: activations times weights. This core does
that product without any multiplier. It rests on vector quantisation.

1. The K columns of A are cut into K/V groups of V columns, called subspaces.
2. For each subspace, a small codebook of C representative vectors (centroids)
   is learned offline.
3. Every length-V piece of a row of A is replaced by the number of its
   nearest centroid, a 4-bit index when C = 16.
4. The product of every centroid with the matching V rows of B can then be
   computed ahead of time. It is stored as a table of C rows by N columns of
   INT8 values: the *PSum LUT* of that subspace.
5. At run time a row of C is the sum, over all subspaces, of one table row
   each, chosen by the row's indices.

So the engine does two things:

- a **similarity search**: nearest centroid, about C distance evaluations per
  V-element piece;
- a **table lookup and accumulation**: one INT8 row read and added per piece.

The hardware is split the same way:

- the **CCM** (centroid computation module) does the search;
- one or more **IMMs** (in-memory matching modules) do the lookups.

The two run in separate clock domains and talk through asynchronous FIFOs.
The published design that this RTL follows reaches its efficiency at an
equivalent precision of 1 to 2 bits per weight.

This repository holds synthesizable SystemVerilog of the core:

- the CCM with its distance pipelines;
- the clock-domain crossing;
- an index dispatcher;
- the IMMs with their ping-pong table buffers, accumulation scratchpad and
  output stage;
- a self-checking testbench for every block and for the whole core.

The defaults are those of the largest published configuration, called
"Design 3" below:

| Parameter | Default |
|---|---|
| sub-vector length V | 3 |
| centroids per codebook C | 16 |
| output tile T_N | 768 columns |
| tile height M_MAX | up to 512 rows |
| IMMs sharing one index stream | 2 |

## The loop order: tables stay, rows stream

The order in which M, N and K are walked decides how much table memory is
needed. One subspace's table for a 768-column tile is only 16 x 768 bytes, but
all tables of a layer would not fit on chip.

The core uses a *LUT-stationary* order (N outermost, then K, then M). In
pseudocode for one operation:

```
for g in 0 .. groups-1                 # groups of N_IMM output tiles
  for k in 0 .. nc-1                   # subspaces (nc = K / V)
    IMM i holds table LUT[k][tile g*N_IMM + i]       (loaded while k-1 ran)
    for m in 0 .. rows-1               # rows of the tile, rows <= M_MAX
      idx = nearest centroid of A[m][k*V .. k*V+V-1] in codebook k
      every IMM i:  S_i[m][:] += LUT_i[idx][:]       (S = scratchpad)
  every IMM i drains S_i[0..rows-1] through dequantisation and activation
```

This order gives four properties:

- Only the current table and the next one need to be on chip, as two banks
  (ping-pong). The next table is loaded while the current one is in use.
- Loading is hidden as long as `rows` lookups take longer than one table load.
  A table is `C * T_N` bytes, so at one lookup per cycle that needs a load
  bandwidth of about `T_N * C / rows` bytes per cycle.
- Partial sums never leave the chip. A scratchpad of `M_MAX x T_N`
  accumulators holds them until the last subspace.
- One index serves all N_IMM IMMs at once, because they work on different
  output tiles of the same rows.

### How this order treats k = 0

The published pseudocode computes indices only in the first pass over the
output tiles. Its own memory table, however, sizes the index buffer at M
entries, which holds only the indices of one subspace.

This core follows the buffer size. The CCM recomputes the indices for every
group of output tiles, so the input rows are streamed once per group. The
result is the same; the cost is repeated similarity search when N spans more
than N_IMM tiles.

## Similarity side (CCM)

### dPE and CCU: a systolic nearest-centroid search

A CCU is a chain of C distance processing elements (dPEs). Stage j owns
centroid j. A vector enters at stage 0 together with:

- a running minimum set to the largest representable value;
- a running index of 0.

In each stage, in one cycle, the dPE:

1. computes the distance between the vector and its centroid;
2. compares it with the running minimum using a strict `<`;
3. registers the vector, the possibly updated minimum and index, and the
   vector's subspace tag for the next stage.

A new vector can enter every cycle. The nearest index leaves the last stage C
cycles later. On a tie the lower centroid number wins.

The distance is chosen at build time (`METRIC`):

| Metric | Distance |
|---|---|
| L2 | squared Euclidean |
| L1 | sum of absolute differences (the default) |
| Chebyshev | largest absolute difference |

L1 and Chebyshev need no multiplier. Distances are held at full precision
(`2*DATA_W + 2 + log2(V)` bits), so no comparison ever overflows.

Each stage reads its own centroid *of the subspace of the vector it currently
holds*. Consecutive vectors in the pipeline may belong to different
subspaces, so every stage gets its own read port, indexed by the tag that
travels with the vector.

### Centroid buffer

The centroid buffer is a memory of `NC_MAX x C` centroids. It is written one
centroid per cycle before an operation. For every CCU stage it provides a
combinational read port `[tag][j]`. The CCM has two copies, each shared by
half of the CCUs, written together. The number of copies is a layout choice
with no functional effect.

### Input buffer and beats

Input rows arrive in **beats**: N_CCU sub-vectors of the same subspace, rows
`m .. m+N_CCU-1`. Lane u of a beat goes to CCU u, so CCU u handles rows
`m mod N_CCU = u`.

A small FIFO, the input buffer, decouples the stream from the CCUs. The CCM
controller:

- counts beats in loop order (group, subspace, row block);
- tags each beat with its subspace;
- marks the lanes past the last row of a partial final beat as invalid.

### Stalling

Every CCU writes its indices into its own clock-crossing FIFO. If any of
these FIFOs is full, every pipeline in the CCM freezes (one enable), so no
index is ever dropped or reordered. `ccm_stall_cycles` counts the cycles in
which the CCM was frozen while it had work pending.

## Crossing to the lookup clock

There is one asynchronous FIFO per CCU, of the standard kind:

- Gray-coded pointers;
- two-flop synchronisers;
- registered full and empty flags, so both are conservative.

The depth is 16 (`FIFO_DEPTH`).

On the IMM side the **index dispatcher** reads the FIFOs round-robin
(0, 1, ..., N_CCU-1, 0, ...) to restore row order. It restarts at FIFO 0 at
the start of every subspace, which is why it needs the row count. An index
is broadcast to all IMMs and popped only when every IMM is ready, so the
IMMs run in lockstep on one index stream.

## Lookup side (IMM)

An IMM owns one output tile of `T_N` columns. The lookup path has two pipeline
stages.

- **Stage 0.** The index is accepted and written to the **indices buffer** at
  row m. The buffer has M_MAX entries, read with write-first forwarding.
- **Stage 1.** The index selects one row of the **PSum LUT**: `T_N` INT8
  entries, read in one cycle from the active bank. That row is added to the
  scratchpad row m, a read-modify-write of `T_N` 32-bit accumulators. In the
  first subspace the old contents are replaced instead of added to, so the
  scratchpad needs no clearing.

### Ping-pong PSum LUT and prefetcher

The PSum LUT has two banks. The **prefetcher**:

- takes the table stream (`LOAD_W` = 32 entries per beat, row by row);
- fills one bank until it is complete, then marks it full and moves to the
  other bank;
- refuses beats (`lut_ready` low) while the bank it would fill is still full.

The IMM:

- accepts indices only while the bank of the current subspace is full;
- releases that bank when the last row of the subspace has passed stage 1.

So table k+1 streams in while table k is being used. `lut_wait_cycles` counts
the cycles an IMM waited for a table.

### Drain, dequantisation and activation

After the last subspace the IMM stops taking indices and **drains** its rows,
one per cycle, through the Dequant&Actv stage:

- `y = sat16((x * scale) >>> shift)`, with `scale` a signed 16-bit factor;
- then either identity or ReLU.

The output has a valid/ready handshake. Back-pressure stops the drain
without losing a row. Then the IMM moves on to its tile of the next group.

Drain and lookup do not overlap: each group costs `rows + 2` extra cycles per
IMM. The published description does not say how the two are sequenced.

## Using the core

`rtl/lut_dla_top.sv` is the core. Its ports fall into two clock domains.

- **CCM domain (`clk_ccm`)**
  - Codebook writes: `cb_wr_*`, one centroid per cycle.
  - `ccm_start`, which latches `ccm_cfg_rows` (1..M_MAX), `ccm_cfg_nc` (number
    of subspaces, 1..NC_MAX) and `ccm_cfg_groups`.
  - The input-beat stream `in_valid/in_ready/in_vec[N_CCU]`, in the order
    group, subspace, row block.
- **IMM domain (`clk_imm`)**
  - `imm_start` with the same three sizes, plus `scale`, `shift` and the
    activation.
  - Per IMM, a table stream `lut_*`: slices in use order (group, subspace),
    each C rows of T_N entries.
  - Per IMM, a result stream `out_*`: rows of `T_N` 16-bit values, tile by
    tile.
  - `imm_done` pulses at the end.

Both start pulses are needed, each in its own domain. The input beats and
tables can be streamed as soon as the starts are given.

Elements are signed 16-bit integers, table entries signed 8-bit, and
accumulators 32-bit. Columns beyond the real N of the last tile carry
whatever the tables hold and can be ignored.

The global buffer, the on-chip interconnect and the DRAM interface of a
complete chip are not included. What they would carry is exactly what the
three streams above carry.

### Parameters

| Parameter | Default | Origin |
|---|---|---|
| `V` | 3 | published Design 3 |
| `C` | 16 | published Design 3 |
| `T_N` | 768 | published Design 3 |
| `M_MAX` | 512 | published Design 3 |
| `N_IMM` | 2 | follows from the published throughput: GOPS / 300 MHz = 2 * 2 * V * T_N for all three published designs |
| `N_CCU` | 4 | own choice |
| `NC_MAX` | 1024 | own choice; covers K = 3072 at V = 3 |
| `DATA_W` | 16 | own choice (see below) |
| `LUT_W` | 8 | published (INT8 tables) |
| `PSUM_W` | 32 | own choice |
| `OUT_W` | 16 | own choice |
| `LOAD_W` | 32 | own choice; entries per table beat |
| `FIFO_DEPTH` | 16 | own choice |
| `METRIC` | L1 | own choice |

### Rates and latencies

- **CCM:** one beat (N_CCU sub-vectors) per `clk_ccm` cycle while not
  stalled; an index appears C cycles after its beat is taken.
- **IMM:** one lookup per `clk_imm` cycle while its table is present. At the
  defaults that replaces `V * T_N` = 2304 multiply-accumulates, or 4608
  operations, per cycle per IMM.
- **Table load:** `C * T_N / LOAD_W` = 384 beats. At the default 512 rows
  this is hidden behind the 512 lookups of the previous subspace.

## Where this RTL departs from the published design

- **Number format.** The published CCM works in a 16-bit floating-point
  format. Here inputs and centroids are signed 16-bit integers (fixed point).
  The comparison logic is the same; only the subtractors and adders differ.
- **Activations.** The published IMM evaluates non-linear activations such as
  GELU with polynomial approximations, which are not specified. Only identity
  and ReLU are built; dequantisation is the scale-and-shift above.
- **dPE register placement.** The published dPE drawing puts its registers
  on the incoming minimum and after the distance unit, ahead of the
  comparator. Here the one register per stage follows the comparator. A
  stage still takes one cycle.
- **Index reuse.** Indices are recomputed for each group of output tiles (see
  the loop-order section above).
- **Own choices where the description is silent.** These include:
  - the beat format and round-robin row assignment;
  - the two centroid-buffer copies;
  - the stall-everything policy;
  - the drain that pauses lookups;
  - all handshakes, widths and counters.
- **Not built.** The global buffer, interconnect and external memory (outside
  the core), and the host-side precomputation of the tables.
- **K longer than NC_MAX * V.** Such layers need two operations whose results
  are added outside. The scratchpad cannot be preloaded with partial sums.

## Verification

Every block has a self-checking testbench in `tb/`. Each compares the
block's outputs with values computed independently in the testbench and
prints `TB_RESULT checks=N failures=M`:

- nearest-centroid search by exhaustive loop;
- integer models of the memories and FIFOs;
- full reference GEMM through tables, saturation and ReLU.

Each testbench also has a watchdog.

`tb_lut_dla_top` runs the whole core at reduced size (T_N = 64, M_MAX = 16):

- 10 rows, so the last beat of each subspace is partial;
- 3 subspaces and 2 groups;
- random gaps on every stream;
- a 7 ns and a 10 ns clock.

It requires each of these to happen at least once:

- a CCM stall on a full FIFO;
- an IMM waiting for a table;
- a table load overlapping lookups;
- output back-pressure;
- drains of every group;
- partial beats;
- the CCM taking one beat per cycle.

`tb_lut_dla_full` runs the core at its default parameters: 512 rows,
2 subspaces, 1 group of 2 tiles of 768 columns. It checks all 786,432 output
values. Simulating it takes under a minute.

`tb_workload_bert_qkv` runs the query/key/value projection of one BERT-base
layer at the default parameters and checks every output value:

- 512 tokens;
- K = 768, that is 256 subspaces;
- 2304 output columns, run as 2 groups of 2 tiles.

It takes about a minute. The same testbench serves any layer shape by
changing its three size constants.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl +libext+.sv \
    rtl/lutdla_pkg.sv tb/tb_lut_dla_top.sv --top-module tb_lut_dla_top
./obj_dir/Vtb_lut_dla_top
```

Other checks:

- `tb_imm` also checks that the rows of a subspace are looked up in
  consecutive cycles, and that a drain takes `rows + 1` cycles.
- `tb_ccm` checks that the CCM takes one beat per cycle without back-pressure.

## Files

| Path | Contents |
|---|---|
| `rtl/lutdla_pkg.sv` | default sizes, metric and activation types, reference distance function |
| `rtl/dpe.sv`, `rtl/ccu.sv` | distance stage and the C-stage search pipeline |
| `rtl/centroid_buffer.sv` | codebook memory with one read port per pipeline stage |
| `rtl/sync_fifo.sv` | CCM input buffer |
| `rtl/ccm.sv` | CCM: input buffer, codebooks, CCUs, controller, stall logic |
| `rtl/async_fifo.sv` | clock-domain crossing for the indices |
| `rtl/index_dispatch.sv` | merges the FIFOs into row order and broadcasts to the IMMs |
| `rtl/indices_buffer.sv` | per-row index store of an IMM |
| `rtl/psum_lut.sv`, `rtl/prefetcher.sv` | two-bank table memory and its loader |
| `rtl/scratchpad.sv` | accumulators with read-modify-write |
| `rtl/dequant_act.sv` | output scaling, saturation and ReLU |
| `rtl/imm.sv` | IMM controller and lookup pipeline |
| `rtl/lut_dla_top.sv` | the core |
| `tb/tb_<block>.sv` | one testbench per block |
| `tb/tb_lut_dla_top.sv`, `tb/tb_lut_dla_full.sv` | end-to-end tests at reduced and full size |
| `tb/tb_workload_bert_qkv.sv` | a full transformer projection layer |
