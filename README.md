# Cached sparse matrix–vector product for unstructured CFD matrices

This is synthesizable SystemVerilog for the FPGA SpMV accelerator described in
*"An FPGA cached sparse matrix vector product (SpMV) for unstructured
computational fluid dynamics simulations"* (Oyarzun, Peyrolon, Alvarez,
Martorell). The paper built its design with high-level synthesis. This RTL
re-implements it at register-transfer level. Some details the paper leaves open
are filled in here; the places where that happens are listed below.

## The idea

In an unstructured finite-volume CFD code, most of the time goes into
`y = A·x`. `A` is a sparse matrix with about five non-zeros per row, one for
each face-neighbour of a tetrahedral cell. The column indexes of a row point
anywhere in `x`, so a plain implementation fetches every `x` component from
DRAM about five times, in an irregular order.

The design relies on three properties of these matrices:

1. **After Cuthill–McKee reordering the matrix is banded.** Rows `i` and `i+1`
   use nearly the same range of `x`. As the computation walks down the rows,
   the window of `x` it needs slides forward.
2. **The matrix is constant for the whole simulation.** Any amount of host
   preprocessing is therefore affordable, because it is done once.
3. **Every row has at most five entries.** An ELLPACK layout with exactly five
   stored entries per row (zero-padded) is therefore regular and wastes
   little.

Each core keeps the current window of `x` in an on-chip **cache vector**. This
is a block RAM used as a circular list. New components are appended at a
write pointer, and the oldest ones are overwritten once the pointer wraps. The
host knows the exact order in which components will be appended. It therefore
**rewrites every column index as the cache position its component will
occupy**. The hardware has no tags, no hit/miss logic and no replacement
policy: it reads `cache[index]`. These indexes are smaller than the cache
(16,384 entries), so they fit in 16 bits instead of 32. That also cuts the
index traffic in half.

## Data layout prepared by the host

The matrix is cut into **slices** of `S = 512` rows. Within a slice, the five
stored entries of every row are laid out **column by column**. Entry `e` of a
slice (`0 ≤ e < 5·S`) is entry number `e / S` of row `e mod S`. For `S = 4`, the
first eight values are the first entries of rows 0–3 followed by their second
entries.

| Array | Element | Order |
|---|---|---|
| values | IEEE-754 double, 8 bytes | slice after slice, column-wise within a slice; padding = `+0.0` |
| indexes | 16-bit cache position, four per 64-bit beat, lowest address in bits `[15:0]` | same order as values |
| headers | one 64-bit word per slice: `offset` in `[31:0]`, `nwords` in `[47:32]` | per slice |
| x | doubles | natural order |
| y | doubles, written by the accelerator | natural order |

Slices are grouped into **blocks** of consecutive slices, one block per core.
A core is started with a block descriptor (`block_desc_t` in `spmv_pkg`). It
holds the byte addresses of the block's first header, first value, first
index, `x[0]` and the block's first row of `y`, plus the slice count `B`.
Slice `k` of a block then sits at fixed strides from these bases. The values
start at `val_base + 40·S·k`, the indexes at `col_base + 10·S·k` and the
results at `y_base + 8·S·k`.

## The cache window — how headers, indexes and the circular list agree

This part needs the most care. The hardware trusts the host completely, so
any mismatch silently reads a wrong `x` component.

The host computes, for every slice `j`, the smallest and largest column it
uses (`cs_j`, `ce_j`). Loads are made in **words** of `S` consecutive `x`
components. Within a block, the host tracks `loaded_end`, the end of the `x`
range already appended to the cache.

- The block's first slice loads from `block_start = S·floor(cs/S)` up to
  `S·ceil((ce_0+1)/S)`.
- Each later slice `j` loads only from the previous `loaded_end` up to
  `max(loaded_end, S·ceil((ce_j+1)/S))`.

The header of slice `j` carries `offset = loaded_end` (an element index) and
`nwords = (new end − loaded_end)/S`. When `nwords = 0`, the slice's whole range
is already cached and the load step costs nothing.

A core restarts its cache write pointer at entry 0 when a block starts, and
appends every component it loads. Component `c` therefore lands at cache
position `(c − block_start) mod CACHE_LEN`. That position is the index the host
stores in place of column `c`.

The host must guarantee that every column `c` a slice uses satisfies all of
the following:

- `c ≥ block_start`;
- `c < loaded_end` after that slice's load;
- `c ≥ loaded_end − CACHE_LEN`, so it has not been overwritten yet;
- `nwords·S ≤ CACHE_LEN`.

With `S = 512` and 16,384 entries (32 words), this means the window a slice
needs, rounded out to whole words, must span at most 32 words. That is about
15,000 columns around the slice's 512 rows. In these testbenches the first
load of a block starts at the lowest column used by *any* slice of the block.
That is the simplest rule that stays correct when the band widens inside a
block.

## One core (`spmv_core`)

```
            headers, x                 values        indexes
  port 0 ───────────────┐        port 1 ──┐     port 2 ──┐
                        v                 v              v
                 ┌──────────────┐   ┌─────────────────────────┐
  block desc ──> │  sequencer   │   │     matrix_streamer     │
                 │  (per slice) │   │ FIFOs, pair, unpack idx │
                 └──────┬───────┘   └───────────┬─────────────┘
                        │ offset, nwords        │ (val, idx, row, first)
                 ┌──────v───────┐   ┌───────────v─────────────┐
                 │vector_loader │──>│ cache_vector (circular) │
                 └──────────────┘   └───────────┬─────────────┘
                                                │ x = cache[idx]
                                    ┌───────────v─────────────┐
                                    │ slice_mac: mul, add,    │
                                    │ S-entry row-sum memory  │
                                    └───────────┬─────────────┘
                                    ┌───────────v─────────────┐
                                    │ result_writer ──> y     │ write port
                                    └─────────────────────────┘
```

For each slice, the sequencer runs three steps strictly in turn:

1. **Load.** It reads the slice header on port 0. Then `vector_loader` reads
   `nwords·S` components starting at `x[offset]`, at up to one per cycle, and
   appends them to the cache.
2. **Multiply.** `matrix_streamer` reads values (port 1) and packed indexes
   (port 2) in parallel. It pairs them and emits one entry per cycle, tagged
   with its row and with a *first* flag for the row's first stored entry.
   `slice_mac` reads `x` from the cache, multiplies, and adds the product into
   the row's partial sum.
3. **Write back.** `result_writer` copies the `S` row sums to `y`.

### Why S hides the floating-point latency

A row update is a loop: read `acc[r]`, add the product, write `acc[r]`. This
takes several cycles, because the double adder is pipelined. In the
column-wise order, two entries of the same row are exactly `S` entries apart.
The pipeline can therefore accept a new entry every cycle without ever
waiting for its own previous result.

In this implementation an entry takes 6 cycles from entry to write-back:

| Cycle | Step |
|---|---|
| 0 | cache read |
| 1–2 | multiply |
| 3 | row-sum read |
| 4–5 | add |
| 6 | write |

The read of `acc[r]` for the next entry of the row comes at least `S − 3`
cycles after the previous write, so any `S > 6` is safe. An elaboration-time
assertion enforces this. With the paper's `S = 512` the margin is huge. The
first entry of a row adds to `+0.0` instead of the stale sum, so the row-sum
memory never needs clearing.

### Floating point

`fp64_mul` and `fp64_add` are IEEE-754 binary64 units with round-to-nearest-even.
Each takes 2 cycles and accepts one operation per cycle. Subnormal operands
are treated as zero and subnormal results are flushed to zero. Overflow gives
infinity, and invalid operations give the quiet NaN `0x7ff8000000000000`. In
the normal range the results are bit-identical to IEEE double arithmetic. The
row sum is formed in storage order: `((((0 + a0·x0) + a1·x1) + a2·x2) + a3·x3) + a4·x4`.

## The accelerator (`spmv_top`)

`spmv_top` holds `NUM_IP = 4` independent cores, the number that fits the
paper's device with a 16,384-entry cache each. The host gives every core a
block of consecutive slices and starts them together. The cores share nothing
on chip.

Each core's four memory ports are brought out as arrays indexed by core:

- read port 0: headers and `x`;
- read port 1: values;
- read port 2: indexes;
- a write port for `y`.

The interconnect to the DRAM channels and the host runtime are outside this
design.

**Memory port protocol.** This protocol is this design's own.

- **Read port.** A request is a byte address on a valid/ready channel.
  Responses return in request order on a valid/ready channel carrying 64-bit
  data.
- **Write port.** One valid/ready channel carries address and data. A write is
  complete when it is accepted.

Requesters issue only as many reads as they have room to buffer. The loader
always accepts responses, and the streamer limits its requests by FIFO
credits. A response is therefore never refused for lack of space, and any
latency is tolerated.

**Control.** Each core has its own control signals:

- `start` is a one-cycle pulse that accepts `desc`;
- `busy` stays high until the block is finished;
- `done` is a one-cycle pulse at the end of the block.

## Timing

With memory that never stalls, a slice takes about the following (cycles):

```
  ~4 + L          header fetch            (L = memory read latency)
  nwords·S + L    load
  5·S + L + 7     multiply
  S + 2           write back
```

For `S = 512` a slice takes roughly 3,100 cycles plus 512 per word loaded. The
multiply step runs at one stored entry per cycle and per core, i.e. four
multiply-adds per cycle for the whole accelerator.

The numbers below come from simulation with a memory model of 2–8 cycle
latency and 10 % random back-pressure on every port. They are cycle counts,
not the paper's wall-clock times, which include the host runtime.

| Matrix (row count of the paper's test set) | Slices | Cycles, 4 cores |
|---|---|---|
| C50K (49,336 rows) | 97 | 103 k |
| C100K (97,521) | 191 | 200 k |
| C200K (187,078) | 366 | 375 k |
| C400K (398,000) | 778 | 790 k |
| C800K (775,058) | 1514 | 1.53 M |

The sparsity patterns are generated. Each is banded, with a band of up to
4,000 columns that changes from slice to slice. The paper does not publish
its matrices.

## What follows the paper and what is this design's choice

**Taken from the paper:**

- the cache vector as a circular list in block RAM, restarted per block;
- 16,384 entries per cache;
- `S = 512` rows per slice, with the load word equal to `S`;
- cache-relative 16-bit column indexes;
- per-slice "words to load" and "start offset" values;
- a fixed five entries per row, stored column-wise within a slice;
- double-precision values;
- the three steps per slice (load, multiply, copy back);
- four concurrent cores.

**Chosen here:**

- all port shapes and handshakes, and the 64-bit header and descriptor layouts;
- separate read ports for values and indexes;
- the internal pipeline depths;
- the handling of subnormals and NaN;
- steps that do not overlap each other;
- a result that overwrites `y` rather than accumulating into it.

**Departures and gaps.**

- *Section IV versus Section V.* The paper's general description of the format
  is *sliced* ELLPACK, where each slice has its own width and a `start_slice`
  table. The cached design it evaluates uses a constant five entries per row.
  This RTL follows the latter, so slice addresses are computed and no
  `start_slice` table exists.
- *Words or components.* The paper counts the load either in words or in
  components (`colend_i − colend_{i−1}`). Here the count is in words, with the
  offset in elements.
- *Not modelled.* The DRAM, the PCIe host link, the task-management and
  interconnect logic generated by the tool flow, and the Cuthill–McKee
  reordering and other host preprocessing are not hardware in this design.
  The preprocessing exists only as the testbench model in
  `tb/spmv_tb_pkg.sv`.

## Files

| File | Contents |
|---|---|
| `rtl/spmv_pkg.sv` | sizes, header and descriptor types, FP constants |
| `rtl/fp64_mul.sv`, `rtl/fp64_add.sv` | double-precision multiplier and adder |
| `rtl/cache_vector.sv` | circular-list cache |
| `rtl/vector_loader.sv` | word loads into the cache |
| `rtl/matrix_streamer.sv` | value/index streams, FIFOs, index unpacking |
| `rtl/slice_mac.sv` | multiply-accumulate pipeline and row-sum memory |
| `rtl/result_writer.sv` | copy of row sums to `y` |
| `rtl/sync_fifo.sv` | small FIFO helper |
| `rtl/spmv_core.sv` | one core and its slice sequencer |
| `rtl/spmv_top.sv` | `NUM_IP` cores |
| `tb/ddr_model.sv` | behavioural memory: random latency and back-pressure |
| `tb/spmv_tb_pkg.sv` | host model: matrix generation, headers, index rewriting, reference result |
| `tb/*_tb.sv` | self-checking testbenches, one per module plus end-to-end ones |

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. A
watchdog ends a hung run with a failure. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module spmv_full_tb \
    -y rtl -y tb +libext+.sv -Irtl rtl/spmv_pkg.sv tb/spmv_tb_pkg.sv tb/spmv_full_tb.sv
./obj_dir/Vspmv_full_tb +verilator+rand+reset+2
```

| Testbench | What it runs |
|---|---|
| `fp64_mul_tb`, `fp64_add_tb` | 20,000 random operations each, bit-exact against the simulator's doubles, plus special cases and the latency |
| `cache_vector_tb`, `vector_loader_tb`, `matrix_streamer_tb`, `slice_mac_tb`, `result_writer_tb` | unit tests with small `S`, including rate and latency checks |
| `spmv_core_tb` | one core, `S = 16`, 128-entry cache, two blocks |
| `spmv_top_tb` | four cores at reduced size, started together |
| `spmv_full_tb` | four cores at the default size on a C50K-sized matrix; runs in seconds |
| `spmv_workloads_tb` | all five matrix sizes at the default size (about 10 s, 200 MB) |

`spmv_core_tb` and `spmv_top_tb` check that each mechanism actually occurs:

- a slice with no load (full reuse);
- a cache wrap-around;
- padded entries;
- memory back-pressure;
- all cores busy together.

To change the configuration, override `S`, `CACHE_LEN`, `NNZ_ROW` and `NUM_IP`
on `spmv_top`. The constraints are:

- `S` a multiple of 4 and larger than 6;
- `CACHE_LEN` a multiple of `S` and at most 65,536, the reach of a 16-bit index.

Each cache costs `64·CACHE_LEN` bits of RAM, and each core adds `64·S` bits of
row-sum memory.
