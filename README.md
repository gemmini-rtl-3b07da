# A Gemmini-style matrix-multiply accelerator in SystemVerilog

This is RTL for a deep-learning accelerator of the kind the Gemmini generator
produces. It is modelled on the configuration the Gemmini paper evaluates.
A RISC-V host core sends it custom instructions. The accelerator then:

- moves tiles of matrices between main memory and two on-chip memories, a
  scratchpad for 8-bit operands and an accumulator for 32-bit results;
- multiplies 16x16 blocks on a 16x16 systolic array, in one of two dataflows
  chosen at run time;
- writes results back to memory, after scaling, rounding, an activation
  function and optional pooling.

It uses the host's virtual addresses. It has a small TLB of its own and asks
the host's page-table walker only on a miss. Convolutions do not need the host
to build patch matrices ("im2col"): an address generator gathers the input
pixels directly from the scratchpad.

Default size: 16x16 processing elements (PEs), int8 inputs, int32
accumulation, 256 KB scratchpad, 64 KB accumulator and a 4-entry TLB.

```
 host core ── commands ──► decode ─► dependency manager (8-entry reservation station)
     ▲                                   │ in order per unit, out of order across units
     │ page walks                        ├──────────────► DMA engine ◄──► memory port
     │                                   │                  │  ▲   └──► local TLB ──► page walks
     │                                   ▼                  ▼  │
     │                            execute controller     scratchpad      accumulator
     │                              │      │    │        (4 banks)      (adds on write)
     │                              │  transposer  im2col    │               ▲   │
     │                              ▼      ▼                 │               │   ▼
     │                          16x16 spatial array ◄────────┘  results ─────┘  scale ► shift ► ReLU ► pool ► DMA
```

## 1. The spatial array

This is the part that takes longest to understand. It is built in three layers.

**PE (`pe.sv`).** A PE holds one 32-bit register `c` and does one multiply-add
per cycle. Its control word `pe_ctrl_t` has three bits: `valid`, `load` and
`df` (the dataflow).

| mode | what the PE does | what passes through |
|---|---|---|
| weight-stationary (WS) | `out_b = in_b + in_a * c[7:0]` (the low byte of `c` is a weight) | `a` goes right |
| output-stationary (OS) | `c += in_a * in_b[7:0]` (`c` collects one output) | `a` goes right, `b` goes down |
| `load` | `c <= in_d`, and `out_d = c` | — |

`load` turns the `c` registers of a column into a shift register. WS uses it
to preload weights. OS uses it to drain results while zeros are shifted in.

**Tile (`tile.sv`).** A rectangle of PEs wired with no registers between them.
A signal crosses a whole tile in one cycle.

**Mesh (`mesh.sv`).** A rectangle of tiles with a pipeline register on every
signal that crosses a tile edge. The two levels of hierarchy span a range:

- 16x16 tiles of 1x1 PE (the default) is a fully pipelined systolic array,
  like a TPU;
- one 16x16 tile is a set of combinational dot-product trees, like a vector
  engine.

Both extremes, and everything in between, come from the four parameters
`MESH_ROWS`, `MESH_COLS`, `TILE_ROWS` and `TILE_COLS`.

**Skew.** In a pipelined array, data that crosses `k` tile edges arrives `k`
cycles late. The mesh hides this from its user:

- the `a` inputs of tile row `r` are delayed by `r` cycles;
- the `b`, `d` and control inputs of tile column `c` are delayed by `c` cycles;
- the bottom outputs of column `c` are delayed by `MESH_COLS-1-c` cycles.

The user therefore sees a plain pipeline. A row vector and its control word go
in together, and the matching result row and control word come out together
exactly `LATENCY = MESH_ROWS + MESH_COLS - 2` cycles later (30 at 16x16).

**Using the array.** Let `A` (M x K) be the streamed operand, `B` (K x N) the
other one, and `DIM` = 16.

- **WS, `C = A*B`.**
  1. Preload: for `DIM` cycles, send rows of `B` on `in_d` with `load=1`,
     last row first. After `DIM` cycles, PE (k, j) holds `B[k][j]`.
  2. Stream: for `DIM` cycles, send row `i` of `A` on `in_a` and zeros on
     `in_b`.
  3. Row `i` of `C` leaves `out_b` `LATENCY` cycles later.
- **OS, `C = A*B`.**
  1. For `DIM` cycles, send zeros with `load=1` to clear the PEs. In the same
     cycles, rows of `A` are written into the transposer.
  2. For `DIM` cycles, send column `k` of `A` on `in_a` and row `k` of `B` on
     `in_b`. After this, PE (i, j) holds `C[i][j]`.
  3. Drain: for `DIM` cycles, send zeros with `load=1`. The rows of `C` leave
     on `out_d`, last row first.

The transposer (`transposer.sv`) is a 16x16 register matrix. It is written by
rows and read by columns. It exists because the scratchpad stores `A` by rows,
while OS needs `A` one column per cycle.

## 2. Local memories and local addresses

Commands name on-chip rows with a 32-bit *local address*:

| bits | meaning |
|---|---|
| 31 | 1 = accumulator, 0 = scratchpad |
| 30 | on writes into the accumulator: add to the row instead of overwriting it |
| 29..0 | row number |

**Scratchpad (`scratchpad.sv`).**

- 256 KB in 16384 rows of 16 x 8 bits, split into 4 banks by the high address
  bits. Each bank has one read and one write port.
- The execute controller's reads always win. A DMA read to the same bank in
  the same cycle sees `dma_rd_ready` low and retries.
- The execute controller can also write result rows here. Its write wins the
  bank's write port; a DMA write to the same bank sees `dma_wr_ready` low.
- Reads return data one cycle later, valid only in that cycle.

**Accumulator (`accumulator.sv`).**

- 64 KB in 1024 rows of 16 x 32 bits.
- A write either overwrites a row or adds to it, element by element, in the
  same cycle.
- The execute controller's writes win. The DMA write port has a ready signal.
- Reads, used by stores, have one cycle of latency.

The arrays stand in for SRAM macros.

## 3. Command set

Commands arrive as `{funct[6:0], rs1[63:0], rs2[63:0]}`. The paper gives no
encoding; the one below is this design's own.

| funct | command | fields |
|---|---|---|
| 0 | CONFIG | `rs1[1:0]` selects the target (below) |
| 2 | MVIN (load) | `rs1` = virtual address; `rs2[31:0]` = local address; `rs2[47:32]` = rows. Row `r` comes from `rs1 + r*load_stride`. |
| 3 | MVOUT (store) | as MVIN, in the other direction |
| 4 | COMPUTE | `rs1[31:0]` = A row; `rs1[63:32]` = B row; `rs2[31:0]` = C local address (accumulator, or scratchpad when bit 31 is clear); `rs2[47:32]`/`[63:48]` = first output pixel row/column when im2col is on |
| 7 | FLUSH | empty the TLB |

CONFIG targets:

| `rs1[1:0]` | target | fields |
|---|---|---|
| 0 | execute | `rs1[2]` = dataflow (1 = WS, 0 = OS); `rs1[4:3]` = activation and `rs1[10:5]` = shift for results written to the scratchpad |
| 1 | load | `rs2[63:32]` = load stride in bytes |
| 2 | store | `rs2[63:32]` = stride; `rs2[15:0]` = scale; `rs1[3:2]` = activation (0 none, 1 ReLU, 2 ReLU6); `rs1[9:4]` = shift; `rs1[12:10]` = pool window; `rs1[19:16]` = ReLU6 shift |
| 3 | im2col | `rs1[2]` = enable; `rs2` = {`kw[55:48]`, `kh[47:40]`, `stride[39:32]`, `out_w[31:16]`, `in_w[15:0]`} |

A load into the accumulator sign-extends each 8-bit element to 32 bits. With
bit 30 set, the load adds to what is there; this is how a bias is loaded.

## 4. Ordering: the dependency manager

Decoded commands wait in an 8-entry reservation station (`dep_mgmt.sv`)
together with the local rows they read and write. The rows are kept as
half-open ranges, with the accumulator above the scratchpad in one address
space. Examples:

- MVIN writes its destination rows.
- MVOUT reads its source rows.
- COMPUTE reads its A and B rows and writes its 16 C rows.
- A COMPUTE with im2col on reads the whole scratchpad, because its gather
  pattern is not a simple range.

There are two units, the DMA engine and the execute controller. Each runs
one command at a time, in program order for that unit. A command may overtake
older commands of the *other* unit unless one of them is unfinished and their
ranges overlap where at least one of the two writes (read-after-write,
write-after-read or write-after-write). The next tile's loads therefore run
during the current compute. An age matrix tracks the order. The top counts
the cycles lost to hazards in `n_dep_stalls`.

## 5. Running a compute: the execute controller

`ex_controller.sv` turns one COMPUTE into scratchpad reads, array inputs and
accumulator writes, following the sequences of section 1.

- Scratchpad reads return one cycle later. A one-entry token pipeline records
  what each returning row is for: a WS preload row, a WS A row, an OS A row
  into the transposer, or an OS B row.
- Results are written to the C rows as they leave the array.
  - If C is an accumulator address, the 32-bit sums are written. With bit 30
    of C set, they are added to the row.
  - If C is a scratchpad address, each sum first passes a rounding right
    shift, saturation to 8 bits and the activation chosen by CONFIG execute
    (the same `bitshift` and `relu` blocks the store path uses). The row is
    then written into the scratchpad, where the next layer can read it
    without a trip through main memory.
- Time from command accepted to `done`:
  - WS: `2*DIM + LATENCY + 3` = 65 cycles;
  - OS: `3*DIM + LATENCY + 3` = 81 cycles.
  The testbenches check both numbers.
- Back-to-back computes do not overlap in the array. This keeps the
  controller simple; the paper does not describe how its controller pipelines
  them.

## 6. Convolutions with im2col

An input feature map is stored one pixel per scratchpad row, with up to 16
channels across the row. A convolution with kernel `KH x KW` is then the sum,
over kernel offsets `(kh, kw)`, of matrix products:

- row `p` of `A` is the input pixel under output pixel `p` at that offset;
- `B` holds the 16x16 channel-in x channel-out weights of that offset.

With im2col on, the controller does not read A from rows `A, A+1, ...`.
`im2col.sv` generates, for consecutive output pixels `(oh, ow)` starting at
`(oh0, ow0)`:

```
addr = A + (oh*stride + kh) * in_w + ow*stride + kw      (ow wraps at out_w)
```

A program loops over the kernel offsets. For each offset it writes the im2col
CONFIG and issues one COMPUTE per block of 16 output pixels. The first offset
overwrites C and the others accumulate. The end-to-end test runs a 3x3
convolution over a 6x6x16 image this way: 9 accumulating computes, stored
with ReLU6 and pooling.

## 7. Loads, stores and the read-out pipeline

`dma_engine.sv` handles one command at a time, one row at a time. Each row
costs:

1. a translation through the local TLB;
2. one memory request (16 bytes, valid/ready; reads and writes both get a
   response);
3. for loads, a write into the scratchpad or the accumulator.

A store from the accumulator passes every row through these stages:

1. `mat_scalar_mul.sv`: each int32 value times the unsigned 16-bit scale,
   giving 48 bits.
2. `bitshift.sv`: an arithmetic right shift by `shift` with round-half-up,
   then saturation to int8.
3. `relu.sv`: none, ReLU, or ReLU6. The ReLU6 upper bound is
   `min(6 << relu6_shift, 127)`, which lets "6" follow the fixed-point scale.
4. `pooling_engine.sv`: the element-wise maximum over `pool` consecutive rows.
   The window stride equals the window size. Pooled row `o` goes to
   `address + o*stride`.

Stores from the scratchpad skip steps 1-3 but still go through pooling.

## 8. Virtual memory: the local TLB

`local_tlb.sv` is a 4-entry, fully associative TLB that assumes 4 KiB pages.
Three paths answer a request:

- **Filter registers.** One register holds the last translation used by a
  read and one the last used by a write. A request to the same page is
  answered in the same cycle. DMA traffic walks through a page row by row, so
  most translations end here.
- **TLB entries.** Found `HIT_LAT` = 2 cycles after the request.
- **Miss.** The request goes to the host's page-table walker through the
  `ptw_*` port. The answer fills an entry (round-robin replacement) and the
  filter.

FLUSH empties everything. Counters report the three outcomes.

## 9. Where this departs from the paper, and what is missing

- **No bias preload into the array.** A bias is loaded into the accumulator
  and the compute accumulates onto it. Results bound for the scratchpad
  therefore cannot carry a bias.
- **Integer only.** The generator supports floating point as well; this
  design uses int8 inputs with int32 accumulation.
- **64 KB accumulator.** The paper's area table gives 64 KB, but one of its
  case-study configurations uses 256 KB. The default follows the area table.
  `ACC_KB` changes it.
- **1-D pooling only.** The paper only names a pooling engine. A 2-D window
  such as ResNet50's 3x3/2 max pool is not built.
- **Not built because it is not part of the accelerator:** the host core and
  its caches, the shared L2 cache and DRAM, the system bus (replaced by a
  simple request/response port), and the optional shared L2 TLB.
- **This design's own choices, where the paper gives no insides:**
  - the command encoding;
  - bank count and arbitration;
  - the TLB lookup latency ("several cycles" in the paper) and replacement
    policy;
  - the reservation-station rules;
  - the rounding mode and the ReLU6 bound;
  - the skew registers and the control word of the array;
  - how im2col lays out data.

## 10. Parameters

| parameter (top `gemmini`) | default | meaning |
|---|---|---|
| `DIM` | 16 | array is DIM x DIM PEs; rows are DIM elements |
| `SP_KB` | 256 | scratchpad size |
| `SP_BANKS` | 4 | scratchpad banks |
| `ACC_KB` | 64 | accumulator size |
| `TLB_ENTRIES` | 4 | private TLB entries |
| `TLB_HIT_LAT` | 2 | TLB lookup latency in cycles |
| `RS_ENTRIES` | 8 | reservation-station entries |

The package `gemmini_pkg.sv` holds the shared constants and types: widths,
enums and the command struct.

## 11. Verification and simulation

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_pe`, `tb_tile`, `tb_mesh` | arithmetic in both dataflows and the preload/drain chain; array latency for 1x1 and 2x2 tiles |
| `tb_scratchpad`, `tb_accumulator` | contents against a model; bank arbitration; write priority; accumulate |
| `tb_mat_scalar_mul`, `tb_bitshift`, `tb_relu`, `tb_pooling_engine` | bit-exact against reference arithmetic; pooling output timing |
| `tb_transposer`, `tb_im2col` | transposes; the address formula over random shapes |
| `tb_local_tlb` | 0-cycle filter hits, `HIT_LAT` hits, misses through the walker, eviction order, flush, counters |
| `tb_dma_engine` | loads and stores through real memories and TLB; scale/shift/ReLU/ReLU6/pooling; flush |
| `tb_dep_mgmt` | 400 random commands: per-unit order, no hazard ever violated, no needless stall |
| `tb_ex_controller` | WS, OS, accumulate and im2col convolutions on a real 4x4 array; results sent to the scratchpad with random shift and activation; exact cycle counts |
| `tb_gemmini` | the whole accelerator at default size (see below) |

`tb_gemmini` plays the host. It answers page walks, and its sparse memory
inserts random back-pressure and latency. It runs:

1. a WS matmul;
2. an OS matmul onto a loaded bias, with ReLU;
3. the im2col convolution with ReLU6 and pooling;
4. a strided load that crosses a page per row;
5. an OS matmul whose results go straight to the scratchpad with a shift and
   ReLU, then are stored from there.

Every result is compared with a reference. The test also counts how often each
mechanism occurs and fails if one never does: both dataflows, im2col,
accumulation, pooling, activation clipping, saturation, TLB filter hits, hits
and misses, dependency stalls, scratchpad bank conflicts and memory
back-pressure.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl rtl/gemmini_pkg.sv \
  $(ls rtl/*.sv | grep -v gemmini_pkg) tb/tb_gemmini.sv --top-module tb_gemmini -o vt
./obj_dir/vt +verilator+rand+reset+2
```

The full-size build takes about a minute and a half; the run takes seconds.
Verilator's lint reports UNOPTFLAT on the tile-boundary arrays of `mesh` and
`tile`, and on PE inputs inside a tile. It treats each array as one signal.
There is no real loop: every path between tiles passes through a register,
and inside a tile the paths run one way, top to bottom and left to right.
