# RedMulE: a half-precision matrix-multiply engine for a RISC-V cluster

RedMulE computes Z = X·W on FP16 matrices (X is M×N, W is N×K, Z is M×K) next to a
cluster of small RISC-V cores that share a multi-banked scratchpad memory. The cores
write addresses and sizes into a few registers and trigger a job. The engine then
reads X and W from the shared memory, multiplies them on an array of 32 fused
multiply-add (FMA) units, and writes Z back.

The key idea is that the FMAs are pipelined, and the pipeline latency is hidden,
not fought:

- Each FMA row works on many output elements at once.
- One memory port of 16 elements per cycle keeps 32 FMAs busy.
- In steady state, the array finishes 32 multiply-adds per cycle. The 64×64×64 job
  in the testbench runs at 99.5 % of that ideal.

This repository holds synthesizable SystemVerilog for the engine itself, with
self-checking testbenches for each part and for the whole. The surrounding cluster
is not part of it: the cores, the interconnect and the memory banks. The testbenches
replace the memory with a behavioural model.

## The array and its parameters

| parameter | default | meaning |
|---|---|---|
| `H` | 4 | FMAs chained in one row (columns) |
| `L` | 8 | rows |
| `P` | 3 | pipeline registers inside each FMA |

Each FMA is followed by one more register. A value therefore needs D = P+1 cycles to
pass one column, and H·D = T cycles to travel around a row. With the defaults,
T = 16. T is also the number of FP16 elements in one 256-bit memory row. That match
is what lets one memory access every 4 cycles feed the array.

One row of the array computes T elements of one row of Z in parallel, interleaved
in time:

- In step s, column c works on output element t = (s − c·D) mod T.
- Column c holds one X element, X[r][n], for T steps.
- A new W element, W[n][t], arrives at column c every step from the W buffer. The
  W buffer broadcasts it to all L rows.
- The partial sum leaving the last column feeds back into the first column T steps
  later. By then the first column has moved on to the next H values of n. This
  feedback is the "accumulate" path.
- At the start of a tile, the first column takes zero in place of the feedback.

After ceil(N/H) passes round the row, the T values that come out of the last column
are finished Z elements. A "store" multiplexer lets them through to the Z buffer. At
all other times it outputs zero.

Column c starts D steps after column c−1 (the skew in the picture below). As a
result, a pass reads each W row exactly once, and the sum for element t meets the
right W element in every column.

```
step   0    4    8    12   16   20 ...
col0   [W row n0 .....T steps......][W row n0+4 ...
col1        [W row n0+1 ...............][ ...
col2             [W row n0+2 .............][ ...
col3                  [W row n0+3 ..........][ ...
```

### FMA

`redmule_fma` computes round(a·b + c) with one rounding, round to nearest, ties to
even.

- The exact product and the exact addend are aligned in an 82-bit fixed-point
  accumulator whose LSB weighs 2^-48. The sum is exact.
- It is normalised once and rounded once. Overflow gives infinity.
- Any invalid case returns the quiet NaN 0x7E00: a NaN input, ∞·0, or ∞−∞.
- Subnormals are fully supported on input and output.
- An exact zero sum is −0 only when both terms are −0.
- There are no exception flags.
- The P pipeline registers sit after the arithmetic and share one enable. P = 0
  gives a purely combinational unit.

## Data movement

All memory traffic goes through one port of nine 32-bit words (288 bits). 16
elements (256 bits) are the useful payload. The ninth word lets a row start at any
16-bit aligned address:

- For an address with bit 1 set, the streamer reads nine words and shifts the result
  by one element.
- A store writes the nine words with byte enables that cover exactly the strobed
  elements.

The memory must grant a request (`tcdm_gnt_i`) and return read data exactly one
cycle after the grant (`tcdm_r_valid_i`). An assertion checks this timing.

Three streams share the port with a fixed priority:

1. **W loads** (highest): one W row per column per pass. That is one load every D = 4
   cycles in steady state.
2. **X loads**: the rows of the next X chunk. They go in the free cycles between W
   loads.
3. **Z stores** (lowest): the rows of a finished tile. They also go in the free cycles.

Between the streamer and the buffers sit three register FIFOs. The W FIFO is 4 deep;
the X and Z FIFOs are 2 deep. The FIFOs absorb the cycles in which the memory
refuses a grant.

- **W buffer** (`redmule_w_buffer`): H shift registers, one per column. When column c
  starts a pass, it takes a W row from the FIFO. It emits element 0 of that row at
  once and shifts out one element per step afterwards.
- **X buffer** (`redmule_x_buffer`): holds an X chunk of L rows × T elements, which
  covers T values of n. That is enough for D passes. It has two banks: while the
  array reads one bank, the next chunk is written into the other. Each column picks
  its element from the chunk with a pass index and its own bank bit, because column c
  changes chunk c·D steps after column 0.
- **Z buffer** (`redmule_z_buffer`): collects a finished tile column by column (T
  store steps, all L rows each step). It then hands it out as L memory rows. If the
  next tile finishes before the buffer is empty, the array stalls.

## Scheduling

`redmule_scheduler` turns the job (M, N, K and three base addresses) into everything
above. Tiles are L rows of Z × T columns of Z:

- The row block is the outer loop, the column block the inner loop.
- For each tile, the scheduler runs ceil(N/H) passes.
- It reloads the X row block once per tile, one chunk per D passes.

Control travels with the data. Every enabled step, the scheduler pushes a token into
a delay line of T stages. The token says whether a pass starts, and which pass index,
bank, accumulate and store flags apply. Column c reads the token at stage c·D. The
Z buffer reads the token at stage T. So no column needs its own counter, and a stall
freezes everything at once.

The whole array has one enable, `en`. It drops when any of these holds:

- the W FIFO cannot provide the row a column is starting;
- the X bank needed for the next pass is not complete;
- the Z buffer is still full when a new tile wants to store into it.

Requests are throttled so that FIFO entries plus loads in flight never exceed the
FIFO depth.

**Sizes that are not multiples of the array.** Rows of X and Z beyond M are
"skipped": the streamer answers with zeros and never touches memory. Columns of W and
Z beyond K are masked by keep masks and store strobes. W rows beyond N are skipped,
which adds zero products. The result is exact for every M, N and K from 1 to 65535. A
job with a zero dimension finishes at once.

The matrices are stored row-major at byte addresses, packed without gaps, with
16-bit alignment: X[m][n] is at `x_addr + 2·(m·N + n)`, and likewise for W and Z.

Ideal cycle count: ceil(M/L) · ceil(K/T) · ceil(N/H) · T, plus about T cycles to
drain the pipeline.

## Programming interface

`redmule_controller` is a register file on a 32-bit peripheral port:

- `gnt_o` is high in the same cycle as the request.
- The response (`r_valid_o`, `r_data_o`, `r_id_o`) comes one cycle later.
- Writes honour the byte enables.

| offset | register | |
|---|---|---|
| 0x00 | X_ADDR | byte address of X |
| 0x04 | W_ADDR | byte address of W |
| 0x08 | Z_ADDR | byte address of Z |
| 0x0C | M | rows of X and Z (16 bits) |
| 0x10 | N | columns of X, rows of W |
| 0x14 | K | columns of W and Z |
| 0x18 | TRIGGER | any write starts the job |
| 0x1C | STATUS | bit 0: busy |

While a job runs, writes are ignored. At the end of a job, `evt_o` pulses for one
cycle. It is meant for the cluster's event unit.

## What follows the original design and what does not

These follow the original design:

- the array organisation (H×L FMAs with P internal registers and one register after
  each);
- the feedback and store multiplexers;
- the X operands held for H·(P+1) cycles and the W elements broadcast per column;
- the 288-bit port used for both loads and stores, with the extra word for
  unaligned rows;
- one W load per 4 cycles, with X loads and Z stores fitted in between;
- the block partition: streamer, FIFOs, three buffers, datapath, scheduler,
  controller.

These are choices of this implementation, because the original leaves them open:

- the FMA's internals (the original reuses an existing FP unit; this one is written
  from scratch and gives the same IEEE results for round-to-nearest);
- the double-banked X buffer and the single-banked Z buffer;
- the FIFO depths;
- the token delay line and the stall rule;
- the tile order and padding;
- the fixed W > X > Z priority;
- the register map;
- ignoring writes while busy;
- the end-of-job event.

Not included:

- the cluster around the engine;
- timing, area and power results. The design has not been synthesised for a target
  technology;
- exception flags;
- rounding modes other than round to nearest even.

## Simulating

Every testbench in `tb/` checks itself and ends by printing
`TB_RESULT checks=<n> failures=<n>`. Each one draws random data with `$urandom` and
has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_redmule_top \
    -y rtl -y tb +libext+.sv rtl/redmule_pkg.sv tb/tb_fp16_pkg.sv tb/tb_redmule_top.sv
./obj_dir/Vtb_redmule_top
```

| testbench | what it checks |
|---|---|
| `tb_redmule_fma` | directed IEEE corner cases and about 45k random operands against a double-precision reference; P=3 with a random enable, and P=0 |
| `tb_redmule_datapath` | two tiles driven as the scheduler would, with a random enable |
| `tb_redmule_w_buffer`, `tb_redmule_x_buffer`, `tb_redmule_z_buffer`, `tb_redmule_fifo` | the buffers and FIFO against models |
| `tb_redmule_streamer` | random loads and stores, aligned or not, with masks, skips and grant denials; priority |
| `tb_redmule_scheduler` | request streams, column starts and store steps for an 11×10×20 job |
| `tb_redmule_controller` | register access, trigger, busy and event |
| `tb_redmule_top` | whole jobs programmed through the register port, Z compared bit-exactly with a sequential FMA chain (5×7×9, 16×4×16, 12×20×33 and more, some at unaligned addresses with up to 30 % of grants denied). It also runs a 64×64×64 job that must reach at least 97 % of the ideal rate, and counts each mechanism (every kind of stall, feedback, skip, mask, unaligned access, interleaving, bank swap); a mechanism that never occurred counts as a failure. |

| `tb_redmule_workloads` | the sizes of the published performance sweep and AutoEncoder-shaped jobs (below), bit-exact, each within 5 % + 64 cycles of its padded ideal |

Measured with `tb_redmule_workloads` (memory always granting):

| M×N×K | cycles | padded ideal | share of 32 MAC/cycle |
|---|---|---|---|
| 8×8×8 | 77 | 32 | 20.8 % |
| 16×16×20 | 301 | 256 | 53.2 % |
| 24×32×32 | 813 | 768 | 94.5 % |
| 24×48×64 | 2349 | 2304 | 98.1 % |
| 32×48×64 | 3117 | 3072 | 98.6 % |
| 64×64×64 | 8237 | 8192 | 99.5 % |
| 128×128×1 | 8237 | 8192 | 6.2 % |
| 8×128×16 | 557 | 512 | 91.9 % |

Each job has a fixed cost of about 45 cycles: the first X chunk, the pipeline drain
and the last Z rows. A job with K = 1 uses one of the 16 output slots of each row.
Batching inputs, so that K grows to 16, restores the utilization.

The reference in `tb/tb_fp16_pkg.sv` rounds the double-precision product-plus-addend
to FP16 with an error-free sum. It is independent of the RTL's fixed-point method.

To change the array size, override `H`, `L` and `P` on `redmule_top`. Then:

- the memory port grows to H·(P+1)/2 + 1 words;
- H·(P+1) must be even.
