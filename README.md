# RedMulE matrix engine in SystemVerilog

This is an RTL implementation of RedMulE, a small floating-point matrix engine meant to sit next to
the RISC-V cores of a PULP-style cluster and share their L1 scratchpad memory. It computes

    Z = (X ∘ W) ⋆ Y        X: M×N,  W: N×K,  Y, Z: M×K

- A plain GEMM has `∘` = multiply and `⋆` = add, so Z = X·W + Y.
- The "GEMM-Ops" replace the pair with another one. `∘` can be multiply, add, min or max, and `⋆` can be min or max. Examples are max-plus or min-times products for graph and path algorithms, and max-reduction of products.

All arithmetic is FP16. Each of the four tensors can be stored in memory as:

- FP16;
- FP8 E4M3 (1 sign, 4 exponent, 3 mantissa bits);
- FP8 E5M2 (1 sign, 5 exponent, 2 mantissa bits).

A cast stage widens FP8 on the way in and rounds back on the way out. This gives "hybrid FP8": for
example E4M3 activations, E5M2 gradients and an FP16 accumulator.

The default instance matches the main configuration of the original design:

- L = 12 rows and H = 4 columns of computing elements (CEs), 48 in total;
- P = 3 pipeline registers in each CE;
- one 288-bit memory port.

## The central idea: a row of CEs as a delay line

Each CE holds a fused multiply-add (FMA). Its result becomes valid P clock steps after its inputs,
and one more register sits between neighbouring CEs. A row of H CEs is therefore a circular delay
line of D = H·(P+1) = 16 slots. The last CE's output is fed back into the first CE.

The engine exploits this. Each row works on D output elements (D columns of Z) at the same time:

- At step `k` of reduction group `g`, column `c` of the array adds the product
  `X[m][g·H+c] · W[g·H+c][k]` to the partial sum of output column `k`.
- That partial sum arrives from the CE to its left, or, for column 0, from the end of the row.
- After D steps every one of the D partial sums has passed through all H columns. Each has then consumed H terms of the reduction, and the next group begins.
- In group 0, column 0 takes the Y element instead of the fed-back value. This is the "accumulate = 0" mode.
- After the last group, the last column's output is the final Z element.

Consequences:

- **No partial-sum storage.** The pipeline registers of the FMAs are the accumulator storage.
- **Simple operand delivery.** An X element stays in place for all D steps of a group. Each W element is broadcast down a whole column of L CEs, so every clock needs only one new W element per column and no new X.
- **No bubbles between tiles.** When a tile of L×D outputs finishes, its last partial results leave the row exactly as the first step of the next tile enters column 0. Consecutive tiles therefore follow each other without a gap.

The scheduler tracks all of this with a single record, the *step*:

- The fields are row tile, group, `k`, first/last-group flags, X bank and chunk, and useful rows.
- The step is generated for column 0 and shifted through a chain of D registers.
- Column `c` reads its position from `c·(P+1)` registers down the chain, and the output side reads it from the end of the chain.
- All buffers are indexed by these positions, never by counters of their own.

## Blocks

| File | Role |
|---|---|
| `redmule_pkg` | Types (job configuration, step record, formats, opcodes); exact FP16 FMA, min/max and FP8 conversions as functions |
| `redmule_fma`, `redmule_fncomp` | Stage-1 units with P pipeline registers (fused multiply-add; min/max) |
| `redmule_ce` | One computing element: stage 1 `∘`, stage 2 `⋆` against the incoming partial result, output mux |
| `redmule_datapath` | L×H CE array, register between CEs, ring feedback, Y injection |
| `redmule_cg_ctrl` | Activity masks for rows and columns that hold leftovers |
| `redmule_x_buffer` | Two banks of L×D X elements (double buffered); column `c` reads element `chunk_base + c` |
| `redmule_w_buffer` | Per column a current and a next W line of D elements; one element broadcast per step |
| `redmule_z_buffer` | Y lines preloaded for the next tile; Z lines collected and handed to the store path |
| `redmule_streamer` | The single memory port: arbitration, per-stream FIFOs, realignment, casting, byte-enabled stores |
| `redmule_cast` | FP8↔FP16 cast units with bypass |
| `redmule_scheduler` | Step generator and pipeline, global stall, four address generators, end of job |
| `redmule_ctrl` | Register file and controller |
| `redmule_fifo`, `redmule_loop4` | Helpers: fall-through FIFO; four nested loop counters |
| `redmule_top` | Everything wired together; register port, event line and memory port as plain signals |

## Computing element and arithmetic

**Stage 1** holds an FMA and a min/max unit (FNCOMP), each with P pipeline registers. Only the unit
the operation needs receives a valid item.

- A GEMM uses the FMA as `x·w + acc`.
- For the other operations:
  - `∘` = add runs on the FMA as `x·1 + w`;
  - `∘` = multiply runs on the FMA as `x·w + (−0)`;
  - `∘` = min or max runs on the FNCOMP.

**Stage 2** is a combinational min/max between the stage-1 result and the partial result from the
left, delayed by P registers to line up with it.

Arithmetic details:

- **Rounding.** Each operation is computed exactly, as an integer magnitude in units of 2⁻⁵⁰, and rounded once to nearest-even. Subnormals are kept, overflow gives infinity, and NaN inputs give a quiet NaN.
- **Min/max.** A NaN operand loses to a number (IEEE minNum/maxNum), and −0 is treated as smaller than +0.
- **FP8.** Both formats are IEEE-like: an all-ones exponent means infinity or NaN, and an overflowing store rounds to infinity. The original description names the two formats but does not fix their special values.

## Leftovers and gating

A matrix size that is not a multiple of the array leaves *leftovers*. The engine handles all three
dimensions:

- **M (rows).** Rows of a tile at or beyond M are inactive. Their X lines are not fetched, and their Z lines are not stored.
- **N (reduction).** In the last group, columns whose W row index is N or more are inactive.
- **K (output columns).** Z lines are stored with byte enables covering only the elements below K.

The original design gates the clock of unused CE rows, CE columns and buffer lines. Here every data
register has a load enable instead:

- A valid bit travels with each item.
- A register loads only when a valid item reaches it.
- An inactive CE passes the incoming partial result through unchanged.

Gated columns in the middle of a reduction therefore behave correctly without stopping the pipeline.
Synthesis can map the enables onto clock gates.

## Memory side

The port is D·16 + 32 bits wide: 288 bits by default, that is, one line of 16 FP16 elements plus one word. A
line at any 2-byte-aligned address is fetched in one access from its enclosing word address. The
streamer shifts it back by the byte offset.

The protocol is the cluster's:

- request and grant in the same cycle;
- read data with `r_valid` in order, one or more cycles later;
- no response for writes.

Streams and arbitration:

- There are three load streams (X, W, Y) and one store stream (Z).
- Priority is W > X > Y > Z.
- A load is issued only if its stream FIFO (depth 4) has room for it, counting the loads still in flight. Memory therefore never waits on the datapath.

Loop order: row tile, then column tile, then group, then step. Per tile, the engine loads:

- the W rows it needs (N lines);
- the X chunks of the L rows (one chunk = D columns, which is P+1 groups);
- the L Y lines.

It stores one Z line per useful row. X is fetched again for each column tile.

**Stall mechanism.** The whole datapath advances in one global step. The step is taken only when:

- each column has its next W line;
- the X chunk is present;
- the Y lines are present;
- the Z buffer is free.

Otherwise every register holds its value.

## Programming

Register map (word offsets, byte addresses):

| Offset | Register | Content |
|---|---|---|
| 0x00 / 0x04 / 0x08 / 0x0C | X / W / Y / Z address | byte addresses, rows dense and row-major |
| 0x10 | M_N | M in [15:0], N in [31:16] |
| 0x14 | K | K in [15:0] |
| 0x18 | OP | `∘` [1:0] (mul, add, min, max); `⋆` [3:2] (add, min, max); formats of X, W, Y, Z in [5:4], [7:6], [9:8], [11:10] (FP16, E4M3, E5M2) |
| 0x1C | TRIGGER | any write starts the job |
| 0x20 | STATUS | bit 0 = busy |
| 0x24 | CYCLES | length of the last job |

- Writes are ignored while a job runs.
- Read data appears one cycle after the request.
- `evt_o` pulses for one cycle at the end of the job.
- Z may be placed over Y (in-place bias update).

## Where this implementation departs from the original

- **Separate Y and Z buffers.** The original shares one buffer for the Y bias and the Z result. Separate ones let the next tile's Y preload overlap the current tile's Z drain.
- **Clock gating.** Implemented as load enables (see above), not as clock-gating cells.
- **W buffer.** The H W shift registers are stored lines read by index.
- **Port width.** It always follows the FP16 line width (D·16 + 32). The 12×8 variant described for 8-bit-only inputs (32 FP8 elements through the same 288-bit port) is not provided.
- **Arbitration, FIFO depth, register map, FP8 special values and loop order** are choices made here.
- **Not included.** The surrounding cluster: cores, scratchpad banks and interconnect, DMA, event unit, instruction cache, DataMover and the cluster clock gate. The testbench models the memory behaviourally.

## Verification

Each leaf block has a self-checking testbench in `tb/` whose reference model is written separately
from the RTL:

| Testbench | Checks |
|---|---|
| `tb_redmule_fma`, `tb_redmule_fncomp` | Random operands and stalls against real-number references with one rounding |
| `tb_redmule_ce` | All 12 operation pairs and the leftover bypass |
| `tb_redmule_cast` | Every FP8 encoding in both directions |
| `tb_redmule_cg_ctrl` | The activity masks |
| `tb_redmule_datapath` | A reduced 3×2 array (P = 1) driven tile by tile, with stalls, N/M leftovers, GEMM and max-plus |
| `tb_redmule_ctrl` | Registers, trigger, events and the tile counts |

`tb_redmule_top` runs the whole engine at the default size, with no parameter overrides:

- It runs ten jobs through the register port.
- The memory model refuses about a quarter of the requests at random.
- The jobs cover leftovers in M, N and K, several tiles in a row, every GEMM-Op pair, E4M3/E5M2 loads and stores, and unaligned lines.
- It compares every byte of Z and the bytes around it against an element-by-element reference of the same reduction order.
- It counts each mechanism and fails if one never occurred: stalls, leftovers, FP8 loads and stores, partial byte enables, back-to-back tiles, events and register read-back.

The buffers, streamer and scheduler have no unit benches of their own. They are exercised
through `tb_redmule_top`.

Simulate with Verilator, for example:

    verilator --binary --timing -Wno-fatal -y rtl -y tb +libext+.sv \
      rtl/redmule_pkg.sv tb/tb_redmule_top.sv --top-module tb_redmule_top
    ./obj_dir/Vtb_redmule_top

Each testbench ends by printing `TB_RESULT checks=<n> failures=<n>`.

Full synthesis of the default top is slow: 48 exact FP16 FMAs with 84-bit internal magnitudes. Lint
and elaboration are fast.
