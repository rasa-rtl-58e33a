# RASA: a register-aware systolic-array matrix engine

A systolic array sitting inside a CPU core cannot be fed the way an
accelerator feeds it. An accelerator streams thousands of input rows through
an array once the weights are loaded, so the cycles spent filling the array
with weights and draining the last results are amortised. Inside a core, the
operands come from architectural tile registers (here: eight registers of
16 rows x 64 bytes, the AMX register model). One matrix-multiply instruction
therefore streams only **16** rows of A through the array. For a
weight-stationary array with T_K x T_N PEs, an isolated tile multiply takes
`2*T_K + T_N + T_M - 2` cycles while each PE does useful work for only
`T_M = 16` of them; for a 32x16 array that is 94-95 cycles for 16 cycles of
work.

RASA (Register-Aware Systolic Array) fixes the utilisation, not the
register size. Execution of a `rasa_mm` is split into sub-stages and the
sub-stages of consecutive instructions are overlapped, so that in steady
state a new `rasa_mm` enters the array every 16 cycles, the time it takes to
feed one A tile. This RTL implements the most aggressive configuration,
**RASA-DMDB-WLS**:

* **DM** (double multiplier): each PE has two BF16 multipliers and two FP32
  adders and carries two partial sums; a row of adders under the array merges
  them. The array is 16 x 16 PEs (512 multipliers, as in a 32 x 16 array of
  single-multiplier PEs).
* **DB** (double buffering): each PE has two weight buffers and the array
  has dedicated weight links, so the next instruction's weights can be loaded
  while the current instruction computes.
* **WLS** (weight-load skip): the weight load of instruction i+1 is hidden
  behind the feed of instruction i.
* **WLBP** (weight-load bypass): when consecutive `rasa_mm` use the same,
  unmodified B register, the weight load is skipped entirely. A dirty bit per
  tile register records modifications.
* **PIPE** (basic pipelining): the feed of instruction i+1 overlaps the
  feed-second and drain sub-stages of instruction i.

## Instructions and operand layout

| instruction | fields | effect |
|---|---|---|
| `rasa_tl treg, [addr], stride` | `op=OP_TL, rd, addr, stride` | load 16 rows of 64 B from `addr + r*stride` into `treg` |
| `rasa_ts [addr], treg, stride` | `op=OP_TS, rd, addr, stride` | store the 16 rows of `treg` to `addr + r*stride` |
| `rasa_mm tC, tA, tB` | `op=OP_MM, rd=C, rs1=A, rs2=B` | `C += A x B` |

All tiles are 16 rows of 512 bits, interpreted per instruction:

* **A** (16 x 32, BF16): row m holds `A[m][k]` in bits `16k +: 16`.
* **B** (32 x 16, BF16, pair layout): row j holds, for column n, the pair
  `B[2j][n]` (bits `32n +: 16`) and `B[2j+1][n]` (bits `32n+16 +: 16`).
* **C** (16 x 16, FP32): row m holds `C[m][n]` in bits `32n +: 32`.

So row j of B is exactly the weight pair of PE row j, and A row m split into
32-bit lanes is exactly the stream of pairs that PE row j needs. A 32 x 32
GEMM is four `rasa_mm` on two A tiles, two B tiles and four C tiles (the test
`tb/rasa_top_tb.sv` runs that sequence).

Arithmetic: BF16 x BF16 products are exact in FP32. Additions round to
nearest, ties to even. Denormal inputs and results are flushed to zero;
Inf and NaN follow IEEE 754. Because a column accumulates even-K and odd-K
products in two separate chains that are added at the bottom, the summation
order is `(C + sum of even-k products) + (sum of odd-k products)`, each chain
in increasing k; results can differ in the last bit from a strictly
sequential dot product.

## Datapath

```
               tile registers (8 x 16 x 512b, 4 read + 2 write row ports, dirty bits)
        B row j  |         A row m |        C row m |          ^ result row m
                 v                 v                v          |
        [skew, col c +c+1]  [skew, row r +r+1]  [skew, col c +c+1]   [de-skew, col c +16-c]
                 |                 |                |          |
          weight links       west edge         north edge   [merge-adder row]
                 v                 v                v          ^
              +-----------------------------------------------------+
              |      16 x 16 PEs, weight stationary                  |
              |  A pair + buffer select -> east, partial sums -> south|
              |  weight-link items -> south                          |
              +-----------------------------------------------------+
```

**PE (`rasa_pe`).** Two weight buffers, each holding a BF16 pair. Every
cycle: `s0' = s0 + a0*w0[sel]`, `s1' = s1 + a1*w1[sel]`, where `sel` arrives
with the A pair. A, both partial sums and the weight-link item are
registered towards their neighbours. The top row receives `s0 = C[m][n]`,
`s1 = 0`. A weight-link item `{valid, row, sel, w1, w0}` is written into
buffer `sel` of the PE whose row equals `row`, and is passed south unchanged.

**Why the buffer select travels with the data.** In a systolic array the
boundary between two instructions is a diagonal: PE (r,c) sees the first A
row of instruction i+1 at cycle `f + r + c`, while PEs further down and to
the right are still working on instruction i. A global "swap buffers"
signal would have to be skewed the same way; carrying one select bit with
every A pair does this for free and also makes bypassed instructions (which
reuse the current buffer) and loaded ones (which use the other buffer) look
the same to the PE.

**Skew buffers (`rasa_skew`).** Per-lane shift registers: lane i of A and
of C and of the weight links is delayed by i+1 cycles; result lane c is
delayed by 16-c cycles to re-align a row.

**Merge row (`rasa_merge_row`).** One FP32 adder per column, `s0 + s1`,
registered.

## Timing of one `rasa_mm`

Let a `rasa_mm` be accepted at the end of cycle `a`, with nothing else in
flight:

| cycles | sub-stage | what happens |
|---|---|---|
| a+1 .. a+16 | WL | B row j is read in cycle a+1+j and enters column c of the weight links at a+2+j+c; it is written into PE row j at the end of cycle a+2+2j+c |
| a+17 .. a+32 | FF | A row m and C row m are read in cycle f+m (f = a+17); PE (r,c) sees them at f+1+m+r+c |
| a+33 .. a+47 | FS | the skew buffers keep feeding rows 1..15 of the array |
| to a+66 | DR | column c of result row m leaves the merge row at f+m+c+18; after de-skew the whole row is written in cycle f+m+34 |

The last result row is written in cycle a+66: 16 (WL) + 16 (FF) + 34
(array transit: 1 skew + 16 PE rows + 1 merge + 16 de-skew) cycles. The
write-back is driven by a tag `{C register, row}` that the controller pushes
into a 34-deep delay line in the same cycle it reads the C row.

## The overlap rule (the core of WLS)

With two weight buffers, instruction i+1 loads the buffer that instruction
i-1 used. Whether that load can run *during* the feed of instruction i,
without corrupting i-1's last products or arriving late for i+1's first ones,
depends on exact cycle counts. With feed start times `f(i)` and weight-load
start `s` for instruction i+1, PE (r,c) is written at the end of cycle
`s + 2r + c + 1`. It must be written

* after instruction i-1's last A row has passed it: `s + 2r + c + 1 >= f(i-1) + 16 + r + c`,
  i.e. `s >= f(i-1) + 15 - r`, hardest for r = 0;
* before instruction i+1's first A row reaches it: `s + 2r + c + 2 <= f(i+1) + 1 + r + c`,
  i.e. `s <= f(i+1) - 1 - r`, hardest for r = 15.

The controller (`rasa_ctrl`) enforces the sufficient pair
`s >= f(last user of the buffer) + 16` and `f(i+1) >= s + 16`, by two simple
rules: a weight load starts only when the feed stage holds no instruction
using its buffer, and an instruction enters the feed stage only after its
weight load has finished. With a new `rasa_mm` in every slot this gives
`s(i+1) = f(i)` and `f(i+1) = f(i) + 16`: the weight load is completely
hidden and one `rasa_mm` is fed every 16 cycles, matching the best case of
16 cycles per instruction (16/95 = 0.168 of the baseline's time per
instruction). The row-addressed link is what makes the window exist at all:
with a plain shift chain through the buffers every row would change in every
shift cycle.

Weight rows are sent top-down (row 0 first) so that each PE row is written
exactly once, at a time that grows with its row like the data wavefront.

## Weight-load bypass and dirty bits

The controller remembers which tile register each weight buffer was loaded
from. A `rasa_mm` bypasses the weight load when its B register is the one in
the buffer used by the previous `rasa_mm` and that register's dirty bit is
clear. Dirty bits (`rasa_tile_regfile`) are set by any write to the register
(tile load or result write-back) and cleared in the first cycle of a weight
load from it; a write in the same cycle wins. They reset to 1. A bypassed
instruction uses the same buffer and still waits for the feed stage to be
free, so it also starts every 16 cycles.

## Issue and hazards

Instructions issue in order, at most one per cycle, with `instr_valid` /
`instr_ready`. `rasa_mm` instructions occupy a two-entry pipeline (W stage
for the weight load, F stage for the feed); tile loads and stores run in the
load/store unit (`rasa_lsu`) concurrently with the array. A per-register
count of unfinished `rasa_mm` results forms a scoreboard:

* a `rasa_mm` waits while any of A, B, C is the destination of an unfinished
  `rasa_mm`, or is the register of a running tile load/store;
* a `rasa_tl`/`rasa_ts` waits while the load/store unit is busy, its register
  is read or written by a `rasa_mm` in the W or F stage, or is the
  destination of an unfinished `rasa_mm`.

Consecutive `rasa_mm` accumulating into different C registers therefore
stream at full rate; accumulating twice into the same C waits for the first
result (up to 66 cycles after the first was issued).

## Memory port

One 64-byte row per request: `mem_req_valid/ready`, `mem_req_write`,
`mem_req_addr` (48-bit byte address), `mem_req_wdata`; read data returns
on `mem_rsp_valid/mem_rsp_rdata` in request order, any latency, and cannot
be back-pressured. A tile load or store always moves 16 full rows.

## Where this departs from, or adds to, the source design

* Only the DMDB-WLS configuration is built; the baseline, PIPE-only, WLBP-only
  and single-buffer variants are not.
* One clock for everything; the published design runs the array at 500 MHz
  next to a 2 GHz core.
* Internal arithmetic, port counts, the scoreboard, the memory interface, the
  row-addressed weight links and the buffer select carried with A are this
  implementation's choices. The baseline described in the source reads B
  bottom-up through the partial-sum links; here B goes top-down over the
  dedicated weight links.
* No tile configuration (rows and bytes per row are always 16 and 64), no
  exceptions or interrupts, no tile zeroing instruction.
* The bypass only compares with the buffer of the immediately preceding
  `rasa_mm`, not with both buffers.

## Workload sizes

Every layer is a GEMM that software tiles into 16 x 32 x 16 steps; the
engine needs three tile registers per step and nothing layer-sized, so all
layers below run. Counts are `ceil(M/16) * ceil(N/16) * ceil(K/32)`; convolution
GEMMs assume stride 1 and "same" padding (M = batch x 56 x 56 or x 14 x 14,
K = C x R x S). At 16 cycles per `rasa_mm` this is the array-bound time.

| layer | GEMM M x N x K | `rasa_mm` | array cycles at 16/mm |
|---|---|---|---|
| ResNet50-1 (N32 K=C=64 56x56 1x1) | 100352 x 64 x 64 | 50176 | 0.80 M |
| ResNet50-2 (3x3) | 100352 x 64 x 576 | 451584 | 7.2 M |
| ResNet50-3 (K512 C1024 14x14) | 6272 x 512 x 1024 | 401408 | 6.4 M |
| DLRM-1 (512, 1024->1024) | 512 x 1024 x 1024 | 65536 | 1.05 M |
| DLRM-2 (512, 1024->64) | 512 x 64 x 1024 | 4096 | 66 k |
| DLRM-3 (512, 2048->2048) | 512 x 2048 x 2048 | 262144 | 4.2 M |
| BERT-1 (256, 768->768) | 256 x 768 x 768 | 18432 | 295 k |
| BERT-2 (256, 3072->768) | 256 x 768 x 3072 | 73728 | 1.18 M |
| BERT-3 (256, 768->3072) | 256 x 3072 x 768 | 73728 | 1.18 M |

## Files

| file | content |
|---|---|
| `rtl/rasa_pkg.sv` | sizes, operand structs, instruction format |
| `rtl/bf16_mul.sv`, `rtl/fp32_add.sv` | arithmetic units |
| `rtl/rasa_pe.sv`, `rtl/rasa_merge_row.sv`, `rtl/rasa_array.sv` | PE, merge row, array |
| `rtl/rasa_skew.sv` | skew / de-skew delay lines |
| `rtl/rasa_tile_regfile.sv` | tile registers and dirty bits |
| `rtl/rasa_lsu.sv` | tile load / store |
| `rtl/rasa_ctrl.sv` | issue, scoreboard, WL/FF sequencing, WLBP, WLS, write-back tags |
| `rtl/rasa_top.sv` | the engine |
| `tb/*_tb.sv` | one self-checking testbench per module |
| `tb/tb_fp_pkg.sv`, `tb/rasa_mem_model.sv` | FP reference functions, behavioural memory |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops itself; a
watchdog ends a hung run. For example, the engine-level test:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/rasa_pkg.sv tb/tb_fp_pkg.sv tb/rasa_top_tb.sv --top-module rasa_top_tb
./obj_dir/Vrasa_top_tb
```

Replace `rasa_top_tb` with any other `*_tb`. The engine-level test builds
the full 16 x 16 array and takes several minutes to compile (the simulation
itself takes seconds); `rasa_array_tb` builds an 8 x 8 array.

What is verified:

* the arithmetic units against a double-precision reference with one
  rounding (thousands of random operands plus special values);
* the PE, merge row, skew lines, register file and load/store unit at
  cycle level;
* the array running three back-to-back tile multiplies with the
  overlapped schedule, including a buffer reload while the previous
  instruction's data is still in the array;
* the controller's schedule: weight-load and feed row sequences, buffer
  selection, the overlap rule, bypass decisions, write-back timing, 16-cycle
  spacing and hazard stalls, on directed and random instruction streams;
* the whole engine on the 32 x 32 GEMM sequence and on back-to-back,
  hazard and dirty-bit sequences, with every stored row compared with a
  sequential model, the isolated latency (66 cycles) and the 16-cycle
  spacing checked.

Test values are multiples of 1/4 with small numerators, so sums are exact
and independent of summation order; rounding behaviour is covered by the
arithmetic-unit tests only.
