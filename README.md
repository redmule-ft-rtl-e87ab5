# RedMulE-FT in SystemVerilog: a matrix engine that can trade half its throughput for fault detection

This is the RTL of a small FP16 matrix-multiplication accelerator that computes
`Z = Y + X * W`. It is meant to sit beside a processor cluster and share that
cluster's memory. What makes it different is that it can switch between two
modes at run time:

* **Performance mode.** Every row of compute elements works on a different row of Z.
* **Fault-tolerant mode.** Rows work in pairs: both rows of a pair compute the same Z row
  from the same inputs. A checker compares the two results before one of them is
  written. This halves the throughput, and a fault in the datapath shows up as a mismatch.

The control logic is protected in both modes:

* The control FSM, the scheduler, the streamer and the memory-side (de)duplicator are
  built twice, and their outputs are compared every cycle.
* Even CE rows follow one scheduler copy and odd rows follow the other. A fault in either
  copy therefore changes one row of a redundant pair, so the Z comparison catches it
  even if the fault escaped the control comparison.
* Weights carry a parity bit that is generated on a separate path.
* Memory words carry SECDED ECC.
* The host writes a parity word that covers the configuration registers.

Any detected fault stops the job: everything returns to idle, a sticky status bit
is set, and an interrupt is raised for two cycles. The host can then read the
status and run the job again.

The architecture follows the published RedMulE-FT design (P. Wiese, M. Item et al.) at
its evaluated size: 12 rows × 4 compute elements × 3 pipeline stages, FP16. The
paper describes most blocks only by what they do. This RTL therefore makes its own
choices for the internals, and the section "Where this RTL departs from, or adds
to, the published design" lists them.

## Parameters and the one number that matters: D

| parameter | default | meaning |
|---|---|---|
| `L` | 12 | rows of compute elements (CEs) |
| `H` | 4 | CEs per row |
| `P` | 3 | pipeline registers inside each CE |
| `D = H*(P+1)` | 16 | output columns a row has in flight; also the FP16 elements per memory word |

A CE is a combinational FP16 fused multiply-add followed by `P` pipeline
registers and an output register. A value therefore takes `P+1` enabled
cycles to pass through it. The `H` CEs of a row form a **ring**:

```
 Y (first pass)──┐
                 ▼
          ┌──► CE0 ──► CE1 ──► CE2 ──► CE3 ──┐──► Z capture
          │   (x,w)    (x,w)    (x,w)    (x,w) │
          └────────────────────────────────────┘   ring feedback
```

With `P+1` registers per CE, the ring holds `H*(P+1) = D = 16` partial sums. In
other words, one row of the array works on 16 columns of one Z row at once,
which is exactly one 256-bit memory word.

## How a tile is computed (the hard part)

Z is cut into **tiles**: `R` matrix rows by `D` columns. `R = L` in performance
mode and `R = L/2` in fault-tolerant mode. Tiles are taken along K first, then
along M.

Inside a tile, time runs in array cycles `t`. Column `j` of every row works
`j*(P+1)` cycles later than column 0. So column `j` sees its own local time
`tj = t - j*(P+1)`, and at that time:

* It works on **block** `b = tj / D` of the reduction dimension N. A block is `H`
  consecutive elements of N, one per column.
* It works on **output column** `k = tj mod D` of the tile.
* It multiplies `X[row][b*H + j]` by `W[b*H + j][k]` and adds the incoming partial sum.

A partial sum for column `k` enters CE0, picks up one product per CE, leaves CE3
after `H*(P+1) = D` cycles, and re-enters CE0 for the next block. This is the
moment when column 0 is ready for the next block on the same `k`. During the first `D` cycles
(`t < D`) CE0 takes `Y[row][k]` instead of the ring feedback.

A tile takes `N*(P+1) + D` array cycles. At default parameters the numbers are:

* N/H blocks × D cycles = `N*(P+1)` cycles of compute.
* Another D cycles to drain.
* During the last D cycles the ring output is captured as Z.

For the 12×16×16 workload this is 80 cycles per tile.

### Feeding the array

Memory words are 16 elements. X and W therefore arrive in **chunks** of N:

* One X word per CE row holds 16 consecutive N elements, which is `P+1` blocks.
* Sixteen W rows of 16 columns cover the same 16 values of N.

Blocks `b` belong to chunk `b >> log2(P+1)`. Each buffer has two banks, and chunk
`c` uses bank `c & 1`. Chunk `c+1` is therefore loaded while chunk `c` is in use.
The scheduler issues the memory jobs of a tile in this order:

1. Y words, one per row.
2. For each chunk: X words, one per row, then 16 W words.
3. Z words at the end.

A chunk `c ≥ 2` may only load once the array has finished with chunk `c-2`
(`t ≥ (c-1)*D*(P+1) + D`). If the chunk the array needs next is not fully loaded,
the array **stalls**. A stall lowers the enable of every CE row, so nothing in the
rings moves.

Because the streamer is a single port, the array is normally stalled while the
first chunk of a tile loads. This design does not overlap one tile's Z store
with the next tile's loads. That is a simplification, not a property of the
architecture.

### Fault-tolerant mode in the datapath

In fault-tolerant mode, the streamer issues every X, Y and Z access **twice**, to
the same address. The two requests are for CE rows `2r` and `2r+1`, which both
handle matrix row `r`. A `dup` flag marks the pair. Between the accelerator and
memory:

* The **(de)duplicator** forwards the first read of a pair and answers the second
  locally with the same data, so memory is read once. For writes it drops the
  first of the pair and forwards the second.
* The **checker** sits in front of it. It compares the two write words of a Z pair
  after ECC encoding. If they differ, it holds the write back and raises a fault,
  so a wrong Z never reaches memory.

W is read once. It is broadcast to both rows of every pair anyway.

## Control-path protection

| protected part | how | fault bit |
|---|---|---|
| configuration registers | host-written XOR parity word (word 8 = XOR of words 0..7); two checker copies | 0 `F_RF_PAR` |
| control FSM (`redmule_ctrl`) | two copies, outputs compared | 1 `F_CTRL` |
| scheduler | two copies, outputs compared; even CE rows use copy 0, odd rows copy 1 | 2 `F_SCHED` |
| streamer | second copy with `D`-bit data (one parity bit per element), control outputs compared | 3 `F_STREAM` |
| X, W, Y/Z buffers | parity copies (1 bit per element) written by the second streamer and read with the *other* scheduler copy's selects; compared with the parity of the main buffers' outputs | 4 `F_BUF` |
| W broadcast | the W parity copy supplies the parity bit, and each CE checks it against the W value it receives | 5 `F_WPAR` |
| Z results | checker before memory (fault-tolerant mode only) | 6 `F_ZCHK` |
| memory data | SECDED (39,32) per 32-bit granule; single errors corrected and counted, double errors are faults | 7 `F_ECC` |
| (de)duplicator | second copy handling one 39-bit granule, control compared | 8 `F_DEDUP` |

On any fault, `redmule_fault_unit` does three things:

* It sets the sticky bit.
* It pulses an abort that clears the schedulers and streamers and returns the control FSMs to idle.
* It drives `irq_o` high for exactly two cycles.

A partly written Z may remain in memory, and the host is expected to repeat the job.

The copies of the control FSM and of the scheduler are identical. What the
comparison catches is a transient upset in one of them, which is the fault
model this design targets. A permanent fault that hits both copies the same way
is not caught by the comparison.

## Register map

The register port is 32 bits wide with a 5-bit word address. Reads are
combinational (`reg_rdata_o` is valid in the same cycle as `reg_req_i`).

| addr | name | notes |
|---|---|---|
| 0 | X | byte address of X (M×N, row-major, FP16) |
| 1 | W | byte address of W (N×K) |
| 2 | Y | byte address of Y (M×K) |
| 3 | Z | byte address of Z (M×K) |
| 4 | M | rows |
| 5 | N | reduction length, multiple of 16 |
| 6 | K | columns, multiple of 16 |
| 7 | MODE | bit 0: 1 = fault-tolerant |
| 8 | PARITY | XOR of words 0..7 |
| 16 | TRIGGER | write: copy words 0..8 into the active context and start |
| 17 | STATUS | bit 0: busy |
| 18 | FAULT | sticky fault bits (table above); write clears |
| 19 | ECCCNT | corrected single-bit errors; write clears |

Words 0..8 are a shadow context. The host can write the next job while one
runs, and TRIGGER copies the shadow into the active context. Base addresses
should be 32-byte aligned, and row strides are `2*N` or `2*K` bytes.

## Memory port

`mem_req_o` / `mem_gnt_i` form a request/grant handshake. Address, write enable
and data are held while the request waits for its grant. A write is complete
when it is granted. A read's data returns on `mem_rvalid_i` / `mem_rdata_i`,
one or more cycles after the grant and in request order. Words are 312 bits:
eight 39-bit SECDED codewords, each holding two FP16 elements with element 0
in the low bits. In the cluster the paper targets, this port would go to the
shared L1 memory through the cluster interconnect. Those parts are not in this
RTL.

## Files

| file | contents |
|---|---|
| `rtl/redmule_pkg.sv` | constants, job and configuration structs, register and fault-bit indices |
| `rtl/redmule_fma.sv` | FP16 fused multiply-add with exact sum and one round-to-nearest-even |
| `rtl/redmule_ce.sv` | compute element: FMA, pipeline, W-parity check |
| `rtl/redmule_engine.sv` | L×H array of rings |
| `rtl/redmule_x_buffer.sv`, `redmule_w_buffer.sv`, `redmule_yz_buffer.sv` | double-banked operand buffers and Z capture |
| `rtl/redmule_streamer.sv` | address generation and request/grant handling for one job at a time |
| `rtl/redmule_ecc.sv` | SECDED encoder and decoder/corrector |
| `rtl/redmule_checker.sv` | Z'=Z comparison of duplicated writes |
| `rtl/redmule_dedup.sv` | (de)duplicator: merges duplicated reads, drops duplicated writes |
| `rtl/redmule_regfile.sv`, `redmule_rf_parity.sv` | configuration with shadow context, parity check |
| `rtl/redmule_ctrl.sv` | job start/end/abort FSM |
| `rtl/redmule_scheduler.sv` | tiling, memory job sequence, array timing |
| `rtl/redmule_fault_unit.sv` | fault status, abort, interrupt, ECC counter |
| `rtl/redmule_ft.sv` | top level |
| `tb/tb_*.sv` | one self-checking testbench per module; `tb_fp16_pkg.sv` (FP16 reference), `tb_tcdm_model.sv` (behavioural memory) |

Every file opens with a comment on its interface and timing.

## Simulating

Each testbench prints `TB_RESULT checks=<n> failures=<m>` and stops itself. A
watchdog ends a hung run with a failure. With Verilator 5:

```sh
verilator --binary --timing -j 0 -Wno-fatal -Irtl -Itb \
  rtl/redmule_pkg.sv $(ls rtl/*.sv | grep -v _pkg) \
  tb/tb_fp16_pkg.sv tb/tb_tcdm_model.sv tb/tb_redmule_ft.sv \
  --top-module tb_redmule_ft -o sim && ./obj_dir/sim
```

Replace `tb_redmule_ft` with any other `tb/tb_redmule_<block>.sv` to test one
block. The packages must come first. The FMA, CE, engine and end-to-end
testbenches use the FP16 reference package, and only the end-to-end one uses
the memory model. The end-to-end test builds in about ten seconds and runs in
under one at the default size.

## How far it is tested

* **FMA:** 45,000 random and corner-case operand triples (zeros, infinities, NaN,
  subnormals, cancellation, overflow) are compared against a reference. The
  reference computes in double precision and rounds once to FP16.
* **Other blocks:** each has its own testbench against an independent model, in
  some cases at reduced parameters:
  * engine: L=2, H=2, P=1
  * scheduler: L=4, H=2, P=1
* **Each testbench can fail:** it was run against a copy of its module with one
  deliberate bug, and it reported failures.
* **End to end (`tb_redmule_ft`, default parameters):**
  * Workloads: 12×16×16 and 24×32×32, each in both modes. Every Z element is
    checked against the FP16 reference.
  * Counts: memory reads and writes are checked for each mode, which shows
    that duplicated reads were merged. Array cycles are checked too: 80 per
    tile in performance mode and twice that in fault-tolerant mode.
  * Fault handling: a corrected single-bit memory error, then six injected
    faults, one per kind: register parity, ECC double error, corrupted Z in
    one row, corrupted W, a stuck scheduler enable, and a streamer counter upset.
  * For each fault, the test checks the status bit, the two-cycle interrupt,
    the return to idle, and a correct retry.
* **Not done:** no gate-level fault-injection campaign. Synthesis was run only
  far enough to check that the code is accepted. Nothing was checked on timing
  or area.

## Where this RTL departs from, or adds to, the published design

* **FIFOs omitted.** The published block diagram shows FIFOs on both sides of
  the streamer. Here the buffers accept a word every cycle, so those FIFOs would
  never fill, and they are left out.
* **One streamer.** A single streamer serves X, W, Y and Z, one job at a time.
  As a result, loads of the next tile and the Z store are not overlapped with
  computation.
* **Size limits.** N and K must be multiples of 16, and `H` and `P+1` must be
  powers of two.
* **Reduced-width copies.** All copies of buffers and streamers carry one parity
  bit per element. The original only says "reduced data width".
* **Stored Z pair.** The two redundant Z rows are compared in the encoded domain,
  in front of the (de)duplicator.
* **Internal choices of this RTL.** The following are not published: the ring
  dataflow inside a row, the tiling and job order, the ECC code, the register
  map, and the fault-bit layout.
* **Replaced interfaces.** The host side is a plain register port instead of the
  cluster bus. The memory side is a single wide request/grant port instead of
  the cluster interconnect's many narrow ports.
* **FP16 only.** The FMA is FP16 only, with no exception flags. The FP8 variants
  mentioned for the original accelerator family are not built.
* **Performance mode.** Control-path redundancy, ECC and parity checks stay
  active, as published. The Z comparison is off, because there is no second copy
  to compare against.
