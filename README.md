# A stream-instruction conjugate-gradient accelerator

This RTL solves `A x = b` for a large sparse symmetric positive-definite
matrix `A`, using the Jacobi-preconditioned conjugate gradient method (JPCG).
Each CG iteration is a handful of vector kernels: one sparse matrix-vector
product, three dot products, three AXPY-style updates and one element-wise
division. The kernels depend on each other only through a few scalars.
The accelerator exploits that:

* **Single-function modules, joined by streams.** Every kernel is a
  hardware module with exactly one function (M1 to M8). Modules exchange
  vectors as FIFO streams, one FP64 element per cycle. A vector produced by
  one kernel flows straight into the next wherever no scalar dependency
  stands between them. Vectors are written to off-chip memory only where
  they must be.
* **A stream-centric instruction set.** A global controller runs the CG
  loop. It does not move data. It sends small instructions ("stream `len`
  elements of vector p to M7", "compute with alpha = ...") to the modules
  and to per-vector controllers, which then run on their own, in parallel.
  The controller also keeps every scalar (alpha, beta, r.z, r.r) and decides
  when to stop.
* **Mixed precision.** The matrix values are stored as FP32 and widened to
  FP64 on chip. Everything else, vectors and scalars, is FP64. Only the
  largest data set, the matrix, loses precision: a non-zero packs into
  64 bits, and the solver still converges like an FP64 solver.

The default configuration targets an FPGA card with high-bandwidth memory
(HBM). It has 16 matrix channels of 8 processing engines each (128 PEs), one
or two HBM channels per vector, and on-chip X/Y buffers of 4096/24576 FP64
words per PE.

## The algorithm as the hardware runs it

JPCG with `M = diag(A)`:

```
r = b - A x0;  z = M\r;  p = z;  rz = r.z
loop
  ap    = A p                     M1  (SpMV)
  alpha = rz / (p.ap)             M2
  x     = x + alpha p             M3
  r     = r - alpha ap            M4
  z     = M\r                     M5  (element-wise divide)
  rz'   = r.z                     M6
  beta  = rz'/rz;  rz = rz'       controller
  p     = z + beta p              M7
  rr    = r.r                     M8
  stop if rr < tau or iteration limit reached
```

The scalars alpha and rz' each need a whole vector before anything that uses
them can start. So every iteration splits into three phases:

| phase | modules | streams on chip | read from memory | written to memory |
|---|---|---|---|---|
| 1 | M1, then M2 | ap: M1 to M2 | p (twice), A | ap |
| 2 | M4, M5, M6, M8 | r': M4 to M5 to M6 to M8; z: M5 to M6 | r, ap, M | none |
| check | controller | | | |
| 3 | M4, M5, M7, M3 | r': M4 to M5; z: M5 to M7; old p: M7 to M3 | r, ap, M, p, x | r', p', x' |

Two features of this schedule are easy to miss:

* **z is never stored.** Phase 2 needs z only for r.z. Phase 3 needs it for
  the p update, but only after beta is known. Instead of writing z to
  memory, Phase 3 runs M4 and M5 again and recomputes r' and z. This costs
  two cheap streaming passes and saves one vector write and one read per
  iteration. For the same reason r' is written back only in Phase 3.
* **x is updated one phase late.** Moving M3 into Phase 3 lets it use the
  old p that M7 is reading anyway, so M7 forwards each p element to M3 as it
  consumes it. When the check stops the loop after Phase 2, the controller
  issues one last M3 instruction, with p read from memory, so that the
  returned x matches the last residual.

**Initialisation reuses the loop.** The first pass (loop index -1) runs
Phase 1 on `p = x0`, giving `A x0`. Phase 2 runs with `alpha = 1`, giving
`r = b - A x0`, `z` and `r.z`. Phase 3 runs with `beta = 0`, giving `p = z`.
M2 and M3 are skipped in this pass. The host therefore only preloads
`p = x0`, `x = x0`, `r = b` and `M = diag(A)`.

`iterations` counts the regular passes. The loop stops when `r.r < tau` (an
FP64 compare) or when `iterations` reaches `cfg_ite_max`.

## Instructions

All formats are in `rtl/cg_pkg.sv`:

| type | struct | fields | receiver |
|---|---|---|---|
| I, vector control | `inst_vctrl_t` | rd, wr, base_addr, len, q_id | VecCtrl p, r, x, ap, M |
| II, computation | `inst_cmp_t` | len, alpha (FP64), q_id | M1 ... M8 |
| III, memory | `inst_rdwr_t` | rd, wr, base_addr, len | Rd/Wr and Rd modules |

The controller issues only Type I and Type II instructions. Each vector
controller turns its Type I instruction into a Type III instruction for its
memory module. It then routes the elements read to the destination named by
`q_id` (p: 0 = M1, 1 = M2, 2 = M3, 3 = M7; every other vector has a single
destination, 0). It also passes the elements arriving from the vector's
producer to the write side.

A computation instruction has no opcode, because each module does one thing.
The `alpha` field carries that module's scalar: alpha for M3/M4, beta for M7,
rz for M2. Bit 0 of `q_id` selects a variant:

* M1 also streams ap to M2 (regular passes, but not the initial one).
* M3 takes p from M7 (Phase 3); with the bit clear it takes p from memory
  (the final step).
* M7 forwards the old p to M3.

Within a phase the controller pushes all instructions back to back into
4-deep instruction queues, one per module, and the modules start as soon as
their streams arrive. The controller then waits for the scalars of the phase
and for the memory write responses. No vector is read before its last write
has been accepted.

## Deadlock in the divide module and the "fast" FIFO

This is the subtle part of the design. M5 computes `z[i] = r[i]/M[i]` in a
pipeline of `L = 33` stages. Its consumer needs r[i] as well: M6 in Phase 2,
memory in Phase 3. So M5 duplicates each r element to a second output in the
cycle it enters the pipeline. The r output therefore runs L cycles ahead of
the z output.

The pipeline moves as a whole and stops whenever an output cannot be
written. That is how a high-level-synthesis loop pipeline behaves, and it is
what `m5_left_divide` models. M6 takes an (r, z) pair only when both are
present. With the ordinary 2-deep FIFO on the r path, the r FIFO is full
after two elements. M5 then stops, so the first z never leaves the pipeline
and M6 never gets a pair. Neither side can move.

The fix is a FIFO of at least `L + 1 = 34` entries on each "fast" r output of
M5: r to M6 (`FAST_FIFO_DEPTH`) and r to memory. Then the pipeline fills
before the r FIFO does. The end-to-end test watches both FIFOs rise above the
ordinary depth, and making the r-to-M6 FIFO 2 deep makes it hang.

M5's destinations change between phases without the controller stepping in.
A two-state FSM inside M5 sends (z, r) to M6 in state 0 and z to M7 / r to
memory in state 1. It toggles at the end of every instruction. The
controller resets it to state 0 only when a solve starts. Because every pass
runs M5 exactly twice, the states stay in step with the phases.

## Double-channel vectors

Phase 3 reads r, p and x and writes their new values in the same pass. With
one HBM channel per vector, every element would need a read and a write on
one channel. `mem_rdwr` with `NCH = 2` owns two channels instead. A
read-and-write instruction reads v_t from the current channel and writes
v_t+1 to the other one, then swaps the two. The next pass finds v_t+1 where
it reads. Read-only and write-only instructions use the current channel.

p, x and r use two channels each. ap is only written in Phase 1 and read
later, so one channel is enough. M is read-only. `vec_ch` reports where p, x
and r currently live. The host loads them there before a solve and reads x
from channel `2 + vec_ch[1]` afterwards.

## The SpMV engine (M1)

M1 is 16 channel readers (`mem_rd` with 512-bit words) feeding 8 PEs each.
A 512-bit word carries one 64-bit non-zero per PE:

```
 63      50 49        32 31           0
+----------+------------+--------------+
| col (14) |  row (18)  | value (FP32) |
+----------+------------+--------------+
```

* **Row mapping.** Row `r` of A belongs to PE `g = r mod 128`, that is
  channel `g / 8`, lane `g mod 8`. The row field holds the PE-local Y
  address `r / 128`. With 24,576 Y entries per PE, up to 3,145,728 rows fit.
* **Column segments.** The columns are processed in segments of 4096 (the X
  memory depth). For each segment, M1 first streams that part of p into the
  X memory of every PE. Then each channel consumes its words until it reads
  an end-of-segment word (lane 0 = column field all ones and row field all
  ones).
* **Padding.** A lane whose row field is all ones carries no element, which
  pads channels whose PEs have unequal work.
* **PE datapath.** Each PE widens the value to FP64, multiplies it by
  `X[col]` and adds the product into `Y[row]`.
* **Output.** After the last segment, ap is streamed out in row order,
  1 element per cycle, to memory and, in regular passes, to M2.

The host must pack the matrix this way. For each channel and segment, the
non-zeros of each lane's rows are listed in column order; the testbench
`cg_bench` contains such a packer. The design does not reorder non-zeros to
hide the accumulation latency: the Y update is a single-cycle read-add-write.

## Numerics

`rtl/fp64_pkg.sv` implements FP64 add, subtract, multiply and divide, the
FP64 less-than compare and the exact FP32-to-FP64 widening, all as
combinational functions. Rounding is round-to-nearest-even. Subnormal
inputs count as zero and subnormal results flush to signed zero.
Infinities and NaNs propagate.

The dot products (`dot_acc`, shared by M2, M6 and M8) run in two phases:

* **Phase I** takes one pair per cycle and adds each product into entry
  `k mod 8` of an 8-entry cyclic buffer. The adder write-back is modelled
  `ADD_LAT = 4` cycles late, so consecutive elements never touch the same
  entry.
* **Phase II** folds the 8 entries, one addition every 5 cycles, because
  each addition needs the previous sum.

A result appears `(ADD_LAT+1)·(L+1)+1 = 46` cycles after the last element,
whatever the vector length. The summation order is therefore fixed. A
software model that uses the same order reproduces the hardware bit for bit,
which the testbenches rely on.

## Module map

| file | role |
|---|---|
| `callipepla_top.sv` | all of the below, wired; HBM channels as ports |
| `global_controller.sv` | CG loop, instruction issue, scalars, stop test |
| `m1_spmv.sv`, `spmv_pe.sv` | ap = A p, 16 x 8 PEs with X/Y memories |
| `m2_dot_alpha.sv` | alpha = rz / (p.ap) |
| `m3_update_x.sv` | x = x + alpha p |
| `m4_update_r.sv` | r = r - alpha ap |
| `m5_left_divide.sv` | z = r ./ M, 33-stage pipeline, phase FSM |
| `m6_dot_rz.sv` | r.z, forwards r to M8 |
| `m7_update_p.sv` | p = z + beta p, forwards old p to M3 |
| `m8_dot_rr.sv` | r.r |
| `dot_acc.sv` | two-phase dot-product engine |
| `vec_ctrl.sv` | per-vector controller: Type I to Type III, routing by q_id |
| `mem_rdwr.sv` | read/write memory module, single or double channel |
| `mem_rd.sv` | read-only memory module (matrix, M, read side of Rd/Wr) |
| `stream_fifo.sv` | valid/ready FIFO used for every link |
| `cg_pkg.sv`, `fp64_pkg.sv` | types, instruction formats, FP64 arithmetic |

Top-level parameters:

| parameter | default | meaning |
|---|---|---|
| `N_CH_A` | 16 | matrix channels |
| `PE_PER_CH` | 8 | PEs per matrix channel |
| `XMEM_DEPTH` | 4096 | X memory words per PE (column segment) |
| `YMEM_DEPTH` | 24576 | Y memory words per PE |
| `M5_LAT` | 33 | divide pipeline depth |
| `FIFO_DEPTH` | 2 | ordinary link FIFO |
| `FAST_FIFO_DEPTH` | 34 | r outputs of M5 (at least `M5_LAT+1`) |
| `DOT_BUF` | 8 | dot-product delay buffer |
| `ADD_LAT` | 4 | modelled adder latency |
| `INST_FIFO_DEPTH` | 4 | instruction queues |

### Memory channel protocol

Each HBM channel is a set of plain ports:

* read request: `req_valid/req_ready/req_addr` (word address);
* read data: `rsp_valid/rsp_ready/rsp_data`, returned in order;
* write: `wr_valid/wr_ready/wr_addr/wr_data`. A write counts as done when
  it is accepted.

Read modules keep up to 64 requests in flight, so a channel with up to about
60 cycles of latency still delivers one word per cycle.

Port groups of the top:

* `a_*`: the 16 matrix channels.
* `v_req_*`, `v_rsp_*`: eight vector channels, numbered p 0/1, x 2/3,
  r 4/5, ap 6, M 7.
* `v_wr_*`: write ports for channels 0..6.

## Using it

1. Load the channels as described above.
2. Set `cfg_n`, `cfg_ite_max`, `cfg_tau` and `cfg_a_words` (the number of
   512-bit words of each matrix channel), and pulse `start`.
3. Wait for `done`, then read `iterations`, `rr_final` and x.

Simulate with Verilator 5, for example:

```
verilator --binary --timing -Irtl -Itb -y rtl -y tb rtl/fp64_pkg.sv rtl/cg_pkg.sv \
    tb/tb_callipepla_top.sv --top-module tb_callipepla_top -o sim
./obj_dir/sim
```

Every testbench prints `TB_RESULT checks=N failures=M`:

* `tb_callipepla_top` builds the top with 4 PEs, 8-word X memories and
  16-word Y memories. Depths, latencies and FIFOs stay at their defaults.
  It runs two solves of a 20-row matrix, one stopped by the iteration limit
  and one by `tau = 1e-12`. Each solve is compared with a software JPCG that
  uses the same operation order. The x values agree bit for bit.

  The test also counts each mechanism and fails if one never occurs: the
  initial pass, the final x step, ap and old-p forwarding, the M5 phase
  switch, both fast FIFOs exceeding depth 2, channel swaps of p, x and r,
  several column segments, M4 stalled by M5, HBM back-pressure, and both
  stop conditions.
* `tb_callipepla_full` runs the same two solves on the top at its default
  parameters: 128 PEs, a 5000-row matrix with two column segments, and 5 %
  of HBM requests refused. The second solve converges in 9 iterations and
  296,035 cycles, bit-exact with the reference. Build and run take about
  half a minute.
* `tb_<module>` for each module checks results against `real` arithmetic
  under random stalls. Where a rate or latency is defined, it also checks
  that: one element per cycle for the streaming modules and memory reads,
  33 cycles through M5, and 46 cycles from the last element to a
  dot-product result. M1 and the controller are covered by the end-to-end
  testbenches.
* `hbm_chan_model`, `tb_src`, `tb_sink` and `cg_bench` are testbench helpers.

The original accelerator was measured on 36 symmetric positive-definite
matrices from a public sparse-matrix collection. They range from about 3,400
to 1.56 million rows and up to 114 million non-zeros. At the default
parameters each one fits:

* The largest needs 12,225 of the 24,576 Y entries per PE.
* It needs about 55 MiB per matrix channel.
* It needs 383 column segments.

None of these matrices is part of the testbenches, and none was simulated
here. The largest simulated problem is the 5000-row synthetic matrix of
`tb_callipepla_full`. A larger matrix changes only the number of segments
and words, which that test already exercises.

## Where this RTL departs from the original accelerator

* **Cycle timing is approximate.** The original was written in high-level
  synthesis with pipelined vendor floating-point cores. Here the FP
  operations are combinational functions inside one register stage.
  Latency is modelled only where it shapes the design: M5's 33 stages and
  the dot-product adder. A synthesis run would need real pipelined FP
  units; as written, the combinational FP64 divider and the 128 PEs make
  the full top very large.
* **Simple SpMV scheduling.** The PE accumulates in one cycle, so
  non-zeros need no reordering. The original schedules non-zeros
  out of order, which hides a multi-cycle accumulate.
* **Own formats and protocols.** The matrix word layout beyond the
  14/18/32-bit element, the segment markers and the row-to-PE mapping are
  this design's, as are the `q_id` codes, the memory channel protocol, the
  write-response rule and all buffer sizes not listed above.
* **z has no memory.** The published block diagram shows memory modules
  for z. The text replaces them by recomputation, which is what is built,
  with a vector controller for M instead.
* **Explicit final x step.** The final M3-only step after the stop is this
  design's way of keeping x consistent with the last residual.
* **Scalars run at the controller.** The stop test and beta use FP64
  operations in the controller, which issues instructions one per cycle.
