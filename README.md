# MX: matrix multiply-accumulate inside a small RISC-V vector unit

A vector processor can already run a matrix multiplication: load a row of B, multiply it by
one scalar from A, accumulate into a row of C, and repeat. Every one of those steps reads
and writes the vector register file (VRF), and every vector instruction covers only `vl`
multiply-adds. On a small, energy-constrained vector unit the VRF traffic and the
instruction count then dominate.

MX attacks both without adding a matrix unit or new architectural registers. A handful of
instructions treat groups of ordinary vector registers as small matrix tiles. One
`mxfmacc` computes a whole sub-tile product

    D (m' x n') = A (m' x k') * B (k' x n') + C,    m', n', k' in {4, 8}

in the existing FPU lanes. Two small structures next to the FPUs make this cheap:

* a **broadcast buffer** holds one column of A and sends one A element to all lanes at a
  time, so each A element is read from the VRF once per instruction and then used n' times;
* a **result tile buffer** of 256 bytes (32 FP64 elements, an eighth of the VRF) keeps the
  partial sums of D between the k' steps, so they never go back to the VRF in between.

This repository is synthesizable SystemVerilog for such an MX-ready vector unit, modelled
on a Spatz-style RVV unit with 512-bit registers and 4 FP64 FPUs, and for the
**Dual-Core cluster** it is evaluated in. That cluster has two vector units sharing 128 KiB
of word-interleaved, 16-bank L1 memory. The scalar cores that issue the instructions are not
part of the RTL; the cluster exposes one decoded-instruction port and one memory port per core
instead.

## Configuration

| Quantity | Value |
|---|---|
| Element | FP64 (and 64-bit integer for `mxmacc`) |
| VLEN | 512 bit = 8 elements per register, 32 registers (2 KiB VRF) |
| FPU lanes | 4, fused multiply-add, 3-cycle pipeline |
| VLSU memory ports | 4 per vector unit |
| Tile buffer | 32 elements (256 B) |
| Sub-tile sizes | m', n', k' each 4 or 8, with m'n' <= 32 and vl = m'k' |
| Cluster | 2 vector units, 16 banks x 1024 x 64 bit = 128 KiB |

All of these are parameters with these defaults (`rtl/mx_pkg.sv`, module parameters).

## Instructions and how they arrive

The vector unit takes already-decoded operations (`offload_req_t` in `rtl/mx_pkg.sv`), in
program order, over a valid/ready port. Each carries its register fields (`vd`, `vs1`,
`vs2`), two scalar operands (`rs1`, `rs2`) and the C-tile-reset flag `zero_c`.

| Operation | Effect |
|---|---|
| `msettilem/n/k rs1` | set m', n' or k'. Setting m' or k' also sets vl = m'k' |
| `mld.a vd, (rs1), rs2` | load the m' x k' A sub-tile; row pitch `rs2` bytes |
| `mld.b vd, (rs1), rs2` | load the k' x n' B sub-tile |
| `mst.c vd, (rs1), rs2` | store the m' x n' result sub-tile |
| `mxfmacc vd, vs1, vs2` | vd = vs1(A) * vs2(B) + vd, FP64. With `zero_c` the old vd is not read |
| `mxmacc` | the same in 64-bit integer arithmetic |
| `vsetvl`, `vle`, `vse`, `vlse`, `vsse`, `vfmacc.vv`, `vfmacc.vf` | ordinary vector operations, up to vl = 64 |

### Layouts in the register file

A sub-tile occupies consecutive registers starting at the named one, 8 elements per register:

* **A** is stored *column-major*: element (i, k) is at index k·m' + i. One column of A is
  then one contiguous run of m' elements, and it fills the broadcast buffer in a single read.
* **B** and **C/D** are stored *row-major*: (k, j) at k·n' + j and (i, j) at i·n' + j. A row
  of B is what the four lanes need in one step. Four consecutive D elements of a row fall
  in one register half, so they can be written in a single masked access.

## How one `mxfmacc` executes (`spatz_vfu`)

Cycle 0 (FETCH) reads column 0 of A and row 0 of B into the two row buffers. If `zero_c` is
set, it also clears the tile buffer; this is the C-tile reset.

Then come the compute cycles. Each one does four multiply-adds, one per lane, for a slice of
one row i and four columns:

    for k in 0..k'-1
      for column group jb in 0..ceil(n'/4)-1
        for i in 0..m'-1
          lane l:  acc[i][4jb+l] += A[i][k] * B[k][4jb+l]

* The A element is the broadcast `A[i][k]`.
* The B element is fixed per lane for the whole step.
* The accumulator operand comes from one of two places:
  * in step k = 0, C itself is read from the VRF (read port 2); it is 0 after a C-tile reset;
  * in later steps it comes from the tile buffer.
* Results of steps 0..k'-2 go back into the tile buffer. Results of the last step are the
  final D and go directly to the VRF, four elements per masked write.
* In the last cycle of each step the row buffers load the next column of A and row of B, so
  the lanes issue in every cycle.

An instruction therefore takes

    1 + m'·k'·ceil(n'/4) + 3 cycles        (e.g. 36 cycles for 8,4,4)

and keeps all four lanes busy for m'·k'·ceil(n'/4) of them. The testbench checks this count
exactly.

Because the i loop is innermost, an accumulator is read again no sooner than
m'·ceil(n'/4) ≥ 4 cycles after its previous read. That is enough for a 3-cycle FPU. A longer
FPU pipeline would need a different loop order; the VFU stops the simulation at time zero if given one.

Per instruction, the VRF sees:
* m'k' reads of A elements, one register read per step;
* k'n' reads of B elements;
* m'n' reads of C;
* m'n' writes of D.

The matrix work in between stays in the row buffers and the tile buffer. This gives the
reduction in VRF traffic that MX is designed for: C/D cross the VRF boundary K/k' times
instead of K times in a plain vector kernel.

`vfmacc.vv` / `vfmacc.vf` take the bypass path through the same lanes: four elements per
cycle from the VRF (or the scalar operand), with results written straight back.

### The FPU (`mx_fpu`)

Each lane is a fully pipelined FP64 fused multiply-add with a single rounding to nearest
even. It computes the exact 106-bit product, aligns the addend in a wide field with a sticky
bit, normalises and rounds. Subnormal inputs and outputs are flushed to zero, and NaNs come
out as the canonical quiet NaN. In integer mode it computes a·b + c modulo 2^64. An 8-bit tag
travels with each operation; the VFU uses it to steer results to the tile buffer or the VRF.

## Matrix loads and stores (`spatz_vlsu`)

Every memory operation is an R x C block of elements at `base + r·stride + 8c`:

| Operation | R | C | Order in the VRF |
|---|---|---|---|
| `mld.a` | m' | k' | transposed (column-major) |
| `mld.b` | k' | n' | row-major |
| `mst.c` | m' | n' | row-major |
| `vle` / `vse` | 1 | vl | row-major |
| `vlse` / `vsse` | vl | 1 | transposed |

A row counter and a column counter walk the block in *beats* of four elements that are
adjacent in the register group. For a transposed block the four elements of a beat are
four rows of one column; otherwise they are four columns of one row. Each of the four memory
ports carries one element of the beat.

* **Requests.** Each port holds its request until the interconnect grants it. The next beat
  starts only when every port of the current one has been granted.
* **Loads.** Read data returns exactly one cycle after the grant. It is written into the VRF
  as it arrives, with an element mask.
* **Completion.** `done` pulses in the cycle of the last register write, or the cycle after
  the last grant for a store.

A conflict-free m' x k' = 8 x 4 load therefore takes 8 beats.

## Keeping the two units in order (`spatz_controller`)

The controller executes the configuration instructions itself and sends every other
operation, in order, to one of two units: memory operations to the VLSU, arithmetic to the
VFU. Each unit runs one operation at a time. A one-entry scoreboard per unit records which
registers its current operation reads and writes; tile-shaped operations cover whole
register groups, sized from m', n', k' or vl.

An operation is held at the head of the queue (`hazard_stall_o`) in two cases:
* its unit is busy;
* it would write a register the other unit's operation uses, or read one that operation
  writes.

An entry is freed by its unit's `done` pulse. A dependent operation may be accepted in that
same cycle; it reads the register file one cycle later, after the last write.

The result is the overlap an MX kernel depends on. The loads for the next sub-tile run in
the VLSU while the VFU computes the current one, whenever their register groups are disjoint.

## The Dual-Core cluster (`mx_cluster`, `tcdm_xbar`, `tcdm_bank`)

There are ten memory masters: four VLSU ports and one scalar port per core. They reach 16
single-ported SRAM banks through one crossbar.

* **Interleaving.** Address bits [2:0] select the byte, bits [6:3] the bank and bits [16:7]
  the word within the bank, so consecutive words go to consecutive banks.
* **Arbitration.** Each bank runs a round-robin arbiter: a master that keeps asking is served
  within ten cycles. A refused port simply asks again.
* **Read timing.** Read data returns one cycle after the grant, from the bank's output
  register.

## An MX kernel and what it achieves

The end-to-end testbench (`tb/tb_mx_cluster.sv`) runs the best-performing configuration:
tile m, n, k = 8, 16, 4 and sub-tile m', n', k' = 8, 4, 4. Each core computes half of the
output rows.

    for each 8-row block, for each 16-column block (4 sub-tiles of 8 x 4):
      for each k step of 4:
        mld.a  A sub-tile (8x4)            -> v16..v19 or v20..v23, alternating
        for b in 0..3:
          mld.b  B sub-tile (4x4)          -> v24+2b, v25+2b
          mxfmacc v4b, A, B (zero_c on the first k step)
      mst.c  v0..v15 as four 8x4 sub-tiles

The 16 accumulator registers stay in the VRF across the whole K loop, and the A sub-tile is
reused for four `mxfmacc`s. The elements moved between memory and the VRF therefore number

    N/(B·n')·M·K  +  M/m'·N·K  +  M·N      (B = n/n' = 4)

The testbench counts every granted VLSU request and gets exactly this count for every size
it runs:

| Problem | Tile / sub-tile | Transfers | Cycles (2 cores) | FPU utilisation |
|---|---|---|---|---|
| 16³ | 8,16,4 / 8,4,4 | 1024 | 735 | 69.7 % |
| 16³ | 4,16,4 / 4,4,4 | 1536 | 761 | 67.3 % |
| 32³ | 8,16,4 / 8,4,4 | 7168 | 5607 | 73.1 % |
| 64³ | 8,16,4 / 8,4,4 | 53248 | 43911 | 74.6 % |

Utilisation is the fraction of FPU-lane cycles that issued an operation, from the start of
the kernel until both units are idle. All results are exact: the inputs are small integers.
A 64³ problem uses 96 KiB of the 128 KiB memory; 128³ and larger do not fit this cluster.

## Where this RTL differs from the design it follows

* **Utilisation.** The reference design reaches about 97 % FPU utilisation at 64³ with this
  kernel; this RTL reaches about 75 %. Each `mxfmacc` has one row-buffer fill cycle and three
  pipeline-drain cycles (4 of 36) in which the lanes are idle. The next `mxfmacc` starts only
  after the previous one has finished, and an `mld.a` with a large row pitch puts all four
  ports on one bank. Overlapping consecutive matrix instructions would need a second
  scoreboard entry for the VFU; it is not done.
* **C and D traffic.** C is taken from the VRF as the first step's addend, and D leaves the
  last step straight to the VRF. They are not copied into and out of the tile buffer in extra
  phases. The number of VRF accesses is the same; only the fetch and write-back phases
  disappear.
* **Tile buffer storage.** The tile buffer and the VRF are flip-flops, not latches or SRAM
  macros. The VRF is split into two halves (elements 0–3 and 4–7), and every port is always
  served.
* **Instruction interface.** There is no instruction encoding: the scalar core is replaced by
  a decoded-operation port. C-tile reset is a flag on `mxfmacc`.
* **Floating point.** The FPU flushes subnormals to zero, has no exception flags, and
  supports no rounding mode other than nearest-even.
* **Not built.** The scalar cores, instruction caches, DMA and the 64-core cluster
  configuration.

## Files

| File | Contents |
|---|---|
| `rtl/mx_pkg.sv` | sizes, element and register types, the operation encodings and request structs |
| `rtl/mx_fpu.sv` | one FPU lane: FP64 FMA / 64-bit integer MAC, LAT-stage pipeline with tag |
| `rtl/mx_row_buffer_a.sv` | broadcast buffer: one column of A, one element selected per cycle |
| `rtl/mx_row_buffer_b.sv` | one row of B, four elements per cycle to the lanes |
| `rtl/mx_tile_buffer.sv` | 32-entry partial-sum buffer with clear, 4-lane read and write |
| `rtl/spatz_vrf.sv` | 32 x 512-bit register file, 4 read and 2 masked write ports |
| `rtl/spatz_vfu.sv` | sequencing of `mx[f]macc` and element-wise `vfmacc`, the four FPU lanes |
| `rtl/spatz_vlsu.sv` | block loads and stores over four memory ports |
| `rtl/spatz_controller.sv` | configuration state, dispatch, scoreboard |
| `rtl/spatz_mx.sv` | one vector unit: controller + VLSU + VRF + VFU |
| `rtl/tcdm_bank.sv` | one 1024 x 64-bit SRAM bank |
| `rtl/tcdm_xbar.sv` | crossbar with per-bank round-robin arbitration |
| `rtl/mx_cluster.sv` | top level: two vector units, crossbar, 16 banks |

Each file opens with a description of its interface and timing.

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each compares results with
values it computes itself and prints `TB_RESULT checks=N failures=M`:

* **Storage blocks** (row buffers, tile buffer, VRF, bank) are checked against reference
  arrays.
* **FPU:** exact random cases, random cases that need rounding, and hand-worked
  rounding-boundary cases. It also checks the latency.
* **VFU:** every legal sub-tile shape, with and without C-tile reset, in FP64 and integer,
  plus the element-wise path. It checks the exact cycle count.
* **VLSU:** all block shapes, with and without refused grants.
* **Controller:** RAW, WAR and busy-unit holds.
* **Vector unit:** a complete GEMM with ideal, randomly refused and banked memory.
* **Crossbar:** one grant per bank, data, and fairness.
* **Cluster:** the kernels above, plus the element-wise path. It fails if a mechanism never
  occurred: C-tile reset, C fetch, `mld.a`, `mld.b`, `mst.c`, the bypass path, hazard stalls
  and bank conflicts.

## Simulating

With Verilator 5, package first:

    verilator --binary --timing --assert -Irtl rtl/mx_pkg.sv rtl/mx_fpu.sv \
      rtl/mx_row_buffer_a.sv rtl/mx_row_buffer_b.sv rtl/mx_tile_buffer.sv \
      rtl/spatz_vrf.sv rtl/spatz_vfu.sv rtl/spatz_vlsu.sv rtl/spatz_controller.sv \
      rtl/spatz_mx.sv rtl/tcdm_bank.sv rtl/tcdm_xbar.sv rtl/mx_cluster.sv \
      tb/tb_mx_cluster.sv --top-module tb_mx_cluster
    ./obj_dir/Vtb_mx_cluster

The cluster test runs at the default parameters and takes about a second. For a block test,
compile `mx_pkg.sv`, the block and whatever it instantiates, then its testbench.

Things to keep in mind when changing the design:
* The FPU latency is limited to 3 by the accumulator reuse distance (see above).
* The VFU assumes four lanes.
* `m'n'` must fit the tile buffer; the controller and the VFU assert this.
