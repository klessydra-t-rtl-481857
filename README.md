# Klessydra-T13: an interleaved-multithreading RISC-V core with a scratchpad vector coprocessor

This is the RTL for a small RV32IMA core built for edge computing. The core runs
three hardware threads (harts), and its vector coprocessor computes directly out
of scratchpad memories. There are two ideas behind it.

**Interleaved multithreading hides the pipeline's hazards.** The three harts take
turns in a four-stage pipeline, one instruction per cycle. Two instructions of
the same hart are therefore always three cycles apart. A result is in the
register file before that hart's next instruction reads it, and a branch has
resolved before the hart's next fetch. The pipeline needs no forwarding, no
interlocks and no branch prediction.

**The vector unit has no vector register file.** A vector is simply a range of
bytes in a local scratchpad (SPM). A vector instruction names three
scratchpad addresses taken from scalar registers:
- a destination `(rd)`;
- a first source `(rs1)`;
- a second source `(rs2)`, or instead a scalar.

Its length and element width come from per-hart CSRs. The `kmemld` and
`kmemstr` instructions copy data between main memory and the scratchpads.

The coprocessor can be shared among the harts in several ways, set by three
parameters:

| parameter | meaning | default |
|---|---|---|
| `M` | scratchpad interfaces (SPMIs), each with its own address space; hart *h* uses SPMI *h* mod `M` | 3 |
| `F` | sets of functional units; MFU controller *m* uses set *m* mod `F` | 1 |
| `D` | lanes per functional unit, equal to the banks per SPM (32-bit words handled per cycle) | 2 |
| `N` | SPMs per SPMI | 4 |
| `SPM_BYTES` | capacity of one SPM | 4096 |

The defaults give the *heterogeneous MIMD + SIMD* scheme. Each hart has a
private set of scratchpads, and all harts share one set of functional units
(adder, shifter, multiplier, accumulator, comparator) with two lanes each.

Two harts can run vector instructions at the same time as long as they use
different units. For example, one hart adds while another multiplies. A hart
that wants a unit someone else holds waits for it.

Other settings give the other schemes:
- `F = M`: symmetric MIMD.
- `M = F = 1`: one shared coprocessor, i.e. pure SIMD (or SISD with `D = 1`).

The end-to-end test runs the default configuration. A workload test also runs
five of the other schemes (see the workloads section).

## Block map

```
               +--------------------------- klessydra_t13 ----------------------------+
 instr_*  <--> | pc_harc --IF/ID--> decoder, regfile --ID/EX--> exec_unit  --EX/WB--> writeback
               |                                              csr_unit                |
 data_*   <--> |                                              lsu <------+            |
               |                                              mfu        |            |
               |                                               |  M x mfu_ctrl        |
               |                                               |  F x mfu_fu          |
               |                                              M x spmi (N x spm) <----+
               +----------------------------------------------------------------------+
```

| file | block |
|---|---|
| `kl_pkg.sv` | shared types, opcodes, CSR numbers, the unit map and element-wise helpers |
| `pc_harc.sv` | per-hart program counters and the hart-context counter (`harc`) that rotates fetch |
| `regfile.sv` | one 32 x 32-bit register file per hart, three read ports |
| `decoder.sv` | RV32IMA + Zicsr + the custom vector instructions into a `dec_t` struct |
| `exec_unit.sv` | scalar ALU, multiply/divide, branch and jump targets |
| `csr_unit.sv` | machine-mode CSRs per hart, trap entry and `mret`, vector configuration CSRs |
| `lsu.sv` | scalar loads and stores, LR/SC, AMOs, and `kmemld`/`kmemstr` transfers |
| `writeback.sv` | picks the result and aligns load data for the register write |
| `spm.sv` | one scratchpad: `D` banks, one read and one write port |
| `spmi.sv` | `N` SPMs with read and write rotators, the LSU bank interleaver and an ownership flag |
| `mfu_fu.sv` | one functional-unit set: add/sub, shift, multiply, accumulate, compare, each `D` lanes wide |
| `mfu_ctrl.sv` | sequences one vector instruction: reads, unit, result write |
| `mfu.sv` | `M` controllers, `F` unit sets, the unit-ownership table and the operand and result crossbars |
| `klessydra_t13.sv` | the top: pipeline registers, execute-stage control, retry and trap logic |

## The pipeline and the hart rotation

`pc_harc` holds one PC per hart. Every cycle it fetches from the next hart in
turn (0, 1, 2, 0, ...). Program memory is synchronous: the instruction arrives
in ID one cycle after `instr_req`. ID then decodes it and reads `rs1`, `rs2` and
also `rd`, because vector instructions use `rd` as an address.

Most of the work happens in EX:
- Scalar results are computed.
- CSRs are read and written.
- The LSU issues its memory request.
- A vector instruction asks for its SPMI and its functional units.
- Taken branches, jumps, traps and `mret` send a redirect to `pc_harc` for that
  hart.

WB writes the register file. Load data and AMO results arrive from the data
memory in this same cycle.

In the steady state `pc_harc` issues a fetch every cycle, for each hart in
turn. A hart's redirect from EX comes before that hart's next fetch: EX of
instruction *i* and IF of instruction *i+1* of the same hart happen in the
same cycle, and the redirect takes priority.

### The self-referencing jump

A hart must not wait inside the pipeline, because a stall would stop the other
harts too. When an instruction in EX cannot go ahead, it is dropped and its
hart's PC is set back to the instruction's own address. The hart fetches it
again three cycles later while the other two harts keep running. This is the
only stall mechanism in the core.

An instruction cannot go ahead when:
- it is a vector instruction and its SPMI is still busy with that hart's
  previous vector instruction or transfer;
- the MFU cannot grant the functional units it needs;
- it needs the LSU (any load, store, AMO or transfer) while the LSU is busy with
  a transfer or with the second cycle of an AMO.

A retried instruction has no side effects. The SPMI's busy flag also orders a
hart's vector instructions: a later one starts only after the earlier one on
the same SPMI has written its last result.

## Scratchpads, rotators and bank addressing

Vector operands are byte addresses in the scratchpad space starting at
`SPM_BASE` (0x1000_0000). Each hart sees its own SPMI at the same addresses.
SPM *n* of an SPMI covers bytes `n*SPM_BYTES ... (n+1)*SPM_BYTES-1` of that
space.

An SPM is built from `D` 32-bit-wide banks. Word *w* lives in bank *w* mod `D`,
at line *w* / `D`. Each bank gets its own line address, so a window of `D`
consecutive words can be read from any starting word in one cycle. For
example, with `D = 2` the window starting at word 5 reads bank 1 at line 2 and
bank 0 at line 3.

The read rotator then turns the bank order into lane order, so lane *k* gets
word *start + k*. The write rotator does the reverse. As a result vectors need
only be word aligned, not line aligned.

The LSU moves one word per cycle through the 32-bit data-memory port. The bank
interleaver sends each word to bank *w* mod `D`.

Rules enforced in EX, where a violation traps with `mcause = 24`:
- all operand addresses lie inside the scratchpad space;
- all operand addresses are word aligned;
- no operand crosses from one SPM into the next.

A zero vector length makes the instruction a no-op.

Each SPM has one read port. When both sources of an instruction lie in the same
SPM, each beat takes two cycles: A is read into a buffer, then B. Keeping the
two operands in different SPMs runs at full rate.

## Functional units and the contention table

An MFU controller (`mfu_ctrl`) runs one vector instruction as a three-step
pipeline:

1. **issue**: read `D` words of A, and of B where the operation has a B vector.
2. **exec**: the operands go to the units of the controller's FU set.
3. **write**: the registered result is written through the write rotator.

Reductions add the unit result into a 32-bit accumulator and write one word at
`(rd)` after the last beat. Bytes past the vector length are never written and
count as zero in reductions.

Which units each operation uses (`kl_pkg::fu_mask`):

| units | operations |
|---|---|
| add/sub | `kaddv`, `ksubv`, `ksvaddsc`, `ksvaddrf`, `kvcp` |
| multiplier | `kvmul`, `ksvmulsc`, `ksvmulrf` |
| accumulator | `kvred` |
| multiplier + accumulator | `kdotp`, `kdotpps` |
| shifter | `ksrlv`, `ksrav` |
| comparator | `krelu`, `kvslt`, `ksvslt` |

`mfu` keeps an owner for every unit of every FU set. A request from hart *h*
goes to controller *h* mod `M`. It is granted in the same cycle if that
controller is idle and all units in its mask are free. The units then belong to
that controller until its `done` pulse.

With the defaults, a `kvmul` on hart 0 and a `kaddv` on hart 1 therefore run
side by side. A `kdotp` on hart 2 at the same time is refused and retried,
because it needs the multiplier.

### Timing

Cycles are counted from the cycle in which the instruction is in EX and is
granted:

| step | cycle |
|---|---|
| first scratchpad read | 1 |
| data back, unit computes | 2 |
| first result written | 3 |

The first result is thus in the scratchpad in the fourth cycle of the
operation. For an instruction of *n* words the controller is busy for:

| case | busy cycles |
|---|---|
| sources in different SPMs, or only one vector source | ⌈*n*/`D`⌉ + 2 |
| both sources in the same SPM | 2⌈*n*/`D`⌉ + 2 |
| scalar operand read from the scratchpad (`ksvaddsc`, `ksvmulsc`) | 2 more |

`kmemld`/`kmemstr` of *n* words finish *n* + 1 cycles after they are accepted.

## Instruction encoding and programmer's model

The vector instructions use the custom-0 major opcode (`0001011`) in R-type
format, with `funct3 = 000`. `funct7` selects the operation:

| funct7 | instruction | operation |
|---|---|---|
| 0 | `kmemld rd, rs1, rs2` | copy `rs2` bytes from memory at `(rs1)` to scratchpad `(rd)` |
| 1 | `kmemstr rd, rs1, rs2` | copy `rs2` bytes from scratchpad `(rs1)` to memory `(rd)` |
| 2 | `kaddv` | `(rd)[i] = (rs1)[i] + (rs2)[i]` |
| 3 | `ksubv` | `(rd)[i] = (rs1)[i] - (rs2)[i]` |
| 4 | `kvmul` | `(rd)[i] = (rs1)[i] * (rs2)[i]` (low bits) |
| 5 | `kvred` | `(rd) = Σ (rs1)[i]` |
| 6 | `kdotp` | `(rd) = Σ (rs1)[i]·(rs2)[i]` |
| 7 | `ksvaddsc` | `(rd)[i] = (rs1)[i] + (rs2)`, where the scalar is read from the scratchpad |
| 8 | `ksvaddrf` | `(rd)[i] = (rs1)[i] + rs2`, where the scalar comes from the register |
| 9 | `ksvmulsc` | like 7, multiplying |
| 10 | `ksvmulrf` | like 8, multiplying |
| 11 | `kdotpps` | `(rd) = Σ ((rs1)[i]·(rs2)[i]) >>> MPSCLFAC` |
| 12 | `ksrlv` | `(rd)[i] = (rs1)[i] >> rs2` (logical) |
| 13 | `ksrav` | `(rd)[i] = (rs1)[i] >>> rs2` (arithmetic) |
| 14 | `krelu` | `(rd)[i] = max((rs1)[i], 0)` |
| 15 | `kvslt` | `(rd)[i] = (rs1)[i] < (rs2)[i] ? 1 : 0` (signed) |
| 16 | `ksvslt` | `(rd)[i] = (rs1)[i] < rs2 ? 1 : 0` |
| 17 | `kvcp` | `(rd)[i] = (rs1)[i]` |

Element arithmetic wraps within the element width, and multiplies keep the low
half. Reductions and dot products accumulate full signed products in 32 bits.

Vector configuration CSRs (one copy per hart):

| CSR | number | content | reset |
|---|---|---|---|
| `MVSIZE` | 0xBF0 | vector length in bytes | 0 |
| `MVTYPE` | 0xBF8 | element width: 0 = 8-bit, 1 = 16-bit, 2 = 32-bit | 2 |
| `MPSCLFAC` | 0xBE0 | right shift applied to each product by `kdotpps` | 0 |

The machine-mode CSRs implemented are:
- `mstatus`, `misa`, `mtvec`, `mscratch`, `mepc`, `mcause`, `mtval`,
  `mhartid`, one set per hart;
- `mcycle`, shared by all harts;
- `minstret`, one per hart;
- the user-level read-only aliases of the two counters.

All harts start at `BOOT_ADDR` and tell themselves apart through `mhartid`.
Traps go to the hart's `mtvec`, which resets to 0x100.

Trap causes:

| cause | meaning |
|---|---|
| 2 | illegal instruction |
| 3 | `ebreak` |
| 4 | misaligned load |
| 6 | misaligned store |
| 11 | `ecall` |
| 24 | bad scratchpad address |

There are no interrupts. `fence` and `wfi` do nothing.

## Memory interfaces

The program and data ports are plain synchronous single-cycle memories. The
core raises a request, and read data must be valid in the next cycle. There is
no wait-state handshake.

The data port carries:
- scalar accesses, with byte enables;
- AMOs, which read in one cycle and write in the next;
- `kmemld`/`kmemstr` bursts of one word per cycle.

## Simulating

Every testbench is self-checking and ends by printing
`TB_RESULT checks=<n> failures=<n>`. With Verilator 5:

```
verilator --binary --timing -Wno-fatal --top-module tb_klessydra_t13 \
    rtl/kl_pkg.sv $(ls rtl/*.sv | grep -v kl_pkg) tb/tb_klessydra_t13.sv
./obj_dir/Vtb_klessydra_t13
```

Replace the top and the testbench file to run a block test, e.g.
`tb_mfu` with `tb/tb_mfu.sv`.

`tb_klessydra_t13` runs the whole core at its default parameters. Its
assembler is written in SystemVerilog functions, and it produces one program
that all three harts run on different data. The program covers scalar code,
every vector instruction, atomics and traps. The test checks the results, and
checks the MFU timing given above. Because the harts reach the same vector
instructions a cycle apart, they contend for the LSU and the functional units.
The test counts each mechanism and fails if one never occurs:
- retries on a busy LSU;
- retries on a busy unit;
- vector instructions running in parallel;
- two-cycle beats;
- traps;
- SC failures;
- subword operations;
- scratchpad-held scalars.

The run takes about 900 cycles. The block testbenches compare each unit with
reference values computed inside the testbench. The workload testbenches
described below are built the same way, with top and file name changed.

## Where this RTL departs from, or adds to, the published description

The published description gives the organisation and behaviour of the core
and the coprocessor: the blocks, the parameters, the sharing schemes and the
instruction list. Many details are left open, and this design chooses them:

- **Sizes and addresses.** The scratchpad size (4 KiB per SPM), `SPM_BASE`,
  `BOOT_ADDR` and the `mtvec` reset value are chosen here.
- **Encodings.** The instruction encoding, the CSR numbers and trap cause 24
  are chosen here.
- **Where a reduction result goes.** The instruction list describes `kdotp` as
  a dot product "into register". The same description also says the
  coprocessor writes only to scratchpads, and lists `(rd)` as an address. This
  RTL writes the reduction result to the scratchpad at `(rd)`.
- **Operand rules.** `kmemld`/`kmemstr` take the byte count in `rs2`. Vectors
  must be word aligned and must not cross SPM boundaries. The description
  places no limit other than total capacity.
- **Controller latency.** The controller pipeline gives a 4-cycle initial
  latency, at the low end of the 4 to 8 cycles quoted for the original.
- **LSU contention.** Harts waiting on a busy LSU retry through the same
  self-referencing jump as for the coprocessor.
- **Divider.** Multiply and divide are single-cycle combinational logic, which
  limits clock frequency.
- **Crossbar.** The unit crossbar is not pipelined.
- **Not built:** the debug unit, the hardware-loop support named as part of
  the coprocessor's set-up logic, and interrupts.
- **Memories.** The program and data memories are outside the core. The
  testbench models them as arrays.

## Workloads: what fits and what was run

Each hart has `N * SPM_BYTES` = 16 KiB of private scratchpad. The workload
testbenches run the kernels on the whole core at its default parameters. Each
generates its program with a small assembler written in SystemVerilog
functions, and checks every output.

### `tb_conv_workload`: 2D convolution

The image is zero-padded. Each padded row is loaded with one `kmemld`, and
rows are placed so that none crosses an SPM boundary. For every output row and
filter tap, the kernel computes:
- `ksvmulrf tmp, in_row + j, w`
- `kaddv out_row, out_row, tmp`

The result is written back with one `kmemstr`. All three harts run the same
kernel on different data. Scratchpad needed: 8756 B for 3x3 on 32x32, and
11636 B for 11x11 on 32x32.

| image | filter | cycles for three harts |
|---|---|---|
| 4x4 | 3x3 | 957 |
| 8x8 | 3x3 | 2244 |
| 16x16 | 3x3 | 6729 |
| 32x32 | 3x3 | 23193 |
| 32x32 | 5x5 | 52845 |
| 32x32 | 7x7 | 97077 |
| 32x32 | 9x9 | 155889 |
| 32x32 | 11x11 | 229389 |

### `tb_fft_workload`: 256-point FFT

The FFT is radix-2 decimation in time, in 32-bit fixed point with Q14
twiddles. Real and imaginary parts are kept in separate SPMs. The core itself
does the bit-reversal while loading, with one-word `kmemld`s.

Each butterfly group uses these operations on vectors of the group's
half-size:
- four `kvmul`;
- four `ksrav` by 14;
- six `kaddv`/`ksubv`.

The scratchpad holds 7160 B. A run takes 79832 cycles for three harts. The
outputs are bit-exact against a model of the same arithmetic, and within 128
of a floating-point DFT, where the largest bins are about 7700.

### `tb_matmul_workload`: 64x64 matrix multiplication

The three 16 KiB operands cannot all be resident, so the kernel streams them,
using three SPMs:
- B is held transposed;
- half of Bᵀ (8 KiB) occupies two SPMs;
- a row of A and 32 results share the third SPM.

Each element of C is one `kdotp` of 64 words. A run takes 438516 cycles for
three harts. No two `kdotp` overlap: all of them need the single shared
multiplier and accumulator. This is where the heterogeneous scheme (`F = 1`)
pays for its smaller area.

### `tb_composite_workload`: three kernels at once

Hart 0 convolves a 32x32 image (3x3 filter), hart 1 runs the FFT, and hart 2
multiplies the matrices. The kernels use different unit mixes and overlap
more. Completion cycles:

| kernel | done at cycle |
|---|---|
| FFT | 92957 |
| convolution | 152998 |
| MatMul | 171969 |

### `tb_schemes_workload`: the other sharing schemes

The 8x8 convolution with a 3x3 filter runs on five more core instances, one
per scheme. Each instance has its own memories (`kl_conv_harness`). With
`M = 1` the three harts share one scratchpad space, so each hart works at its
own 1 KiB offset.

| scheme | `M` | `F` | `D` | cycles for three harts |
|---|---|---|---|---|
| SISD | 1 | 1 | 1 | 5166 |
| pure SIMD | 1 | 1 | 4 | 2853 |
| symmetric MIMD | 3 | 3 | 1 | 2664 |
| symmetric MIMD + SIMD | 3 | 3 | 8 | 2280 |
| heterogeneous MIMD | 3 | 1 | 1 | 3144 |
| heterogeneous MIMD + SIMD (default) | 3 | 1 | 2 | 2244 |

The default row comes from `tb_conv_workload`. All outputs are checked. The
test also fails if the schemes do not rank as expected:
- more lanes beat fewer;
- private units beat shared ones.

These cycle counts belong to this implementation and these hand-written
kernels. They are not meant to reproduce the published figures.

For orientation, the original evaluation reports "average cycle count per
computation kernel" for this configuration. The reported figures are:

| kernel | reported cycles |
|---|---|
| Conv 4x4 | 638 |
| Conv 8x8 | 1274 |
| Conv 16x16 | 3280 |
| Conv 32x32 | 9167 |
| FFT 256 | 18468 |
| MatMul 64x64 | 425978 |
| composite: Conv 32x32 | 15973 |
| composite: FFT 256 | 24611 |
| composite: MatMul 64x64 | 251201 |

It does not say whether these figures cover one hart's kernel or all three.
The runs here show:
- **Convolutions and FFT: 1.5 to 4.3 times slower than reported** (counting all
  three harts' work). The kernels here are straightforward: a `li` per
  operand address and no loop unrolling across rows. The FFT in particular
  issues many short vectors in its first stages.
- **MatMul: close to the reported figure** (438516 cycles).
- **No attempt to match the reported figures.** The RTL timing is documented
  above, so kernels can be tuned against it.
