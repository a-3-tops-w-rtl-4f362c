# Flex-V: a RISC-V cluster for mixed-precision quantized neural networks

Quantized neural networks mix precisions more and more often. One layer may
use 8-bit activations with 4-bit weights, and the next 4-bit activations with
2-bit weights. A SIMD instruction set that encodes every pair of operand
widths in its opcodes runs out of encoding space quickly. Without hardware
support, the sub-byte operands must be packed and unpacked in software.

Flex-V avoids both problems with three ideas:

* **Virtual SIMD instructions.** There is one dot-product opcode. The operand
  widths come from a control/status register (`simd_fmt`). The same
  instruction therefore means a 4×8-bit dot product, a 16×2-bit one, or an
  8-bit×4-bit mixed one, depending on what the program last wrote to the CSR.
* **Weight-slice reuse.** In a mixed format, for example 8-bit activations
  with 4-bit weights, one 32-bit weight register holds twice as many elements
  as an activation register. A small controller, the MPC, steps through the
  halves or quarters of the weight word across successive instructions, so
  no unpacking is needed.
* **Fused Mac&Load.** A dot product can load the next activation or weight
  word in the same cycle, into a small dedicated register file (the NN-RF).
  The load address is generated by hardware (the MLC), which walks the
  two-dimensional pattern of a matrix multiplication without pointer
  arithmetic in software.

Eight such cores share a 128 kB, 16-bank scratchpad memory (the TCDM) through
a single-cycle logarithmic interconnect. A DMA moves tiles between the TCDM
and the L2 memory outside the cluster. A hardware barrier gates the clock of
cores that wait. At its default parameters the RTL is this 8-core, 16-bank,
128 kB cluster.

## Contents of `rtl/`

| file | what it is |
|---|---|
| `flexv_pkg.sv` | shared types: SIMD formats, CSR addresses, decoded instruction, TCDM bus structs, event flags |
| `slicer_router.sv` | picks the current weight slice and widens it to the lane width |
| `dotp_lanes.sv` | one dot-product sub-unit of parameterisable lane width |
| `dotp_unit.sv` | the mixed-precision dot-product unit: slicer/router, DOTP-16/8/4/2, output mux |
| `mpc.sv` | Mixed-Precision Controller (weight-slice counter) |
| `mlc.sv` | Mac&Load Controller (address generator) |
| `nn_rf.sv` | NN register file: 4 weight and 2 activation registers |
| `flexv_csr.sv` | the extension's CSRs |
| `flexv_decoder.sv` | instruction decoder |
| `flexv_core.sv` | one processing element |
| `rr_arbiter.sv` | round-robin arbiter |
| `log_interconnect.sv` | cores + DMA to TCDM banks |
| `tcdm_bank.sv` | one 32-bit SRAM bank with byte enables |
| `cluster_dma.sv` | L2 ⇄ TCDM DMA |
| `hw_sync_unit.sv` | barrier and clock-enable unit |
| `flexv_cluster.sv` | the top level |

Each file opens with a comment giving the block's function, interface and
timing. The comment also says which parts follow the published design and
which are this implementation's own choices.

## Operand formats

`simd_fmt` selects one of seven formats. Written as aXwY, a format means
X-bit activations (operand A) and Y-bit weights (operand B).

| code | name | A lanes × width | B word holds | sub-unit | slices per B word |
|---|---|---|---|---|---|
| 0 | `FMT_16` | 2 × 16 | 2 × 16 | DOTP-16 | 1 |
| 1 | `FMT_8` | 4 × 8 | 4 × 8 | DOTP-8 | 1 |
| 2 | `FMT_4` | 8 × 4 | 8 × 4 | DOTP-4 | 1 |
| 3 | `FMT_2` | 16 × 2 | 16 × 2 | DOTP-2 | 1 |
| 8 | `MIX8x4` | 4 × 8 | 8 × 4 | DOTP-8 | 2 |
| 9 | `MIX8x2` | 4 × 8 | 16 × 2 | DOTP-8 | 4 |
| 10 | `MIX4x2` | 8 × 4 | 16 × 2 | DOTP-4 | 2 |

A mixed format always runs on the sub-unit of the **activation** width.
The slicer takes slice number `MPC_CNT` of the weight word, counting from the
least significant end: a half for a ratio of 2, a quarter for a ratio of 4.
It then sign- or zero-extends each element to the lane width. For
`MIX8x2` with `MPC_CNT = 2`, for example, bits [23:16] of B hold four 2-bit
weights. These become four 8-bit lanes, and DOTP-8 computes
`C + Σ A[i]·B'[i]` over them.

The result wraps modulo 2³². Signedness is part of the instruction:
`sp` means signed A and signed B, `usp` unsigned A and signed B, and `up`
both unsigned. Every lane is one bit wider than its element, so a single
signed multiplier serves all three cases.

The four sub-units exist side by side. Operand isolation forces the inputs of
the unused ones to zero, and the output multiplexer picks the active one. The
dot-product unit is combinational, so a dot product takes one cycle.

## Weight-slice reuse: the MPC

In a mixed format a weight register must be read 2 or 4 times, with a
different slice each time, before it is reloaded. The MPC counts the dot
products the core retires. After `mix_skip` of them it advances `MPC_CNT`,
wrapping after the last slice. A kernel with a 4×4 block of accumulators sets
`mix_skip = 16`: the sixteen dot products of the block use slice 0, the next
sixteen use slice 1, and so on. In uniform formats `MPC_CNT` stays 0.

Two rules are this design's own. A dot product whose destination is `x0` is
not counted; such instructions serve only to load the NN-RF. A write to
`simd_fmt` or `mix_skip` restarts the counter.

## Mac&Load, the NN-RF and the MLC

This part is the heart of the design and the least obvious one.

### What a Mac&Load does

`mlsdotp rd, imm5` is a dot product whose operands come from the NN-RF, not
from general-purpose registers. The NN-RF has four weight registers
`w0..w3` and two activation registers `a0, a1`. In the same instruction the
core may load one 32-bit word from the TCDM into one NN-RF register. The
5-bit immediate selects everything:

| bits | meaning |
|---|---|
| `imm[0]` | activation register read (`a0`/`a1`); it is also the one reloaded when `imm[3]` is set |
| `imm[2:1]` | weight register read (`w0..w3`); it is also the one reloaded when `imm[4]` is set |
| `imm[3]` | reload the activation register from the `a` pointer |
| `imm[4]` | reload the weight register from the `w` pointer |

`rd` accumulates: `rd = rd + dot(a, w)`. The register read is the old value,
and the load lands one cycle later, so an instruction can use a register and
reload it at the same time. An assertion checks that a Mac&Load never asks
for both reloads at once.

### Where the address comes from

The core never computes a Mac&Load address. The MLC holds two pointers,
`a_addr` and `w_addr`, which are CSRs initialised by software. Each stream
also has three parameters:

* `stride`, the inner step;
* `skip`, the number of updates per inner run;
* `rollback`, the step taken on the last update of a run.

On every reload of a stream, the MLC presents the current pointer as the
load address. It then adds either the stride or, on every `skip`-th update,
the rollback, and writes the sum back to the pointer CSR. One adder serves
both streams because only one of them is updated per instruction. Each
stream has its own counter and its own compare against `skip`.

The pattern this produces is easiest to see on the activation stream of a
4×4 MatMul. Four output pixels `p0..p3` each have an im2col row, and the
rows lie R bytes apart. Let `base` be the address of `p0`'s first word. The
parameters are `stride = R`, `skip = 4` and `rollback = 4 − 3R`. The
successive addresses are then:

```
base, base+R, base+2R, base+3R,   (word 0 of p0..p3)
base+4, base+R+4, base+2R+4, ...  (word 1 of p0..p3)
```

The activations of four pixels are interleaved word by word with no software
pointer updates. The weight stream walks four filters in the same way.

### The 4×4 MatMul kernel

`tb/flexv_asm_pkg.sv` (`gen_matmul`) generates the kernel the cluster test
runs, for any format. Its steps:

1. Write `simd_fmt`, `mix_skip = 16`, the strides, the rollbacks and the skips.
2. For each 4-pixel × 4-filter block, set `a_addr`/`w_addr`, zero 16
   accumulators, and preload `w0..w3` and `a0` with `x0`-destination
   Mac&Loads.
3. Run a hardware loop. Per K-word step it issues one explicit activation
   load, then `16·r` accumulating Mac&Loads, where r is the number of slices
   per weight word.
4. Inside the loop, each group of four Mac&Loads on one activation register
   reloads that register on the fourth one.
5. The last pixel row of the last slice reloads the weights instead.
6. Store the 16 accumulators and go on to the next block.
7. Finish with WFI (barrier) and EBREAK.

So, apart from the loop-head load, every instruction of the loop is a dot
product. The core keeps up with this at one instruction per cycle whenever
the TCDM grants its requests.

## The core

`flexv_core` carries the extension: the decoder, the CSRs, the NN-RF, the
dot-product unit, the MPC and the MLC. It surrounds them with a deliberately
small host core:

* **Pipeline.** One instruction is fetched, decoded and executed per cycle.
  The instruction memory answers in the same cycle.
* **Loads.** A load is issued in its execute cycle and written back in the
  next cycle. A pending load does not stall the core. If the next instruction
  reads the register being loaded, the TCDM data is forwarded to it directly.
* **Stalls.** The core stalls only in four cases: a refused grant (a bank
  conflict), a load whose data is late, a WFI that waits for the barrier, or
  a low clock enable.
* **Instructions.** The set is the RV32I subset the kernels need: `LUI ADDI
  SLLI ADD SUB LW SW BEQ BNE CSRRW CSRRS CSRRWI WFI EBREAK`, with standard
  encodings. On top come the extension instructions:

| instruction | encoding (this design's own) |
|---|---|
| `sdotp` / `mlsdotp` | opcode `0x2B`. `funct3[2]` = Mac&Load, `funct3[1:0]` = signedness (0 sp, 1 usp, 2 up), bit 25 = `.b` suffix for legacy mode. `mlsdotp` puts `imm5` in [24:20] |
| `lp.setup` | opcode `0x7B`, `funct3 = 0`. `rs1` = iteration count, `imm[31:20]` = byte offset of the last body instruction. One loop level, zero-overhead jump |
| barrier | `WFI` |
| halt | `EBREAK`. An illegal instruction or an unknown CSR also halts the core |

`sb_legacy = 1` makes a non-Mac&Load `sdotp` ignore `simd_fmt`. It then uses
its own suffix: `.b` for 8-bit, and otherwise the 16-bit halfword form of
XpulpV2.

CSR addresses (this design's choice) are `0x800..0x80A`, in the order
`sb_legacy, simd_fmt, mix_skip, a_stride, w_stride, a_rollback, w_rollback,
a_skip, w_skip, a_addr, w_addr`. `mhartid` (`0xF14`) returns the core index.

## TCDM and the logarithmic interconnect

The TCDM is `N_BANKS` banks of `BANK_WORDS` 32-bit words (16 × 2048, that is
128 kB). The banks are word-interleaved:

* byte address bits `[5:2]` select the bank;
* the bits above select the row.

Every master (8 cores and the DMA) drives a `tcdm_req_t`
(`req, addr, we, be, wdata`). It receives a separate `gnt` and a
`tcdm_rsp_t` (`rvalid, rdata`). The timing is fixed:

* `gnt` comes in the request cycle;
* a granted read returns `rvalid`/`rdata` exactly one cycle later;
* a write gets no response.

Each bank has a round-robin arbiter. A master that is refused keeps its
request up, so a conflict costs it one cycle per lost round. Assertions
check three rules: at most one grant per bank, a grant only to a requester,
and `rvalid` exactly one cycle after a read grant.

The grant travels on its own wire for a reason. A core's next address may
depend combinationally on `rdata` (through load forwarding), and the grant
depends on that address. With both signals in one struct, a simulator or
linter that tracks whole variables would see a combinational loop that does
not exist.

## DMA and barrier

`cluster_dma` copies `len` words between L2 and the TCDM, in either
direction, one word at a time. Its TCDM port is the interconnect's ninth
master, so it runs concurrently with the cores. Its L2 port uses the same
request/grant/rvalid handshake with any latency. A job is started from
cluster ports (`dma_start_i` and friends); `done` pulses at the end.
Assertions check that a refused request is held unchanged.

`hw_sync_unit` releases the barrier when every active core (fetch enabled,
not halted) is waiting in WFI. Until then a waiting core's clock enable is
low. It goes high again in the release cycle.

## Verification

Every block has a self-checking testbench in `tb/`. Each compares against a
model written separately from the RTL, and each ends with a
`TB_RESULT checks=… failures=…` line.

* `tb_dotp_unit` and `tb_slicer_router` check random operands in all formats,
  signedness modes and slices against a reference dot product.
* `tb_mpc`, `tb_mlc`, `tb_nn_rf`, `tb_flexv_csr` and `tb_flexv_decoder`
  check the controllers and decode against behavioural models. `tb_mlc` also
  checks the stride/rollback pattern above.
* `tb_flexv_core` runs generated MatMul kernels (a8w2, a4w2, a8w8) and a
  scalar program on one core. The memory refuses grants at random. The test
  checks the results and that an uncontended run takes exactly one cycle per
  instruction.
* `tb_log_interconnect` drives random traffic from 9 masters. It checks
  exclusive grants, data integrity, starvation freedom and that a lone request
  is always granted.
* `tb_tcdm_bank`, `tb_cluster_dma` and `tb_hw_sync_unit` check their blocks
  in isolation.
* `tb_flexv_cluster` is the end-to-end test, at the default parameters.
  1. It loads the MatMul operands for all six formats into a behavioural L2.
  2. The DMA moves them into the TCDM.
  3. The eight cores compute a K = 288, 64-filter, 16-pixel MatMul each time,
     meeting at the barrier.
  4. The DMA copies the results back, and every output is compared with a
     reference.

  The test also counts, and requires to be non-zero: bank-conflict stalls,
  gated core-cycles, barrier releases, MPC slice switches, MLC rollbacks,
  hardware-loop jumps, load forwards and DMA jobs. It prints MAC/cycle per
  format.

To run a testbench with plain Verilator, from the repository root:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/flexv_pkg.sv tb/flexv_asm_pkg.sv $(ls rtl/*.sv | grep -v pkg) \
  tb/l2_model.sv tb/tb_flexv_cluster.sv --top-module tb_flexv_cluster -o sim
./obj_dir/sim
```

The cluster test takes under a minute to build and a few seconds to run.

### Measured throughput

The end-to-end test reports these cluster MAC/cycle figures (8 cores,
MatMul part of the convolution only). It fails if any format falls below
90% of the published MatMul-kernel figure:

| format | this RTL | published |
|---|---|---|
| a2w2 | 94.2 | 91.5 |
| a4w2 | 54.3 | 51.9 |
| a4w4 | 50.2 | 50.6 |
| a8w2 | 29.4 | 27.8 |
| a8w4 | 28.6 | 27.6 |
| a8w8 | 26.7 | 26.9 |

The data layout matters as much as the datapath. The test pads every im2col
row and filter row by one word. Without the padding, an 8-bit row of
K = 288 is 72 words long. Every core's group of four pixels then starts
288 words (a multiple of 16) after the previous one. All eight cores hit the
same banks in lockstep, and a8w8 drops to about 13.5 MAC/cycle. Results
slightly above the published ones are expected, for two reasons:

* this core has no branch or load-use penalties;
* the test leaves out the im2col and requantization phases.

## Where this RTL departs from the published design

* **Host core.** The published processing element is the four-stage RI5CY
  with the full RV32IMC + XpulpV2 instruction set, extended for Flex-V. Here
  the extension sits in a one-stage core with a kernel-sized RV32I subset and
  one hardware-loop level. The extension's behaviour is the same. Cycle
  counts differ wherever RI5CY would stall, for example on branches and on
  load-use hazards, which this core forwards.
* **Encodings, CSR addresses and reset values** are not published; the
  choices are listed above.
* **Not built:** the shared instruction cache (fetch is a cluster port), the
  cluster peripherals and event unit (of the synchronization unit only the barrier and clock gating are built; thread dispatch is the common fetch enable), the AXI
  link to the host, and the host itself with its L2 (a behavioural L2 exists
  only in `tb/`).
* **DMA.** The DMA's internals are not published. This one is a simple
  single-job, word-at-a-time engine.
* **Convolution software.** The full layers and networks used in the
  published evaluation (im2col, requantization, tiling between L3, L2 and
  TCDM) are software around this hardware and are not part of the RTL. The
  testbench runs the MatMul inner kernel that dominates them.
* **Resource check.** The evaluated 3×3 convolution layer fits the 128 kB
  TCDM in every format: at a8w8 it needs about 47 kB including im2col
  buffers. The evaluated end-to-end networks (1.9 MB, 997 kB and 142 kB of
  parameters) do not fit, and need tiling from a larger L2.
