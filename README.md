# ConvAix: a VLIW processor with a vector instruction set for CNN layers

Most CNN accelerators pair a fixed array of multiply-accumulate (MAC) units
with a fixed data flow. ConvAix is a programmable processor instead. It has
192 MAC lanes, organised as 3 vector ALUs × 4 slices × 16 lanes, and each
vector ALU is driven by its own slot of a 4-slot VLIW instruction bundle.
Slot 0 is a scalar control slot. It runs the loops, moves data, loads line
buffers and starts DMA transfers. Slots 1–3 issue one vector operation each
per cycle, 64 MACs apiece. The data flow of a convolution is therefore a
question of software: which rows sit where, which filters each slice
computes, and when partial sums leave the chip.

This repository holds synthesizable SystemVerilog for the core:
- the 8-stage pipeline;
- the scalar, vector and accumulator register files;
- the three vector ALUs, including operand permutation, precision gating,
  rounding and saturation;
- the max-pooling/activation unit;
- a 128 KByte banked dual-port data memory and a 16 KByte program memory;
- the memory controller, the IFMap line buffer and the DMA engine.

It also has a self-checking testbench for each unit. The end-to-end
testbench assembles and runs a small strided convolution layer on the full
core.

The block structure, sizes and pipeline depth follow the published
description of ConvAix. That description gives no instruction set,
encodings or pipeline timing, and it names no handshakes. Every such detail
below is this design's own choice. The [departures](#where-this-design-departs-from-the-original)
section lists them.

## Sizes at a glance

| Item | Value |
|---|---|
| Issue slots | 4 (slot 0 scalar/control, slots 1–3 vector) |
| Pipeline | IF, ID, E1 … E6 (8 stages) |
| MACs per cycle | 3 vALU × 4 slices × 16 lanes = 192 (153.6 GOP/s at 400 MHz) |
| Data word | 16-bit two's complement fixed point; 32-bit accumulators |
| Scalar registers R | 32 × 16 bit |
| Vector registers VR | 16 × 256 bit, in 4 sub-regions of 4 |
| Accumulator registers VRl | 12 × 512 bit, in 3 sub-regions of 4 |
| Data memory DM | 128 KByte = 16 banks × 4096 × 16 bit, two 256-bit ports |
| Program memory PM | 16 KByte = 1024 bundles × 128 bit |
| Line buffer | 512 words, strided reads with stride 1–4 |
| External port | 128 bit (8 × 16 bit), request/grant, in-order read data |

All of these are package constants in `rtl/convaix_pkg.sv` or module
parameter defaults.

## The bundle and the instruction set

A bundle is 128 bits wide. Slot 0 sits in bits [31:0]. Vector slot *k*
(k = 1..3) sits in bits [32k+31:32k].

Slot 0 word: `[31:26] op`, `[25:21] rd`, `[20:16] ra`, `[15:0] imm`. ALU
operations use `[15:11] rb` and `[3:0] func` from the immediate field.

| op | mnemonic | effect |
|---|---|---|
| 0 | NOP | |
| 1 / 2 | LI / ADDI | R[rd] = imm / R[ra] + imm |
| 3 | ALU | R[rd] = R[ra] *func* R[rb]. The funcs are add, sub, and, or, xor, shl, sra, srl, mul (low 16 bits) and slt. ADD32/SUB32 work on register pairs {R[x+1], R[x]} and write rd and rd+1. |
| 4 / 5 | LD / ST | one word at DM[R[ra]+imm] |
| 6 / 7 | VLD / VST | 16 words at DM[R[ra]+imm …], any alignment, to or from VR[rd]. For VLD with rd[4] set, see LBRD. |
| 8 | VLD2 | two vector loads in one cycle, one per DM port: VR[rd] = DM[R[ra]], VR[imm[3:0]] = DM[R[rb]] |
| 9 / 10 | VLDL / VSTL | VRl[rd] ↔ DM. The low 16 bits of each of the 16 lanes are at addr, the high 16 bits at addr+16. |
| 11 | LBFILL | start a background copy of R[imm[10:6]] vectors from DM[R[ra]] into line buffer position R[rb] |
| 12 | LBRD | VR[rd] = LB[R[ra] + imm[13:0] + i·(imm[15:14]+1)], i = 0..15. With rd[4] set, the vector is written to VR[4s + rd[1:0]] for all four s, so one read feeds operand A of every slice. |
| 13 | DMA | start a background transfer of R[rb] 128-bit beats between external word address {R[rd+1], R[rd]} and DM[R[ra]]. imm[0] = 1 means DM → external. |
| 14 | WAIT | stall while the DMA (imm[0]) and/or the line-buffer fill (imm[1]) is busy |
| 15 / 16 / 17 | BNZ / BEZ / J | pc += imm if R[ra] ≠ 0 / R[ra] = 0 / always |
| 18 | HALT | stop fetching; `halted` rises when everything has drained |
| 19 | VCFG | vector configuration = R[ra]: frac [4:0], round [5], saturate [6], gating width [11:7] |
| 20 | VPERM | permutation pattern = VR[rd] |

Vector-slot word: `[31:27] op`, `[26] perm`, `[25:22] d`, `[21:18] b`,
`[17:14] vb`, `[13:12] ia`.

| op | mnemonic | effect in each slice s of the slot's vALU |
|---|---|---|
| 1 | MAC | acc[s] += A[s] · B[s] |
| 2 | MUL | acc[s] = A[s] · B[s] |
| 3 | OUT | VR[4s + d] = narrow(acc[s]) |
| 4 | CLR | acc[s] = 0 |
| 8 / 9 / 10 | RELU / MAX / PMAX | slot 1 only, run in the Maxp/Act unit: VR[d] = max(VR[b], 0) / max(VR[b], VR[vb]) / max of adjacent pairs of the 32 words {VR[vb], VR[b]} |

Here A[s] = VR[4s + ia], taken from the slice's own VR sub-region.
B[s] = VR[b] broadcast to all four slices, or a per-slice permutation of
VR[b] when `perm` is set. The accumulator acc[s] of vALU *k* (slot k+1) is
VRl[4k + s], so each vALU owns one VRl sub-region. This is how the sub-region
restriction shows up in the encoding: a slice can only read and write its own
quarter of VR and its own entry of VRl. Slot 0 can reach every entry, and
moving data between sub-regions is its job.

## Pipeline timing

The pipeline is exposed. Nothing checks data dependences. Code, or a
compiler, must space dependent operations by the distances below. The only
interlocks are the two background engines.

| Stage | Slot 0 | Slot 1 Maxp/Act | Vector ALUs (slots 1–3) |
|---|---|---|---|
| IF | PM read | | |
| ID | decode | | |
| E1 | read R (forwarded from E2); ALU; branch decision; DM request; LB read; DMA/LB command | read VR, compute | — |
| E2 | DM data returns; write R, VR, VRl, config, pattern at the end | write VR at the end | — |
| E3 | | | read VR; operand prepare (broadcast/permute) |
| E4 | | | precision gating, 16×16 multiply |
| E5 | | | read VRl (or bypass from E6); accumulate or narrow |
| E6 | | | write VRl (MAC/MUL/CLR) or VR (OUT) at the end |

The distances that follow from this table:

| Producer → consumer | Minimum distance in bundles |
|---|---|
| scalar result → slot 0 use | 1 (next bundle, through E2→E1 forwarding) |
| slot-0 VR/VRl write (VLD, VLD2, LBRD, VLDL) → vector op | 0: a vector op in the *same* bundle already sees it, because E3 comes after E2 |
| VCFG / VPERM → vector op | 0: same bundle and all later ones |
| MAC → MAC on the same accumulator | 1: back to back, because E5 takes the E6 result over a bypass |
| vector OUT → VST / Maxp/Act reading the result | 6 |
| last MAC → VSTL of that accumulator | 6 |
| VLDL → MAC on that accumulator | 0 (the VRl write at the end of E2 precedes E5) |
| taken branch | the two bundles after the branch are squashed (no delay slots) |

A vector op and a slot-0 write that land on the same register in the same
cycle are resolved by write-port priority: the vector ALUs win over the
Maxp/Act unit, which wins over slot 0. Write such code only on purpose.

Stalls happen only in three cases:
- a WAIT while the selected engine is busy;
- a DMA command while the DMA is busy;
- an LBFILL command while a fill is running.

A stall freezes IF, ID and E1 and lets a bubble into E2. Everything from E2
on keeps moving, so vector operations already issued complete during the
stall.

HALT in E1 stops the fetch unit. `halted` goes high only after the vector
pipeline, the DMA and the line-buffer fill are all idle. Pulsing `start`
restarts at PC 0.

## The vector ALU

Each vALU is an operand-prepare stage followed by four identical 16-lane
slices (`valu.sv`, `operand_prepare.sv`, `vec_slice.sv`).

**Operand prepare.** The B operand is either the same vector for all
slices, or a permuted copy per slice. The permutation pattern is one VR
entry loaded by VPERM. It is read as 4 slices × 16 lanes × 4 bits, and the
4-bit field (s, l) names the source lane of output lane l in slice s. The
usual use is a *splat*: every lane of slice s gets weight w_s. With the
input row in A, four filters are then computed at once on the same pixels.

**Precision gating.** With a gating width n of 1 to 15, both operands have
their low 16 − n bits forced to zero before the multiplier. Widths 0 and 16
mean full precision. This models the energy-saving mode in which narrower
words are computed on the same datapath.

**Accumulate and narrow.** Products are 32 bits and accumulate modulo 2³².
OUT narrows the accumulator in four steps:
1. If rounding is on and frac > 0, add 2^(frac−1).
2. Shift arithmetically right by frac.
3. If saturation is on, clip to [−32768, 32767].
4. Keep the low 16 bits.

OUT leaves the accumulator unchanged, so a row can be read out while it is
still being summed.

## Register files

`vec_rf.sv` is one multi-ported array with a parameterised number of write
ports. The highest-numbered port wins a clash. The core uses it twice:
- VR has 17 write ports: four for slot 0, one for Maxp/Act and one for
  each of the 12 slices. Slot 0 needs two ports for VLD2 and four for a
  broadcast VLD or LBRD.
- VRl has 13 write ports: one for slot 0 and one per slice.

All entries are read combinationally. The sub-region structure comes from
the fixed addressing described above, not from physically separate arrays.
`scalar_rf.sv` has two write ports, the second for the high half of a
32-bit result.

## Data memory and memory controller

DM is split into 16 banks of 4096 words. Banks are **word interleaved**:
word address *a* lives in bank *a* mod 16, row *a*/16. Any 16 consecutive
words therefore touch each bank once, so a vector access at any alignment
takes one cycle per port.

The memory controller (`mem_ctrl.sv`) turns a request into one access per
bank:
- A request is a start address, a 16-bit lane mask and data.
- Lane *i* goes to bank (a+i) mod 16, at row (a+i)/16.
- A register holds the start address. One cycle later it rotates the bank
  outputs back into lane order.

Each bank has two ports, and so does the controller:

| Port | Users, in priority order |
|---|---|
| A | slot-0 load/store, DMA |
| B | slot-0 second access (VLD2, upper half of VLDL/VSTL), line-buffer fill, DMA |

Slot 0 is never refused, so its loads have a fixed latency. The line
buffer and the DMA see a grant signal and simply retry. In the end-to-end
test they do lose cycles to slot 0, and the testbench counts those cycles.

## Line buffer

The line buffer (`line_buffer.sv`) holds IFMap rows close to the vector
ALUs. It has a write side and a read side.

The write side is a fill engine. An LBFILL command gives a DM address, a
line-buffer position and a vector count. The engine then requests one
vector per cycle on DM port B and writes each returned vector into the
buffer. Slot 0 continues meanwhile, and WAIT with imm[1] blocks until the
fill is done.

The read side is LBRD. It returns 16 words starting at any position, with a
stride of 1 to 4. Strided convolutions (AlexNet's first layer uses stride 4)
therefore get their inputs without any reshuffling. Positions wrap modulo
512, so the buffer can be used as a circular row store.

## DMA and the external port

The DMA (`dma.sv`) moves 128-bit beats between external memory and DM. It
handles one beat at a time:
- **Inbound:** request, wait for read data, write 8 words to DM.
- **Outbound:** read 8 words from DM, then request an external write.

External addresses count 16-bit words and are kept beat-aligned. DMA
traffic has the lowest priority on both DM ports, so it fills the gaps that
computation leaves.

The external port protocol:
- `ext_req`/`ext_gnt` is a request/grant handshake. For a write, the data
  and address are taken on the grant.
- For a read, data comes back with `ext_rvalid` after any latency, in
  order.

`tb/ext_mem_model.sv` is a behavioural memory with a latency of 3 and
random grant gaps, used by the testbenches.

## Mapping a convolution layer

The intended data flow processes output feature maps row by row.
Filters are preloaded into DM. Input rows stream in by DMA while earlier
rows are being computed. Partial sums stay on chip as long as possible.
When a layer's filters or channels do not fit, the layer is sliced along
the depth dimension, and partial sums are spilled to external memory.

The end-to-end testbench runs a small layer this way:
- 2 input channels, 12 filters of 3×3, stride 2, two output rows of 16
  pixels.
- Each vALU slice computes one filter, so 12 filters run in parallel.
- The input row is read from the line buffer with stride 2 into A of every
  slice.
- The weights are splatted per slice by the permutation unit.
- Slot 1's partial sums are spilled with VSTL and reloaded with VLDL
  between the two channels.
- Each row is then narrowed with rounding, a shift of 2 and saturation.
  ReLU is applied, filter 0 is max-pooled 2:1, and the row is DMA'd out
  while the next row is computed.

The testbench's program is written for coverage rather than speed.

`tb_conv_workload` runs two real layer shapes, cut down to 12 filters and
two output rows of 16 pixels:

| Layer shape | Cycles | MAC bundles | MAC issue, whole run | MAC issue, first to last MAC |
|---|---|---|---|---|
| AlexNet conv1: 3 channels, 11×11 filters, stride 4 | 8,896 | 726 | 8% | 23% |
| VGG-16: 4 channels, 3×3 filters, stride 1 | 1,487 | 72 | 4% | 12% |

Both use a loop-based program that double-buffers input rows in the line
buffer. All 768 output words match the reference convolution, and the MAC
bundle counts are exact.

For each filter tap, the program issues two bundles:
1. a VPERM that selects the weight tap;
2. a broadcast LBRD that writes the input row into all four sub-regions,
   together with the three MACs. The MACs see the row in the same bundle.

At most half the cycles can therefore carry MACs. Weight loads and loop
control per filter row take more, and more so for 3×3 filters than for
11×11 ones.

Whole-run rates are lower still. The initial DMA of inputs and weights is
not overlapped with computation in these short runs.

Reaching the utilization reported for the original chip (69% on AlexNet,
76% on VGG-16) needs one of two things:
- a better schedule, for example reusing operand A across taps through the
  `ia` field and preloading weights for several taps;
- instruction-set features that the description does not specify, such as
  a pattern chosen inside the vector instruction.

The original chip relied on its C compiler for this. This RTL does not
reproduce those figures.

Whether the full networks fit at the default sizes:
- **AlexNet conv1:** 96 × 11 × 11 × 3 filter words, 11 input rows and one
  output row make about 47.6 K words, within the 64 K-word DM. A 227-word
  row fits the line buffer, and stride 4 is supported.
- **Larger layers** (AlexNet conv2–5, all of VGG-16) need depth slicing.
  For example, VGG-16 conv1_2 with 32 input channels and 64 filters needs
  about 54.5 K words.

The rows of both networks (at most 226 words with padding) fit the line
buffer.

At 192 MACs per cycle and 400 MHz, AlexNet's 666 M convolution MACs take
8.67 ms at full use, and VGG-16's 15.35 G take 200 ms. Those are 69% and 76%
of the processing times reported for the original chip. Neither the clock
rate nor a full-network schedule is checked by this RTL.

## Where this design departs from the original

- **Instruction set, encoding and stage assignment.** All are this design's
  own. The original is programmed in C through a retargeted compiler, and
  its ISA is not public.
- **Capacities and modes.** The line-buffer size (512 words), its stride
  range (1–4), the pattern format, the rounding modes (truncate or
  round-half-up), and the gating semantics (zeroing low bits) are assumed.
- **Pooling and activation.** Maxp/Act offers ReLU, element-wise max and
  pairwise max only. The original says only "activation functions and
  max-pooling".
- **DMA.** The DMA is deliberately simple: one beat in flight, contiguous
  transfers, no 2-D strides.
- **Memories.** They are plain arrays, not foundry SRAM macros. There is no
  clock gating, no DVFS and no memory compression.
- **Slot 1.** Slot 1 issues either a vALU op or a Maxp/Act op in a bundle,
  never both.
- **Scalar registers.** The original gives every slot access to the scalar
  register file. Here only slot 0 reads R, and the vector slots take all
  their operands from VR and VRl.
- **Hazards.** There are no interlocks for data hazards (see the timing
  table).

## Files, simulation and changing the design

`rtl/convaix_pkg.sv` holds the sizes, types and instruction encoding. The
top is `rtl/convaix_top.sv`, and each unit is one file in `rtl/`. Each
testbench `tb/tb_<unit>.sv` checks its unit against a reference model
written in the testbench. Each ends by printing
`TB_RESULT checks=<n> failures=<m>` and has a watchdog.

Run one testbench with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb rtl/convaix_pkg.sv \
        tb/tb_convaix_top.sv --top-module tb_convaix_top -Mdir obj_top
    ./obj_top/Vtb_convaix_top

The end-to-end run uses every default size and takes about 1,200 cycles.
It prints how often each mechanism occurred:
- stalls and branches;
- accumulator bypasses;
- line-buffer and DMA port waits;
- VLD2, VSTL/VLDL, stride-2 and broadcast line-buffer reads;
- permuted MACs, saturation, ReLU and pooling;
- the 32-bit address carry.

A mechanism that never occurred counts as a failure.

`tb_conv_workload` is built and run the same way. It runs the AlexNet conv1
and VGG-16 layer slices described above, and prints cycle counts and MAC
issue rates.

Useful points to change:
- the constants in `convaix_pkg.sv` (for example `LB_WORDS`, or
  `NVALU`/`NSLICE` for a narrower core, which the top follows);
- the opcode enums (new slot-0 ops are added in `lsu.sv`/`convaix_top.sv`);
- `narrow()` in `vec_slice.sv` for other rounding schemes.

If you change pipeline timing, re-check the distances in the table above
against `tb_convaix_top`'s program.

The testbenches use `$urandom` and no constraint solver. Every state that
is read is reset, so the two-state simulator's random start values do not
matter. The asynchronous reset is asserted after time 0 so that it sees an
edge.
