# XpulpNN: sub-byte SIMD and Mac&Load for a RISC-V compute cluster

Quantized neural networks run well with 8-bit, 4-bit and even 2-bit weights
and activations, but a plain 32-bit RISC-V core only has byte and halfword
SIMD. Sub-byte data then has to be unpacked, one element at a time, before it
can be multiplied, and the unpacking costs more than the arithmetic. XpulpNN
fixes this with two additions to a RI5CY-class core:

1. **Nibble (4-bit) and crumb (2-bit) SIMD instructions.** One 32-bit register
   holds 8 nibbles or 16 crumbs. Add, subtract, average, min/max, shifts, abs
   and dot products work directly on them. A single dot-product instruction
   therefore does 4, 8 or 16 multiply-accumulates (MACs), depending on the
   element width.
2. **Mac&Load (`nn_sdotp`).** A small register file next to the dot-product
   unit, the NN-RF, holds 4 weight words and 2 activation words. One
   instruction does two things at once:
   - it accumulates the dot product of an NN-RF weight and an NN-RF
     activation into a general-purpose register;
   - it loads the next word of a weight or activation stream into the NN-RF
     and post-increments the address register.

   In the inner loop of a matrix multiplication almost every explicit load
   disappears. The loop reaches nearly one SIMD dot product per cycle.

The cores sit in an 8-core cluster that shares a 128 kB, 16-bank L1 memory
(TCDM) through a single-cycle logarithmic interconnect. A DMA fills the
memory.

This repository gives synthesizable SystemVerilog for:
- the dot-product unit;
- the SIMD ALU;
- the NN-RF;
- the instruction decoder;
- the core's XpulpNN execution slice, including the pipeline, forwarding and
  Mac&Load control;
- the TCDM banks and the interconnect;
- the cluster top that ties them together.

Each block has a self-checking testbench. A full-size cluster testbench runs
complete convolution layers at 8, 4 and 2 bits.

## Hierarchy

```
pulp_cluster_xpulpnn            cluster top: 8 cores, 16 banks, 1 DMA port
├── xpulpnn_core_ext  x8        XpulpNN slice of one core (ID/EX/WB)
│   ├── xpulpnn_decoder         instruction word -> ctrl_t
│   ├── xpulpnn_simd_alu        lane-parallel h/b/n/c ALU
│   ├── xpulpnn_dotp_unit       4-region SIMD dot product, 1-cycle latency
│   └── xpulpnn_nnrf            4 weight + 2 activation registers
├── log_interconnect            9 masters x 16 banks, round robin per bank
└── tcdm_bank         x16       2048 x 32 bit, byte enables, 1-cycle read
xpulpnn_pkg                     shared types: modes, opcodes, ctrl_t, TCDM structs
```

The core's baseline parts are not modelled: prefetch buffer, hardware loops,
CSRs, scalar ALU/multiplier, and loads/stores other than Mac&Load. The same
goes for the cluster's instruction cache, DMA engine, event/synchronisation
unit and AXI bridge. Their connections are brought out as ports:
- each core takes a valid/ready instruction stream;
- the DMA is a plain TCDM master port;
- each core has a debug port into its register file.

## Element widths and signedness

| mode | `DT` | element | lanes per word | `vec_mode_e` |
|------|------|---------|----------------|--------------|
| .h   | 0    | 16 bit  | 2              | `VEC_H` |
| .b   | 1    | 8 bit   | 4              | `VEC_B` |
| .n   | 2    | 4 bit   | 8              | `VEC_N` |
| .c   | 3    | 2 bit   | 16             | `VEC_C` |

Dot products come in three signedness flavours:
- `up`: both operands unsigned;
- `usp`: first operand unsigned, second signed;
- `sp`: both signed.

`sdot*` adds the result to the destination register. `dot*` overwrites it.

## Instruction encoding (this design's choice)

The published material gives the instruction set and the `nn_sdotp` field
layout. It gives no opcode values and no function codes, so this design uses
two free custom opcodes.

SIMD operations, opcode `0x57`:

```
 31   27 26 25 24  20 19  15  14  13 12 11   7 6      0
[ funct5 | 00 | rs2  | rs1  | sc | DT  |  rd  | 1010111 ]
```

`funct5` encodes the operation as follows:

| funct5 | operation |
|---|---|
| 0 | add |
| 1 | sub |
| 2 | avg |
| 3 | avgu |
| 4 | max |
| 5 | maxu |
| 6 | min |
| 7 | minu |
| 8 | srl |
| 9 | sra |
| 10 | sll |
| 11 | abs |
| 12 | dotup |
| 13 | dotusp |
| 14 | dotsp |
| 15 | sdotup |
| 16 | sdotusp |
| 17 | sdotsp |

`sc = 1` selects the `.sc` form: the lowest element of `rs2` is copied to all
lanes. There is no immediate (`.sci`) form for the sub-byte widths.
`abs.sc` and any `funct5` above 17 are illegal.

Mac&Load, opcode `0x5B`:

```
 31     25 24  20 19  15 14 13 12 11   7 6      0
[ sign   |  imm | rs1  | 0 |  DT  |  rd  | 1011011 ]
```

- `sign` is 0 for `up`, 1 for `usp` and 2 for `sp`.
- `imm` controls the NN-RF:

  | bit | meaning |
  |-----|---------|
  | 0 | activation register read (A0/A1) |
  | 2:1 | weight register read (W0..W3) |
  | 3 | refill the activation register named by bit 0 |
  | 4 | refill the weight register named by bits 2:1 |

  Setting bits 3 and 4 together is illegal.

Compute&Update (C&U), opcode `0x7B`, the paper's first Mac&Load form
(`pv.cusdot{up,usp,sp}.{h,b,n,c}.i rd, rs1, rs2`):

```
 31     27 26 25 24  20 19  15 14 13 12 11   7 6      0
[ sign   |   i   | rs2  | rs1  | 0 |  DT  |  rd  | 1111011 ]
```

It computes `rd += dotp(W[i], rs2)` and refills `W[i]` from `mem[rs1]`, then
adds 4 to `rs1`. Inside the core it is an `nn_sdotp` with bit 4 of the
immediate set whose second operand comes from `rs2` instead of an activation
register. Only the weights are reused from the NN-RF, which is why the paper
replaced it with `nn_sdotp`.

The decoder flags every other word as illegal. An illegal word is consumed
and counted, and it changes no state.

## The dot-product unit

`xpulpnn_dotp_unit` has one multiplier region per element width:

| region | multipliers | product width | products |
|--------|-------------|---------------|----------|
| h | 2 × 17×17 bit | 32 bit | 2 |
| b | 4 × 9×9 bit | 16 bit | 4 |
| n | 8 × 5×5 bit | 8 bit | 8 |
| c | 16 × 3×3 bit | 4 bit | 16 |

The extra multiplier bit is the sign extension chosen by the signedness mode.
The shortest products fit because a sub-byte product is narrow. A 2-bit ×
2-bit product lies between -6 and 9 in every signedness mode, so it fits in
4 bits once it is sign- or zero-extended as the mode asks.

Each region has an adder tree that sums its products, extended to 32 bits,
and the accumulator. A final multiplexer picks the region of the current
width.

Each region has its own pair of operand registers. The pair loads only when an
instruction of that width issues (`en_h`/`en_b`/`en_n`/`en_c`). Regions that
are not used see no switching activity; in silicon these enables drive
clock-gating cells. The registers also serve as the ID/EX pipeline registers
of the dot-product operands. An instruction issued in ID produces its result
in the next (EX) cycle, together with the accumulator read in ID, so
back-to-back dot products run at one per cycle.

## Mac&Load and the NN-RF

The heart of the design is `xpulpnn_core_ext`. For
`nn_sdotp rd, rs1, imm` it does the following:

| stage | what happens |
|-------|--------------|
| ID | Read `W[imm[2:1]]` and `A[imm[0]]` from the NN-RF as the dot-product operands. Read `rd` as the accumulator and `rs1` as an address (GP-RF reads are forwarded from EX). |
| EX | `rd` gets `rd + dotp(W, A)`, written through GP-RF write port A. If `imm[4]` or `imm[3]` is set, a load request for address `rs1` goes to the TCDM and `rs1 + 4` is written through write port B. EX holds until the request is granted. |
| response | The loaded word is written into the NN-RF register chosen by the immediate. |

The product uses the register value from **before** the refill. One
instruction therefore consumes a weight and fetches its replacement.

Two kinds of stall exist:

- **TCDM contention.** While a Mac&Load request waits for its grant, EX holds
  and nothing new issues. This is counted in `cnt_stall_gnt_o`.
- **NN-RF hazard.** An `nn_sdotp` in ID that reads an NN-RF register whose
  refill has not returned waits. This is counted in `cnt_stall_nnrf_o`.
  - If the response arrives in that very cycle, the NN-RF forwards it and
    there is no stall.
  - The loops below are ordered so that this never happens when the memory
    answers in one cycle.

One load may be outstanding. When `rd` and `rs1` name the same register,
write port A (the dot product) wins.

### The 4x2 matrix-multiplication loop

A convolution is computed as a matrix product. Two "im2col" buffers hold the
input patches of two adjacent output pixels. Four filter rows hold four
output channels. The 8 accumulators hold 2 pixels × 4 channels. With
`aw1..aw4` pointing at the filter rows and `ax1`/`ax2` at the buffers, the
kernel is as follows.

Initialisation loads W0..W3 and A0:

```
nn_sdotusp.h x0, aw1, 16   # W0 <- [aw1]
nn_sdotusp.h x0, aw2, 18   # W1 <- [aw2]
nn_sdotusp.h x0, aw3, 20   # W2 <- [aw3]
nn_sdotusp.h x0, aw4, 22   # W3 <- [aw4]
nn_sdotusp.h x0, ax1, 8    # A0 <- [ax1]
```

The loop runs once per packed word:

```
nn_sdotup.h  x0, ax2, 9    # A1 <- [ax2]   (only explicit load)
nn_sdotusp.b s1, -,   0    # s1 += W0.A0
nn_sdotusp.b s2, -,   2    # s2 += W1.A0
nn_sdotusp.b s3, -,   4    # s3 += W2.A0
nn_sdotusp.b s4, ax1, 14   # s4 += W3.A0,  A0 <- [ax1]
nn_sdotusp.b s5, aw1, 17   # s5 += W0.A1,  W0 <- [aw1]
nn_sdotusp.b s6, aw2, 19   # s6 += W1.A1,  W1 <- [aw2]
nn_sdotusp.b s7, aw3, 21   # s7 += W2.A1,  W2 <- [aw3]
nn_sdotusp.b s8, aw4, 23   # s8 += W3.A1,  W3 <- [aw4]
```

Nine instructions give 8 SIMD dot products, which is 32 MACs at 8 bits, 64
at 4 bits and 128 at 2 bits. Every refilled register is next read at least
four instructions later.

The 4x4 variant keeps four im2col buffers:
- the two activation registers are refilled alternately from `ax1..ax4`
  (immediates 14 and 15);
- 16 accumulators are used;
- 17 instructions give 16 dot products.

Both loops run stall-free in the core testbench: 144 instructions in 144
cycles, and 272 in 272.

## Cluster memory

- **TCDM.** 16 banks of 2048 × 32 bit, 128 kB in all. Banks are
  word-interleaved (bank = address bits 5:2), so consecutive words fall in
  consecutive banks.
- **Interconnect.** `log_interconnect` grants each bank to one of its
  requesters in the request cycle, round-robin per bank. The read data
  follows one cycle later. Masters 0..7 are the cores and master 8 is the DMA
  port.
- **Request stability.** A request must be held until it is granted. The
  interconnect asserts that a grant only goes to a requesting master.

A layout note that matters for throughput: a 3×3×32 filter row at 8 bits is
72 words long. If rows sit back to back, every row starts in bank 0 or bank 8,
so cores running the same loop collide on every access. Padding each row by
one word spreads the rows over all 16 banks. The cluster testbench does this,
and it cut contention stalls by a factor of 20.

## Verification

Each block's testbench uses only `$urandom` stimulus and reference models
written in the testbench. Each prints `TB_RESULT checks=N failures=M`.

| testbench | block | what it checks |
|-----------|-------|----------------|
| `tb_dotp_unit` | dot-product unit | random back-to-back operations in all widths and signedness modes against a full-precision model; isolation of the regions |
| `tb_simd_alu` | SIMD ALU | every operation and width, random and corner operands, against a per-lane model |
| `tb_nnrf` | NN-RF | random writes and reads, reset values, write-through |
| `tb_decoder` | decoder | all legal encodings field by field; illegal words |
| `tb_tcdm_bank` | TCDM bank | full-size bank, byte-masked writes, read latency and hold |
| `tb_log_interconnect` | interconnect | 9 masters on 16 real banks: one grant per bank, response timing, data against a reference memory, round-robin bound (no master waits more than 8 cycles), conflicts must occur |
| `tb_core_ext` | core slice | 4x2 and 4x4 Mac&Load loops (results and exact cycle counts), then random programs (including C&U words) under random memory grant delays against an instruction-level model; both stall kinds and a C&U must occur |
| `tb_cluster` | cluster top | end-to-end run at full size (see below) |

`tb_cluster` uses the top at its default parameters. It computes one
convolution layer (16×16×32 input, 64 filters of 3×3×32, padding 1) three
times, at 8, 4 and 2 bits:
- the DMA port writes the filters and, double-buffered, the im2col buffers;
- every core walks over all 16 groups of four filters for its pixel pair;
- the debug port sets the address registers and reads the 8 accumulators;
- the accumulators are compared with a reference convolution.

It fails unless all of the following happen at least once:
- TCDM contention stalls;
- DMA grant waits;
- NN-RF hazard stalls (odd filter groups use a reversed initialisation to
  provoke them);
- DMA writes and read-back;
- illegal instructions;
- dot products in all three widths.

It also checks, for each loop, that the cycles spent equal instructions plus
counted stalls plus a fixed 3-cycle drain. Typical figures per core, with all
8 cores running and the DMA streaming:

| precision | MAC/cycle/core | ideal for the 4x2 loop |
|-----------|----------------|------------------------|
| 8 bit | 3.25 | 3.56 |
| 4 bit | 6.3 | 7.1 |
| 2 bit | 11.8 | 14.2 |

These figures include the per-group setup. The run takes about 15 seconds.

Every testbench was also run against a deliberately broken copy of its block
(for example, `sra` shifting in zeros, or the post-increment set to 8), and
each one failed.

### Running a testbench

With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl \
    rtl/xpulpnn_pkg.sv rtl/xpulpnn_core_ext.sv rtl/xpulpnn_decoder.sv \
    rtl/xpulpnn_simd_alu.sv rtl/xpulpnn_dotp_unit.sv rtl/xpulpnn_nnrf.sv \
    rtl/log_interconnect.sv rtl/tcdm_bank.sv rtl/pulp_cluster_xpulpnn.sv \
    tb/tb_cluster.sv --top-module tb_cluster -o sim
./obj_dir/sim
```

The block testbenches build the same way, with the package, the block and
whatever it instantiates. The testbenches assume a two-state simulator and
initialise everything they read.

## Where this design departs from or goes beyond the paper

- **Encodings.** The opcode and function codes above are this design's own
  choice.
- **`usp` order.** `usp` treats the first operand (the NN-RF weight in
  `nn_sdotp`) as unsigned and the second as signed, following the mnemonic.
  The prose of the original description reads the other way round. Swapping
  them is a change to `a_signed`/`b_signed` in the dot-product unit.
- **Fig. 9 operands.** In the published 4x2 loop the refills of W0..W3 name
  the address registers in a permuted order (aw2, aw4, aw3, aw1), which does
  not match the initialisation. The cluster testbench uses the consistent
  order shown above, which the published 4x4 loop also uses. The core
  testbench runs the loop exactly as published against its instruction-level
  model.
- **No refill, no pointer update.** `nn_sdotp` with neither update bit set
  makes no memory access and leaves `rs1` unchanged.
- **Pipeline details.** These are design choices rather than published
  details:
  - forwarding from both GP-RF write ports;
  - one outstanding Mac&Load load;
  - forwarding of a returning load into the NN-RF read;
  - reset values;
  - priority of write port A.
- **Latency.** The dot-product operand registers double as ID/EX pipeline
  registers, giving a one-cycle dot product.
- **Interconnect.** It is a full crossbar with round-robin arbiters. The
  logarithmic tree that gives it its name, and its priority scheme, are not
  described. The word-interleaved bank map is likewise an assumption.
- **Debug write port.** The debug port can write registers. It stands in for
  the address set-up code that the unbuilt baseline instructions would run.
- **Not built:**
  - the baseline core and its other instructions;
  - the instruction cache, DMA engine, synchronisation unit, AXI bridge and
    host system;
  - quantization and activation functions (baseline code in the original
    work);
  - clock-gating cells, which are modelled as register enables.
- **C&U.** The C&U instruction is built and checked, but its encoding is
  assumed, and the Fig. 7 kernel that uses it was not run: that kernel also
  needs the baseline post-increment load `p.lw`, which is not built.
- **Not simulated.** The 32×32×32 convolution layer is not simulated. It uses
  the same loop over four times as many pixels, and fits the 128 kB TCDM
  (about 119 kB at 8 bits with all tensors resident).
