# An ISA-programmed RNS accelerator for DNN layers

This is RTL for a DNN accelerator that has no fixed dataflow. Nine small
programmable control cores (*mCores*) each run their own short program. Together
they steer four kinds of hardware:

- the memories that feed operands;
- a row of 16 SIMD tensor processing arrays (TPAs), each with 32 processing elements;
- the post-processing units (PPUs) behind them;
- a write-back unit that packs results into memory.

A matrix product, a 3x3 convolution or an attention block is therefore a set of
cooperating programs, not a hard-wired schedule.

The arithmetic is the second idea. Operands are stored as ordinary 8-bit
integers but multiplied and accumulated in a residue number system (RNS) with
the base {5, 7, 9, 31, 32}. Every modulus is a narrow, independent MAC channel.
A layer that needs less dynamic range (for example, 4-bit weights) can switch
off whole channels by selecting a base subset, and the precision-dependent
weight memory then reads fewer bit planes. Both knobs are set at run time by
writing one control register.

The RTL is written in SystemVerilog-2017. It is synthesizable and has
parameters, with defaults at the full size of the reference configuration:
16 TPAs x 32 PEs, a 128 KB feature memory, a 192 KB weight memory, an 8 KB
border cache and 128-word instruction memories.

## Block map

```
             prog / host ports
                    |
  mCore-0 (type I, master) --PC, hit, hold, flush--> mCore-1..3 (type II)
      |  mac / pproc                                  mCore-4..7 (type III, one cycle later)
      v                                                     |
  +---------+  M1  +--------+ X regs (one per 4 TPAs)       |
  | OP1MEM  |----->| mCore  |-------------+                 |
  | 4 banks |      | 4..7   |             v                 |
  +---------+      +--------+      +-------------+   +------------+
  | OP2MEM  | M2 -> packer ------> | FXP -> RNS  |-->| 16 x TPA   |  Z -> Y on pproc
  | 8 planes|                      | (1 cycle)   |   | 32 RNS PEs |
  +---------+                      +-------------+   +------------+
  | OP1CACHE| M3                                           | Y
  +---------+                                              v
       ^  port B   <-- write-back unit <-- O --------  16 x PPU  <-- mCore-8 (type I)
       +------------- (pack, hp, transpose, pool)            ^        ^ interrupt from pproc
                                                             +--------+
```

| File | Contents |
|---|---|
| `rtl/accel_pkg.sv` | opcodes, SIMD sub-ops, request structs, RNS constants, shared functions |
| `rtl/mcore.sv`, `rtl/mcore_ifetch.sv` | control core, I-MEM with I-cache |
| `rtl/ctrl_rf.sv` | CTRL register file (precision, base subset, TPA enables) |
| `rtl/op1mem.sv`, `rtl/op2mem.sv`, `rtl/op1cache.sv` | the three operand memories and their memory registers |
| `rtl/fxp_to_rns.sv`, `rtl/rns_pe.sv`, `rtl/tpa.sv` | forward conversion, RNS PE, tensor array |
| `rtl/rns_to_bin.sv`, `rtl/ppu.sv` | CRT reverse conversion, post-processing unit |
| `rtl/wb_unit.sv` | write-back packing, pooling and routing |
| `rtl/accel_top.sv` | the whole accelerator |

## The mCores and lockstep execution

Every mCore has the same four-stage pipeline:

- **IF**: fetches from a private 128-word I-MEM through a 16-line direct-mapped
  I-cache. A hit delivers the instruction in the same cycle. A miss costs one
  cycle, because the I-MEM read is registered.
- **DEC**: decodes and reads up to three registers.
- **EX**: runs the ALU, resolves branches and issues memory, SIMD and st_simd
  requests.
- **WB**: writes the result.

A WB result is forwarded to EX and written through to DEC, so dependent ALU
instructions issue back to back.

The three core types differ in what they may do:

* **Type I** (mCore-0 and mCore-8) owns a PC, branches (with a one-entry branch
  target buffer; a mispredict flushes IF and DEC), interrupts and SIMD issue.
* **Type II** (mCore-1, -2, -3) has no PC. It follows the fetch PC, cache hit,
  hold and flush that mCore-0 broadcasts (`lockstep_t`). It issues loads and
  stores to its memory.
* **Type III** (mCore-4..7) also follows mCore-0, but one cycle later, and runs
  only arithmetic. The one-cycle delay means a type-III instruction at program
  address *a* sees memory registers that a type-II load at *a-2* filled.

The lockstep scheme is the most important thing to understand when writing
programs. mCore-0..7 all execute "the instruction at address *a*" together.
Each core reads that address from its own I-MEM, so the nine programs are
really one program in columns. A slave's word at an address where the master
branches should be a no-op for that slave. mCore-8 runs independently and
synchronises through interrupts.

Operands are read in DEC. A load issued in EX at cycle *t* writes the memory
register at the end of *t+1*. There is no interlock: a type-II or type-I
instruction may use the register three slots after the load, and a type-III
instruction two slots after it.

### Interrupts and blocking SIMD instructions

- `intr_en` sets a three-bit mask and `intra` sets the vector of one line.
- Requests are latched as pending. `wait` holds EX until an enabled request is
  pending, then jumps to that line's vector, clears the pending bit and pulses
  `intr_ack`.
- There is no return instruction; an interrupt routine ends with a branch,
  typically back to its `wait`.
- In the top level, mCore-0's `pproc` raises line 0 of mCore-8.
- A SIMD instruction with the *blocking* bit makes the next instruction wait
  in EX while the PPUs are busy.

### Instruction encoding

All words are 32 bits with the opcode in [31:27].

| Format | Fields |
|---|---|
| R (`add sub and or xor add_hpl add_hph`) | rd[26:22] rs1[21:17] rs2[16:12] s1[11:10] m1[9:6] s2[5:4] m2[3:0]; operand = (r >> 8*s) & bytemask(m) |
| I (`addi subi addic ldi ldid`) | rd[26:22] rs1[21:17] imm[15:0] (`ldid` puts imm in both halves) |
| branch (`b bne bnzd`) | ra[26:22] rb[21:17] target[15:0], absolute; `bnzd` decrements ra |
| `ld` / `ld_add` | addr reg[26:22] rd[21:17] rb[16:12] rc[11:7] ben[6:3] cp[2] add[1]; with add, rd = rb + rc |
| `st` / `st_add` | addr reg[26:22] data reg[21:17] rb[16:12] ben[11:8] inc[7]; with inc, addr reg += rb |
| `st_simd` | addr reg[26:22] rb[21:17] tpa[16:13] pe[12:8] tr[7] hp[6] pool[5:4]; addr reg += rb |
| SIMD | fn[26:22] blocking[21] a[20:16] sf[15:11] (signed) F[10:8] d[7:6] s[5:4] t[3:2] |
| `intr_en` / `intra` / `wait` | mask in [2:0] / line in [23:22], vector in [15:0] / none |

`tb/asm_pkg.sv` has one function per format and is the easiest way to write
programs.

### Register address maps

Each core sees a 32-entry register space. Addresses below `NLOCAL` are its own
local registers. Higher addresses are shared registers that live outside the
core:

| Core | Registers |
|---|---|
| mCore-0 | local 0-7, CTRL0-3 at 8-11 |
| mCore-1 (OP1MEM port A) | local 0-7, M1[0..7] at 8-15, S1[0..3] at 16-19 |
| mCore-2 (OP2MEM) | local 0-7, M2[0..7] at 8-15 |
| mCore-3 (OP1CACHE) | local 0-3, M3[0..3] at 4-7, M1 at 8-15 |
| mCore-4..7 | M1 at 0-7, S1 at 8-11, M3 at 12-15, own X register at 16 |
| mCore-8 | local 0-7, port-B memory registers MB[0..3] at 8-11 |

TPA *t* takes byte *t mod 4* of X register *t/4* as its broadcast scalar, so
each type-III core prepares the scalars of four TPAs.

CTRL register fields:

- CTRL0: [3:0] weight precision (clamped to 3..8), [4] 4-bit activations,
  [7:5] base subset B0..B4, [8] 4-bit outputs.
- CTRL1: padding flags.
- CTRL2: TPA enables.
- CTRL3[0]: border-cache enable.

## Memories and data streams

**OP1MEM** (4 banks x 8192 words) holds feature maps. Each bank is split
into two single-port halves by the address MSB, which makes a pseudo dual-port
memory:

- **Port A** is mCore-1's read stream towards the TPAs.
  - Bank 0 takes its address from bits [15:0] of the address register, banks
    1-3 from bits [31:16]. One register therefore carries the two row
    addresses a 3x3 convolution needs.
  - The `cp` flag copies M1[0..3] into M1[4..7] before the new words land.
- **Port B** carries mCore-8's reads and the write-back unit's writes. If it
  touches the half port A is reading, port A wins and mCore-8 stalls for a
  cycle.

**OP2MEM** (8 banks x 6144 words) holds weights bit-interleaved: bank *b*
holds bit *b* of 32 weights. At precision *k* only banks 0..*k*-1 are read.
A packer turns the M2 words into 32 sign-extended *k*-bit weights, one per
PE. Write-back words can also be stored here (bank group chosen by address
bit 14); they are written as raw words.

**OP1CACHE** (4 banks x 512 words) is the border cache of the convolution
routine. mCore-3 stores pixels it will need again and reads them back into M3
instead of re-reading OP1MEM.

All memories read in the cycle a request leaves EX. The words are in the
memory registers one cycle later. A host port on OP1MEM and OP2MEM loads and
inspects data from outside.

## RNS datapath

`fxp_to_rns` converts the 32 weights and 16 scalars to residues in one
registered stage. Each value is packed into 20 bits: 3+3+4+5+5 bits for the
moduli 5, 7, 9, 31 and 32. To keep data and command aligned, the top level
delays the `mac`/`pproc` command of mCore-0 by the same cycle.

Each PE (`rns_pe`) multiplies and accumulates channel by channel. Disabled
channels hold their value. The base subsets and their uses are:

| Subset | Moduli | Dynamic range | Typical use |
|---|---|---|---|
| B0 | 5 7 9 31 32 | 312480 | W8A8, W7A8 |
| B1 | 7 9 31 32 | 62496 | W6A8 |
| B2 | 5 7 31 32 | 34720 | W5A8, W4A8 |
| B3 | 5 7 9 32 | 10080 | W3A8, W4A7 |
| B4 | 5 7 32 | 1120 | W4A4, W3A4 |

A result is correct as long as the signed dot product stays within half the
dynamic range of the active subset; the software has to guarantee this.
`pproc` moves Z to Y and clears Z. An accumulation that starts with a `mac`
issued in the same cycle as the clear keeps that first product.

## Post-processing units

Each of the 16 PPUs owns the 32 output bytes O of its TPA and four 20-bit
post-processing registers (PPR). mCore-8 broadcasts their instructions to all
16 PPUs.

Stage 1 of the PPU pipeline converts Y[a] back to a signed integer. It uses a
Chinese-remainder converter (`rns_to_bin`) restricted to the active base
subset. Stage 2 then computes one of:

- quantization with a signed power-of-two scale, rounding half up and
  saturating to int8 (`qnt`);
- a fused activation plus quantization (`qfunc`);
- an activation on O (`afunc`);
- a multiply by a PPR value (`mul`);
- PPR arithmetic (`add`, `sub`, quantize);
- loads from the OP1MEM stream (`ldppr`);
- a PWL function applied to a memory operand (`pwlmem`);
- a running max or sum reduction (`redmax`, `redsum`, `reddis`) that
  follows every O write until it is disabled.

ReLU has its own logic. The other activations use a PWL unit:

- 16 intervals chosen by the top four bits of the 8-bit input;
- f(x) = a·x + b·2^7 with 12-bit signed coefficients from a shared table, one
  set per function code;
- a 20-bit result, scaled back to 8 bits by the shift in the control register
  R (`setr`).

The PPU accepts one instruction per cycle. Results are written two cycles
after issue, and `busy` is what blocking instructions wait on.

## Write-back unit

`st_simd` selects a PE index *j* and a layout:

- **Default:** bank *i* receives byte *k* = O_j of TPA 4*i*+*k*. All 16 TPAs'
  results for one PE land in one 4-bank row.
- **Half precision:** bank *i* gets the upper nibbles of O_j of its four TPAs
  in its low half-word and those of O_j+1 in its high half-word.
- **Transpose:** four consecutive PEs of one TPA go to one bank, so a stored
  matrix comes out transposed.
- **Pooling:** 2x2 max or average over the 4x4 arrangement of TPAs (that is,
  over a 4x4 output tile), giving four bytes in bank 0.

Address bit 15 routes the write to OP2MEM instead of OP1MEM.

## How far it can be trusted

Each block has a self-checking testbench in `tb/` with a watchdog. It compares
the block against models written independently in the testbench: integer dot
products for the RNS parts, a reference quantizer and PWL for the PPU, and
array models for the memories.

`tb_accel_top` runs the full-size design end to end:

- Nine programs compute an 8-deep matrix product for all 16 x 32 PEs twice:
  once at 8-bit weights with base B0, and once at 4-bit weights with base B4
  after a CTRL write.
- Every stored word and every reduction result is compared with a reference.
- The test counts and requires I-cache hits and misses, branch flushes and
  predicted branches, forwarding, interrupts, blocking stalls, port-B
  conflict stalls, `ld` copies, border-cache traffic, and the precision and
  base-subset switches.

It runs in well under a minute of simulation.

Not built or simplified, compared with the architecture description:

* The PPU uses CRT reverse conversion to binary, not the RNS base-extension
  unit of the original design. The `bext_acc` extended accumulation is
  missing, and `pwlmem` does not post-increment an address register.
* RNS channels use generic modulo arithmetic, not end-around-carry or
  diminished-1 circuits. Channel and core "clock gating" is modelled as
  register enables.
* The layer-fusion variant (an extra depthwise output buffer stream with its
  own master core) is not built.
* There is no off-chip memory interface. The host ports are the only way data
  enters or leaves, so whole networks run only tile by tile under external
  control.
* The half-precision packing follows the layout drawing (low half-word from
  O_j, high from O_j+1). The written description can also be read as merging
  two nibbles into one byte.
* Port A of OP1MEM is given to mCore-1, the core that owns the input stream to
  the TPAs. One description assigns it to mCore-2.

The instruction encoding, the register maps beyond the local files, the CTRL
field layout, the branch predictor form, the interrupt entry through `wait`,
the pooling field and the host ports are this design's own choices.

## Simulating

With Verilator 5, put the package first, then the RTL, then the testbench
files:

```
verilator --binary --timing -Wno-fatal \
  rtl/accel_pkg.sv tb/asm_pkg.sv $(ls rtl/*.sv | grep -v accel_pkg) \
  tb/tb_accel_top.sv --top-module tb_accel_top -o sim && ./obj_dir/sim
```

Every testbench ends with a
`TB_RESULT checks=... failures=...` line.

To change the size, override `NTPA`, `NPE` or the memory depths on
`accel_top`. Per-block parameters carry the same defaults. The TPA count sets
the number of X bytes and PPUs. The write-back and pooling layouts assume 16
TPAs in a 4x4 arrangement.
