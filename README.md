# Ternary LUT instructions on a 256-bit SIMD slice (T-SAR)

Ternary LLMs (BitNet-b1.58 and similar) restrict every weight to {-1, 0, +1}. The fast
CPU kernels for these models replace multiplications by table lookups: for each small
block of `c` activations they precompute all 3^c possible dot products and index that
table with the packed weights. The tables live in memory, and fetching them dominates
the kernel's memory traffic.

The T-SAR scheme moves table generation into the SIMD register file. Two observations
make this possible:

1. A ternary weight vector `w` splits into a **dense** part `wD` in {-1, +1} (zero
   replaced by +1) and a **sparse** part `wS` in {0, 1} (1 exactly where `w` was 0).
   Then `w·a = wD·a - wS·a`.
2. Each part needs only a 2^c-entry table, so one block needs 2^(c+1) entries. That is
   a power of two and packs exactly into SIMD registers.

This repository contains synthesizable SystemVerilog for a 256-bit SIMD unit (16 lanes
of 16 bits) with two added instructions. The configuration is c = 2, s = 4, k = c·s = 8,
m = 16:

| instruction | what it does |
|---|---|
| `TLUT_2x4  ymmD:D+1, xmmA` | builds four 8-entry int16 tables from eight int8 activations and writes them into a register pair (2 × 256 bits) |
| `TGEMV_8x16 ymmY, ymmL:L+1, ymmW` | computes a (1,8)×(8,16) ternary GEMV from the tables in `ymmL:L+1` and 256 bits of encoded weights in `ymmW`, and **adds** the 16 results to the int16 lanes of `ymmY` |

It reuses the existing datapath: the sixteen 16-bit ALUs and the four 4-to-1 adder trees
of the slice's dot-product path. The additions are an operand MUX in front of the ALUs, a
write-back MUX behind them, and a small sequencer/scoreboard.

## The arithmetic, for one block of two activations

Take activations `a1, a2` (int8, sign-extended to int16). The block's table has 8 entries:

| entry | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 |
|---|---|---|---|---|---|---|---|---|
| half | dense | dense | dense | dense | sparse | sparse | sparse | sparse |
| index | 00 | 01 | 10 | 11 | 00 | 01 | 10 | 11 |
| value | −a1−a2 | −a1+a2 | a1−a2 | a1+a2 | 0 | a2 | a1 | a1+a2 |

The higher index bit belongs to `a1`, the first activation of the block. For a dense
index, bit 1 means +1 and bit 0 means −1. For a sparse index, bit 1 means "this weight
was zero".

A ternary weight pair `(w1, w2)` selects dense entry `{w1≥0, w2≥0}` and sparse entry
`{w1==0, w2==0}`. The difference of the two entries is `w1·a1 + w2·a2`. Example: with
w = (+1, 0), the dense entry is `a1+a2` and the sparse entry is `a2`, so the result is `a1`.

A TGEMV output channel sums this difference over its s = 4 blocks (8 activations) and
adds the result to its accumulator lane.

## Register layouts

These layouts are this implementation's choice. The source paper gives only the sizes.
Software that packs weights or reads tables must follow them.

**Activations (TLUT source).** Byte `i` (bits `[8i+7:8i]`) of the low 64 bits of the
source register holds activation `i`, for i = 0..7. Block `b` covers activations 2b and 2b+1.

**Tables (TLUT destination, TGEMV source pair).** Read the register pair as one 512-bit
value `{YMM[n+1], YMM[n]}`:
- block `b`'s table is at bits `[128b +: 128]`, so YMM n holds blocks 0 and 1 and YMM n+1 holds blocks 2 and 3;
- entry `e` of a table is at `[16e +: 16]`, in the order of the table above.

**Weights (TGEMV source).** Output channel `j` (0..15) uses bits `[16j +: 16]`. Within
those 16 bits:
- `[2b+1:2b]` is the dense index of block b (bit 2b+1 for the block's first activation);
- `[8+2b+1 : 8+2b]` is the sparse index of block b.

That is 2 bits per weight, one dense and one sparse.

**Outputs (TGEMV destination).** Lane `j` (`[16j +: 16]`) is output channel j. It is
int16 and wraps on overflow.

## Instruction encoding

All instructions are 5 bytes in register form: `C4`, VEX byte 1, VEX byte 2, opcode, ModR/M.

| field | T-SAR instructions | base VPADDW / VPSUBW |
|---|---|---|
| VEX1 | `{~R, ~X, ~B, 5'h04}` | `{~R, ~X, ~B, 5'h01}` (0F map) |
| VEX2 | `{W=1, ~vvvv, L=0, pp=00}` | `{W, ~vvvv, L=1, pp=01}` |
| opcode | `00` TLUT_2x4, `10` TGEMV_8x16 (`01` TLUT_4x4 and `11` TGEMV_16x16 are reserved, see below) | `FD` VPADDW, `F9` VPSUBW |
| ModR/M | `{11, dst[2:0], src2[2:0]}` | same |

The register fields are:
- `dst = {R, reg}`;
- `src1 = vvvv`, the table pair for TGEMV;
- `src2 = {B, rm}`, the activations for TLUT and the weights for TGEMV.

As in standard VEX, R, B and vvvv are stored inverted. A register pair is named by its
even register: dst = 8 means YMM8:9.

The decoder rejects these instructions with a one-cycle `illegal` pulse, and they do not
change any state:
- an odd pair register;
- a TGEMV whose destination lies inside its own table pair;
- the c = 4 opcodes;
- any other encoding.

## How a micro-op uses the slice

The 16 ALUs form four groups of four lanes, one group per adder tree.

**TLUT_2x4** runs as 2 micro-ops. Micro-op `u` builds the tables of blocks 2u and 2u+1
and writes one 256-bit register. In each of the two busy groups:
- lane 0 computes a1−a2 and lane 1 computes a1+a2;
- lanes 2 and 3 compute 0−(a1+a2) and 0−(a1−a2), chained in the same cycle on lanes 0 and 1.

The sparse entries 0, a2 and a1 need no ALU; they go directly to the write-back MUX.
Groups 2 and 3 are idle.

**TGEMV_8x16** runs as 4 micro-ops. Micro-op `u` handles output channels 4u..4u+3:
- group g works on channel 4u+g;
- lane b of the group subtracts the selected sparse entry from the selected dense entry of block b;
- the group's adder tree sums the four lanes;
- an accumulate adder adds the old value of lane 4u+g of the destination.

Only those four lanes are written: the register-file write port has a per-lane enable.
This uses all 16 ALUs in every micro-op, so 64 subtractions and 16 tree sums take 4 cycles.

**VPADDW / VPSUBW** take one micro-op and run lane by lane on all 16 ALUs.

## Pipeline, timing and the scoreboard

```
 instr ─► decoder ─► sequencer ──uop──► register-file reads ─► SIMD slice ─► WB register ─► register-file write
                        ▲  (micro-op counter)                                      │
                        └──────────── scoreboard: WB destination and tag ──────────┘
```

- The sequencer accepts a new instruction in the cycle that the current instruction's
  last micro-op issues. Independent instructions therefore run without bubbles:
  - TLUT_2x4 takes 2 issue cycles;
  - TGEMV_8x16 takes 4;
  - a base op takes 1.
- Micro-ops read the register file, compute and are latched into the write-back
  register in one cycle. The write reaches the register file one cycle later.
- **Scoreboard.** A micro-op stalls for one cycle if the write-back stage holds a write
  from an *earlier* instruction to a register the micro-op reads. There is no bypass.
  The usual `TLUT` followed directly by a `TGEMV` that uses its tables costs exactly one
  stall cycle.
- Micro-ops of the same instruction never stall each other. TGEMV's per-lane writes do
  not overlap the lanes later micro-ops read, which is why the decoder forbids a
  destination inside the table pair.
- A reset (`rst_n` low, asynchronous) clears the register file and all control state.

The `host_*` port stands in for the core's load/store path. It writes and reads whole
registers, and it may write only while `busy` is low (an assertion checks this).

## Running a BitLinear layer

The unit only executes instructions. Loops and data movement belong to software. The
activation-persistent order builds each k-block's tables once and reuses them across all
output tiles:

```
for k in 0..K step 8:
  for n in 0..N:
    load x[n, k:k+8] into YMM0
    TLUT_2x4   YMM8:9, XMM0
    for m in 0..M step 16:
      load packed weights W[k:k+8, m:m+16] into YMM2
      TGEMV_8x16 YMM(out[n, m]), YMM8:9, YMM2
```

The output-persistent order instead keeps the accumulator register of one output tile
and walks k in the inner loop. Both orders are exercised in `tb_tsar_unit`.

A layer needs N·K/8 TLUTs and N·(K/8)·(M/16) TGEMVs. That is 2·N·K/8 + 4·N·(K/8)·(M/16)
issue cycles; K must be a multiple of 8 and M of 16. For example, a 1×2560×6912 decode
layer is 320 TLUT + 138 240 TGEMV, or about 553 600 cycles if the tables are kept for all M.

**Accumulator range.** Accumulation is int16. With int8 activations the worst-case
magnitude of a K-deep sum is 128·K, which exceeds 32767 once K > 255. Real BitNet layers
are deeper than that. Sums wrap modulo 2^16, and software that needs exact wide results
must split K and widen partial sums itself. The source does not describe such a step.

## Source files

| file | role |
|---|---|
| `rtl/tsar_pkg.sv` | sizes (c, s, k, m, lanes), opcodes, types, weight-encoding functions |
| `rtl/tsar_decoder.sv` | VEX3 decoder |
| `rtl/tsar_uop_sequencer.sv` | micro-op counter, handshake, scoreboard stall |
| `rtl/tsar_vrf.sv` | 16 × 256-bit register file: pair read, lane-masked write, host port |
| `rtl/tsar_simd_slice.sv` | datapath of one micro-op |
| `rtl/tsar_operand_mux.sv` | operand routing to the ALUs, table-entry selection by weight bits |
| `rtl/tsar_simd_alu.sv` | 16-bit add/sub lane |
| `rtl/tsar_adder_tree.sv` | N-to-1 adder tree (4-to-1 here) |
| `rtl/tsar_writeback_mux.sv` | table-word packing, TGEMV lane placement, lane enables |
| `rtl/tsar_unit.sv` | top level |

The sizes are fixed by the package for c = 2, s = 4, m = 16. The operand routing and the
table packing are written for that configuration and check it with an elaboration-time
assertion.

## Simulating

Every testbench is self-checking and ends with `TB_RESULT checks=N failures=F`. `tb/tsar_tb_pkg.sv` holds the reference models. They compute tables and GEMV
results straight from the definitions (ternary dot products over int8 values), and they
also assemble instructions.

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/tsar_pkg.sv tb/tsar_tb_pkg.sv rtl/*.sv tb/tb_tsar_unit.sv --top-module tb_tsar_unit
./obj_dir/Vtb_tsar_unit
```

Replace `tb_tsar_unit` with any other testbench:

| testbench | what it checks |
|---|---|
| `tb_tsar_unit` | end to end at the default size: table contents, GEMV with repeated accumulation, the TLUT→TGEMV stall, issue-cycle counts and back-to-back throughput, base ops, illegal opcodes, a (1,64)×(64,32) GEMV in both loop orders; it also counts how often each mechanism occurred |
| `tb_tsar_workload` | BitNet-b1.58 layer shapes: 125M 768×768 as decode (N=1) and prefill (N=128), 2B-4T 2560×6912 and 6912×2560 decode, with all outputs compared (about 4 M cycles; seconds in Verilator) |
| `tb_tsar_<block>` | each block on its own, against independent expectations |

## Relation to the source design, and what is not here

**Taken from the paper:**
- the dense/sparse decomposition;
- c = 2, s = 4, k = 8, m = 16, 16-bit ALUs, 4-to-1 adder trees;
- TLUT as 2 micro-ops of 256 bits and TGEMV as 4 micro-ops;
- the table entry order and the dense/sparse codings;
- the TLUT ALU structure (add/sub followed by negation);
- the VEX3 byte fields and opcodes;
- register pairs named by their first register;
- fused accumulation;
- the three added parts (operand MUX, write-back MUX, control/scoreboard).

**Chosen here:**
- the bit layouts above;
- the inverted storage of R, B and vvvv (standard VEX);
- which operand field carries the TLUT activations;
- the two-stage pipeline, the stall-only scoreboard and the valid/ready handshake;
- lane-masked writes;
- even-pair and overlap rules;
- the base add/sub instructions;
- the host port;
- reset behaviour.

**Departures and gaps:**
- **Register-file ports.** The paper says no extra read ports are needed. A TGEMV
  micro-op here reads the table pair (512 bits), the weights and the accumulator in one
  cycle. The paper does not say how the core's existing ports provide this, so the model
  has the ports the datapath needs.
- **c = 4 instructions.** `TLUT_4x4` and `TGEMV_16x16` have opcodes but no datapath. Their
  tables would occupy eight YMM registers, and their register and micro-op mapping is not
  specified. They decode as illegal.
- **Base multiply and dot-product.** These instructions of the original slice are not
  modelled. Only add/sub is present.
- **Not hardware.** The weight encoding, the kernel loops and their selection, and input
  quantization and output dequantization are software. So are the CPU, caches and memory
  around the unit.
