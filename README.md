# Quark: an integer RISC-V vector engine for sub-byte DNN inference

Quantized neural networks with 1- or 2-bit weights and activations lose little
accuracy but are awkward on ordinary processors. The smallest element a CPU or
RVV vector unit handles is a byte, so a 2-bit value wastes three quarters of
every register and every multiplier. Quark takes the bit-serial route instead.
A dot product of an M-bit weight vector `w` and an N-bit activation vector `a`
is rewritten as

    w · a = Σ_n Σ_m 2^(n+m) · popcount(w_m AND a_n)

where `w_m` is the vector of bit m of every weight (a *bit plane*) and `a_n`
the same for the activations. One 64-bit AND followed by one popcount then
handles 64 one-bit products. The method needs three things that standard RVV
lacks:

* **vpopcnt**: a popcount of *each element*. RVV's `vcpop.m` only counts the
  set bits of a whole mask register.
* **vshacc**: a fused shift-and-accumulate. It weights a popcount by
  2^(n+m) and adds it to a running sum.
* **vbitpack**: a transposition of ordinary byte-sized elements into bit
  planes. It has to run for every input of every layer, so it must be cheap.

Quark is an RVV vector engine with those three instructions added to its lane
ALUs. The vector floating-point unit is removed. Re-scaling between layers is
floating-point work, and the RV64 scalar core next to the engine does it. This
repository holds synthesizable SystemVerilog for the vector engine's own logic:

* the dispatcher, which faces the scalar core;
* the lanes, each with its slice of the vector register file, an operand queue
  and the integer ALU;
* the three sub-byte units.

It is configured as in the main published implementation: 4 lanes, 4096-bit
vector registers, 16 KiB of register file and 64-bit lanes.

## How the pieces fit

```
 scalar core (RV64, not included)
      │ req: insn, rs1, rs2            ▲ resp: result (new vl), exception
      ▼                                │
 ┌──────────────── quark_dispatcher ─────────────────┐
 │ decode · vsetvl* · exception check · ack · queue  │
 └──────────────────────┬────────────────────────────┘
                        │ decoded instruction (vinsn_t), broadcast
        ┌───────────────┼───────────────┬───────────────┐
        ▼               ▼               ▼               ▼
   quark_lane 0    quark_lane 1    quark_lane 2    quark_lane 3
   ┌──────────┐
   │ quark_vrf│──► operand queue (quark_fifo) ──► quark_valu ──┐
   │  4 KiB   │◄───────────────── write-back ─────────────────┘
   └──────────┘        ▲ ls_* ports: load/store unit (not included)
```

| File | Role |
|---|---|
| `rtl/quark_pkg.sv` | shared types: operations, SEW, request/response, decoded instruction, encodings |
| `rtl/quark.sv` | top: dispatcher plus `NrLanes` lanes, lock-step broadcast, `busy_o` |
| `rtl/quark_dispatcher.sv` | decode, vl/vtype, acknowledge, instruction queue |
| `rtl/quark_lane.sv` | one lane: word sequencing, operand queue, write-back, tail masks |
| `rtl/quark_vrf.sv` | one lane's register-file slice (3 operand reads + 1 load/store read + 1 write) |
| `rtl/quark_fifo.sv` | valid/ready FIFO, used as the operand queue and the instruction queue |
| `rtl/quark_valu.sv` | integer SIMD ALU for one 64-bit word |
| `rtl/quark_popcnt.sv`, `rtl/quark_shacc.sv`, `rtl/quark_bitpack.sv` | the three sub-byte datapaths |

### Data layout

Each vector register holds `VLEN/64` 64-bit words. Global word `g` of a
register, or of a register group when LMUL > 1, lives in lane `g % NrLanes`,
at local word `g / NrLanes`. Lane-local register `r` starts at word
`r * VLEN/64/NrLanes`, which is 16 with the defaults. Groups are therefore
contiguous, and LMUL needs no extra logic. Every supported operation works
element by element inside one 64-bit word, and vbitpack does too (see below).
So lanes never exchange data and need no slide network.

## The sub-byte instructions

All three instructions use the RISC-V *custom-2* major opcode (`1011011`)
with the OP-V field layout
`funct6[31:26] vm[25] vs2[24:20] vs1/rs1/imm[19:15] funct3[14:12] vd[11:7]`.
The encoding is this implementation's choice, because the published
description gives none. `vm` must be 1, since masking is not supported.

| Instruction | funct6 | funct3 | Operation per element e (width SEW) |
|---|---|---|---|
| `vpopcnt.v vd, vs2` | 000000 | 000 (vs1 = 0) | `vd[e] = popcount(vs2[e])` |
| `vshacc.vv vd, vs2, vs1` | 000001 | 000 | `vd[e] += vs2[e] << (vs1[e] mod SEW)` |
| `vshacc.vx vd, vs2, rs1` | 000001 | 100 | `vd[e] += vs2[e] << (rs1 mod SEW)` |
| `vshacc.vi vd, vs2, uimm5` | 000001 | 011 | `vd[e] += vs2[e] << uimm5` |
| `vbitpack.vi vd, vs2, prec` | 000010 | 011 | see below; SEW must be 8, prec ∈ {1,2,4,8} |

The vshacc shift amount is taken like the standard RVV shifts take theirs:
only the low log2(SEW) bits count. The sum wraps modulo 2^SEW.

### vbitpack in detail

vbitpack is the least obvious of the three. It works on one 64-bit word at a
time. Each source word holds eight 8-bit elements, `j = 0..7`, of which the
low `prec` bits matter. The destination word is split into `prec` planes of
`64/prec` bits, and plane `p` occupies bits `[p·64/prec +: 64/prec]`. One call
does three things for every plane `p`:

1. It gathers bit `p` of the eight source elements into an 8-bit slice.
   Element `j` supplies slice bit `j`.
2. It shifts the destination plane left by 8.
3. It puts the slice into the low 8 bits of the plane.

Take 2-bit precision as an example. After the first call, bit 0 of the eight
elements sits in bits 7..0 and bit 1 in bits 39..32. A second call on the next
source word moves those slices to 15..8 and 47..40 and inserts the new ones
below them. After four calls, the 32 two-bit values of four source words are
fully transposed: bits 31..0 hold plane 0 and bits 63..32 hold plane 1, and
the *oldest* slice is at the top of each plane. With 1-bit precision eight
calls fill the single 64-bit plane. With 8-bit precision each call replaces
the word with the 8×8 transpose of the source bytes.

The published illustration of this instruction colours the second slice
*above* the first one. The written description says the target register is
shifted left before the new slice is packed in. This implementation follows
the written description. For a dot product the order does not matter, as long
as weights and activations are packed the same way. Source elements past `vl`
contribute zero bits, and vbitpack always writes the whole destination word.
`vl` counts the 8-bit source elements.

### A 2-bit dot product, step by step

The end-to-end test `tb/tb_quark.sv` runs this kernel. It computes 64 dot
products of 32 two-bit values:

1. `vsetvli` with SEW=8 and vl=512. Four `vbitpack.vi …, 2` calls pack the
   activations into `vAP`, and four more pack the weights into `vWP`. Each
   64-bit word now holds 32 values as two 32-bit planes.
2. With SEW=64, `vsll.vx`/`vsrl.vx` by 32 followed by `vor` build `vWS`, the
   weights with their two planes swapped, for the cross terms (n ≠ m).
3. With SEW=32:
   * `vand vT, vAP, vWP` and `vpopcnt` give the counts for (n,m) = (0,0) and (1,1).
   * `vshacc.vv vACC, vP, vSH` weights them by 2^0 and 2^2. `vSH` holds the
     alternating shift amounts 0 and 2.
   * `vand` with `vWS`, `vpopcnt` and `vshacc.vi …, 1` add the cross terms with
     weight 2^1.
4. With SEW=64, `vsrl.vx 32`, `vand.vx 0xFFFFFFFF` and `vadd` fold the two
   32-bit partial sums into the final 64-bit result.

At the default size the whole kernel, 28 instructions including four
`vsetvli`, takes about 460 cycles from the first instruction to idle.

## Inside a lane

A lane accepts one decoded instruction while it is idle. From `vl` and SEW it
works out three things:

* how many of the instruction's words `n` fall into this lane;
* whether the last word of the vector belongs to this lane;
* how many of that word's bytes are inside `vl`.

Then a three-stage pipeline runs, one word per cycle:

1. **Read.** vs1, vs2 and the old vd of local word k are read from the VRF
   (three synchronous read ports). For `.vx`/`.vi` forms the scalar, repeated
   across every element of the word, replaces vs1.
2. **Queue.** One cycle later the three operands, the word index and the
   word's byte-valid mask enter the operand queue (4 entries).
3. **Execute and write back.** The VALU takes the queue head, and its result
   is written to vd in the same cycle. Byte enables keep the bytes past `vl`
   unchanged (tail-undisturbed).

A read is issued only if the queue has room for it, counting the read that is
still in flight. The write port is shared with the load/store unit, and the
load/store unit has priority. While it writes, the VALU stalls, the queue
fills up and the lane stops reading (`oq_stall_o`). Without stalls an
instruction with `n` words in the lane takes `n + 3` cycles from acceptance
to `done_o`, and 2 cycles if `n = 0`. At the defaults one instruction over a
full 4096-bit register takes 19 cycles: 16 words per lane. A lane's peak is
one 64-bit word per cycle, so with 4 lanes the engine handles 256 one-bit
AND+popcount products per cycle.

The top module broadcasts an instruction only when all lanes are idle, so the
lanes always work in lock step on one instruction. There is no chaining:
the next instruction starts only after the slowest lane has finished. This is
a simplification of this implementation. It costs throughput on short
vectors but rules out any register hazard.

## The dispatcher and the scalar-core protocol

The scalar core sends `{insn, rs1, rs2}` with `req_valid_i`. It does so only
for instructions that are no longer speculative. Exactly one cycle after
acceptance the dispatcher answers with `resp_valid_o`:

* **vsetvli / vsetivli / vsetvl.** These are executed in the dispatcher. The
  answer's `result` is the new `vl = min(AVL, VLEN·LMUL/SEW)`. `rs1 = x0` with
  `rd ≠ x0` requests VLMAX, and `rs1 = rd = x0` keeps the current vl. Only
  LMUL 1..8 and SEW 8..64 are accepted. Anything else sets `vill`, which makes
  later arithmetic illegal until the next valid vsetvl.
* **Arithmetic.** The instruction is checked for every reason it could trap:
  * an unsupported encoding;
  * `vm = 0`;
  * `vill` is set;
  * a register group is misaligned for the current LMUL;
  * `vsub.vi`, which RVV does not have;
  * a vbitpack precision outside {1,2,4,8}, or SEW ≠ 8.

  A legal instruction is queued and acknowledged at once with
  `exception = 0`. It will run later, and the scalar core does not wait for it
  ("fire-and-forget"). An illegal one is answered with `exception = 1` and
  dropped.

Each queued instruction carries the `vl` in force when it was dispatched, so a
vsetvl never waits for the lanes. `req_ready_o` drops while the
four-entry instruction queue is full. `busy_o` tells the scalar core, or a
load/store unit, when all issued vector work has finished.

Supported standard instructions: `vadd`, `vsub`, `vand`, `vor`, `vxor`,
`vsll`, `vsrl` (`.vv`, `.vx` and `.vi` where RVV defines them), `vmv.v.{v,x,i}`
and the three `vset*vl*`.

## What is not here, and how to attach it

The engine's surroundings are not included. They are existing components that
the design builds on, not new ones:

* **The RV64 scalar core and its caches.** They connect to `req_*`/`resp_*`.
* **The vector load/store unit.** Memory reaches the register file only
  through it. Each lane's VRF slice is exposed as the `ls_*` port arrays:
  * a write port with byte enables, which has priority over the lane's
    write-back;
  * a read port with one cycle of latency.

  A load/store unit must wait for `busy_o` to clear before it touches
  registers an earlier instruction writes. The testbenches play this role.
* **The slide unit, the mask unit and the shared AXI bus.** Because the mask
  unit is missing, masked instructions trap.

## Where this implementation follows the published design and where it chooses

Follows it:

* integer-only lanes built from a VRF slice, operand queues and a VALU, with
  no floating-point unit;
* 4 lanes, 4096-bit vectors and a 16 KiB register file;
* per-element popcount;
* fused shift-and-accumulate;
* bit-plane packing with the bit positions of the published worked example
  (8-bit source elements, 32-bit planes at 2-bit precision, 8-bit slices);
* acknowledgment right after the exception check.

Its own choices:

* all instruction encodings of the custom instructions;
* the exact vshacc operands;
* the order of slices within a vbitpack plane, which follows the written
  description over the illustration;
* the word-interleaved layout;
* a flat multi-port VRF instead of banks;
* queue depths;
* lock-step sequencing without chaining;
* the subset of standard RVV supported;
* load/store write priority;
* asynchronous active-low reset of all control state (VRF contents are not
  reset).

No integer multiplier is included. The published lane layout shows only the
VRF, operand queues and ALU.

## Parameters

| Parameter | Default | Where | Meaning |
|---|---|---|---|
| `NrLanes` | 4 | `quark`, `quark_lane`, `quark_vrf` | lanes (a power of two); 8 gives the larger published variant with a 32 KiB VRF when VLEN = 8192 |
| `VLEN` | 4096 | all | bits per vector register |
| `IQDepth` | 4 | `quark_dispatcher` | instruction queue entries |
| `OQDepth` | 4 | `quark_lane` | operand queue entries |

`VLEN / 64 / NrLanes` must be a whole number.

## Simulating

Every testbench in `tb/` checks its own results and ends with a line
`TB_RESULT checks=N failures=M`. Example for the whole engine, run from the
repository root:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/quark_pkg.sv tb/quark_tb_pkg.sv rtl/quark_popcnt.sv rtl/quark_shacc.sv \
  rtl/quark_bitpack.sv rtl/quark_valu.sv rtl/quark_fifo.sv rtl/quark_vrf.sv \
  rtl/quark_lane.sv rtl/quark_dispatcher.sv rtl/quark.sv tb/tb_quark.sv \
  --top-module tb_quark -Mdir obj_quark
./obj_quark/Vtb_quark
```

| Testbench | What it checks |
|---|---|
| `tb_quark_popcnt`, `tb_quark_shacc`, `tb_quark_bitpack` | each datapath against a bit-level model, at every SEW or precision; vbitpack also on the 2-bit worked example |
| `tb_quark_valu` | every operation × SEW on random words, plus byte enables |
| `tb_quark_fifo` | order, fill level and full/empty flags under random traffic |
| `tb_quark_vrf` | all read ports, byte-masked writes, read-during-write |
| `tb_quark_lane` | 60 random instructions (all ops, SEW, LMUL, tails) on lane 1 of 4; latency `n+3`; results under injected load/store writes |
| `tb_quark_dispatcher` | vsetvl results, exceptions, decoded fields, one-cycle answers, queue back-pressure |
| `tb_quark` | the 2-bit dot-product kernel above at the default size, plus stalls, a full queue, exceptions, tails and lanes finishing at different times |
| `tb_quark_conv2d` | 3×3 convolutions of 1×128×8×8 and 1×128×16×16 inputs (zero padding 1, one output channel) with 1-bit and 2-bit data, through the whole engine at its default size, against a direct convolution; the output is computed in tiles of 64 pixels |
| `tb_quark_conv2d_8lane` | the same convolutions on the larger configuration: 8 lanes, 8192-bit registers and a 32 KiB VRF |

`tb/quark_tb_pkg.sv` holds the instruction encoders that the testbenches use.
Both convolution tests are thin wrappers around the parameterized
`tb/quark_conv2d_bench.sv`.
The simulator is two-state. The register file is not reset, so the tests
write every word they read.

## How far to trust it

Each block's testbench compares it with an independent model, and each one
has been shown to fail when its block is broken on purpose. The end-to-end
test runs at the default size. What has not been tested:

* other lane counts in the top-level test;
* timing closure;
* integration with a real scalar core or load/store unit.

For scale, `tb_quark_conv2d` keeps the engine busy for about 10,100 cycles
(1-bit) and 15,600 cycles (2-bit) on its 8×8 input, and about 40,400 and
62,500 cycles on the 16×16 input. With 8 lanes the figures are about 5,800
and 9,000 cycles (8×8), and 23,400 and 36,200 cycles (16×16). That count excludes the
testbench's own data movement. The cycle counts are this implementation's own and are not meant to match the
published performance figures. In particular, the lack of chaining makes short
instruction sequences slower than in the published engine.
