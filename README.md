# A TROOP-style Spatz vector cluster in SystemVerilog

## The idea

A small vector processor on a shared L1 scratchpad does well on kernels that
reuse their data, such as matrix multiplication. It does poorly on streaming
kernels (dot product, AXPY, matrix-vector product), where every element is
used once. Doubling the wires to memory is the obvious fix, but by itself it
leaves most of the gain unused. The vector unit then stalls on itself:

* its single load/store port into the register file serialises the wider
  memory traffic;
* one instruction can start on a register only once the previous one has
  got far enough, and the tracking is too coarse for two memory streams;
* loads and arithmetic results fight over the same register-file bank, and
  the arithmetic unit always wins;
* all cores walk the memory banks in lock-step and collide.

This design keeps the Spatz structure: two core complexes, each with a vector
unit of F = 4 64-bit lanes, a 2 KiB register file (VRF) and a 16-bank
128 KiB TCDM (tightly coupled data memory). It gives each vector unit 8
memory ports instead of 4, plus five small changes that let the lanes
actually use that bandwidth:

| | change | where |
|---|---|---|
| A | the load/store unit has two independent halves (VLSU0, VLSU1), each with its own 4 memory ports and its own VRF port | `vlsu`, `vlsu_channel` |
| B | chaining is tracked with word-granular completion counters, one per producer and per VLSU half | `controller` |
| C | a write path may lose arbitration without stalling, because a small shadow buffer parks the write; priority moves to the load/store unit while that is possible | `controller`, `shadow_buffer`, `vrf` |
| D | every register starts in bank 0 or bank 2 ("standard" layout), so both VLSU halves stream through different banks | `troop_pkg::vrf_addr`, `vrf` |
| E | TCDM addresses are scrambled so that cores running the same loop do not hit the same bank | `troop_pkg::tcdm_bank_of`, `tcdm_xbar` |

Reductions are also done in log2 steps (`vfu`), because with twice the
bandwidth the reduction at the end of a dot product becomes a visible part of
the run time.

## Cluster (`spatz_cluster`)

```
   CC0: instr ─► spatz_vpe ─8 ports─┐                ┌─► tcdm_bank 0
        scalar port ────────────────┤  tcdm_xbar     │   ...
   CC1: instr ─► spatz_vpe ─8 ports─┤  18 x 16,      ├─► tcdm_bank 15
        scalar port ────────────────┘  round robin   │   (8 KiB x 64 bit each)
```

The crossbar has 18 ports. Port 9c+k (k = 0..7) is lane port k of core
complex c's VPE, and port 9c+8 is that core complex's scalar core. The
scalar cores (Snitch) and the instruction cache are not part of this RTL.
Their offload ports (`instr_*`) and scalar memory ports (`scalar_*`) are top
level ports, so a testbench or a core model drives them.

Memory word addresses (byte address a, 64-bit words):

    word  = a[16:3]
    row   = a[16:7]                              (row inside a bank, 1024 rows)
    bank  = a[6:3] XOR (row[0] XOR row[1] ? 8 : 0)

Without scrambling, bank = a[6:3]. With it, rows 1 and 2 of every group of
four rows are rotated by half the banks. A core on row r and a core on row
r+1 of the same loop therefore use disjoint halves of the banks. Each bank has
a round-robin arbiter. A grant is combinational, in the cycle of the request.
Read data comes back on the requesting port one cycle later. A port whose
request is not granted keeps it asserted.

## Vector processing element (`spatz_vpe`)

```
             ┌──────────── controller ─────────────┐
 instr ────► │ vsetvl, dispatch, scoreboard,       │
             │ completion counters, shadow buffers,│
             │ write priority                      │
             └──┬──────────┬───────────┬───────────┘
                │          │           │            writes (via buffers)
              vfu        vlsu        sldu  ───────────────────►  vrf
           4 lanes   VLSU0 | VLSU1   slides  ◄─── reads ──────  4 banks
                      4+4 TCDM ports                            3R / 1W
```

### Register file

There are 32 registers of VLEN = 512 bits, stored as 64 words of 256 bits
(one 64-bit element per lane). Register v, word w has linear address 2v + w,
and its bank is that address mod 4. Register v therefore starts in bank 0
(even v) or bank 2 (odd v). A register group of LMUL registers is 2·LMUL
consecutive words and walks the four banks in turn. Each bank has three read
ports and one write port. Reads return data in the same cycle. A write lands
at the next clock edge.

Read ports are handed out per bank in this fixed order: VFU operand a, b, c,
then VLSU0, VLSU1, SLDU. The VFU needs at most three operands, so it is never
refused. The order of write ports is described under the write priority
section below.

### Functional unit (`vfu`)

It has four 64-bit integer lanes and one instruction in flight. Each cycle it
reads one VRF word (up to three operands) and writes one result word three
cycles later:

    read (s1) ─► multiply (s2) ─► add (wb) ─► VRF write
                 └── 2-cycle FPU latency ──┘  └ write-back

`vadd` multiplies by 1, and `vmacc` adds the old destination. The pipeline
stops only when the write is refused, which with a shadow buffer in front
should not happen. The testbenches count how often it does.

`vredsum` first accumulates each lane over all words, then adds the four lane
sums in a two-level adder tree, then adds `vs1[0]`. It writes element 0 of
`vd`. Its latency is 1 + nwords + 3 + 2 cycles.

### Load/store unit (`vlsu`, `vlsu_channel`)

A unit-stride `vle`/`vse` of vl elements covers nwords = ceil(vl/4) VRF words.
VLSU0 takes words [0, ceil(nwords/2)), and VLSU1 takes the rest. Each half has
four memory ports, one per lane, and its own VRF read and write port. Each
half works independently of the other. One half can be held up by a bank
conflict while the other carries on.

For loads, a half keeps three word slots. It sends the element requests of the
next word as soon as a slot is free, and retries refused elements. It fills
the slot one cycle after each grant. It writes finished slots to the VRF in
order. For stores, it reads one VRF word at a time into a one-word buffer and
sends its elements. Only the elements below vl are accessed. A 64-element load
(LMUL = 8) takes 10 cycles from dispatch without bank conflicts: one start
cycle, 8 request cycles, and the last response written to the VRF in the
cycle it arrives. Responses that complete the oldest word are forwarded
straight to the write port.

### Slide unit (`sldu`)

`vslideup`/`vslidedown` by a scalar offset k. For each destination word the
unit reads the two source words that contain elements 4w ± k, then writes the
shifted word. It takes three cycles per word and has no chaining. Elements
below k (slide up) keep their old value. Elements from VLMAX - k on (slide
down) become zero. Elements at or beyond vl are never written.

## Chaining with completion counters (`controller`)

This is the part that needs the most care.

**Dispatch.** Instructions come in order on a valid/ready port. `vsetvl` runs
in the controller: vl = min(AVL, 8·LMUL). Every other instruction goes to its
unit as soon as that unit is free, or in the same cycle that the unit's
previous instruction completes. Instructions for different units then run
at the same time. An instruction with vl = 0 is accepted and dropped.

**Hazards are recorded once, at dispatch.** The new instruction is compared
with the instruction running in each other unit. These are older, because
issue is in order. The controller records read-after-write, write-after-read
and write-after-write overlaps of the register groups involved.

A dependency is *chainable* when three conditions hold:

* both instructions walk the vector one word at a time in the same order
  (element-wise VFU ops, loads, stores; not reductions or slides);
* both have the same number of words;
* every overlap is between groups with the same base register.

A chainable dependency is resolved word by word. Any other dependency holds
the younger instruction until the older one has finished.

**Progress is counted in committed words.** The controller keeps one counter
of VRF words read and one of words written for the VFU. It keeps a pair of
counters per VLSU half, because the two halves progress independently. A
write counts when the VRF actually commits it, after any shadow buffer, and
not when the unit produces it. The consumer may access word w from the cycle
after the commit.

Word w of a VLSU instruction belongs to half 0 if w < ceil(nwords/2), and is
word w - ceil(nwords/2) of half 1. The check is:

    vfu may read word w   <=>  for each chained producer:
        producer is VFU  : w < vfu_wr_cnt
        producer is VLSU : w < h ? w < ls_wr_cnt[0] : (w - h) < ls_wr_cnt[1]

The checks for WAR (against read counters) and WAW have the same form. This
is what makes the dual interface pay off. A `vmacc` chained to a load
consumes the first half right behind VLSU0. By the time it reaches the second
half, VLSU1 has usually written it already. A store behind a `vmacc` is chained
the same way, in the other direction.

**Completion.** A unit's instruction is finished when the unit is idle and its
shadow buffer is empty. Finishing clears every dependency on it.

## Write priority and shadow buffers (`controller`, `vrf`, `shadow_buffer`)

Each VRF bank takes one write per cycle. Normally the order is
VFU > VLSU0 > VLSU1 > SLDU. If the VFU always wins, a load stalls every time
it meets a result write in the same bank, and the lanes then wait for that
load.

The VFU write path therefore has a 2-entry fall-through buffer, and VLSU1's
write path a 1-entry one. The VRF switches to VLSU0 > VLSU1 > VFU > SLDU
(`vlsu_first`) while two conditions hold:

1. the VFU buffer is not full, so a refused VFU write is parked and the VFU
   pipeline never sees back-pressure;
2. the VFU has lost fewer than PRIO_PERIOD = 4 arbitrations in a row, so a
   parked write cannot be starved by a long load.

When either fails, the VFU is first again until its head write is taken. An
empty buffer passes its input straight through, so it adds no cycle when there
is no conflict.

## Instruction interface

The VPE takes a decoded instruction, `troop_pkg::vinstr_t`, not an RVV
encoding:

| field | meaning |
|---|---|
| `op` | `OP_VSETVL, OP_VLE, OP_VSE, OP_VADD_VV/VX, OP_VMUL_VV/VX, OP_VMACC_VV/VX, OP_VREDSUM, OP_VSLIDEUP, OP_VSLIDEDOWN` |
| `vd, vs1, vs2` | register numbers; groups must be LMUL-aligned |
| `lmul_log2` | for `vsetvl`: LMUL = 1, 2, 4, 8 |
| `scalar` | AVL for `vsetvl`, byte base address for `vle`/`vse`, scalar operand for `.vx`, offset for slides |

Semantics follow RVV for 64-bit elements. The tail is left undisturbed, and
there is no masking. `vmacc.vv`: vd += vs1·vs2; `vmacc.vx`: vd += x·vs2;
`vredsum`: vd[0] = vs1[0] + Σ vs2[i].

## Timing summary

| path | latency |
|---|---|
| TCDM request → read data | 1 cycle after grant |
| VRF read → same cycle; VRF write → next edge | |
| VFU read → result write request | 3 cycles |
| producer commit → dependent access allowed | next cycle |
| vle of 64 elements, no conflicts | 10 cycles |
| vredsum of n words | 1 + n + 5 cycles |
| slide | 3 cycles per destination word |

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_tcdm_bank` | random byte-enabled reads and writes against a model, one-cycle read latency |
| `tb_tcdm_xbar` | 18 random masters; bank and row mapping with scrambling, one grant per bank, data integrity, no starvation |
| `tb_vrf` | read-port limits, write priority in both modes, bank mapping, byte enables |
| `tb_shadow_buffer` | ordered, loss-free delivery, bypass when empty, back-pressure only when full |
| `tb_vfu` | all ops at random vl and LMUL, read-to-write latency 3, reduction result and time, stalls |
| `tb_vlsu` | loads and stores at random vl and bases with random refusals, split between the halves, load time |
| `tb_sldu` | slides at random offsets, vl and LMUL |
| `tb_controller` | vsetvl, dispatch and back-pressure, word-level chaining on both VLSU halves, WAR chaining, non-chainable waiting, dynamic priority, starvation limit, VLSU1 buffer |
| `tb_spatz_vpe` | a random 400-instruction program against an instruction-level model, ending with a full memory compare; a chaining-rate check (below) |
| `tb_spatz_cluster` | end to end at the default sizes (see below) |
| `tb_kernels` | dot product and AXPY of 4096 elements and a 64 x 128 GEMV on both cores, results and lane utilisation |

`tb_spatz_cluster` runs the cluster with all parameters at their defaults. CC0
runs a 1024-element dot product with LMUL = 8 and chained `vmacc`, then
`vredsum`. At the same time, CC1 runs a 1024-element AXPY and two slides. Data
goes in and out through the scalar ports. The testbench checks the results and
counts each mechanism, failing if any of them never happened:

* a write parked in each shadow buffer;
* a VLSU win;
* a return to VFU priority;
* chained reads on each half;
* a chained store;
* both halves writing in the same cycle;
* a TCDM conflict;
* a scrambled row;
* a reduction tree step;
* a slide.

Measured with both cores busy: the dot product takes 440 cycles, and the
lanes are busy for 288 of them (65 %). The other core's AXPY traffic shares the
banks during that time.

The chaining-rate check in `tb_spatz_vpe` runs with a memory that grants
every request: `vle v0`, `vle v8`, `vmacc.vv v16, v0, v8`, `vse v16`, all at
LMUL 8 (16 words). The `vmacc` reads its 16 words in 16 consecutive cycles,
starting 4 cycles after the second load. With the dynamic priority turned off
(VFU always first), the same sequence takes 17 cycles. One load write loses
to a result write in the same bank, and the chained read behind it waits a
cycle.

`tb_kernels` runs the memory-bound kernels at their evaluated sizes with the
cluster at its defaults. The two cores split each vector. The four 32 KiB
vectors fill the whole TCDM.

| kernel, N = 4096 | cycles | lane utilisation | bound by bandwidth |
|---|---|---|---|
| dot product (LMUL 8, chained vmacc, vredsum) | 768 | 70 % | 100 % (2 loads per multiply-add) |
| AXPY, unrolled by two chunks | 1142 | 44 % | 67 % (2 loads + 1 store per multiply-add) |

| GEMV 64 x 128 (column by column, 32 rows per core, vle + vmacc.vx per column) | 1681 | 61 % | 100 % (1 load per multiply-add) |

The published figures for this configuration are 76 %, 55 % and 98 %. The
gap comes from per-instruction overhead, because each unit here runs one
instruction at a time:

* the VLSU spends one start cycle per `vle`/`vse`;
* the VFU takes its next instruction only after the previous one has left
  its 3-stage pipeline.

GEMV suffers most from the second point. Its `vmacc` instructions are only 8
words long, so the 3-cycle drain costs about a quarter of the time. Letting
the VFU overlap consecutive instructions would need a hazard check inside the
VFU pipeline and completion counters per instruction. That is not built.

To run one testbench with plain Verilator:

    verilator --binary --timing --assert -Irtl -Itb --top-module tb_spatz_vpe \
        rtl/troop_pkg.sv tb/tb_spatz_vpe.sv
    ./obj_dir/Vtb_spatz_vpe

## Where this RTL departs from the original design

* **Integer lanes.** The lanes do 64-bit integer add, multiply and
  multiply-accumulate instead of IEEE-754 FP. There are no 32/16/8-bit SIMD
  modes and no widening ops. The pipeline depth matches the FP latency
  (2 + write-back), so the timing of the conflict and chaining mechanisms is
  the same. Because of this, the FP kernels can only be run as integer
  analogues.
* **Memory accesses.** Only unit-stride loads and stores of 64-bit elements
  are supported: no strided or indexed accesses, no masks.
* **No scalar parts.** There is no RVV decoder and no FPU sequencer (scalar FP
  register file). Scalar operands arrive inside the instruction.
* **Not built.** The Snitch cores and the 8 KiB instruction cache are outside
  this RTL.
* **Own choices.** These parameters were chosen here:
  * PRIO_PERIOD = 4;
  * a VLSU1 buffer depth of 1;
  * three load slots per VLSU half;
  * round-robin bank arbitration;
  * the read-port order of the VRF;
  * flip-flop arrays for the VRF and TCDM banks instead of latch or SRAM
    macros.
* **Chaining rule.** Dependencies between groups with different bases, or
  between instructions with different vl, are not chained. The younger
  instruction waits for the older one to finish.

## Files

`rtl/troop_pkg.sv` holds the shared constants, the request/response structs,
the instruction format and the address functions. Each other module is in
`rtl/<module>.sv`. `rr_arbiter` and `vlsu_channel` are helpers of `tcdm_xbar`
and `vlsu`.
