# A lane-based RVV 1.0 vector unit (Ara2-style), integer subset

This is SystemVerilog for a vector co-processor that runs RISC-V "V" 1.0
instructions handed over by a scalar in-order core. The vector register file
(VRF) is split into *lanes*: every lane holds a slice of every vector register
and owns its own integer ALU and multiplier, so throughput grows with the lane
count while each lane's register file stays small and local. The price is that
some operations must move data *between* lanes (slides, reductions, masks,
memory accesses); those are done by three units that span all lanes.

The default build is the 4-lane configuration: VLEN = 4096 bit (1024 bit per
lane), 32 registers of 512 bytes, eight 64-bit single-port SRAM banks per lane,
up to eight vector instructions in flight, and a 16-byte memory port.

What is built is an integer subset: floating point, fixed point, operand
chaining, indexed/segment memory accesses and a number of permutation and mask
instructions are missing. The list of supported instructions is below.

## The byte layout and why it needs reshuffling

The most unusual thing about this design is how a register's bytes sit in the
lanes. Element `e` of a register lives in lane `e mod L`. Inside a lane, the
lane's elements are packed densely into 64-bit words. So the physical place of
memory byte `b` of a register depends on the element width (EW) it was
written with:

```
element  e     = b / ewb              (ewb = element width in bytes)
lane           = e mod L
lane byte      = (e / L) * ewb + b mod ewb
```

`ara_pkg::vrf_byte_idx()` is the single definition of this map; every unit
that converts between memory order and lane order uses it. A useful property:
the map never moves a byte out of its *row* (one 64-bit word of every lane,
8·L bytes). Units can therefore stream a register one row at a time.

Because the layout depends on EW, a register written as 32-bit elements
cannot be read as 8-bit elements without first moving its bytes. The
dispatcher keeps a table with the width each register was last written with.
Before it issues an instruction it compares that width with the width the
instruction reads each source with, and for every mismatch it injects a
`RESHUFFLE` operation that the slide unit executes (read the register, undo
the old layout, apply the new one, write it back). The destination is
reshuffled too when the instruction writes only part of it (vl < VLMAX, or
masked), so the untouched elements keep their values. Mask registers always
use the 8-bit layout. Registers never written have no entry and are never
reshuffled.

## Blocks

```
 scalar core ──acc_req/acc_resp──► acc_mem_ordering ──► ara2
                                                         ├─ dispatcher   decode, vl/vtype, encoding table, reshuffle injection
                                                         ├─ sequencer    8-entry window, register hazards, completion
                                                         ├─ lane × L     lane_sequencer, operand_requester, 8 vrf_bank,
                                                         │               9 operand_queue, valu, vmfpu
                                                         ├─ vlsu         addrgen, vldu, vstu; memory port
                                                         ├─ sldu         slides, reshuffles, inter-lane reduction steps
                                                         └─ masku        mask streaming, compare results, vcpop/vfirst
 ara2 mem port ──► inval_filter ──► mem_interconnect ◄── scalar caches' port
                         │                 │
                 D$ invalidations       main_mem
```

`ara2_system` is the top. The scalar core and its L1 caches are not built:
their connections are ports (instruction offload, the caches' memory port,
the D$ invalidation port and the scalar-memory ordering handshake).

### Instruction flow

1. **dispatcher** takes one instruction at a time from the core. `vset{i}vl{i}`
   is answered at once with the new vl. Only LMUL = 1 is accepted; any other
   vtype sets vill. Illegal or unsupported encodings are answered with
   `err = 1`. Arithmetic instructions are answered as soon as they are handed
   to the sequencer; loads and stores wait until the address generator has
   checked every address (so the core can take a precise exception);
   vcpop/vfirst wait for their scalar result.
2. **sequencer** gives the instruction a free window slot (its ID, 3 bits)
   and broadcasts it to the lanes and units it needs
   (`ara_pkg::participants()`). It holds it back while a window slot is
   missing, while one of those units is busy, or on a register hazard: RAW
   against any instruction in flight that writes a source, WAR/WAW against
   any that reads or writes the destination. There is **no operand
   chaining**: a dependent instruction starts only after its producer has
   finished. An instruction retires when all its completing units
   (`ara_pkg::completers()`) have reported: every lane for VALU/VMFPU work,
   otherwise the VLSU, SLDU or MASKU.
3. In each **lane**, the lane sequencer turns the instruction into read
   commands (register, word count) for the operand queues it needs and
   starts the VALU or VMFPU.

### Inside a lane: banks, conflicts and queues

Word `w` of register `v` in a lane has the lane address `v·16 + w` and lives
in bank `address mod 8`, row `address / 8`. Consecutive words of a register
therefore rotate through the eight banks.

The **operand_requester** arbitrates the eight single-port banks every cycle.
Writes go first (VALU, VMFPU, load, slide and mask write ports in that
order), then reads for the nine operand queues in fixed order. A requester
that loses its bank waits a cycle: this is the bank conflict the end-to-end
testbench counts. A read is only issued when the target queue has a free
slot that is not already promised to a read in flight (the banks answer one
cycle later), so queues never overflow.

Queues (4 words each, first-word fall-through): VALU A/B, VMFPU A/B/C
(C is the accumulator of vmacc), store data, slide source, mask v0, mask
operand for vcpop/vfirst.

### VALU and reductions

The VALU works on one 64-bit word per cycle, SIMD over 8/16/32/64-bit
elements. Masked instructions receive per-word byte enables from the mask
unit; inactive and tail elements are not written.

Reductions run in three phases:

* **intra-lane**: each lane folds its own elements into one 64-bit
  accumulator; inactive slots take the operation's neutral element.
* **inter-lane**: log2(L) steps. In step k the slide unit hands lane `l` the
  partial of lane `l + 2^k`; lanes combine. After the steps, lane 0 holds the
  result for the whole vector.
* **SIMD**: lane 0 halves the 64-bit word until one element is left (one step
  per cycle, log2(64/EW) steps), combines it with element 0 of vs1, and writes
  element 0 of vd.

### Slide unit (SLDU)

The SLDU buffers a whole source register (VLEN bits, filled one row per
cycle). The slide amount is split into its set bits; for each set bit `k` the
unit makes one pass over the buffer, one row per cycle, moving every element
by 2^k positions. A slide by 13 therefore costs three passes (8, 4, 1). Bytes
that cross a row boundary come from the neighbouring row. A slide amount
≥ VLMAX zeroes the result without passes. Slide-up leaves elements below the
amount untouched. The same buffer path performs reshuffles (unpack with the
old width, pack with the new one; never combined with a slide) and relays the
inter-lane reduction partials.

### Mask unit (MASKU)

Mask registers use the 8-bit layout, so bit `i` of a mask is byte `i/8` of the
register in memory order. For a masked instruction the MASKU reads v0 from all
lanes, undoes the layout into a VLEN-bit vector and streams per-lane byte
enables that match each lane's element slots for the instruction's width.
For compares it collects the lanes' per-element flags and writes the mask
register; bits above vl inside the written bytes are set to 1, bytes beyond
them are not touched. vcpop and vfirst scan the mask 64 bits per cycle.

### Load/store unit (VLSU)

`addrgen` produces one address per element per cycle (unit-stride: stride =
element size; strided: rs2). A misaligned element raises an error, is
skipped, and is reported in the response. `vldu` places each returned element
into its lane and word with byte enables (memory order → lane layout);
`vstu` takes the element from the lane's store queue and places it in the
16-byte bus word. The memory port is a simple in-order bus (address, write,
byte enables, data; one response per request). At most 16 requests are
outstanding.

This one-element-per-cycle datapath is much slower than a unit that moves a
whole bus word per cycle; it was chosen for simplicity and is the main
performance departure.

### Scalar/vector memory consistency

The core and the vector unit reach memory through different ports, so the
system keeps them ordered:

* **acc_mem_ordering** counts vector loads and stores offloaded and not yet
  finished. Scalar loads may issue only with no vector store in flight;
  scalar stores only with no vector load or store in flight; a vector
  load/store is held at the offload interface while the core reports a
  pending scalar store.
* **inval_filter**: the core's data cache is write-through, so memory is
  always current; every vector write invalidates the matching D$ set (8 KiB,
  4 ways, 32-byte lines: 64 sets, index = address bits [10:5]). Consecutive
  writes to the same set share one invalidation, and a write waits until its
  invalidation is accepted.

### Memory

`mem_interconnect` arbitrates the vector port and the caches' port
round-robin in front of `main_mem` (2M words of 4·L bytes, one-cycle SRAM).
Responses return a fixed 7 cycles (vector port) and 5 cycles (caches' port)
after the request is accepted.

## Supported instructions

| group | instructions |
|---|---|
| configuration | vsetvli, vsetivli, vsetvl (LMUL = 1) |
| integer | vadd, vsub, vrsub, vand, vor, vxor, vsll, vsrl, vsra, vminu, vmin, vmaxu, vmax (.vv/.vx/.vi as defined), vmerge, vmv.v.v/x/i, vmv1r.v |
| multiply | vmul, vmacc (.vv/.vx) |
| compare (unmasked) | vmseq, vmsne, vmsltu, vmslt, vmsleu, vmsle, vmsgtu, vmsgt |
| reduction (unmasked) | vredsum, vredand, vredor, vredxor, vredminu, vredmin, vredmaxu, vredmax |
| permutation | vslideup, vslidedown (.vx/.vi) |
| mask | vcpop.m, vfirst.m (unmasked) |
| memory (unmasked) | vle8/16/32/64, vse*, vlse*, vsse* (EEW ≤ SEW) |

Arithmetic instructions may be masked by v0. vstart is always 0.

## Where this departs from Ara2 as published

* Integer only: no FPU, no fixed-point, no widening/narrowing, no divide.
* No operand chaining between units; dependent instructions serialize.
* VLSU moves one element per cycle; no indexed, segment or fault-only-first
  accesses; memory bus is a simple in-order request/response bus, not AXI.
* No vslide1up/down, vrgather, vcompress, mask-logical instructions, viota,
  vid, vmsbf/vmsif/vmsof.
* LMUL = 1 only.
* The scalar core and its caches are not included; the multi-core cluster
  system is not built.
* Only the 4-lane configuration has been simulated; NrLanes is a parameter.

## Simulation

Every testbench ends by printing `TB_RESULT checks=N failures=M` and has a
watchdog. Plain verilator works, for example for the full system:

```
verilator --binary --timing --assert -Irtl rtl/ara_pkg.sv \
    $(ls rtl/*.sv | grep -v ara_pkg) tb/tb_ara2_system.sv \
    --top-module tb_ara2_system -o sim
./obj_dir/sim
```

(`ara_pkg.sv` must come first; pass it only once.)

* `tb_ara2_system` runs the full-size system (default parameters). It plays
  the scalar core: it offloads a program of about forty instructions
  (loads, arithmetic, multiply-accumulate, masked subtract, compares,
  reductions, slides, vcpop/vfirst, width changes that force reshuffles,
  unit-stride and strided stores), issues random scalar cache reads,
  scalar load/store requests and a scalar-store-pending window, and
  back-pressures the invalidation port. A byte-level model of the 32
  registers gives the expected memory image, which is compared byte by byte
  at the end. It counts sequencer stalls, bank conflicts, reshuffles, slide
  passes, inter-lane reduction steps, masked-element streams, ordering
  stalls, invalidations and merged invalidations, and fails if any of them
  never happened. It covers the lane internals, dispatcher, sequencer, VLSU,
  SLDU and MASKU, which have no separate testbenches.
* `tb_vrf_bank`, `tb_operand_queue`, `tb_main_mem`, `tb_inval_filter`,
  `tb_acc_mem_ordering` and `tb_mem_interconnect` test those blocks alone
  against reference models (the interconnect test also checks the 7/5-cycle
  latencies and the round-robin order).

## Tool notes

Verilator lint reports only style warnings: parameters named like package
parameters (`NrLanes`, `NrBanks`), unused bits of wide request structs, and
`SYNCASYNCNET` because the reset is used both by the flip-flops and by the
assertions' `disable iff`.
