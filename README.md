# Electromigration-aware resource allocation: RTL

Wires inside a chip wear out through electromigration (EM). The RMS form of it comes from
Joule heating, which grows with how often a wire toggles, so a wire's expected lifetime is
inversely proportional to its switching probability *p*. Sign-off has to assume the worst
*p* of any element of a kind for every element of that kind. In a processor, writes are
spread very unevenly:

* ALU 0 runs most instructions because a fixed-priority scheduler always tries it first.
* `RAX`, the flags, the stack pointer and `ZMM0` take far more writes than other registers.
* A few cache sets or TLB sets take most of the line fills and stores.

The few hot elements set the EM budget for all the cold ones.

The design here changes *where* work lands, not how much work there is. The cycle-by-cycle
function stays the same, but over time every physical element takes the same share:

| Structure | Mechanism | Module |
|---|---|---|
| ALUs | each cycle, allocation starts at a different ALU | `alu_alloc_em` (one bit per ALU) or `alu_alloc_counter` (free-running counter) |
| Register files | the mapping from architectural to physical register turns by one place now and then, and the values move with it | `em_regfile` + `mod_rotator` |
| Caches, TLBs | the mapping from index to physical set turns by one place now and then, and the cache is invalidated | `em_cache` + `mod_rotator` |
| Rotation timing | a pulse every *N* cycles or accesses, or on a system event that already disturbs the structure | `rotate_trigger` |

`em_aware_core_top` puts these together for one core:

* three ALUs;
* 32 GPRs, plus the flags and the stack pointer;
* 32 × 512-bit vector registers;
* a 32 KiB 8-way L1-D and a 32 KiB 4-way L1-I;
* a 256 KiB 8-way L2 and an 8 MiB 16-way L3;
* a 64-entry 4-way D-TLB;
* rotation every 10 million events.

The out-of-order core around these structures is not included. That means the instruction
window, the ALUs themselves, miss handling, and the CR3 and interrupt logic. The top takes
the core's signals as ports.

All files are SystemVerilog 2017. Each file's header comment states what follows the
published scheme and what is a choice made here.

## 1. Allocating ALUs so that none is favoured

A scheduler that always tries ALU 0 first gives ALU 0 every instruction when one
instruction issues per cycle. Two allocators remove the fixed starting point. Both
interfaces are combinational: the scheduler presents `k`, the number of ALU instructions
ready this cycle, and gets back in the same cycle:

* `grant[i]`: ALU *i* is used;
* `slot_alu[j]`: the ALU given to the *j*-th instruction.

State changes at the clock edge.

**Counter option (`alu_alloc_counter`).** A 32-bit counter increments every cycle and wraps.
The leading ALU is `counter mod 3`. The *k* instructions take the leading ALU and the ones
after it, cyclically. The logic is simple, but the mod-3 of a 32-bit value is the larger of
the two circuits. The wrap from 2³²−1 to 0 breaks the cycle once, which does not matter.

**One-bit option, Algorithm 1 (`alu_alloc_em`, the default).** This is the part that needs
careful reading. Each ALU has one bit `ex[i]`, and the allocator has one global bit `g`. Let
*M* be the ALUs whose bit equals `g`: those not yet used in the current "round".

* If *k* < |*M*|: grant the *k* lowest-numbered members of *M* and flip their bits. The
  round continues.
* If *k* ≥ |*M*|: grant all of *M*, plus the *k*−|*M*| lowest-numbered ALUs outside it.
  Flip every granted bit and flip `g`. The round is complete. The extra ALUs taken from
  outside *M* now count as already used in the new round.

Every ALU is therefore used exactly once per round, so at any moment the use counts of any
two ALUs differ by at most one. The testbench checks this over 20 000 random cycles.
Worked example (ALUs 2,1,0; bits shown as `ex[2],ex[1],ex[0]`):

| cycle | k | granted, in slot order | ex after | g after |
|---|---|---|---|---|
| 0 | 0 | — | 0,0,0 | 0 |
| 1 | 2 | 0, 1 | 0,1,1 | 0 |
| 2 | 2 | 2, 0 | 1,1,0 | 1 |
| 3 | 3 | 1, 2, 0 | 0,0,1 | 0 |

The published prose for the second case says that only the bits equal to the global bit
are incremented. The published algorithm listing and its worked example flip every granted
bit. This RTL follows the listing and the example; the prose version would not reproduce
cycle 2. Members of *M* come first in the slot order, then the others, lowest index first in
both groups; this order reproduces the example exactly. *k* = 3 = *N* is allowed (the example
uses it), and a larger *k* is clamped. An assertion checks that the number of grants always
equals *k*.

## 2. Rotating register files

`em_regfile` (Figure-9 structure). The physical register of architectural register *a* is

    phys(a) = (a + rot) mod N_REGS

`rot` is a modulo counter, the *RF rotator*, held in `mod_rotator`. Every physical register
`R[i]` has a 2-to-1 multiplexer in front of it. One input is the write port; the other is
its neighbour `R[i-1]`, and `R[0]` takes `R[N-1]`. A rotate pulse does two things in one
cycle:

* every register loads its neighbour;
* `rot` increments.

Each value moves up one place at the same moment as its mapping, so software sees no change.
A register written at a high rate (RAX, flags) thus wears each physical register in turn.
Read ports apply the same adder to the read address.

Details chosen here:

* **Write in the rotation cycle.** The value goes straight to the register it would occupy
  after the shift, `(a + rot + 1) mod N`, through that register's write-port input. The
  rotator provides this sum as `phys_next`. Nothing stalls.
* **Reads in the rotation cycle** see the old mapping and the old contents. Both agree.
* **Non-power-of-two sizes work.** The integer file in the top has 34 entries: 32 GPRs plus
  flags (id 32) and stack pointer (id 33). The modulo adder uses one conditional subtraction.
* Two read ports, one write port, reset to zero.

The FP/vector file (32 × 512 bits) uses the same module and the same trigger.

**Cost of a rotation.** One cycle of register loads. At the interval of one rotation per
10⁷ cycles, the register file spends about 10⁻⁷ of its write energy on rotation.

## 3. Rotating caches and TLBs

`em_cache` (Figure-10 structure). The address splits into tag, index and offset. The
physical set is

    set = (index + rot) mod SETS

SETS is a power of two, so the modulo is simply the adder's carry-out being dropped. Moving
cache contents the way the register file moves registers would be too costly. Instead, a
rotate pulse increments `rot` **and invalidates every line in the same cycle**. No line can
then be found under a stale mapping, and the stored tag does not need to include the index
or the rotation. Over many rotations the lines of a hot index are filled into every
physical set in turn.

The rest of the array is the simplest complete one:

* a separate tag array, data array and valid vector for each way, as in a way-sliced SRAM;
* combinational lookup (`hit`, `hit_way`, `rdata` in the request cycle);
* store on hit, with chunk enables;
* line fill into the matching way, else an invalid way, else a round-robin victim pointer;
* `flush` invalidates without rotating.

The array is **write-through**: it keeps no dirty bits, so invalidation never loses data and
no write-back sequence is needed before a rotation. In a write-back cache, dirty lines would
have to be written back first. That is why the rotation should be rare or tied to an event
that flushes anyway. The write-back sequencer is not built here.

A TLB is the same module: offset = 12-bit page offset, entry = 36-bit physical page number.

In the top, each structure rotates on:

| structure | periodic source | event source |
|---|---|---|
| register files | every `RF_PERIOD` = 10⁷ clock cycles | CR3 write, return from interrupt |
| D-TLB | every 10⁷ D-TLB lookups | system TLB flush |
| L1-D, L1-I | every 10⁷ accesses of its own | — |
| L2, L3 | every 10⁷ accesses of its own | wake-up from sleep |

`rotate_trigger` counts its event strobe and pulses one cycle after the `PERIOD`-th event.
An external event pulses immediately and restarts the count. With `em_enable` low, every
rotation is frozen and the structures behave like conventional fixed-mapping ones.
`rot_pulse` reports each rotation. The L1-I trigger rule was not given in the source, so the
L1-D rule is reused. The freeze input is an addition made here.

## 4. Top-level interface (`em_aware_core_top`)

* **Clocking and timing.** All lookups are combinational; all state changes on the rising
  clock edge. Reset is synchronous and active-low.
* **Allocator choice.** `ALU_ALLOC` is `ALLOC_EM_BITS` (default) or `ALLOC_COUNTER`.
* **Port bundles.** Cache and TLB ports are packed structs from `em_pkg`: `line_req_t`
  (valid, addr, write, wdata, byte enables), `line_fill_t`, `line_resp_t`, `tlb_req_t`,
  `tlb_fill_t`, `tlb_resp_t`.
* **Widths and sizes.** Line width, address width and register widths come from `em_pkg`.
  Sizes (sets, ways, register counts, periods) are parameters of the top.
* **What the surrounding core provides:** the ready count `alu_k` and the executing ALUs; the
  refills on the `*_fill` ports; and one-cycle strobes `cr3_write`, `iret`, `tlb_flush` and
  `sleep_wakeup`.
* **No path between the cache levels.** Each cache is an independent array, because the
  scheme changes only the set mapping inside each one.

## 5. Sizes

| structure | configuration | rotator |
|---|---|---|
| ALUs | 3, single cycle | 1 bit per ALU + 1 global bit (or a 32-bit counter) |
| integer RF | 34 × 64 b (32 GPR + flags + SP) | 6 bits, mod 34 |
| FP/vector RF | 32 × 512 b | 5 bits |
| L1-D | 64 sets × 8 ways × 64 B | 6 bits |
| L1-I | 128 × 4 × 64 B | 7 bits |
| L2 | 512 × 8 × 64 B | 9 bits |
| L3 | 8192 × 16 × 64 B (8 MiB) | 13 bits |
| D-TLB | 16 × 4 entries | 4 bits |
| trigger | period 10 000 000 | 24-bit counter |

All defaults are the full published configuration; nothing is scaled down. The evaluation
workloads (SPEC CPU2017) ran on a complete x86 core model and cannot be run on these
structures alone.

## 6. How far to trust it, and where it departs from the source

Exact to the published scheme:

* Algorithm 1, including its worked example;
* the counter option;
* the register-file shift chain and adder mapping;
* the cache index adder with invalidate-on-rotation;
* all sizes and the 10⁷ rotation interval.

Choices made here, because the source leaves them open:

* register widths and port counts;
* the order of the slot outputs;
* the handling of a write or fill in the rotation cycle;
* cache replacement, write-through policy and lookup timing;
* the restart-on-event rule and registered pulse of the trigger;
* the L1-I trigger rule;
* the `em_enable` freeze.

Not built: the ALUs, the scheduler, the out-of-order core, miss handling between cache levels,
and a dirty-line write-back before invalidation.

What the testbenches show:

* per module: comparison against independent reference models, and direct checks of physical
  placement through the internal arrays;
* at the top level: 20 000 cycles of mixed random traffic at reduced sizes, with every
  rotation source counted, every output predicted, and the ALU balance checked;
* at full size: one complete pass through every structure.

Physical effects (toggle rates, current, lifetime) are outside what RTL simulation can show.

## 7. Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and ends with `$finish`. With
Verilator 5, run from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Wno-fatal -y rtl -Irtl rtl/em_pkg.sv \
        tb/tb_em_aware_core_top.sv --top-module tb_em_aware_core_top -o sim
    ./obj_dir/sim

| testbench | what it runs |
|---|---|
| `tb_alu_alloc_em` | worked example, 20 000 random cycles against a reference model, balance |
| `tb_alu_alloc_counter` | cycle-exact check against a counter model, wrap of a 4-bit instance, balance |
| `tb_rotate_trigger` | pulse timing for a period of 7 with random strobes, events, enable |
| `tb_mod_rotator` | mod-34 and mod-64 mapping |
| `tb_em_regfile` | random traffic with rotations, physical placement, hot-register spread over all 34 registers |
| `tb_em_cache` | write-through model, invalidate on rotate, placement in set index+rot, eviction, hot-index spread over all sets |
| `tb_em_aware_core_top` | end-to-end at reduced sizes, two instances (one per allocator), counts of every mechanism |
| `tb_em_aware_core_top_full` | one complete operation at full default sizes (8 MiB L3); builds in about 10 s |
| `tb_em_hotspot` | skewed write traffic with rotation off and on; compares the busiest physical element's write count |

To change a size, override the parameters of `em_aware_core_top`. To change a width, edit
`em_pkg`. The `ALU_ALLOC` parameter selects the allocator.
