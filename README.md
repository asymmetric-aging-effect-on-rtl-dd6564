# Keeping idle logic moving: RTL for aging-aware execution units, registers and caches

Bias temperature instability (BTI) slowly raises the threshold voltage of a
transistor whose gate is held at one level. When a circuit holds the same
value for hours or weeks, some of its transistors age and others do not, so
rising and falling edges, and parallel paths, drift apart in delay. This
*asymmetric* aging can break setup and hold timing that was met at sign-off,
and no clock margin repairs a hold violation.

In a processor the worst cases are circuits that are rarely or never
exercised by the running program:

* execution units that a workload never uses (the FP units under an
  integer-only program), whose clock-gated input registers freeze the whole
  datapath;
* architectural and control registers written once (control registers,
  MSRs, x87 state, segment and debug registers, unused vector registers);
* cache lines that hold the same data for a long time, or are never filled,
  in machines that run one program for a long time (embedded controllers,
  servers with a fixed job).

This RTL implements three low-rate mechanisms that keep such circuits
toggling, at a cost of a few thousand gates each:

1. **PRBS injection into idle execution units.** While a unit is idle, its
   operand registers load pseudorandom patterns at a slow clock rate (1 MHz
   here), so the datapath behind them sees changing values.
2. **Register rotation.** A bank of registers is addressed through a
   rotating modulo mapping. Every rotation shifts all values one slot along,
   so a constant register value wanders through all physical slots.
3. **Swap-shift set remapping with PRBS fill for caches.** The set index of
   each cache is remapped one swap at a time. Each swap invalidates two
   physical sets and writes pseudorandom data into them. The constant
   contents thereby move across the array, and unused sets do not stay
   frozen.

The blocks are generic. Their default parameters describe a 2.66 GHz
out-of-order x86-64 core with one FP add/sub and one FP mul/div unit, and
with 64-byte-line caches: L1-D 32 KB 8-way, L1-I 32 KB 4-way, L2 256 KB
8-way and L3 8 MB 16-way.

## What is in the RTL, and what is not

`aging_aware_core` is the top. It holds all the mitigation logic for one core
and none of the logic being protected:

| module | role |
|---|---|
| `aging_pkg` | shared sizes, rates, cache geometry table, PRBS polynomial |
| `prbs_gen` | parallel PRBS-31 generator (x^31 + x^28 + 1), WIDTH bits per step |
| `slow_tick_gen` | the slow injection clock, as an enable pulse every 2660 cycles |
| `exec_unit_guard` | operand muxes and clock-gated operand registers of one execution unit |
| `periodic_trigger` | "every N events, or now" trigger for rotation and shifting |
| `rotating_regfile` | register bank with the rotator, the ID adder and the shift muxes |
| `set_remap` | set-shift and set-swap counters and the index remapping function |
| `cache_aging_guard` | per-cache front end: remap, pipeline register, swap/fill sequencer, PRBS write mux |
| `aging_aware_core` | two FP guards, one 32 x 64 rotating bank, four cache guards |

Several parts are not included and appear only as ports of the top. These
are the FP units themselves, the cache data, tag and replacement arrays, and
the pipeline that issues operations and cache requests. The FP operand
registers (`fpu_op_q`) are meant to drive the FP units. The `arr_*` outputs
are meant to drive the cache set arrays.

## Execution units: injection at the slow clock

```
 op_in[k] ──►┐
             │mux├──► op_q[k] register ──► execution unit
 PRBS slice ►┘        (loads on issue | tick)
```

Each operand register of the guarded unit is fed by a 2:1 mux. When the
unit is issued an operation (`issue`), the register loads the issued
operand, exactly as before. In every other cycle the register is gated,
except on a slow-clock `tick`. On a tick it loads a fresh slice of the PRBS
pattern, and the generator advances. Issue always wins over a tick.

* Both operands take different 64-bit slices of one 128-bit pattern. If
  they took the same pattern, an adder would only ever see `a + a`, and its
  alignment shifter would stay static.
* `op_real_q` marks a register content that came from issue. A result
  computed from an injected pattern must be discarded. In a real pipeline
  the issue valid bit travels with the operation, and this output stands in
  for it.
* At the default rate (one pattern every 2660 cycles) the extra switching
  is about 1/2660 of a fully active unit.

The slow clock is not a second clock domain. `slow_tick_gen` divides the
core clock and produces a one-cycle enable. The operand-register load
enable `issue | tick` is where a clock-gating cell would sit. This RTL
writes it as a flop enable, which synthesis turns into a gated clock.

A one-million-cycle idle run (`tb_fp_idle_workload`) gives every one of the
128 operand bits a signal probability between 0.38 and 0.54, with a mean of
0.500. Without the guard every bit would sit at 0 or 1 for the whole run.
The guard cannot reach nodes deep inside the unit that the operands do not
control, such as the zero-padded bits of an adder's result shifter. Those
nodes would need PRBS forced into the unit itself, which is outside this
RTL.

## Registers: the rotating mapping

`rotating_regfile` keeps NREGS registers in slots 0..NREGS-1 and an
NREGS-modulo counter `rot` (the *RF rotator*). Every port is addressed by
architectural register ID, and the slot is

```
slot(id) = (id + rot) mod NREGS
```

A one-cycle `rotate` pulse does two things at the same clock edge:

* every slot k loads slot k-1, and slot 0 loads slot NREGS-1;
* `rot` increments.

The value of register `id` therefore moves from slot `id + rot` to slot
`id + rot + 1`, which is exactly where the new mapping looks for it. To
software the register file is unchanged, while each constant value visits
every slot once per NREGS rotations. A rotation moves one slot per register.
It is not a bulk window switch, so it applies to any register group (control,
FP, vector) and costs one mux per register bit.

Timing and corner cases:

* Reads are combinational and use the current `rot`.
* A write in the same cycle as a rotation is aimed at the slot of the *new*
  mapping. It is kept, and the shift does not overwrite it.
* In the top, `rotate` comes from `periodic_trigger`. It fires every
  10,000,000 cycles, and also one cycle after a CR3 write (`cr3_write`) or a
  return from interrupt (`iret`). Each trigger restarts the 10-million-cycle
  count. The trigger is registered, so a rotation takes effect two clock
  edges after the event.

## Caches: swap-shift remapping

This is the least obvious part of the design.

### The map

For a cache with N sets, two counters define where logical set L lives:

* `S`, the set-shift counter, counts completed rotations of the whole map
  (0..N-1).
* `m`, the set-swap counter, counts swaps done in the current rotation
  (0..N-2).

First rotate: `r = (L - S) mod N`. Then apply the swaps of the current round:

```
r == 0        -> physical m        the set that is being moved down
1 <= r <= m   -> physical r - 1    swapped region: moved up by one
r >  m        -> physical r        unswapped region
```

Each swap exchanges physical sets m and m+1 and then increments m. The set
that began the round at physical 0 moves down one set per swap. After N-1
swaps it has reached the last set, and the map equals one more plain
rotation. At that point m wraps to 0 and S increments. S wraps after N
rotations, so the map returns to the identity after N·(N-1) swaps.

Example, N = 8, S = 0:

| swaps m | physical 0..7 hold logical sets |
|---|---|
| 0 | 0 1 2 3 4 5 6 7 |
| 3 | 1 2 3 0 4 5 6 7 |
| 7 (= N-1) | 1 2 3 4 5 6 7 0, which is S = 1, m = 0 |
| S = 1, m = 2 | 2 3 1 4 5 6 7 0 |

In hardware this is one modular subtraction, one comparison of the rotated
index against m, one equality test and a decrement, followed by a mux. It is
a few gate levels on an index of 6 to 13 bits.

### A swap, cycle by cycle

`cache_aging_guard` sits one pipeline stage before the cache array (the
address-generation / memory-order-buffer stage). This keeps the remapping
delay off the array access path. Requests use a valid/ready handshake, and
each accepted request leaves on the `arr_*` port one cycle later, with its
physical set index.

`periodic_trigger` counts accepted requests and fires after 10,000,000 of
them, or one cycle after `shift_force`. A swap then runs as follows:

| cycle | `req_ready` | array port next cycle |
|---|---|---|
| t (trigger registered) | 1 | request of cycle t, old map |
| t+1 (swap pending) | 0 | set m: `arr_inval`, write PRBS line to all ways; counters advance |
| t+2 | 0 | set m+1: `arr_inval`, write next PRBS line to all ways |
| t+3 | 1 | requests use the new map |

The cost is a two-cycle stall per swap: 20 cycles of stall per 100 million
accesses at the default rate.

The two swapped sets lose their contents. Their lines are invalidated
(`arr_inval` clears the valid bits of all ways of `arr_index`) and
overwritten with pseudorandom data. That data serves the second purpose:
a set that the program never fills is still toggled by the fill.

All other sets keep their contents and stay reachable. Requests accepted
before the swap reach the array before the fills, and requests after it see
the new map.

Obligations of the surrounding cache:

* Dirty lines in the two swapped sets must be written back before
  invalidation, or the cache must be write-through. This block does not see
  dirty bits.
* Tags are not written by the fill. An invalid way's tag is never used, and
  the next allocation overwrites it.
* The index port of the top is 13 bits wide for every cache, and the way
  mask is 16 bits wide. Narrower caches use the low bits, and the unused
  upper bits are zero.

## Parameters

| parameter | default | origin |
|---|---|---|
| `RF_ROTATE_PERIOD` | 10,000,000 cycles | reported as having no performance cost |
| `CACHE_SHIFT_PERIOD` | 10,000,000 accesses | reported as costing under 0.01% of cycles |
| `RF_REGS` x `XLEN` | 32 x 64 | 32 is the bank size of the reported overhead figures; 64 bits is this design's choice |
| cache sets / ways | 64/8, 128/4, 512/8, 8192/16 | derived from the cache sizes above and 64 B lines |
| `LINE_BITS` | 512 | 64-byte line |
| `SLOW_PERIOD` | 2660 cycles (1 MHz at 2.66 GHz) | "MHz or lower" is given; the value is this design's choice |
| PRBS | PRBS-31, x^31 + x^28 + 1 | this design's choice; only "a simple PRBS circuit" is specified |
| seeds | one per generator | this design's choice |

The rates are parameters of the top (`SLOW_DIV`, `ROTATE_PERIOD`,
`SHIFT_PERIOD`). The geometry comes from `aging_pkg`.

## Where this RTL departs from the published description

* **Swaps per rotation.** The published set diagram shows a full rotation
  "after n swaps". With n sets the drawn order is reached after n-1
  exchanges, and that is what this RTL does.
* **Which set moves.** The published diagram of the second round shows set 0
  moving again. Here the set moved in each round is the one that sits at
  physical 0 after the last rotation (logical set S). This keeps every round
  a plain swap-by-one, and every completed round a rotation.
* **Adder direction.** The published remapping drawing adds the shift
  counter to the index. To reproduce the drawn set orders, this RTL
  subtracts it, which is the same adder fed with the complement.
* **Unspecified details.** The fill sequencing, the stall handshake, the
  number of register read ports, write/rotate collisions, the slow-clock
  rate, the PRBS polynomial and reset values are not specified anywhere.
  They are this design's choices, listed in each file's header comment.
* **Not modelled.** Area, power and timing overheads of the original
  synthesis (28 nm, several threshold-voltage flavours) are not reproduced.
  Nor are the aging measurements on full benchmarks, which need a whole
  processor.

## Simulating

Every testbench in `tb/` is self-checking. It prints
`TB_RESULT checks=N failures=M` and stops by itself, and a watchdog ends a
hung run. With Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -y rtl \
    rtl/aging_pkg.sv tb/tb_set_remap.sv --top-module tb_set_remap
./obj_dir/Vtb_set_remap
```

| testbench | what it checks | run time |
|---|---|---|
| `tb_prbs_gen` | output stream obeys b[n] = b[n-31] ^ b[n-28], starting from the seed; holds without `advance`; PRBS-7 period of 127 | < 1 s |
| `tb_slow_tick_gen` | one-cycle tick exactly every PERIOD cycles (2660 and 5) | < 1 s |
| `tb_periodic_trigger` | counting model with random events and forced triggers; first default pulse after exactly 10,000,000 events | ~6 s |
| `tb_exec_unit_guard` | operand registers against a model: issued operands, consecutive PRBS slices on idle ticks, hold otherwise | < 1 s |
| `tb_rotating_regfile` | 32 x 64 and 5 x 16 banks: reads, rotator, the physical slot of every register, write + rotate in one cycle, every value visiting every slot | < 1 s |
| `tb_set_remap` | 64 and 6 sets against an explicit permutation model over a full period of N·(N-1) swaps; each round is a rotation; bijection | < 1 s |
| `tb_cache_aging_guard` | with a behavioural set array: request routing, fill rows and PRBS data, stall length, trigger count, and no valid line ever lost or corrupted | < 1 s |
| `tb_aging_aware_core` | whole design at its default sizes and rates. Covers FP issue and injection every 2660 cycles, rotations from CR3 writes and interrupt returns, thousands of swaps on all four caches with every swap counter wrapping, the periodic rotation after 10,000,000 cycles, and the periodic L1-D swap after 10,000,000 accesses. Counts each mechanism and fails if one never happened | ~70 s |
| `tb_cache_constant_workload` | an embedded-style loop that keeps four constant lines hot in the L1-D. At the default rate, 10,000,100 accesses give one swap and two stall cycles, 2·10^-7 of the cycles. With a trigger every 16 accesses, a full period of 64·63 swaps moves every hot line through all 64 physical sets and refreshes every set with PRBS data | ~6 s |
| `tb_fp_idle_workload` | one million idle cycles of the FP adder guard: every operand bit toggles, and its signal probability is near 0.5 | ~1 s |

The register and set-remap testbenches use a long clock half-period because
they step the combinational read ports with `#1` delays inside a cycle.

## How far to trust it

* **Checked against independent models.** The remapping function was
  checked against a model that physically swaps rows of a permutation, over
  complete periods. The register rotation was checked slot by slot. The
  PRBS output was checked against the polynomial's recurrence, not against
  a copy of the generator.
* **Known to catch faults.** Each testbench fails when one meaningful fault
  is planted in its module, for example an off-by-one comparator, a wrong
  tap, a lost trigger source, or a misdirected fill.
* **Not checked.** Behaviour with real FP units and caches attached: dirty
  line handling, interaction with misses in flight, and any timing closure.
  Those depend on the cache and pipeline this logic is added to.
