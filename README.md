# ISER: recomputing shadowed loads instead of delaying them

Spectre-style attacks work because a load that runs down a wrong path still
changes the caches, and the attacker can later measure those changes.
*Delay-on-Miss* blocks this with a simple rule. While a load is still
speculative, it may read the L1 if it hits there. If it misses, it must wait
until it is no longer speculative. That wait costs about an eighth of the
performance of an unprotected core. Value prediction does not win this back.
A predicted value must still be checked against memory later. Those checks
happen one after another, so the parallelism among memory misses is lost
anyway.

ISER takes a different route. For many loads the compiler can write down how
the stored value was produced: a short chain of arithmetic and logic
instructions, called a *slice*. When such a load is speculative and misses
in the L1, the core runs the slice again on the spot. The slice uses its own
instruction buffer, rename table and scratch registers. It never touches
memory, so it leaves no trace an attacker could observe. A recomputed value
is not a guess. It never has to be checked against memory, so the load
completes as soon as the slice finishes.

This repository holds synthesizable SystemVerilog for the ISER hardware:

- shadow tracking, which decides when a load is speculative;
- the per-load decision between loading, delaying and recomputing;
- the engine that executes slices;
- self-checking testbenches for every block and for the whole.

The out-of-order core, the caches and the compiler that forms slices are not
included. Their signals are the ports of the top module, `iser_top`.

## 1. Program-level view: RCMP, REC and RTN

The compiler changes the program in three ways.

- **RCMP** replaces a load whose value can be recomputed. It carries the
  load's normal operands plus the entry address of its slice. In hardware it
  acts as a load, or as a jump into the slice (see section 3).
- **RTN** ends a slice. Its source register holds the recomputed value, which
  goes to the RCMP's destination register.
- **REC** follows any instruction whose result a slice will need later but
  which may be overwritten by then. REC copies that value into the
  **History table** (Hist). The entry is named by the address of the slice
  instruction that will read it, the *leaf*.

A slice holds only arithmetic and logic instructions: no loads, stores or
branches. Loops are unrolled. The slice instructions sit at consecutive
addresses S, S+1, S+2, and so on.

Example: the value `sumArr[2]` was computed by a loop over `i` and `j`, then
stored. Its slice is the unrolled loop body. The two loop inputs were saved by
`REC(i, S+1)` and `REC(j, S+2)` when they were produced:

| addr  | meaning                | encoding used here                       |
|-------|------------------------|------------------------------------------|
| S     | `int recArr[3]`        | `NOP`                                    |
| S+1   | read i (from Hist)     | `MOV r1 <- hist[S+1].slot0`              |
| S+2   | read j (from Hist)     | `MOV r2 <- hist[S+2].slot0`              |
| S+3   | `recArr[0] = i + j`    | `ADD r3 <- r1 + r2`                      |
| S+4   | `i++`                  | `ADD r1 <- r1 + 1`                       |
| S+5   | `j = i * j`            | `MUL r2 <- r1 * r2`                      |
| S+6   | `recArr[1] = i + j`    | `ADD r4 <- r1 + r2`                      |
| S+7   | `i++`                  | `ADD r1 <- r1 + 1`                       |
| S+8   | `j = i * j`            | `MUL r2 <- r1 * r2`                      |
| S+9   | `recArr[2] = i + j`    | `ADD r5 <- r1 + r2`                      |
| S+10  | `RTN recArr[2]`        | `RTN r5`                                 |

With i = 0 the result is 2 + 2j. The engine here returns it in 11 cycles
once the slice is in the instruction buffer. Several testbenches run this
exact slice.

## 2. When is a load speculative? Shadow tracking

Some instructions may still turn out to be wrong, and they make every
younger instruction speculative. Such an instruction *casts a shadow*:

- an unresolved branch;
- an instruction that may still raise an exception;
- a store whose address is not yet known;
- a load that may break memory ordering.

The core reports, for each instruction it dispatches, whether it casts a
shadow and whether it is a load. It reports later when a shadow resolves.

Two FIFOs track this without any associative search:

- **Shadow buffer** (`shadow_buffer`, 64 entries). One entry per shadow
  caster, allocated in program order. An entry is marked resolved when its
  shadow lifts. Resolved entries leave from the head in order, one per
  cycle. Entries are named by 16-bit sequence numbers that wrap around.
- **Release queue** (`release_queue`, 64 entries). A load dispatched while
  the shadow buffer is not empty is shadowed. It gets a release-queue entry
  tagged with the shadow buffer's *tail*, the sequence number the next
  caster would receive. All shadows older than the load have sequence numbers
  below that tag. The load is free once the shadow-buffer head has moved past
  them:

      release when   (sb_head - tag) >= 0   (signed, 16-bit)

  Only the queue head is compared, and at most one load leaves per cycle.
  Loads are therefore released in program order. That is correct, because
  a younger load is never less shadowed than an older one.

A load dispatched while the shadow buffer is empty is not shadowed at all.
If an instruction both casts a shadow and is a load, the load is checked
before its own entry is added. Its own shadow covers only younger
instructions.

On a misprediction the core sends a squash with two sequence numbers, one
for each structure. Everything from that point on is dropped: the shadow
buffer's tail and the release queue's tail are reset.

Timing: dispatch is accepted combinationally (`disp_ready`). The entries
appear in the next cycle. A resolved head leaves the shadow buffer one cycle
after it is marked. A waiting load is released the cycle after the head
passes its tag.

## 3. The RCMP decision

When an RCMP executes, the core reports whether the address hit in the L1
and whether an MSHR already tracks the line. `rcmp_unit` then decides in the
same cycle:

| shadowed? | L1 hit? | MSHR hit? | slice given? | engine free? | outcome                    |
|-----------|---------|-----------|--------------|--------------|----------------------------|
| no        | any     | any       | any          | any          | perform the load           |
| yes       | yes     | any       | any          | any          | perform the load           |
| yes       | no      | yes       | any          | any          | perform the load           |
| yes       | no      | no        | yes          | yes          | **recompute**              |
| yes       | no      | no        | no           | any          | delay until released       |
| yes       | no      | no        | yes          | no           | delay until released       |

An MSHR hit counts as a hit. The line is already being fetched by an older
access, so waiting for it reveals nothing new. "Shadowed" is asked of the
release queue: is this load's entry still waiting? A delayed load is
performed by the core once `release_valid` names it.

## 4. Executing a slice: `recompute_engine`

The engine runs one slice at a time. It executes one instruction per cycle,
because every instruction of a slice depends on the one before it. There are
five parts:

```
             +--------+    +-------------+
 fetch  ---->| stage  |--->|    IBuff    |---+
 (fills)     +--------+    +-------------+   |  instruction at pc
                  \______________________ ___|
                                         v
      Hist (leaf addr -> inputs) --> operand select <-- core register file
      rename (reg -> SFile idx)  -->      |                (live inputs)
      SFile (scratch registers)  -->      v
                                         ALU ----> SFile[new entry]
                                          |
                                   RTN: value out
```

Each cycle the engine:

1. **Fetches the instruction at `pc`.** It looks in the IBuff (128 entries,
   direct-mapped, full-address tag) and in the staging buffer (section 5).
   If the instruction is in neither, it raises `fill_req` with the address
   and stalls until the core's fetch logic supplies it on `fill_*`.
2. **Reads up to two sources**, each from one of three places:
   - the **Hist** entry of this instruction's own address, if the source is
     flagged as checkpointed (slot 0 for the first source, slot 1 for the
     second);
   - the **SFile**, if an earlier instruction of this slice wrote that
     register;
   - otherwise the core's register file, a *live* value (`live_areg` out,
     `live_data` in, combinationally).
3. **Executes** on a single-cycle ALU. It gives the destination register a
   fresh SFile entry, writes the result there and remaps the register. Nothing
   reaches the core's registers or memory.
4. **RTN** ends the slice. Its first source goes out on `rc_done_data`
   together with the load's id. The core writes it to the RCMP's destination
   register and wakes up consumers.

The rename table (`slice_rename`) and the SFile (`sfile`, 32 entries) are
cleared when a slice starts. The rename table frees the old SFile entry of a
register when the register is written again. The SFile therefore never needs
more entries than there are architectural registers.

**Cycle count.** The start is cycle 0. The instruction at S is handled in
cycle 1. A slice of N instructions, RTN included, finishes in cycle N if
every instruction hits. Each miss adds the fill latency. `rc_done_cycles`
reports the count.

**Giving up.** A recomputation ends without a value, and the load is simply
delayed until released, in four cases (`rc_abort_cause`):

- `AB_EXCEPTION`: a slice instruction raised an exception. With the
  operations defined here, the only exception is an opcode outside the
  defined set (codes 11 to 14).

- `AB_HIST_MISS`: a checkpointed input is missing from Hist. It was never
  recorded, or another leaf replaced it.
- `AB_TOO_LONG`: no RTN within `MAX_LEN` (100) instructions.
- `AB_SQUASH`: the RCMP itself was squashed. This is detected when the squash
  point in the release queue is at or before the RCMP's entry.

**History table** (`hist_table`): 1024 entries, direct-mapped on the low
bits of the leaf address. Each entry stores the full 48-bit leaf address and
two 64-bit input slots with a valid bit each. A REC for the leaf already
present fills one slot. A REC for a different leaf replaces the entry. This
comes to 1024 × 22 bytes = 22 KiB. RECs arrive on `rec_*` only when they
commit.

## 5. Keeping recomputation invisible: the staging buffer

Every recomputation runs for a load that is still speculative. Suppose its
instruction fetches went straight into the IBuff. A misspeculated load would
then leave a footprint: a later run of the same slice would be faster. So
the rule is that IBuff and Hist change only on behalf of non-speculative
instructions. Hist meets it by accepting committed RECs only. The IBuff
meets it through `ibuff_stage`:

- Fills during a recomputation go into a 100-entry staging buffer. It is
  indexed by the offset from the slice's entry address.
- The engine reads the stage next to the IBuff, so the running slice (and
  any rerun of the same slice) uses the fetched instructions at once.
- When the owning load leaves the release queue, the staged instructions are
  copied into the IBuff, one per cycle, while no slice runs. An RCMP arriving
  during this copy is delayed (`rc_busy` is high).
- If the owning load is squashed, or a slice at another address is started
  first, the staged instructions are dropped. The only cost is a refetch.

If the same slice runs again before the release, the younger load becomes
the owner. Loads leave the release queue in order, so this can only postpone
the copy, never bring it forward.

## 6. Slice instruction format (`slice_instr_t`, 51 bits)

| field       | bits | meaning                                                   |
|-------------|------|-----------------------------------------------------------|
| `op`        | 4    | NOP, MOV, ADD, SUB, MUL, AND, OR, XOR, SHL, SHR, SAR, RTN |
| `dst`       | 4    | destination architectural register                        |
| `src1`      | 4    | first source register                                     |
| `src2`      | 4    | second source register                                    |
| `src1_hist` | 1    | first source comes from Hist slot 0 of this address       |
| `src2_hist` | 1    | second source comes from Hist slot 1 of this address      |
| `use_imm`   | 1    | second operand (or MOV source) is `imm`                    |
| `imm`       | 32   | sign-extended to 64 bits                                  |

MUL keeps the low 64 bits. Shifts use the low 6 bits of the amount. RTN
returns `src1`. Codes 11 to 14 are undefined. Reaching one raises an
exception, and the load is then delayed instead. The encoding belongs to this design; a real ISA would carry
the same information in its own format.

## 7. Sizes and where they come from

| parameter (`iser_pkg`) | value | origin                                                          |
|------------------------|-------|-----------------------------------------------------------------|
| `MAX_SLICE_LEN`        | 100   | slice length limit used when slices are formed                  |
| `HIST_ENTRIES`         | 1024  | derived: a 22 KiB history table at 22 bytes per entry           |
| `HIST_INPUTS`          | 2     | own choice: one slot per source of a two-source instruction     |
| `IBUFF_ENTRIES`        | 128   | own choice: one longest slice without conflicts                 |
| `SFILE_ENTRIES`        | 32    | own choice: twice the architectural registers                   |
| `SB_ENTRIES`           | 64    | own choice                                                      |
| `RQ_ENTRIES`           | 64    | own choice                                                      |
| `DATA_W`, `NUM_AREGS`  | 64, 16 | x86-64 integer registers                                       |
| `ADDR_W`               | 48    | x86-64 virtual address width                                    |

`iser_top` takes `SB_N`, `RQ_N`, `IB_N`, `HIST_N`, `SF_N` and `MAX_LEN`,
which default to the values above. The evaluation that motivates ISER also
studies a variant in which every slice is cut to two cycles.
`iser_top #(.MAX_LEN(2))` is that variant: longer slices give up at once
(`AB_TOO_LONG`) and their loads are delayed.

Reported behaviour on SPEC CPU2006:

- a slice costs 7 cycles on average;
- 43 % of shadowed L1 misses can be recomputed;
- performance is 93 % of an unprotected core, against 88 % for plain
  Delay-on-Miss.

These are measurements of a full system, not properties of this RTL.

## 8. `iser_top` interface

All ports are synchronous to `clk`. `rst_n` is a synchronous, active-low
reset. Sequence numbers are `SEQ_W` = 16 bits, load ids 8 bits.

| group        | dir | what it carries                                                            |
|--------------|-----|----------------------------------------------------------------------------|
| `disp_*`     | in/out | one instruction entering the ROB: `casts_shadow`, `is_load`, `load_id`; returns `ready`, its shadow-buffer and release-queue sequence numbers, and whether the load is shadowed |
| `resolve_*`  | in  | a shadow lifted (shadow-buffer sequence number)                             |
| `squash_*`   | in  | drop everything from these shadow-buffer / release-queue points on           |
| `release_*`  | out | a shadowed load left all its shadows; a delayed load may now be performed   |
| `rcmp_*`, `l1_hit`, `mshr_hit` | in | an RCMP at execute: load id, its release-queue entry, slice address; `rcmp_decision` out in the same cycle |
| `rec_*`      | in  | a committed REC: leaf address, slot, value                                  |
| `fill_*`     | out/in | slice instruction request and the fetched instruction                    |
| `live_areg`, `live_data` | out/in | register-file reads for live slice inputs (combinational) |
| `rc_done_*`  | out | recomputed value, load id, cycles taken                                     |
| `rc_abort_*` | out | recomputation abandoned and why; the load is delayed instead                |
| `rc_busy`    | out | a slice runs, or released instructions are being copied into the IBuff      |

## 9. Where this design departs from the original proposal

- **Bandwidth.** The design accepts one dispatch, one shadow resolution, one
  RCMP and one release per cycle. The evaluated core is 8-wide. Widening
  needs more allocate and resolve ports on both FIFOs.
- **One slice at a time.** An RCMP that finds the engine busy is delayed,
  not queued.
- **Release rule.** In the original formulation a load stays speculative
  while the shadow-buffer head is unresolved and differs from the load's
  entry. This design tags the load with the next free shadow-buffer slot and
  waits until the head reaches it. This gives the same release point, without
  a one-cycle window in which a resolved head with unresolved entries behind
  it could free a load early.
- **History inputs.** Two input slots per leaf. The original drawing shows
  three.
- **Hist conflicts.** Hist is direct-mapped, so two live leaves with the same
  low address bits evict each other. The later RCMP then falls back to
  delaying.
- **Giving up.** The original only says that an exception during
  recomputation falls back to delaying (`AB_EXCEPTION` here). The same
  fallback is used here for a missing Hist input, an over-long slice and a
  squash.
- **Staging of IBuff fills.** The original states the rule that IBuff changes
  wait for non-speculation, but not how. The staging buffer and its policies
  are this design's own.
- **Not built.** The proposal also sketches an extension for values that
  could change: store-address signatures in Bloom filters, and callbacks for
  remote writes. It leaves the mechanism open, and the evaluated system does
  not include it, so it is not built. The value predictor and the oracle
  configurations used for comparison are not built either.

## 10. Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<m>` and ends with
`$finish`. A watchdog ends a run that hangs and counts it as a failure. The
package must be compiled first:

```sh
verilator --binary --timing --assert -Irtl --top tb_iser_top \
    rtl/iser_pkg.sv $(ls rtl/*.sv | grep -v iser_pkg) tb/tb_iser_top.sv
./obj_dir/Vtb_iser_top
```

Replace `tb_iser_top` with any testbench name. The build gives no warnings
with these flags. With `-Wall`, the only RTL notes are about outputs left
unconnected on purpose and one unused constant.

| testbench             | what it checks                                                                                      |
|-----------------------|------------------------------------------------------------------------------------------------------|
| `tb_iser_top`         | full-size top, end to end. Every RCMP path is taken: unshadowed, L1 hit, MSHR hit, recompute, delay without slice, delay with engine busy. It also covers the Hist-miss fallback, the exception fallback, squash of a running slice, fill stalls, in-order release, a full shadow buffer, fetches of a squashed load never reaching the IBuff, and a released load warming it. Each of these is counted, and one that never happens fails. A 4000-cycle random run checks every release against a reference model. |
| `tb_iser_workloads`   | default top next to a `MAX_LEN = 2` copy. Runs the sumArr slice, a 7-instruction slice, a 100-instruction slice (100 cycles) and a 101-instruction slice (abandoned). It also runs 1024 slices whose inputs are all recorded first: a full History table, each entry holding two inputs. Values and cycle counts are checked. |
| `tb_recompute_engine` | slice execution. Covers the sumArr example in 11 cycles, live inputs, a missing Hist input, an undefined opcode (exception), fill stalls, an over-long slice, a squash, and the staging rules. |
| `tb_ibuff_stage`      | random starts, fills, releases and squashes against a reference model                               |
| `tb_shadow_buffer`, `tb_release_queue` | random traffic with squashes against reference models                             |
| `tb_rcmp_unit`        | all 128 input combinations                                                                           |
| `tb_ibuff`, `tb_hist_table`, `tb_slice_rename`, `tb_sfile`, `tb_slice_alu` | random traffic against reference models                          |

Unit testbenches of tables run smaller sizes than the defaults, so that
conflicts and wrap-around occur often. `tb_iser_top` and
`tb_iser_workloads` use the default sizes.

## 11. Files

`rtl/` holds one module or package per file. `iser_pkg.sv` contains the
types and sizes. `iser_top.sv` joins `shadow_buffer`, `release_queue`,
`rcmp_unit` and `recompute_engine`. The engine contains `ibuff`,
`ibuff_stage`, `hist_table`, `slice_rename`, `sfile` and `slice_alu`. Each
file opens with a description of its behaviour, interface and timing. That
description also says which parts follow the original proposal and which
are this design's own choices.
