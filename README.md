# AVA: a vector unit whose vector length can grow without growing its register file

A vector processor built for short vectors (16 elements of 64 bits) has a small, cheap
register file: 64 physical registers x 16 elements = 8 KB. Programs with a lot of data
parallelism would run faster with longer vectors, but a native 128-element machine needs a
64 KB register file. AVA keeps the 8 KB file and makes the maximum vector length (MVL)
configurable between 16 and 128 elements. When the MVL grows, fewer registers fit in the file:
8 KB holds 64 registers at MVL 16, but only 8 at MVL 128. The 32 architectural registers
stay visible to software at every MVL. Registers that do not fit spill to a reserved
region of memory, the memory VRF (M-VRF). Hardware moves them back and forth, unseen by the program.

This repository holds synthesizable SystemVerilog for that vector unit: renaming, register
mapping, swap mechanism, issue, eight lanes and the memory unit. The scalar core, the caches and
the M-VRF memory itself are outside the design, and are reached through ports.

## Three kinds of register

Every vector register passes through two renaming levels.

| Name | Count | Where | Meaning |
|---|---|---|---|
| logical register | 32 | instruction encoding | what the program names (v0..v31) |
| virtual vector register (VVR) | 64 | nowhere: a name only | result of ordinary renaming; one per in-flight value |
| physical register | 64, 32, 21, 16, 12, 10, 9 or 8 | P-VRF in the lanes | storage for the VVRs currently "at home" |

**Level 1 (`rename_unit`)** is classic renaming. A 32-entry alias table (`rat`) maps logical
registers to VVRs, and a 64-entry ring (`free_list`, as FRL) hands out free VVRs. After reset,
logical register *i* is VVR *i* and VVRs 32..63 are free. Each VVR also has a valid bit. It is
cleared when the VVR is given a new value at rename and set when the producing instruction
completes. A reorder buffer (`rob`) returns the previous VVR of the destination register to the
FRL at commit.

**Level 2 (`vrf_mapping`, inside `preissue_stage`)** maps VVRs to physical registers. The PRMT
stores a physical register number for each VVR. The one-bit VRLT says whether that mapping is
live (register file) or not (memory). A second free list (PFRL) holds the free physical
registers. After reset or an MVL change, every VVR is in memory and the PFRL holds
num_pregs(MVL) registers:

    num_pregs = floor(1024 / MVL)        rows per register R = MVL / 8

This gives 64, 32, 21, 16, 12, 10, 9, 8 for MVL = 16, 32, ..., 128 (`ava_pkg::num_pregs`).

## Register file layout

Each of the 8 lanes holds a 1 KB slice: 128 entries of 64 bits (`pvrf_bank`). Element *e* of a
register lives in lane *e* mod 8, in row *e* / 8. Physical register *p* occupies entries
p*R .. p*R+R-1 in every lane, so a register is always R rows deep. An MVL change only changes R
and the number of registers. Each slice has 4 read and 2 write ports:

- arithmetic: 3 reads (vs1, vs2, accumulator) and 1 write;
- memory unit: 1 read and 1 write.

The multi-port slice is a live value table (LVT) over eight 1-write/1-read SRAMs (`dp_sram`).
Each write port has its own copy of the data for every read port. A 128-bit table records which
write port wrote each entry last, and each read takes its data from that copy. Reads are
synchronous.

## The swap mechanism

When the next instruction needs a physical register and none is free, one must be freed.
Registers are freed in two ways.

**Aggressive reclamation.** `rac` keeps a 3-bit counter for each VVR:

- at rename, +1 for the new destination and each source, and −1 for the old destination;
- at commit, −1 for each source;
- the counter is cleared when the VVR is freed.

A counter of zero means the VVR has been overwritten architecturally and every reader has
committed, so its value is dead. `swap_logic` offers the lowest-numbered such VVR that still
holds a written physical register. `preissue_stage` returns that register to the PFRL, without
any memory traffic, but only while no memory operation is in flight or queued. Without that
wait, an older store could still be about to read the register.

**Swap-store / swap-load.** If no register is free and none can be reclaimed, `swap_logic`
picks a victim:

- the VVR in the register file with the lowest counter of 1 or more;
- it must not be a source of the instruction being mapped;
- ties go to the lowest VVR number.

A *swap-store* writes the victim's MVL elements to its M-VRF slot (base + VVR x 1 KB) and
frees its register. A source VVR that is not in the register file is brought back by a
*swap-load* into a free register. Both are ordinary memory-queue operations and run on the
vector memory unit (`vmu`), in order with program loads and stores.

`preissue_stage` takes the oldest renamed instruction and does one step per cycle, in this
order:

1. Reclaim, if possible.
2. For each source not in the register file: swap-store a victim if no register is free,
   then swap-load the source.
3. For the destination: take a free register, swap-storing a victim first if none is free.
   If the destination VVR is still mapped from an earlier life, reuse that register once it
   has been written.
4. Dispatch to the memory queue or the arithmetic queue (32 entries each). Wait while the
   queue is full.

## Ordering without a global stall: the scoreboard

This is the least obvious part of the design. Once dispatched, memory and arithmetic
operations issue from two separate in-order queues, so a swap-store can overtake an
arithmetic instruction or fall behind one. A physical register can have two owners in flight
at once:

- the old VVR, still being read by older instructions and by the swap-store that evicts it;
- the new VVR, whose producer wants to write the register.

Two rules must hold:

1. The new owner may write only after the swap-store has read the old contents.
2. A swap-load must wait until every consumer of the old contents has read them.

`issue_logic` enforces both with a small scoreboard per physical register:

- `alloc_gen` is a generation bit that flips each time the register gets a new owner. Every
  queued operation carries the generation it refers to.
- `done_gen` records which generation was last written completely. A reader of generation
  *g* may issue when `done_gen == g`.
- Two reader counters, one per generation, count dispatched readers that have not yet read.
  A writer of generation *g* may issue only when the counter of the other generation is
  zero, i.e. when all readers of the previous contents are done. The swap-store counts as a
  reader, so this one test gives both rules.

One bit of generation is enough because a register gets a new owner only after its current
owner has been written. The swap logic only picks written registers, and stale destinations
are reused only once written. Every operation waits only for older operations, so the two
queues cannot deadlock. This scoreboard is this design's own way of meeting the two rules.
The paper states the rules but not their hardware.

## Execution

`arith_ctrl` runs one arithmetic instruction at a time, one row (8 elements, one per lane)
per cycle:

- cycle t: read the operands of row r in all lanes;
- cycle t+1: compute (`vector_fu`);
- cycle t+2: write the result.

An instruction with VL elements takes R' + 2 cycles, with R' = max(1, ceil(VL/8)). Lanes
whose element index is VL or more are not written.

`vmu` moves one 512-bit row per memory beat:

- loads send one request per cycle and write rows back as the in-order responses return;
- stores read a row, then hold the write request until it is granted, so at least 2 cycles
  per row;
- byte-enables mask elements past VL;
- swaps always move MVL elements.

## Interface (`ava_vpu`)

| Port group | Signals | Protocol |
|---|---|---|
| scalar core | `core_req_i`, `core_inst_i` (`vinst_t`: op, vd, vs1, vs2, vl, addr), `core_gnt_o`, `core_stall_o` | An instruction is taken in a cycle with req and gnt both high. |
| configuration | `cfg_we_i`, `cfg_mvl_sel_i`, `cfg_mvrf_base_i`, `idle_o`, `mvl_sel_o` | Hold `cfg_we_i` high. Rename stops; the change happens in the first cycle the unit is idle. MVL = 16*(sel+1). |
| memory | `mem_req_o`, `mem_we_o`, `mem_addr_o` (64-byte line), `mem_wdata_o`, `mem_be_o` (one bit per element), `mem_gnt_i`, `mem_rvalid_i`, `mem_rdata_i` | Request/grant. Read data returns in request order, after any latency. |
| events | `events_o` | One-cycle pulses: rename, rename stall, reclaim, swap-store, swap-load, pre-issue stall, commit. |

Operations:

- `VLE` and `VSE`: unit-stride, 64-byte aligned. `VSE` stores vs1.
- `VADD`, `VSUB`, `VMUL`: vd = vs1 op vs2.
- `VMACC`: vd = vs1*vs2 + vd.

All arithmetic is 64-bit integer. After an MVL change, register contents are undefined.
Software reloads what it needs, as it would after any context change.

## Where this design departs from, or goes beyond, its source

- **Integer arithmetic.** The unit is 64-bit integer only; the evaluated applications are
  double-precision floating point. The arithmetic unit is a placeholder that lets the
  register-file mechanism be exercised. No floating point, reductions, strided or indexed
  accesses, or masks.
- **No recovery.** Rollback after a mispredicted branch or an exception is not implemented:
  there is no scalar pipeline here to cause one.
- **Assumed sizes.** Reorder buffer depth 32 and pre-issue queue depth 8.
- **Counter overflow.** The 3-bit counters cannot overflow: rename stalls an instruction
  whose source counter is already 5 or more.
- **Reclaim condition.** "No older memory instruction in the pipeline" is implemented as
  "memory queue empty and memory unit idle". This is stricter than necessary.
- **Omitted blocks.** The ring interconnect between lanes is not built: nothing in the
  described operations crosses lanes. The scalar core, caches and the memory behind the
  M-VRF are external.
- **M-VRF layout.** A fixed 1 KB slot per VVR, 64 KB in total.

## Verification

Every module has a self-checking testbench in `tb/` that compares the module with an
independent model. Each prints `TB_RESULT checks=N failures=M` and has a watchdog. Some
highlights:

- `tb_rac` and `tb_swap_logic` replay a three-instruction example at MVL 128: two loads and
  an add. The loads write VVRs 42 and 43, replacing VVRs 37 and 38. The add reads 42 and 43
  and writes VVR 44, replacing VVR 39. The tests check that:
  - VVR 38's counter falls to 0, so its register can be reclaimed;
  - VVR 39's counter falls to 1;
  - VVR 39 is then the swap-store victim, because 42 and 43 are excluded as sources, and
    this frees physical register 7.
- `tb_preissue_stage` runs at MVL 128 with 8 registers. It checks every reclaim, swap-store,
  swap-load and dispatch against the selection rules above.
- `tb_vmu` runs random loads, stores and swaps at MVL 16, 48 and 128 against a
  12-cycle-latency memory with random stalls (`tb_mem_model`). It also checks the
  one-row-per-cycle load rate.
- `tb_ava_vpu` runs the whole unit at its default parameters. It sends random instruction
  streams at MVL 16, 128 and 48, with a reconfiguration between each. It then dumps all 32
  registers and compares every element with a reference model. It counts renames, stalls,
  reclaims, swap-stores, swap-loads and commits, and fails if a mechanism never happened.
  There must be swaps at MVL 128 and none at MVL 16.

- `tb_axpy` runs an integer Axpy kernel (y = a*x + y, 1024 elements) at the five
  configurations MVL 16, 32, 48, 64 and 128, strip-mined to the current MVL. It checks every
  result element and the instruction count. With a 12-cycle memory and no stalls, it
  measures:

  | MVL | vector instructions | cycles | swap-stores |
  |---|---|---|---|
  | 16 | 257 | 2709 | 0 |
  | 32 | 129 | 1804 | 11 |
  | 48 | 89 | 1812 | 31 |
  | 64 | 65 | 1789 | 32 |
  | 128 | 33 | 1618 | 19 |

  The kernel keeps only three registers live, yet swaps appear from MVL 32 up. The cause
  is the reclaim rule: a dead register is reclaimed only when no memory operation is queued
  or running. A streaming loop keeps the memory queue busy, so dead values pile up until the
  free list runs dry and the victim rule takes over. A looser reading of that condition
  would remove these swaps. The scoreboard would keep that safe, because a reclaimed
  register's next writer already waits for all readers of the previous contents.

To run a testbench with Verilator 5:

    verilator --binary --timing --assert -y rtl -y tb rtl/ava_pkg.sv tb/tb_ava_vpu.sv \
              --top-module tb_ava_vpu -o sim
    ./obj_dir/sim

Replace `tb_ava_vpu` with any other testbench name. All files are SystemVerilog-2017. The
shared types and constants are in `rtl/ava_pkg.sv`.

## File map

| File | Block |
|---|---|
| `ava_pkg.sv` | constants, instruction and queue-entry types, `num_pregs`, `rows_per_reg` |
| `ava_vpu.sv` | top level |
| `rename_unit.sv`, `rat.sv`, `free_list.sv`, `rob.sv` | first renaming level, reorder buffer |
| `rac.sv`, `swap_logic.sv`, `vrf_mapping.sv`, `preissue_stage.sv` | second level and swap mechanism |
| `sync_fifo.sv` | pre-issue, memory and arithmetic queues |
| `issue_logic.sv` | scoreboard and issue rules |
| `arith_ctrl.sv`, `vector_lane.sv`, `vector_fu.sv`, `pvrf_bank.sv`, `dp_sram.sv` | lanes and register file |
| `vmu.sv` | vector memory unit |
