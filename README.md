# Warp-level features in hardware for a RISC-V SIMT core

CUDA code increasingly relies on operations that work *across* the threads of
a warp rather than inside one thread: votes (`__all_sync`, `__any_sync`,
`__ballot_sync`), shuffles (`__shfl_up/down/xor_sync`, `__shfl_sync`) and
cooperative-group tiles (`tiled_partition<4>(block)`), which cut a thread block
into groups of 4, 8, 16 or 32 threads that vote, shuffle and synchronise among
themselves. A GPU whose warp size is fixed in hardware cannot run a tile whose
size differs from its warp without emulating it in software.

This RTL implements the hardware answer described by Pu, Ravi, Jeong,
Subramanya, Chung, Zhao, Ahn and Kim in "Hardware vs. Software Implementation
of Warp-Level Features in Vortex RISC-V GPU": three new instructions
(`vx_vote`, `vx_shfl`, `vx_tile`) and a core whose warps can be **merged and
split at run time**, so that a cooperative-group tile *is* a hardware warp.
Votes and shuffles then become single instructions over the lanes of that
warp. The RTL covers the parts the publication adds to the Vortex core. The
surrounding Vortex baseline (caches, LSU, FPU, the six-stage pipeline) is not
part of it; see "What is not here".

## Threads, slices and groups

The core holds `NUM_WARPS x NUM_THREADS = 4 x 8 = 32` hardware threads, the
configuration the authors evaluate. Internally the 32 threads are stored as
eight **slices** of four threads. A slice is the smallest warp the core can
run, and each slice has its own register bank.

A **group** is a run of adjacent slices that is scheduled and executed as one
warp. The layout is written as an 8-bit **group mask**, one bit per slice; the
leftmost bit is slice 0, and a 1 marks the slice that starts a group:

| mask       | layout                  | threads per group |
|------------|-------------------------|-------------------|
| `10000000` | one group (reset value) | 32 |
| `10001000` | two groups              | 16 |
| `10101010` | four groups             | 8  |
| `11111111` | eight groups            | 4  |

These four rows are the ones the authors list. The hardware accepts any mask
whose groups all have the thread count given with it. At reset the core is in
the first row: all 32 threads form one warp.

Every group is named by its first slice (its *leader*). The scheduler keeps
the group's PC under the leader's slice number.

## Instructions

| instruction | opcode | format | fields |
|---|---|---|---|
| `vx_vote rd, rs1, mode, rm` | CUSTOM0 `0x0B` | I | `funct3` = mode: 0 All, 1 Any, 2 Uni, 3 Ballot; `rs1` = predicate; `imm[4:0]` = register `rm` holding the member mask |
| `vx_shfl rd, rs1, mode, d, rc` | CUSTOM1 `0x2B` | I | `funct3` = mode: 0 Up, 1 Down, 2 Bfly, 3 Idx; `rs1` = value; `imm[4:0]` = register `rc` holding the clamp; `imm[11:5]` = lane offset `d` |
| `vx_tile rs1, rs2` | CUSTOM2 `0x5B` | R | `rs1` = group mask, `rs2` = thread count |

The opcode, the format and the four modes of each instruction follow the
published table. The position of the register address and lane offset inside
the immediate is this design's own. The source only says that the immediate
holds them.

For a usable test vehicle the core also executes a small RV32I subset: OP and
OP-IMM arithmetic, LUI, `ecall` (the executing group has finished), and
`csrrs rd, csr, x0` for four read-only CSRs:

| CSR | value, per lane |
|---|---|
| `0xCC0` | rank of the thread inside its group (CUDA `thread_rank()`) |
| `0xCC1` | group index = first thread of the group / group size (`meta_group_rank()`) |
| `0xCC2` | hardware thread number 0..31 |
| `0xCC3` | threads in the group (`num_threads()`) |

`tb/wlf_asm_pkg.sv` has encoder functions for all of these.

## Reshaping: how `vx_tile` works

A reshape is only safe when no warp is in the middle of an instruction and
all threads agree on where they are in the program. `vx_tile` is therefore a
synchronisation point of the whole thread block. The sequence is:

1. A group executes `vx_tile`. The `tile_unit` converts the mask to a leader
   vector and checks it. Slice 0 must start a group, no bit above bit 7 may be
   set, and every group must hold exactly `rs2` threads. The group then
   **waits**: it is not scheduled again.
2. When every live group waits, `warp_scheduler` releases them all in one
   cycle. If the check passed, `warp_config` loads the new layout. If it
   failed, the old layout is kept (counted as a *refused* reshape).
3. Every group of the new layout starts at the instruction after `vx_tile`.
   A new group is live when any of its slices is live. Slices whose threads
   already executed `ecall` stay masked off.

The mask and count are taken from the first lane of the issuing group. They
are assumed to be the same in every thread.

This is how CUDA's `tiled_partition` and the `block.sync()` that ends a tiled
region map onto hardware. `tile.sync()` needs no instruction, because a tile is
a single warp. The source's code example restores the default with
`vx_tile(0b10000000, HW_THREADS_PER_WARP)`. With 8 threads per warp, this RTL
refuses that combination, because mask `10000000` means one group of 32.
Write `vx_tile(0b10000000, 32)` instead.

## The datapath: banks, crossbar and lanes

This is the part that differs most from a fixed-warp core.

```
 slice banks (8 x reg_bank, 4 threads each)
   bank0 bank1 ... bank7          each: 32 regs x 4 threads x 32 bit,
     |     |         |                  4 async read ports, 1 masked write
     +-----+---------+
           | operand_xbar  (base = leader slice, len = slices in group)
           v
   lanes 0..31  (lane 4k+t = bank base+k, thread t;  lanes >= 4*len idle)
           |
   alu: integer | CSR | vote_unit | shfl_unit        tile_unit (vx_tile)
           |
   operand_xbar write side: lane block j-base -> bank j, for j in the group
```

In a fixed-warp core a multiplexer picks the register bank of the issuing
warp. Here a group of 16 threads spans four banks, and the group starting at
slice 4 must see its threads in lanes 0..15, not 16..31. `operand_xbar`
therefore routes bank `base+k` to lane block `k` for each of the three operand
ports (`rs1`, `rs2`, and the register named in the immediate). It routes the
result back the same way, and carries each slice's "live" bit to its lanes.
The authors name this change: a crossbar instead of a multiplexer, driven by
the scheduler's warp configuration. The exact mapping is this design's.

Because the group always arrives in rank order from lane 0, the execute units
only need the group size to produce size-dependent results. The lane index is
the rank.

The datapath is 32 lanes wide, so even a 32-thread group executes in one
cycle. The publication does not state an execution width. A narrower
datapath would need several passes per instruction for merged warps, and
cross-lane operations that span passes.

## Vote and shuffle semantics

Both units are combinational and work on the lanes of one group (ranks
`0..size-1`). Lanes beyond the group produce 0 and are not written.

**Vote.** Lane `i` reads its member mask `M_i` from register `rm`. Its
participants are the live ranks `j < size` with bit `j` of `M_i` set, and
`p_j = (rs1_j != 0)`.
- All: AND of `p_j` over the participants (1 if there are none).
- Any: OR of `p_j`.
- Uni: 1 if all participants have the same `p_j`.
- Ballot: the bit vector of participants with `p_j = 1`. Bit `j` is rank `j`.

**Shuffle.** `d` is the lane offset. The group is cut into segments of `w`
lanes, where `w` is the lane's clamp register. This is CUDA's `width`
argument. If the clamp is 0, not a power of two, or larger than the group, the
whole group is one segment. With `base` = start of lane `i`'s segment:
- Up: source `i-d`, valid if `>= base`.
- Down: source `i+d`, valid if `< base+w`.
- Bfly: source `i^d`, valid if inside the segment.
- Idx: source `base + (d mod w)`.

A lane whose source is invalid, or belongs to a thread that has finished,
keeps its own value.

The formulas agree with the authors' software-emulation rules. Reading the
clamp as a segment width, and keeping the own value on an invalid source, are
this design's choices: the source names the clamp but does not define it.

## Scheduling and timing

The core has two stages:

1. **Schedule and fetch.** `warp_scheduler` picks the next ready leader in
   round-robin order after the last one issued. The instruction at its PC is
   read from a local instruction memory and registered.
2. **Execute.** The cycle after that: decode, read the banks through the
   crossbar, execute, write back through the crossbar, and report completion
   to the scheduler.

A group has at most one instruction in flight. It is marked stalled at issue
and released by its completion. The resulting rates:

- a single group (for example the 32-thread layout) issues every 2nd cycle;
- two or more groups issue one instruction every cycle;
- a reshape costs one extra cycle after the last group reaches `vx_tile`.

There are no data hazards: an instruction of a group completes before the
group's next one is read. Execution width, stage count and timing are this
design's own. The source core has a six-stage pipeline with an instruction
buffer and scoreboard, which the publication does not describe.

## What is not here

The publication extends an existing open-source GPU and describes only the
changes. Everything it takes from the baseline is absent from this RTL:
- the instruction cache (replaced by `IMEM_DEPTH` words of instruction memory
  loaded through a write port);
- data memory, the load/store unit, the FPU and the multiply/divide unit;
- branches, and divergence (`vx_split`/`vx_join`);
- the baseline barrier instruction, the instruction buffer, the scoreboard
  and the commit unit;
- the L1/L2/L3 caches, sockets and clusters.

Because of this, none of the benchmark kernels the authors measure can run
as compiled programs. Those kernels are `vote`, `shfl`, `reduce`,
`reduce_tile`, `mse_forward` and `matmul`, and all of them load and store
memory and loop. Their warp-level parts (votes, shuffles and tile reshapes in
groups of 4 to 32 threads) are what the end-to-end testbench exercises.

Where this RTL departs from the real baseline:
- **CUSTOM0.** The real baseline puts its own warp-control instructions on
  CUSTOM0. Following the published instruction table, CUSTOM0 is `vx_vote`
  here.
- **Reset layout.** The core resets to the single 32-thread group that the
  published layout table calls the default, not to 4 warps of 8.
- **Area.** The published area overhead (about 2% of one core on an FPGA)
  cannot be compared, since the baseline core is not present.

## Files

| file | role |
|---|---|
| `rtl/wlf_pkg.sv` | shared constants, opcodes, CSR numbers, `dec_t` record, mode enums |
| `rtl/wlf_core.sv` | top: scheduler, config, instruction memory, decoder, 8 banks, crossbar, ALU, tile unit |
| `rtl/warp_scheduler.sv` | round-robin issue, per-slice PC / live / stall / wait state, reshape synchronisation |
| `rtl/warp_config.sv` | current layout; per-slice group base, per-leader group length |
| `rtl/tile_unit.sv` | `vx_tile`: mask to leader vector, legality check |
| `rtl/decoder.sv` | instruction decode |
| `rtl/reg_bank.sv` | register bank of one 4-thread slice |
| `rtl/operand_xbar.sv` | bank-to-lane and lane-to-bank crossbar |
| `rtl/alu.sv` | integer ALU, CSR reads, hosts `vote_unit` and `shfl_unit` |
| `rtl/vote_unit.sv`, `rtl/shfl_unit.sv` | cross-lane vote and shuffle |
| `tb/tb_<module>.sv` | self-checking testbench of each module |
| `tb/wlf_asm_pkg.sv` | instruction encoders for testbenches |

Top-level parameters: `NUM_WARPS` (4), `NUM_THREADS` (8), `IMEM_DEPTH` (1024),
`RESET_MASK` (`8'b10000000`). The slice size is fixed at 4 threads
(`SLICE_THREADS` in the package), and `NUM_WARPS*NUM_THREADS` must be a
multiple of 4 and at most 32 (the vote unit's member masks are 32-bit
registers).

### Using the core

1. Hold `rst` for a cycle.
2. Write the program with `imem_we`/`imem_waddr`/`imem_wdata` (word
   addresses).
3. Pulse `start` with `start_pc`.
4. Wait for `running` to fall. That happens once every thread has executed
   `ecall`.
5. Read any thread's registers through `dbg_thread`/`dbg_reg`/`dbg_rdata`.

The `evt_*` outputs pulse for every issue (with the group size), vote,
shuffle, accepted or refused reshape, and for every cycle a group waits at
`vx_tile`.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself.
Example with plain Verilator (5.x), from the directory that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/wlf_pkg.sv tb/wlf_asm_pkg.sv tb/tb_wlf_core.sv --top-module tb_wlf_core
./obj_dir/Vtb_wlf_core
```

Swap in any `tb/tb_<module>.sv` and `--top-module tb_<module>` to run that
module's testbench. The package files must come first.

`tb_wlf_core` runs the core at its default size. Its kernel:
- computes thread numbers;
- votes and shuffles as one 32-thread warp;
- tiles into eight groups of 4 and runs Any/All/Uni votes, a butterfly
  shuffle and a clamped up-shuffle inside the tiles;
- merges into two groups of 16 for an index shuffle, a ballot and the group
  index;
- issues one refused `vx_tile`;
- splits into four groups of 8 for a down-shuffle and the group index;
- merges back to 32 threads.

It then checks 28 registers of each of the 32 threads against values computed
from the thread number. It also checks the number of instructions issued, and
it requires every mechanism to have occurred at least once: issue from groups
of 4, 8, 16 and 32, votes, shuffles, 4 accepted and 1 refused reshape, waiting
at `vx_tile`, the 2-cycle issue gap of a lone group, and back-to-back issue of
several groups.

The module testbenches compare against models written separately inside each
testbench. `tb_vote_unit` and `tb_shfl_unit` use 2000 random cases over
group sizes 4 to 32, and `tb_warp_scheduler` checks round robin, stalls and
the reshape rule.

`tb_warp_reduce` runs the register part of a warp reduction on the core at its
default size. It does a shfl_down tree over 32 threads, a per-tile reduction
in four tiles of 8, and a butterfly all-reduce in eight tiles of 4, then
votes inside the tiles. It checks every thread's sums and prints the
instructions issued and the cycles taken.
