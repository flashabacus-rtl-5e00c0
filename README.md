# FlashAbacus control plane in SystemVerilog

FlashAbacus is a low-power accelerator that carries its own flash storage. Kernels on the
accelerator's processors read and write a 32 GB flash backbone directly. Data does not go through
the host's file system, storage stack or PCIe copies.

Two things make this work without a full SSD firmware:

- **Flashvisor** gives kernels a flat, page-group-mapped view of flash. It also protects
  concurrently running kernels from each other with a range lock.
- **Storengine** runs block reclaim in the background, on its own processor.

The eight processors (LWPs) are split as follows:

- six workers run kernels;
- one processor runs Flashvisor;
- one processor runs Storengine.

A scheduler keeps the workers busy. It breaks each kernel into *microblocks*, which must run in
order, and each microblock into *screens*, which may run in parallel. It then issues screens out of
order across kernels.

This RTL implements that control plane as synchronous logic:

- kernel scheduling and worker launch;
- mapping translation, the range lock and log-structured allocation;
- block reclaim;
- the message queues;
- the per-channel flash controllers with their clock-crossing tag queues.

Some parts come from the commercial platform and stay outside as ports:

- the VLIW processors, caches and crossbars;
- DDR3L and the scratchpad SRAM macro (the tables here are plain memory arrays);
- the power/sleep controller (PSC), PCIe and the serial links;
- the NAND packages themselves.

## Geometry and addresses

| Quantity | Value |
|---|---|
| Flash channels | 4 |
| TLC packages per channel | 4 (2 dies each) |
| Page size | 8 KB |
| Page group | one page on both planes of a die on every channel: 4 × 2 × 8 KB = 64 KB |
| Page groups in 32 GB | 524288 (19-bit group number; a 2 MB table at 32 bits per entry, 1.25 MB here at 20 bits) |
| Channel page | one channel's share of a group: 16 KB |
| Erase block (own choice) | 256 page groups; the first 2 hold the block's mapping metadata |

A *flash-backbone address* counts channel pages. Address `a` is translated as follows:

- channel `a mod 4`;
- logical group `a div 4`;
- the page table gives the physical group `p`;
- package `p div 131072`;
- page within the package `p mod 131072`.

Every request to a channel also carries the DDR3L address of its 16 KB slice:
`pointer + i × 16 KB` for the i-th channel page of the section.

All shared sizes, message formats and enums live in `rtl/fa_pkg.sv`.

## Scheduling screens out of order (`o3_scheduler`, `lwp_launcher`)

The host submits a kernel descriptor. It holds a kernel id, 1–4 microblocks, the number of
screens in each (1–8), and the boot address of each microblock's code. The descriptor enters
the *execution chain*: 24 slots, each holding one kernel. For every screen the chain records its
status (waiting, running or done) and the worker running it.

The one hard rule is the dependency between microblocks. No screen of microblock *m+1* may start
until every screen of microblock *m* of the same kernel has reported completion.

Within that rule the scheduler is greedy. Whenever a worker is idle it dispatches a screen:

- it prefers the oldest kernel that has an unissued screen in its current microblock;
- if the oldest kernel has none (typically a serial, single-screen microblock still running),
  it *borrows* a screen from a younger kernel.

`cnt_borrow` counts such dispatches. A completion frees its worker in time for a dispatch in the
next cycle. The kernel's last completion pulses `kdone` and frees its slot.

Each dispatch goes through the launcher. It performs four steps, one register write per cycle:

1. Put the worker to sleep through the PSC (request/acknowledge).
2. Write the microblock's code address into the worker's boot-address register.
3. Raise the worker's inter-processor interrupt, with {slot, microblock, screen} as its argument.
4. Wake the worker through the PSC.

With a PSC that acknowledges at once, a launch takes 5 cycles.

Workers report finished screens through a hardware completion queue. When several workers report
in the same cycle, the lowest-numbered worker goes first.

## Mapping data sections onto flash (`flashvisor`, `range_lock`, `page_table`, `page_allocator`)

A kernel maps a section of DDR3L to flash with one message: type (read or write), DDR3L pointer,
flash address and length. Flashvisor serves one message at a time:

1. **Range lock.** The page range is looked up in a 32-entry table of
   {start, last, type, owner}. All entries are compared in parallel, so the answer comes one
   cycle later. A read overlapping another kernel's write is refused, and so is a write
   overlapping another kernel's read or write. A refused request is answered `BLOCKED` at once,
   and the kernel retries later. A kernel's own ranges never conflict with each other.
2. **Translation, per channel page.**
   - *Read:* reads the page table, whose read takes one cycle. Channel pages of groups that
     were never written are skipped.
   - *Write:* the first channel page of each new logical group takes the next physical group
     from the allocator. It then writes the page table and the reverse map before issuing.
3. **Issue.** A request `{tag, op, package, page, DDR address}` goes to the channel's controller
   whenever it is ready.
4. **Answer.** Once every issued request has completed, the kernel gets `DONE` with its lock id.
   An `UNMAP` message releases the lock.

The allocator is log-structured: each write takes the group after the previous one. It skips the
two metadata groups of each block, and it opens new blocks first from never-used ones and then
from reclaimed ones. When only one block (the reserve) is left and the open block is full:

- ordinary writes stall (Flashvisor counts the stalled cycles);
- `reclaim_req` rises.

A reserve block opened for a reclaim serves only Storengine until the reclaimed block comes back.
This matters: otherwise ordinary writes could use up the reserve and leave the reclaim with no
space to migrate into. That deadlock did occur in simulation before this rule was added.

The page table and the reverse map are 524288-entry arrays with two one-cycle ports. After reset
they clear themselves, one entry per cycle; `tables_ready` rises after 524288 cycles, and no
message is accepted before then.

## Reclaiming blocks in the background (`storengine`)

Storengine walks the blocks round-robin from the start of flash. It takes the next block that is
in use and is not the open block. It does not count valid pages and does not try to level wear.

For every data group of the victim:

1. The reverse map gives the logical group once written there.
2. The page table tells whether that logical group still points to this physical group.
3. If it does, the group is migrated:
   - allocate a new group, which may come from the reserve;
   - read its 4 channel pages into a 64 KB staging area of DDR3L;
   - program them into the new group;
   - ask Flashvisor to pause (`se_req`/`se_gnt`; Flashvisor grants only while idle or while
     stalled on allocation);
   - re-read the entry, and switch it only if it still points to the old group.

The final compare means a write Flashvisor made during the copy is never undone.

The victim is then erased on all four channels, still under the pause, so the erase queues behind
any earlier read. Finally the block returns to the allocator.

Storengine's requests carry tag bit 5 set. The top routes completions by that bit. On a channel,
Flashvisor's requests win; at the allocator, Storengine's win.

## Flash channels (`flash_ctrl`, `tag_queue`, `hw_queue`)

Each channel has one controller. Requests cross from the network clock into the flash clock
through an inbound tag queue: a Gray-coded dual-clock FIFO with two-flop synchronisers.
Completions come back through an outbound one.

On the flash side, each of the four packages has its own small state machine:

1. Wait idle.
2. Issue the command: a one-cycle strobe with one-hot chip enable.
3. Wait for ready/busy to fall, then to rise.
4. Report the completion, with the package's fail flag as `ok`.

Requests are taken in order. A request for a busy package stalls those behind it. Packages run in
parallel, and completions return in the order they finish.

The NAND pin protocol (ONFi/NV-DDR2 cycles) and the data transfer are abstracted away. The DDR3L
address travels with the command as the DMA address.

## What follows the source description and what does not

These points follow the described design:

- the two-level split of microblocks and screens, with the dependency rule and cross-kernel
  borrowing;
- the PSC/boot-register/IPI launch order;
- the mapping message contents;
- division by channel count and by pages per package;
- increasing allocation, with the first two pages of a block kept for metadata;
- a range lock keyed by type;
- round-robin reclaim from the start of flash;
- in/out tag queues across the flash clock;
- hardware message queues.

These are this design's own choices:

- Every width and queue depth.
- The block size.
- The message and response formats.
- The range lock as a parallel-compare table instead of a search tree.
- Write/write conflicts being refused too.
- The reverse map. The original reads block ownership back from the metadata pages instead.
- The compare-before-commit hand-over.
- The reserve block.
- Oldest-first priority.
- Flashvisor and Storengine themselves are software on processors in the original; their data
  paths are hardware state machines here.

Not built:

- the periodic snapshot of the mapping tables to flash;
- wear-levelling and bad-block handling (the fail flag is reported but not acted on);
- the static and dynamic inter-kernel schedulers that serve only as points of comparison.

## Simulating

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each one prints
`TB_RESULT checks=N failures=M` and stops itself on a watchdog. `tb/flash_chan_model.sv` is a
behavioural busy-time model of one channel's packages, used only by testbenches.

For example:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/fa_pkg.sv tb/tb_flashabacus_top.sv --top-module tb_flashabacus_top
./obj_dir/Vtb_flashabacus_top
```

The end-to-end test is `tb_flashabacus_top`. It runs at 1024 page groups (4 blocks) so that reclaim
happens quickly. Its environment has six worker models, four channel models and a PSC. The workers
map, retry when blocked, compute, unmap and report completion. The test fails any mechanism that
never occurs:

- dispatch and borrowing;
- launch and kernel completion;
- reads and programs;
- lock blocking;
- allocator stall;
- reclaim, migration and erase.

It also checks that the page table and reverse map agree at the end.

`tb_flashabacus_full` runs the top with every parameter at its default: 524288-entry tables,
2048 blocks. It waits out the 524288-cycle clearing walk and then runs ten kernels. Reclaim is not
reached at that size.
