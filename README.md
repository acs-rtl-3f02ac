# Out-of-order kernel scheduling window for a GPU

Many GPU programs launch long streams of small kernels whose dependencies
are only known at run time: a physics step that handles whatever collisions
happened, or a neural network whose path depends on the input image. Run
one after another in a single stream, each small kernel leaves most of the
GPU idle. Running them concurrently needs dependency checks, and doing those
checks on the host costs a CPU/GPU round trip every time a kernel finishes.

This design moves the scheduling to the GPU. Like the issue window of an
out-of-order CPU, it keeps a small window of kernels taken in program
order. Each kernel carries the list of earlier kernels it must wait for,
which the design calls its *upstream* kernels. A kernel is launched as soon
as all of its upstream kernels have completed. When the GPU reports that a
kernel finished, the window updates itself. The host is never asked.

The host still works out the upstream lists. It compares the memory ranges
each kernel reads and writes with those of the kernels it sent recently.
To avoid waiting for the GPU, the host does not learn which kernels have
finished, so its lists are *stale*. The GPU-side hardware described here
corrects them.

The RTL covers the GPU side: the scheduling window and the upstream load
module that feeds it. The host runtime and the GPU's own kernel dispatch
unit are outside the design. The end-to-end testbench models both of them.

## Block structure

```
              launch packets                            ready kernel ids
 host queue ──lp_*──▶ upstream_load_module ──ins_*──▶ sched_window ──disp_*──▶ kernel dispatch unit
                            ▲                         │  N slots  │
                            └──slot_used/slot_kid─────┘  N banks  ◀──cpl_*─── completion reports
                                                        (upstream_bank)
```

| file | what it is |
|---|---|
| `rtl/acs_pkg.sv` | 8-bit kernel identifier type and the 2-bit slot state |
| `rtl/upstream_bank.sv` | one slot's SRAM bank: N-1 words of 8 bits, single port, synchronous read |
| `rtl/sched_window.sv` | the N-slot window: insertion, completion scan, readiness, dispatch |
| `rtl/upstream_load_module.sv` | packet buffer, stale-entry filter, oldest-kernel tracking, blocking |
| `rtl/acs_hw_top.sv` | the two blocks wired together |

Parameters: `N` (window slots, default 32) and `M` (size of the host's list of
recently sent kernels, default `N-1` = 31). Kernel identifiers are 8 bits.

## Kernel identifiers and the launch packet

The host numbers kernels in launch order, modulo 256. A launch packet has:

- the kernel's identifier (`lp_kid`);
- N-1 upstream entries, each a valid bit (`lp_up_vld[i]`) and an identifier
  (`lp_up_id[i]`).

The entries list every kernel among the host's last M launches that the new
kernel conflicts with. Two kernels conflict when a write of one overlaps a
read or write of the other. The packet port is a valid/ready handshake.

Numbering in launch order matters. It lets the hardware tell which of two
kernels in the window is older: it counts back from the newest kernel
inserted, modulo 256. This only works while fewer than 256 kernels separate
the oldest kernel from the newest. The blocking rule below guarantees that,
because M < 256.

## The scheduling window (`sched_window`)

Each of the N slots holds:

- an 8-bit kernel identifier;
- a 2-bit state: free, pending, ready or executing;
- its own `upstream_bank`, N-1 upstream identifiers in SRAM;
- N-1 *live* bits in flip-flops, one per bank word, telling which words still
  name a kernel that has not completed.

Words are never erased from the SRAM. Clearing a live bit is what removes an
upstream kernel.

**Insertion takes N cycles.** In the cycle the window accepts `ins_req`
(`ins_ack`), it does three things: puts the kernel in the lowest free slot,
marks it pending and clears its live bits. In each of the next N-1 cycles it
shows an entry index on `ins_idx`. The upstream load module answers in the
same cycle with `ins_up_vld`/`ins_up_id`. A live entry is written to the bank
and its live bit is set. After the last beat (`ins_done`), a kernel with no
live entry becomes ready.

**A completion takes 1 + (N-1) cycles.** In the accepting cycle
(`cpl_valid && cpl_ready`) the window does two things: it frees the slot of
the completed kernel and reads word 0 of every bank. In the next N-1 cycles
all N banks are read in parallel, one word per cycle. The SRAM read is
pipelined one word ahead of the compare. Any live word equal to the
completed identifier has its live bit cleared. A pending slot whose last live
bit clears becomes ready in that same cycle. It can be dispatched in the next
cycle, while the scan is still running.

**Dispatch** does not use the banks. `disp_valid` is high whenever a slot is
ready. `disp_kid` is the kernel in the lowest-numbered ready slot. It becomes
executing on `disp_ready`. One kernel can be dispatched per cycle, in any
window state.

**Sharing the banks.** Insertion and completion both use the banks, so only
one of them runs at a time. A completion that is waiting is served before a
new insertion. `cpl_ready` is high only when the window is idle. `ins_ack`
needs an idle window, no completion waiting and a free slot; `full` shows
when no slot is free.

So the sustained rate is one insertion or one completion per N cycles. That
is about 25 ns at 1.3 GHz for N = 32. Kernel launches take microseconds, so
the window is not the bottleneck.

## The upstream load module (`upstream_load_module`)

A stale host list can be wrong in two ways. The module corrects each one.

**It can name kernels that already left the window.** While the window
inserts the kernel, the module looks up the entry the window asks for. It
compares that entry with the identifiers of all occupied slots (one N-way
compare per cycle). An entry found in no slot names a kernel that has
completed. That entry is dropped: `ins_up_vld` stays low and `stale_drop`
pulses. This check is made against the window at the time of insertion. So
a kernel that completes while a packet is waiting is still filtered out.

**It can miss an old kernel that is still running.** The host only compares
with its last M kernels. A dependency on a kernel older than that would be
lost. To prevent this, the module tracks the oldest kernel in the window.
That is the occupied slot whose identifier lies furthest behind the newest
inserted one. `oldest_kid` and `newer_cnt` show it. A packet is held back
(`blocked`) while inserting it would leave more than M kernels newer than
the oldest one. An empty window never blocks. As a result, every kernel
still in the window is within the host's last M launches when a new kernel
is admitted.

With M = N-1, a host list never has more entries than a packet or a bank
has words.

The module holds one packet. `lp_ready` returns the cycle after `ins_done`.
So a kernel sent to an idle, empty window with no upstream kernels can be
dispatched N+1 cycles after its packet is accepted: one cycle in the
buffer, then N cycles of insertion.

## Where this departs from the published design

- **Associative banks against sequential scan.** The published description
  calls the per-slot SRAM "fully associative". It also gives the update time
  as N-1 cycles per slot. This design follows the timing: each bank is a
  plain single-port SRAM scanned one word per cycle, and there is no CAM in
  the banks. The only associative compare is the slot-identifier compare in
  the upstream load module.
- **Identifier and storage sizes.** One passage gives 8-bit upstream
  identifiers; another speaks of 8-byte upstream data but quotes 1 KB for
  N = 32. The design uses 8-bit identifiers: 32 × 31 × 8 bits = 992 bytes,
  consistent with the 1 KB figure.
- **Which "oldest" kernel.** The text says both "oldest scheduled" and
  "oldest executing" kernel. The design tracks the oldest kernel in any state
  (pending, ready or executing). A pending kernel older than the host's list
  would otherwise be missed just like an executing one.
- **How the oldest kernel is kept.** The published text describes an 8-bit
  register for the oldest kernel and a count of kernels since it. Here both
  are recomputed every cycle by a search over the occupied slots, relative to
  the last inserted identifier. The result is the same, and nothing needs
  updating when the oldest kernel completes. The price is a 32-way compare
  tree instead of a register.
- **Not specified by the source, chosen here:**
  - M = N-1;
  - kernel ids in launch order mod 256;
  - the free-slot state encoding;
  - lowest-slot priorities for insertion and dispatch;
  - completion before insertion;
  - valid/ready handshakes on all ports;
  - the one-packet buffer;
  - asynchronous active-low reset (`rst_n`);
  - the synchronous-read SRAM.
- **Dependency rule of the host model.** The host's published algorithm
  compares only the new kernel's writes with the old kernel's reads and
  writes, which misses read-after-write. The testbench host also treats a new
  read overlapping an old write as a dependency. The hardware is the same
  either way; it only sees the lists.
- **Outside the design.** The host runtime is not included: its input queue,
  its list of recently sent kernels, the dependency check and the kernel
  annotations. Neither is the GPU's dispatch unit or its compute units.
  Power and area were not evaluated.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=… failures=…`.

- `tb_upstream_bank`: random writes and reads against a reference array;
  checks the one-cycle read latency and that the read data holds.
- `tb_sched_window`, in two parts:
  - A directed part replays a four-kernel example. K3 waits for K1, and K4
    waits for K1, K2 and K3. It checks which kernel is offered at each step,
    N cycles per insertion and N-1 scan cycles per completion.
  - Then 600 random kernels, with random dependency lists, dispatch stalls
    and completion order. It checks that no kernel runs before its upstream
    kernels, that each runs once, that a freed kernel is offered, and that
    the window drains.
- `tb_upstream_load_module`: a window model with 400 packets that mix live
  and stale entries. Every beat's filtered entry is checked, and so are
  `stale_drop`, the M rule for `blocked`, `oldest_kid` and the packet
  handshake.
- `tb_acs_hw_top`: end-to-end at the default size (N = 32, M = 31, no
  parameter overrides). It has a host model and a GPU model, and runs 702
  kernels over a shared 8 K address space:
  - The host model computes stale lists against its last 31 kernels.
  - The GPU model runs kernels concurrently for random times and refuses
    dispatch at random.
  - Some kernels run very long, which forces blocking.
  - A burst of slow kernels fills the window.

  The scoreboard checks every real conflict, including conflicts older than
  the host's list. It checks the N+1 cycle latency and the N-1 cycle
  completion scan. It also requires each mechanism to happen at least once:
  - a stale entry is dropped;
  - insertion is blocked by M;
  - the window is full;
  - dispatch is refused;
  - a completion waits;
  - several kernels execute at once;
  - a kernel is released by a completion;
  - identifiers wrap past 255.

Running one with plain Verilator, from the directory that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert --timescale 1ns/100ps -Irtl -y rtl rtl/acs_pkg.sv \
          tb/tb_acs_hw_top.sv --top-module tb_acs_hw_top -o sim
./obj_dir/sim
```

The end-to-end test runs in under a second of wall-clock time on a
workstation. To try another window size, change `N` in a testbench's
`localparam` and pass it to the block (`acs_hw_top #(.N(N)) dut (.*);`).
The end-to-end test was also run this way:
- At N = 16 it passes.
- At N = 64 every ordering and latency check passes, but its burst of 50 slow
  kernels is too short to fill 64 slots, so its window-full check reports a
  failure.

Immediate assertions inside the RTL check the handshake rules:

- a completion must name an executing kernel;
- a dispatch offer is not withdrawn before it is taken;
- the window only accepts a kernel that was offered.

Enable them with `--assert`.

## Size

At N = 32, coarse synthesis of the top gives:

- 32 memories of 31 × 8 bits (7936 bits);
- about 1630 flip-flops, mostly the packet buffer (31 × 9 bits), the live
  bits (32 × 31) and the slot identifiers and states;
- about 2500 generic cells.

The widest logic is the upstream load module's 32-way identifier compare and
its 32-way oldest-kernel search.
