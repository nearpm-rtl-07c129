# NearPM: near-memory engines for crash consistency

Programs that keep their data in persistent memory (PM) must be able to
recover after a power failure. Whether they use undo/redo logging,
checkpointing or shadow paging, most of the cost of that guarantee is plain
data movement: copying the old value of an object into a log, copying a page
before it is changed, writing and later invalidating small headers. This RTL
moves that work into the PM module itself. A *NearPM device* sits in the PM
module's controller, next to the media. The host sends it short commands
("log these 256 bytes", "copy this page", "delete the logs of this
transaction") and keeps computing. The device performs the copies inside the
module and sends the data across neither the memory bus nor the CPU caches.

The difficult part is not the copying but the **ordering**. A log must be in
PM before the host overwrites the data it protects. Two commands that touch the
same bytes must not overtake each other. An object interleaved across two PM
modules is logged by two devices, and its log may only be deleted once *both*
have finished. The device enforces these rules in hardware, so the host never
has to wait for a command to complete before it carries on. Most of this
document, and most of the logic, is about those rules.

## 1. One device at a glance

```
 command channel ──► request_fifo ─┐                       ┌─► nearpm_unit 0 ─┐
                     (32 x 64 B)   │   ┌──────────────┐    ├─► nearpm_unit 1 ─┤
                                   ├──►│  dispatcher  │────┼─► nearpm_unit 2 ─┤
 host loads/stores ► host_rw_queue ┘   │  (+ in-flight│    └─► nearpm_unit 3 ─┤
                     (64 x 64 B)       │   registers) │                       │
                                       └──┬───────┬───┘     host accesses ────┤
               addr_map_table ◄───────────┘       │                           ▼
               inflight_access_table ◄────────────┤                      mem_arbiter ──► PM port
               multi_device_handler ◄─────────────┘
                  ▲      │ completion notices to / from the other devices
```

| File | Role |
|---|---|
| `nearpm_pkg.sv` | Command, header and range types; the conflict and range functions |
| `request_fifo.sv` | 32-entry queue of 64-byte commands, with each entry's physical ranges kept alongside |
| `host_rw_queue.sv` | 64-entry queue of host loads and stores; releases its head when the dispatcher allows |
| `addr_map_table.sv` | Translates virtual to physical addresses for each pool: 48 entries of {pool, thread} → offset |
| `inflight_access_table.sv` | Read and write byte ranges of the command on each unit; answers the conflict queries |
| `dispatcher.sv` | Takes commands in order, translates them, checks for conflicts and issues them; gates host accesses |
| `multi_device_handler.sv` | Tracks, for each unit, which devices have finished its command; frees the unit |
| `nearpm_unit.sv` | Runs one command: copies, writes a header, or walks and deletes headers |
| `load_store_unit.sv` | Reads or writes single lines for a unit (headers) |
| `dma_engine.sv` | Copies bulk data in bursts for a unit |
| `metadata_generator.sv` | Builds a log header and its deleted form; recognises a live header |
| `mem_arbiter.sv` | Round-robin sharing of the PM port between the four units and the host queue |
| `nearpm_device.sv` | One device; wires everything above together |
| `nearpm_system.sv` | Top level: two devices with their completion notices connected |

The top level, `nearpm_system`, brings out each device's command channel,
host channel and PM port as arrays indexed by device. The host's memory
controllers and the PM media are outside this design. All data paths are one
64-byte line wide, and every address is a 64-bit byte address.

## 2. Commands

A command is one 64-byte line, `req_t`, whose fields are listed from the
least significant bit:

| Bits | Field | Meaning |
|---|---|---|
| 7:0 | `op` | operation (table below) |
| 15:8 | `pool_id` | pool whose translation applies |
| 23:16 | `thread_id` | second half of the translation key |
| 31:24 | `flags` | bit 0 = duplicated to every device (interleaved object) |
| 47:32 | `tag` | identifies the command across devices (low 8 bits used) |
| 79:48 | `size` | bytes; rounded up to whole lines |
| 143:80 | `src` | source operand (virtual when it arrives) |
| 207:144 | `dst` | destination operand (virtual when it arrives) |

| `op` | Operation | Reads | Writes |
|---|---|---|---|
| 01 | undo-log create | `[src, src+size)` | header at `dst`, copy at `[dst+64, dst+64+size)` |
| 04 | checkpoint create | as undo-log create | as undo-log create |
| 02 | apply log (redo log → object) | `[src, src+size)` | `[dst, dst+size)` |
| 05 | shadow copy (page before update) | `[src, src+size)` | `[dst, dst+size)` |
| 03 | commit / delete logs | headers in `[dst, dst+size)` | the same headers |
| 10 | register pool | – | the offset in `src` goes into the translation table |
| 00 | no operation | – | – |

The operation set is the one the host library exposes. The bit layout and the
opcode values are this design's own.

### Log headers

Undo-log and checkpoint commands copy the data first and then write a 64-byte
header in front of the copy. The header is written only after every copied line
has been acknowledged, so a valid header always describes a complete copy. The
header holds a magic word, a valid bit, a committed bit, the operation, pool,
thread, tag, size, the physical address of the logged object and a per-unit
sequence number (`log_hdr_t`). A commit walks a log area from `dst`. It reads
a header; if the header is live (magic matches and valid is set), it rewrites
the header with valid cleared and committed set. It then skips the header and
its data and goes on. It stops at the first line that is not a live header, or
at `dst + size`.

## 3. Ordering between the host and the device

The device has to keep two streams in order: its own commands and the host's
ordinary loads and stores to the same PM. Each command and host access gets an
8-bit arrival stamp from a single counter, so "older" can be decided across the
two queues. The stamp comparison is modular, with a window of 128 entries.
A command and a host access that arrive in the same cycle are ordered command
first.

**Command against command.** After translation, the command in the request
register is checked against the ranges of the command on every busy unit. It
conflicts if its write range overlaps any in-flight range, or if its read range
overlaps an in-flight write range. A conflicting command waits in the request
register until that unit is freed. Commands behind it in the FIFO wait too:
issue is strictly in order, one per cycle, to the lowest-numbered free unit.
A command also waits while no unit is free.

**Command against older host access.** A command also waits if a host access
that arrived *earlier* is still in the host queue and touches its ranges (a
write against either range, or a read against its write range). In this way a
host write issued before a log command reaches PM before the log copies the
data.

**Host access against commands.** The head of the host queue goes to PM only
if all of the following hold:
- it does not touch a range of a command still executing on this device (any
  access against a write range, or a write against a read range);
- it does not touch the command in the request register;
- it does not touch any older command still in the FIFO.

For the last check, each FIFO entry stores its physical ranges. They are
computed when the command arrives, through a second look-up port of the
translation table. Accesses behind a blocked head wait in order; nothing
overtakes in the host queue.

These rules mean the host never has to poll for a command. It issues "log A",
then overwrites A at once. The overwrite is held in the device until the old A
is safely in the log, and no other access stalls.

The address ranges used by every check are byte ranges rounded up to whole
64-byte lines, and a host access covers one line.

## 4. Ordering between devices: delayed synchronisation

When a persistent object is interleaved across two PM modules, the host's
memory controllers send the command to both devices, each with its own part
of the address range and the same tag, with the *duplicated* flag set. The log
is only complete when both devices have finished. The host, however, should
not wait for that; only the later deletion of the log must.

Each device's `multi_device_handler` keeps, for every unit, one completion bit
per device. For two devices, the pair {device 0, device 1} is the
synchronisation state of that unit's command:

| Bits | State | Meaning |
|---|---|---|
| 11 | C, all complete | idle, or the command has finished everywhere |
| 00 | E, executing | issued; neither device has finished |
| 10 | L, local complete | this device has finished, the other has not |
| 01 | R, remote complete | the other device has finished, this one has not |

L and R are named from device 0's point of view; on device 1 they swap. A
duplicated command takes a unit from C to E. The local unit's `done` sets this
device's bit, and the device then broadcasts the command's tag to the other
devices, at most one notice per cycle, lowest unit first. A notice received
from another device sets that device's bit on the unit holding the same tag.
The unit is freed only when every bit is set and its own notice has gone out.
Until then, its ranges stay in the in-flight access table. A later command on
those ranges therefore waits for the synchronisation; a commit that deletes
the log is the typical case.

The host, by contrast, is released as soon as the local part is done. The
host-side conflict check ignores units whose local bit is already set. An
update to the logged object therefore only waits for its own device's copy.

Two situations need care:

- **Early notices.** The other device may finish a command before this device
  has even issued it (its FIFO was shorter). Such a notice is kept in a
  256-entry bit vector per remote device, indexed by tag, and applied when the
  command is issued. The unit then goes straight from C to R.
- **Commands that are not duplicated.** These concern only one device. At
  issue, the other devices' bits are set, so the unit completes on its local
  `done` alone and sends no notice.

Tags must therefore be unique among the duplicated commands in flight, and
their number is limited to 256. Choosing tags is the host's job.

## 5. Address translation

Commands carry the program's virtual addresses. Persistent data live in pools
that are contiguous in both the virtual and the physical space, so one offset
per pool translates every address in it. When a pool is created, the host sends
an `op = 10` command carrying `physical_base − virtual_base` in `src`. The
offset is stored under the key {pool_id, thread_id}, and each command's `src`
and `dst` are translated by adding the offset for its key. The table is fully
associative: 48 entries, each with a 16-bit key and a 56-bit signed offset,
which is 432 bytes of state. Writing an existing key overwrites it; a new key
takes the lowest free entry. If the table is full, the write is dropped and the
sticky `amt_full` flag is raised. A command whose key is missing is used
untranslated.

## 6. The NearPM unit and its timing

A unit holds one command. It copies with its DMA engine and reads or writes
headers through its load/store unit; the two share the unit's PM port. The DMA
engine reads a burst of up to `BURST` = 8 lines back to back, keeping all of
them in flight, and then writes them out. A copy of L lines therefore takes
about ceil(L/8) × (2 × 8 + 2 × PM latency) cycles. With the 131-cycle
latency of the reference setup (436 ns at 300 MHz), a 4 kB page of 64 lines
takes about 2 200 cycles, or 7.4 µs. A single-line undo log on an idle device
takes three PM round trips: read the old line, write the copy, write the
header. That is 393 cycles plus a few cycles of queueing; the end-to-end test
checks that it stays within 40 cycles of 3 × 131.

The PM port uses a valid/ready request and an in-order response. Every
request, a write included, receives exactly one response, and a write's
response means the line is persistent. The arbiter allows 256 requests in
flight, enough to keep the port busy at this latency.

## 7. Parameters

| Parameter | Default | Where it comes from |
|---|---|---|
| devices (`NUM_DEV`) | 2 | reference setup |
| units per device (`NUM_UNITS`) | 4 | reference setup |
| request FIFO | 32 × 64 B = 2 kB | reference setup: a 2 kB FIFO of one-line commands |
| host queue | 64 × 64 B = 4 kB | reference setup gives 4 kB; the entry size is this design's |
| translation table | 48 entries = 432 B | reference setup gives 432 B; the entry split is this design's |
| in-flight request registers | 4 × 64 B = 256 B | reference setup |
| DMA burst | 8 lines | this design |
| tag width | 8 bits | this design |
| arbiter outstanding requests | 256 | this design |

The reference clock is 300 MHz and the reference PM latency is 436 ns. Both
appear only in the test models.

## 8. What is not in the RTL

- **Saving state on power failure.** In the reference design, the request
  FIFO, the translation table, the in-flight request registers and the host
  queue lie inside the persistence domain. On a power failure they are written
  to a reserved PM area using residual capacitor energy, and on recovery
  in-flight commands are replayed up to the last synchronisation point. The
  dump format, the reserved area and the replay procedure are not specified
  well enough to build, so this RTL has no save or restore path.
- **The host side.** This covers the CPU, the memory controllers that split an
  interleaved command between devices, and the transport of completion notices
  through the host. The top level connects the devices' notice wires directly.
- **The PM media and the on-chip bus.** The PM port is a simple line-wide
  valid/ready port rather than AXI. The testbenches use a behavioural PM model
  (`tb/pm_mem_model.sv`) with a fixed latency and in-order responses.

## 9. Departures and choices to be aware of

- Where the reference figure for translation stores "virtual − physical" but
  the text says the offset is *added* to the virtual address, this design
  follows the text: the stored offset is physical − virtual.
- Commands are issued strictly in order, so a stalled command blocks
  independent commands behind it. A scheduler that lets them overtake would be
  faster; the ordering rules would still hold.
- The host is held back only by commands executing *on this device*. Once a
  command's local part is in PM, host accesses to its ranges proceed even while
  the other device is still working.
- Header layout, opcodes, tags, arrival stamps and the early-notice vector are
  this design's own.
- The DMA engine and the load/store unit expect 64-byte-aligned addresses;
  the low six bits are dropped. Scatter-gather is not supported.
- Every command is handled at line granularity. A log of 10 bytes copies a
  whole line.

## 10. Verification

Each block has a self-checking testbench in `tb/`. Each one ends by printing
`TB_RESULT checks=N failures=M` and has a watchdog. Each one was also run
against a copy of its module with one deliberate bug, and it caught the bug.

| Testbench | What it shows |
|---|---|
| `tb_request_fifo`, `tb_host_rw_queue` | fill, back-pressure, order, random push/pop against a queue model |
| `tb_addr_map_table` | positive and negative offsets, overwrite, misses, overflow |
| `tb_inflight_access_table` | every conflict rule on the reference example ranges and on random ranges |
| `tb_multi_device_handler` | all synchronisation states, early notices, non-duplicated commands, broadcast order |
| `tb_metadata_generator` | every header field, deletion, live detection |
| `tb_load_store_unit` | reads and writes; latency = PM latency + 2 |
| `tb_dma_engine` | copies of 1 to 64 lines; cycle bound with no back-pressure; random back-pressure |
| `tb_nearpm_unit` | each operation's PM contents, including a multi-log commit walk |
| `tb_mem_arbiter` | random traffic from five requesters, data integrity, fairness |
| `tb_dispatcher` | translation, each stall kind, host accesses blocked and released |
| `tb_nearpm_device` | one device with the test playing the second: host ordering, delayed sync, early notice, latency |
| `tb_nearpm_system` | the full two-device top at default sizes (see below) |

`tb_nearpm_system` runs the top with no parameter overrides and a 131-cycle PM
model behind each device. It registers a pool on both devices. It then runs a
duplicated undo log of an interleaved object, with the host overwriting the
object immediately, followed by a commit. It runs a checkpoint that one device
finishes long before the other device receives it, six page copies on four
units, and a duplicated apply-log. It checks the PM contents after each step.
It counts how often each mechanism occurred:
- a command stalled by an in-flight conflict;
- a command stalled by an older host access;
- a command stalled because all units were busy;
- a host access held back;
- each of the E, L, R and C states;
- an early notice.

Any mechanism that never occurred counts as a failure.

`tb_nearpm_workloads` runs each mechanism the way the benchmark applications
use it, again on the full top at default sizes. Each device receives commands
and host writes in program order.
- **Undo logging:** 16 insert transactions. Each one logs a 128-byte object
  split over both devices, overwrites it at once, and commits.
- **Checkpointing:** four 4 kB pages on one device, each followed by a host
  write into the page.
- **Shadow paging:** four 4 kB pages on the other device, each followed by a
  host write into the new copy.

It checks every line afterwards and prints the cycles spent per transaction
and per page. At 131-cycle PM latency, these are about 400 cycles per logged
transaction and about 600 per page.

Because issue is strictly in order, the undo-log transactions in this
test run one after another. Each commit must wait for its own log, and
the next transaction's log waits behind that commit.

To run a testbench with plain Verilator:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
  rtl/nearpm_pkg.sv tb/tb_nearpm_system.sv --top-module tb_nearpm_system
./obj_dir/Vtb_nearpm_system
```

The testbenches rely on registers being reset, not on their initial values,
and use only `$urandom` for random stimulus.
