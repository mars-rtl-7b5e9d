# MARS: a page-grouping request reorderer for many-stream memory clients

A GPU runs many independent request streams at once. Each stream on its own
walks through memory with good locality: consecutive requests tend to hit the
same 4 KB page, and hence the same DRAM row. By the time the streams have been
merged through several levels of arbitration and a shared last-level cache,
that locality is gone: the memory controller sees requests to dozens of pages
interleaved one by one, opens a row for one or two column accesses, and closes
it again. Column accesses per activation (CAS/ACT) drop, and so does the
bandwidth actually delivered.

MARS (Memory Aware Reordered Source) restores the lost locality at the edge of
the client, before the memory controller. It keeps a large window of waiting
requests (512 by default), tracks which of them fall into the same physical
page, and sends all waiting requests of one page back to back. It needs no
knowledge of the DRAM address map: the 4 KB physical page is used as a proxy
for "same row", since whatever channel/rank/bank bits the memory map takes
from inside a page, requests of one page that land on the same rank share the
row address.

The scheme is the one proposed as MARS by Bhati, Dhawan, Gaur, Subramoney and
Wang. This is an independent RTL implementation of it: synthesizable
SystemVerilog for the MARS unit and the in-order queue that follows it toward
the memory controller, with self-checking testbenches. Where the proposal
leaves a detail open, the choice made here is marked as such below and in
each file's header.

## Where it sits

```
 shader cores -> arbitration (level 0 .. K) -> L3 misses
                                                   |
                                   in_valid/in_ready/in_req
                                                   v
   +-------------------------- mars_top -------------------------------+
   |  pending queue <-+                                                |
   |       |          | (page's set full)                              |
   |       v          |                                                |
   |  insertion control ----> page table (128 entries, 2-way)          |
   |       |                   head / tail / count per page            |
   |       |                          ^                                |
   |       v                          |                                |
   |  request buffer (512 slots, linked lists per page)                |
   |       |                          |                                |
   |       |      page order FIFO (pages in order of creation)         |
   |       v                          v                                |
   |  forwarding control: drain the current page, then the next        |
   |       |                                                           |
   |       v                                                           |
   |  in-order buffer (32)                                             |
   +-------|-----------------------------------------------------------+
           v  out_valid/out_ready/out_req
     memory controller
```

## The three structures

**Request buffer** (`mars_request_q`). 512 slots that are filled and emptied
in any order. A slot holds the request packet, a next pointer and a valid bit.
The valid bits double as the occupancy map; a priority encoder
(`mars_free_slot`) offers the lowest empty slot for the next insertion. The
next pointer chains the slot to the chronologically next request of the same
page, so each page's requests form a singly linked list threaded through the
buffer. The end of a list is marked by a separate NULL flag per slot.

**Page table** (`mars_page_list`). 128 entries, 64 sets of 2 ways, one entry
per 4 KB page that currently has requests in the buffer. An entry holds the
page number, the slot of the page's oldest request (head), the slot of its
newest (tail), how many requests the page has (count) and a valid bit. The set
is selected by the low 6 bits of the page number and the full page number is
compared in both ways. Because the table stores only head and tail, finding
all requests of a page never needs an associative search of the buffer.
An entry is freed when its count reaches zero.

**Page order FIFO** (`mars_fifo`, 128 deep). When a page entry is created its
index (set * 2 + way) is pushed here. The FIFO is therefore ordered by the
arrival of each page's first waiting request, and its head is always the page
holding the oldest request in the buffer. This is how the unit chooses the
next page without searching.

Two smaller FIFOs complete the unit: the **pending queue** (16 requests) for
requests whose page is new while the page table set it maps to is full, and
the **in-order buffer** (32 requests) between MARS and the memory controller.

## Insertion

One page-table lookup is made per clock cycle (`mars_insert_ctrl`). The
request looked up is the head of the pending queue if there is one and it is
not blocked (see below), otherwise the new request on `in_*`. In the same
cycle:

| lookup result | action |
|---|---|
| page found | write the request into the offered empty slot *n*; set the next pointer of the page's old tail to *n*; tail = *n*, count + 1 |
| page not found, a way of its set is free | write the request into slot *n*; create the entry (page, head = tail = *n*, count = 1); push the entry index into the page order FIFO |
| page not found, set full | put the request in the pending queue |

The request waits (`in_ready` low) when the buffer has no empty slot. A new
request also waits in any cycle in which the pending head is being retried,
since the lookup port is busy.

**Draining the pending queue.** The proposal names the pending queue but does
not say how it empties; the rules here are this design's own.

* The pending head is retried with priority. If its set is still full, the
  head is marked *blocked* and is not retried until some page entry is freed
  (any entry: this needs no record of which set the head waits for, and a
  retry that fails again costs only one cycle). While the
  head is blocked, new requests are looked up and inserted as usual.
* A new request whose table set already has a pending request goes to the
  pending queue even if its page is in the table or a way is free. A counter
  per set tracks how many pending requests map to it. Since all requests of
  one page map to one set, this rule means a request never overtakes an
  older request to the same page, so same-address order (a read and a later
  write of one line, say) is kept end to end.
* A request that must go to a full pending queue stalls the input. This is
  the one place where a single contended set holds up everything behind it.

## Forwarding

The forwarding side (`mars_forward_ctrl`) holds a *current page* (a page
table index). Each cycle the memory side can take a request, it:

1. reads the current page's head slot from the page table,
2. sends that slot's request to the in-order buffer and clears its valid bit,
3. decrements the page's count; if it was the last request, frees the entry
   and loads the next page from the page order FIFO in the same edge;
   otherwise moves the head to the request's next pointer.

So all requests of a page leave back to back at one per cycle, and the switch
to the next page costs no cycle. Only when there is no current page at all
(the unit ran empty) does loading a page take one idle cycle.

## Insertion and forwarding in the same cycle

Both sides work every cycle on shared state, which is the subtle part of the
design. The cases and how they are resolved:

* **Same page appended and forwarded.** The page table merges the two
  updates: count stays the same, tail moves to the new slot and head to the
  next pointer. This is safe because with count > 1 the head and tail are
  different slots, so the link written to the old tail is not the pointer
  being followed.
* **Same page, last request leaving.** If the forwarded request is the page's
  last (count = 1) and a new request for that page arrives in the same cycle,
  the new request waits one cycle (the `drain_wait` event). In the next cycle
  the entry is gone and the request creates a fresh entry, which goes to the
  back of the page order FIFO. Without this wait the new request would be
  linked behind a slot that is being freed.
* **Slot freed and slot allocated.** The empty slot offered for insertion is
  computed from the valid bits before the edge, so it can never be the slot
  the forwarding side is releasing.
* **Entry freed and entry created.** Likewise, a new entry only goes into a
  way that was already free before the edge.
* **Page order FIFO.** It can be pushed and popped in the same cycle. It never
  overflows: it holds only indices of live entries other than the current
  page.

## Interface and timing

`mars_top` ports, all synchronous to `clk`, reset by `rst_n` (asynchronous,
active low):

| port | dir | width | meaning |
|---|---|---|---|
| `in_valid`, `in_ready`, `in_req` | in, out, in | 1, 1, 57 | request from the client, valid/ready handshake |
| `out_valid`, `out_ready`, `out_req` | out, in, out | 1, 1, 57 | request to the memory controller, valid/ready |

A request (`mars_pkg::mars_req_t`) is `{addr[47:0], write, id[7:0]}`. Its page
is `addr[47:12]`. Write data is expected to travel beside the request, matched
by `id`; it does not pass through the reorder buffer.

* Throughput: one request in and one out per cycle.
* Latency through an idle unit: `out_valid` rises three clock edges after the
  edge that accepted the request (buffer write, load into the forwarding side,
  in-order buffer).
* `in_ready` depends combinationally on `in_req` (the page lookup), on the
  pending queue and on the forwarding side's state. It also depends on the
  in-order buffer being full, through the drain-wait rule, but never directly
  on `out_ready`.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `N` | 512 | request buffer slots (the lookahead window) |
| `M` | 128 | page table entries, also the page order FIFO depth |
| `WAYS` | 2 | page table associativity |
| `PEND_DEPTH` | 16 | pending queue depth |
| `MEMBUF_DEPTH` | 32 | in-order buffer depth |

`N`, `M` and `WAYS` are the configuration the MARS proposal evaluates. The two
queue depths, the 48-bit address and the 8-bit tag are this implementation's
choices. `M / WAYS` must be a power of two (the set index is a bit field).

At the defaults the unit synthesises (generic, before technology mapping) to
about 9.2 k flip-flop bits, 37 k bits of memory arrays (the request buffer
payload and the FIFOs) and 6.2 k word-level cells. Most of the flip-flops are
the page table (128 entries of 36 + 9 + 9 + 10 bits plus valid bits), then
the 512 valid and 512 NULL bits of the request buffer and the 64 per-set
pending counters.

## How it follows the proposal, and where it chooses

Taken from the MARS proposal: the three structures and their fields, the
linked list with head/tail/count per page, the occupancy map, the
set-associative page table indexed by page number, the page order FIFO, the
insertion decision (found / not found / table full into a pending queue), the
forwarding steps, oldest-page-first selection, 4 KB pages, and the sizes
512 / 128 / 2-way.

Choices made here, where the proposal is silent:

* Register arrays with combinational reads instead of SRAM macros, so that a
  lookup and an update fit in one cycle. An SRAM build would need a
  pipelined version of both algorithms.
* "Table full" is evaluated per set, the only meaningful test for a
  set-associative table. The set index is the low page-number bits.
* The page order FIFO holds page table indices rather than page numbers; an
  index names the entry directly.
* An entry is freed when its count reaches zero.
* The pending queue: its depth, the blocked-head retry, the per-set rule
  that keeps same-page order, and back-pressure when it is full.
* The drain-wait rule above, the lowest-free-slot choice, valid/ready
  handshakes, the reset, the request packet format, the in-order buffer
  depth.

Not covered: the GPU, its caches and arbitration, the memory controller and
the DRAM are outside this RTL. There is no timeout or age limit: a page that
keeps receiving requests while it is the current page keeps being served, and
requests of other pages wait behind it (the proposal describes no such limit
either).

## Files

| file | contents |
|---|---|
| `rtl/mars_pkg.sv` | request packet type, address and page widths, `page_of()` |
| `rtl/mars_top.sv` | the unit: all structures and both controllers wired together |
| `rtl/mars_request_q.sv` | request buffer with occupancy map |
| `rtl/mars_free_slot.sv` | lowest-free-slot priority encoder |
| `rtl/mars_page_list.sv` | set-associative page table |
| `rtl/mars_fifo.sv` | FIFO used as page order queue, pending queue and in-order buffer |
| `rtl/mars_insert_ctrl.sv` | insertion decision and pending-queue drain policy |
| `rtl/mars_forward_ctrl.sv` | current page register and forwarding steps |

To change the address width or tag width, edit `mars_pkg`; everything else
follows from `mars_req_t`. To change the window or table size, set the
parameters of `mars_top`.

## Testbenches

All in `tb/`, self-checking, each ending with a `TB_RESULT checks=N
failures=M` line and guarded by a watchdog:

| testbench | what it checks |
|---|---|
| `tb_mars_fifo` | FIFO against a queue model, at page-order-queue size and at a small odd depth, including push+pop when full |
| `tb_mars_request_q` | full-size buffer: lowest-free slot, occupancy map, reads, links, filling to full |
| `tb_mars_page_list` | full-size table against a model: hits, free ways, full sets, merged same-entry updates, freeing |
| `tb_mars_insert_ctrl` | every output of the insertion decision over random inputs, against a modelled pending queue; hit, new page, set full, pending retry, blocked head passed by new requests, set-pending diversion, both waits |
| `tb_mars_forward_ctrl` | exact output order of pre-built linked lists, releases and table updates, one request per cycle |
| `tb_mars_top` | whole unit at default size: 3-edge latency; an exact reorder sequence; one request per cycle; buffer-full stall; random stress with per-page order and conservation; every mechanism counted (hit, new page, pending in/out, new request passing a blocked pending head, buffer full, drain wait, page switch, input stall, memory back-pressure) |
| `tb_mars_workloads` | five synthetic workloads shaped after read-only, write-only and mixed texture / depth / stencil / colour / hierarchical-Z streams |

Run one with Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl \
  rtl/mars_pkg.sv rtl/mars_free_slot.sv rtl/mars_request_q.sv \
  rtl/mars_page_list.sv rtl/mars_fifo.sv rtl/mars_insert_ctrl.sv \
  rtl/mars_forward_ctrl.sv rtl/mars_top.sv tb/tb_mars_top.sv \
  --top-module tb_mars_top
./obj_dir/Vtb_mars_top
```

The testbenches rely on the random initial values Verilator gives
uninitialised state being harmless: the design resets all control state and
never reads an array entry before writing it.

### What the workload test shows

Each workload is 3000 requests from 16 sources per stream, merged by a random
arbiter, with the memory side accepting on half of the cycles. Two measures
are taken on the request order at the unit's input (what memory would see
without MARS) and at its output. The page run is the number of consecutive
requests to one 4 KB page. CAS/ACT comes from a trace-level row model: 2
channels x 8 banks, one open row per bank, channel = address bit 8, bank =
bits 15:13, row = bits 47:16.

| workload | streams | page run in | page run out | CAS/ACT in | CAS/ACT out |
|---|---|---|---|---|---|
| WL1 | 1 read stream | 1.06 | 18.6 | 2.06 | 14.9 |
| WL2 | 2 streams, read and write | 1.03 | 2.0 | 1.41 | 1.82 |
| WL3 | 1 write stream | 1.06 | 16.5 | 1.86 | 13.4 |
| WL4 | 2 read streams | 1.04 | 8.1 | 1.43 | 5.23 |
| WL5 | 1 stream, mixed read/write | 1.07 | 11.5 | 1.82 | 8.57 |

The results depend strongly on how the sources' pages fall onto the 64
table sets. With 16 sources the window holds about 30 requests per page and
pages leave whole. With 32 sources, three live pages land in one 2-way set
much more often. The pending queue then fills with requests for those sets
and stalls the input, and the window shrinks. The two-stream workloads
suffer most. Other random seeds, or another pending queue depth, move these
numbers a lot.

These are synthetic stand-ins with no DRAM timing and no reordering inside
the memory controller. They show that the grouping works; they do not
predict bandwidth, and they are not comparable with full-system results.
